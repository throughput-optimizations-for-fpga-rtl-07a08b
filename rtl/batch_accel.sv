// batch_accel: the batch-processing accelerator.
//
// Computes one fully-connected layer a_i = phi(sum_k w_ik * a_k) for a batch of up to
// NB samples at a time, reusing every transferred weight row for all samples of the
// batch. The processor loads the samples through the memory port, writes s_in, s_out,
// batch size and activation into the control unit and starts the layer; the weights
// arrive on four 64-bit DMA streams. The batch memory supplies the inputs, the matrix
// coprocessor (M MAC lanes) computes M neurons of one sample every s_in cycles, the
// PISO chain serialises the M sums into the single activation unit, and the output
// BRAM controller writes neuron i of sample b into sample memory b of the output
// bank at address i (neurons at or past s_out, the zero rows of the last section,
// are dropped). The control unit reports done once the last activation is written,
// and flips the bank roles so the next layer reads this layer's outputs. The
// structure follows the paper's batch datapath; the single clock, the port
// protocols and the done condition are this design's choices.
module batch_accel
  import dnn_pkg::*;
#(
  parameter int unsigned M          = 90,
  parameter int unsigned NB         = 16,
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned FIFO_DEPTH = 2048,
  localparam int unsigned SW        = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite control port (M_GP0)
  input  logic [5:0]        s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [5:0]        s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic              irq,
  // activation memory port (M_GP1)
  input  logic              ps_en,
  input  logic              ps_we,
  input  logic [SW-1:0]     ps_sample,
  input  logic [AW-1:0]     ps_addr,
  input  q7_8_t             ps_wdata,
  output q7_8_t             ps_rdata,
  // four DMA weight streams (HP0..HP3)
  input  logic [DMA_W-1:0]  dma_data  [4],
  input  logic [3:0]        dma_valid,
  output logic [3:0]        dma_ready,
  // events, for monitoring
  output logic              ev_stall_weights,
  output logic              ev_stall_result
);

  logic          start, role, ctrl_busy, done, cop_busy, cop_idle;
  logic [15:0]   s_in, s_out, n_batch;
  act_sel_t      act_sel;

  dnn_control #(.PAR_A(M), .PAR_B(NB)) u_ctrl (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr,
    .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid,
    .s_axi_rready,
    .start, .s_in, .s_out, .n_batch, .act_sel, .role, .done, .busy(ctrl_busy), .irq
  );

  logic          mem_rd_en, wr_en;
  logic [SW-1:0] mem_rd_sample, wr_sample;
  logic [AW-1:0] mem_rd_addr, wr_addr;
  q7_8_t         mem_rd_data, act_out;

  batch_memory #(.NB(NB), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n, .role,
    .rd_en(mem_rd_en), .rd_sample(mem_rd_sample), .rd_addr(mem_rd_addr), .rd_data(mem_rd_data),
    .wr_en, .wr_sample, .wr_addr, .wr_data(act_out),
    .ps_en, .ps_we, .ps_sample, .ps_addr, .ps_wdata, .ps_rdata
  );

  q15_16_t       res [M];
  logic          res_valid, res_ready;
  logic [15:0]   res_base;
  logic [SW-1:0] res_sample;

  batch_coprocessor #(.M(M), .NB(NB), .FIFO_DEPTH(FIFO_DEPTH), .DEPTH(DEPTH)) u_cop (
    .clk, .rst_n, .start, .s_in, .s_out, .n_batch, .busy(cop_busy), .idle(cop_idle),
    .dma_data, .dma_valid, .dma_ready,
    .mem_rd_en, .mem_rd_sample, .mem_rd_addr, .mem_rd_data,
    .res, .res_valid, .res_base, .res_sample, .res_ready,
    .stall_weights(ev_stall_weights), .stall_result(ev_stall_result)
  );

  q15_16_t       ser_data;
  logic          ser_valid, act_valid;
  logic [15:0]   ser_index, idx_q;
  logic [SW-1:0] ser_sample, samp_q;

  multi_piso #(.M(M), .NW(16), .SW(SW)) u_piso (
    .clk, .rst_n,
    .par_in(res), .par_valid(res_valid), .par_base(res_base), .par_sample(res_sample),
    .par_ready(res_ready),
    .ser_data, .ser_valid, .ser_index, .ser_sample
  );

  activation_unit u_act (
    .clk, .rst_n, .in_valid(ser_valid), .z(ser_data), .sel(act_sel),
    .out_valid(act_valid), .a(act_out)
  );

  // Output BRAM controller: neuron index and sample travel alongside the activation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q  <= '0;
      samp_q <= '0;
    end else begin
      idx_q  <= ser_index;
      samp_q <= ser_sample;
    end
  end

  assign wr_en     = act_valid && (idx_q < s_out);
  assign wr_sample = samp_q;
  assign wr_addr   = AW'(idx_q);

  assign done = ctrl_busy && !start && cop_idle && !ser_valid && !act_valid;

  // unused status
  logic unused;
  assign unused = cop_busy;

endmodule
