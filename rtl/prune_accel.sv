// prune_accel: the pruning accelerator.
//
// Computes one fully-connected layer of a pruned network for one sample. M sparse
// row coprocessors work in parallel, each on its own rows (p, p+M, ...) and with its
// own weight stream (one DMA engine each) and its own I/O memory holding R redundant
// copies of the input activations, so that its R multipliers can read R scattered
// inputs per cycle. Each coprocessor has its own activation stage; the merger
// collects the results in row order and writes them into the output bank of all M
// I/O memories. When the last row is written the control unit reports done and
// flips the bank roles. The processor writes a sample into all I/O memories at once
// and reads results from the first one. The structure follows the paper's pruning
// datapath with m = 4 and r = 3; the row split between coprocessors, the port
// protocols and the single clock are this design's choices.
module prune_accel
  import dnn_pkg::*;
#(
  parameter int unsigned M          = 4,
  parameter int unsigned R          = 3,
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned FIFO_DEPTH = 512,
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
  input  logic [AW-1:0]     ps_addr,
  input  q7_8_t             ps_wdata,
  output q7_8_t             ps_rdata,
  // one DMA weight stream per coprocessor (HP0..HP3)
  input  logic [DMA_W-1:0]  dma_data  [M],
  input  logic [M-1:0]      dma_valid,
  output logic [M-1:0]      dma_ready
);

  logic        start, role, done, ctrl_busy;
  logic [15:0] s_in, s_out, n_batch;
  act_sel_t    act_sel;

  dnn_control #(.PAR_A(M), .PAR_B(R)) u_ctrl (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr,
    .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid,
    .s_axi_rready,
    .start, .s_in, .s_out, .n_batch, .act_sel, .role, .done, .busy(ctrl_busy), .irq
  );

  logic          wr_en;
  logic [AW-1:0] wr_addr;
  q7_8_t         wr_data;
  q7_8_t         act_data  [M];
  logic [M-1:0]  act_valid, act_ready, cop_busy;
  q7_8_t         ps_rd     [M];

  for (genvar p = 0; p < M; p++) begin : g_pu
    logic [AW-1:0] mem_addr [R];
    q7_8_t         mem_data [R];
    q15_16_t       res_data;
    logic          res_valid, res_ready;
    logic [15:0]   n_rows;

    assign n_rows = (s_out > 16'(p)) ? 16'((32'(s_out) - p + M - 1) / M) : 16'd0;

    io_memory #(.R(R), .DEPTH(DEPTH)) u_iomem (
      .clk, .rst_n, .role,
      .rd_addr(mem_addr), .rd_data(mem_data),
      .wr_en, .wr_addr, .wr_data,
      .ps_en, .ps_we, .ps_addr, .ps_wdata, .ps_rdata(ps_rd[p])
    );

    sparse_row_coproc #(.R(R), .DEPTH(DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_cop (
      .clk, .rst_n, .start, .s_in, .n_rows, .busy(cop_busy[p]),
      .s_data(dma_data[p]), .s_valid(dma_valid[p]), .s_ready(dma_ready[p]),
      .mem_addr, .mem_data,
      .res_data, .res_valid, .res_ready
    );

    prune_act_stage u_act (
      .clk, .rst_n, .sel(act_sel),
      .in_data(res_data), .in_valid(res_valid), .in_ready(res_ready),
      .out_data(act_data[p]), .out_valid(act_valid[p]), .out_ready(act_ready[p])
    );
  end

  merger #(.M(M), .AW(AW)) u_merge (
    .clk, .rst_n, .start, .s_out,
    .in_data(act_data), .in_valid(act_valid), .in_ready(act_ready),
    .wr_en, .wr_addr, .wr_data, .done
  );

  assign ps_rdata = ps_rd[0];

  // batch size and per-unit busy are not used by this design
  logic unused;
  assign unused = ^{n_batch, cop_busy, ctrl_busy};

endmodule
