// dnn_control: the control unit ("AXI DNN Control") of either accelerator.
//
// An AXI4-Lite slave (32-bit data, 6-bit byte address) through which the processor
// sets up and starts one layer at a time. It holds the layer's dimensions (s_in
// inputs, s_out neurons), the activation function, the batch size and an interrupt
// enable, and reports busy/done, a cycle counter and the design constants PAR_A and
// PAR_B (M and n for the batch design, m and r for the pruning design). Register map
// (see dnn_pkg): 0x00 CTRL (write: bit0 start, bit1 reset bank role), 0x04 STATUS
// (bit0 busy, bit1 done, bit2 role), 0x08 S_IN, 0x0C S_OUT, 0x10 ACT, 0x14 BATCH,
// 0x18 IRQEN, 0x1C CYCLES, 0x20 INFO = {PAR_B[15:0], PAR_A[15:0]}.
// `start` pulses for one cycle when bit0 of CTRL is written while idle. When the
// datapath signals `done`, busy clears, the sticky done bit sets (raising `irq` if
// enabled) and `role` flips, so that the outputs of this layer are the inputs of the
// next. A write is taken when address and data are both valid; the response follows
// in the next cycle. A read answers in the cycle after the address is taken.
// That the unit holds metadata, activation type and batch size and informs the
// software of events is the paper's; the register map and protocol details are this
// design's own. The responses are always OKAY, so bresp and rresp are constant zero
// outputs.
module dnn_control
  import dnn_pkg::*;
#(
  parameter int unsigned PAR_A = 90,
  parameter int unsigned PAR_B = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [5:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [5:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // towards the datapath
  output logic        start,
  output logic [15:0] s_in,
  output logic [15:0] s_out,
  output logic [15:0] n_batch,
  output act_sel_t    act_sel,
  output logic        role,
  input  logic        done,
  output logic        busy,
  output logic        irq
);

  // registers are at most 16 bits wide; the upper write-data bits are ignored
  logic unused_wdata;
  assign unused_wdata = ^s_axi_wdata[31:16];

  logic        wr_go, rd_go, done_flag, irq_en;
  logic [31:0] cycles;

  assign wr_go         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_bresp   = 2'b00;
  assign rd_go         = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_go;
  assign s_axi_rresp   = 2'b00;
  assign irq           = done_flag && irq_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      start        <= 1'b0;
      s_in         <= '0;
      s_out        <= '0;
      n_batch      <= 16'd1;
      act_sel      <= ACT_RELU;
      irq_en       <= 1'b0;
      role         <= 1'b0;
      busy         <= 1'b0;
      done_flag    <= 1'b0;
      cycles       <= '0;
    end else begin
      start <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (busy) cycles <= cycles + 32'd1;
      if (done && busy) begin
        busy      <= 1'b0;
        done_flag <= 1'b1;
        role      <= ~role;
      end
      if (wr_go) begin
        s_axi_bvalid <= 1'b1;
        unique case (s_axi_awaddr)
          REG_CTRL: begin
            if (s_axi_wdata[1] && !busy) role <= 1'b0;
            if (s_axi_wdata[0] && !busy) begin
              start     <= 1'b1;
              busy      <= 1'b1;
              done_flag <= 1'b0;
              cycles    <= '0;
            end
          end
          REG_S_IN:  s_in    <= s_axi_wdata[15:0];
          REG_S_OUT: s_out   <= s_axi_wdata[15:0];
          REG_ACT:   act_sel <= act_sel_t'(s_axi_wdata[0]);
          REG_BATCH: n_batch <= s_axi_wdata[15:0];
          REG_IRQEN: irq_en  <= s_axi_wdata[0];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_go) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          REG_STATUS: s_axi_rdata <= {29'd0, role, done_flag, busy};
          REG_S_IN:   s_axi_rdata <= {16'd0, s_in};
          REG_S_OUT:  s_axi_rdata <= {16'd0, s_out};
          REG_ACT:    s_axi_rdata <= {31'd0, act_sel};
          REG_BATCH:  s_axi_rdata <= {16'd0, n_batch};
          REG_IRQEN:  s_axi_rdata <= {31'd0, irq_en};
          REG_CYCLES: s_axi_rdata <= cycles;
          REG_INFO:   s_axi_rdata <= {16'(PAR_B), 16'(PAR_A)};
          default:    s_axi_rdata <= '0;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid)
    else $error("dnn_control: write response dropped");
  assert property (@(posedge clk) disable iff (!rst_n) s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata))
    else $error("dnn_control: read data changed while waiting");

endmodule
