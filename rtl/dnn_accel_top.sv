// dnn_accel_top: both fully-connected DNN inference accelerators side by side.
//
// The batch-processing accelerator (B_M MAC lanes, batches of up to B_NB samples)
// reuses each transferred weight row for every sample of a batch; the pruning
// accelerator (P_M sparse row coprocessors with P_R multipliers each) streams only
// the weights left after pruning, each with the count of zeros before it. Each has
// its own AXI4-Lite control port and interrupt (towards the processor's general
// purpose port and interrupt lines), its own activation memory port, and four 64-bit
// weight streams, the outputs of four DMA engines on the memory-side ports. The
// processor, the DMA engines and the DDR3 controller are outside this RTL. On the
// FPGA the two accelerators were separate configurations; here they share one clock
// and reset so that both can be built and simulated from one top. The paper ran the
// memory side at 133 MHz and the processing side at 100 MHz; this design uses one
// clock for everything (its own simplification).
// Lint note: rst_n is an asynchronous reset for the flip-flops and is also sampled
// synchronously by the `disable iff` clauses of the assertions in the submodules,
// which a linter reports as a net used both ways; that is intended and harmless.
// The AXI response outputs are constant OKAY.
module dnn_accel_top
  import dnn_pkg::*;
#(
  parameter int unsigned B_M     = 90,
  parameter int unsigned B_NB    = 16,
  parameter int unsigned B_DEPTH = 2048,
  parameter int unsigned B_FIFO  = 2048,
  parameter int unsigned P_M     = 4,
  parameter int unsigned P_R     = 3,
  parameter int unsigned P_DEPTH = 2048,
  parameter int unsigned P_FIFO  = 512,
  localparam int unsigned B_SW   = (B_NB > 1) ? $clog2(B_NB) : 1,
  localparam int unsigned B_AW   = $clog2(B_DEPTH),
  localparam int unsigned P_AW   = $clog2(P_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ---- batch-processing accelerator
  input  logic [5:0]    b_s_axi_awaddr,
  input  logic          b_s_axi_awvalid,
  input  logic [31:0]   b_s_axi_wdata,
  input  logic          b_s_axi_wvalid,
  input  logic          b_s_axi_bready,
  input  logic [5:0]    b_s_axi_araddr,
  input  logic          b_s_axi_arvalid,
  input  logic          b_s_axi_rready,
  output logic          b_s_axi_awready,
  output logic          b_s_axi_wready,
  output logic [1:0]    b_s_axi_bresp,
  output logic          b_s_axi_bvalid,
  output logic          b_s_axi_arready,
  output logic [31:0]   b_s_axi_rdata,
  output logic [1:0]    b_s_axi_rresp,
  output logic          b_s_axi_rvalid,
  output logic          b_irq,
  input  logic              b_ps_en,
  input  logic              b_ps_we,
  input  logic [B_SW-1:0]   b_ps_sample,
  input  logic [B_AW-1:0]   b_ps_addr,
  input  q7_8_t             b_ps_wdata,
  output q7_8_t             b_ps_rdata,
  input  logic [DMA_W-1:0]  b_dma_data  [4],
  input  logic [3:0]        b_dma_valid,
  output logic [3:0]        b_dma_ready,
  output logic              b_ev_stall_weights,
  output logic              b_ev_stall_result,
  // ---- pruning accelerator
  input  logic [5:0]    p_s_axi_awaddr,
  input  logic          p_s_axi_awvalid,
  input  logic [31:0]   p_s_axi_wdata,
  input  logic          p_s_axi_wvalid,
  input  logic          p_s_axi_bready,
  input  logic [5:0]    p_s_axi_araddr,
  input  logic          p_s_axi_arvalid,
  input  logic          p_s_axi_rready,
  output logic          p_s_axi_awready,
  output logic          p_s_axi_wready,
  output logic [1:0]    p_s_axi_bresp,
  output logic          p_s_axi_bvalid,
  output logic          p_s_axi_arready,
  output logic [31:0]   p_s_axi_rdata,
  output logic [1:0]    p_s_axi_rresp,
  output logic          p_s_axi_rvalid,
  output logic          p_irq,
  input  logic              p_ps_en,
  input  logic              p_ps_we,
  input  logic [P_AW-1:0]   p_ps_addr,
  input  q7_8_t             p_ps_wdata,
  output q7_8_t             p_ps_rdata,
  input  logic [DMA_W-1:0]  p_dma_data  [P_M],
  input  logic [P_M-1:0]    p_dma_valid,
  output logic [P_M-1:0]    p_dma_ready
);

  batch_accel #(.M(B_M), .NB(B_NB), .DEPTH(B_DEPTH), .FIFO_DEPTH(B_FIFO)) u_batch (
    .clk, .rst_n,
    .s_axi_awaddr(b_s_axi_awaddr),
    .s_axi_awvalid(b_s_axi_awvalid),
    .s_axi_wdata(b_s_axi_wdata),
    .s_axi_wvalid(b_s_axi_wvalid),
    .s_axi_bready(b_s_axi_bready),
    .s_axi_araddr(b_s_axi_araddr),
    .s_axi_arvalid(b_s_axi_arvalid),
    .s_axi_rready(b_s_axi_rready),
    .s_axi_awready(b_s_axi_awready),
    .s_axi_wready(b_s_axi_wready),
    .s_axi_bresp(b_s_axi_bresp),
    .s_axi_bvalid(b_s_axi_bvalid),
    .s_axi_arready(b_s_axi_arready),
    .s_axi_rdata(b_s_axi_rdata),
    .s_axi_rresp(b_s_axi_rresp),
    .s_axi_rvalid(b_s_axi_rvalid),
    .irq(b_irq),
    .ps_en(b_ps_en), .ps_we(b_ps_we), .ps_sample(b_ps_sample), .ps_addr(b_ps_addr),
    .ps_wdata(b_ps_wdata), .ps_rdata(b_ps_rdata),
    .dma_data(b_dma_data), .dma_valid(b_dma_valid), .dma_ready(b_dma_ready),
    .ev_stall_weights(b_ev_stall_weights), .ev_stall_result(b_ev_stall_result)
  );

  prune_accel #(.M(P_M), .R(P_R), .DEPTH(P_DEPTH), .FIFO_DEPTH(P_FIFO)) u_prune (
    .clk, .rst_n,
    .s_axi_awaddr(p_s_axi_awaddr),
    .s_axi_awvalid(p_s_axi_awvalid),
    .s_axi_wdata(p_s_axi_wdata),
    .s_axi_wvalid(p_s_axi_wvalid),
    .s_axi_bready(p_s_axi_bready),
    .s_axi_araddr(p_s_axi_araddr),
    .s_axi_arvalid(p_s_axi_arvalid),
    .s_axi_rready(p_s_axi_rready),
    .s_axi_awready(p_s_axi_awready),
    .s_axi_wready(p_s_axi_wready),
    .s_axi_bresp(p_s_axi_bresp),
    .s_axi_bvalid(p_s_axi_bvalid),
    .s_axi_arready(p_s_axi_arready),
    .s_axi_rdata(p_s_axi_rdata),
    .s_axi_rresp(p_s_axi_rresp),
    .s_axi_rvalid(p_s_axi_rvalid),
    .irq(p_irq),
    .ps_en(p_ps_en), .ps_we(p_ps_we), .ps_addr(p_ps_addr),
    .ps_wdata(p_ps_wdata), .ps_rdata(p_ps_rdata),
    .dma_data(p_dma_data), .dma_valid(p_dma_valid), .dma_ready(p_dma_ready)
  );

endmodule
