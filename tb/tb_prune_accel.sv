// tb_prune_accel: runs a pruned two-layer network (50 x 23 x 7, ReLU then sigmoid,
// about 70 % and 40 % of the weights zero) through the pruning accelerator at m = 4,
// r = 3: sample in through the memory port, set-up and start over AXI4-Lite, each
// coprocessor's rows (p, p+4, ...) encoded in the sparse format on its own DMA
// stream, wait for the interrupt, results out after the bank swap. Results are
// compared with a fixed-point reference; the layer time must stay close to the number
// of data words per coprocessor (one word, three MACs, per cycle).
module tb_prune_accel;
  import dnn_pkg::*;
  localparam int M = 4, R = 3, DEPTH = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_master bus (clk);
  logic irq, ps_en = 0, ps_we = 0;
  logic [6:0] ps_addr = 0;
  q7_8_t ps_wdata = 0, ps_rdata;
  logic [63:0] dma_data [M];
  logic [M-1:0] dma_valid = 0, dma_ready;
  int checks = 0, failures = 0;

  `include "act_ref.svh"
  `include "sparse_encode.svh"

  prune_accel #(.M(M), .R(R), .DEPTH(DEPTH), .FIFO_DEPTH(16)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(bus.awaddr), .s_axi_awvalid(bus.awvalid), .s_axi_awready(bus.awready),
    .s_axi_wdata(bus.wdata), .s_axi_wvalid(bus.wvalid), .s_axi_wready(bus.wready),
    .s_axi_bresp(bus.bresp), .s_axi_bvalid(bus.bvalid), .s_axi_bready(bus.bready),
    .s_axi_araddr(bus.araddr), .s_axi_arvalid(bus.arvalid), .s_axi_arready(bus.arready),
    .s_axi_rdata(bus.rdata), .s_axi_rresp(bus.rresp), .s_axi_rvalid(bus.rvalid),
    .s_axi_rready(bus.rready), .irq,
    .ps_en, .ps_we, .ps_addr, .ps_wdata, .ps_rdata,
    .dma_data, .dma_valid, .dma_ready
  );

  q7_8_t W [64][64];
  q7_8_t X [64], Y [64];
  logic [63:0] stream [M][$];

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dma_stream(input int p);
    foreach (stream[p][i]) begin
      @(negedge clk);
      dma_data[p] = stream[p][i]; dma_valid[p] = 1;
      #1;
      while (!dma_ready[p]) @(negedge clk);
    end
    @(negedge clk); dma_valid[p] = 0;
  endtask

  task automatic layer(input int si, input int so, input int zero_pct, input bit sig);
    logic [31:0] d;
    int n = 0, maxw = 0;
    q7_8_t row [];
    row = new[si];
    for (int p = 0; p < M; p++) stream[p].delete();
    for (int r = 0; r < so; r++) begin
      automatic q15_16_t z = 0;
      for (int k = 0; k < si; k++) begin
        W[r][k] = (int'($urandom % 100) < zero_pct) ? 16'sh0 : q7_8_t'($urandom) >>> 6;
        row[k] = W[r][k];
        z += q15_16_t'(W[r][k]) * q15_16_t'(X[k]);
      end
      Y[r] = act_ref(z, sig);
      sparse_encode(row, si, stream[r % M]);
    end
    for (int p = 0; p < M; p++) if (stream[p].size() > maxw) maxw = stream[p].size();
    bus.write(REG_S_IN, si); bus.write(REG_S_OUT, so); bus.write(REG_ACT, {31'd0, sig});
    bus.write(REG_CTRL, 1);
    fork
      dma_stream(0); dma_stream(1); dma_stream(2); dma_stream(3);
    join
    while (!irq && n < 100000) begin @(negedge clk); n++; end
    chk(irq, "interrupt at layer end");
    bus.read(REG_CYCLES, d);
    chk(int'(d) <= 2 * maxw + 20, $sformatf("cycles %0d for at most %0d words per unit", d, maxw));
    $display("layer %0dx%0d: %0d cycles, at most %0d words per coprocessor", si, so, d, maxw);
    for (int r = 0; r < so; r++) X[r] = Y[r];
  endtask

  initial begin
    logic [31:0] d;
    foreach (dma_data[j]) dma_data[j] = 0;
    bus.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    bus.write(REG_IRQEN, 1);
    bus.read(REG_INFO, d);
    chk(d == {16'd3, 16'd4}, "design constants m=4, r=3");
    for (int k = 0; k < 50; k++) begin
      X[k] = q7_8_t'($urandom) >>> 4;
      @(negedge clk); ps_en = 1; ps_we = 1; ps_addr = 7'(k); ps_wdata = X[k];
    end
    @(negedge clk); ps_en = 0; ps_we = 0;
    layer(50, 23, 70, 0);
    layer(23, 7, 40, 1);
    for (int r = 0; r < 7; r++) begin
      @(negedge clk); ps_en = 1; ps_addr = 7'(r);
      @(negedge clk); ps_en = 0;
      chk(ps_rdata === Y[r], $sformatf("neuron %0d: %0d exp %0d", r, ps_rdata, Y[r]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
