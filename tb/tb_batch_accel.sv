// tb_batch_accel: runs a two-layer network (20 x 14 x 5, ReLU then sigmoid) for a
// batch of three samples through a small batch accelerator (M = 6 lanes), as the
// processor would: samples in through the memory port, layer set-up and start over
// AXI4-Lite, weights through the four DMA streams, wait for the interrupt, results
// out through the memory port after the automatic bank swap. Results are compared
// with a fixed-point reference; the cycle counter must show the paper's
// ceil(s_out/M) * s_in * n cycles plus a small pipeline drain; weight stalls must
// occur, and a batch smaller than the hardware's is run as well.
module tb_batch_accel;
  import dnn_pkg::*;
  localparam int M = 6, NB = 3, DEPTH = 64, FD = 32;
  localparam int NF = (M + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_master bus (clk);
  logic irq, ps_en = 0, ps_we = 0;
  logic [1:0] ps_sample = 0;
  logic [5:0] ps_addr = 0;
  q7_8_t ps_wdata = 0, ps_rdata;
  logic [63:0] dma_data [4];
  logic [3:0] dma_valid = 0, dma_ready;
  logic ev_stall_weights, ev_stall_result;
  int checks = 0, failures = 0, n_sw = 0, n_sr = 0;

  `include "act_ref.svh"

  batch_accel #(.M(M), .NB(NB), .DEPTH(DEPTH), .FIFO_DEPTH(FD)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(bus.awaddr), .s_axi_awvalid(bus.awvalid), .s_axi_awready(bus.awready),
    .s_axi_wdata(bus.wdata), .s_axi_wvalid(bus.wvalid), .s_axi_wready(bus.wready),
    .s_axi_bresp(bus.bresp), .s_axi_bvalid(bus.bvalid), .s_axi_bready(bus.bready),
    .s_axi_araddr(bus.araddr), .s_axi_arvalid(bus.arvalid), .s_axi_arready(bus.arready),
    .s_axi_rdata(bus.rdata), .s_axi_rresp(bus.rresp), .s_axi_rvalid(bus.rvalid),
    .s_axi_rready(bus.rready), .irq,
    .ps_en, .ps_we, .ps_sample, .ps_addr, .ps_wdata, .ps_rdata,
    .dma_data, .dma_valid, .dma_ready, .ev_stall_weights, .ev_stall_result
  );

  always @(posedge clk) if (rst_n) begin
    if (ev_stall_weights) n_sw++;
    if (ev_stall_result) n_sr++;
  end

  q7_8_t W [64][64];
  q7_8_t X [NB][64];   // current layer input (reference)
  q7_8_t Y [NB][64];   // reference output

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

  task automatic dma_stream(input int j, input int si, input int so);
    int lo = j * NF;
    int n = (M - lo < NF) ? M - lo : NF;
    int nsec = (so + M - 1) / M, words = (si + 3) / 4;
    if (n <= 0) return;
    for (int sec = 0; sec < nsec; sec++)
      for (int wd = 0; wd < words; wd++)
        for (int f = 0; f < n; f++) begin
          logic [63:0] d;
          int row = sec * M + lo + f;
          for (int l = 0; l < 4; l++) begin
            int col = wd * 4 + l;
            d[16*l +: 16] = (row < so && col < si) ? W[row][col] : 16'h0;
          end
          @(negedge clk);
          if ($urandom % 4 == 0) begin dma_valid[j] = 0; @(negedge clk); end
          dma_data[j] = d; dma_valid[j] = 1;
          #1;
          while (!dma_ready[j]) @(negedge clk);
        end
    @(negedge clk); dma_valid[j] = 0;
  endtask

  task automatic layer(input int si, input int so, input int nb, input bit sig);
    logic [31:0] d;
    int n = 0, st0 = n_sw + n_sr, lim;
    for (int r = 0; r < so; r++) for (int k = 0; k < si; k++) W[r][k] = q7_8_t'($urandom) >>> 6;
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < so; r++) begin
        automatic q15_16_t z = 0;
        for (int k = 0; k < si; k++) z += q15_16_t'(W[r][k]) * q15_16_t'(X[b][k]);
        Y[b][r] = act_ref(z, sig);
      end
    bus.write(REG_S_IN, si); bus.write(REG_S_OUT, so);
    bus.write(REG_ACT, {31'd0, sig}); bus.write(REG_BATCH, nb);
    bus.write(REG_CTRL, 1);
    fork
      dma_stream(0, si, so); dma_stream(1, si, so);
      dma_stream(2, si, so); dma_stream(3, si, so);
    join
    while (!irq && n < 100000) begin @(negedge clk); n++; end
    chk(irq, "interrupt at layer end");
    bus.read(REG_CYCLES, d);
    chk(int'(d) >= ((so + M - 1) / M) * si * nb, $sformatf("cycles %0d not below the formula", d));
    // paper: ceil(s_out/M)*s_in*n + M*c_a; here also stalls and a few pipeline cycles
    lim = ((so + M - 1) / M) * si * nb + (n_sw + n_sr - st0) + M + 8;
    chk(int'(d) <= lim, $sformatf("cycles %0d within %0d", d, lim));
    $display("layer %0dx%0d n=%0d: %0d cycles, formula %0d", si, so, nb, d, ((so + M - 1) / M) * si * nb);
    for (int b = 0; b < nb; b++) for (int r = 0; r < so; r++) X[b][r] = Y[b][r];
  endtask

  task automatic check_results(input int so, input int nb);
    for (int b = 0; b < nb; b++) for (int r = 0; r < so; r++) begin
      @(negedge clk); ps_en = 1; ps_sample = 2'(b); ps_addr = 6'(r);
      @(negedge clk); ps_en = 0;
      chk(ps_rdata === Y[b][r], $sformatf("sample %0d neuron %0d: %0d exp %0d", b, r, ps_rdata, Y[b][r]));
    end
  endtask

  task automatic load_inputs(input int si, input int nb);
    for (int b = 0; b < nb; b++) for (int k = 0; k < si; k++) begin
      X[b][k] = q7_8_t'($urandom) >>> 4;
      @(negedge clk); ps_en = 1; ps_we = 1; ps_sample = 2'(b); ps_addr = 6'(k); ps_wdata = X[b][k];
    end
    @(negedge clk); ps_en = 0; ps_we = 0;
  endtask

  initial begin
    logic [31:0] d;
    foreach (dma_data[j]) dma_data[j] = 0;
    bus.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    bus.write(REG_IRQEN, 1);
    load_inputs(20, 3);
    layer(20, 14, 3, 0);
    layer(14, 5, 3, 1);
    bus.read(REG_STATUS, d);
    chk(d[2] == 1'b0, "role back to 0 after two layers");
    check_results(5, 3);
    // batch of two on the same hardware, a layer wider than M
    bus.write(REG_CTRL, 2);
    load_inputs(30, 2);
    layer(30, 13, 2, 0);
    check_results(13, 2);
    chk(n_sw > 0, "weight stalls seen");
    $display("stalls: weights %0d result %0d", n_sw, n_sr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
