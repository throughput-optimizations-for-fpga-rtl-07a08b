// tb_workloads: runs the fully-connected networks of the evaluation at their real
// sizes on both accelerators of dnn_accel_top, at its default parameters: the MNIST
// networks 784 x 800 x 800 x 10 and 784 x 800 x 800 x 800 x 800 x 800 x 800 x 10, and the
// HAR networks 561 x 1200 x 300 x 6 and 561 x 2000 x 1500 x 750 x 300 x 6 (ReLU in the
// hidden layers, sigmoid at the output). The batch accelerator runs each network
// for a full batch of 16 random samples; the pruning accelerator runs it for one
// sample with the weights pruned at the evaluation's pruning factors (72 %, 78 %,
// 88 % and 94 %, drawn at random per weight). Each layer's outputs are computed by a fixed-point
// reference model and, after the last layer, every output activation is compared.
// The cycle count of each layer is printed next to the analytic batch formula
// ceil(s_out/M) * s_in * n. Each network starts from bank role 0 (CTRL bit1).
module tb_workloads;
  import dnn_pkg::*;
  localparam int BM = 90, BNB = 16, PM = 4;
  localparam int NF = (BM + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_master bb (clk);
  axil_master pb (clk);
  logic b_irq, p_irq;
  logic b_ps_en = 0, b_ps_we = 0, p_ps_en = 0, p_ps_we = 0;
  logic [3:0] b_ps_sample = 0;
  logic [10:0] b_ps_addr = 0, p_ps_addr = 0;
  q7_8_t b_ps_wdata = 0, b_ps_rdata, p_ps_wdata = 0, p_ps_rdata;
  logic [63:0] b_dma_data [4], p_dma_data [PM];
  logic [3:0] b_dma_valid = 0, b_dma_ready;
  logic [PM-1:0] p_dma_valid = 0, p_dma_ready;
  logic b_ev_stall_weights, b_ev_stall_result;
  int checks = 0, failures = 0;


  `include "act_ref.svh"
  `include "sparse_encode.svh"

  dnn_accel_top dut (
    .clk, .rst_n,
    .b_s_axi_awaddr(bb.awaddr), .b_s_axi_awvalid(bb.awvalid), .b_s_axi_awready(bb.awready),
    .b_s_axi_wdata(bb.wdata), .b_s_axi_wvalid(bb.wvalid), .b_s_axi_wready(bb.wready),
    .b_s_axi_bresp(bb.bresp), .b_s_axi_bvalid(bb.bvalid), .b_s_axi_bready(bb.bready),
    .b_s_axi_araddr(bb.araddr), .b_s_axi_arvalid(bb.arvalid), .b_s_axi_arready(bb.arready),
    .b_s_axi_rdata(bb.rdata), .b_s_axi_rresp(bb.rresp), .b_s_axi_rvalid(bb.rvalid),
    .b_s_axi_rready(bb.rready), .b_irq,
    .b_ps_en, .b_ps_we, .b_ps_sample, .b_ps_addr, .b_ps_wdata, .b_ps_rdata,
    .b_dma_data, .b_dma_valid, .b_dma_ready, .b_ev_stall_weights, .b_ev_stall_result,
    .p_s_axi_awaddr(pb.awaddr), .p_s_axi_awvalid(pb.awvalid), .p_s_axi_awready(pb.awready),
    .p_s_axi_wdata(pb.wdata), .p_s_axi_wvalid(pb.wvalid), .p_s_axi_wready(pb.wready),
    .p_s_axi_bresp(pb.bresp), .p_s_axi_bvalid(pb.bvalid), .p_s_axi_bready(pb.bready),
    .p_s_axi_araddr(pb.araddr), .p_s_axi_arvalid(pb.arvalid), .p_s_axi_arready(pb.arready),
    .p_s_axi_rdata(pb.rdata), .p_s_axi_rresp(pb.rresp), .p_s_axi_rvalid(pb.rvalid),
    .p_s_axi_rready(pb.rready), .p_irq,
    .p_ps_en, .p_ps_we, .p_ps_addr, .p_ps_wdata, .p_ps_rdata,
    .p_dma_data, .p_dma_valid, .p_dma_ready
  );

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ batch side
  q7_8_t BW [2048][2048];
  q7_8_t BX [BNB][2048], BY [BNB][2048];

  task automatic b_dma(input int j, input int si, input int so);
    int lo = j * NF;
    int n = (BM - lo < NF) ? BM - lo : NF;
    int nsec = (so + BM - 1) / BM, words = (si + 3) / 4;
    for (int sec = 0; sec < nsec; sec++)
      for (int wd = 0; wd < words; wd++)
        for (int f = 0; f < n; f++) begin
          logic [63:0] d;
          int row = sec * BM + lo + f;
          for (int l = 0; l < 4; l++) begin
            int col = wd * 4 + l;
            d[16*l +: 16] = (row < so && col < si) ? BW[row][col] : 16'h0;
          end
          @(negedge clk);
          b_dma_data[j] = d; b_dma_valid[j] = 1;
          #1;
          while (!b_dma_ready[j]) @(negedge clk);
        end
    @(negedge clk); b_dma_valid[j] = 0;
  endtask

  task automatic b_layer(input int si, input int so, input int nb, input bit sig);
    logic [31:0] d;
    int n = 0;
    for (int r = 0; r < so; r++) for (int k = 0; k < si; k++) BW[r][k] = q7_8_t'($urandom) >>> (si > 500 ? 11 : 9);
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < so; r++) begin
        automatic q15_16_t z = 0;
        for (int k = 0; k < si; k++) z += q15_16_t'(BW[r][k]) * q15_16_t'(BX[b][k]);
        BY[b][r] = act_ref(z, sig);
      end
    bb.write(REG_S_IN, si); bb.write(REG_S_OUT, so);
    bb.write(REG_ACT, {31'd0, sig}); bb.write(REG_BATCH, nb);
    bb.write(REG_CTRL, 1);
    fork
      b_dma(0, si, so); b_dma(1, si, so); b_dma(2, si, so); b_dma(3, si, so);
    join
    while (!b_irq && n < 2000000) begin @(negedge clk); n++; end
    chk(b_irq, "batch: interrupt");
    bb.read(REG_CYCLES, d);
    chk(int'(d) >= ((so + BM - 1) / BM) * si * nb, "batch: cycles not below the formula");
    $display("batch layer %0dx%0d n=%0d: %0d cycles (formula %0d)", si, so, nb, d,
             ((so + BM - 1) / BM) * si * nb);
    for (int b = 0; b < nb; b++) for (int r = 0; r < so; r++) BX[b][r] = BY[b][r];
  endtask

  task automatic b_load(input int si, input int nb);
    for (int b = 0; b < nb; b++) for (int k = 0; k < si; k++) begin
      BX[b][k] = q7_8_t'($urandom) >>> 4;
      @(negedge clk); b_ps_en = 1; b_ps_we = 1; b_ps_sample = 4'(b); b_ps_addr = 11'(k); b_ps_wdata = BX[b][k];
    end
    @(negedge clk); b_ps_en = 0; b_ps_we = 0;
  endtask

  task automatic b_check(input int so, input int nb);
    for (int b = 0; b < nb; b++) for (int r = 0; r < so; r++) begin
      @(negedge clk); b_ps_en = 1; b_ps_sample = 4'(b); b_ps_addr = 11'(r);
      @(negedge clk); b_ps_en = 0;
      chk(b_ps_rdata === BY[b][r], $sformatf("batch: sample %0d neuron %0d", b, r));
    end
  endtask

  // ------------------------------------------------------------------ pruning side
  q7_8_t PX [2048], PY [2048];
  logic [63:0] stream [PM][$];

  task automatic p_dma(input int p);
    foreach (stream[p][i]) begin
      @(negedge clk);
      p_dma_data[p] = stream[p][i]; p_dma_valid[p] = 1;
      #1;
      while (!p_dma_ready[p]) @(negedge clk);
    end
    @(negedge clk); p_dma_valid[p] = 0;
  endtask

  task automatic p_layer(input int si, input int so, input int zero_pct, input bit sig);
    int n = 0;
    logic [31:0] d;
    q7_8_t row [];
    row = new[si];
    for (int p = 0; p < PM; p++) stream[p].delete();
    for (int r = 0; r < so; r++) begin
      automatic q15_16_t z = 0;
      for (int k = 0; k < si; k++) begin
        row[k] = (int'($urandom % 100) < zero_pct) ? 16'sh0 : q7_8_t'($urandom) >>> (si > 500 ? 9 : 7);
        z += q15_16_t'(row[k]) * q15_16_t'(PX[k]);
      end
      PY[r] = act_ref(z, sig);
      sparse_encode(row, si, stream[r % PM]);
    end
    pb.write(REG_S_IN, si); pb.write(REG_S_OUT, so); pb.write(REG_ACT, {31'd0, sig});
    pb.write(REG_CTRL, 1);
    fork
      p_dma(0); p_dma(1); p_dma(2); p_dma(3);
    join
    while (!p_irq && n < 2000000) begin @(negedge clk); n++; end
    chk(p_irq, "pruning: interrupt");
    pb.read(REG_CYCLES, d);
    $display("pruning layer %0dx%0d (%0d%% pruned): %0d cycles", si, so, zero_pct, d);
    for (int r = 0; r < so; r++) PX[r] = PY[r];
  endtask

  // one network: ReLU in the hidden layers, sigmoid at the output
  task automatic b_net(input int L []);
    b_load(L[0], BNB);
    for (int j = 0; j + 1 < L.size(); j++) b_layer(L[j], L[j+1], BNB, j + 2 == L.size());
    b_check(L[L.size()-1], BNB);
    bb.write(REG_CTRL, 2);
  endtask

  task automatic p_net(input int L [], input int pct);
    pb.write(REG_CTRL, 2);
    for (int k = 0; k < L[0]; k++) begin
      PX[k] = q7_8_t'($urandom) >>> 4;
      @(negedge clk); p_ps_en = 1; p_ps_we = 1; p_ps_addr = 11'(k); p_ps_wdata = PX[k];
    end
    @(negedge clk); p_ps_en = 0; p_ps_we = 0;
    for (int j = 0; j + 1 < L.size(); j++) p_layer(L[j], L[j+1], pct, j + 2 == L.size());
    for (int r = 0; r < L[L.size()-1]; r++) begin
      @(negedge clk); p_ps_en = 1; p_ps_addr = 11'(r);
      @(negedge clk); p_ps_en = 0;
      chk(p_ps_rdata === PY[r], $sformatf("pruning: neuron %0d: %0d exp %0d", r, p_ps_rdata, PY[r]));
    end
  endtask

  initial begin
    logic [31:0] d;
    int net [];
    foreach (b_dma_data[j]) b_dma_data[j] = 0;
    foreach (p_dma_data[j]) p_dma_data[j] = 0;
    bb.init(); pb.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    bb.write(REG_IRQEN, 1); pb.write(REG_IRQEN, 1);
    bb.read(REG_INFO, d); chk(d == {16'd16, 16'd90}, "batch design constants");
    pb.read(REG_INFO, d); chk(d == {16'd3, 16'd4}, "pruning design constants");

    net = '{784, 800, 800, 10};                     b_net(net); p_net(net, 72);
    net = '{784, 800, 800, 800, 800, 800, 800, 10}; b_net(net); p_net(net, 78);
    net = '{561, 1200, 300, 6};                     b_net(net); p_net(net, 88);
    net = '{561, 2000, 1500, 750, 300, 6};          b_net(net); p_net(net, 94);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
