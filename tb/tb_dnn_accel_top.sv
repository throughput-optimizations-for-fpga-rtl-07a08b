// tb_dnn_accel_top: end-to-end test of the whole design at its default sizes
// (batch accelerator M = 90 lanes, n = 16; pruning accelerator m = 4, r = 3).
// Batch side: a 40 x 200 x 1980 x 30 network (ReLU, ReLU, sigmoid) for a full batch of
// 16 samples (the 22 sections of 200 weights each overflow the 2048-weight FIFOs, so the
// DMA streams are held back), then a 20-sample-wide layer for a batch of 5. Pruning side: a 300 x 60 x 10
// network where half the rows are dense and the rest mostly pruned. Every result is compared with a fixed-point
// reference. The test counts the mechanisms the design has and fails if one never
// happened: weight stalls (FIFO not yet filled), result stalls (rows shorter than M,
// so the PISO is still busy), DMA back-pressure, a partial last section, the bank
// role swap, both activation functions, sparse rows ended by the address reaching
// s_in, filler tuples for zero runs over 31, and round-robin merging.
module tb_dnn_accel_top;
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

  // mechanism counters
  int n_stall_w = 0, n_stall_r = 0, n_backpressure = 0, n_partial = 0, n_swap = 0;
  int n_relu = 0, n_sigmoid = 0, n_row_end = 0, n_filler = 0, n_rr = 0;

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

  always @(posedge clk) if (rst_n) begin
    if (b_ev_stall_weights) n_stall_w++;
    if (b_ev_stall_result) n_stall_r++;
    for (int j = 0; j < 4; j++) if (b_dma_valid[j] && !b_dma_ready[j]) n_backpressure++;
    for (int j = 0; j < PM; j++) if (p_dma_valid[j] && !p_dma_ready[j]) n_backpressure++;
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
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
    for (int r = 0; r < so; r++) for (int k = 0; k < si; k++) BW[r][k] = q7_8_t'($urandom) >>> (si > 64 ? 9 : 6);
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < so; r++) begin
        automatic q15_16_t z = 0;
        for (int k = 0; k < si; k++) z += q15_16_t'(BW[r][k]) * q15_16_t'(BX[b][k]);
        BY[b][r] = act_ref(z, sig);
      end
    if (so % BM != 0) n_partial++;
    if (sig) n_sigmoid++; else n_relu++;
    bb.write(REG_S_IN, si); bb.write(REG_S_OUT, so);
    bb.write(REG_ACT, {31'd0, sig}); bb.write(REG_BATCH, nb);
    bb.write(REG_CTRL, 1);
    fork
      b_dma(0, si, so); b_dma(1, si, so); b_dma(2, si, so); b_dma(3, si, so);
    join
    while (!b_irq && n < 200000) begin @(negedge clk); n++; end
    chk(b_irq, "batch: interrupt");
    bb.read(REG_CYCLES, d);
    chk(int'(d) >= ((so + BM - 1) / BM) * si * nb, "batch: cycles not below the formula");
    $display("batch layer %0dx%0d n=%0d: %0d cycles (formula %0d)", si, so, nb, d,
             ((so + BM - 1) / BM) * si * nb);
    n_swap++;
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
  q7_8_t PX [512], PY [512];
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
    q7_8_t row [];
    row = new[si];
    for (int p = 0; p < PM; p++) stream[p].delete();
    for (int r = 0; r < so; r++) begin
      automatic q15_16_t z = 0;
      automatic int run = 0;
      for (int k = 0; k < si; k++) begin
        // the first half of the rows is dense, so the 512-word stream FIFOs fill up
        row[k] = (r >= so / 2 && int'($urandom % 100) < zero_pct) ? 16'sh0 : q7_8_t'($urandom) >>> 6;
        z += q15_16_t'(row[k]) * q15_16_t'(PX[k]);
        if (row[k] == 0) run++; else begin if (run > 31) n_filler++; run = 0; end
      end
      PY[r] = act_ref(z, sig);
      sparse_encode(row, si, stream[r % PM]);
      n_row_end++;
    end
    if (sig) n_sigmoid++; else n_relu++;
    pb.write(REG_S_IN, si); pb.write(REG_S_OUT, so); pb.write(REG_ACT, {31'd0, sig});
    pb.write(REG_CTRL, 1);
    fork
      p_dma(0); p_dma(1); p_dma(2); p_dma(3);
    join
    while (!p_irq && n < 200000) begin @(negedge clk); n++; end
    chk(p_irq, "pruning: interrupt");
    n_swap++;
    if (so > PM) n_rr++;
    for (int r = 0; r < so; r++) PX[r] = PY[r];
  endtask

  initial begin
    logic [31:0] d;
    foreach (b_dma_data[j]) b_dma_data[j] = 0;
    foreach (p_dma_data[j]) p_dma_data[j] = 0;
    bb.init(); pb.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    bb.write(REG_IRQEN, 1); pb.write(REG_IRQEN, 1);
    bb.read(REG_INFO, d); chk(d == {16'd16, 16'd90}, "batch design constants");
    pb.read(REG_INFO, d); chk(d == {16'd3, 16'd4}, "pruning design constants");

    fork
      begin
        b_load(40, 16);
        b_layer(40, 200, 16, 0);
        b_layer(200, 1980, 16, 0);
        b_layer(1980, 30, 16, 1);
        b_check(30, 16);
        bb.write(REG_CTRL, 2);
        b_load(20, 5);
        b_layer(20, 95, 5, 0);
        b_check(95, 5);
      end
      begin
        for (int k = 0; k < 300; k++) begin
          PX[k] = q7_8_t'($urandom) >>> 4;
          @(negedge clk); p_ps_en = 1; p_ps_we = 1; p_ps_addr = 11'(k); p_ps_wdata = PX[k];
        end
        @(negedge clk); p_ps_en = 0; p_ps_we = 0;
        p_layer(300, 60, 90, 0);
        p_layer(60, 10, 60, 1);
        for (int r = 0; r < 10; r++) begin
          @(negedge clk); p_ps_en = 1; p_ps_addr = 11'(r);
          @(negedge clk); p_ps_en = 0;
          chk(p_ps_rdata === PY[r], $sformatf("pruning: neuron %0d: %0d exp %0d", r, p_ps_rdata, PY[r]));
        end
      end
    join

    $display("mechanisms: weight stalls %0d, result stalls %0d, DMA back-pressure %0d, partial sections %0d,",
             n_stall_w, n_stall_r, n_backpressure, n_partial);
    $display("  role swaps %0d, ReLU layers %0d, sigmoid layers %0d, sparse rows %0d, filler runs %0d, round-robin layers %0d",
             n_swap, n_relu, n_sigmoid, n_row_end, n_filler, n_rr);
    chk(n_stall_w > 0, "weight stall happened");
    chk(n_stall_r > 0, "result stall happened");
    chk(n_backpressure > 0, "DMA back-pressure happened");
    chk(n_partial > 0, "partial section happened");
    chk(n_swap > 0, "bank role swap happened");
    chk(n_relu > 0 && n_sigmoid > 0, "both activation functions used");
    chk(n_row_end > 0, "sparse row ends happened");
    chk(n_filler > 0, "filler tuples happened");
    chk(n_rr > 0, "round-robin merging happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
