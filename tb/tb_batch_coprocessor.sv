// tb_batch_coprocessor: a small coprocessor (M = 5 lanes, batch of up to 3) with a
// behavioural batch memory. Random weight matrices and inputs; the DMA streams send
// the rows of every section interleaved as the coprocessor expects, with random
// gaps, while the result side takes results at random times. Every section and
// sample result is compared with a reference dot product; weight and result stalls
// must both occur; and the busy time must equal ceil(s_out/M) * s_in * n plus the
// counted stall cycles.
module tb_batch_coprocessor;
  import dnn_pkg::*;
  localparam int M = 5, NB = 3, FD = 16, DEPTH = 32;
  localparam int NF = (M + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, idle;
  logic [15:0] s_in = 0, s_out = 0, n_batch = 0;
  logic [63:0] dma_data [4];
  logic [3:0] dma_valid = 0, dma_ready;
  logic mem_rd_en;
  logic [1:0] mem_rd_sample;
  logic [4:0] mem_rd_addr;
  q7_8_t mem_rd_data;
  q15_16_t res [M];
  logic res_valid, res_ready = 0;
  logic [15:0] res_base;
  logic [1:0] res_sample;
  logic stall_weights, stall_result;
  int checks = 0, failures = 0;
  int n_sw = 0, n_sr = 0, busy_cyc = 0, tot_sw = 0, tot_sr = 0;

  batch_coprocessor #(.M(M), .NB(NB), .FIFO_DEPTH(FD), .DEPTH(DEPTH)) dut (.*);

  q7_8_t W [32][32];
  q7_8_t A [NB][32];
  int exp_sec, exp_b, ready_pct;

  always @(posedge clk) begin
    mem_rd_data <= A[mem_rd_sample][mem_rd_addr];
    if (busy) busy_cyc++;
    if (stall_weights) n_sw++;
    if (stall_result) n_sr++;
  end

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

  // one DMA stream: asymmetric BRAM j
  task automatic dma_stream(input int j, input int nsec, input int words, input int gap_pct);
    int lo = j * NF;
    int n = (M - lo < NF) ? M - lo : NF;
    if (n <= 0) return;
    for (int sec = 0; sec < nsec; sec++)
      for (int wd = 0; wd < words; wd++)
        for (int f = 0; f < n; f++) begin
          logic [63:0] d;
          int row = sec * M + lo + f;
          for (int l = 0; l < 4; l++) begin
            int col = wd * 4 + l;
            d[16*l +: 16] = (row < int'(s_out) && col < int'(s_in)) ? W[row][col] : 16'h0;
          end
          @(negedge clk);
          while (int'($urandom % 100) < gap_pct) begin dma_valid[j] = 0; @(negedge clk); end
          dma_data[j] = d; dma_valid[j] = 1;
          #1;
          while (!dma_ready[j]) @(negedge clk);
        end
    @(negedge clk); dma_valid[j] = 0;
  endtask

  task automatic run_layer(input int si, input int so, input int nb, input int gap, input int rpct);
    int nsec = (so + M - 1) / M, words = (si + 3) / 4;
    for (int r = 0; r < 32; r++) for (int k = 0; k < 32; k++) W[r][k] = q7_8_t'($urandom) >>> 3;
    for (int b = 0; b < NB; b++) for (int k = 0; k < 32; k++) A[b][k] = q7_8_t'($urandom) >>> 3;
    s_in = 16'(si); s_out = 16'(so); n_batch = 16'(nb);
    exp_sec = 0; exp_b = 0; ready_pct = rpct;
    busy_cyc = 0; n_sw = 0; n_sr = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      dma_stream(0, nsec, words, gap);
      dma_stream(1, nsec, words, gap);
      dma_stream(2, nsec, words, gap);
      dma_stream(3, nsec, words, gap);
    join
    while (!idle) @(negedge clk);
    chk(exp_sec == nsec && exp_b == 0, $sformatf("all results seen (sec %0d)", exp_sec));
    chk(busy_cyc == nsec * si * nb + n_sw + n_sr,
        $sformatf("cycles %0d = %0d + stalls %0d", busy_cyc, nsec * si * nb, n_sw + n_sr));
    tot_sw += n_sw; tot_sr += n_sr;
  endtask

  // result side
  always @(negedge clk) begin
    res_ready = int'($urandom % 100) < ready_pct;
    if (rst_n && res_valid && res_ready) begin
      for (int i = 0; i < M; i++) begin
        automatic q15_16_t e = 0;
        automatic int row = exp_sec * M + i;
        for (int k = 0; k < int'(s_in); k++)
          if (row < int'(s_out)) e += q15_16_t'(W[row][k]) * q15_16_t'(A[exp_b][k]);
        checks++;
        if (res[i] !== e) begin failures++; $display("sec %0d b %0d lane %0d: %0d exp %0d", exp_sec, exp_b, i, res[i], e); end
      end
      chk(res_base == 16'(exp_sec * M) && res_sample == 2'(exp_b), "result tags");
      if (exp_b == int'(n_batch) - 1) begin exp_b = 0; exp_sec++; end else exp_b++;
    end
  end

  initial begin
    foreach (dma_data[j]) dma_data[j] = 0;
    ready_pct = 100;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(9, 12, 3, 30, 100);    // odd row length, partial last section
    run_layer(16, 10, 2, 0, 100);    // full FIFO rows
    run_layer(3, 7, 3, 10, 20);      // short rows: result register back-pressure
    run_layer(13, 5, 1, 50, 50);     // batch of one
    chk(tot_sw > 0, "weight stalls happened");
    chk(tot_sr > 0, "result stalls happened");
    $display("stalls: weights %0d result %0d", tot_sw, tot_sr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
