// tb_sparse_row_coproc: random pruned rows (several densities, long zero runs,
// rows ending exactly at a word boundary) are encoded in the streaming format and
// fed with random gaps; each row's sum must match a dense reference dot product.
// With an uninterrupted stream the coprocessor must take one word per cycle.
module tb_sparse_row_coproc;
  import dnn_pkg::*;
  localparam int R = 3, DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy;
  logic [15:0] s_in = 0, n_rows = 0;
  logic [63:0] s_data = 0;
  logic s_valid = 0, s_ready;
  logic [7:0] mem_addr [R];
  q7_8_t mem_data [R];
  q15_16_t res_data;
  logic res_valid, res_ready = 0;
  int checks = 0, failures = 0, got = 0, ready_pct = 100, words_sent = 0, cyc = 0;

  `include "sparse_encode.svh"

  sparse_row_coproc #(.R(R), .DEPTH(DEPTH), .FIFO_DEPTH(16), .OUT_DEPTH(8)) dut (.*);

  q7_8_t A [DEPTH];
  q15_16_t expect_q [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < R; c++) mem_data[c] <= A[mem_addr[c]];
  end

  always @(negedge clk) begin
    res_ready = int'($urandom % 100) < ready_pct;
    if (rst_n && res_valid && res_ready) begin
      checks++;
      if (expect_q.size() == 0 || res_data !== expect_q[0]) begin
        failures++; $display("row %0d: %0d exp %0d", got, res_data, expect_q.size() ? expect_q[0] : 0);
      end
      if (expect_q.size()) void'(expect_q.pop_front());
      got++;
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int si, input int nr, input int density, input int gap);
    logic [63:0] words [$];
    q7_8_t row [];
    int t0, t1, g0;
    row = new[si];
    for (int k = 0; k < DEPTH; k++) A[k] = q7_8_t'($urandom) >>> 2;
    for (int r = 0; r < nr; r++) begin
      automatic q15_16_t e = 0;
      for (int k = 0; k < si; k++) begin
        row[k] = (int'($urandom % 100) < density) ? q7_8_t'($urandom) >>> 2 : 16'sh0;
        if (r == 1) row[k] = (k == si - 1 || k == 0) ? 16'sh0100 : 16'sh0;   // long zero run
        e += q15_16_t'(row[k]) * q15_16_t'(A[k]);
      end
      expect_q.push_back(e);
      sparse_encode(row, si, words);
    end
    s_in = 16'(si); n_rows = 16'(nr); g0 = got;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    foreach (words[i]) begin
      while (int'($urandom % 100) < gap) begin s_valid = 0; @(negedge clk); end
      s_valid = 1; s_data = words[i];
      #1;
      while (!s_ready) @(negedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    while (busy) @(negedge clk);
    t1 = cyc;
    checks++;
    if (got - g0 != nr) begin failures++; $display("rows %0d of %0d", got - g0, nr); end
    if (gap == 0 && ready_pct == 100) begin
      // one word per cycle: the layer takes the word count plus a short pipeline fill
      checks++;
      if (t1 - t0 > words.size() + 8) begin failures++; $display("slow: %0d cycles for %0d words", t1 - t0, words.size()); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(100, 12, 30, 0);
    run(200, 8, 5, 20);
    run(61, 10, 90, 10);
    ready_pct = 30;
    run(40, 20, 50, 0);
    ready_pct = 100;
    run(3, 6, 100, 0);
    repeat (20) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
