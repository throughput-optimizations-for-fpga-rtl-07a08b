// tb_weight_fifo: writes weight rows as 64-bit words, reads each row n times using
// rewind and commit, and checks the data, the padding skip after a row of odd length,
// the full flag and the release of space by commit.
module tb_weight_fifo;
  import dnn_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, rewind = 0, commit = 0, full, avail;
  logic [63:0] wr_data = 0;
  q7_8_t rd_data;
  int checks = 0, failures = 0;

  weight_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  q7_8_t row [16][$];   // rows written, weights in order
  int    len [16];

  task automatic put_row(input int r, input int n);
    int words;
    words = (n + 3) / 4;
    len[r] = n;
    row[r].delete();
    for (int wd = 0; wd < words; wd++) begin
      logic [63:0] d;
      for (int l = 0; l < 4; l++) begin
        d[16*l +: 16] = 16'($urandom);
        if (wd * 4 + l < n) row[r].push_back(q7_8_t'(d[16*l +: 16]));
      end
      @(negedge clk);
      wr_en = 1; wr_data = d;
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic use_row(input int r, input int nb);
    for (int b = 0; b < nb; b++)
      for (int k = 0; k < len[r]; k++) begin
        @(negedge clk);
        chk(avail, "avail while reading row");
        rd_en = 1; rewind = (k == len[r] - 1) && (b != nb - 1);
        commit = (k == len[r] - 1) && (b == nb - 1);
        @(negedge clk);
        rd_en = 0; rewind = 0; commit = 0;
        chk(rd_data === row[r][k], $sformatf("row %0d sample %0d k %0d", r, b, k));
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!avail && !full, "empty after reset");
    put_row(0, 10); put_row(1, 7); put_row(2, 16);
    use_row(0, 3); use_row(1, 1); use_row(2, 4);
    @(negedge clk); chk(!avail, "empty after all rows committed");
    put_row(3, 32); put_row(4, 32);
    @(negedge clk); chk(full, "full with 64 weights");
    use_row(3, 2);
    @(negedge clk); chk(!full, "commit frees space");
    put_row(5, 5);
    use_row(4, 2); use_row(5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
