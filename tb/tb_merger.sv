// tb_merger: four FIFO sources deliver their rows (p, p+4, ...) at random times; the
// merger must write them in row order at addresses 0 .. s_out-1 and pulse done once.
module tb_merger;
  import dnn_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, wr_en, done;
  logic [15:0] s_out = 0;
  q7_8_t in_data [M], wr_data;
  logic [M-1:0] in_valid = 0, in_ready;
  logic [10:0] wr_addr;
  int checks = 0, failures = 0, writes = 0, dones = 0;
  q7_8_t val [64];
  int next_row [M];

  merger #(.M(M), .AW(11)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (wr_en) begin
      checks++;
      if (wr_addr != 11'(writes) || wr_data !== val[writes]) begin
        failures++; $display("write %0d addr %0d", writes, wr_addr);
      end
      writes++;
    end
    if (done) dones++;
  end

  // sources: present row next_row[p] at random times
  always @(negedge clk) begin
    for (int p = 0; p < M; p++) begin
      if (in_valid[p] && in_ready[p]) next_row[p] += M;
    end
  end
  always @(posedge clk) begin
    for (int p = 0; p < M; p++) begin
      #1;
      in_valid[p] = (next_row[p] < int'(s_out)) && ($urandom % 3 != 0);
      in_data[p]  = val[next_row[p] % 64];
    end
  end

  initial begin
    foreach (val[i]) val[i] = q7_8_t'($urandom);
    foreach (in_data[i]) in_data[i] = 0;
    foreach (next_row[p]) next_row[p] = p;
    repeat (3) @(negedge clk);
    rst_n = 1;
    s_out = 43;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (400) @(negedge clk);
    checks++;
    if (writes != 43 || dones != 1) begin failures++; $display("writes %0d dones %0d", writes, dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
