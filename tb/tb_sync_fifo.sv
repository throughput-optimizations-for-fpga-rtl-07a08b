// tb_sync_fifo: random pushes and pops against a queue model; checks order, count,
// and that a full FIFO refuses data.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] in_data = 0, out_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [3:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [31:0] q[$];

  sync_fifo #(.WIDTH(32), .DEPTH(8)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 4'(q.size()) || out_valid != (q.size() != 0) || in_ready != (q.size() < 8)) begin
        failures++; $display("state mismatch count=%0d model=%0d", count, q.size());
      end
      if (out_valid) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("data mismatch"); end
      end
      if (!in_ready) fulls++;
      in_valid  = ($urandom % 100) < ((i / 500) % 2 ? 70 : 30);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 30 : 70);
      in_data   = $urandom;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
