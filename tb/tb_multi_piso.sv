// tb_multi_piso: loads sets of M values and checks they come out in order, one per
// cycle with the right neuron index and sample, and that back-to-back sets leave no
// gap (a set of M values takes exactly M cycles).
module tb_multi_piso;
  import dnn_pkg::*;
  localparam int M = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  q15_16_t par_in [M];
  logic par_valid = 0, par_ready, ser_valid;
  logic [15:0] par_base = 0, ser_index;
  logic [3:0] par_sample = 0, ser_sample;
  q15_16_t ser_data;
  int checks = 0, failures = 0, outs = 0, first_t = -1, last_t = 0, cyc = 0;
  q15_16_t expd[$]; int expi[$]; int exps[$];

  multi_piso #(.M(M), .NW(16), .SW(4)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && ser_valid) begin
    checks++;
    if (ser_data !== expd[0] || ser_index != 16'(expi[0]) || ser_sample != 4'(exps[0])) begin
      failures++; $display("mismatch %0d", outs);
    end
    void'(expd.pop_front()); void'(expi.pop_front()); void'(exps.pop_front());
    if (first_t < 0) first_t = cyc;
    last_t = cyc;
    outs++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (par_in[i]) par_in[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 10; s++) begin
      @(negedge clk);
      for (int i = 0; i < M; i++) begin
        par_in[i] = $urandom;
        expd.push_back(par_in[i]); expi.push_back(s * M + i); exps.push_back(s % 16);
      end
      par_valid = 1; par_base = 16'(s * M); par_sample = 4'(s % 16);
      #1;
      while (!par_ready) @(negedge clk);
    end
    @(negedge clk); par_valid = 0;
    repeat (2 * M) @(negedge clk);
    checks++;
    if (outs != 10 * M) begin failures++; $display("outs %0d", outs); end
    checks++;
    if (last_t - first_t + 1 != 10 * M) begin failures++; $display("gap: %0d cycles", last_t - first_t + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
