// tb_mac_unit: checks random dot products of random length against a reference sum,
// including back-to-back sums (first of the next sum right after last) and the
// two-cycle latency from the last term to acc_valid.
module tb_mac_unit;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0, last = 0;
  q7_8_t a = 0, w = 0;
  q15_16_t acc;
  logic acc_valid;
  int checks = 0, failures = 0;

  mac_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  q15_16_t exp_q[$];
  int      t_last[$];
  int      cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (acc_valid) begin
    automatic q15_16_t e = exp_q.pop_front();
    automatic int tl = t_last.pop_front();
    checks++;
    if (acc !== e) begin failures++; $display("mismatch acc=%0d exp=%0d", acc, e); end
    checks++;
    if (cyc - tl != 2) begin failures++; $display("latency %0d", cyc - tl); end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      automatic int len = 1 + ($urandom % 40);
      automatic q15_16_t sum = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        en = ($urandom % 4) != 0 || k == len - 1;
        a = q7_8_t'($urandom); w = q7_8_t'($urandom);
        if (s % 3 == 0) begin a = a >>> 4; w = w >>> 4; end
        first = en && (k == 0);
        if (!en) begin k--; first = 0; last = 0; continue; end
        last = (k == len - 1);
        sum = sum + q15_16_t'(a) * q15_16_t'(w);
        if (last) begin exp_q.push_back(sum); t_last.push_back(cyc); end
      end
    end
    @(negedge clk); en = 0; first = 0; last = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
