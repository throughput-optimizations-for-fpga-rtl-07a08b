// tb_activation_unit: compares ReLU and the PLAN sigmoid with a real-valued
// reference (within one Q7.8 step) for fixed corner points and random inputs, and
// checks the one-cycle latency.
module tb_activation_unit;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  q15_16_t z = 0;
  act_sel_t sel = ACT_RELU;
  q7_8_t a;
  int checks = 0, failures = 0;

  activation_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real plan(real x);
    real ax = (x < 0) ? -x : x, y;
    if (ax >= 5.0) y = 1.0;
    else if (ax >= 2.375) y = 0.03125 * ax + 0.84375;
    else if (ax >= 1.0) y = 0.125 * ax + 0.625;
    else y = 0.25 * ax + 0.5;
    return (x < 0) ? 1.0 - y : y;
  endfunction

  function automatic int expect_val(q15_16_t zz, act_sel_t s);
    real x = real'(zz) / 65536.0, y;
    if (s == ACT_SIGMOID) y = plan(x);
    else y = (x < 0) ? 0.0 : ((x > 127.99609375) ? 127.99609375 : x);
    return int'($floor(y * 256.0));
  endfunction

  task automatic check_one(q15_16_t zz, act_sel_t s);
    int e, d;
    @(negedge clk);
    z = zz; sel = s; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    e = expect_val(zz, s);
    d = int'(a) - e;
    checks++;
    if (!out_valid || d > 1 || d < -1) begin
      failures++;
      $display("z=%0d sel=%0d a=%0d exp=%0d valid=%0b", zz, s, a, e, out_valid);
    end
  endtask

  initial begin
    q15_16_t pts[$] = '{0, 32'sh0001_0000, -32'sh0001_0000, 32'sh0002_6000, 32'sh0005_0000,
                        -32'sh0005_0000, 32'sh0000_8000, 32'sh0100_0000, -32'sh0100_0000,
                        32'sh0003_0000, -32'sh0002_0000, 32'sh007F_FF00, 32'sh0080_0000};
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (pts[i]) begin check_one(pts[i], ACT_RELU); check_one(pts[i], ACT_SIGMOID); end
    for (int i = 0; i < 2000; i++) begin
      automatic q15_16_t r = q15_16_t'($urandom) >>> ($urandom % 16);
      check_one(r, act_sel_t'(i % 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
