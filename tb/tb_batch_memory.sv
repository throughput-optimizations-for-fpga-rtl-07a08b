// tb_batch_memory: the processor fills the input bank of all samples, the
// coprocessor port reads them back (one cycle latency), results are written into the
// output bank at the same time, and after a role flip the processor sees the results
// and the coprocessor reads them as the next layer's inputs.
module tb_batch_memory;
  import dnn_pkg::*;
  localparam int NB = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic role = 0, rd_en = 0, wr_en = 0, ps_en = 0, ps_we = 0;
  logic [1:0] rd_sample = 0, wr_sample = 0, ps_sample = 0;
  logic [5:0] rd_addr = 0, wr_addr = 0, ps_addr = 0;
  q7_8_t rd_data, wr_data = 0, ps_wdata = 0, ps_rdata;
  int checks = 0, failures = 0;
  q7_8_t a [NB][DEPTH], r [NB][DEPTH];

  batch_memory #(.NB(NB), .DEPTH(DEPTH)) dut (.*);

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

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NB; s++) for (int k = 0; k < DEPTH; k++) begin
      a[s][k] = q7_8_t'($urandom); r[s][k] = q7_8_t'($urandom);
      @(negedge clk); ps_en = 1; ps_we = 1; ps_sample = 2'(s); ps_addr = 6'(k); ps_wdata = a[s][k];
    end
    @(negedge clk); ps_en = 0; ps_we = 0;
    // coprocessor reads inputs while results are written into the other bank
    for (int s = 0; s < NB; s++) for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      rd_en = 1; rd_sample = 2'(s); rd_addr = 6'(k);
      wr_en = 1; wr_sample = 2'(s); wr_addr = 6'(k); wr_data = r[s][k];
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      chk(rd_data === a[s][k], $sformatf("input s%0d k%0d", s, k));
    end
    role = 1;
    for (int s = 0; s < NB; s++) for (int k = 0; k < DEPTH; k += 7) begin
      @(negedge clk); ps_en = 1; ps_sample = 2'(s); ps_addr = 6'(k);
      @(negedge clk); ps_en = 0;
      chk(ps_rdata === r[s][k], $sformatf("result via processor s%0d k%0d", s, k));
      @(negedge clk); rd_en = 1; rd_sample = 2'(s); rd_addr = 6'(k);
      @(negedge clk); rd_en = 0;
      chk(rd_data === r[s][k], $sformatf("result as next input s%0d k%0d", s, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
