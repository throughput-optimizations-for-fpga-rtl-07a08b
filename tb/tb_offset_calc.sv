// tb_offset_calc: random zero counts; every address must equal
// o_reg + i + z_0 + .. + z_i, with o_reg carried from word to word and cleared.
module tb_offset_calc;
  import dnn_pkg::*;
  localparam int R = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] zeros [R];
  logic step = 0, clear = 0;
  logic [15:0] addr [R], o_reg;
  int checks = 0, failures = 0, pos = 0;

  offset_calc #(.R(R), .OW(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (zeros[i]) zeros[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int e;
      @(negedge clk);
      step = 0; clear = 0;
      foreach (zeros[i]) zeros[i] = 5'($urandom);
      #1;
      e = pos;
      for (int i = 0; i < R; i++) begin
        e = e + zeros[i] + (i == 0 ? 0 : 1);
        checks++;
        if (addr[i] != 16'(e)) begin failures++; $display("t%0d addr%0d=%0d exp %0d", t, i, addr[i], e); end
      end
      if (t % 17 == 16) begin clear = 1; pos = 0; end
      else begin step = ($urandom % 4) != 0; if (step) pos = e + 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
