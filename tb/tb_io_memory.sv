// tb_io_memory: the processor fills the input bank; R reads at independent random
// addresses per cycle must each return the right activation; merger writes fill the
// output bank of all copies, visible through every read port after the role flip.
module tb_io_memory;
  import dnn_pkg::*;
  localparam int R = 3, DEPTH = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic role = 0, wr_en = 0, ps_en = 0, ps_we = 0;
  logic [6:0] rd_addr [R], wr_addr = 0, ps_addr = 0;
  q7_8_t rd_data [R], wr_data = 0, ps_wdata = 0, ps_rdata;
  int checks = 0, failures = 0;
  q7_8_t a [DEPTH], r [DEPTH];
  int ad [R];

  io_memory #(.R(R), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input logic from_out);
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int c = 0; c < R; c++) begin ad[c] = $urandom % DEPTH; rd_addr[c] = 7'(ad[c]); end
      @(negedge clk);
      for (int c = 0; c < R; c++) begin
        checks++;
        if (rd_data[c] !== (from_out ? r[ad[c]] : a[ad[c]])) begin failures++; $display("port %0d addr %0d", c, ad[c]); end
      end
    end
  endtask

  initial begin
    foreach (rd_addr[c]) rd_addr[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < DEPTH; k++) begin
      a[k] = q7_8_t'($urandom); r[k] = q7_8_t'($urandom);
      @(negedge clk); ps_en = 1; ps_we = 1; ps_addr = 7'(k); ps_wdata = a[k];
    end
    @(negedge clk); ps_en = 0; ps_we = 0;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 7'(k); wr_data = r[k];
    end
    @(negedge clk); wr_en = 0;
    read_check(0);
    role = 1;
    read_check(1);
    @(negedge clk); ps_en = 1; ps_addr = 7'd5;
    @(negedge clk); ps_en = 0;
    checks++;
    if (ps_rdata !== r[5]) begin failures++; $display("processor read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
