// tb_asym_weight_bram: a DMA stream interleaved word by word over five FIFOs, with
// random gaps; every FIFO must receive its own words in order, and the stream must be
// held back (s_ready low) while the FIFO the next word is meant for is full.
module tb_asym_weight_bram;
  import dnn_pkg::*;
  localparam int NF = 5, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] s_data = 0;
  logic s_valid = 0, s_ready, rewind = 0, commit = 0;
  logic [NF-1:0] rd_en = 0, avail;
  q7_8_t rd_data [NF];
  int checks = 0, failures = 0, backpressure = 0;
  q7_8_t exp_w [NF][$];

  asym_weight_bram #(.NFIFO(NF), .DEPTH(DEPTH)) dut (.*);

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
    // 5 words per FIFO = 20 weights > DEPTH 16: the stream must stall
    for (int t = 0; t < NF * 4; t++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      for (int l = 0; l < 4; l++) exp_w[t % NF].push_back(q7_8_t'(d[16*l +: 16]));
      @(negedge clk);
      while ($urandom % 3 == 0) begin s_valid = 0; @(negedge clk); end
      s_valid = 1; s_data = d;
      #1;
      while (!s_ready) begin @(negedge clk); end
    end
    @(negedge clk);
    s_valid = 1; s_data = 64'h1111_2222_3333_4444;
    repeat (3) @(negedge clk);
    chk(!s_ready, "FIFO 0 full holds the stream");
    if (!s_ready) backpressure++;
    s_valid = 0;
    // drain: each FIFO holds its 16 weights, one row of 16, read once
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < DEPTH; k++) begin
        @(negedge clk);
        rd_en = '0; rd_en[f] = 1'b1; commit = (k == DEPTH - 1);
        @(negedge clk);
        rd_en = '0; commit = 0;
        chk(rd_data[f] === exp_w[f][k], $sformatf("fifo %0d weight %0d", f, k));
      end
    end
    @(negedge clk);
    chk(s_ready, "space again after commit");
    chk(backpressure > 0, "back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
