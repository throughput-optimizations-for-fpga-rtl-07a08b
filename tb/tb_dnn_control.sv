// tb_dnn_control: register write/read-back over AXI4-Lite, the start pulse, busy,
// the cycle counter, done with interrupt and the bank role flip, and the role reset.
module tb_dnn_control;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_master bus (clk);
  logic start, role, done = 0, busy, irq;
  logic [15:0] s_in, s_out, n_batch;
  act_sel_t act_sel;
  int checks = 0, failures = 0, starts = 0;
  logic [31:0] d;

  dnn_control #(.PAR_A(90), .PAR_B(16)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(bus.awaddr), .s_axi_awvalid(bus.awvalid), .s_axi_awready(bus.awready),
    .s_axi_wdata(bus.wdata), .s_axi_wvalid(bus.wvalid), .s_axi_wready(bus.wready),
    .s_axi_bresp(bus.bresp), .s_axi_bvalid(bus.bvalid), .s_axi_bready(bus.bready),
    .s_axi_araddr(bus.araddr), .s_axi_arvalid(bus.arvalid), .s_axi_arready(bus.arready),
    .s_axi_rdata(bus.rdata), .s_axi_rresp(bus.rresp), .s_axi_rvalid(bus.rvalid),
    .s_axi_rready(bus.rready),
    .start, .s_in, .s_out, .n_batch, .act_sel, .role, .done, .busy, .irq
  );

  always @(posedge clk) if (rst_n && start) starts++;

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
    bus.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    bus.write(REG_S_IN, 784);   bus.write(REG_S_OUT, 800);
    bus.write(REG_ACT, 1);      bus.write(REG_BATCH, 16);  bus.write(REG_IRQEN, 1);
    bus.read(REG_S_IN, d);  chk(d == 784, "s_in readback");
    bus.read(REG_S_OUT, d); chk(d == 800, "s_out readback");
    bus.read(REG_ACT, d);   chk(d == 1, "act readback");
    bus.read(REG_BATCH, d); chk(d == 16, "batch readback");
    bus.read(REG_INFO, d);  chk(d == {16'd16, 16'd90}, "info");
    chk(s_in == 784 && s_out == 800 && n_batch == 16 && act_sel == ACT_SIGMOID, "outputs");
    chk(!busy && !irq && role == 0, "idle after reset");
    bus.write(REG_CTRL, 1);
    chk(starts == 1, $sformatf("one start pulse %0d", starts));
    chk(busy, "busy after start");
    bus.write(REG_CTRL, 1);
    chk(starts == 1, "no start while busy");
    bus.read(REG_STATUS, d); chk(d[0] == 1 && d[1] == 0, "status busy");
    repeat (20) @(negedge clk);
    done = 1; @(negedge clk); done = 0;
    chk(!busy && irq && role == 1, "done: idle, irq, role flipped");
    bus.read(REG_STATUS, d); chk(d[2:0] == 3'b110, "status done role");
    bus.read(REG_CYCLES, d); chk(d > 20 && d < 40, "cycle counter");
    bus.write(REG_CTRL, 1);
    chk(!irq && busy && starts == 2, "second start clears done");
    done = 1; @(negedge clk); done = 0;
    chk(role == 0, "role flips back");
    done = 1; @(negedge clk); done = 0;
    chk(role == 0, "done ignored while idle");
    bus.write(REG_CTRL, 1); done = 1; @(negedge clk); done = 0;
    chk(role == 1, "role 1 again");
    bus.write(REG_CTRL, 2);
    chk(role == 0 && starts == 3, "role reset without start");
    bus.write(REG_IRQEN, 0);
    bus.read(REG_STATUS, d); chk(!irq && d[1], "irq masked, done kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
