// axil_master: testbench-side AXI4-Lite master with write and read tasks.
//
// Drives the control port of an accelerator from a testbench. `write` presents
// address and data together and waits for the response; `read` presents the address
// and returns the data. Each access times out after 1000 cycles.
interface axil_master (input logic clk);
  logic [5:0]  awaddr;
  logic        awvalid, awready;
  logic [31:0] wdata;
  logic        wvalid, wready;
  logic [1:0]  bresp;
  logic        bvalid, bready;
  logic [5:0]  araddr;
  logic        arvalid, arready;
  logic [31:0] rdata;
  logic [1:0]  rresp;
  logic        rvalid, rready;

  task automatic init();
    awaddr = '0; awvalid = 0; wdata = '0; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  endtask

  task automatic write(input logic [5:0] a, input logic [31:0] d);
    int n = 0;
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    #1;
    while (!(awready && wready) && n < 1000) begin @(negedge clk); n++; end
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid && n < 1000) begin @(negedge clk); n++; end
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [5:0] a, output logic [31:0] d);
    int n = 0;
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    #1;
    while (!arready && n < 1000) begin @(negedge clk); n++; end
    @(negedge clk);
    arvalid = 0;
    while (!rvalid && n < 1000) begin @(negedge clk); n++; end
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask
endinterface
