// io_memory: activation store of one sparse row coprocessor (pruning design).
//
// Holds one sample's activations in two banks (input and output role, swapped by
// `role` through the crossbar; role 0 makes bank 0 the input). Each bank is R
// identical copies, so the coprocessor can read R activations at R independent
// addresses in one cycle, one per multiplier. Every write (results from the merger
// into the output bank, or processor writes into the input bank) goes to all R copies
// of its bank. Reads have one cycle of latency; read port 0 is shared with the
// processor port, which must only be used while no layer runs. Redundant copies and
// the crossbar are the paper's; the port protocol is this design's own.
module io_memory
  import dnn_pkg::*;
#(
  parameter int unsigned R     = 3,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          role,
  input  logic [AW-1:0] rd_addr [R],
  output q7_8_t         rd_data [R],
  input  logic          wr_en,          // result write, output bank
  input  logic [AW-1:0] wr_addr,
  input  q7_8_t         wr_data,
  input  logic          ps_en,          // processor access, input bank
  input  logic          ps_we,
  input  logic [AW-1:0] ps_addr,
  input  q7_8_t         ps_wdata,
  output q7_8_t         ps_rdata
);

  q7_8_t q [2][R];
  logic  role_q;

  for (genvar g = 0; g < 2; g++) begin : g_bank
    logic          is_in, we;
    logic [AW-1:0] waddr;
    q7_8_t         wdata;
    assign is_in = (role == 1'(g));
    assign we    = is_in ? (ps_en && ps_we) : wr_en;
    assign waddr = is_in ? ps_addr  : wr_addr;
    assign wdata = is_in ? ps_wdata : wr_data;
    for (genvar c = 0; c < R; c++) begin : g_copy
      q7_8_t         mem [DEPTH];
      logic [AW-1:0] raddr;
      assign raddr = (c == 0 && ps_en) ? ps_addr : rd_addr[c];
      always_ff @(posedge clk) begin
        if (we) mem[waddr] <= wdata;
        q[g][c] <= mem[raddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) role_q <= 1'b0;
    else        role_q <= role;
  end

  for (genvar c = 0; c < R; c++) begin : g_out
    assign rd_data[c] = q[role_q][c];
  end
  assign ps_rdata = q[role_q][0];

endmodule
