// batch_memory: input/output activation store of the batch-processing design.
//
// Two banks, each of NB sample memories (one block RAM per sample of the batch) of
// DEPTH Q7.8 words. A crossbar gives one bank the input role and the other the output
// role, selected by `role` (role 0: bank 0 is input). The matrix coprocessor reads
// activation `rd_addr` of sample `rd_sample` from the input bank; the activation
// function's BRAM controller writes results into the output bank at the same time.
// The processor port reaches the input-role bank: it loads the first layer's samples
// and, since the role flips after every layer, reads the last layer's results.
// Reads (coprocessor and processor) have one cycle of latency and share the read
// port of each memory; the processor port must only be used while no layer runs.
// The bank and crossbar structure follows the paper; the port protocol is this
// design's own.
module batch_memory
  import dnn_pkg::*;
#(
  parameter int unsigned NB    = 16,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned SW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          role,
  // coprocessor read (input bank)
  input  logic          rd_en,
  input  logic [SW-1:0] rd_sample,
  input  logic [AW-1:0] rd_addr,
  output q7_8_t         rd_data,
  // activation write (output bank)
  input  logic          wr_en,
  input  logic [SW-1:0] wr_sample,
  input  logic [AW-1:0] wr_addr,
  input  q7_8_t         wr_data,
  // processor port (input bank)
  input  logic          ps_en,
  input  logic          ps_we,
  input  logic [SW-1:0] ps_sample,
  input  logic [AW-1:0] ps_addr,
  input  q7_8_t         ps_wdata,
  output q7_8_t         ps_rdata
);

  q7_8_t         q [2][NB];
  logic [SW-1:0] sample_q;
  logic          role_q;

  for (genvar g = 0; g < 2; g++) begin : g_bank
    for (genvar s = 0; s < NB; s++) begin : g_bram
      q7_8_t         mem [DEPTH];
      logic          is_in, we;
      logic [AW-1:0] waddr, raddr;
      q7_8_t         wdata;

      assign is_in = (role == 1'(g));
      assign we    = is_in ? (ps_en && ps_we && ps_sample == SW'(s))
                           : (wr_en && wr_sample == SW'(s));
      assign waddr = is_in ? ps_addr  : wr_addr;
      assign wdata = is_in ? ps_wdata : wr_data;
      assign raddr = ps_en ? ps_addr  : rd_addr;

      always_ff @(posedge clk) begin
        if (we) mem[waddr] <= wdata;
        q[g][s] <= mem[raddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_q <= '0;
      role_q   <= 1'b0;
    end else if (rd_en || ps_en) begin
      sample_q <= ps_en ? ps_sample : rd_sample;
      role_q   <= role;
    end
  end

  assign rd_data  = q[role_q][sample_q];
  assign ps_rdata = q[role_q][sample_q];

  assert property (@(posedge clk) disable iff (!rst_n) !(ps_en && (rd_en || wr_en)))
    else $error("batch_memory: processor access during a layer");

endmodule
