// sync_fifo: synchronous first-in first-out buffer with a valid/ready interface.
//
// Used before and after the sparse row coprocessor and after each activation
// function of the pruning design. `in_ready` is high while there is room; the head
// entry is shown on `out_data` with `out_valid` (first-word fall-through) and is
// removed in a cycle where `out_ready` is high. `count` is the number of entries held. Depth and width are parameters; the
// paper does not give them.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [$clog2(DEPTH):0] count   // entries held
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;

  assign in_ready  = (wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign out_valid = (wr_ptr != rd_ptr);
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign count     = wr_ptr - rd_ptr;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (in_valid && in_ready)   wr_ptr <= wr_ptr + 1'b1;
      if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
    end
  end

endmodule
