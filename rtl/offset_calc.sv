// offset_calc: address generation of the sparse row coprocessor.
//
// For the r tuples of one pipeline word it computes the address of the input
// activation each weight multiplies, following the paper:
//     address_i = o_reg + i + (z_0 + ... + z_i),   i = 0 .. r-1,
// with one (i+2)-input adder per tuple rather than a chain of adders (the paper uses
// adders with up to r+1 inputs because r = 3 is small). The offset register o_reg
// holds the position just past the last weight of the previous word; it advances by
// address_{r-1} + 1 with every word (`step`) and is cleared at the start of a row
// (`clear`, this design's convention). The addresses are combinational in the word
// and the current o_reg.
module offset_calc
  import dnn_pkg::*;
#(
  parameter int unsigned R  = 3,
  parameter int unsigned OW = 16   // address width, wide enough to exceed s_in
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ZERO_W-1:0] zeros [R],
  input  logic              step,
  input  logic              clear,
  output logic [OW-1:0]     addr  [R],
  output logic [OW-1:0]     o_reg
);

  always_comb begin
    for (int i = 0; i < R; i++) begin
      logic [OW-1:0] sum;
      sum = o_reg + OW'(i);
      for (int k = 0; k <= i; k++) sum += OW'(zeros[k]);
      addr[i] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     o_reg <= '0;
    else if (clear) o_reg <= '0;
    else if (step)  o_reg <= addr[R-1] + OW'(1);
  end

endmodule
