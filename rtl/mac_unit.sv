// mac_unit: one multiply-accumulate lane of the matrix coprocessor.
//
// Multiplies a Q7.8 activation by a Q7.8 weight (16 x 16 bits, giving a Q15.16
// product) and adds the product to a 32-bit accumulator, as the paper prescribes
// (16-bit multiplications, 32-bit accumulation). The product is registered first, so
// a term presented with `en` in cycle t is in `acc` at the end of cycle t+1.
// `first` marks the first term of a sum: the accumulator then restarts from that
// product instead of adding to the old value, so back-to-back sums need no idle
// cycle. `acc_valid` pulses for one cycle when the term flagged `last` has been
// added. The register stage and the restart-on-first scheme are this design's
// choices; the accumulator wraps on overflow.
module mac_unit
  import dnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,      // a (a, w) pair is present
  input  logic    first,   // first term of a new sum
  input  logic    last,    // last term of the sum
  input  q7_8_t   a,
  input  q7_8_t   w,
  output q15_16_t acc,
  output logic    acc_valid
);

  q15_16_t prod_q;
  logic    en_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q  <= '0;
      en_q    <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      prod_q  <= q15_16_t'(a) * q15_16_t'(w);
      en_q    <= en;
      first_q <= first;
      last_q  <= last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= en_q && last_q;
      if (en_q) acc <= first_q ? prod_q : acc + prod_q;
    end
  end

endmodule
