// activation_unit: run-time selectable activation function, one clock cycle.
//
// Takes a Q15.16 transfer-function result and returns a Q7.8 activation. ReLU is
// max(0, z), saturated to the largest Q7.8 value. The sigmoid uses the piecewise
// linear approximation PLAN (Amin et al.), as the paper states; the breakpoints and
// slopes are the published PLAN ones, which the paper does not print:
//     |z| >= 5           : 1
//     2.375 <= |z| < 5   : |z|/32 + 0.84375
//     1 <= |z| < 2.375   : |z|/8  + 0.625
//     0 <= |z| < 1       : |z|/4  + 0.5
// and 1 - y(|z|) for negative z. The slopes are powers of two, so the function is
// shifts, adds and comparators only. The result is registered: a value given with
// `in_valid` in cycle t appears with `out_valid` after the next clock edge (c_a = 1).
module activation_unit
  import dnn_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  q15_16_t  z,
  input  act_sel_t sel,
  output logic     out_valid,
  output q7_8_t    a
);

  localparam q15_16_t ONE   = 32'sh0001_0000;
  localparam q15_16_t Q7_8_MAX_AS_Q16 = 32'sh007F_FF00;

  q15_16_t abs_z, y_pos, y;
  q7_8_t   a_next;

  always_comb begin
    abs_z = z[31] ? -z : z;
    if (abs_z >= 32'sh0005_0000)
      y_pos = ONE;
    else if (abs_z >= 32'sh0002_6000)                      // 2.375
      y_pos = (abs_z >>> 5) + 32'sh0000_D800;              // + 0.84375
    else if (abs_z >= ONE)
      y_pos = (abs_z >>> 3) + 32'sh0000_A000;              // + 0.625
    else
      y_pos = (abs_z >>> 2) + 32'sh0000_8000;              // + 0.5
    y = z[31] ? ONE - y_pos : y_pos;

    if (sel == ACT_SIGMOID)
      a_next = q7_8_t'(y >>> 8);
    else if (z[31])
      a_next = '0;
    else if (z > Q7_8_MAX_AS_Q16)
      a_next = 16'sh7FFF;
    else
      a_next = q7_8_t'(z >>> 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      a         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) a <= a_next;
    end
  end

endmodule
