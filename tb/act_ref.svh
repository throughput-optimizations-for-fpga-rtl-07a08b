// act_ref.svh: reference activation functions for testbenches, written from the
// formulas: ReLU saturated to Q7.8, and the PLAN sigmoid computed in Q15.16 with the
// slopes as arithmetic shifts of |z|, truncated to Q7.8.
function automatic dnn_pkg::q7_8_t act_ref(input dnn_pkg::q15_16_t z, input bit sigmoid);
  longint az, y;
  az = (z < 0) ? -longint'(z) : longint'(z);
  if (!sigmoid) begin
    if (z < 0) return 16'sh0;
    if (longint'(z) > 64'sh7FFF00) return 16'sh7FFF;
    return dnn_pkg::q7_8_t'(z >>> 8);
  end
  if (az >= 5 * 65536)          y = 65536;
  else if (az >= 155648)        y = (az >>> 5) + 55296;   // 2.375, 0.84375
  else if (az >= 65536)         y = (az >>> 3) + 40960;   // 0.625
  else                          y = (az >>> 2) + 32768;   // 0.5
  if (z < 0) y = 65536 - y;
  return dnn_pkg::q7_8_t'(y >>> 8);
endfunction
