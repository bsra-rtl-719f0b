// sigmoid_unit: the divisor-and-sigmoid D(x) = sigmoid(x / 256) of the HPAN
// model, Eq. (2), on NLANE clamped activations in parallel.
//
// The paper fixes the function and the divisor 256 (a shift); how the
// sigmoid itself is evaluated is this design's choice. The input is already
// clamped to [-255, 255], so u = x/256 lies in (-1, 1), where the odd
// polynomial sigmoid(u) = 1/2 + u/4 - u^3/48 + u^5/480 is within 2e-4 of the
// exact value. It is evaluated in Q.14 fixed point with three small
// multipliers per lane (1/48 and 1/480 as the constants 1365/2^16 and
// 137/2^16) and rounded to the 9-fraction-bit mask format: the output lies
// in 138 .. 374 (0.27 .. 0.73) and is within one LSB of the exact sigmoid.
// Purely combinational.
module sigmoid_unit
  import bsra_pkg::*;
#(
  parameter int NLANE = 36
) (
  input  act_t din  [NLANE],   // clamped activation, 9 fraction bits
  output wgt_t dout [NLANE]    // mask, 9 fraction bits
);
  always_comb begin
    for (int n = 0; n < NLANE; n++) begin
      int q, u2, u3, u5, r;
      // u = din / 2^17; in Q.14 that is din >>> 3
      q  = int'(din[n]) >>> 3;
      u2 = (q * q) >>> 14;
      u3 = (u2 * q) >>> 14;
      u5 = (u3 * u2) >>> 14;
      r  = 8192 + (q >>> 2) - ((u3 * 1365) >>> 16) + ((u5 * 137) >>> 16);
      dout[n] = wgt_t'((r + 16) >>> 5);
    end
  end
endmodule
