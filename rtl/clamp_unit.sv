// clamp_unit: the clamping function of the HPAN model, Eq. (1), on NLANE
// values in parallel.
//
// A partial sum (18 fraction bits) is first brought to activation format
// (9 fraction bits) by an arithmetic right shift, i.e. rounding toward minus
// infinity, and then saturated: values at or above +255 become +255, values at
// or below -255 become -255, everything else passes. The bound of 255 is the
// paper's; the shift-based rounding is this design's choice.
// Purely combinational.
module clamp_unit
  import bsra_pkg::*;
#(
  parameter int NLANE = 36
) (
  input  psum_t din  [NLANE],
  output act_t  dout [NLANE]
);
  always_comb begin
    for (int n = 0; n < NLANE; n++) begin
      psum_t s;
      s = din[n] >>> (PSUM_FRAC - ACT_FRAC);
      if (s >= psum_t'(ACT_MAX))       dout[n] = act_t'(ACT_MAX);
      else if (s <= -psum_t'(ACT_MAX)) dout[n] = act_t'(-ACT_MAX);
      else                             dout[n] = act_t'(s);
    end
  end
endmodule
