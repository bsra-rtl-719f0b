// pe: one processing element of a PE array, a signed multiplier with an
// output register.
//
// The paper describes each PE as "a multiplier with registers". The PE
// multiplies one feature pixel (18-bit activation) by one multiplicand,
// which is either a kernel weight or an attention-mask value (both 11-bit).
// The full 29-bit product is registered, so the result appears one clock
// after the operands. Register placement and the absence of an enable are
// this design's choice.
module pe
  import bsra_pkg::*;
(
  input  logic  clk,
  input  act_t  feat,   // feature pixel
  input  wgt_t  mult,   // weight or mask value
  output prod_t prod    // feat * mult, one cycle later
);
  always_ff @(posedge clk) prod <= prod_t'(feat) * prod_t'(mult);
endmodule
