// pe_array: one PE array of the processing core, six PE lines (PEL0..PEL5)
// of six PEs each, serving one input channel.
//
// The 36 PEs hold the 36 pixels of a 6x6 feature block, one pixel per PE,
// so the feature is spatially mapped onto the array. The multiplicands come
// from mult_mux: a kernel row broadcast down each PE line for convolution,
// or the distributed attention mask for pixel attention. All 36 products are
// registered and leave the array one cycle after the operands arrive.
// Array size 6x6 follows the paper; the index order p = i*6 + j (i = row
// within a PE line, j = PE line = image column) is this design's.
module pe_array
  import bsra_pkg::*;
(
  input  logic                 clk,
  input  logic                 attn,
  input  logic                 sel,
  input  logic                 en,
  input  wrow_t                wrow,
  input  logic [PE_C-1:0][3:0] cidx,
  input  wgt_t                 mask [NPE],
  input  act_t                 feat [NPE],
  output prod_t                prod [NPE]
);
  wgt_t mult [NPE];

  mult_mux u_mux (
    .attn(attn), .sel(sel), .en(en), .wrow(wrow), .cidx(cidx),
    .mask(mask), .mult(mult)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe u_pe (.clk(clk), .feat(feat[p]), .mult(mult[p]), .prod(prod[p]));
  end
endmodule
