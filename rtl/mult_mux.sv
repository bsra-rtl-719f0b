// mult_mux: chooses the 36 multiplicands of one PE array (the MUX of the
// system diagram, in front of the PE arrays).
//
// Convolution: the array holds one input channel; the weights of one kernel
// row are broadcast vertically, so all six PEs of PE line j get the weight
// of kernel column cidx[j]. The controller rotates cidx every cycle, which
// is the circular right shift of the weights across the PE lines shown in the
// paper's data-flow example.
// Pixel attention: the mask values are distributed, each PE getting the
// mask of its own pixel. Only the array that holds the channel being
// attended (sel) gets the mask; the others get zero so that the channel
// adder tree passes that one channel's products unchanged.
// An array whose channel is not used by the layer (en = 0) gets zero.
// Purely combinational. PE index p = i*PE_C + j (i = PE within line, j = line).
module mult_mux
  import bsra_pkg::*;
(
  input  logic                 attn,   // 1: attention mask, 0: kernel weights
  input  logic                 sel,    // this array holds the attended channel
  input  logic                 en,     // this array's channel takes part
  input  wrow_t                wrow,   // kernel row from weight memory
  input  logic [PE_C-1:0][3:0] cidx,   // kernel column per PE line
  input  wgt_t                 mask [NPE],
  output wgt_t                 mult [NPE]
);
  always_comb begin
    for (int i = 0; i < PE_R; i++) begin
      for (int j = 0; j < PE_C; j++) begin
        if (attn)
          mult[i*PE_C+j] = sel ? mask[i*PE_C+j] : '0;
        else if (en && cidx[j] < 4'(KMAX))
          mult[i*PE_C+j] = wrow[cidx[j]];
        else
          mult[i*PE_C+j] = '0;
      end
    end
  end
endmodule
