// bsra_pkg: number formats, pipeline token and layer table shared by the
// BSRA super-resolution accelerator.
//
// Number formats (the paper gives 11-bit weights and 18-bit activations; the
// split into integer and fraction bits is this design's choice):
//   activation  signed 18 bit, 9 fraction bits (Q9.9); the clamp keeps it in
//               [-255, +255], which needs 9 integer bits including sign.
//   weight      signed 11 bit, 9 fraction bits (range [-2, 2)).
//   mask        attention mask from the sigmoid, same format as a weight,
//               value 0 .. 512 (= 0.0 .. 1.0).
//   product     activation x weight, 29 bit, 18 fraction bits.
//   psum        partial sums, 42 bit, 18 fraction bits (no overflow for a
//               9x9 kernel over 32 input channels).
//
// The layer table follows the HPAN model: 5x5 conv (1 -> C), two clamping
// pixel attention blocks (1x1, 1x1 + sigmoid mask + multiply, 3x3) and a
// 9x9 stride-2 transposed convolution (C -> 1). With C = 32 it holds
// 25*32 + 2*(32*32 + 32*32 + 9*32*32) + 81*32 = 25,920 weights, the model
// size the paper reports. Two feature regions (A = 0, B = 1) are used in
// ping-pong fashion.
package bsra_pkg;

  localparam int ACT_W    = 18;
  localparam int ACT_FRAC = 9;
  localparam int W_W      = 11;
  localparam int W_FRAC   = 9;
  localparam int PROD_W   = ACT_W + W_W;          // 29
  localparam int PSUM_W   = 42;
  localparam int PSUM_FRAC = ACT_FRAC + W_FRAC;   // 18

  // PE array geometry: six PE lines (columns) of six PEs (rows)
  localparam int PE_R = 6;
  localparam int PE_C = 6;
  localparam int NPE  = PE_R * PE_C;
  localparam int KMAX = 9;                         // largest kernel (9x9 TConv)

  // clamp bound, +-255 in activation format
  localparam int ACT_MAX = 255 <<< ACT_FRAC;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [W_W-1:0]    wgt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  // one row of a kernel, as stored in one weight memory word
  typedef wgt_t [KMAX-1:0] wrow_t;

  // operation carried by a pipeline token
  typedef enum logic [1:0] {
    OP_CONV  = 2'd0,   // convolution: scatter products into the psum buffer
    OP_TCONV = 2'd1,   // stride-2 transposed convolution, same scatter
    OP_ATTN  = 2'd2,   // pixel attention: pass the products straight out
    OP_DRAIN = 2'd3    // read a 6x6 block of the psum buffer and clear it
  } op_e;

  // what the post-processing does with a token's 36 results
  typedef enum logic [1:0] {
    POST_NONE = 2'd0,  // discard (psum clearing, conv tokens)
    POST_FEAT = 2'd1,  // clamp and write to feature memory
    POST_MASK = 2'd2,  // clamp, sigmoid, hand to the PE arrays as a mask
    POST_OUT  = 2'd3   // clamp and send out as SR pixels
  } post_e;

  // token that travels down the pipeline next to the data
  typedef struct packed {
    logic                  valid;
    op_e                   op;
    post_e                 post;
    logic [3:0]            k;      // kernel size
    logic [3:0]            r;      // kernel row in use
    logic [PE_C-1:0][3:0]  cidx;   // kernel column held by each PE line
    logic [5:0]            by;     // block row (6-pixel units)
    logic [5:0]            bx;     // block column
    logic [5:0]            och;    // output channel
    logic                  hr;     // drain from the 2x (HR) psum plane
    logic                  dst;    // destination feature region
  } tok_t;

  typedef enum logic [1:0] {
    L_CONV  = 2'd0,
    L_MASK  = 2'd1,   // 1x1 conv whose output becomes an attention mask
    L_TCONV = 2'd2
  } lkind_e;

  typedef struct packed {
    lkind_e      kind;
    logic [3:0]  k;
    logic [6:0]  cin;
    logic [6:0]  cout;
    logic        src;     // source feature region
    logic        dst;     // destination feature region
    logic [11:0] wbase;   // first weight word of the layer in every bank
  } layer_t;

  localparam int NLAYERS = 8;

  // weight words per bank: every output channel stores k rows
  function automatic int layer_words(int idx, int c);
    case (idx)
      0:       return c * 5;
      3, 6:    return c * 3;
      7:       return 9;
      default: return c;
    endcase
  endfunction

  function automatic int weight_words(int c);
    int s = 0;
    for (int i = 0; i < NLAYERS; i++) s += layer_words(i, c);
    return s;
  endfunction

  // HPAN layer table for C channels
  function automatic layer_t layer_cfg(int idx, int c);
    layer_t l;
    int base = 0;
    for (int i = 0; i < idx; i++) base += layer_words(i, c);
    l.wbase = 12'(base);
    l.cin   = 7'(c);
    l.cout  = 7'(c);
    case (idx)
      0: begin l.kind = L_CONV;  l.k = 4'd5; l.cin = 7'd1; l.src = 1'b0; l.dst = 1'b1; end
      1: begin l.kind = L_CONV;  l.k = 4'd1; l.src = 1'b1; l.dst = 1'b0; end
      2: begin l.kind = L_MASK;  l.k = 4'd1; l.src = 1'b0; l.dst = 1'b1; end
      3: begin l.kind = L_CONV;  l.k = 4'd3; l.src = 1'b1; l.dst = 1'b0; end
      4: begin l.kind = L_CONV;  l.k = 4'd1; l.src = 1'b0; l.dst = 1'b1; end
      5: begin l.kind = L_MASK;  l.k = 4'd1; l.src = 1'b1; l.dst = 1'b0; end
      6: begin l.kind = L_CONV;  l.k = 4'd3; l.src = 1'b0; l.dst = 1'b1; end
      default: begin l.kind = L_TCONV; l.k = 4'd9; l.cout = 7'd1; l.src = 1'b1; l.dst = 1'b0; end
    endcase
    return l;
  endfunction

endpackage
