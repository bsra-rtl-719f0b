// bsra_ctrl: the sequencer that runs the whole HPAN model on one tile
// (full-model layer fusion: all intermediate features stay on chip).
//
// Per tile, after a start pulse:
//  1. CLEAR: drain every block of the partial sum buffer once, discarding
//     the data, so the buffer starts at zero.
//  2. For each layer of bsra_pkg::layer_cfg, for each output channel o:
//     CONV: for bx (block column), for by (block row, i.e. down the tile
//     first, then right), for kernel row r, for shift s: issue one token.
//     The kernel column of PE line j is cidx[j] = (j - s) mod k, so the
//     weights rotate right by one line per cycle and a kernel row is used up
//     after k cycles; a 6x6 block stays in the PEs for k*k cycles. This is
//     the paper's data flow (its example: nine cycles for a 3x3 kernel).
//     DRAIN: issue one drain token per block of the output plane; the
//     channel is clamped and written to feature memory (conv), or sent out
//     as SR pixels (transposed conv, 2x plane).
//     Mask layers (second 1x1 conv of a CPAB): drain one block, wait until
//     the sigmoid has produced its mask, then issue an attention token that
//     multiplies the same block of the layer's input channel o by the mask
//     and writes the product to feature memory. Then the next block.
//  3. FLUSH: wait until the pipeline is empty before the next layer reads
//     what this layer wrote.
// One token is issued per cycle at most. Outputs are combinational from
// the state (the token is presented in the cycle it is issued together with
// the feature and weight memory read addresses). The loop order and the
// per-cycle weight rotation follow the paper; the drain/clear mechanism,
// the one-channel-at-a-time order and the mask handshake are this design's.
module bsra_ctrl
  import bsra_pkg::*;
#(
  parameter int NCH    = 32,
  parameter int TILE_H = 40,
  parameter int TILE_W = 48,
  localparam int NBY   = (TILE_H + PE_R - 1) / PE_R,
  localparam int NBX   = (TILE_W + PE_C - 1) / PE_C,
  localparam int NBY2  = (2*TILE_H + PE_R - 1) / PE_R,
  localparam int NBX2  = (2*TILE_W + PE_C - 1) / PE_C,
  localparam int NBLK  = NBY * NBX,
  localparam int FAW   = $clog2(2 * NBLK),
  localparam int WAW   = $clog2(weight_words(NCH))
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,       // begin a tile (ignored while busy)
  input  logic           mask_valid,  // a new attention mask is ready
  output tok_t           tok,         // token issued this cycle
  output logic [FAW-1:0] fm_raddr,    // feature memory read address
  output logic [WAW-1:0] wm_raddr,    // weight memory read address
  output logic [6:0]     cin,         // input channels of the current layer
  output logic           busy,
  output logic           done         // one-cycle pulse at the end of a tile
);
  localparam int FLUSH_CYC = 7;

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_CONV, S_DRAIN, S_MDRAIN, S_MWAIT, S_FLUSH, S_LINIT
  } state_e;

  state_e               state;
  logic [2:0]           li;
  logic [5:0]           o, by, bx;
  logic [3:0]           r, s;
  logic [PE_C-1:0][3:0] cidx;
  logic [3:0]           fcnt;
  layer_t               lay;
  logic [PE_C-1:0][3:0] cidx0;

  assign lay = layer_cfg(int'(li), NCH);
  assign cin = lay.cin;
  assign busy = (state != S_IDLE);

  // starting column of each PE line: j mod k
  always_comb begin
    for (int j = 0; j < PE_C; j++) begin
      int v;
      v = j;
      for (int t = 0; t < PE_C; t++) if (v >= int'(lay.k)) v -= int'(lay.k);
      cidx0[j] = 4'(v);
    end
  end

  // issued token and read addresses
  always_comb begin
    tok      = '0;
    tok.k    = lay.k;
    tok.r    = r;
    tok.cidx = cidx;
    tok.by   = by;
    tok.bx   = bx;
    tok.och  = o;
    tok.dst  = lay.dst;
    fm_raddr = FAW'(int'(lay.src) * NBLK + int'(by) * NBX + int'(bx));
    wm_raddr = WAW'(int'(lay.wbase) + int'(o) * int'(lay.k) + int'(r));
    case (state)
      S_CLEAR: begin
        tok.valid = 1'b1; tok.op = OP_DRAIN; tok.post = POST_NONE; tok.hr = 1'b1;
      end
      S_CONV: begin
        tok.valid = 1'b1;
        tok.op    = (lay.kind == L_TCONV) ? OP_TCONV : OP_CONV;
        tok.post  = POST_NONE;
      end
      S_DRAIN: begin
        tok.valid = 1'b1; tok.op = OP_DRAIN;
        tok.hr    = (lay.kind == L_TCONV);
        tok.post  = (lay.kind == L_TCONV) ? POST_OUT : POST_FEAT;
      end
      S_MDRAIN: begin
        tok.valid = 1'b1; tok.op = OP_DRAIN; tok.post = POST_MASK;
      end
      S_MWAIT: begin
        tok.valid = mask_valid; tok.op = OP_ATTN; tok.post = POST_FEAT;
      end
      default: ;
    endcase
  end

  // loop counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      li <= '0; o <= '0; by <= '0; bx <= '0; r <= '0; s <= '0;
      cidx <= '0; fcnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR;
          li <= '0; o <= '0; by <= '0; bx <= '0;
        end
        S_CLEAR: begin
          if (int'(bx) == NBX2 - 1) begin
            bx <= '0;
            if (int'(by) == NBY2 - 1) begin
              by <= '0; r <= '0; s <= '0; cidx <= cidx0;
              state <= S_CONV;
            end else by <= by + 1'b1;
          end else bx <= bx + 1'b1;
        end
        S_CONV: begin
          if (s == lay.k - 1'b1) begin
            s <= '0;
            cidx <= cidx0;
            if (r == lay.k - 1'b1) begin
              r <= '0;
              if (int'(by) == NBY - 1) begin
                by <= '0;
                if (int'(bx) == NBX - 1) begin
                  bx <= '0;
                  state <= (lay.kind == L_MASK) ? S_MDRAIN : S_DRAIN;
                end else bx <= bx + 1'b1;
              end else by <= by + 1'b1;
            end else r <= r + 1'b1;
          end else begin
            s <= s + 1'b1;
            for (int j = 0; j < PE_C; j++)
              cidx[j] <= (cidx[j] == 4'd0) ? lay.k - 1'b1 : cidx[j] - 1'b1;
          end
        end
        S_DRAIN: begin
          if (int'(bx) == ((lay.kind == L_TCONV) ? NBX2 : NBX) - 1) begin
            bx <= '0;
            if (int'(by) == ((lay.kind == L_TCONV) ? NBY2 : NBY) - 1) begin
              by <= '0;
              if (7'(o) == lay.cout - 1'b1) begin
                state <= S_FLUSH; fcnt <= '0;
              end else begin
                o <= o + 1'b1; state <= S_CONV; cidx <= cidx0;
              end
            end else by <= by + 1'b1;
          end else bx <= bx + 1'b1;
        end
        S_MDRAIN: state <= S_MWAIT;
        S_MWAIT: if (mask_valid) begin
          state <= S_MDRAIN;
          if (int'(bx) == NBX - 1) begin
            bx <= '0;
            if (int'(by) == NBY - 1) begin
              by <= '0;
              if (7'(o) == lay.cout - 1'b1) begin
                state <= S_FLUSH; fcnt <= '0;
              end else begin
                o <= o + 1'b1; state <= S_CONV; cidx <= cidx0;
              end
            end else by <= by + 1'b1;
          end else bx <= bx + 1'b1;
        end
        S_FLUSH: begin
          fcnt <= fcnt + 1'b1;
          if (int'(fcnt) == FLUSH_CYC - 1) begin
            o <= '0;
            if (int'(li) == NLAYERS - 1) begin
              state <= S_IDLE; done <= 1'b1; li <= '0;
            end else begin
              li <= li + 1'b1; state <= S_LINIT;
              r <= '0; s <= '0;
            end
          end
        end
        S_LINIT: begin
          cidx <= cidx0;    // cidx0 now reflects the new layer's k
          state <= S_CONV;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
