// acc_stage3: stage 3 of the accumulator, the selective adder in front of
// the partial sum buffer.
//
// Input: the 36 channel sums of stage 2 and the token describing them.
// * OP_CONV: PE position (i, j) of block (by, bx) holds input pixel
//   (a, b) = (6*by + i, 6*bx + j) times kernel weight (r, c = cidx[j]). That
//   product belongs to output pixel (a - r + P, b - c + P), P = (k-1)/2
//   ("same" padding). Products that fall outside the tile are dropped: this
//   is the block convolution, which pads every tile with zeros instead of
//   fetching its neighbours.
// * OP_TCONV: stride-2 transposed convolution, output pixel
//   (2a + r - P, 2b + c - P) of the 2x plane.
// Within one cycle several PE lines of a row can feed the same output pixel
// (e.g. three lines of a 3x3 kernel row). The selective adder sums, for
// every enabled position, all positions of the same row with the same
// destination, and lets only the first of them write; the sum is added to
// the partial sum read from the buffer and written back in the same cycle.
// * OP_ATTN: the sums (one channel's mask products) are selected as the
//   output unchanged, without touching the buffer.
// * OP_DRAIN: the 6x6 block (by, bx) of the buffer (of the 2x plane if hr)
//   is read out and cleared; pixels outside the plane read as zero.
// Outputs are registered: token, 36 values and 36 valid bits appear one
// cycle after the inputs. The paper gives the selective adder's role (pick
// the right inputs for convolution or attention, accumulate with the
// partial sum buffer); the destination arithmetic and merging are this
// design's reading of its data-flow example.
module acc_stage3
  import bsra_pkg::*;
#(
  parameter int TILE_H = 40,
  parameter int TILE_W = 48,
  localparam int DEPTH = 4 * TILE_H * TILE_W,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  tok_t          tok_in,
  input  psum_t         sum     [NPE],
  // partial sum buffer
  output logic [AW-1:0] rd_addr [NPE],
  input  psum_t         rd_data [NPE],
  output logic          wr_en   [NPE],
  output logic [AW-1:0] wr_addr [NPE],
  output psum_t         wr_data [NPE],
  // results
  output tok_t          tok_out,
  output psum_t         out_val [NPE],
  output logic          out_vld [NPE]
);
  int    dy   [NPE];     // destination row
  int    dx   [NPE];     // destination column
  logic  den  [NPE];     // destination inside the plane
  psum_t merged [NPE];
  logic  first  [NPE];
  psum_t val_d [NPE];
  logic  vld_d [NPE];

  // destinations
  always_comb begin
    int pad, oh, ow;
    pad = (int'(tok_in.k) - 1) / 2;
    oh  = (tok_in.op == OP_TCONV || (tok_in.op == OP_DRAIN && tok_in.hr)) ? 2*TILE_H : TILE_H;
    ow  = (tok_in.op == OP_TCONV || (tok_in.op == OP_DRAIN && tok_in.hr)) ? 2*TILE_W : TILE_W;
    for (int i = 0; i < PE_R; i++) begin
      for (int j = 0; j < PE_C; j++) begin
        int p, a, b;
        p = i*PE_C + j;
        a = PE_R*int'(tok_in.by) + i;
        b = PE_C*int'(tok_in.bx) + j;
        case (tok_in.op)
          OP_CONV: begin
            dy[p] = a - int'(tok_in.r) + pad;
            dx[p] = b - int'(tok_in.cidx[j]) + pad;
          end
          OP_TCONV: begin
            dy[p] = 2*a + int'(tok_in.r) - pad;
            dx[p] = 2*b + int'(tok_in.cidx[j]) - pad;
          end
          default: begin
            dy[p] = a;
            dx[p] = b;
          end
        endcase
        den[p] = tok_in.valid && dy[p] >= 0 && dy[p] < oh && dx[p] >= 0 && dx[p] < ow;
        rd_addr[p] = den[p] ? AW'(dy[p]*ow + dx[p]) : '0;
      end
    end
  end

  // selective adder: merge the positions of a row that share a destination
  always_comb begin
    for (int i = 0; i < PE_R; i++) begin
      for (int j = 0; j < PE_C; j++) begin
        int p;
        p = i*PE_C + j;
        merged[p] = '0;
        first[p]  = den[p];
        for (int q = 0; q < PE_C; q++) begin
          if (den[i*PE_C+q] && dx[i*PE_C+q] == dx[p]) begin
            merged[p] += sum[i*PE_C+q];
            if (q < j) first[p] = 1'b0;
          end
        end
      end
    end
  end

  // buffer update and result selection
  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      wr_addr[p] = rd_addr[p];
      wr_en[p]   = 1'b0;
      wr_data[p] = '0;
      val_d[p]   = '0;
      vld_d[p]   = 1'b0;
      case (tok_in.op)
        OP_CONV, OP_TCONV: begin
          wr_en[p]   = first[p];
          wr_data[p] = rd_data[p] + merged[p];
        end
        OP_ATTN: begin
          val_d[p] = sum[p];
          vld_d[p] = tok_in.valid;
        end
        default: begin  // OP_DRAIN
          wr_en[p] = den[p];
          val_d[p] = den[p] ? rd_data[p] : '0;
          vld_d[p] = den[p];
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_out <= '0;
      for (int p = 0; p < NPE; p++) begin
        out_val[p] <= '0;
        out_vld[p] <= 1'b0;
      end
    end else begin
      tok_out <= tok_in;
      for (int p = 0; p < NPE; p++) begin
        out_val[p] <= val_d[p];
        out_vld[p] <= vld_d[p];
      end
    end
  end
endmodule
