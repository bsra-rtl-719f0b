// psum_buf: the partial sum memory, one output-channel plane of partial sums.
//
// Sized for the largest plane it must hold, the 2x upscaled tile of the
// transposed convolution (2*TILE_H x 2*TILE_W words); convolution layers use
// the first TILE_H x TILE_W words. It has NPORT combinational read ports and
// NPORT write ports, one per PE position, so that the stage-3 selective
// adder can read, add and write back up to 36 partial sums in one cycle.
// The selective adder merges products that land on the same pixel, so the
// enabled write ports always carry distinct addresses (checked by an
// assertion). Contents are not reset; the controller clears the buffer by
// draining it before the first layer. The paper names this buffer but not
// its organisation; the multi-ported register-array form is this design's.
module psum_buf
  import bsra_pkg::*;
#(
  parameter int DEPTH = 7680,
  parameter int NPORT = 36,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr [NPORT],
  output psum_t         rd_data [NPORT],
  input  logic          wr_en   [NPORT],
  input  logic [AW-1:0] wr_addr [NPORT],
  input  psum_t         wr_data [NPORT]
);
  psum_t mem [DEPTH];

  always_comb
    for (int p = 0; p < NPORT; p++) rd_data[p] = mem[rd_addr[p]];

  always_ff @(posedge clk)
    for (int p = 0; p < NPORT; p++)
      if (wr_en[p]) mem[wr_addr[p]] <= wr_data[p];

  // two enabled write ports must never target the same word
  always_ff @(posedge clk)
    for (int a = 0; a < NPORT; a++)
      for (int b = a + 1; b < NPORT; b++)
        assert (!(wr_en[a] && wr_en[b] && wr_addr[a] == wr_addr[b]))
          else $error("psum_buf: ports %0d and %0d write the same address", a, b);
endmodule
