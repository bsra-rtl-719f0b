// feature_mem: the feature SRAM, NBANK banks, one per channel.
//
// A word holds one 6x6 block of one channel (36 activations), so the 6x6
// window a PE array works on is a single word and a whole block of all
// channels is read in one cycle. Each bank holds two regions (ping-pong: a
// layer reads one and writes the other) of NBLK blocks; the address is
// region*NBLK + block. Read is synchronous, shared by all banks (data one
// cycle after the address). Write is one word of one bank per cycle.
// The 32 banks follow the paper; block-wide words, two regions and the
// port structure are this design's choices.
module feature_mem
  import bsra_pkg::*;
#(
  parameter int NBANK = 32,
  parameter int NBLK  = 56,                  // 6x6 blocks per channel tile
  localparam int DEPTH = 2 * NBLK,
  localparam int AW    = $clog2(DEPTH),
  localparam int BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output act_t          rd_data [NBANK][NPE],
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  act_t          wr_data [NPE]
);
  typedef act_t [NPE-1:0] word_t;
  word_t mem [NBANK][DEPTH];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b))
        for (int p = 0; p < NPE; p++) mem[b][wr_addr][p] <= wr_data[p];
      for (int p = 0; p < NPE; p++) rd_data[b][p] <= mem[b][rd_addr][p];
    end
  end
endmodule
