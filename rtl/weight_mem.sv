// weight_mem: the weight SRAM, NBANK banks, one per input channel.
//
// A word is one kernel row (up to nine 11-bit weights); layer l, output
// channel o, kernel row r of input channel c is at word
// wbase(l) + o*k(l) + r of bank c (see bsra_pkg::layer_cfg). All banks are
// read at the same address each cycle (synchronous read), which gives every
// PE array the kernel row of its own channel. Writes come from the external
// loader, one word per cycle. The 32 banks follow the paper; the word layout
// is this design's.
module weight_mem
  import bsra_pkg::*;
#(
  parameter int NBANK = 32,
  parameter int DEPTH = 489,
  localparam int AW   = $clog2(DEPTH),
  localparam int BW   = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output wrow_t         rd_data [NBANK],
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  wrow_t         wr_data
);
  wrow_t mem [NBANK][DEPTH];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[b][wr_addr] <= wr_data;
      rd_data[b] <= mem[b][rd_addr];
    end
  end
endmodule
