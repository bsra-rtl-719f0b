// acc_stage12: stages 1 and 2 of the three-stage accumulator.
//
// Stage 1 adds, for each of the 36 PE positions, the products of a group of
// eight PE arrays (eight input channels) and registers the group sums.
// Stage 2 adds the group sums into the full channel sum of each position
// and registers it. With 32 arrays there are four groups, as in the paper's
// accumulator figure. Latency: two cycles from prod to sum. The grouping of
// eight and the two DFF ranks follow the paper; the adders are plain
// behavioural sums (the tree shape is left to synthesis).
module acc_stage12
  import bsra_pkg::*;
#(
  parameter int NCH   = 32,   // PE arrays (input channels)
  parameter int GROUP = 8     // arrays per stage-1 adder
) (
  input  logic  clk,
  input  prod_t prod [NCH][NPE],
  output psum_t sum  [NPE]
);
  localparam int NG = NCH / GROUP;

  psum_t s1 [NG][NPE];

  // stage 1: eight channels per group
  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) begin
      for (int p = 0; p < NPE; p++) begin
        psum_t a;
        a = '0;
        for (int c = 0; c < GROUP; c++) a += psum_t'(prod[g*GROUP+c][p]);
        s1[g][p] <= a;
      end
    end
  end

  // stage 2: all groups
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPE; p++) begin
      psum_t a;
      a = '0;
      for (int g = 0; g < NG; g++) a += s1[g][p];
      sum[p] <= a;
    end
  end

  initial assert (NCH % GROUP == 0) else $error("NCH must be a multiple of GROUP");
endmodule
