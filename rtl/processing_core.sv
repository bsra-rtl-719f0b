// processing_core: the processing core of the accelerator, NCH PE arrays
// followed by stages 1 and 2 of the accumulator.
//
// PE array c multiplies the 6x6 block of input channel c by either its
// kernel row (convolution) or, for the attended channel only, the attention
// mask (pixel attention). Stages 1 and 2 add the products of all arrays at
// each of the 36 positions. The pipeline token that describes the operation
// is delayed alongside the data so it leaves together with the sums.
// Timing: operands and token in cycle t, sums and token out in cycle t+3
// (PE register, stage-1 DFF, stage-2 DFF). 32 arrays and the grouping of
// eight follow the paper.
module processing_core
  import bsra_pkg::*;
#(
  parameter int NCH   = 32,
  parameter int GROUP = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  tok_t       tok_in,
  input  logic [6:0] cin,              // input channels used by the layer
  input  act_t       feat [NCH][NPE],
  input  wrow_t      wrow [NCH],
  input  wgt_t       mask [NPE],
  output psum_t      sum  [NPE],
  output tok_t       tok_out
);
  prod_t prod [NCH][NPE];
  tok_t  tq [3];

  for (genvar c = 0; c < NCH; c++) begin : g_arr
    pe_array u_arr (
      .clk (clk),
      .attn(tok_in.op == OP_ATTN),
      .sel (tok_in.och == 6'(c)),
      .en  (7'(c) < cin),
      .wrow(wrow[c]),
      .cidx(tok_in.cidx),
      .mask(mask),
      .feat(feat[c]),
      .prod(prod[c])
    );
  end

  acc_stage12 #(.NCH(NCH), .GROUP(GROUP)) u_acc12 (
    .clk(clk), .prod(prod), .sum(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) tq[i] <= '0;
    end else begin
      tq[0] <= tok_in;
      tq[1] <= tq[0];
      tq[2] <= tq[1];
    end
  end
  assign tok_out = tq[2];
endmodule
