// bsra_top: block-based super-resolution accelerator (BSRA) running the
// HPAN model (5x5 conv, two clamping pixel attention blocks, 9x9 stride-2
// transposed conv) on one TILE_H x TILE_W low-resolution tile at a time and
// producing the 2x tile, with every intermediate feature kept on chip.
//
// Datapath (the system diagram of the paper):
//   bsra_ctrl -> feature_mem / weight_mem (32 banks each, synchronous read)
//   -> processing_core (32 PE arrays + accumulator stages 1 and 2)
//   -> acc_stage3 (selective adder) <-> psum_buf (partial sum memory)
//   -> clamp_unit -> feature_mem write-back, or SR pixel output
//                 -> sigmoid_unit -> mask register -> PE arrays (the MUX path)
// Pipeline: token issued in cycle t, memory data in t+1, PE products t+2,
// stage-1 sums t+3, stage-2 sums t+4, stage-3 results t+5, written back or
// output at the end of t+5. The mask register is loaded at the end of t+5 and
// mask_valid pulses in t+6, when the controller issues the attention token.
//
// External interface (stands in for the on-chip bus and the off-chip memory
// controller, which the paper only draws): while idle, the host loads kernel
// rows through the wt_* port and the 8-bit input tile, one 6x6 block per
// write, through the in_* port (integer pixel p becomes activation p).
// A start pulse runs the whole model; the SR tile leaves through the out_*
// port as 6x6 blocks of the 2x plane (clamped activations, 9 fraction
// bits), then done pulses.
module bsra_top
  import bsra_pkg::*;
#(
  parameter int NCH    = 32,   // channels = PE arrays = memory banks
  parameter int TILE_H = 40,   // LR tile rows
  parameter int TILE_W = 48,   // LR tile columns
  localparam int NBY   = (TILE_H + PE_R - 1) / PE_R,
  localparam int NBX   = (TILE_W + PE_C - 1) / PE_C,
  localparam int NBLK  = NBY * NBX,
  localparam int FAW   = $clog2(2 * NBLK),
  localparam int WDEP  = weight_words(NCH),
  localparam int WAW   = $clog2(WDEP),
  localparam int BW    = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int PDEP  = 4 * TILE_H * TILE_W,
  localparam int PAW   = $clog2(PDEP)
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           start,
  output logic           busy,
  output logic           done,
  // weight load
  input  logic           wt_we,
  input  logic [BW-1:0]  wt_bank,
  input  logic [WAW-1:0] wt_addr,
  input  wrow_t          wt_data,
  // LR tile load: block index by*NBX + bx
  input  logic           in_we,
  input  logic [FAW-1:0] in_blk,
  input  logic [7:0]     in_pix [NPE],
  // SR tile output
  output logic           out_valid,
  output logic [5:0]     out_by,
  output logic [5:0]     out_bx,
  output act_t           out_pix [NPE],
  output logic           out_vld [NPE]
);
  // ---------------- issue ----------------
  tok_t           tok_i;
  logic [FAW-1:0] fm_raddr;
  logic [WAW-1:0] wm_raddr;
  logic [6:0]     cin_i;
  logic           mask_valid;

  bsra_ctrl #(.NCH(NCH), .TILE_H(TILE_H), .TILE_W(TILE_W)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .mask_valid(mask_valid),
    .tok(tok_i), .fm_raddr(fm_raddr), .wm_raddr(wm_raddr), .cin(cin_i),
    .busy(busy), .done(done)
  );

  // ---------------- memories ----------------
  act_t           fm_rdata [NCH][NPE];
  wrow_t          wm_rdata [NCH];
  logic           fm_we;
  logic [BW-1:0]  fm_wbank;
  logic [FAW-1:0] fm_waddr;
  act_t           fm_wdata [NPE];

  feature_mem #(.NBANK(NCH), .NBLK(NBLK)) u_fmem (
    .clk(clk), .rd_addr(fm_raddr), .rd_data(fm_rdata),
    .wr_en(fm_we), .wr_bank(fm_wbank), .wr_addr(fm_waddr), .wr_data(fm_wdata)
  );

  weight_mem #(.NBANK(NCH), .DEPTH(WDEP)) u_wmem (
    .clk(clk), .rd_addr(wm_raddr), .rd_data(wm_rdata),
    .wr_en(wt_we), .wr_bank(wt_bank), .wr_addr(wt_addr), .wr_data(wt_data)
  );

  // fetch stage: token waits one cycle for the memory data
  tok_t       tok_f;
  logic [6:0] cin_f;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_f <= '0;
      cin_f <= '0;
    end else begin
      tok_f <= tok_i;
      cin_f <= cin_i;
    end
  end

  // ---------------- processing core ----------------
  wgt_t  mask_q [NPE];
  psum_t sum3 [NPE];
  tok_t  tok3;

  processing_core #(.NCH(NCH)) u_core (
    .clk(clk), .rst_n(rst_n), .tok_in(tok_f), .cin(cin_f),
    .feat(fm_rdata), .wrow(wm_rdata), .mask(mask_q),
    .sum(sum3), .tok_out(tok3)
  );

  // ---------------- stage 3 and partial sums ----------------
  logic [PAW-1:0] ps_raddr [NPE];
  psum_t          ps_rdata [NPE];
  logic           ps_we    [NPE];
  logic [PAW-1:0] ps_waddr [NPE];
  psum_t          ps_wdata [NPE];
  tok_t           tok4;
  psum_t          val4 [NPE];
  logic           vld4 [NPE];

  acc_stage3 #(.TILE_H(TILE_H), .TILE_W(TILE_W)) u_acc3 (
    .clk(clk), .rst_n(rst_n), .tok_in(tok3), .sum(sum3),
    .rd_addr(ps_raddr), .rd_data(ps_rdata),
    .wr_en(ps_we), .wr_addr(ps_waddr), .wr_data(ps_wdata),
    .tok_out(tok4), .out_val(val4), .out_vld(vld4)
  );

  psum_buf #(.DEPTH(PDEP), .NPORT(NPE)) u_psum (
    .clk(clk), .rd_addr(ps_raddr), .rd_data(ps_rdata),
    .wr_en(ps_we), .wr_addr(ps_waddr), .wr_data(ps_wdata)
  );

  // ---------------- post-processing ----------------
  act_t act4 [NPE];
  wgt_t sig4 [NPE];

  clamp_unit   #(.NLANE(NPE)) u_clamp (.din(val4), .dout(act4));
  sigmoid_unit #(.NLANE(NPE)) u_sigm  (.din(act4), .dout(sig4));

  wire post_feat = tok4.valid && tok4.post == POST_FEAT;
  wire post_mask = tok4.valid && tok4.post == POST_MASK;
  wire post_out  = tok4.valid && tok4.post == POST_OUT;

  // feature memory write: results of the pipeline, or the input tile
  always_comb begin
    fm_we    = post_feat || in_we;
    fm_wbank = post_feat ? BW'(tok4.och) : '0;
    fm_waddr = post_feat ? FAW'(int'(tok4.dst) * NBLK + int'(tok4.by) * NBX + int'(tok4.bx))
                         : in_blk;
    for (int p = 0; p < NPE; p++)
      fm_wdata[p] = post_feat ? (vld4[p] ? act4[p] : '0)
                              : act_t'({1'b0, in_pix[p]}) <<< ACT_FRAC;
  end

  // attention mask register (the sigmoid -> MUX path)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_valid <= 1'b0;
      for (int p = 0; p < NPE; p++) mask_q[p] <= '0;
    end else begin
      mask_valid <= post_mask;
      if (post_mask)
        for (int p = 0; p < NPE; p++) mask_q[p] <= vld4[p] ? sig4[p] : '0;
    end
  end

  // SR output
  always_comb begin
    out_valid = post_out;
    out_by    = tok4.by;
    out_bx    = tok4.bx;
    for (int p = 0; p < NPE; p++) begin
      out_pix[p] = vld4[p] ? act4[p] : '0;
      out_vld[p] = post_out && vld4[p];
    end
  end

  // the host may load the tile only while the accelerator is idle
  always_ff @(posedge clk)
    assert (!(in_we && (busy || post_feat)))
      else $error("bsra_top: input tile written while busy");
endmodule
