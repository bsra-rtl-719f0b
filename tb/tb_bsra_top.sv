// tb_bsra_top: end-to-end test of the accelerator at reduced size (8 channels, 12x12 tile).
// It loads random weights for all eight layers and a random 8-bit LR tile,
// runs one tile through the whole HPAN model and compares every SR output
// pixel with a reference model of the network computed here in plain
// integer arithmetic (same number formats: products summed exactly, then
// floor to 9 fraction bits and clamp to +-255; the mask uses the same
// fixed-point sigmoid polynomial as the hardware, whose accuracy against
// the exact sigmoid is checked in the sigmoid unit's own test).
// It also counts how often each mechanism occurs (weight rotation,
// selective-adder merging, border drops of the block convolution, clamp
// saturation both ways, mask waits, attention, transposed convolution, layer
// switches), fails if one never occurs, and checks the total cycle count of
// the tile against the count the data flow implies.
module tb_bsra_top;
  import bsra_pkg::*;
  localparam int NCH = 8, H = 12, W = 12;
  localparam int NBY = (H+5)/6, NBX = (W+5)/6, NBLK = NBY*NBX;
  localparam int NBY2 = (2*H+5)/6, NBX2 = (2*W+5)/6;
  localparam int FAW = $clog2(2*NBLK), WDEP = weight_words(NCH), WAW = $clog2(WDEP);
  localparam int BW = (NCH > 1) ? $clog2(NCH) : 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic wt_we = 0; logic [BW-1:0] wt_bank; logic [WAW-1:0] wt_addr; wrow_t wt_data;
  logic in_we = 0; logic [FAW-1:0] in_blk; logic [7:0] in_pix [NPE];
  logic out_valid; logic [5:0] out_by, out_bx; act_t out_pix [NPE]; logic out_vld [NPE];

  bsra_top #(.NCH(NCH), .TILE_H(H), .TILE_W(W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // loop bounds as variables, so that the simulator compiles the loops
  // instead of unrolling them
  int nch_v = NCH, nine = 9, h_v = H, w_v = W;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference model ----------------
  int Wt [8][NCH][NCH][9][9];      // layer, out ch, in ch, row, col (Q.9)
  int F  [2][NCH][H][W];           // two feature regions
  int M  [H][W];                   // mask of one channel
  int SR [2*H][2*W];
  int GOT [2*H][2*W];
  bit GOTV [2*H][2*W];

  function automatic int clampq(longint v);   // psum (18 frac) -> act (9 frac)
    longint s;
    s = v >>> 9;
    if (s >= 130560) return 130560;
    if (s <= -130560) return -130560;
    return int'(s);
  endfunction

  function automatic int sigq(int a);          // fixed-point sigmoid(x/256)
    int q, u2, u3, u5, r;
    q = a >>> 3; u2 = (q*q) >>> 14; u3 = (u2*q) >>> 14; u5 = (u3*u2) >>> 14;
    r = 8192 + (q >>> 2) - ((u3*1365) >>> 16) + ((u5*137) >>> 16);
    return (r + 16) >>> 5;
  endfunction

  function automatic int lk(int l);
    return (l == 0) ? 5 : (l == 3 || l == 6) ? 3 : (l == 7) ? 9 : 1;
  endfunction

  task automatic ref_conv(int l, int src, int dst, int cin, int o, bit to_mask);
    int k, p;
    k = lk(l); p = (k-1)/2;
    for (int y = 0; y < h_v; y++) for (int x = 0; x < w_v; x++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < cin; c++)
        for (int r = 0; r < k; r++) for (int q = 0; q < k; q++) begin
          int a, b;
          a = y + r - p; b = x + q - p;
          if (a >= 0 && a < H && b >= 0 && b < W)
            acc += longint'(Wt[l][o][c][r][q]) * longint'(F[src][c][a][b]);
        end
      if (to_mask) M[y][x] = sigq(clampq(acc));
      else F[dst][o][y][x] = clampq(acc);
    end
  endtask

  task automatic reference();
    // layer 0: 5x5, 1 -> NCH, region 0 -> 1
    for (int o = 0; o < nch_v; o++) ref_conv(0, 0, 1, 1, o, 0);
    for (int blk = 0; blk < 2; blk++) begin
      int a, b, l0;
      l0 = 1 + 3*blk;
      a = (blk == 0) ? 1 : 1;   // CPAB input region is 1 in both blocks
      b = 0;
      // 1x1: region a -> b ; mask 1x1 from b ; attention b * mask -> a ; 3x3 a -> b
      for (int o = 0; o < nch_v; o++) ref_conv(l0, a, b, NCH, o, 0);
      for (int o = 0; o < nch_v; o++) begin
        ref_conv(l0 + 1, b, a, NCH, o, 1);
        for (int y = 0; y < h_v; y++) for (int x = 0; x < w_v; x++)
          F[a][o][y][x] = clampq(longint'(F[b][o][y][x]) * longint'(M[y][x]));
      end
      for (int o = 0; o < nch_v; o++) ref_conv(l0 + 2, a, b, NCH, o, 0);
      // the next block reads region b: swap the roles by copying
      for (int c = 0; c < nch_v; c++) for (int y = 0; y < h_v; y++) for (int x = 0; x < w_v; x++)
        F[1][c][y][x] = F[b][c][y][x];
    end
    // transposed conv 9x9, stride 2, NCH -> 1, from region 1
    for (int y = 0; y < 2*h_v; y++) for (int x = 0; x < 2*w_v; x++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < nch_v; c++)
        for (int a = 0; a < h_v; a++) for (int b = 0; b < w_v; b++) begin
          int r, q;
          r = y - 2*a + 4; q = x - 2*b + 4;
          if (r >= 0 && r < nine && q >= 0 && q < nine)
            acc += longint'(Wt[7][0][c][r][q]) * longint'(F[1][c][a][b]);
        end
      SR[y][x] = clampq(acc);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_conv = 0, n_tconv = 0, n_attn = 0, n_rot = 0, n_merge = 0, n_drop = 0;
  int n_satp = 0, n_satn = 0, n_mwait = 0, n_layer = 0, n_outblk = 0, n_fdrain = 0;
  int run_key = -1, run_len = 0, run_k = 0, n_runs = 0, bad_runs = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.tok_i.valid && (dut.tok_i.op == OP_CONV || dut.tok_i.op == OP_TCONV)) begin
      int key;
      if (dut.tok_i.op == OP_CONV) n_conv++; else n_tconv++;
      if (dut.tok_i.cidx[0] != 0) n_rot++;
      key = ((int'(dut.u_ctrl.li) * 64 + int'(dut.tok_i.och)) * 64 + int'(dut.tok_i.by)) * 64 + int'(dut.tok_i.bx);
      // the tokens of one block are consecutive: check each run's length
      if (key != run_key) begin
        if (run_key >= 0) begin n_runs++; if (run_len != run_k * run_k) bad_runs++; end
        run_key = key; run_len = 0; run_k = int'(dut.tok_i.k);
      end
      run_len++;
    end
    if (dut.tok_i.valid && dut.tok_i.op == OP_ATTN) n_attn++;
    if (int'(dut.u_ctrl.state) == 5 && !dut.mask_valid) n_mwait++;
    if (int'(dut.u_ctrl.state) == 6 && dut.u_ctrl.fcnt == 0) n_layer++;
    if (dut.tok3.valid && (dut.tok3.op == OP_CONV || dut.tok3.op == OP_TCONV))
      for (int p = 0; p < NPE; p++) begin
        if (dut.u_acc3.den[p] && !dut.u_acc3.first[p]) n_merge++;
        if (!dut.u_acc3.den[p]) n_drop++;
      end
    if (dut.tok4.valid && (dut.tok4.post == POST_FEAT || dut.tok4.post == POST_OUT)) begin
      if (dut.tok4.post == POST_FEAT && dut.tok4.op == OP_DRAIN) n_fdrain++;
      for (int p = 0; p < NPE; p++) begin
        if (dut.vld4[p] && dut.act4[p] == act_t'(ACT_MAX)) n_satp++;
        if (dut.vld4[p] && dut.act4[p] == act_t'(-ACT_MAX)) n_satn++;
      end
    end
    if (out_valid) begin
      n_outblk++;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        int y, x;
        y = 6*int'(out_by) + i; x = 6*int'(out_bx) + j;
        if (y < 2*H && x < 2*W) begin
          GOT[y][x] = int'(out_pix[i*6+j]);
          GOTV[y][x] = out_vld[i*6+j];
        end
      end
    end
  end

  task automatic count_check(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("  -> never happened"); end
  endtask

  initial begin
    int cyc, expc, words [8], base;
    words = '{NCH*5, NCH, NCH, NCH*3, NCH, NCH, NCH*3, 9};
    // weights: small random values, a few large channels to reach saturation
    for (int l = 0; l < 8; l++)
      for (int o = 0; o < nch_v; o++) for (int c = 0; c < nch_v; c++)
        for (int r = 0; r < nine; r++) for (int q = 0; q < nine; q++) begin
          int range;
          range = (l == 0) ? 20 : (l == 7) ? 12 : (lk(l) == 3) ? 10 : 40;
          if (o % 8 == 3 && l != 7) range = 1000;
          Wt[l][o][c][r][q] = $urandom_range(0, 2*range) - range;
        end
    for (int y = 0; y < h_v; y++) for (int x = 0; x < w_v; x++) F[0][0][y][x] = ($urandom % 256) << 9;
    for (int y = 0; y < 2*h_v; y++) for (int x = 0; x < 2*w_v; x++) GOTV[y][x] = 0;

    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights: bank = input channel, word = base + o*k + r
    base = 0;
    for (int l = 0; l < 8; l++) begin
      int k, cout;
      k = lk(l); cout = (l == 7) ? 1 : NCH;
      for (int c = 0; c < nch_v; c++) for (int o = 0; o < cout; o++) for (int r = 0; r < k; r++) begin
        @(negedge clk);
        wt_we = 1; wt_bank = BW'(c); wt_addr = WAW'(base + o*k + r);
        for (int q = 0; q < nine; q++) wt_data[q] = (q < k) ? wgt_t'(Wt[l][o][c][r][q]) : wgt_t'($urandom);
      end
      base += words[l];
    end
    @(negedge clk); wt_we = 0;
    // load the LR tile, zero outside it
    for (int by = 0; by < NBY; by++) for (int bx = 0; bx < NBX; bx++) begin
      @(negedge clk);
      in_we = 1; in_blk = FAW'(by*NBX + bx);
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
        in_pix[i*6+j] = (6*by+i < H && 6*bx+j < W) ? 8'(F[0][0][6*by+i][6*bx+j] >>> 9) : 8'd0;
    end
    @(negedge clk); in_we = 0;
    reference();

    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);

    // compare the SR tile
    for (int y = 0; y < 2*h_v; y++) for (int x = 0; x < 2*w_v; x++) begin
      checks++;
      if (!GOTV[y][x] || GOT[y][x] != SR[y][x]) begin
        failures++;
        if (failures < 8) $display("SR(%0d,%0d) got %0d exp %0d", y, x, GOT[y][x], SR[y][x]);
      end
    end
    // every block of every output channel stays k*k cycles in the PEs
    n_runs++; if (run_len != run_k * run_k) bad_runs++;
    checks++;
    if (bad_runs != 0) begin failures++; $display("%0d of %0d blocks not k*k cycles", bad_runs, n_runs); end
    // cycles: clear + conv tokens + drains + 7 per mask block + flushes + layer set-up + start
    expc = 1 + NBY2*NBX2 + NBLK*NCH*(25 + 1 + 1 + 9 + 1 + 1 + 9) + 81*NBLK
         + 5*NCH*NBLK + 2*NCH*NBLK*7 + NBY2*NBX2 + 8*7 + 7;
    checks++;
    if (cyc != expc) begin failures++; $display("cycles %0d, expected %0d", cyc, expc); end
    $display("tile of %0dx%0d -> %0dx%0d, %0d channels: %0d cycles", H, W, 2*H, 2*W, NCH, cyc);
    count_check("conv tokens", n_conv);
    count_check("tconv tokens", n_tconv);
    count_check("attention tokens", n_attn);
    count_check("weight rotations", n_rot);
    count_check("selective-adder merges", n_merge);
    count_check("block-conv border drops", n_drop);
    count_check("clamp +255", n_satp);
    count_check("clamp -255", n_satn);
    count_check("mask wait cycles", n_mwait);
    count_check("layer switches", n_layer);
    count_check("feature drains", n_fdrain);
    count_check("SR output blocks", n_outblk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
