// tb_bsra_ctrl: runs the sequencer for one tile (4 channels, 12x12 tile)
// and compares every issued token and both memory read addresses with a
// token stream generated here from the model's layer list and the paper's
// loop order (block column, block row, kernel row, rotation). The mask
// handshake is answered after a random delay. It also checks the number of
// cycles from start to done against the count implied by that stream.
module tb_bsra_ctrl;
  import bsra_pkg::*;
  localparam int NCH = 4, H = 12, W = 12;
  localparam int NBY = 2, NBX = 2, NBY2 = 4, NBX2 = 4, NBLK = 4;
  localparam int FAW = $clog2(2*NBLK), WAW = $clog2(weight_words(NCH));
  logic clk = 0, rst_n = 0, start = 0, mask_valid = 0;
  tok_t tok;
  logic [FAW-1:0] fm_raddr;
  logic [WAW-1:0] wm_raddr;
  logic [6:0] cin;
  logic busy, done;
  int checks = 0, failures = 0;

  typedef struct { tok_t t; int fa; int wa; } exp_t;
  exp_t q [$];
  int mask_wait_total = 0;

  bsra_ctrl #(.NCH(NCH), .TILE_H(H), .TILE_W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic tok_t mk(op_e op, post_e post, int k, int r, int s, int by, int bx, int o, bit hr, bit dst);
    tok_t t;
    t = '0; t.valid = 1'b1; t.op = op; t.post = post; t.k = 4'(k); t.r = 4'(r);
    for (int j = 0; j < PE_C; j++) t.cidx[j] = 4'(((j - s) % k + k) % k);
    t.by = 6'(by); t.bx = 6'(bx); t.och = 6'(o); t.hr = hr; t.dst = dst;
    return t;
  endfunction

  // expected stream; fields a token does not use are compared only where
  // the design defines them
  initial begin
    int words [8];
    int base;
    words = '{NCH*5, NCH, NCH, NCH*3, NCH, NCH, NCH*3, 9};
    for (int by = 0; by < NBY2; by++) for (int bx = 0; bx < NBX2; bx++)
      q.push_back('{mk(OP_DRAIN, POST_NONE, 0, 0, 0, by, bx, 0, 1, 0), -1, -1});
    base = 0;
    for (int l = 0; l < 8; l++) begin
      int k, cout, src, dst; bit tc, mk_l;
      k    = (l == 0) ? 5 : (l == 3 || l == 6) ? 3 : (l == 7) ? 9 : 1;
      cout = (l == 7) ? 1 : NCH;
      src  = (l == 0 || l == 2 || l == 4 || l == 6) ? 0 : 1;
      dst  = 1 - src;
      tc   = (l == 7);
      mk_l = (l == 2 || l == 5);
      for (int o = 0; o < cout; o++) begin
        for (int bx = 0; bx < NBX; bx++) for (int by = 0; by < NBY; by++)
          for (int r = 0; r < k; r++) for (int s = 0; s < k; s++)
            q.push_back('{mk(tc ? OP_TCONV : OP_CONV, POST_NONE, k, r, s, by, bx, o, 0, dst),
                          src*NBLK + by*NBX + bx, base + o*k + r});
        if (mk_l) begin
          for (int by = 0; by < NBY; by++) for (int bx = 0; bx < NBX; bx++) begin
            q.push_back('{mk(OP_DRAIN, POST_MASK, k, 0, 0, by, bx, o, 0, dst), -1, -1});
            q.push_back('{mk(OP_ATTN, POST_FEAT, k, 0, 0, by, bx, o, 0, dst), src*NBLK + by*NBX + bx, -1});
          end
        end else if (tc) begin
          for (int by = 0; by < NBY2; by++) for (int bx = 0; bx < NBX2; bx++)
            q.push_back('{mk(OP_DRAIN, POST_OUT, k, 0, 0, by, bx, o, 1, dst), -1, -1});
        end else begin
          for (int by = 0; by < NBY; by++) for (int bx = 0; bx < NBX; bx++)
            q.push_back('{mk(OP_DRAIN, POST_FEAT, k, 0, 0, by, bx, o, 0, dst), -1, -1});
        end
      end
      base += words[l];
    end
  end

  // mask handshake: answer each mask drain after 1..8 cycles
  initial begin
    forever begin
      @(posedge clk);
      if (tok.valid && tok.post == POST_MASK) begin
        int d;
        d = $urandom_range(1, 8);
        mask_wait_total += d;
        repeat (d - 1) @(posedge clk);
        #1 mask_valid = 1'b1;
        @(posedge clk);
        #1 mask_valid = 1'b0;
      end
    end
  end

  // compare the issued stream
  int ntok = 0;
  always @(posedge clk) if (rst_n && tok.valid) begin
    exp_t e;
    if (q.size() == 0) begin failures++; $display("ctrl: extra token"); end
    else begin
      e = q.pop_front();
      ntok++;
      checks++;
      if (tok.op != e.t.op || tok.post != e.t.post || tok.by != e.t.by || tok.bx != e.t.bx ||
          tok.och != e.t.och || tok.hr != e.t.hr ||
          ((tok.op == OP_CONV || tok.op == OP_TCONV) && (tok.k != e.t.k || tok.r != e.t.r || tok.cidx != e.t.cidx)) ||
          (tok.post == POST_FEAT && tok.dst != e.t.dst) ||
          (e.fa >= 0 && int'(fm_raddr) != e.fa) || (e.wa >= 0 && int'(wm_raddr) != e.wa)) begin
        failures++;
        if (failures < 6) $display("ctrl: token %0d op %0d/%0d by %0d/%0d bx %0d/%0d och %0d/%0d r %0d/%0d cidx %h/%h fa %0d/%0d wa %0d/%0d",
          ntok, tok.op, e.t.op, tok.by, e.t.by, tok.bx, e.t.bx, tok.och, e.t.och, tok.r, e.t.r,
          tok.cidx, e.t.cidx, fm_raddr, e.fa, wm_raddr, e.wa);
      end
    end
  end

  initial begin
    int t0, cyc, n_exp, n_mdrain;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    n_exp = q.size();
    n_mdrain = 2 * NCH * NBLK;
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // every token takes one cycle, except that the attention token waits
    // for the mask; plus one flush of 7 cycles per layer, one setup cycle
    // per new layer and the start cycle
    checks++;
    if (cyc != (n_exp - n_mdrain) + mask_wait_total + 8*7 + 7 + 1) begin
      failures++;
      $display("ctrl: %0d cycles, expected %0d", cyc, (n_exp - n_mdrain) + mask_wait_total + 8*7 + 7 + 1);
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("ctrl: %0d tokens missing", q.size()); end
    $display("tokens %0d, cycles %0d", ntok, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
