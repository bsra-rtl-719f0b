// tb_acc_stage3: runs the selective adder with its partial sum buffer
// through complete single-channel layers on a 12x12 tile: it feeds the
// per-position products of the data flow (pixel times the weight its PE
// line holds in that cycle), drains the buffer, and compares every output
// pixel with a direct zero-padded convolution (k = 3 and 5) and a stride-2
// transposed convolution (k = 9), computed independently here. It also
// checks the attention pass-through and counts merged positions and
// products dropped at the tile border.
module tb_acc_stage3;
  import bsra_pkg::*;
  localparam int H = 12, W = 12, DEPTH = 4*H*W, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  tok_t tok_in, tok_out;
  psum_t sum [NPE];
  logic [AW-1:0] rd_addr [NPE], wr_addr [NPE];
  psum_t rd_data [NPE], wr_data [NPE];
  logic wr_en [NPE];
  psum_t out_val [NPE];
  logic out_vld [NPE];
  int checks = 0, failures = 0, n_merge = 0, n_drop = 0;
  longint X [H][W];
  longint Wk [9][9];
  longint R [2*H][2*W];

  acc_stage3 #(.TILE_H(H), .TILE_W(W)) dut (.*);
  psum_buf #(.DEPTH(DEPTH), .NPORT(NPE)) u_buf (
    .clk(clk), .rd_addr(rd_addr), .rd_data(rd_data),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // count merges and border drops seen by the selective adder
  always @(posedge clk) if (tok_in.valid && (tok_in.op == OP_CONV || tok_in.op == OP_TCONV))
    for (int p = 0; p < NPE; p++) begin
      if (dut.den[p] && !dut.first[p]) n_merge++;
      if (!dut.den[p]) n_drop++;
    end

  task automatic drain_and_check(input bit hr, input string what);
    int nby, nbx, oh, ow;
    oh = hr ? 2*H : H; ow = hr ? 2*W : W;
    nby = (oh + 5) / 6; nbx = (ow + 5) / 6;
    for (int by = 0; by < nby; by++)
      for (int bx = 0; bx < nbx; bx++) begin
        @(negedge clk);
        tok_in = '0; tok_in.valid = 1'b1; tok_in.op = OP_DRAIN; tok_in.hr = hr;
        tok_in.by = 6'(by); tok_in.bx = 6'(bx);
        @(negedge clk);
        tok_in = '0;
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++) begin
            int y, x;
            y = 6*by + i; x = 6*bx + j;
            if (y < oh && x < ow) begin
              checks++;
              if (!out_vld[i*6+j] || longint'(out_val[i*6+j]) != R[y][x]) begin
                failures++;
                if (failures < 8) $display("%s: (%0d,%0d) got %0d exp %0d", what, y, x, out_val[i*6+j], R[y][x]);
              end
            end else if (out_vld[i*6+j]) failures++;
          end
      end
  endtask

  task automatic run_layer(input int k, input bit tconv);
    int pad;
    pad = (k - 1) / 2;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) X[y][x] = longint'($urandom_range(0, 2000)) - 1000;
    for (int r = 0; r < k; r++) for (int c = 0; c < k; c++) Wk[r][c] = longint'($urandom_range(0, 200)) - 100;
    // independent reference
    for (int y = 0; y < 2*H; y++) for (int x = 0; x < 2*W; x++) R[y][x] = 0;
    for (int a = 0; a < H; a++) for (int b = 0; b < W; b++)
      for (int r = 0; r < k; r++) for (int c = 0; c < k; c++) begin
        int y, x;
        if (tconv) begin y = 2*a + r - pad; x = 2*b + c - pad; end
        else       begin y = a - r + pad;   x = b - c + pad;   end
        if (y >= 0 && x >= 0 && y < (tconv ? 2*H : H) && x < (tconv ? 2*W : W))
          R[y][x] += X[a][b] * Wk[r][c];
      end
    // data flow: block column, block row, kernel row, rotation
    for (int bx = 0; bx < (W+5)/6; bx++)
      for (int by = 0; by < (H+5)/6; by++)
        for (int r = 0; r < k; r++)
          for (int s = 0; s < k; s++) begin
            @(negedge clk);
            tok_in = '0; tok_in.valid = 1'b1; tok_in.op = tconv ? OP_TCONV : OP_CONV;
            tok_in.k = 4'(k); tok_in.r = 4'(r); tok_in.by = 6'(by); tok_in.bx = 6'(bx);
            for (int j = 0; j < 6; j++) tok_in.cidx[j] = 4'(((j - s) % k + k) % k);
            for (int i = 0; i < 6; i++)
              for (int j = 0; j < 6; j++) begin
                int a, b;
                a = 6*by + i; b = 6*bx + j;
                sum[i*6+j] = (a < H && b < W) ? psum_t'(X[a][b] * Wk[r][((j - s) % k + k) % k]) : '0;
              end
          end
    @(negedge clk);
    tok_in = '0;
    drain_and_check(tconv, tconv ? "tconv9" : (k == 3 ? "conv3" : "conv5"));
  endtask

  initial begin
    tok_in = '0;
    for (int p = 0; p < NPE; p++) sum[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear the buffer (random start contents), discard what comes out
    for (int by = 0; by < (2*H+5)/6; by++)
      for (int bx = 0; bx < (2*W+5)/6; bx++) begin
        @(negedge clk);
        tok_in = '0; tok_in.valid = 1'b1; tok_in.op = OP_DRAIN; tok_in.hr = 1'b1;
        tok_in.by = 6'(by); tok_in.bx = 6'(bx);
      end
    @(negedge clk); tok_in = '0;
    run_layer(3, 1'b0);
    run_layer(5, 1'b0);
    run_layer(9, 1'b1);
    run_layer(3, 1'b0);
    // attention: the sums pass straight through
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      tok_in = '0; tok_in.valid = 1'b1; tok_in.op = OP_ATTN;
      for (int p = 0; p < NPE; p++) sum[p] = psum_t'({$urandom, $urandom});
      @(negedge clk);
      tok_in = '0;
      for (int p = 0; p < NPE; p++) begin
        checks++;
        if (out_val[p] != sum[p] || !out_vld[p] || tok_out.op != OP_ATTN) failures++;
      end
    end
    $display("merged positions %0d, dropped at border %0d", n_merge, n_drop);
    checks++; if (n_merge == 0) failures++;
    checks++; if (n_drop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
