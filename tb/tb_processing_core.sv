// tb_processing_core: feeds random 6x6 blocks of 32 channels with random
// kernel rows and rotating kernel columns (convolution), and with a mask for
// one selected channel (attention), one operation per cycle, and checks each
// position's channel sum three cycles later together with its token.
module tb_processing_core;
  import bsra_pkg::*;
  localparam int NCH = 32;
  logic clk = 0, rst_n = 0;
  tok_t tok_in, tok_out;
  logic [6:0] cin;
  act_t feat [NCH][NPE];
  wrow_t wrow [NCH];
  wgt_t mask [NPE];
  psum_t sum [NPE];
  int checks = 0, failures = 0;
  processing_core #(.NCH(NCH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint exp_q [$];
    logic [5:0] och_q [$];
    int n_attn = 0;
    tok_in = '0; cin = 7'(NCH);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int k, s;
      @(negedge clk);
      if (n >= 3) begin
        for (int p = 0; p < NPE; p++) begin
          checks++;
          if (longint'(sum[p]) != exp_q[p]) begin
            failures++;
            if (failures < 5) $display("core: n=%0d p=%0d got %0d exp %0d", n, p, sum[p], exp_q[p]);
          end
        end
        checks++;
        if (!tok_out.valid || tok_out.och != och_q[0]) failures++;
        repeat (NPE) void'(exp_q.pop_front());
        void'(och_q.pop_front());
      end
      k = (n % 3 == 0) ? 1 : (n % 3 == 1) ? 3 : 9;
      s = $urandom % k;
      cin = (n % 11 == 5) ? 7'd1 : 7'(NCH);
      tok_in = '0;
      tok_in.valid = 1'b1;
      tok_in.op    = (n % 4 == 2) ? OP_ATTN : OP_CONV;
      tok_in.och   = 6'($urandom % NCH);
      for (int j = 0; j < PE_C; j++) tok_in.cidx[j] = 4'(((j - s) % k + k) % k);
      for (int c = 0; c < NCH; c++) begin
        for (int t = 0; t < KMAX; t++) wrow[c][t] = wgt_t'($urandom);
        for (int p = 0; p < NPE; p++) feat[c][p] = act_t'($urandom_range(0, 261120)) - act_t'(130560);
      end
      for (int p = 0; p < NPE; p++) mask[p] = wgt_t'($urandom_range(138, 374));
      if (tok_in.op == OP_ATTN) n_attn++;
      for (int p = 0; p < NPE; p++) begin
        longint a;
        a = 0;
        if (tok_in.op == OP_ATTN)
          a = longint'(feat[tok_in.och][p]) * longint'(mask[p]);
        else
          for (int c = 0; c < int'(cin); c++)
            a += longint'(feat[c][p]) * longint'(wrow[c][tok_in.cidx[p % PE_C]]);
        exp_q.push_back(a);
      end
      och_q.push_back(tok_in.och);
    end
    $display("attention operations: %0d", n_attn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
