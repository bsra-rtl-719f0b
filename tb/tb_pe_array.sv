// tb_pe_array: drives a PE array with a 6x6 feature block and a kernel row
// rotated over k cycles as in the convolution data flow, then with an
// attention mask, and checks the 36 products one cycle later.
module tb_pe_array;
  import bsra_pkg::*;
  logic clk = 0;
  logic attn, sel, en;
  wrow_t wrow;
  logic [PE_C-1:0][3:0] cidx;
  wgt_t mask [NPE];
  act_t feat [NPE];
  prod_t prod [NPE];
  int checks = 0, failures = 0;
  pe_array dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e [NPE];
    en = 1'b1;
    for (int n = 0; n < 400; n++) begin
      int k, s;
      k = (n % 3 == 0) ? 3 : (n % 3 == 1) ? 5 : 9;
      for (int p = 0; p < NPE; p++) begin
        feat[p] = act_t'($urandom_range(0, 261120)) - act_t'(130560);
        mask[p] = wgt_t'($urandom_range(0, 512));
      end
      for (int t = 0; t < KMAX; t++) wrow[t] = wgt_t'($urandom);
      attn = (n % 5 == 4); sel = 1'b1;
      for (s = 0; s < (attn ? 1 : k); s++) begin
        @(negedge clk);
        // weight of PE line j after s right shifts: column (j - s) mod k
        for (int j = 0; j < PE_C; j++) cidx[j] = 4'(((j - s) % k + k) % k);
        for (int i = 0; i < PE_R; i++)
          for (int j = 0; j < PE_C; j++)
            e[i*PE_C+j] = longint'(feat[i*PE_C+j]) *
                          (attn ? longint'(mask[i*PE_C+j]) : longint'(wrow[((j - s) % k + k) % k]));
        @(negedge clk);
        for (int p = 0; p < NPE; p++) begin
          checks++;
          if (longint'(prod[p]) != e[p]) begin
            failures++;
            if (failures < 5) $display("pe_array: n=%0d s=%0d p=%0d got %0d exp %0d", n, s, p, prod[p], e[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
