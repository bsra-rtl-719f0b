// tb_mult_mux: checks the multiplicand selection: broadcast of the kernel
// column chosen by each PE line in convolution mode, the distributed mask
// for the selected array in attention mode, and zero otherwise.
module tb_mult_mux;
  import bsra_pkg::*;
  logic attn, sel, en;
  wrow_t wrow;
  logic [PE_C-1:0][3:0] cidx;
  wgt_t mask [NPE];
  wgt_t mult [NPE];
  int checks = 0, failures = 0;
  mult_mux dut (.*);
  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      int k;
      attn = 1'($urandom); sel = 1'($urandom); en = ($urandom % 4) != 0;
      k = (n % 4 == 0) ? 1 : (n % 4 == 1) ? 3 : (n % 4 == 2) ? 5 : 9;
      for (int t = 0; t < KMAX; t++) wrow[t] = wgt_t'($urandom);
      for (int j = 0; j < PE_C; j++) cidx[j] = 4'($urandom % k);
      for (int p = 0; p < NPE; p++) mask[p] = wgt_t'($urandom);
      #1;
      for (int i = 0; i < PE_R; i++)
        for (int j = 0; j < PE_C; j++) begin
          wgt_t e;
          if (attn) e = sel ? mask[i*PE_C+j] : wgt_t'(0);
          else      e = en ? wrow[cidx[j]] : wgt_t'(0);
          checks++;
          if (mult[i*PE_C+j] !== e) begin
            failures++;
            if (failures < 5) $display("mult_mux: p=%0d got %0d exp %0d", i*PE_C+j, mult[i*PE_C+j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
