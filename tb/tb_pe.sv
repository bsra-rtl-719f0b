// tb_pe: checks that the PE registers feat * mult one cycle after the
// operands, over random and extreme signed operands.
module tb_pe;
  import bsra_pkg::*;
  logic clk = 0;
  act_t feat; wgt_t mult; prod_t prod;
  int checks = 0, failures = 0;
  pe dut (.clk(clk), .feat(feat), .mult(mult), .prod(prod));
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint exp_v;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      case (n)
        0: begin feat = act_t'(-131072); mult = wgt_t'(-1024); end
        1: begin feat = act_t'(131071);  mult = wgt_t'(1023);  end
        2: begin feat = act_t'(-131072); mult = wgt_t'(1023);  end
        default: begin feat = act_t'($urandom); mult = wgt_t'($urandom); end
      endcase
      exp_v = longint'(feat) * longint'(mult);
      @(negedge clk);
      checks++;
      if (longint'(prod) != exp_v) begin
        failures++;
        if (failures < 5) $display("pe: %0d * %0d = %0d, expected %0d", feat, mult, prod, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
