// tb_acc_stage12: streams random products of 32 arrays, one set per cycle,
// and checks that each position's 32-channel sum leaves two cycles later.
module tb_acc_stage12;
  import bsra_pkg::*;
  localparam int NCH = 32;
  logic clk = 0;
  prod_t prod [NCH][NPE];
  psum_t sum [NPE];
  int checks = 0, failures = 0;
  acc_stage12 #(.NCH(NCH), .GROUP(8)) dut (.clk(clk), .prod(prod), .sum(sum));
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint hist [$];
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      // check the set applied two cycles ago
      if (n >= 2) begin
        for (int p = 0; p < NPE; p++) begin
          checks++;
          if (longint'(sum[p]) != hist[p]) begin
            failures++;
            if (failures < 5) $display("acc12: n=%0d p=%0d got %0d exp %0d", n, p, sum[p], hist[p]);
          end
        end
        for (int p = 0; p < NPE; p++) void'(hist.pop_front());
      end
      for (int p = 0; p < NPE; p++) begin
        longint a;
        a = 0;
        for (int c = 0; c < NCH; c++) begin
          prod[c][p] = (n % 7 == 3) ? prod_t'(-(1 << 28)) : prod_t'($urandom);
          a += longint'(prod[c][p]);
        end
        hist.push_back(a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
