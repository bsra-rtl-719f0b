// tb_weight_mem: loads every word of every bank with a random kernel row,
// then reads all addresses back (one cycle latency) and compares.
module tb_weight_mem;
  import bsra_pkg::*;
  localparam int NBANK = 32, DEPTH = 489, AW = $clog2(DEPTH);
  logic clk = 0;
  logic [AW-1:0] rd_addr, wr_addr;
  wrow_t rd_data [NBANK];
  logic wr_en;
  logic [4:0] wr_bank;
  wrow_t wr_data;
  wrow_t model [NBANK][DEPTH];
  int checks = 0, failures = 0;
  weight_mem #(.NBANK(NBANK), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rd_addr = '0;
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_bank = 5'(b); wr_addr = AW'(a);
        for (int t = 0; t < KMAX; t++) wr_data[t] = wgt_t'($urandom);
        model[b][a] = wr_data;
      end
    @(negedge clk);
    wr_en = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (rd_data[b] !== model[b][a]) begin
          failures++;
          if (failures < 5) $display("weight_mem: bank %0d addr %0d", b, a);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
