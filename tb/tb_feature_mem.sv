// tb_feature_mem: writes random 6x6 blocks into random banks and addresses
// and checks the synchronous read of all banks (one cycle latency) against
// a model.
module tb_feature_mem;
  import bsra_pkg::*;
  localparam int NBANK = 32, NBLK = 56, AW = $clog2(2*NBLK);
  logic clk = 0;
  logic [AW-1:0] rd_addr, wr_addr;
  act_t rd_data [NBANK][NPE];
  logic wr_en;
  logic [4:0] wr_bank;
  act_t wr_data [NPE];
  act_t model [NBANK][2*NBLK][NPE];
  logic known [NBANK][2*NBLK];
  int checks = 0, failures = 0;
  feature_mem #(.NBANK(NBANK), .NBLK(NBLK)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int b = 0; b < NBANK; b++) for (int a = 0; a < 2*NBLK; a++) known[b][a] = 1'b0;
    for (int n = 0; n < 6000; n++) begin
      logic [AW-1:0] ra;
      @(negedge clk);
      wr_en = ($urandom % 2) == 0;
      wr_bank = 5'($urandom);
      wr_addr = AW'($urandom % (2*NBLK));
      for (int p = 0; p < NPE; p++) wr_data[p] = act_t'($urandom);
      ra = AW'($urandom % (2*NBLK));
      rd_addr = ra;
      @(posedge clk);
      #1;
      // read data is the content before this edge's write
      for (int b = 0; b < NBANK; b++)
        if (known[b][ra])
          for (int p = 0; p < NPE; p++) begin
            checks++;
            if (rd_data[b][p] !== model[b][ra][p]) begin
              failures++;
              if (failures < 5) $display("feature_mem: bank %0d addr %0d p %0d", b, ra, p);
            end
          end
      if (wr_en) begin
        for (int p = 0; p < NPE; p++) model[wr_bank][wr_addr][p] = wr_data[p];
        known[wr_bank][wr_addr] = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
