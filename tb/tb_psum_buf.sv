// tb_psum_buf: writes random words through all 36 ports at distinct random
// addresses, reads them back through random ports and compares with a
// model array; also checks that disabled ports do not write.
module tb_psum_buf;
  import bsra_pkg::*;
  localparam int DEPTH = 7680, AW = $clog2(DEPTH);
  logic clk = 0;
  logic [AW-1:0] rd_addr [36], wr_addr [36];
  psum_t rd_data [36], wr_data [36];
  logic wr_en [36];
  psum_t model [DEPTH];
  logic  known [DEPTH];
  int checks = 0, failures = 0;
  psum_buf #(.DEPTH(DEPTH), .NPORT(36)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < DEPTH; a++) known[a] = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // read checks on the current contents
      for (int p = 0; p < 36; p++) rd_addr[p] = AW'($urandom % DEPTH);
      #1;
      for (int p = 0; p < 36; p++)
        if (known[rd_addr[p]]) begin
          checks++;
          if (rd_data[p] !== model[rd_addr[p]]) begin
            failures++;
            if (failures < 5) $display("psum_buf: addr %0d got %0d exp %0d", rd_addr[p], rd_data[p], model[rd_addr[p]]);
          end
        end
      // writes at distinct addresses (36 consecutive words from a random base)
      begin
        int base;
        base = $urandom % (DEPTH - 36);
        for (int p = 0; p < 36; p++) begin
          wr_en[p]   = ($urandom % 3) != 0;
          wr_addr[p] = AW'(base + ((p * 7) % 36));
          wr_data[p] = psum_t'({$urandom, $urandom});
        end
      end
      @(posedge clk);
      for (int p = 0; p < 36; p++)
        if (wr_en[p]) begin model[wr_addr[p]] = wr_data[p]; known[wr_addr[p]] = 1'b1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
