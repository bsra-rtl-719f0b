// tb_clamp_unit: checks the clamp (Eq. 1) on values around +-255 and on
// random partial sums, against an independent real-number computation.
module tb_clamp_unit;
  import bsra_pkg::*;
  psum_t din [36];
  act_t dout [36];
  int checks = 0, failures = 0;
  clamp_unit #(.NLANE(36)) dut (.din(din), .dout(dout));
  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int l = 0; l < 36; l++) begin
        if (n < 20) din[l] = psum_t'((longint'(n * 36 + l) - 360) * (1 << 18) / 2 + 255 * (1 << 18) - 90 * (1 << 18));
        else        din[l] = psum_t'({$urandom, $urandom}) >>> ($urandom % 20);
      end
      #1;
      for (int l = 0; l < 36; l++) begin
        real v; longint e;
        v = real'(din[l]) / 262144.0;          // value
        if (v >= 255.0) e = 255 * 512;
        else if (v <= -255.0) e = -255 * 512;
        else e = longint'($floor(v * 512.0));
        checks++;
        if (longint'(dout[l]) != e) begin
          failures++;
          if (failures < 5) $display("clamp: in %0d got %0d exp %0d", din[l], dout[l], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
