// tb_sigmoid_unit: sweeps every clamped activation in [-255, 255] (all
// 2^18 codes in the range, step 1) and checks sigmoid(x/256) against the
// exact value from $exp, within one LSB of the 9-fraction-bit mask.
module tb_sigmoid_unit;
  import bsra_pkg::*;
  act_t din [36];
  wgt_t dout [36];
  int checks = 0, failures = 0;
  sigmoid_unit #(.NLANE(36)) dut (.din(din), .dout(dout));
  initial begin
    #10000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int x = -ACT_MAX;
    while (x <= ACT_MAX) begin
      for (int l = 0; l < 36; l++) din[l] = act_t'((x + l > ACT_MAX) ? ACT_MAX : x + l);
      #1;
      for (int l = 0; l < 36; l++) begin
        real v, e;
        v = real'(din[l]) / 512.0;
        e = 512.0 / (1.0 + $exp(-v / 256.0));
        checks++;
        if (real'(dout[l]) > e + 1.0 || real'(dout[l]) < e - 1.0) begin
          failures++;
          if (failures < 5) $display("sigmoid: x=%0f got %0d exp %0f", v, dout[l], e);
        end
      end
      x += 36;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
