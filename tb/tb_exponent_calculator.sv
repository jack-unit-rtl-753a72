// tb_exponent_calculator: random exponents and biases over the full input
// ranges, compared with integer ex+ey+bias (saturated to the 10-bit signed
// range), plus the value of a disabled calculator.
module tb_exponent_calculator;
  import jack_pkg::*;
  logic en;
  logic [7:0] ex, ey;
  logic signed [BIAS_W-1:0] bias;
  logic signed [EXP_W-1:0] e;
  int checks = 0, failures = 0;

  exponent_calculator dut (.en, .ex, .ey, .bias, .e);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, bv;
    for (int t = 0; t < 3000; t++) begin
      en = (t % 7) != 0;
      ex = 8'($urandom); ey = 8'($urandom);
      bv = int'($urandom_range(0, 511)) - 256;
      if (t % 3 == 0) bv = -127;
      if (t % 3 == 1) bv = 113;
      bias = BIAS_W'(bv);
      #1;
      r = int'(ex) + int'(ey) + bv;
      if (r > 511) r = 511;
      if (r < -511) r = -511;
      if (!en) r = -512;
      checks++;
      if (int'(e) != r) begin
        failures++;
        if (failures < 10) $display("FAIL ex=%0d ey=%0d bias=%0d e=%0d exp=%0d", ex, ey, bv, e, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
