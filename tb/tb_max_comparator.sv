// tb_max_comparator: random signed exponent vectors for the 16-to-1 and the
// 4-to-1 comparator, checked against a linear scan for the maximum.
module tb_max_comparator;
  import jack_pkg::*;
  logic signed [EXP_W-1:0] e16 [16];
  logic signed [EXP_W-1:0] e4  [4];
  logic signed [EXP_W-1:0] m16, m4;
  int checks = 0, failures = 0;

  max_comparator #(.N(16)) dut16 (.e(e16), .emax(m16));
  max_comparator #(.N(4))  dut4  (.e(e4),  .emax(m4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r16, r4;
    for (int t = 0; t < 2000; t++) begin
      r16 = -100000; r4 = -100000;
      for (int i = 0; i < 16; i++) begin
        e16[i] = EXP_W'($urandom_range(0, 1023));
        if (t % 4 == 0) e16[i] = EXP_W'($urandom_range(0, 15));   // many ties
        if (int'(e16[i]) > r16) r16 = int'(e16[i]);
      end
      for (int i = 0; i < 4; i++) begin
        e4[i] = EXP_W'($urandom_range(0, 1023));
        if (int'(e4[i]) > r4) r4 = int'(e4[i]);
      end
      #1;
      checks += 2;
      if (int'(m16) != r16) failures++;
      if (int'(m4) != r4) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
