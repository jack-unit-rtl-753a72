// tb_rounder: random normalised results, including exponents below 1 and
// above 254, packed by the rounder and compared with the expected 16-bit
// word and overflow/underflow flags.
module tb_rounder;
  import jack_pkg::*;
  logic en, zero, sign;
  logic signed [11:0] exp_n;
  logic [SUM_W-1:0] sig_n;
  logic [15:0] result;
  logic overflow, underflow;
  int checks = 0, failures = 0;

  rounder dut (.en, .zero, .sign, .exp_n, .sig_n, .result, .overflow, .underflow);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    logic [15:0] r;
    logic o, u;
    for (int t = 0; t < 5000; t++) begin
      en = (t % 13) != 0;
      zero = (t % 17) == 0;
      sign = $urandom_range(0, 1);
      e = $urandom_range(0, 340) - 40;
      exp_n = 12'(e);
      sig_n = {1'b1, (SUM_W-1)'($urandom)};
      #1;
      o = 0; u = 0;
      if (!en || zero)  r = 16'h0000;
      else if (e >= 255) begin r = {sign, 15'h7F7F}; o = 1; end
      else if (e <= 0)   begin r = {sign, 15'h0000}; u = 1; end
      else               r = {sign, 8'(e), 7'(sig_n >> (SUM_W - 8))};
      checks++;
      if (result != r || overflow != o || underflow != u) begin
        failures++;
        if (failures < 10) $display("FAIL e=%0d got %h exp %h", e, result, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
