// tb_normalizer: random signed sums of every magnitude, random maximum
// exponents and fraction widths; sign, zero flag, leading-one alignment and
// the adjusted exponent are compared with values computed by a bit scan.
module tb_normalizer;
  import jack_pkg::*;
  logic en;
  logic signed [SUM_W-1:0] sum;
  logic signed [EXP_W-1:0] emax;
  logic [3:0] frac;
  logic zero, sign;
  logic signed [11:0] exp_n;
  logic [SUM_W-1:0] sig_n;
  int checks = 0, failures = 0;

  normalizer dut (.en, .sum, .emax, .frac, .zero, .sign, .exp_n, .sig_n);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s, m;
    int l, fr, em;
    for (int t = 0; t < 5000; t++) begin
      en = (t % 11) != 0;
      l = $urandom_range(0, SUM_W - 2);
      s = longint'($urandom_range(0, (1 << l) - 1)) + (longint'(1) << l);
      if ($urandom_range(0, 1)) s = -s;
      if (t % 37 == 0) s = 0;
      if (t % 53 == 0) s = -(longint'(1) << (SUM_W - 1));
      sum = SUM_W'(s);
      em = $urandom_range(0, 400) - 50;
      emax = EXP_W'(em);
      fr = (t % 3 == 0) ? 14 : (t % 3 == 1) ? 6 : 0;
      frac = 4'(fr);
      #1;
      if (!en) s = 0;
      m = (s < 0) ? -s : s;
      checks++;
      if (zero != (m == 0)) failures++;
      if (m != 0) begin
        l = 0;
        for (int i = 0; i < SUM_W; i++) if (m[i]) l = i;
        checks += 3;
        if (sign != (s < 0)) failures++;
        if (int'(exp_n) != em + l - fr) failures++;
        if (longint'(sig_n) != (m << (SUM_W - 1 - l))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
