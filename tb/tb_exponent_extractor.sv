// tb_exponent_extractor: random element and shared exponents in every mode.
// The per-lane exponents of active calculators, the maximum exponent and the
// alignment shifts of the lanes in use are compared with the reference
// model's integer arithmetic.
module tb_exponent_extractor;
  import jack_pkg::*;
  import jack_ref_pkg::*;
  logic [NLANE-1:0] calc_en;
  logic wide, fp, mx;
  logic signed [BIAS_W-1:0] bias;
  logic [63:0] exp_x, exp_w;
  logic [7:0] shared_exp_x, shared_exp_w;
  logic signed [EXP_W-1:0] e [NLANE];
  logic signed [EXP_W-1:0] emax;
  logic [SH_W-1:0] shamt [NLANE];
  int checks = 0, failures = 0;

  exponent_extractor dut (.calc_en, .wide, .fp, .mx, .bias, .exp_x, .exp_w,
                          .shared_exp_x, .shared_exp_w, .e, .emax, .shamt);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_t op;
    int n, em, sh;
    for (int it = 0; it < 3000; it++) begin
      op.mode = jack_mode_e'(it % 7);
      n = n_of(op.mode);
      for (int i = 0; i < 16; i++) begin
        op.ex[i] = mode_is_wide(op.mode) ? 8'($urandom_range(1, 254)) : 8'($urandom_range(0, 15));
        op.ew[i] = mode_is_wide(op.mode) ? 8'($urandom_range(1, 254)) : 8'($urandom_range(0, 15));
        if (it % 5 == 0 && mode_is_wide(op.mode)) op.ew[i] = 8'($urandom_range(120, 130));
      end
      op.shx = 8'($urandom_range(60, 200));
      op.shw = 8'($urandom_range(60, 200));
      wide = mode_is_wide(op.mode);
      fp = mode_is_fp(op.mode);
      mx = mode_is_mx(op.mode);
      bias = BIAS_W'(bias_of(op));
      calc_en = (op.mode == MODE_BF16) ? 16'h000F : fp ? 16'hFFFF : mx ? 16'h8000 : 16'h0000;
      exp_x = '0; exp_w = '0;
      for (int i = 0; i < n; i++) begin
        if (wide) begin exp_x[8*i +: 8] = op.ex[i]; exp_w[8*i +: 8] = op.ew[i]; end
        else      begin exp_x[4*i +: 4] = op.ex[i][3:0]; exp_w[4*i +: 4] = op.ew[i][3:0]; end
      end
      shared_exp_x = op.shx; shared_exp_w = op.shw;
      #1;
      if (fp) begin
        em = -100000;
        for (int i = 0; i < n; i++) begin
          checks++;
          if (int'(e[i]) != pexp(op, i)) failures++;
          if (pexp(op, i) > em) em = pexp(op, i);
        end
        checks++;
        if (int'(emax) != em) failures++;
        for (int i = 0; i < n; i++) begin
          sh = em - pexp(op, i);
          if (sh > 15) sh = 15;
          checks++;
          if (int'(shamt[i]) != sh) failures++;
        end
      end else begin
        em = mx ? int'(op.shx) + int'(op.shw) - 127 : 0;
        checks++;
        if (int'(emax) != em) failures++;
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (shamt[i] != 0) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
