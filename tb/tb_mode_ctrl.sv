// tb_mode_ctrl: every mode's activation pattern and configuration is
// compared with a table of expected values; the MXFP8 bias is checked for
// random shared exponents, including the clipped ends of its 9-bit range.
module tb_mode_ctrl;
  import jack_pkg::*;
  jack_mode_e mode;
  logic int_signed;
  logic [7:0] shared_exp_x, shared_exp_w;
  jack_act_t act;
  jack_cfg_t cfg;
  int checks = 0, failures = 0;

  mode_ctrl dut (.mode, .int_signed, .shared_exp_x, .shared_exp_w, .act, .cfg);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL mode=%s %s got %0d exp %0d", mode.name(), what, got, expv);
    end
  endtask

  initial begin
    //                   xor calc_en  norm int wide fp mx frac bias
    int tab [7][9] = '{ '{1, 'h000F, 1, 0, 1, 1, 0, 14, -127},   // BF16
                        '{1, 'hFFFF, 1, 0, 0, 1, 0,  6,  113},   // FP8
                        '{0, 'h0000, 0, 1, 1, 0, 0,  0,    0},   // INT8
                        '{0, 'h0000, 0, 1, 0, 0, 0,  0,    0},   // INT4
                        '{0, 'h8000, 1, 0, 1, 0, 1,  0, -127},   // MXINT8
                        '{0, 'h8000, 1, 0, 0, 0, 1,  0, -127},   // MXINT4
                        '{1, 'hFFFF, 1, 0, 0, 1, 1,  6,    0} }; // MXFP8 (bias below)
    int b;
    for (int t = 0; t < 700; t++) begin
      mode = jack_mode_e'(t % 7);
      int_signed = t[3];
      shared_exp_x = 8'($urandom); shared_exp_w = 8'($urandom);
      if (t % 50 == 6) begin shared_exp_x = 8'd255; shared_exp_w = 8'd255; end
      if (t % 50 == 13) begin shared_exp_x = 8'd0; shared_exp_w = 8'd0; end
      #1;
      chk("xor_en",  act.xor_en,       tab[t%7][0]);
      chk("calc_en", act.calc_en,      tab[t%7][1]);
      chk("norm_en", act.norm_en,      tab[t%7][2]);
      chk("int_out", act.int_out,      tab[t%7][3]);
      chk("wide",    cfg.wide,         tab[t%7][4]);
      chk("fp",      cfg.fp,           tab[t%7][5]);
      chk("mx",      cfg.mx,           tab[t%7][6]);
      chk("frac",    cfg.frac,         tab[t%7][7]);
      chk("signed",  cfg.int_signed,   (tab[t%7][5] == 0) ? int'(int_signed) : 0);
      b = tab[t%7][8];
      if (mode == MODE_MXFP8) begin
        b = int'(shared_exp_x) + int'(shared_exp_w) - 141;
        if (b > 255) b = 255;
        if (b < -256) b = -256;
      end
      chk("bias", int'(cfg.bias), b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
