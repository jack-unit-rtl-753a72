// tb_xor_bundle: random sign vectors with the bundle enabled and disabled;
// each output bit is compared with the bitwise sign rule.
module tb_xor_bundle;
  import jack_pkg::*;
  logic en;
  logic [NLANE-1:0] sign_x, sign_w, sign_p;
  int checks = 0, failures = 0;

  xor_bundle dut (.en, .sign_x, .sign_w, .sign_p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_bit;
    for (int t = 0; t < 500; t++) begin
      en = (t % 5) != 0;
      sign_x = NLANE'($urandom); sign_w = NLANE'($urandom);
      #1;
      for (int i = 0; i < NLANE; i++) begin
        exp_bit = en && (sign_x[i] != sign_w[i]);
        checks++;
        if (sign_p[i] != exp_bit) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
