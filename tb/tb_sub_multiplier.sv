// tb_sub_multiplier: exhaustive check of the 4x4 sub-multiplier.
// All 256 operand pairs are tried under all four signedness combinations and
// compared with the product of the operands' integer values.
module tb_sub_multiplier;
  import jack_pkg::*;
  logic [3:0] a, b;
  logic a_signed, b_signed;
  logic signed [PROD_W-1:0] p;
  int checks = 0, failures = 0;

  sub_multiplier dut (.a, .a_signed, .b, .b_signed, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int av, bv, ref_p;
    for (int m = 0; m < 4; m++) begin
      for (int i = 0; i < 16; i++) begin
        for (int j = 0; j < 16; j++) begin
          a = 4'(i); b = 4'(j); a_signed = m[0]; b_signed = m[1];
          #1;
          av = (a_signed && i >= 8) ? i - 16 : i;
          bv = (b_signed && j >= 8) ? j - 16 : j;
          ref_p = av * bv;
          checks++;
          if (int'(p) != ref_p) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d s=%0d%0d p=%0d exp=%0d", i, j, a_signed, b_signed, p, ref_p);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
