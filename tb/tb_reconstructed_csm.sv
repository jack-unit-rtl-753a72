// tb_reconstructed_csm: random operand words, product signs and alignment
// shifts in both element widths, signed and unsigned; the CSM sum is compared
// with a loop over element products built from nibble values, each aligned
// by floor division, negated where its sign is set, and weighted by its
// nibble position in the 8-bit modes.
module tb_reconstructed_csm;
  import jack_pkg::*;
  import jack_ref_pkg::*;
  logic wide, int_signed;
  logic [15:0] x_word [NCSM];
  logic [15:0] w_word [NCSM];
  logic [NLANE-1:0] sign_p;
  logic [SH_W-1:0] shamt [NLANE];
  logic signed [SUM_W-1:0] sum;
  int checks = 0, failures = 0;

  reconstructed_csm dut (.wide, .int_signed, .x_word, .w_word, .sign_p, .shamt, .sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint r, t;
    int sh;
    for (int it = 0; it < 4000; it++) begin
      wide = it[0];
      int_signed = it[1];
      sign_p = NLANE'($urandom);
      for (int c = 0; c < NCSM; c++) begin
        x_word[c] = 16'($urandom);
        w_word[c] = 16'($urandom);
        if (it % 9 == 0) begin x_word[c] = 16'hFFFF; w_word[c] = 16'hFFFF; end
        if (it % 9 == 1) begin x_word[c] = 16'h8888; w_word[c] = 16'h8888; end
      end
      for (int i = 0; i < NLANE; i++) shamt[i] = (it % 4 < 2) ? '0 : SH_W'($urandom_range(0, 15));
      if (it % 3 == 0) sign_p = '0;
      #1;
      r = 0;
      for (int c = 0; c < NCSM; c++) begin
        if (wide) begin
          t = 0;
          for (int a = 0; a < 2; a++)
            for (int b = 0; b < 2; b++)
              t += floor_shift(longint'(nib(x_word[c][4*a +: 4], int_signed && a == 1) *
                                        nib(w_word[c][4*b +: 4], int_signed && b == 1)),
                               int'(shamt[c])) << (4*a + 4*b);
          r += sign_p[c] ? -t : t;
        end else begin
          for (int k = 0; k < 4; k++) begin
            t = floor_shift(longint'(nib(x_word[c][4*k +: 4], int_signed) *
                                     nib(w_word[c][4*k +: 4], int_signed)), int'(shamt[4*c+k]));
            r += sign_p[4*c+k] ? -t : t;
          end
        end
      end
      checks++;
      if (longint'(sum) != r) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d wide=%0d sgn=%0d sum=%0d exp=%0d", it, wide, int_signed, sum, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
