// tb_barrel_shifter: exhaustive check of the alignment shifter against
// floor division by 2^shamt of every 9-bit signed value.
module tb_barrel_shifter;
  import jack_pkg::*;
  logic signed [PROD_W-1:0] din, dout;
  logic [SH_W-1:0] shamt;
  int checks = 0, failures = 0;

  barrel_shifter dut (.din, .shamt, .dout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, r;
    for (int s = 0; s < 16; s++) begin
      for (int x = -256; x < 256; x++) begin
        din = PROD_W'(x); shamt = SH_W'(s);
        #1;
        // floor(x / 2^s)
        v = x; r = 0;
        if (v >= 0) r = v / (1 << s);
        else        r = -((-v + (1 << s) - 1) / (1 << s));
        checks++;
        if (int'(dout) != r) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d s=%0d got %0d exp %0d", x, s, dout, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
