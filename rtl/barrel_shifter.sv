// barrel_shifter: the B.S. placed after every sub-multiplier of the Jack unit.
//
// It aligns a floating-point sub-product to the largest product exponent of
// the dot product by shifting it right by the exponent difference, so that
// the products can then be added by plain integer adders. The shift is
// arithmetic, so a signed INT sub-product passes unchanged when the amount is
// zero; bits shifted out are dropped (no rounding), as the paper accumulates
// without intermediate rounding. The amount is saturated by the caller to
// SH_W bits; any amount of 9 or more clears the value. Combinational.
module barrel_shifter
  import jack_pkg::*;
(
  input  logic signed [PROD_W-1:0] din,
  input  logic [SH_W-1:0]          shamt,   // exponent difference
  output logic signed [PROD_W-1:0] dout
);
  always_comb dout = din >>> shamt;
endmodule
