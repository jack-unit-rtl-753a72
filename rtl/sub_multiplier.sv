// sub_multiplier: one 4-bit x 4-bit sub-multiplier of a precision-scalable CSM.
//
// Each operand nibble is extended to 5 bits, with its top bit copied when the
// operand is marked signed and zero otherwise, and the two 5-bit values are
// multiplied as two's complement numbers. This lets four of these units form
// an 8-bit x 8-bit signed or unsigned product (the high nibbles signed, the
// low nibbles unsigned) or four independent 4-bit products, as in the
// bit-fusion style multipliers the paper builds on. Purely combinational.
// The paper names the sub-multipliers and their 4-bit size; the sign
// extension scheme is this design's choice.
module sub_multiplier
  import jack_pkg::*;
(
  input  logic [3:0]               a,         // nibble of X
  input  logic                     a_signed,  // a is two's complement
  input  logic [3:0]               b,         // nibble of W
  input  logic                     b_signed,  // b is two's complement
  output logic signed [PROD_W-1:0] p          // a * b, range -120 .. 225
);
  logic signed [4:0] ae, be;
  logic signed [9:0] full;

  always_comb begin
    ae   = {a_signed & a[3], a};
    be   = {b_signed & b[3], b};
    full = ae * be;
    p    = full[PROD_W-1:0];
  end
endmodule
