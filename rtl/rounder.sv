// rounder: packs the normalised result into the 16-bit floating-point output.
//
// The paper's rounder truncates the result to 16 bits; this one keeps the 7
// bits after the leading one (round toward zero) and emits the bfloat16
// layout {sign, exponent[7:0], mantissa[6:0]}, matching the 8-bit exponent
// the exponent extractor produces. Out-of-range exponents are clamped, which
// the paper does not discuss: an exponent above 254 saturates to the largest
// finite magnitude (0x7F7F with the sign), one of 0 or below flushes to a
// signed zero; a zero sum gives +0. Combinational.
module rounder
  import jack_pkg::*;
(
  input  logic               en,
  input  logic               zero,
  input  logic               sign,
  input  logic signed [11:0] exp_n,
  input  logic [SUM_W-1:0]   sig_n,
  output logic [15:0]        result,
  output logic               overflow,
  output logic               underflow
);
  always_comb begin
    overflow  = 1'b0;
    underflow = 1'b0;
    if (!en || zero) begin
      result = 16'h0000;
    end else if (exp_n >= 12'sd255) begin
      result   = {sign, 8'hFE, 7'h7F};
      overflow = 1'b1;
    end else if (exp_n <= 12'sd0) begin
      result    = {sign, 15'h0000};
      underflow = 1'b1;
    end else begin
      result = {sign, exp_n[7:0], sig_n[SUM_W-2 -: 7]};
    end
  end
endmodule
