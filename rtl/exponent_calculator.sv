// exponent_calculator: one of the sixteen exponent calculators of the
// exponent extractor (two rows of full adders in the paper's figure).
//
// It forms the exponent of one product, e = ex + ey + bias, where bias is a
// signed 9-bit constant supplied by the mode decoder: it removes the input
// exponent bias and adds the output (bfloat16) bias, and in MXFP mode it also
// carries the two shared block exponents. The result is a signed 10-bit
// biased exponent; the paper prints 9 bits for it, the extra bit lets an
// out-of-range exponent be seen as such instead of wrapping. A disabled
// calculator (power-gated in the paper) outputs EXP_MIN so it never wins the
// maximum. Combinational.
module exponent_calculator
  import jack_pkg::*;
(
  input  logic                     en,
  input  logic [7:0]               ex,
  input  logic [7:0]               ey,
  input  logic signed [BIAS_W-1:0] bias,
  output logic signed [EXP_W-1:0]  e
);
  logic signed [EXP_W:0] sum;   // one guard bit against overflow

  always_comb begin
    sum = $signed({3'b000, ex}) + $signed({3'b000, ey}) + EXP_W'(bias);
    // saturate into the EXP_W range (only reachable with illegal inputs)
    if (!en)                                  e = EXP_MIN;
    else if (sum > (2**(EXP_W-1) - 1))        e = EXP_W'(2**(EXP_W-1) - 1);
    else if (sum < -(2**(EXP_W-1)) + 1)       e = EXP_MIN + EXP_W'(1);
    else                                      e = sum[EXP_W-1:0];
  end
endmodule
