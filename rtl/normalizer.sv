// normalizer: turns the signed integer sum of the CSM into sign, exponent and
// a normalised significand.
//
// The CSM sum S is an integer scaled by 2^(emax - 127 - frac), where emax is
// the largest product exponent (bfloat16-biased) and frac the number of
// fraction bits the products carry (14 for bfloat16, 6 for FP8/MXFP8, 0 for
// the MX integer modes). The normalizer takes |S|, finds its leading one at
// bit L and shifts it to the top of the word; the result exponent is
// emax + L - frac. When the sum has grown past the products' integer part
// (carries out of the adder tree) this raises the exponent, and when terms
// cancelled it lowers it. Disabled in the INT modes (its inputs are then
// held at zero). Combinational.
module normalizer
  import jack_pkg::*;
(
  input  logic                    en,
  input  logic signed [SUM_W-1:0] sum,
  input  logic signed [EXP_W-1:0] emax,
  input  logic [3:0]              frac,
  output logic                    zero,
  output logic                    sign,
  output logic signed [11:0]      exp_n,  // biased result exponent, may be out of range
  output logic [SUM_W-1:0]        sig_n   // leading one in the MSB unless zero
);
  logic signed [SUM_W-1:0] s;
  logic [SUM_W-1:0]        mag;
  logic [4:0]              lead;

  always_comb begin
    s    = en ? sum : '0;
    sign = s[SUM_W-1];
    mag  = sign ? SUM_W'(-s) : SUM_W'(s);
    zero = (mag == '0);
    lead = '0;
    for (int i = 0; i < SUM_W; i++)
      if (mag[i]) lead = 5'(i);
    sig_n = mag << (5'(SUM_W - 1) - lead);
    exp_n = 12'(emax) + $signed({7'b0, lead}) - $signed({8'b0, frac});
  end
endmodule
