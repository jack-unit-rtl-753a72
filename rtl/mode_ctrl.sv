// mode_ctrl: operating-mode decoder of the Jack unit.
//
// From the mode it derives (1) the activation pattern of the sub-modules,
// which the paper realises with selective power gating and this RTL with
// operand isolation (a disabled block sees constant inputs), and (2) the
// datapath configuration: element width, fraction bits of the CSM sum and the
// bias fed to the exponent calculators. Activation follows the paper:
//   FP8, bfloat16 : XOR bundle, exponent calculators, normalizer/rounder on
//                   (bfloat16 uses only the four calculators it needs)
//   INT8, INT4    : only the CSM; the result leaves on the INT path
//   MXINT8/4      : one exponent calculator (index 15), no XOR bundle
//   MXFP8         : like FP8, with the shared exponents folded into the bias
// Bias values (output exponent is bfloat16-biased, 127):
//   bfloat16 : ex+ey-127             -> bias = -127
//   FP8      : ex+ey-2*7+127         -> bias = 113
//   MXINT    : sx+sy-127 (shared exponents enter as ex, ey) -> bias = -127
//   MXFP8    : ex+ey+sx+sy-2*7-127   -> bias = sx+sy-141, clipped to 9 bits
// Fraction bits of the sum: bfloat16 14, FP8/MXFP8 6, MX integer 0.
// Combinational.
module mode_ctrl
  import jack_pkg::*;
(
  input  jack_mode_e mode,
  input  logic       int_signed,     // INT/MXINT elements are two's complement
  input  logic [7:0] shared_exp_x,   // MX block exponent of X (bias 127)
  input  logic [7:0] shared_exp_w,   // MX block exponent of W (bias 127)
  output jack_act_t  act,
  output jack_cfg_t  cfg
);
  logic signed [10:0] mxfp_bias;

  always_comb begin
    mxfp_bias = $signed({3'b000, shared_exp_x}) + $signed({3'b000, shared_exp_w}) - 11'sd141;

    act            = '0;
    cfg            = '0;
    cfg.wide       = mode_is_wide(mode);
    cfg.fp         = mode_is_fp(mode);
    cfg.mx         = mode_is_mx(mode);
    cfg.int_signed = !mode_is_fp(mode) && int_signed;

    unique case (mode)
      MODE_BF16: begin
        act.xor_en  = 1'b1;
        act.calc_en = 16'h000F;
        act.norm_en = 1'b1;
        cfg.frac    = 4'd14;
        cfg.bias    = -9'sd127;
      end
      MODE_FP8: begin
        act.xor_en  = 1'b1;
        act.calc_en = 16'hFFFF;
        act.norm_en = 1'b1;
        cfg.frac    = 4'd6;
        cfg.bias    = 9'sd113;
      end
      MODE_INT8, MODE_INT4: begin
        act.int_out = 1'b1;
      end
      MODE_MXINT8, MODE_MXINT4: begin
        act.calc_en = 16'h8000;
        act.norm_en = 1'b1;
        cfg.frac    = 4'd0;
        cfg.bias    = -9'sd127;
      end
      MODE_MXFP8: begin
        act.xor_en  = 1'b1;
        act.calc_en = 16'hFFFF;
        act.norm_en = 1'b1;
        cfg.frac    = 4'd6;
        if (mxfp_bias > 11'sd255)       cfg.bias = 9'sd255;
        else if (mxfp_bias < -11'sd256) cfg.bias = -9'sd256;
        else                            cfg.bias = mxfp_bias[8:0];
      end
      default: begin
        act.int_out = 1'b1;
      end
    endcase
  end
endmodule
