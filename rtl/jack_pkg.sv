// jack_pkg: types and constants shared by the Jack MAC unit.
//
// The Jack unit is a multiply-accumulate unit that computes a short dot
// product in one of seven data-format modes with a single integer datapath:
// sixteen 4-bit x 4-bit sub-multipliers taken from four precision-scalable
// carry-save multipliers (CSMs). In the 8-bit modes (bfloat16, INT8, MXINT8)
// each CSM forms one 8-bit x 8-bit product, so the unit sums 4 products; in
// the 4-bit modes (FP8, INT4, MXINT4, MXFP8) every sub-multiplier forms its
// own product, so the unit sums 16 products.
//
// Element layout on the operand buses (a choice of this design):
//   * significand/INT bus, 32 bits per operand per cycle: byte c feeds CSM c.
//     8-bit modes: one beat, byte c is element c.
//     4-bit modes: two beats; CSM c receives nibbles k=0,1 of element word c
//     on beat 0 and k=2,3 on beat 1; nibble k of CSM c is lane 4c+k.
//   * exponents, 64 bits per operand: 8-bit modes use exp[8c+:8] for lane c,
//     4-bit modes use exp[4i+:4] for lane i.
//   * signs, 16 bits per operand: sign[i] for lane i.
// FP significands arrive with their hidden bit already in place
// (bfloat16: 1.mmmmmmm in 8 bits, FP8 {1,4,3}: 1.mmm in 4 bits); a zero is
// sent as significand 0 with exponent 0.
package jack_pkg;

  typedef enum logic [2:0] {
    MODE_BF16   = 3'd0,
    MODE_FP8    = 3'd1,
    MODE_INT8   = 3'd2,
    MODE_INT4   = 3'd3,
    MODE_MXINT8 = 3'd4,
    MODE_MXINT4 = 3'd5,
    MODE_MXFP8  = 3'd6
  } jack_mode_e;

  localparam int unsigned NCSM   = 4;   // precision-scalable CSMs grouped in one unit
  localparam int unsigned NPOS   = 4;   // sub-multiplier positions in one CSM
  localparam int unsigned NLANE  = 16;  // products in the 4-bit modes
  localparam int unsigned PROD_W = 9;   // signed sub-product (5b x 5b)
  localparam int unsigned GRP_W  = 11;  // sum of four sub-products of one position
  localparam int unsigned SUM_W  = 21;  // CSM output after the inter-group adder tree
  localparam int unsigned EXP_W  = 10;  // signed internal exponent
  localparam int unsigned BIAS_W = 9;   // bias input of an exponent calculator (Fig. 4b)
  localparam int unsigned SH_W   = 4;   // barrel-shift amount, saturated

  // exponent value of an inactive calculator: never wins the maximum
  localparam logic signed [EXP_W-1:0] EXP_MIN = {1'b1, {(EXP_W-1){1'b0}}};


  // activation pattern of the sub-modules (Fig. 4c-f)
  typedef struct packed {
    logic             xor_en;      // XOR bundle
    logic [NLANE-1:0] calc_en;     // exponent calculators
    logic             norm_en;     // normalizer and rounder
    logic             int_out;     // dedicated INT output path selected
  } jack_act_t;

  // per-mode configuration of the datapath
  typedef struct packed {
    logic                     wide;      // 8-bit elements (one 8x8 product per CSM)
    logic                     fp;        // per-element exponents and signs
    logic                     mx;        // shared block exponents
    logic                     int_signed;// INT elements are two's complement
    logic [3:0]               frac;      // fraction bits of the CSM sum
    logic signed [BIAS_W-1:0] bias;      // bias fed to the exponent calculators
  } jack_cfg_t;

  function automatic logic mode_is_wide(jack_mode_e m);
    return (m == MODE_BF16) || (m == MODE_INT8) || (m == MODE_MXINT8);
  endfunction

  function automatic logic mode_is_fp(jack_mode_e m);
    return (m == MODE_BF16) || (m == MODE_FP8) || (m == MODE_MXFP8);
  endfunction

  function automatic logic mode_is_mx(jack_mode_e m);
    return (m == MODE_MXINT8) || (m == MODE_MXINT4) || (m == MODE_MXFP8);
  endfunction

  function automatic logic mode_is_int(jack_mode_e m);
    return (m == MODE_INT8) || (m == MODE_INT4);
  endfunction

endpackage
