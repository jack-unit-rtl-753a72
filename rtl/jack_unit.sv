// jack_unit: the Jack multiply-accumulate unit.
//
// One unit computes a short dot product in one of seven modes and returns a
// single 16-bit result:
//   bfloat16 : sum of 4 products of {1,8,7} operands      -> 16-bit FP
//   FP8      : sum of 16 products of {1,4,3} operands     -> 16-bit FP
//   INT8     : sum of 4 products of 8-bit integers        -> INT16
//   INT4     : sum of 16 products of 4-bit integers       -> INT16
//   MXINT8/4 : INT8/INT4 dot product scaled by 2^(sx+sy)  -> 16-bit FP
//   MXFP8    : FP8 dot product scaled by 2^(sx+sy)        -> 16-bit FP
// All products come from one integer multiplier array (reconstructed_csm).
// For floating-point modes the exponent extractor finds the largest product
// exponent first, each sub-product is shifted right by its distance to that
// maximum inside the multiplier array, and the aligned products are added
// with integer adders; only the final sum is normalised and truncated. There
// is no intermediate rounding. The 16-bit FP output uses the bfloat16 layout.
// Integer results leave on a dedicated path, saturated to 16 bits.
//
// Interface: operands are presented with in_valid. 8-bit modes take one beat
// per operation; 4-bit modes take two beats on the 32-bit significand buses
// (see jack_pkg for the layout), and the exponents, signs and mode must be
// valid on the second beat. The mode may change between operations.
// Timing: two pipeline registers, one after the exponent extractor and
// operand links, one on the output. out_valid rises 2 cycles after the beat
// that completes an operation; one operation per cycle in 8-bit modes, one
// per two cycles in 4-bit modes.
//
// Follows the paper: block structure (XOR bundle, exponent extractor,
// reconstructed CSM, normalizer, rounder, INT bypass), 2D sub-word grouping,
// 8-wire operand links, 32b/64b/16b input widths, per-mode activation, MX
// shared exponents entering through the calculator bias, 16-bit output, two
// pipeline registers. Own choices: element layout, register placement,
// rounding toward zero, clamping, INT16 saturation, one guard bit on every
// adder and exponent.
module jack_unit
  import jack_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  jack_mode_e  mode,
  input  logic        int_signed,     // INT/MXINT elements are signed
  input  logic        in_valid,
  input  logic [31:0] sig_x,          // significands / INT elements of X, per beat
  input  logic [31:0] sig_w,          // significands / INT elements of W, per beat
  input  logic [63:0] exp_x,          // element exponents of X
  input  logic [63:0] exp_w,          // element exponents of W
  input  logic [15:0] sign_x,         // element signs of X (FP modes)
  input  logic [15:0] sign_w,         // element signs of W (FP modes)
  input  logic [7:0]  shared_exp_x,   // MX block exponent of X
  input  logic [7:0]  shared_exp_w,   // MX block exponent of W
  output logic        out_valid,
  output logic [15:0] out_data,       // FP (bfloat16 layout) or INT16
  output logic        out_int,        // out_data is an INT16
  output logic        out_sat,        // INT16 saturated or FP exponent overflow
  output logic        out_flush       // FP result flushed to zero
);
  // ---------------- stage 0: mode decode, operand links, exponents ----------
  jack_act_t act;
  jack_cfg_t cfg;

  mode_ctrl u_mode (
    .mode        (mode),
    .int_signed  (int_signed),
    .shared_exp_x(shared_exp_x),
    .shared_exp_w(shared_exp_w),
    .act         (act),
    .cfg         (cfg)
  );

  logic [NCSM-1:0] link_valid;
  logic [NCSM-1:0] link_held;
  logic [15:0]     x_word [NCSM];
  logic [15:0]     w_word [NCSM];

  for (genvar c = 0; c < NCSM; c++) begin : g_link
    operand_link u_link (
      .clk       (clk),
      .rst_n     (rst_n),
      .wide      (cfg.wide),
      .in_valid  (in_valid),
      .x_byte    (sig_x[8*c +: 8]),
      .w_byte    (sig_w[8*c +: 8]),
      .word_valid(link_valid[c]),
      .x_word    (x_word[c]),
      .w_word    (w_word[c]),
      .held      (link_held[c])
    );
  end

  logic [NLANE-1:0] sign_p;

  xor_bundle u_xor (
    .en    (act.xor_en),
    .sign_x(sign_x),
    .sign_w(sign_w),
    .sign_p(sign_p)
  );

  logic signed [EXP_W-1:0] e_lane [NLANE];
  logic signed [EXP_W-1:0] emax;
  logic [SH_W-1:0]         shamt  [NLANE];

  exponent_extractor u_exp (
    .calc_en     (act.calc_en),
    .wide        (cfg.wide),
    .fp          (cfg.fp),
    .mx          (cfg.mx),
    .bias        (cfg.bias),
    .exp_x       (exp_x),
    .exp_w       (exp_w),
    .shared_exp_x(shared_exp_x),
    .shared_exp_w(shared_exp_w),
    .e           (e_lane),
    .emax        (emax),
    .shamt       (shamt)
  );

  // ---------------- pipeline register 1 -------------------------------------
  logic                    v1_q;
  logic [15:0]             x1_q [NCSM];
  logic [15:0]             w1_q [NCSM];
  logic [NLANE-1:0]        sign1_q;
  logic [SH_W-1:0]         sh1_q [NLANE];
  logic signed [EXP_W-1:0] emax1_q;
  jack_cfg_t               cfg1_q;
  jack_act_t               act1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q    <= 1'b0;
      sign1_q <= '0;
      emax1_q <= '0;
      cfg1_q  <= '0;
      act1_q  <= '0;
      for (int c = 0; c < NCSM; c++) begin
        x1_q[c] <= '0;
        w1_q[c] <= '0;
      end
      for (int i = 0; i < NLANE; i++) sh1_q[i] <= '0;
    end else begin
      v1_q <= link_valid[0];
      if (link_valid[0]) begin
        x1_q    <= x_word;
        w1_q    <= w_word;
        sign1_q <= sign_p;
        sh1_q   <= shamt;
        emax1_q <= emax;
        cfg1_q  <= cfg;
        act1_q  <= act;
      end
    end
  end

  // ---------------- stage 2: CSM, normalizer, rounder, INT path ------------
  logic signed [SUM_W-1:0] sum;

  reconstructed_csm u_csm (
    .wide      (cfg1_q.wide),
    .int_signed(cfg1_q.int_signed),
    .x_word    (x1_q),
    .w_word    (w1_q),
    .sign_p    (sign1_q),
    .shamt     (sh1_q),
    .sum       (sum)
  );

  logic               n_zero, n_sign;
  logic signed [11:0] n_exp;
  logic [SUM_W-1:0]   n_sig;

  normalizer u_norm (
    .en   (act1_q.norm_en),
    .sum  (sum),
    .emax (emax1_q),
    .frac (cfg1_q.frac),
    .zero (n_zero),
    .sign (n_sign),
    .exp_n(n_exp),
    .sig_n(n_sig)
  );

  logic [15:0] fp_result;
  logic        fp_ovf, fp_unf;

  rounder u_round (
    .en       (act1_q.norm_en),
    .zero     (n_zero),
    .sign     (n_sign),
    .exp_n    (n_exp),
    .sig_n    (n_sig),
    .result   (fp_result),
    .overflow (fp_ovf),
    .underflow(fp_unf)
  );

  // dedicated INT datapath: saturate the CSM sum to INT16
  logic [15:0] int_result;
  logic        int_sat;

  always_comb begin
    int_sat = 1'b0;
    if (sum > SUM_W'(32767)) begin
      int_result = 16'h7FFF;
      int_sat    = 1'b1;
    end else if (sum < -SUM_W'(32768)) begin
      int_result = 16'h8000;
      int_sat    = 1'b1;
    end else begin
      int_result = sum[15:0];
    end
  end

  // ---------------- pipeline register 2 (output) ---------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_int   <= 1'b0;
      out_sat   <= 1'b0;
      out_flush <= 1'b0;
    end else begin
      out_valid <= v1_q;
      if (v1_q) begin
        out_int   <= act1_q.int_out;
        out_data  <= act1_q.int_out ? int_result : fp_result;
        out_sat   <= act1_q.int_out ? int_sat : fp_ovf;
        out_flush <= act1_q.int_out ? 1'b0 : fp_unf;
      end
    end
  end

  // all four links see the same beats
  a_links_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    link_valid == {NCSM{link_valid[0]}} && link_held == {NCSM{link_held[0]}})
    else $error("operand links out of step");
endmodule
