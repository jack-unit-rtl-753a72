// exponent_extractor: product exponents, maximum exponent and alignment
// shifts of the Jack unit.
//
// Sixteen exponent calculators form the exponent of every product. A 4-to-1
// comparator finds the maximum in bfloat16 mode (4 products) and a 16-to-1
// comparator in the 4-bit FP modes; in the MX integer modes one calculator,
// fed with the two shared block exponents, gives the result exponent directly
// (the paper's "dataflow in MXINT"). From the maximum the block also forms
// each product's right-shift amount emax - e[i], saturated to 15, which the
// barrel shifters of the CSM use; in the INT and MXINT modes every shift is 0.
//
// Exponent inputs: 8-bit modes use exp_x[8c+:8] for lane c = 0..3; 4-bit
// modes use exp_x[4i+:4] for lane i = 0..15. Combinational.
module exponent_extractor
  import jack_pkg::*;
(
  input  logic [NLANE-1:0]         calc_en,
  input  logic                     wide,
  input  logic                     fp,
  input  logic                     mx,
  input  logic signed [BIAS_W-1:0] bias,
  input  logic [63:0]              exp_x,
  input  logic [63:0]              exp_w,
  input  logic [7:0]               shared_exp_x,
  input  logic [7:0]               shared_exp_w,
  output logic signed [EXP_W-1:0]  e     [NLANE],
  output logic signed [EXP_W-1:0]  emax,
  output logic [SH_W-1:0]          shamt [NLANE]
);
  logic [7:0]              ex [NLANE], ey [NLANE];
  logic signed [EXP_W-1:0] e4max, e16max;
  logic signed [EXP_W:0]   diff;

  always_comb begin
    for (int i = 0; i < NLANE; i++) begin
      if (!fp && mx && i == NLANE-1) begin
        ex[i] = shared_exp_x;
        ey[i] = shared_exp_w;
      end else if (wide) begin
        ex[i] = (i < 4) ? exp_x[8*i +: 8] : 8'h00;
        ey[i] = (i < 4) ? exp_w[8*i +: 8] : 8'h00;
      end else begin
        ex[i] = {4'h0, exp_x[4*i +: 4]};
        ey[i] = {4'h0, exp_w[4*i +: 4]};
      end
    end
  end

  for (genvar i = 0; i < NLANE; i++) begin : g_calc
    exponent_calculator u_calc (
      .en  (calc_en[i]),
      .ex  (ex[i]),
      .ey  (ey[i]),
      .bias(bias),
      .e   (e[i])
    );
  end

  max_comparator #(.N(4)) u_cmp4 (
    .e   (e[0:3]),
    .emax(e4max)
  );

  max_comparator #(.N(NLANE)) u_cmp16 (
    .e   (e),
    .emax(e16max)
  );

  always_comb begin
    if (fp)      emax = wide ? e4max : e16max;
    else if (mx) emax = e[NLANE-1];
    else         emax = '0;

    for (int i = 0; i < NLANE; i++) begin
      diff = {emax[EXP_W-1], emax} - {e[i][EXP_W-1], e[i]};
      if (!fp)                         shamt[i] = '0;
      else if (diff > (2**SH_W - 1))   shamt[i] = '1;
      else                             shamt[i] = diff[SH_W-1:0];
    end
  end
endmodule
