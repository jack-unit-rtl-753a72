// reconstructed_csm: the multiplier array and integer adder tree of the Jack
// unit, built with 2D sub-word parallelism.
//
// Sixteen sub-multipliers come from four precision-scalable CSMs (c = 0..3),
// each with four positions (k = 0..3). In the 8-bit modes CSM c multiplies
// element c of X and W, split into nibbles:
//   k=0: w_lo*x_lo (x1), k=1: w_hi*x_lo (x16), k=2: w_lo*x_hi (x16),
//   k=3: w_hi*x_hi (x256)
// In the 4-bit modes sub-multiplier (c,k) multiplies nibble k of the 16-bit
// operand words of CSM c, i.e. lane 4c+k, and no position weight applies.
// Every sub-product goes through its own barrel shifter (right shift by the
// lane's exponent difference, floating-point modes only) and is negated when
// the lane's product sign is set. The four sub-products at the same position
// in the four CSMs share a position weight, so they are first added in an
// intra-group adder tree and then shifted by one shared shifter: 3 shifters
// serve what would need 12 without the grouping. An inter-group tree adds
// the four groups as (g0 + g1<<4) + (g2<<4 + g3<<8).
//
// The widths printed in the paper (8b after B.S., 9b, 10b, 14b, 18b) are
// magnitude widths; this RTL carries one extra sign bit at every stage so
// signed FP and INT sums share the tree (PROD_W 9, GRP_W 11, SUM_W 21).
// Combinational; the Jack unit places it between its two pipeline registers.
module reconstructed_csm
  import jack_pkg::*;
(
  input  logic                     wide,
  input  logic                     int_signed,
  input  logic [15:0]              x_word [NCSM],
  input  logic [15:0]              w_word [NCSM],
  input  logic [NLANE-1:0]         sign_p,          // product signs (FP modes)
  input  logic [SH_W-1:0]          shamt  [NLANE],  // alignment shift per lane
  output logic signed [SUM_W-1:0]  sum
);
  logic [3:0]              xa [NCSM][NPOS], wb [NCSM][NPOS];
  logic                    xs [NCSM][NPOS], ws [NCSM][NPOS];
  logic [SH_W-1:0]         sh [NCSM][NPOS];
  logic                    sg [NCSM][NPOS];
  logic signed [PROD_W-1:0] prod [NCSM][NPOS];
  logic signed [PROD_W-1:0] aligned [NCSM][NPOS];
  logic signed [PROD_W-1:0] signed_p [NCSM][NPOS];
  logic signed [GRP_W-1:0]  grp [NPOS];
  logic signed [SUM_W-1:0]  grp_sh [NPOS];
  logic signed [SUM_W-1:0]  s01, s23;

  // operand distribution to the sub-multipliers
  always_comb begin
    for (int c = 0; c < NCSM; c++) begin
      for (int k = 0; k < NPOS; k++) begin
        if (wide) begin
          xa[c][k] = (k >= 2)     ? x_word[c][7:4] : x_word[c][3:0];
          wb[c][k] = (k % 2 == 1) ? w_word[c][7:4] : w_word[c][3:0];
          xs[c][k] = int_signed && (k >= 2);
          ws[c][k] = int_signed && (k % 2 == 1);
          sh[c][k] = shamt[c];
          sg[c][k] = sign_p[c];
        end else begin
          xa[c][k] = x_word[c][4*k +: 4];
          wb[c][k] = w_word[c][4*k +: 4];
          xs[c][k] = int_signed;
          ws[c][k] = int_signed;
          sh[c][k] = shamt[4*c + k];
          sg[c][k] = sign_p[4*c + k];
        end
      end
    end
  end

  for (genvar c = 0; c < NCSM; c++) begin : g_csm
    for (genvar k = 0; k < NPOS; k++) begin : g_pos
      sub_multiplier u_mul (
        .a       (xa[c][k]),
        .a_signed(xs[c][k]),
        .b       (wb[c][k]),
        .b_signed(ws[c][k]),
        .p       (prod[c][k])
      );
      barrel_shifter u_bs (
        .din  (prod[c][k]),
        .shamt(sh[c][k]),
        .dout (aligned[c][k])
      );
      assign signed_p[c][k] = sg[c][k] ? -aligned[c][k] : aligned[c][k];
    end
  end

  // intra-group trees, shared position shifters, inter-group tree
  always_comb begin
    for (int k = 0; k < NPOS; k++) begin
      grp[k] = (GRP_W'(signed_p[0][k]) + GRP_W'(signed_p[1][k]))
             + (GRP_W'(signed_p[2][k]) + GRP_W'(signed_p[3][k]));
    end
    grp_sh[0] = SUM_W'(grp[0]);
    grp_sh[1] = wide ? (SUM_W'(grp[1]) <<< 4) : SUM_W'(grp[1]);
    grp_sh[2] = wide ? (SUM_W'(grp[2]) <<< 4) : SUM_W'(grp[2]);
    grp_sh[3] = wide ? (SUM_W'(grp[3]) <<< 8) : SUM_W'(grp[3]);
    s01 = grp_sh[0] + grp_sh[1];
    s23 = grp_sh[2] + grp_sh[3];
    sum = s01 + s23;
  end
endmodule
