// max_comparator: N-to-1 maximum of signed exponents (the paper's 4-to-1
// comparator for bfloat16 mode and 16-to-1 comparator for FP8 mode).
//
// Built as a balanced tree of two-input compare-and-select stages, so its
// depth is log2(N). N must be a power of two. Combinational.
module max_comparator
  import jack_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic signed [EXP_W-1:0] e   [N],
  output logic signed [EXP_W-1:0] emax
);
  localparam int unsigned LV = $clog2(N);

  // node[l][i]: i-th winner after l levels
  logic signed [EXP_W-1:0] node [LV+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) node[0][i] = e[i];
    for (int l = 1; l <= LV; l++) begin
      for (int i = 0; i < N; i++) node[l][i] = EXP_MIN;
      for (int i = 0; i < (N >> l); i++)
        node[l][i] = (node[l-1][2*i] >= node[l-1][2*i+1]) ? node[l-1][2*i] : node[l-1][2*i+1];
    end
    emax = node[LV][0];
  end
endmodule
