// xor_bundle: sign logic of the Jack unit.
//
// Sixteen XOR gates give the sign of each of the (up to) sixteen products of
// floating-point elements: sign_p[i] = sign_x[i] ^ sign_w[i]. In the integer
// modes the bundle is switched off (operand isolation standing in for the
// paper's power gating) and drives zeros, because INT signs live in the
// two's complement operands themselves. Combinational.
module xor_bundle
  import jack_pkg::*;
(
  input  logic             en,
  input  logic [NLANE-1:0] sign_x,
  input  logic [NLANE-1:0] sign_w,
  output logic [NLANE-1:0] sign_p
);
  always_comb sign_p = en ? (sign_x ^ sign_w) : '0;
endmodule
