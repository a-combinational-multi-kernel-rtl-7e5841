// combine_b: binary combine of two child codewords.
//
// beta[i] = beta_l[i] ^ beta_r[i] and beta[i+L] = beta_r[i] for i < L: the
// codeword of a binary node built from the codewords of its left and right
// children (one XOR per lane). Purely combinational.
//
// Interface: beta_l_i[L], beta_r_i[L] in, beta_o[2L] out.
//
// Timing: combinational, one XOR level. The combine rule [bl ^ br, br] is the
// published one. It belongs to the lower-triangular binary kernel, and the
// decoder is built for that kernel, not for the printed matrix [1 1; 1 0].
// Using this combine instead of a full re-encoder of the left child also
// follows the published improvement. The upper half of beta_o is a plain copy
// of beta_r_i: that is the function, not a missing connection.
module combine_b #(
  parameter int unsigned L = 24
) (
  input  logic [L-1:0]   beta_l_i,
  input  logic [L-1:0]   beta_r_i,
  output logic [2*L-1:0] beta_o
);
  assign beta_o = {beta_r_i, beta_l_i ^ beta_r_i};
endmodule
