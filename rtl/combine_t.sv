// combine_t: ternary combine of three child codewords.
//
// For i < L: beta[i] = bl ^ bc, beta[i+L] = bl ^ br, beta[i+2L] = bl ^ bc ^ br,
// which is x = u * T3 with T3 = [1 1 1; 1 0 1; 0 1 1] applied lane by lane.
// Purely combinational.
//
// Interface: beta_l_i[L], beta_c_i[L], beta_r_i[L] in, beta_o[3L] out.
//
// Timing: combinational, at most two XOR levels. The rule is the published
// ternary combine. This design places it at the end of each ternary
// sub-decoder instead of on the way into the next g unit; the gates are the
// same.
module combine_t #(
  parameter int unsigned L = 16
) (
  input  logic [L-1:0]   beta_l_i,
  input  logic [L-1:0]   beta_c_i,
  input  logic [L-1:0]   beta_r_i,
  output logic [3*L-1:0] beta_o
);
  logic [L-1:0] lc;
  assign lc     = beta_l_i ^ beta_c_i;
  assign beta_o = {lc ^ beta_r_i, beta_l_i ^ beta_r_i, lc};
endmodule
