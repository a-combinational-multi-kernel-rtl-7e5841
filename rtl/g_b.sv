// g_b: binary right-branch LLR update, L lanes in parallel.
//
// Lane i computes (1 - 2*beta_l[i]) * alpha[i] + alpha[i+L], where beta_l
// is the codeword already decided by the left child. Following the
// precomputation approach, both candidates alpha[i+L] + alpha[i] and
// alpha[i+L] - alpha[i] are formed while the left child is still deciding,
// and beta_l[i] only drives the final multiplexer. Sums are saturating
// sign-magnitude additions (sm_add). Purely combinational.
//
// Interface: alpha_i[2L] and beta_l_i[L] in, alpha_o[L] out.
//
// Timing: combinational. The path from beta_l_i to alpha_o is one
// multiplexer, because the adders work on alpha_i alone. The function and the
// precomputation follow the published design. Saturation at Q bits is this
// design's choice.
module g_b #(
  parameter int unsigned L = 24,
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [2*L-1:0][Q-1:0] alpha_i,
  input  logic [L-1:0]          beta_l_i,
  output logic [L-1:0][Q-1:0]   alpha_o
);
  for (genvar i = 0; i < L; i++) begin : g_lane
    logic [Q-1:0] a_neg, sum_p, sum_n;
    assign a_neg = {~alpha_i[i][Q-1], alpha_i[i][Q-2:0]};
    sm_add #(.Q(Q)) u_add_p (.a_i(alpha_i[i]), .b_i(alpha_i[i+L]), .sum_o(sum_p));
    sm_add #(.Q(Q)) u_add_n (.a_i(a_neg),      .b_i(alpha_i[i+L]), .sum_o(sum_n));
    assign alpha_o[i] = beta_l_i[i] ? sum_n : sum_p;
  end
endmodule
