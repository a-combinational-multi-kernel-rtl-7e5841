// g2_t: ternary right-branch LLR update, L lanes in parallel.
//
// Lane i computes (1 - 2*beta_l[i]) * alpha[i+L]
//               + (1 - 2*(beta_l[i] ^ beta_c[i])) * alpha[i+2L],
// using the codewords of the left and middle children. With u0 and u1 known
// the right bit u2 is seen through x1 = u0 ^ u2 and x2 = u0 ^ u1 ^ u2.
// Precomputation: the four sign combinations of the two terms are summed in
// parallel and the two select bits pick one. Purely combinational.
//
// Interface: alpha_i[3L], beta_l_i[L], beta_c_i[L] in, alpha_o[L] out.
//
// Timing: combinational; the beta inputs reach the output through one 4:1
// multiplexer. The function and the precomputation follow the published
// design. The select encoding {bl ^ bc, bl} and saturation at Q bits are this
// design's choices.
module g2_t #(
  parameter int unsigned L = 16,
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [3*L-1:0][Q-1:0] alpha_i,
  input  logic [L-1:0]          beta_l_i,
  input  logic [L-1:0]          beta_c_i,
  output logic [L-1:0][Q-1:0]   alpha_o
);
  for (genvar i = 0; i < L; i++) begin : g_lane
    logic [Q-1:0] p, q, p_neg, q_neg;
    logic [3:0][Q-1:0] cand;  // index {flip q, flip p}
    assign p     = alpha_i[i+L];
    assign q     = alpha_i[i+2*L];
    assign p_neg = {~p[Q-1], p[Q-2:0]};
    assign q_neg = {~q[Q-1], q[Q-2:0]};
    sm_add #(.Q(Q)) u_add_pp (.a_i(p),     .b_i(q),     .sum_o(cand[0]));
    sm_add #(.Q(Q)) u_add_np (.a_i(p_neg), .b_i(q),     .sum_o(cand[1]));
    sm_add #(.Q(Q)) u_add_pn (.a_i(p),     .b_i(q_neg), .sum_o(cand[2]));
    sm_add #(.Q(Q)) u_add_nn (.a_i(p_neg), .b_i(q_neg), .sum_o(cand[3]));
    assign alpha_o[i] = cand[{beta_l_i[i] ^ beta_c_i[i], beta_l_i[i]}];
  end
endmodule
