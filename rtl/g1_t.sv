// g1_t: ternary middle-branch LLR update, L lanes in parallel.
//
// Lane i computes (1 - 2*beta_l[i]) * alpha[i] + f(alpha[i+L], alpha[i+2L]),
// with f the two-input min-sum and beta_l the left child's codeword. Once the
// left bit u0 is known, the middle bit u1 is seen directly through position i
// (x0 = u0 ^ u1) and through positions i+L, i+2L together (x1 ^ x2 = u1),
// which is why a min-sum of those two is added. Both signs of the first
// term are precomputed; beta_l[i] selects. Purely combinational.
//
// Interface: alpha_i[3L] and beta_l_i[L] in, alpha_o[L] out.
//
// Timing: combinational; from beta_l_i to the output is one multiplexer. The
// function and the precomputation follow the published design. The printed
// equation has a '+' inside f; it is read as the two-input
// f(alpha[i+L], alpha[i+2L]), which the ternary kernel requires. Saturation at
// Q bits is this design's choice.
module g1_t #(
  parameter int unsigned L = 16,
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [3*L-1:0][Q-1:0] alpha_i,
  input  logic [L-1:0]          beta_l_i,
  output logic [L-1:0][Q-1:0]   alpha_o
);
  logic [2*L-1:0][Q-1:0] pair;
  logic [L-1:0][Q-1:0]   fmin;

  // f of the upper two thirds: lane i sees alpha[i+L] and alpha[i+2L].
  assign pair = alpha_i[3*L-1:L];
  f_b #(.L(L), .Q(Q)) u_f (.alpha_i(pair), .alpha_o(fmin));

  for (genvar i = 0; i < L; i++) begin : g_lane
    logic [Q-1:0] a_neg, sum_p, sum_n;
    assign a_neg = {~alpha_i[i][Q-1], alpha_i[i][Q-2:0]};
    sm_add #(.Q(Q)) u_add_p (.a_i(alpha_i[i]), .b_i(fmin[i]), .sum_o(sum_p));
    sm_add #(.Q(Q)) u_add_n (.a_i(a_neg),      .b_i(fmin[i]), .sum_o(sum_n));
    assign alpha_o[i] = beta_l_i[i] ? sum_n : sum_p;
  end
endmodule
