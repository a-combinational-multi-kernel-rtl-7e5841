// mk_sc_node: combinational SC decoder of one sub-tree, built by recursion
// over the kernel sequence.
//
// A node of size N whose first kernel (stage 0 of its TERN mask) is:
//  - binary, N > 2: left child (size N/2) decodes f_b(alpha); its codeword
//    beta_l feeds g_b, whose output is decoded by the right child; the node
//    codeword is combine_b(beta_l, beta_r). This is the Arikan-kernel stage.
//  - ternary: left child decodes f_t(alpha); g1_t(alpha, beta_l) goes to the
//    middle child; g2_t(alpha, beta_l, beta_c) goes to the right child; the
//    node codeword is combine_t(beta_l, beta_c, beta_r). Each child is N/3.
//  - binary, N = 2 (last stage): decision_logic decides both leaves.
// The children are instances of this module with the remaining M-1 stages
// (TERN >> 1). There is no storage anywhere: the whole tree, leaves visited
// left to right, settles in one combinational pass.
//
// Ports: alpha_i[N] Q-bit sign-magnitude LLRs, info_i[N] frozen indicator
// (1 = information bit), u_o[N] the decided bits in leaf order, beta_o[N]
// the codeword estimate of this node (u_o encoded with the node's kernels).
//
// The stage structure, the functions at each stage and the binary decision
// logic as the only leaf follow the decoder this implements. Where the
// combine sits is this design's choice: every node ends in the combine of its
// own kernel, so the codewords the parent's g units need come out of the
// children, and the root's combine is the output-stage combine whose type the
// first kernel chooses. A ternary last stage is rejected at elaboration.
//
// Tool note: Verilator 5.050 run with this module itself as --top-module
// does not elaborate the recursive child instances and then reports the
// child-driven nets (u_o, beta_l, ...) as undriven. Instantiated from any
// other module (the decoder top, a testbench) the full tree is built, which
// the testbenches check bit by bit; the warning of the stand-alone lint run
// is that tool artefact, not a missing driver.
module mk_sc_node
  import mk_polar_pkg::*;
#(
  parameter int unsigned Q    = QDefault,
  parameter int unsigned M    = MDefault,
  parameter tern_mask_t  TERN = TernDefault,
  // N = 2^(M-NTer) * 3^NTer, written in closed form (not with code_len) so
  // that the recursive elaboration sees a plain constant expression.
  localparam int unsigned NTer = $countones(TERN & ((tern_mask_t'(1) << M) - tern_mask_t'(1))),
  localparam int unsigned N    = (2 ** (M - NTer)) * (3 ** NTer)
) (
  input  logic [N-1:0][Q-1:0] alpha_i,
  input  logic [N-1:0]        info_i,
  output logic [N-1:0]        u_o,
  output logic [N-1:0]        beta_o
);
  localparam tern_mask_t SubTern = TERN >> 1;

  if (M == 0 || M > MaxStages) begin : g_bad_m
    $error("mk_sc_node: M must be 1..%0d", MaxStages);
  end else if (M == 1) begin : g_leaf
    if (TERN[0]) begin : g_bad_leaf
      $error("mk_sc_node: the last kernel of the sequence must be binary");
    end
    decision_logic #(.Q(Q)) u_dec (
      .alpha_i(alpha_i), .info_i(info_i), .u_o(u_o), .beta_o(beta_o)
    );
  end else if (!TERN[0]) begin : g_bin
    localparam int unsigned H = N / 2;
    logic [H-1:0][Q-1:0] alpha_l, alpha_r;
    logic [H-1:0]        beta_l, beta_r;

    f_b #(.L(H), .Q(Q)) u_f (.alpha_i(alpha_i), .alpha_o(alpha_l));
    mk_sc_node #(.Q(Q), .M(M-1), .TERN(SubTern)) u_left (
      .alpha_i(alpha_l), .info_i(info_i[H-1:0]),
      .u_o(u_o[H-1:0]), .beta_o(beta_l)
    );
    g_b #(.L(H), .Q(Q)) u_g (.alpha_i(alpha_i), .beta_l_i(beta_l), .alpha_o(alpha_r));
    mk_sc_node #(.Q(Q), .M(M-1), .TERN(SubTern)) u_right (
      .alpha_i(alpha_r), .info_i(info_i[N-1:H]),
      .u_o(u_o[N-1:H]), .beta_o(beta_r)
    );
    combine_b #(.L(H)) u_c (.beta_l_i(beta_l), .beta_r_i(beta_r), .beta_o(beta_o));
  end else begin : g_ter
    localparam int unsigned T = N / 3;
    logic [T-1:0][Q-1:0] alpha_l, alpha_c, alpha_r;
    logic [T-1:0]        beta_l, beta_c, beta_r;

    f_t #(.L(T), .Q(Q)) u_f (.alpha_i(alpha_i), .alpha_o(alpha_l));
    mk_sc_node #(.Q(Q), .M(M-1), .TERN(SubTern)) u_left (
      .alpha_i(alpha_l), .info_i(info_i[T-1:0]),
      .u_o(u_o[T-1:0]), .beta_o(beta_l)
    );
    g1_t #(.L(T), .Q(Q)) u_g1 (.alpha_i(alpha_i), .beta_l_i(beta_l), .alpha_o(alpha_c));
    mk_sc_node #(.Q(Q), .M(M-1), .TERN(SubTern)) u_mid (
      .alpha_i(alpha_c), .info_i(info_i[2*T-1:T]),
      .u_o(u_o[2*T-1:T]), .beta_o(beta_c)
    );
    g2_t #(.L(T), .Q(Q)) u_g2 (
      .alpha_i(alpha_i), .beta_l_i(beta_l), .beta_c_i(beta_c), .alpha_o(alpha_r)
    );
    mk_sc_node #(.Q(Q), .M(M-1), .TERN(SubTern)) u_right (
      .alpha_i(alpha_r), .info_i(info_i[N-1:2*T]),
      .u_o(u_o[N-1:2*T]), .beta_o(beta_r)
    );
    combine_t #(.L(T)) u_c (
      .beta_l_i(beta_l), .beta_c_i(beta_c), .beta_r_i(beta_r), .beta_o(beta_o)
    );
  end
endmodule
