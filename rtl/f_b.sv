// f_b: binary left-branch LLR update, L lanes in parallel.
//
// For a binary SC node with 2L LLRs, lane i combines alpha[i] and
// alpha[i+L] by min-sum: the sign is the XOR of the two signs and the
// magnitude is the smaller magnitude (one comparator and one multiplexer per
// lane). The result is the LLR vector of the node's left child. A zero
// minimum keeps the XOR sign. Purely combinational.
//
// Interface: alpha_i[2L] in, alpha_o[L] out, each entry a Q-bit
// sign-magnitude word (bit Q-1 = sign).
//
// Timing: combinational, one comparator plus one multiplexer. The min-sum f
// follows the published design. Two details are this design's reading: the
// i / i+L pairing, where one printed equation shows 2i / 2i+1 instead, and the
// sign kept on a zero minimum.
module f_b #(
  parameter int unsigned L = 24,
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [2*L-1:0][Q-1:0] alpha_i,
  output logic [L-1:0][Q-1:0]   alpha_o
);
  localparam int unsigned W = Q - 1;

  always_comb begin
    for (int unsigned i = 0; i < L; i++) begin
      logic [Q-1:0] a, b;
      a = alpha_i[i];
      b = alpha_i[i+L];
      alpha_o[i][Q-1]   = a[Q-1] ^ b[Q-1];
      alpha_o[i][W-1:0] = (a[W-1:0] <= b[W-1:0]) ? a[W-1:0] : b[W-1:0];
    end
  end
endmodule
