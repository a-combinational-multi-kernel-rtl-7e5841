// f_t: ternary left-branch LLR update, L lanes in parallel.
//
// For a ternary SC node with 3L LLRs, lane i combines alpha[i], alpha[i+L]
// and alpha[i+2L] by three-input min-sum: sign = XOR of the three signs,
// magnitude = the smallest of the three magnitudes (two comparators and two
// multiplexers per lane). The result is the left child's LLR vector. Purely
// combinational.
//
// Interface: alpha_i[3L] in, alpha_o[L] out, Q-bit sign-magnitude words.
//
// Timing: combinational, two comparator levels. The three-input min-sum
// follows the published design. The printed offsets 2^(lambda-1) and 2^lambda
// are read as L and 2L, the node's thirds. A zero minimum keeps the XOR sign,
// as in f_b.
module f_t #(
  parameter int unsigned L = 16,
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [3*L-1:0][Q-1:0] alpha_i,
  output logic [L-1:0][Q-1:0]   alpha_o
);
  localparam int unsigned W = Q - 1;

  always_comb begin
    for (int unsigned i = 0; i < L; i++) begin
      logic [Q-1:0] a, b, c;
      logic [W-1:0] mab;
      a   = alpha_i[i];
      b   = alpha_i[i+L];
      c   = alpha_i[i+2*L];
      mab = (a[W-1:0] <= b[W-1:0]) ? a[W-1:0] : b[W-1:0];
      alpha_o[i][Q-1]   = a[Q-1] ^ b[Q-1] ^ c[Q-1];
      alpha_o[i][W-1:0] = (mab <= c[W-1:0]) ? mab : c[W-1:0];
    end
  end
endmodule
