// sm_add: saturating adder for Q-bit sign-magnitude LLRs.
//
// Adds a and b as signed values and clips the magnitude of the result to
// 2^(Q-1)-1, so the sum stays in the same Q-bit format as its inputs. A sum
// of exactly zero is returned as +0. Equal signs add magnitudes; different
// signs subtract the smaller magnitude from the larger and keep the sign of
// the larger one. Purely combinational.
//
// Keeping every internal LLR at Q bits with saturation is a choice of this
// design: the decoder this follows fixes the channel LLR width (Q = 5,
// sign-magnitude) but not the width of the sums inside the tree.
module sm_add #(
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [Q-1:0] a_i,
  input  logic [Q-1:0] b_i,
  output logic [Q-1:0] sum_o
);
  localparam int unsigned W = Q - 1;
  localparam logic [W-1:0] MagMax = '1;

  logic         sa, sb;
  logic [W-1:0] ma, mb;
  logic [W:0]   msum;

  always_comb begin
    sa   = a_i[Q-1];
    sb   = b_i[Q-1];
    ma   = a_i[W-1:0];
    mb   = b_i[W-1:0];
    msum = {1'b0, ma} + {1'b0, mb};
    if (sa == sb) begin
      sum_o = {sa, msum[W] ? MagMax : msum[W-1:0]};
      if (msum == '0) sum_o = '0;
    end else if (ma > mb) begin
      sum_o = {sa, ma - mb};
    end else if (mb > ma) begin
      sum_o = {sb, mb - ma};
    end else begin
      sum_o = '0;
    end
  end
endmodule
