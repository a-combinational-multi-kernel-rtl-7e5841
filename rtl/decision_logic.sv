// decision_logic: size-2 binary leaf decoder, the building block at stage 0.
//
// Given the two LLRs lambda0, lambda1 of a size-2 binary node and its two
// frozen indicators (1 = information bit), it decides both leaves at once
// without forming the g sum:
//   u0 = a0 ? s(lambda0) ^ s(lambda1) : 0                (sign of f)
//   u1 = 0                  if a1 = 0
//        s(lambda1)         if |lambda1| >= |lambda0|
//        s(lambda0) ^ u0    otherwise
// where s() is the sign bit. One magnitude comparator per leaf pair. The
// odd-leaf rule is the one the decoder is built on, taken literally (at a
// magnitude tie it answers s(lambda1)); u0 comes from the sign of f. It also
// returns the node codeword [u0 ^ u1, u1]. Purely combinational.
//
// Interface: alpha_i[2] (Q-bit sign-magnitude), info_i[2] (1 = information),
// u_o[2] decided bits, beta_o[2] the leaf codeword. Timing: combinational, one
// comparator and a few gates deep. The decision rule, tie behaviour included,
// follows the published decision logic. Returning the leaf codeword as well is
// this design's choice, so that every sub-decoder ends in its own combine.
module decision_logic #(
  parameter int unsigned Q = mk_polar_pkg::QDefault
) (
  input  logic [1:0][Q-1:0] alpha_i,
  input  logic [1:0]        info_i,
  output logic [1:0]        u_o,
  output logic [1:0]        beta_o
);
  localparam int unsigned W = Q - 1;
  logic s0, s1;
  logic [W-1:0] m0, m1;

  always_comb begin
    s0 = alpha_i[0][Q-1];
    s1 = alpha_i[1][Q-1];
    m0 = alpha_i[0][W-1:0];
    m1 = alpha_i[1][W-1:0];
    u_o[0] = info_i[0] & (s0 ^ s1);
    if (!info_i[1])    u_o[1] = 1'b0;
    else if (m1 >= m0) u_o[1] = s1;
    else               u_o[1] = s0 ^ u_o[0];
    beta_o = {u_o[1], u_o[0] ^ u_o[1]};
  end
endmodule
