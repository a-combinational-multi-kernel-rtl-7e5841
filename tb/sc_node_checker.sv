// sc_node_checker: drives one mk_sc_node configuration and checks it.
//
// Each of NV vectors picks a random frozen pattern, then either
//  - a noiseless word: random information bits u, codeword x = u * G, LLRs
//    of sign x and random non-zero magnitude; the node must return u and x
//    exactly (an independent check: no decoder model involved), or
//  - random LLRs over the whole code range; u_o and beta_o must equal the
//    bit-true SC reference model, ref_decode.
// Reports its counts on done_o and adds up which datapath mechanisms the
// reference saw (binary/ternary nodes, saturation, both odd-leaf branches).
//
// Timing: a new vector is applied on each clock, and the outputs are sampled
// after they have settled. Everything checked here is the published SC
// decoding. The tie rule of the leaf, Q-bit saturation and the +0 convention
// are this design's choices, and the reference model mirrors them.
module sc_node_checker
  import tb_polar_ref_pkg::*;
#(
  parameter int unsigned M    = 2,
  parameter int unsigned TERN = 1,
  parameter int unsigned Q    = 5,
  parameter int unsigned NV   = 200
) (
  input  logic clk_i,
  output logic done_o,
  output int   checks_o,
  output int   failures_o,
  output cnt_t cnt_o
);
  localparam int unsigned N = code_len(M, TERN);
  localparam int unsigned MaxMag = (1 << (Q - 1)) - 1;

  logic [N-1:0][Q-1:0] alpha;
  logic [N-1:0]        info, u, beta;

  mk_sc_node #(.Q(Q), .M(M), .TERN(mk_polar_pkg::tern_mask_t'(TERN))) dut (
    .alpha_i(alpha), .info_i(info), .u_o(u), .beta_o(beta)
  );

  initial begin
    iq_t qa, qi, qu, qx, ru, rb;
    cnt_t cnt;
    cnt = '{default: 0};
    done_o = 0; checks_o = 0; failures_o = 0;
    for (int v = 0; v < NV; v++) begin
      bit noiseless;
      noiseless = v[0];
      qa = {}; qi = {}; qu = {};
      for (int i = 0; i < N; i++) begin
        qi.push_back($urandom_range(0, 1));
        qu.push_back(qi[i] ? $urandom_range(0, 1) : 0);
      end
      qx = ref_encode(qu, M, TERN);
      for (int i = 0; i < N; i++) begin
        if (noiseless) qa.push_back((qx[i] << (Q - 1)) | $urandom_range(1, MaxMag));
        else           qa.push_back($urandom_range(0, (1 << Q) - 1));
        alpha[i] = Q'(qa[i]);
        info[i]  = qi[i][0];
      end
      @(posedge clk_i);
      ref_decode(qa, qi, M, TERN, Q, ru, rb, cnt);
      for (int i = 0; i < N; i++) begin
        checks_o += 2;
        if (u[i] !== ru[i][0] || beta[i] !== rb[i][0]) begin
          failures_o++;
          if (failures_o < 6) $display("N=%0d vec %0d bit %0d: u %0d/%0d beta %0d/%0d", N, v, i, u[i], ru[i], beta[i], rb[i]);
        end
        if (noiseless) begin
          checks_o += 2;
          if (u[i] !== qu[i][0] || beta[i] !== qx[i][0]) failures_o++;
        end
      end
    end
    cnt_o  = cnt;
    done_o = 1;
  end
endmodule
