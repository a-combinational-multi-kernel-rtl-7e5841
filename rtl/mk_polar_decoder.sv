// mk_polar_decoder: one-codeword-per-clock combinational multi-kernel SC
// polar decoder with its input, frozen-pattern and output registers.
//
// Code: length N = product of the kernel sizes of the sequence (M stages,
// TERN bit s = 1 where stage s from the root is T3); default N = 48 with
// kernel order {3,2,2,2,2}. The LLR input registers (N x Q) and the frozen
// pattern registers (N) feed mk_sc_node, a purely combinational SC tree; its
// codeword estimate and decided bits are captured in the output registers.
// Nothing is stored between the input and output registers, so a new
// codeword can enter every clock: coded throughput N x f_clk.
//
// Interface and timing:
//  - llr_valid_i / llr_i: when llr_valid_i is high at a rising edge, llr_i
//    (channel LLRs, Q-bit sign-magnitude, bit Q-1 = sign, positive = bit 0
//    more likely) is written into the input registers.
//  - frz_we_i / info_i: when frz_we_i is high at a rising edge, info_i (1 =
//    information bit, 0 = frozen) is written into the frozen-pattern
//    registers. The pattern can change between any two codewords (online
//    rate assignment); written together with llr_valid_i it applies to that
//    codeword.
//  - dec_valid_o / cw_o / u_o: one clock after a codeword is in the input
//    registers the output registers hold its codeword estimate cw_o and its
//    decided bits u_o (frozen positions 0), flagged by dec_valid_o.
// So dec_valid_o rises on the second rising edge after llr_valid_i was
// sampled, and back-to-back inputs give back-to-back results.
//
// Register contents follow the decoder this implements (N x Q LLR bits, N
// frozen bits, N output bits); registering u_o as well as cw_o, the strobes
// and the reset values (valid flags cleared, pattern all frozen) are choices
// of this design.
module mk_polar_decoder
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
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                llr_valid_i,
  input  logic [N-1:0][Q-1:0] llr_i,
  input  logic                frz_we_i,
  input  logic [N-1:0]        info_i,
  output logic                dec_valid_o,
  output logic [N-1:0]        cw_o,
  output logic [N-1:0]        u_o
);
  logic [N-1:0][Q-1:0] llr_q;
  logic [N-1:0]        info_q;
  logic                llr_vld_q;
  logic [N-1:0]        cw_d, u_d;

  // Input registers (N x Q) and their valid flag.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) llr_vld_q <= 1'b0;
    else         llr_vld_q <= llr_valid_i;
  end
  always_ff @(posedge clk_i) begin
    if (llr_valid_i) llr_q <= llr_i;
  end

  // Frozen-pattern registers (N), rewritable at any time.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       info_q <= '0;
    else if (frz_we_i) info_q <= info_i;
  end

  // The combinational decoder.
  mk_sc_node #(.Q(Q), .M(M), .TERN(TERN)) u_tree (
    .alpha_i(llr_q), .info_i(info_q), .u_o(u_d), .beta_o(cw_d)
  );

  // Output registers (N codeword bits, N decided bits).
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) dec_valid_o <= 1'b0;
    else         dec_valid_o <= llr_vld_q;
  end
  always_ff @(posedge clk_i) begin
    if (llr_vld_q) begin
      cw_o <= cw_d;
      u_o  <= u_d;
    end
  end
endmodule
