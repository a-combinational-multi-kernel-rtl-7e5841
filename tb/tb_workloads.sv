// tb_workloads: the other code sizes the decoder is evaluated at, each run
// end to end through mk_polar_decoder with dec_stream_check:
//   N = 64  {2,2,2,2,2,2}      pure binary
//   N = 96  {3,2,2,2,2,2}      rate-1/2 family, one T3 kernel at the root
//   N = 192 {3,2,2,2,2,2,2}
// For the one-ternary lengths the ternary kernel is placed at the root, the
// placement the complexity analysis of this decoder assumes; the frozen
// patterns are random (any pattern is accepted at run time).
//
// The sizes 64, 96 and 192 are lengths the decoder is evaluated at; 384 and
// 768 pass the same check but are left out for compile time. The checks and
// the watchdog are those of tb_mk_polar_decoder.
module tb_workloads;
  localparam int unsigned Q = 5;
  localparam int NW = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic done [NW];
  int   chk  [NW];
  int   fl   [NW];
  int checks = 0, failures = 0;

  `define WL(IDX, MM, TT, NN, NCWV)                                                     \
    logic rst_n_``IDX, lv_``IDX, fw_``IDX, dv_``IDX;                                    \
    logic [NN-1:0][Q-1:0] llr_``IDX;                                                   \
    logic [NN-1:0] info_``IDX, cw_``IDX, u_``IDX;                                       \
    mk_polar_decoder #(.Q(Q), .M(MM), .TERN(mk_polar_pkg::tern_mask_t'(TT))) dut_``IDX ( \
      .clk_i(clk), .rst_ni(rst_n_``IDX), .llr_valid_i(lv_``IDX), .llr_i(llr_``IDX),     \
      .frz_we_i(fw_``IDX), .info_i(info_``IDX), .dec_valid_o(dv_``IDX),                \
      .cw_o(cw_``IDX), .u_o(u_``IDX));                                                 \
    dec_stream_check #(.M(MM), .TERN(TT), .Q(Q), .NCW(NCWV)) chk_``IDX (               \
      .clk_i(clk), .rst_no(rst_n_``IDX), .llr_valid_o(lv_``IDX), .llr_o(llr_``IDX),     \
      .frz_we_o(fw_``IDX), .info_o(info_``IDX), .dec_valid_i(dv_``IDX),                \
      .cw_i(cw_``IDX), .u_i(u_``IDX), .done_o(done[IDX]), .checks_o(chk[IDX]),         \
      .failures_o(fl[IDX]));

  `WL(0, 6, 0, 64,  200)
  `WL(1, 6, 1, 96,  150)
  `WL(2, 7, 1, 192, 120)

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done[0] && done[1] && done[2]);
    for (int w = 0; w < NW; w++) begin
      checks += chk[w];
      failures += fl[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
