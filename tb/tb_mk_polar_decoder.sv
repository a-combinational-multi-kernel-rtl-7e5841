// tb_mk_polar_decoder: end-to-end test of the decoder at its default
// configuration (N = 48, kernel order {3,2,2,2,2}, Q = 5), no parameters
// overridden. dec_stream_check streams 600 codewords with bursts, gaps and
// frozen-pattern changes and checks every result, the latency and the
// one-codeword-per-clock rate.
//
// The one-clock latency and one codeword per clock are the published
// figures. The strobe interface they are measured on is this design's own. A
// watchdog ends the run with a failure if it hangs.
module tb_mk_polar_decoder;
  localparam int unsigned N = 48, Q = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                rst_n, llr_valid, frz_we, dec_valid, done;
  logic [N-1:0][Q-1:0] llr;
  logic [N-1:0]        info, cw, u;
  int checks, failures;

  mk_polar_decoder dut (
    .clk_i(clk), .rst_ni(rst_n), .llr_valid_i(llr_valid), .llr_i(llr),
    .frz_we_i(frz_we), .info_i(info), .dec_valid_o(dec_valid), .cw_o(cw), .u_o(u)
  );

  dec_stream_check #(.M(5), .TERN(1), .Q(Q), .NCW(600)) chk (
    .clk_i(clk), .rst_no(rst_n), .llr_valid_o(llr_valid), .llr_o(llr),
    .frz_we_o(frz_we), .info_o(info), .dec_valid_i(dec_valid), .cw_i(cw), .u_i(u),
    .done_o(done), .checks_o(checks), .failures_o(failures)
  );

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);  // the checker has cleared done by now
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
