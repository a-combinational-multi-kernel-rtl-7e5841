// tb_mk_sc_node: checks the recursive combinational decoder for several
// kernel sequences at once: N = 2 (leaf only), N = 4 {2,2}, N = 6 {3,2}
// (ternary root over binary decision logic, the smallest mixed code),
// N = 12 {2,3,2} (ternary stage in the middle), N = 36
// {3,2,3,2} (two ternary stages), N = 48 {3,2,2,2,2} and N = 64 {2,2,2,2,2,2}.
// Each is compared with noiseless codewords and with the bit-true reference.
//
// All seven run in parallel on one clock, each in its own sc_node_checker; a
// watchdog ends the run with a failure if one hangs. The N = 6 case is the
// published small mixed example; the others are this design's choices.
module tb_mk_sc_node;
  import tb_polar_ref_pkg::*;
  localparam int NC = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic done [NC];
  int   chk  [NC];
  int   fl   [NC];
  cnt_t cn   [NC];
  int checks = 0, failures = 0;

  sc_node_checker #(.M(1), .TERN(0),       .NV(400)) c0 (.clk_i(clk), .done_o(done[0]), .checks_o(chk[0]), .failures_o(fl[0]), .cnt_o(cn[0]));
  sc_node_checker #(.M(2), .TERN(0),       .NV(400)) c1 (.clk_i(clk), .done_o(done[1]), .checks_o(chk[1]), .failures_o(fl[1]), .cnt_o(cn[1]));
  sc_node_checker #(.M(2), .TERN(1),       .NV(400)) c2 (.clk_i(clk), .done_o(done[2]), .checks_o(chk[2]), .failures_o(fl[2]), .cnt_o(cn[2]));
  sc_node_checker #(.M(3), .TERN(2),       .NV(400)) c3 (.clk_i(clk), .done_o(done[3]), .checks_o(chk[3]), .failures_o(fl[3]), .cnt_o(cn[3]));
  sc_node_checker #(.M(4), .TERN(5),       .NV(400)) c4 (.clk_i(clk), .done_o(done[4]), .checks_o(chk[4]), .failures_o(fl[4]), .cnt_o(cn[4]));
  sc_node_checker #(.M(5), .TERN(1),       .NV(400)) c5 (.clk_i(clk), .done_o(done[5]), .checks_o(chk[5]), .failures_o(fl[5]), .cnt_o(cn[5]));
  sc_node_checker #(.M(6), .TERN(0),       .NV(400)) c6 (.clk_i(clk), .done_o(done[6]), .checks_o(chk[6]), .failures_o(fl[6]), .cnt_o(cn[6]));

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cnt_t tot;
    tot = '{default: 0};
    @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5] && done[6]);
    for (int c = 0; c < NC; c++) begin
      checks   += chk[c];
      failures += fl[c];
      tot.bin_nodes += cn[c].bin_nodes; tot.ter_nodes += cn[c].ter_nodes; tot.sat += cn[c].sat;
      tot.leaf_big1 += cn[c].leaf_big1; tot.leaf_else += cn[c].leaf_else;
      $display("config %0d: checks=%0d failures=%0d", c, chk[c], fl[c]);
    end
    $display("binary nodes %0d, ternary nodes %0d, saturated sums %0d, leaf |l1|>=|l0| %0d, leaf else %0d",
             tot.bin_nodes, tot.ter_nodes, tot.sat, tot.leaf_big1, tot.leaf_else);
    checks += 5;
    if (tot.bin_nodes == 0) failures++;
    if (tot.ter_nodes == 0) failures++;
    if (tot.sat == 0)       failures++;
    if (tot.leaf_big1 == 0) failures++;
    if (tot.leaf_else == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
