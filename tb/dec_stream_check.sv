// dec_stream_check: end-to-end stimulus and checker for mk_polar_decoder.
//
// Holds the decoder in reset, then streams NCW codewords through it with
// random idle gaps and long back-to-back bursts, changing the frozen pattern
// (the code rate K/N) many times: sometimes in an idle cycle, sometimes in
// the same cycle as a codeword, once all-frozen and once at rate 1. Half
// the words are noiseless (the output must be the transmitted codeword and
// message exactly), half are random LLRs checked against the bit-true SC
// reference. For every result it checks the order, the latency (two rising
// edges from llr_valid_i to dec_valid_o, i.e. one clock after the input
// registers), and that a burst of B inputs gives B results on B consecutive
// cycles (one codeword per clock). At the end each mechanism must have
// occurred at least once. Inputs change on the falling clock edge.
//
// Interface: clk_i in; it drives rst_no, llr_valid_o, llr_o, frz_we_o and
// info_o, watches dec_valid_i, cw_i and u_i, and reports on done_o and its
// count outputs. The one-clock latency and the online rate change come from
// the published design. The strobes, the reset state (all frozen) and the
// traffic mix belong to this design's own interface.
module dec_stream_check
  import tb_polar_ref_pkg::*;
#(
  parameter int unsigned M    = 5,
  parameter int unsigned TERN = 1,
  parameter int unsigned Q    = 5,
  parameter int unsigned NCW  = 400,
  localparam int unsigned N   = code_len(M, TERN)
) (
  input  logic                clk_i,
  output logic                rst_no,
  output logic                llr_valid_o,
  output logic [N-1:0][Q-1:0] llr_o,
  output logic                frz_we_o,
  output logic [N-1:0]        info_o,
  input  logic                dec_valid_i,
  input  logic [N-1:0]        cw_i,
  input  logic [N-1:0]        u_i,
  output logic                done_o,
  output int                  checks_o,
  output int                  failures_o
);
  localparam int unsigned MaxMag = (1 << (Q - 1)) - 1;

  logic [N-1:0] exp_cw [$];
  logic [N-1:0] exp_u  [$];
  int           exp_t  [$];
  int           cyc;          // rising edges seen so far
  int           last_out;     // edge of the previous result

  // Mechanism counters.
  int n_b2b, n_gap, n_rate_idle, n_rate_with, n_all_frozen, n_full_rate, n_noiseless, n_noisy;
  int n_results;
  cnt_t cnt;

  always @(posedge clk_i) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks_o++;
    if (!cond) begin
      failures_o++;
      if (failures_o < 8) $display("[%0d] FAIL %s", cyc, what);
    end
  endtask

  // Look at the output registers (called on the falling edge).
  task automatic monitor();
    if (dec_valid_i) begin
      check(exp_cw.size() > 0, "result without a codeword sent");
      if (exp_cw.size() > 0) begin
        logic [N-1:0] ecw, eu;
        int t;
        ecw = exp_cw.pop_front(); eu = exp_u.pop_front(); t = exp_t.pop_front();
        check(cw_i == ecw, $sformatf("codeword %h expected %h", cw_i, ecw));
        check(u_i == eu,   $sformatf("decided bits %h expected %h", u_i, eu));
        check(cyc - t == 2, $sformatf("latency %0d edges", cyc - t));
        if (last_out == cyc - 1) n_b2b++;
        last_out = cyc;
        n_results++;
      end
    end else if (exp_t.size() > 0) begin
      check(cyc - exp_t[0] < 2, "result missing");
    end
  endtask

  initial begin
    logic [N-1:0] pattern;
    int sent, burst;
    iq_t qa, qi, qu, qx, ru, rb;
    cyc = 0; last_out = -10; done_o = 0; checks_o = 0; failures_o = 0;
    n_b2b = 0; n_gap = 0; n_rate_idle = 0; n_rate_with = 0; n_all_frozen = 0;
    n_full_rate = 0; n_noiseless = 0; n_noisy = 0; n_results = 0;
    cnt = '{default: 0};
    rst_no = 0; llr_valid_o = 0; frz_we_o = 0; llr_o = '0; info_o = '0;
    pattern = '0;
    repeat (3) @(negedge clk_i);
    check(dec_valid_i == 0, "valid during reset");
    rst_no = 1;
    @(negedge clk_i);
    sent = 0; burst = 0;
    while (sent < NCW) begin
      bit send, new_rate;
      monitor();
      llr_valid_o = 0; frz_we_o = 0;
      // Traffic shape: bursts of 1..12 words, then 0..3 idle cycles.
      if (burst == 0) begin
        int idle;
        idle  = $urandom_range(0, 3);
        burst = $urandom_range(1, 12);
        if (idle > 0) begin
          n_gap++;
          repeat (idle - 1) begin
            @(negedge clk_i); monitor();
          end
          // Rate changes in an idle cycle.
          if ($urandom_range(0, 2) == 0) begin
            pattern  = new_pattern(sent);
            info_o   = pattern; frz_we_o = 1; n_rate_idle++;
          end
          @(negedge clk_i); monitor();
          frz_we_o = 0;
        end
      end
      // One codeword; sometimes with a new pattern in the same cycle.
      new_rate = ($urandom_range(0, 9) == 0) || sent == 0;
      if (new_rate) begin
        pattern = new_pattern(sent);
        info_o = pattern; frz_we_o = 1; n_rate_with++;
      end
      qa = {}; qi = {}; qu = {};
      for (int i = 0; i < N; i++) begin
        qi.push_back(pattern[i]);
        qu.push_back(pattern[i] ? $urandom_range(0, 1) : 0);
      end
      qx = ref_encode(qu, M, TERN);
      send = sent[0];
      for (int i = 0; i < N; i++) begin
        if (send) qa.push_back((qx[i] << (Q - 1)) | $urandom_range(1, MaxMag));
        else      qa.push_back($urandom_range(0, (1 << Q) - 1));
        llr_o[i] = Q'(qa[i]);
      end
      ref_decode(qa, qi, M, TERN, Q, ru, rb, cnt);
      begin
        logic [N-1:0] ecw, eu;
        for (int i = 0; i < N; i++) begin ecw[i] = rb[i][0]; eu[i] = ru[i][0]; end
        if (send) begin
          n_noiseless++;
          for (int i = 0; i < N; i++) begin
            checks_o++;
            if (ecw[i] != qx[i][0] || eu[i] != qu[i][0]) begin
              failures_o++; $display("reference does not decode a noiseless word");
            end
          end
        end else n_noisy++;
        exp_cw.push_back(ecw); exp_u.push_back(eu); exp_t.push_back(cyc);
      end
      llr_valid_o = 1;
      sent++; burst--;
      @(negedge clk_i);
    end
    monitor();
    llr_valid_o = 0; frz_we_o = 0;
    repeat (4) begin @(negedge clk_i); monitor(); end
    check(exp_cw.size() == 0, "results left over");
    check(n_results == NCW, "result count");
    $display("N=%0d: %0d words, back-to-back results %0d, idle gaps %0d, rate changes idle %0d / with word %0d, all-frozen %0d, rate-1 %0d, noiseless %0d, noisy %0d",
             N, n_results, n_b2b, n_gap, n_rate_idle, n_rate_with, n_all_frozen, n_full_rate, n_noiseless, n_noisy);
    $display("N=%0d: binary nodes %0d, ternary nodes %0d, saturated sums %0d, leaf |l1|>=|l0| %0d, leaf else %0d",
             N, cnt.bin_nodes, cnt.ter_nodes, cnt.sat, cnt.leaf_big1, cnt.leaf_else);
    check(n_b2b > 0, "no back-to-back results");
    check(n_gap > 0, "no idle gap");
    check(n_rate_idle > 0, "no rate change in an idle cycle");
    check(n_rate_with > 0, "no rate change together with a word");
    check(n_all_frozen > 0, "no all-frozen pattern");
    check(n_full_rate > 0, "no rate-1 pattern");
    check(n_noiseless > 0 && n_noisy > 0, "word kinds");
    check(cnt.bin_nodes > 0, "no binary stage used");
    check(cnt.ter_nodes > 0 || TERN == 0, "no ternary stage used");
    check(cnt.sat > 0, "no saturated sum");
    check(cnt.leaf_big1 > 0 && cnt.leaf_else > 0, "odd-leaf branches");
    done_o = 1;
  end

  // A frozen pattern with a random number K of information bits at random
  // positions; word 0 gets the all-frozen pattern, a later one rate 1.
  function automatic logic [N-1:0] new_pattern(int sent);
    logic [N-1:0] p;
    int k;
    if (sent == 0) begin
      if (n_all_frozen == 0) n_all_frozen++;
      return '0;
    end
    if (n_full_rate == 0 && sent > NCW / 2) begin n_full_rate++; return '1; end
    k = $urandom_range(1, N);
    p = '0;
    while ($countones(p) < k) p[$urandom_range(0, N - 1)] = 1'b1;
    return p;
  endfunction
endmodule
