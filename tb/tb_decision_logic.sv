// tb_decision_logic: exhaustive self-check of the size-2 leaf decoder over
// every LLR pair and frozen pattern (Q = 5: 32 x 32 x 4 cases). The expected
// bits follow the odd-leaf rule; away from magnitude ties it is also checked
// against the sign of the exact g sum, (1-2*u0)*l0 + l1.
//
// One case per clock, with a watchdog. The rule is the published one. The
// tie behaviour is checked as published, not against the exact sum.
module tb_decision_logic;
  import tb_polar_ref_pkg::*;
  localparam int unsigned Q = 5;
  logic clk = 0;
  logic [1:0][Q-1:0] a;
  logic [1:0]        info;
  logic [1:0]        u, beta;
  int checks = 0, failures = 0;
  cnt_t cnt = '{default: 0};
  always #5 clk = ~clk;
  decision_logic #(.Q(Q)) dut (.alpha_i(a), .info_i(info), .u_o(u), .beta_o(beta));
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int l0 = 0; l0 < 32; l0++)
      for (int l1 = 0; l1 < 32; l1++)
        for (int fz = 0; fz < 4; fz++) begin
          int unsigned e0, e1;
          a[0] = Q'(l0); a[1] = Q'(l1); info = 2'(fz);
          @(posedge clk);
          ref_leaf(l0, l1, fz & 1, fz >> 1, Q, e0, e1, cnt);
          checks += 4;
          if (u[0] !== e0[0]) failures++;
          if (u[1] !== e1[0]) failures++;
          if (beta[0] !== (e0[0] ^ e1[0])) failures++;
          if (beta[1] !== e1[0]) failures++;
          if (mag(l0, Q) != mag(l1, Q) && (fz >> 1)) begin
            int g;
            g = (e0 ? -llr_val(l0, Q) : llr_val(l0, Q)) + llr_val(l1, Q);
            checks++;
            if (u[1] !== (g < 0)) begin failures++; if (failures < 5) $display("l0=%0d l1=%0d fz=%0d u=%b g=%0d", l0, l1, fz, u, g); end
          end
        end
    checks++;
    $display("odd-leaf rule: |l1|>=|l0| %0d times, otherwise %0d times", cnt.leaf_big1, cnt.leaf_else);
    if (cnt.leaf_big1 == 0 || cnt.leaf_else == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
