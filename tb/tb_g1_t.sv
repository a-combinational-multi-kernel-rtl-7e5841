// tb_g1_t: random self-check of the ternary middle-branch unit:
// (1-2b)*a0 + f(a1, a2), against the reference model.
//
// A new random vector is applied each clock and checked after it settles,
// with a watchdog. Saturation at Q bits, checked here, is this design's
// choice.
module tb_g1_t;
  import tb_polar_ref_pkg::*;
  localparam int unsigned L = 4, Q = 5, NV = 3000;
  logic clk = 0;
  logic [3*L-1:0][Q-1:0] a;
  logic [L-1:0]          b;
  logic [L-1:0][Q-1:0]   y;
  int checks = 0, failures = 0;
  cnt_t cnt = '{default: 0};
  always #5 clk = ~clk;
  g1_t #(.L(L), .Q(Q)) dut (.alpha_i(a), .beta_l_i(b), .alpha_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < 3*L; i++) a[i] = Q'($urandom);
      b = L'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== Q'(ref_g1(a[i], a[i+L], a[i+2*L], b[i], Q, cnt))) begin
          failures++;
          if (failures < 10) $display("g1_t lane %0d: %h %h %h b=%0d got %h", i, a[i], a[i+L], a[i+2*L], b[i], y[i]);
        end
      end
    end
    checks++;
    if (cnt.sat == 0) begin failures++; $display("no saturated sum exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
