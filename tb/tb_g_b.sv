// tb_g_b: random self-check of the binary g unit: (1-2b)*a + c with
// saturation to the Q-bit sign-magnitude range, against integer arithmetic.
// Counts saturated results and both select values so the stimulus is known
// to reach them.
module tb_g_b;
  import tb_polar_ref_pkg::*;
  localparam int unsigned L = 6, Q = 5, NV = 3000;
  logic clk = 0;
  logic [2*L-1:0][Q-1:0] a;
  logic [L-1:0]          b;
  logic [L-1:0][Q-1:0]   y;
  int checks = 0, failures = 0;
  cnt_t cnt = '{default: 0};
  always #5 clk = ~clk;
  g_b #(.L(L), .Q(Q)) dut (.alpha_i(a), .beta_l_i(b), .alpha_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < 2*L; i++) a[i] = Q'($urandom);
      b = L'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== Q'(ref_g(a[i], a[i+L], b[i], Q, cnt))) begin
          failures++;
          if (failures < 10) $display("g_b lane %0d: a=%h c=%h b=%0d got %h", i, a[i], a[i+L], b[i], y[i]);
        end
      end
    end
    checks++;
    if (cnt.sat == 0) begin failures++; $display("no saturated sum exercised"); end
    $display("saturated sums: %0d", cnt.sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
