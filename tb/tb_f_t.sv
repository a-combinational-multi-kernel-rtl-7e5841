// tb_f_t: random self-check of the three-input min-sum unit against the
// reference model, lanes i / i+L / i+2L.
//
// A new random vector is applied each clock and checked after it settles. A
// watchdog ends the run with a failure if it does not finish. The zero-sign
// convention checked is this design's choice.
module tb_f_t;
  import tb_polar_ref_pkg::*;
  localparam int unsigned L = 4, Q = 5, NV = 3000;
  logic clk = 0;
  logic [3*L-1:0][Q-1:0] a;
  logic [L-1:0][Q-1:0]   y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  f_t #(.L(L), .Q(Q)) dut (.alpha_i(a), .alpha_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < 3*L; i++) a[i] = Q'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== Q'(ref_f3(a[i], a[i+L], a[i+2*L], Q))) begin
          failures++;
          if (failures < 10) $display("f_t lane %0d: %h %h %h got %h", i, a[i], a[i+L], a[i+2*L], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
