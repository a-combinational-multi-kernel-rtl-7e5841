// tb_f_b: random self-check of the binary min-sum unit against the
// reference model (sign = XOR, magnitude = min), lane pairing i / i+L.
//
// A new random vector is applied each clock and checked after it settles. A
// watchdog ends the run with a failure if it does not finish. The zero-sign
// convention checked is this design's choice.
module tb_f_b;
  import tb_polar_ref_pkg::*;
  localparam int unsigned L = 6, Q = 5, NV = 3000;
  logic clk = 0;
  logic [2*L-1:0][Q-1:0] a;
  logic [L-1:0][Q-1:0]   y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  f_b #(.L(L), .Q(Q)) dut (.alpha_i(a), .alpha_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < 2*L; i++) a[i] = Q'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== Q'(ref_f2(a[i], a[i+L], Q))) begin
          failures++;
          if (failures < 10) $display("f_b lane %0d: a=%h b=%h got %h", i, a[i], a[i+L], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
