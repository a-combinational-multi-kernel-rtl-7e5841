// tb_combine_t: self-check of the ternary combine against x = u * T3 with
// T3 = [1 1 1; 1 0 1; 0 1 1], evaluated as a matrix product per lane.
//
// A new random vector is applied each clock and checked after it settles. A
// watchdog ends the run with a failure if it does not finish. The matrix is
// the published ternary kernel.
module tb_combine_t;
  localparam int unsigned L = 6, NV = 2000;
  localparam bit T3 [3][3] = '{'{1, 1, 1}, '{1, 0, 1}, '{0, 1, 1}};
  logic clk = 0;
  logic [L-1:0]   bl, bc, br;
  logic [3*L-1:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  combine_t #(.L(L)) dut (.beta_l_i(bl), .beta_c_i(bc), .beta_r_i(br), .beta_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      bl = L'($urandom); bc = L'($urandom); br = L'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        bit u [3];
        u = '{bl[i], bc[i], br[i]};
        for (int j = 0; j < 3; j++) begin
          bit x;
          x = 0;
          for (int k = 0; k < 3; k++) x ^= u[k] & T3[k][j];
          checks++;
          if (y[j*L+i] !== x) begin failures++; if (failures < 5) $display("i=%0d j=%0d u=%p y=%b", i, j, u, y); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
