// tb_combine_b: self-check of the binary combine, [bl ^ br, br], computed
// here bit by bit.
//
// A new random vector is applied each clock and checked after it settles. A
// watchdog ends the run with a failure if it does not finish. The rule checked
// is the published binary combine.
module tb_combine_b;
  localparam int unsigned L = 8, NV = 2000;
  logic clk = 0;
  logic [L-1:0]   bl, br;
  logic [2*L-1:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  combine_b #(.L(L)) dut (.beta_l_i(bl), .beta_r_i(br), .beta_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      bl = L'($urandom); br = L'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks += 2;
        if (y[i]   !== (bl[i] ^ br[i])) failures++;
        if (y[i+L] !== br[i])           failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
