// tb_g2_t: random self-check of the ternary right-branch unit:
// (1-2bl)*a1 + (1-2(bl^bc))*a2, against the reference model, all four
// select combinations included.
//
// A new random vector is applied each clock and checked after it settles,
// with a watchdog. Saturation at Q bits, checked here, is this design's
// choice.
module tb_g2_t;
  import tb_polar_ref_pkg::*;
  localparam int unsigned L = 4, Q = 5, NV = 3000;
  logic clk = 0;
  logic [3*L-1:0][Q-1:0] a;
  logic [L-1:0]          bl, bc;
  logic [L-1:0][Q-1:0]   y;
  int checks = 0, failures = 0;
  cnt_t cnt = '{default: 0};
  int sel_seen [4];
  always #5 clk = ~clk;
  g2_t #(.L(L), .Q(Q)) dut (.alpha_i(a), .beta_l_i(bl), .beta_c_i(bc), .alpha_o(y));
  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < 3*L; i++) a[i] = Q'($urandom);
      bl = L'($urandom);
      bc = L'($urandom);
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        sel_seen[{bl[i], bc[i]}]++;
        if (y[i] !== Q'(ref_g2(a[i+L], a[i+2*L], bl[i], bc[i], Q, cnt))) begin
          failures++;
          if (failures < 10) $display("g2_t lane %0d: %h %h bl=%0d bc=%0d got %h", i, a[i+L], a[i+2*L], bl[i], bc[i], y[i]);
        end
      end
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (sel_seen[s] == 0) begin failures++; $display("select %0d never used", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
