// tb_bspline4: checks the order-4 B-spline weights and derivatives against
// the closed-form polynomials evaluated in real arithmetic, for the end
// points and random fractions, with the one-clock latency.
module tb_bspline4;
  import pme_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [PFRAC-1:0] u;
  wvec_t w, d;
  bspline4 dut (.clk, .u, .w, .d);

  int checks = 0, failures = 0;

  task automatic chk(real exp, wgt_t got, string what, real uu);
    real e;
    e = exp * 65536.0 - real'(got);
    checks++;
    if (e > 4.0 || e < -4.0) begin
      failures++;
      if (failures < 10) $display("%s u=%f exp %f got %0d", what, uu, exp * 65536.0, got);
    end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      real x, ew[4], ed[4];
      logic [PFRAC-1:0] uv;
      uv = (n == 0) ? '0 : (n == 1) ? '1 : (n == 2) ? 16'h8000 : PFRAC'($urandom);
      u <= uv;
      @(posedge clk);
      #1;
      x = real'(uv) / 65536.0;
      ew[0] = (1 - x) * (1 - x) * (1 - x) / 6; ew[3] = x * x * x / 6;
      ew[1] = (3 * x * x * x - 6 * x * x + 4) / 6;
      ew[2] = (-3 * x * x * x + 3 * x * x + 3 * x + 1) / 6;
      ed[0] = -(1 - x) * (1 - x) / 2; ed[3] = x * x / 2;
      ed[1] = (3 * x * x - 4 * x) / 2;
      ed[2] = (-3 * x * x + 2 * x + 1) / 2;
      for (int i = 0; i < 4; i++) begin
        chk(ew[i], w[i], "w", x);
        chk(ed[i], d[i], "d", x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
