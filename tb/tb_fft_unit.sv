// tb_fft_unit: self-checking testbench of the 8-wide FFT unit at N = 64.
// Streams random lines (back to back, then after a gap) through a forward
// and an inverse unit and compares every output with a direct DFT computed
// in real arithmetic. Output positions are mapped to frequencies with the
// documented output order. Also checks the pipeline latency and that the
// inverse of a line returns N times the line.
module tb_fft_unit;
  import pme_pkg::*;
  localparam int N = 64;
  localparam int LOGN = 6;
  localparam int NV = N / 8;
  localparam int NL = 5;
  localparam int EXP_LAT = 6 + 4 + 2 + 1 + 4;  // butterflies + commutator delays

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  iv, ov, ivi, ovi;
  cvec_t id, od, idi, odi;
  fft_unit #(.N(N)) dut (.clk, .rst, .in_valid(iv), .in_data(id), .out_valid(ov), .out_data(od));
  fft_unit #(.N(N), .INVERSE(1'b1)) dut_i (.clk, .rst, .in_valid(ivi), .in_data(idi), .out_valid(ovi), .out_data(odi));

  int checks = 0, failures = 0;
  real xr [NL][N], xi [NL][N];
  int  ocnt = 0, ocnt_i = 0;
  int  cyc = 0, first_in = -1, first_out = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (iv && first_in < 0) first_in = cyc;
  end

  function automatic int freq_of(int p);
    int k = 0;
    for (int i = 0; i < LOGN; i++) if ((p >> i) & 1) k |= 1 << fft_out_freq_bit(LOGN, i);
    return k;
  endfunction

  task automatic check_val(real er, real ei, samp_t gr, samp_t gi, real tol, string what);
    checks++;
    if ((er - real'(gr)) > tol || (real'(gr) - er) > tol || (ei - real'(gi)) > tol || (real'(gi) - ei) > tol) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s exp (%f,%f) got (%0d,%0d)", what, er, ei, gr, gi);
    end
  endtask

  // forward output checker
  always @(posedge clk) if (!rst && ov) begin
    int line, t;
    line = ocnt / NV; t = ocnt % NV;
    if (first_out < 0) first_out = cyc;
    for (int l = 0; l < 8; l++) begin
 int k;
      real sr, si, a;
      k = freq_of(t * 8 + l); sr = 0; si = 0;
      for (int n = 0; n < N; n++) begin
        a = -6.283185307179586 * real'(n * k % N) / N;
        sr += xr[line][n] * $cos(a) - xi[line][n] * $sin(a);
        si += xr[line][n] * $sin(a) + xi[line][n] * $cos(a);
      end
      check_val(sr, si, od[l].re, od[l].im, 256.0, "fwd");
    end
    ocnt++;
  end

  // inverse output checker: inverse DFT (unnormalised) of the same lines
  always @(posedge clk) if (!rst && ovi) begin
    int line, t;
    line = ocnt_i / NV; t = ocnt_i % NV;
    for (int l = 0; l < 8; l++) begin
 int k;
      real sr, si, a;
      k = freq_of(t * 8 + l); sr = 0; si = 0;
      for (int n = 0; n < N; n++) begin
        a = 6.283185307179586 * real'(n * k % N) / N;
        sr += xr[line][n] * $cos(a) - xi[line][n] * $sin(a);
        si += xr[line][n] * $sin(a) + xi[line][n] * $cos(a);
      end
      check_val(sr, si, odi[l].re, odi[l].im, 256.0, "inv");
    end
    ocnt_i++;
  end

  initial begin
    iv = 0; ivi = 0; id = '0; idi = '0;
    for (int ln = 0; ln < NL; ln++)
      for (int n = 0; n < N; n++) begin
        xr[ln][n] = real'($signed($urandom_range(0, 2000000)) - 1000000);
        xi[ln][n] = real'($signed($urandom_range(0, 2000000)) - 1000000);
      end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int ln = 0; ln < NL; ln++) begin
      if (ln == 3) repeat (7) begin @(posedge clk); iv <= 0; ivi <= 0; end
      for (int t = 0; t < NV; t++) begin
        @(posedge clk);
        iv <= 1; ivi <= 1;
        for (int l = 0; l < 8; l++) begin
          id[l].re  <= samp_t'($rtoi(xr[ln][t*8+l]));
          id[l].im  <= samp_t'($rtoi(xi[ln][t*8+l]));
          idi[l].re <= samp_t'($rtoi(xr[ln][t*8+l]));
          idi[l].im <= samp_t'($rtoi(xi[ln][t*8+l]));
        end
      end
    end
    @(posedge clk); iv <= 0; ivi <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (ocnt != NL * NV || ocnt_i != NL * NV) begin failures++; $display("output count %0d %0d", ocnt, ocnt_i); end
    checks++;
    if (first_out - first_in != EXP_LAT) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
