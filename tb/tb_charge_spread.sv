// tb_charge_spread: self-checking testbench of the charge spreading unit
// (N = 32).
// Clears the grid, feeds 64 atoms on a spaced lattice back to back (one per
// clock, the rate the unit is built for) and then 16 atoms that all touch
// the same cell, spaced CS_HAZ_WIN + 1 clocks apart so that their
// read-modify-writes accumulate on the same points. Unloads the grid and
// compares every point with a real-valued reference spread. Also checks that
// the clear pass takes N^3/64 clocks and that the unload streams N^3/8
// vectors back to back. Watchdog 200000 clocks.
module tb_charge_spread;
  import pme_pkg::*;
  localparam int LOGN = 5;
  localparam int N    = 1 << LOGN;
  localparam int NPT  = N * N * N;
  localparam int NA   = 80;

  logic  clk = 0, rst = 1;
  logic  clear_start = 0, unload_start = 0, busy;
  logic  atom_valid = 0;
  atom_t atom;
  logic  out_valid;
  cvec_t out_data;

  charge_spread #(.LOGN(LOGN)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5_000_000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end

  int checks = 0, failures = 0;
  real qref [NPT];
  atom_t atoms [NA];

  function automatic void bsp(real u, output real w[4]);
    w[0] = (1 - u) * (1 - u) * (1 - u) / 6.0;
    w[1] = (3 * u * u * u - 6 * u * u + 4) / 6.0;
    w[2] = (-3 * u * u * u + 3 * u * u + 3 * u + 1) / 6.0;
    w[3] = u * u * u / 6.0;
  endfunction

  int nout = 0, first_out = -1, last_out = -1;
  real emax = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    if (first_out < 0) first_out = nout;
    for (int l = 0; l < 8; l++) begin
      real e;
      e = real'(out_data[l].re) / 65536.0 - qref[nout * 8 + l];
      if (e < 0) e = -e;
      if (e > emax) emax = e;
      checks++;
      if (e > 2e-3 || out_data[l].im != 0) begin
        failures++;
        if (failures < 10) $display("point %0d: got %f ref %f", nout * 8 + l, real'(out_data[l].re) / 65536.0, qref[nout * 8 + l]);
      end
    end
    nout++;
  end

  initial begin
    int t0, t1;
    for (int a = 0; a < NA; a++) begin
      atoms[a].id = IDW'(a);
      atoms[a].q  = CW'($signed($urandom_range(0, 8192)) - 4096);
      if (a < 64) begin
        atoms[a].x = PW'((((a % 8) * 4) << PFRAC) + $urandom_range(0, 65535));
        atoms[a].y = PW'(((((a / 8) % 8) * 4) << PFRAC) + $urandom_range(0, 65535));
        atoms[a].z = PW'($urandom_range(0, N * 65536 - 1));
      end else begin
        atoms[a].x = PW'((5 << PFRAC) + $urandom_range(0, 65535));
        atoms[a].y = PW'((N - 1 << PFRAC) + $urandom_range(0, 65535));
        atoms[a].z = PW'((0 << PFRAC) + $urandom_range(0, 65535));
      end
    end
    for (int i = 0; i < NPT; i++) qref[i] = 0;
    for (int a = 0; a < NA; a++) begin
      real wx[4], wy[4], wz[4], q;
      int fx, fy, fz;
      bsp(real'(atoms[a].x[PFRAC-1:0]) / 65536.0, wx);
      bsp(real'(atoms[a].y[PFRAC-1:0]) / 65536.0, wy);
      bsp(real'(atoms[a].z[PFRAC-1:0]) / 65536.0, wz);
      fx = int'(atoms[a].x[PFRAC +: LOGN]) - 1;
      fy = int'(atoms[a].y[PFRAC +: LOGN]) - 1;
      fz = int'(atoms[a].z[PFRAC +: LOGN]) - 1;
      q = real'(atoms[a].q) / 4096.0;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int k = 0; k < 4; k++)
        qref[(((fz + k + N) % N) * N + ((fy + j + N) % N)) * N + ((fx + i + N) % N)] += q * wx[i] * wy[j] * wz[k];
    end

    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    clear_start <= 1;
    @(posedge clk);
    clear_start <= 0;
    t0 = $time;
    @(posedge clk);
    while (busy) @(posedge clk);
    checks++;
    if (($time - t0) / 10 < NPT / 64 || ($time - t0) / 10 > NPT / 64 + 3) begin
      failures++; $display("clear took %0d clocks", ($time - t0) / 10);
    end
    for (int a = 0; a < NA; a++) begin
      atom_valid <= 1;
      atom <= atoms[a];
      @(posedge clk);
      if (a >= 64) begin
        atom_valid <= 0;
        repeat (CS_HAZ_WIN) @(posedge clk);
      end
    end
    atom_valid <= 0;
    repeat (10) @(posedge clk);
    unload_start <= 1;
    @(posedge clk);
    unload_start <= 0;
    t1 = $time;
    while (nout == 0) @(posedge clk);
    t1 = $time;
    while (nout < NPT / 8 && ($time - t1) / 10 < NPT) @(posedge clk);
    checks++;
    if (($time - t1) / 10 != NPT / 8 - 1 && ($time - t1) / 10 != NPT / 8) begin
      failures++; $display("unload took %0d clocks for %0d vectors", ($time - t1) / 10, nout);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NPT / 8) begin failures++; $display("unloaded %0d vectors", nout); end
    $display("max error %f", emax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
