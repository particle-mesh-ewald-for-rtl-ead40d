// tb_force_interp: self-checking testbench of force interpolation (N = 32).
// Loads a random potential grid in natural stream order (N^3/8 vectors) and
// checks that load_done pulses once after the last vector. Then sends 200
// random atoms back to back, one per clock, and compares each force with a
// real-valued B-spline interpolation of the same grid. Checks the rate (one
// force per clock) and the fixed latency of 6 clocks from atom to force.
// Watchdog 100000 clocks.
module tb_force_interp;
  import pme_pkg::*;
  localparam int LOGN = 5;
  localparam int N    = 1 << LOGN;
  localparam int NPT  = N * N * N;
  localparam int NA   = 200;
  localparam int LAT  = 6;

  logic   clk = 0, rst = 1;
  logic   load_valid = 0, load_done;
  cvec_t  load_data;
  logic   atom_valid = 0;
  atom_t  atom;
  logic   force_valid;
  force_t force_out;

  force_interp #(.LOGN(LOGN)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1_000_000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end

  int checks = 0, failures = 0;
  real   phi [NPT];
  samp_t phq [NPT];
  atom_t atoms [NA];
  real   fref [NA][3];
  int    t_in [NA];

  function automatic void bsp(real u, output real w[4], output real d[4]);
    w[0] = (1 - u) * (1 - u) * (1 - u) / 6.0;
    w[1] = (3 * u * u * u - 6 * u * u + 4) / 6.0;
    w[2] = (-3 * u * u * u + 3 * u * u + 3 * u + 1) / 6.0;
    w[3] = u * u * u / 6.0;
    d[0] = -(1 - u) * (1 - u) / 2.0;
    d[1] = (3 * u * u - 4 * u) / 2.0;
    d[2] = (-3 * u * u + 2 * u + 1) / 2.0;
    d[3] = u * u / 2.0;
  endfunction

  int ndone = 0, nf = 0, cyc = 0, t_prev = -1, gaps = 0;
  always @(posedge clk) cyc++;
  // sampled at the falling edge: the values registered at the last rising edge
  always @(negedge clk) begin
    if (!rst && load_done) ndone++;
    if (!rst && force_valid) begin
      int a;
      a = int'(force_out.id);
      checks++;
      if (cyc - t_in[a] != LAT) begin
        failures++; $display("atom %0d latency %0d", a, cyc - t_in[a]);
      end
      if (t_prev >= 0 && cyc - t_prev != 1) gaps++;
      t_prev = cyc;
      for (int c = 0; c < 3; c++) begin
        real got, e;
        got = real'(c == 0 ? force_out.fx : c == 1 ? force_out.fy : force_out.fz) / 65536.0;
        e = got - fref[a][c];
        if (e < 0) e = -e;
        checks++;
        if (e > 2e-3) begin
          failures++;
          if (failures < 10) $display("atom %0d axis %0d got %f ref %f", a, c, got, fref[a][c]);
        end
      end
      nf++;
    end
  end

  initial begin
    for (int i = 0; i < NPT; i++) begin
      phq[i] = DW'($signed($urandom_range(0, 131072)) - 65536);
      phi[i] = real'(phq[i]) / 65536.0;
    end
    for (int a = 0; a < NA; a++) begin
      real wx[4], wy[4], wz[4], dx[4], dy[4], dz[4], q;
      int fx, fy, fz, idx;
      atoms[a].id = IDW'(a);
      atoms[a].q  = CW'($signed($urandom_range(0, 8192)) - 4096);
      atoms[a].x  = PW'($urandom_range(0, N * 65536 - 1));
      atoms[a].y  = PW'($urandom_range(0, N * 65536 - 1));
      atoms[a].z  = PW'($urandom_range(0, N * 65536 - 1));
      bsp(real'(atoms[a].x[PFRAC-1:0]) / 65536.0, wx, dx);
      bsp(real'(atoms[a].y[PFRAC-1:0]) / 65536.0, wy, dy);
      bsp(real'(atoms[a].z[PFRAC-1:0]) / 65536.0, wz, dz);
      fx = int'(atoms[a].x[PFRAC +: LOGN]) - 1;
      fy = int'(atoms[a].y[PFRAC +: LOGN]) - 1;
      fz = int'(atoms[a].z[PFRAC +: LOGN]) - 1;
      q = real'(atoms[a].q) / 4096.0;
      fref[a][0] = 0; fref[a][1] = 0; fref[a][2] = 0;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int k = 0; k < 4; k++) begin
        idx = (((fz + k + N) % N) * N + ((fy + j + N) % N)) * N + ((fx + i + N) % N);
        fref[a][0] -= q * dx[i] * wy[j] * wz[k] * phi[idx];
        fref[a][1] -= q * wx[i] * dy[j] * wz[k] * phi[idx];
        fref[a][2] -= q * wx[i] * wy[j] * dz[k] * phi[idx];
      end
    end

    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int v = 0; v < NPT / 8; v++) begin
      load_valid <= 1;
      for (int l = 0; l < 8; l++) begin
        load_data[l].re <= phq[v * 8 + l];
        load_data[l].im <= DW'($urandom);
      end
      @(posedge clk);
    end
    load_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (ndone != 1) begin failures++; $display("load_done pulsed %0d times", ndone); end
    for (int a = 0; a < NA; a++) begin
      atom_valid <= 1;
      atom <= atoms[a];
      t_in[a] = cyc + 1;
      @(posedge clk);
    end
    atom_valid <= 0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (nf != NA || gaps != 0) begin failures++; $display("%0d forces, %0d gaps", nf, gaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
