// tb_pme_lr_top: end-to-end testbench of the long-range pipeline (N = 32, a reduced size
// at which every stream-order permutation of the full size is exercised).
// Spreads a set of random and deliberately clustered atoms, runs the grid
// through the forward 3D FFT, Green's function multiply and inverse 3D FFT,
// interpolates the forces and compares every force with a reference PME
// computed here in real arithmetic (B-splines, direct 3D DFTs). A
// behavioural HBM returns the Green coefficients G_LAT clocks after each
// read. Counts each mechanism of the pipeline (atom reordering, hazard
// bubbles, sequential HBM reads, corner-turned frames, grid hand-over) and
// fails if any never happened.
module tb_pme_lr_top;
  import pme_pkg::*;
  localparam int LOGN  = 5;
  localparam int NA    = 48;
  localparam int G_LAT = 2;
  localparam int N     = 1 << LOGN;
  localparam int NB    = 3 * LOGN;
  localparam int NPT   = 1 << NB;
  localparam int NVEC  = NPT / 8;
  localparam int WDOG  = 60 * NVEC + 20000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cs_clear = 0, cs_unload = 0, cs_busy;
  logic atom_in_valid = 0, atom_in_ready, atom_in_idle;
  atom_t atom_in;
  logic hbm_rd_en;
  logic [NB-4:0] hbm_rd_addr;
  gvec_t hbm_rd_data;
  logic grid_ready, fi_atom_valid = 0, force_valid, ev_reorder, ev_bubble;
  atom_t fi_atom;
  force_t force_out;

  pme_lr_top #(.LOGN(LOGN)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------- behavioural HBM holding G in stream order ----------------
  gvec_t gmem [NVEC];
  gvec_t gpipe [G_LAT];
  int    n_hbm = 0;
  always @(posedge clk) begin
    gpipe[0] <= gmem[hbm_rd_addr];
    for (int i = 1; i < G_LAT; i++) gpipe[i] <= gpipe[i-1];
    if (!rst && hbm_rd_en) n_hbm++;
  end
  assign hbm_rd_data = gpipe[G_LAT-1];

  real gval [NPT];       // G as seen by the hardware, by natural grid index
  real qg_re [NPT], qg_im [NPT];
  atom_t atoms [NA];
  real fref [NA][3];

  function automatic int wrapf(int k);
    return (k > N / 2) ? k - N : k;
  endfunction

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

  // 1D DFT along one axis of the whole grid (sign -1 forward, +1 inverse)
  task automatic dft_axis(int axis, real sgn);
    real tr [N], ti [N];
    int  stride;
    stride = 1 << (axis * LOGN);
    for (int base = 0; base < NPT; base++) begin
      if (((base / stride) % N) != 0) continue;
      for (int k = 0; k < N; k++) begin
        real sr, si, a;
        sr = 0; si = 0;
        for (int n = 0; n < N; n++) begin
          a = sgn * 6.283185307179586 * real'((n * k) % N) / N;
          sr += qg_re[base + n * stride] * $cos(a) - qg_im[base + n * stride] * $sin(a);
          si += qg_re[base + n * stride] * $sin(a) + qg_im[base + n * stride] * $cos(a);
        end
        tr[k] = sr; ti[k] = si;
      end
      for (int k = 0; k < N; k++) begin
        qg_re[base + k * stride] = tr[k];
        qg_im[base + k * stride] = ti[k];
      end
    end
  endtask

  task automatic reference();
    real wx[4], wy[4], wz[4], dx[4], dy[4], dz[4], q, ph;
    int fx, fy, fz, idx;
    for (int i = 0; i < NPT; i++) begin qg_re[i] = 0; qg_im[i] = 0; end
    for (int a = 0; a < NA; a++) begin
      bsp(real'(atoms[a].x[PFRAC-1:0]) / 65536.0, wx, dx);
      bsp(real'(atoms[a].y[PFRAC-1:0]) / 65536.0, wy, dy);
      bsp(real'(atoms[a].z[PFRAC-1:0]) / 65536.0, wz, dz);
      fx = int'(atoms[a].x[PFRAC +: LOGN]) - 1;
      fy = int'(atoms[a].y[PFRAC +: LOGN]) - 1;
      fz = int'(atoms[a].z[PFRAC +: LOGN]) - 1;
      q = real'(atoms[a].q) / 4096.0;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int k = 0; k < 4; k++) begin
        idx = (((fz + k + N) % N) * N + ((fy + j + N) % N)) * N + ((fx + i + N) % N);
        qg_re[idx] += q * wx[i] * wy[j] * wz[k];
      end
    end
    for (int ax = 0; ax < 3; ax++) dft_axis(ax, -1.0);
    for (int i = 0; i < NPT; i++) begin
      qg_re[i] = qg_re[i] * gval[i] / NPT;
      qg_im[i] = qg_im[i] * gval[i] / NPT;
    end
    for (int ax = 2; ax >= 0; ax--) dft_axis(ax, 1.0);
    for (int a = 0; a < NA; a++) begin
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
        ph = qg_re[idx];
        fref[a][0] -= q * dx[i] * wy[j] * wz[k] * ph;
        fref[a][1] -= q * wx[i] * dy[j] * wz[k] * ph;
        fref[a][2] -= q * wx[i] * wy[j] * dz[k] * ph;
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_reorder = 0, n_bubble = 0, n_grid = 0, n_force = 0;
  int n_turn_frames = 0, n_a2a = 0;
  always @(posedge clk) if (!rst) begin
    if (ev_reorder) n_reorder++;
    if (ev_bubble) n_bubble++;
    if (grid_ready) n_grid++;
    if (dut.v4 && !$past(dut.v4)) n_turn_frames++;
    if (dut.a1_ov[0]) n_a2a++;
  end

  real fmax = 0, emax = 0;
  always @(posedge clk) if (!rst && force_valid) begin
    int a;
    real got [3];
    a = int'(force_out.id);
    got[0] = real'(force_out.fx) / 65536.0;
    got[1] = real'(force_out.fy) / 65536.0;
    got[2] = real'(force_out.fz) / 65536.0;
    for (int c = 0; c < 3; c++) begin
      real err;
      err = got[c] - fref[a][c];
      if (err < 0) err = -err;
      if (err > emax) emax = err;
      checks++;
      if (err > 5e-4 + 5e-3 * fmax) begin
        failures++;
        if (failures < 10) $display("force atom %0d axis %0d: got %f ref %f", a, c, got[c], fref[a][c]);
      end
    end
    n_force++;
  end

  initial begin
    int t0, t_unl, t_grid;
    // Green's function: a smooth positive kernel, zero at k = 0
    for (int i = 0; i < NPT; i++) begin
      int kx, ky, kz;
      real m2;
      kx = wrapf(i % N); ky = wrapf((i / N) % N); kz = wrapf(i / (N * N));
      m2 = real'(kx * kx + ky * ky + kz * kz);
      gval[i] = (i == 0) ? 0.0 : real'($rtoi(65536.0 * 1.5 / (1.0 + 0.05 * m2))) / 65536.0;
    end
    // store G in the order the forward FFT delivers the grid
    begin
      bmap_t o5;
      o5 = lr_order(LOGN, 5);
      for (int v = 0; v < NVEC; v++)
        for (int l = 0; l < 8; l++) begin
          int p, c;
          p = v * 8 + l; c = 0;
          for (int i = 0; i < NB; i++) if ((p >> i) & 1) c |= 1 << o5[i];
          gmem[v][l] = GCW'($rtoi(gval[c] * 65536.0));
        end
    end
    // atoms: random, with runs of close neighbours to provoke hazards
    for (int a = 0; a < NA; a++) begin
      atoms[a].id = IDW'(a);
      atoms[a].q  = CW'($signed($urandom_range(0, 8192)) - 4096);
      if (a % 4 == 1 || a % 4 == 2) begin
        atoms[a].x = atoms[a-1].x + PW'($urandom_range(0, 65536));
        atoms[a].y = atoms[a-1].y + PW'($urandom_range(0, 65536));
        atoms[a].z = atoms[a-1].z;
      end else begin
        atoms[a].x = PW'($urandom_range(0, N * 65536 - 1));
        atoms[a].y = PW'($urandom_range(0, N * 65536 - 1));
        atoms[a].z = PW'($urandom_range(0, N * 65536 - 1));
      end
      atoms[a].x[PW-1:PFRAC+LOGN] = '0;
      atoms[a].y[PW-1:PFRAC+LOGN] = '0;
      atoms[a].z[PW-1:PFRAC+LOGN] = '0;
    end
    reference();
    for (int a = 0; a < NA; a++) for (int c = 0; c < 3; c++)
      if (fref[a][c] > fmax) fmax = fref[a][c]; else if (-fref[a][c] > fmax) fmax = -fref[a][c];

    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk) cs_clear <= 1;
    @(posedge clk) cs_clear <= 0;
    @(posedge clk);
    while (cs_busy) @(posedge clk);
    t0 = $time;
    for (int a = 0; a < NA; a++) begin
      atom_in_valid <= 1;
      atom_in <= atoms[a];
      @(posedge clk);
      while (!atom_in_ready) @(posedge clk);
    end
    atom_in_valid <= 0;
    @(posedge clk);
    while (!atom_in_idle) @(posedge clk);
    cs_unload <= 1;
    @(posedge clk) cs_unload <= 0;
    t_unl = $time;
    while (!grid_ready) @(posedge clk);
    t_grid = $time;
    $display("spreading %0d atoms: %0d clocks; grid through 3D FFT/IFFT: %0d clocks (%0d vectors per pass)",
             NA, (t_unl - t0) / 10, (t_grid - t_unl) / 10, NVEC);
    @(posedge clk);
    for (int a = 0; a < NA; a++) begin
      fi_atom_valid <= 1;
      fi_atom <= atoms[a];
      @(posedge clk);
    end
    fi_atom_valid <= 0;
    repeat (20) @(posedge clk);
    checks++; if (n_force != NA) begin failures++; $display("forces %0d", n_force); end
    checks++; if (n_reorder == 0) begin failures++; $display("no atom was reordered"); end
    checks++; if (n_bubble == 0) begin failures++; $display("no hazard bubble"); end
    checks++; if (n_hbm != NVEC) begin failures++; $display("HBM reads %0d", n_hbm); end
    checks++; if (n_grid != 1) begin failures++; $display("grid_ready %0d", n_grid); end
    checks++; if (n_a2a != NVEC) begin failures++; $display("all-to-all words %0d", n_a2a); end
    checks++; if (n_turn_frames == 0) begin failures++; $display("no corner-turned frame"); end
    $display("events: reorder=%0d bubble=%0d hbm=%0d a2a=%0d turn_frames=%0d grid=%0d forces=%0d fmax=%f max_err=%f",
             n_reorder, n_bubble, n_hbm, n_a2a, n_turn_frames, n_grid, n_force, fmax, emax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
