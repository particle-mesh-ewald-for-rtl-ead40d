// charge_spread: spreads each atom's charge onto the 4x4x4 grid points
// around it and streams the finished charge grid out to the FFT.
//
// Following the paper, the unit is 64-way parallel and takes one atom per
// clock: the grid lives in 64 BRAM banks, bank (x%4, y%4, z%4) holding the
// points with those residues, so the 64 points of any atom's cell fall in
// 64 different banks and are updated in the same clock. Each bank does a
// read-modify-write: weight wx*wy*wz*q is added to the point's charge. The
// BRAM read is registered twice (memory output plus pipeline register), so
// an atom whose cell overlaps one of the CS_HAZ_WIN atoms entered just
// before it would read a stale value; the atom_reorder unit in front keeps
// such atoms apart (the paper: "we use additional hardware to dynamically
// reorder atoms to avoid pipeline hazards"). An assertion flags a hazard.
//
// The bank mapping, the pipeline depth, the clear pass and the unload
// order are this design's. The atom at coordinate X (grid units) touches
// grid points floor(X)-1 .. floor(X)+2, periodic in N.
//
// Interface:
//   clear_start  pulse: zero the grid, N^3/64 clocks (busy high meanwhile)
//   atom_valid/atom  one atom per clock, only while not busy
//   unload_start pulse: stream the grid as N^3/8 vectors of 8 consecutive x
//                points (natural order: x fastest, then y, then z),
//                back to back, one clock after the read; real part = charge
//                in Q.GFRAC, imaginary part 0. Two read ports per bank are
//                used since lanes l and l+4 share a bank.
module charge_spread
  import pme_pkg::*;
#(
  parameter int LOGN = 6
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  clear_start,
  input  logic  unload_start,
  output logic  busy,
  input  logic  atom_valid,
  input  atom_t atom,
  output logic  out_valid,
  output cvec_t out_data
);

  localparam int N     = 1 << LOGN;
  localparam int QB    = LOGN - 2;        // bits of a coordinate / 4
  localparam int AB    = 3 * QB;          // bank address bits
  localparam int DEPTH = 1 << AB;
  localparam int VB    = 3 * LOGN - 3;    // vector count bits of a volume

  // ---------------- control ----------------
  logic          clr_act, unl_act;
  logic [AB-1:0] clr_addr;
  logic [VB-1:0] unl_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      clr_act <= 1'b0; unl_act <= 1'b0; clr_addr <= '0; unl_v <= '0;
    end else begin
      if (clear_start && !busy) begin
        clr_act <= 1'b1; clr_addr <= '0;
      end else if (clr_act) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == AB'(DEPTH - 1)) clr_act <= 1'b0;
      end
      if (unload_start && !busy) begin
        unl_act <= 1'b1; unl_v <= '0;
      end else if (unl_act) begin
        unl_v <= unl_v + 1'b1;
        if (unl_v == VB'((1 << VB) - 1)) unl_act <= 1'b0;
      end
    end
  end
  assign busy = clr_act || unl_act;

  // ---------------- S1: B-spline weights ----------------
  wvec_t wx, wy, wz, dx_unused, dy_unused, dz_unused;
  bspline4 u_bx (.clk, .u(atom.x[PFRAC-1:0]), .w(wx), .d(dx_unused));
  bspline4 u_by (.clk, .u(atom.y[PFRAC-1:0]), .w(wy), .d(dy_unused));
  bspline4 u_bz (.clk, .u(atom.z[PFRAC-1:0]), .w(wz), .d(dz_unused));

  logic                 v1, v2, v3, v4, v5;
  logic [LOGN-1:0]      fx1, fy1, fz1;
  logic signed [CW-1:0] q1, q2, q3;

  always_ff @(posedge clk) begin
    fx1 <= atom.x[PFRAC +: LOGN] - 1'b1;
    fy1 <= atom.y[PFRAC +: LOGN] - 1'b1;
    fz1 <= atom.z[PFRAC +: LOGN] - 1'b1;
    q1  <= atom.q;
    q2  <= q1;
    q3  <= q2;
  end

  always_ff @(posedge clk) begin
    if (rst) {v1, v2, v3, v4, v5} <= '0;
    else begin
      v1 <= atom_valid;
      v2 <= v1;
      v3 <= v2;
      v4 <= v3;
      v5 <= v4;
    end
  end

  // ---------------- per-bank pipeline ----------------
  samp_t rda [64];
  samp_t rdb [64];
  logic [AB-1:0] unl_base;
  assign unl_base = {unl_v[VB-1 -: LOGN-2], unl_v[2*LOGN-4 -: LOGN-2], unl_v[LOGN-4:0], 1'b0};

  for (genvar bk = 0; bk < 64; bk++) begin : g_bank
    localparam int BX = bk % 4;
    localparam int BY = (bk / 4) % 4;
    localparam int BZ = bk / 16;

    logic [1:0]             ax, ay, az;
    logic [LOGN-1:0]        px, py, pz;
    logic signed [WW-1:0]   wxy2, wz2;
    logic signed [WW+1:0]   w3;
    samp_t                  c4, c5, rd5;
    logic [AB-1:0]          a2, a3, a4, a5;
    samp_t                  mem [DEPTH];

    // S1: which of the four weights this bank receives, and its address
    always_comb begin
      ax = 2'(BX) - fx1[1:0];
      ay = 2'(BY) - fy1[1:0];
      az = 2'(BZ) - fz1[1:0];
      px = fx1 + LOGN'(ax);
      py = fy1 + LOGN'(ay);
      pz = fz1 + LOGN'(az);
    end

    always_ff @(posedge clk) begin
      // S2: wx*wy
      wxy2 <= WW'((36'(wx[ax]) * 36'(wy[ay])) >>> WF);
      wz2  <= wz[az];
      a2   <= {pz[LOGN-1:2], py[LOGN-1:2], px[LOGN-1:2]};
      // S3: *wz
      w3   <= (WW+2)'((36'(wxy2) * 36'(wz2)) >>> WF);
      a3   <= a2;
      // S4: *q, read issued at S3
      c4   <= DW'((48'(w3) * 48'(q3)) >>> (WF + CFRAC - GFRAC));
      a4   <= a3;
      // S5: second read register, add, write
      c5   <= c4;
      a5   <= a4;
      rd5  <= rda[bk];
    end

    always_ff @(posedge clk) begin
      if (clr_act)   mem[clr_addr] <= '0;
      else if (v5)   mem[a5] <= rd5 + c5;
      rda[bk] <= mem[unl_act ? unl_base : a3];
      rdb[bk] <= mem[unl_base | AB'(1)];
    end

    a_no_hazard: assert property (@(posedge clk) disable iff (rst)
      (v3 && v4 && a3 == a4) == 1'b0 && (v3 && v5 && a3 == a5) == 1'b0);
  end

  // ---------------- unload output ----------------
  logic           ov;
  logic [1:0]     oy, oz;
  always_ff @(posedge clk) begin
    if (rst) ov <= 1'b0;
    else     ov <= unl_act;
    oy <= unl_v[LOGN-3 +: 2];
    oz <= unl_v[2*LOGN-3 +: 2];
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      out_data[l].re = (l < 4) ? rda[{oz, oy, 2'(l % 4)}] : rdb[{oz, oy, 2'(l % 4)}];
      out_data[l].im = '0;
    end
    out_valid = ov;
  end

  a_no_atom_when_busy: assert property (@(posedge clk) disable iff (rst) !(atom_valid && busy));

endmodule
