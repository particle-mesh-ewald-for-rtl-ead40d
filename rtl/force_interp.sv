// force_interp: computes the long-range force on each atom from the
// potential grid produced by the inverse 3D FFT.
//
// As in the paper it shares the 64-way parallel arithmetic and BRAM layout
// of charge spreading: the potential grid is held in 64 banks, bank
// (x%4, y%4, z%4), so the 4x4x4 cell of any atom is read in one clock.
// For each atom the three B-spline weight sets w and derivative sets d give
//   Fx = -q * sum_{i,j,k} dx_i wy_j wz_k phi(i,j,k)
//   Fy = -q * sum wx_i dy_j wz_k phi,   Fz = -q * sum wx_i wy_j dz_k phi
// (grid units; the host scales by grid spacing). Each sum is a 64-input
// combining tree. One atom per clock, fixed latency of 6 clocks.
//
// Loading: the grid streams in from the last transpose unit as 8-wide
// vectors in stream order ORD (see pme_pkg). ORD must put x bits 0..2 on the
// lanes; lanes l and l+4 then hit the same bank, so each bank has two write
// ports. The real part of each sample is kept. A full grid is N^3/8 vectors;
// the load counter wraps by itself, and load_done pulses after the last.
// The potential samples carry GFRAC + PHI_XF fraction bits; forces come out
// with GFRAC fraction bits.
// The bank layout follows the paper's statement; the load path, pipeline
// and fixed-point scaling are this design's.
module force_interp
  import pme_pkg::*;
#(
  parameter int    LOGN = 6,
  parameter bmap_t ORD  = ord_natural(),
  parameter int    PHI_XF = 0
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   load_valid,
  input  cvec_t  load_data,
  output logic   load_done,
  input  logic   atom_valid,
  input  atom_t  atom,
  output logic   force_valid,
  output force_t force_out
);

  localparam int N     = 1 << LOGN;
  localparam int NB    = 3 * LOGN;
  localparam int AB    = 3 * (LOGN - 2);
  localparam int DEPTH = 1 << AB;
  localparam int VB    = NB - 3;

  // ---------------- load path ----------------
  logic [VB-1:0]   lv;
  logic [LOGN-1:0] lx, ly, lz;

  always_comb begin
    logic [NB-1:0] p, c;
    p = {lv, 3'b000};
    c = '0;
    for (int i = 0; i < NB; i++) c[ORD[i]] = p[i];
    lx = c[LOGN-1:0];
    ly = c[2*LOGN-1:LOGN];
    lz = c[NB-1:2*LOGN];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      lv <= '0; load_done <= 1'b0;
    end else begin
      load_done <= load_valid && (lv == VB'((1 << VB) - 1));
      if (load_valid) lv <= lv + 1'b1;
    end
  end

  // ---------------- S1: B-splines ----------------
  wvec_t wx, wy, wz, dx, dy, dz;
  bspline4 u_bx (.clk, .u(atom.x[PFRAC-1:0]), .w(wx), .d(dx));
  bspline4 u_by (.clk, .u(atom.y[PFRAC-1:0]), .w(wy), .d(dy));
  bspline4 u_bz (.clk, .u(atom.z[PFRAC-1:0]), .w(wz), .d(dz));

  logic [LOGN-1:0]      fx1, fy1, fz1;
  logic signed [CW-1:0] q [1:5];
  logic [IDW-1:0]       id [1:5];
  logic [5:0]           v;

  always_ff @(posedge clk) begin
    fx1 <= atom.x[PFRAC +: LOGN] - 1'b1;
    fy1 <= atom.y[PFRAC +: LOGN] - 1'b1;
    fz1 <= atom.z[PFRAC +: LOGN] - 1'b1;
    q[1]  <= atom.q;
    id[1] <= atom.id;
    for (int s = 2; s <= 5; s++) begin
      q[s]  <= q[s-1];
      id[s] <= id[s-1];
    end
    if (rst) v <= '0;
    else     v <= {v[4:0], atom_valid};
  end

  // ---------------- per-bank arithmetic ----------------
  logic signed [WW+DW+1:0] px [64], py [64], pz [64];

  for (genvar bk = 0; bk < 64; bk++) begin : g_bank
    localparam int BX = bk % 4;
    localparam int BY = (bk / 4) % 4;
    localparam int BZ = bk / 16;

    logic [1:0]           ax, ay, az;
    logic [LOGN-1:0]      gx, gy, gz;
    logic signed [WW+1:0] tx2, ty2, tz2;
    wgt_t                 wz2, dz2;
    logic signed [WW+1:0] wfx3, wfy3, wfz3;
    samp_t                phi2, phi3;
    samp_t                mem [DEPTH];

    always_comb begin
      ax = 2'(BX) - fx1[1:0];
      ay = 2'(BY) - fy1[1:0];
      az = 2'(BZ) - fz1[1:0];
      gx = fx1 + LOGN'(ax);
      gy = fy1 + LOGN'(ay);
      gz = fz1 + LOGN'(az);
    end

    // two write ports: lanes BX and BX+4 when this bank's (y,z) residues match
    logic we;
    assign we = load_valid && (ly[1:0] == 2'(BY)) && (lz[1:0] == 2'(BZ));

    always_ff @(posedge clk) begin
      if (we) begin
        mem[{lz[LOGN-1:2], ly[LOGN-1:2], lx[LOGN-1:3], 1'b0}] <= load_data[BX].re;
        mem[{lz[LOGN-1:2], ly[LOGN-1:2], lx[LOGN-1:3], 1'b1}] <= load_data[BX+4].re;
      end
      // S2: read and the xy weight products
      phi2 <= mem[{gz[LOGN-1:2], gy[LOGN-1:2], gx[LOGN-1:2]}];
      tx2  <= (WW+2)'((40'(dx[ax]) * 40'(wy[ay])) >>> WF);
      ty2  <= (WW+2)'((40'(wx[ax]) * 40'(dy[ay])) >>> WF);
      tz2  <= (WW+2)'((40'(wx[ax]) * 40'(wy[ay])) >>> WF);
      wz2  <= wz[az];
      dz2  <= dz[az];
      // S3: z weight
      wfx3 <= (WW+2)'((40'(tx2) * 40'(wz2)) >>> WF);
      wfy3 <= (WW+2)'((40'(ty2) * 40'(wz2)) >>> WF);
      wfz3 <= (WW+2)'((40'(tz2) * 40'(dz2)) >>> WF);
      phi3 <= phi2;
      // S4: times the potential
      px[bk] <= (WW+DW+2)'(wfx3) * (WW+DW+2)'(phi3);
      py[bk] <= (WW+DW+2)'(wfy3) * (WW+DW+2)'(phi3);
      pz[bk] <= (WW+DW+2)'(wfz3) * (WW+DW+2)'(phi3);
    end
  end

  // ---------------- S5: combining trees, S6: charge ----------------
  localparam int SW = WW + DW + 8;
  logic signed [SW-1:0] sx5, sy5, sz5;

  function automatic logic signed [SW-1:0] tree(input logic signed [WW+DW+1:0] a [64]);
    logic signed [SW-1:0] t [127];
    for (int i = 0; i < 64; i++) t[63 + i] = SW'(a[i]);
    for (int i = 62; i >= 0; i--) t[i] = t[2*i+1] + t[2*i+2];
    return t[0];
  endfunction

  always_ff @(posedge clk) begin
    sx5 <= tree(px);
    sy5 <= tree(py);
    sz5 <= tree(pz);
    force_out.fx <= FW'(-((SW+CW)'(sx5) * (SW+CW)'(q[5])) >>> (WF + CFRAC + PHI_XF));
    force_out.fy <= FW'(-((SW+CW)'(sy5) * (SW+CW)'(q[5])) >>> (WF + CFRAC + PHI_XF));
    force_out.fz <= FW'(-((SW+CW)'(sz5) * (SW+CW)'(q[5])) >>> (WF + CFRAC + PHI_XF));
    force_out.id <= id[5];
    if (rst) force_valid <= 1'b0;
    else     force_valid <= v[4];
  end

endmodule
