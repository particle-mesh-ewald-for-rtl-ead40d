// pme_lr_top: the long-range electrostatics pipeline of one board, in the
// one-board, one-pipeline configuration.
//
// Every timestep the pipeline turns atom positions and charges into
// long-range forces by Smooth Particle Mesh Ewald:
//   1. atom_reorder + charge_spread: charges are spread onto an N^3 grid
//      with order-4 B-splines, one atom per clock;
//   2. a forward 3D FFT as three streaming 1D passes (X, Y, Z), each an
//      8-wide fft_unit, with transpose units doing the corner turns between
//      passes, and all-to-all switches in the two places where a
//      multi-board system exchanges slabs;
//   3. green_mult: multiply by the Green's function, read sequentially
//      from HBM (external port);
//   4. the inverse 3D FFT (Z^-1, Y^-1, X^-1), again with corner turns;
//   5. force_interp: loads the potential grid and computes the force on
//      each atom, one atom per clock.
// The chain of units and the placement of transposes and all-to-all
// switches follow the paper's logical pipeline figure. In the figure the Z
// transform, the Green multiply and the Z^-1 transform form one row; here a
// transpose unit between Green multiply and Z^-1 puts each z line back in
// natural order (the FFT emits a bit permutation of frequency order). The
// multiplications by 1.0 drawn in the other rows are omitted (identity).
//
// All stream orders and transpose permutations are derived at elaboration
// from LOGN by pme_pkg::lr_order, so the same RTL serves any N >= 16.
//
// Operation (host/sequencer side):
//   pulse cs_clear, wait for !cs_busy; send the atoms (atom_in_*);
//   wait a few clocks for the reorder buffer to drain (atom_in_idle);
//   pulse cs_unload: the grid streams through the whole FFT chain without
//   further control; grid_ready pulses when the potential grid is loaded
//   into force interpolation; then send the atoms again (fi_atom_*) and
//   collect one force per atom (force_*), 6 clocks after each atom.
// The G coefficients must be stored at hbm_rd_addr in stream order
// lr_order(LOGN, 5), 8 per word.
module pme_lr_top
  import pme_pkg::*;
#(
  parameter int LOGN  = 6,
  parameter int G_LAT = 2,
  localparam int NVEC = 1 << (3 * LOGN - 3)
) (
  input  logic                    clk,
  input  logic                    rst,
  // charge spreading
  input  logic                    cs_clear,
  input  logic                    cs_unload,
  output logic                    cs_busy,
  input  logic                    atom_in_valid,
  output logic                    atom_in_ready,
  input  atom_t                   atom_in,
  output logic                    atom_in_idle,
  // Green's function memory (HBM), sequential reads
  output logic                    hbm_rd_en,
  output logic [$clog2(NVEC)-1:0] hbm_rd_addr,
  input  gvec_t                   hbm_rd_data,
  // force interpolation
  output logic                    grid_ready,
  input  logic                    fi_atom_valid,
  input  atom_t                   fi_atom,
  output logic                    force_valid,
  output force_t                  force_out,
  // mechanism events
  output logic                    ev_reorder,
  output logic                    ev_bubble
);

  localparam int L  = LOGN;
  localparam int N  = 1 << L;
  localparam int NB = 3 * L;

  localparam bmap_t P_XY  = ord_perm(lr_order(L, 1),  lr_order(L, 2),  NB);
  localparam bmap_t P_YZ  = ord_perm(lr_order(L, 3),  lr_order(L, 4),  NB);
  localparam bmap_t P_ZZ  = ord_perm(lr_order(L, 5),  lr_order(L, 6),  NB);
  localparam bmap_t P_ZY  = ord_perm(lr_order(L, 7),  lr_order(L, 8),  NB);
  localparam bmap_t P_YX  = ord_perm(lr_order(L, 9),  lr_order(L, 10), NB);
  localparam bmap_t P_OUT = ord_perm(lr_order(L, 11), lr_order(L, 12), NB);

  // ---------------- charge spreading ----------------
  logic  ro_valid;
  atom_t ro_atom;
  logic  cs_ov;
  cvec_t cs_od;

  atom_reorder #(.LOGN(L)) u_reorder (
    .clk, .rst,
    .in_valid(atom_in_valid), .in_ready(atom_in_ready), .in_atom(atom_in),
    .out_valid(ro_valid), .out_atom(ro_atom),
    .ev_reorder, .ev_bubble
  );

  // idle when nothing waits in the reorder buffer and nothing is in flight
  logic [7:0] quiet;
  always_ff @(posedge clk) begin
    if (rst) quiet <= '0;
    else if (atom_in_valid || ro_valid || !atom_in_ready) quiet <= '0;
    else if (quiet != 8'hff) quiet <= quiet + 1'b1;
  end
  assign atom_in_idle = (quiet > 8'd8);

  charge_spread #(.LOGN(L)) u_cs (
    .clk, .rst,
    .clear_start(cs_clear), .unload_start(cs_unload), .busy(cs_busy),
    .atom_valid(ro_valid), .atom(ro_atom),
    .out_valid(cs_ov), .out_data(cs_od)
  );

  // ---------------- forward 3D FFT ----------------
  logic  v1, v2, v3, v4, v5, v6, v7;
  cvec_t d1, d2, d3, d4, d5, d6, d7;

  fft_unit #(.N(N)) u_fft_x (.clk, .rst, .in_valid(cs_ov), .in_data(cs_od), .out_valid(v1), .out_data(d1));
  transpose_unit #(.FB(perm_frame_bits(P_XY, NB)), .PERM(P_XY)) u_t_xy (
    .clk, .rst, .in_valid(v1), .in_data(d1), .out_valid(v2), .out_data(d2));
  fft_unit #(.N(N)) u_fft_y (.clk, .rst, .in_valid(v2), .in_data(d2), .out_valid(v3), .out_data(d3));

  // all-to-all exchange (one board: everything takes the loopback)
  logic          a1_rdy [1];
  logic          a1_ov  [1];
  logic [$bits(cvec_t)-1:0] a1_od [1];
  a2a_switch #(.NI(1), .NO(1)) u_a2a_fwd (
    .clk, .rst, .board_id(1'b0),
    .in_valid('{v3}), .in_ready(a1_rdy), .in_dest('{1'b0}), .in_data('{d3}),
    .out_valid(a1_ov), .out_data(a1_od));

  transpose_unit #(.FB(perm_frame_bits(P_YZ, NB)), .PERM(P_YZ)) u_t_yz (
    .clk, .rst, .in_valid(a1_ov[0]), .in_data(a1_od[0]), .out_valid(v4), .out_data(d4));
  fft_unit #(.N(N)) u_fft_z (.clk, .rst, .in_valid(v4), .in_data(d4), .out_valid(v5), .out_data(d5));

  // ---------------- Green's function ----------------
  green_mult #(.NVEC(NVEC), .G_LAT(G_LAT), .SHIFT(GCF + NB - PXF)) u_green (
    .clk, .rst, .in_valid(v5), .in_data(d5),
    .g_rd_en(hbm_rd_en), .g_rd_addr(hbm_rd_addr), .g_rd_data(hbm_rd_data),
    .out_valid(v6), .out_data(d6));

  transpose_unit #(.FB(perm_frame_bits(P_ZZ, NB)), .PERM(P_ZZ)) u_t_zz (
    .clk, .rst, .in_valid(v6), .in_data(d6), .out_valid(v7), .out_data(d7));

  // ---------------- inverse 3D FFT ----------------
  logic  w1, w2, w3, w4, w5, w6;
  cvec_t e1, e2, e3, e4, e5, e6;

  fft_unit #(.N(N), .INVERSE(1'b1)) u_ifft_z (.clk, .rst, .in_valid(v7), .in_data(d7), .out_valid(w1), .out_data(e1));

  logic          a2_rdy [1];
  logic          a2_ov  [1];
  logic [$bits(cvec_t)-1:0] a2_od [1];
  a2a_switch #(.NI(1), .NO(1)) u_a2a_inv (
    .clk, .rst, .board_id(1'b0),
    .in_valid('{w1}), .in_ready(a2_rdy), .in_dest('{1'b0}), .in_data('{e1}),
    .out_valid(a2_ov), .out_data(a2_od));

  transpose_unit #(.FB(perm_frame_bits(P_ZY, NB)), .PERM(P_ZY)) u_t_zy (
    .clk, .rst, .in_valid(a2_ov[0]), .in_data(a2_od[0]), .out_valid(w2), .out_data(e2));
  fft_unit #(.N(N), .INVERSE(1'b1)) u_ifft_y (.clk, .rst, .in_valid(w2), .in_data(e2), .out_valid(w3), .out_data(e3));
  transpose_unit #(.FB(perm_frame_bits(P_YX, NB)), .PERM(P_YX)) u_t_yx (
    .clk, .rst, .in_valid(w3), .in_data(e3), .out_valid(w4), .out_data(e4));
  fft_unit #(.N(N), .INVERSE(1'b1)) u_ifft_x (.clk, .rst, .in_valid(w4), .in_data(e4), .out_valid(w5), .out_data(e5));
  transpose_unit #(.FB(perm_frame_bits(P_OUT, NB)), .PERM(P_OUT)) u_t_out (
    .clk, .rst, .in_valid(w5), .in_data(e5), .out_valid(w6), .out_data(e6));

  // ---------------- force interpolation ----------------
  force_interp #(.LOGN(L), .ORD(lr_order(L, 12)), .PHI_XF(PXF)) u_fi (
    .clk, .rst,
    .load_valid(w6), .load_data(e6), .load_done(grid_ready),
    .atom_valid(fi_atom_valid), .atom(fi_atom),
    .force_valid, .force_out);

  a_no_backpressure: assert property (@(posedge clk) disable iff (rst)
    (!v3 || a1_rdy[0]) && (!w1 || a2_rdy[0]));

endmodule
