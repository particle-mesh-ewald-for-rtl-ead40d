// pme_pkg: types, number formats and stream-order helpers shared by the
// long-range (Smooth Particle Mesh Ewald) pipeline.
//
// Number formats. The published pipeline works in single-precision floating
// point; this RTL uses fixed point instead (a choice of this design):
//   grid samples      signed DW bits, GFRAC fraction bits (complex = re, im)
//   atom coordinates  unsigned PW bits in grid units: PINT integer, PFRAC fraction
//   atom charge       signed CW bits, CFRAC fraction bits
//   B-spline weights  signed WW bits, WF fraction bits
//   FFT twiddles      signed TWW bits, TWF fraction bits
//   Green coefficient signed GCW bits, GCF fraction bits
//   forces            signed FW bits, GFRAC fraction bits
// The inverse-FFT path (after the Green multiply, up to the potential grid
// held by force interpolation) carries PXF extra fraction bits, i.e.
// GFRAC + PXF in all: the 1/N^3 normalisation would otherwise shift most of
// the signal out of the word before the inverse transform.
//
// Stream orders. Every unit passes 8-wide vectors (one 8-lane vector per
// clock). A volume of N^3 points streams as N^3/8 vectors; the element at
// stream position p (p = vector_index*8 + lane) sits at the grid point whose
// coordinate bits are given by an order map: coordinate bit ORD[i] equals
// position bit i. Coordinate bits 0..L-1 are x, L..2L-1 y, 2L..3L-1 z
// (L = log2 N). The FFT unit and the transpose units are described as bit
// permutations on these maps; the functions below compute them at
// elaboration time, so a change of N re-derives every unit's control.
package pme_pkg;

  localparam int LANES = 8;
  localparam int DW    = 40;
  localparam int GFRAC = 16;
  localparam int PXF   = 12;
  localparam int TWW   = 18;
  localparam int TWF   = 16;
  localparam int PINT  = 8;
  localparam int PFRAC = 16;
  localparam int PW    = PINT + PFRAC;
  localparam int CW    = 16;
  localparam int CFRAC = 12;
  localparam int WW    = 18;
  localparam int WF    = 16;
  localparam int GCW   = 18;
  localparam int GCF   = 16;
  localparam int IDW   = 16;
  localparam int FW    = 48;
  localparam int MAXB  = 24;

  // Read-modify-write distance of the charge-spreading grid: an atom may not
  // enter the grid update within this many cycles of an overlapping atom.
  localparam int CS_HAZ_WIN = 2;

  typedef logic signed [DW-1:0] samp_t;
  typedef struct packed {
    samp_t re;
    samp_t im;
  } cplx_t;
  typedef cplx_t [LANES-1:0] cvec_t;

  typedef struct packed {
    logic [IDW-1:0]       id;
    logic signed [CW-1:0] q;
    logic [PW-1:0]        z;
    logic [PW-1:0]        y;
    logic [PW-1:0]        x;
  } atom_t;

  typedef struct packed {
    logic [IDW-1:0]       id;
    logic signed [FW-1:0] fz;
    logic signed [FW-1:0] fy;
    logic signed [FW-1:0] fx;
  } force_t;

  typedef logic signed [WW-1:0] wgt_t;
  typedef wgt_t [3:0] wvec_t;
  typedef logic signed [GCW-1:0] gcoef_t;
  typedef gcoef_t [LANES-1:0] gvec_t;

  typedef int bmap_t [MAXB];

  // ---------------------------------------------------------------------
  // FFT bit bookkeeping. Positions 0..2 of a line are the lanes, positions
  // 3..L-1 the bits of the vector count within the line. A line enters in
  // natural order (index bit i at position i). Stage s butterflies index
  // bit b = L-1-s; when b sits at a time position it is first exchanged
  // with lane position 0 by a delay commutator.
  // ---------------------------------------------------------------------

  // Index bit held at each position after the exchanges of stages 0..nst-1.
  function automatic bmap_t fft_hold(int logn, int nst);
    bmap_t h;
    int pb;
    int tmp;
    for (int p = 0; p < MAXB; p++) h[p] = p;
    for (int s = 0; s < nst; s++) begin
      pb = 0;
      for (int p = 0; p < logn; p++) if (h[p] == logn - 1 - s) pb = p;
      if (pb >= 3) begin
        tmp = h[pb]; h[pb] = h[0]; h[0] = tmp;
      end
    end
    return h;
  endfunction

  // Inverse of a bit map: position holding each bit.
  function automatic bmap_t bmap_inverse(bmap_t h);
    bmap_t r;
    for (int i = 0; i < MAXB; i++) r[i] = i;
    for (int p = 0; p < MAXB; p++) if (h[p] >= 0 && h[p] < MAXB) r[h[p]] = p;
    return r;
  endfunction

  // Position of the butterflied bit of stage s before that stage's exchange.
  function automatic int fft_stage_pos(int logn, int s);
    bmap_t h;
    int pb;
    h  = fft_hold(logn, s);
    pb = 0;
    for (int p = 0; p < logn; p++) if (h[p] == logn - 1 - s) pb = p;
    return pb;
  endfunction

  // Frequency bit carried by output position p of the FFT unit
  // (decimation in frequency leaves index bit i holding frequency bit L-1-i).
  function automatic int fft_out_freq_bit(int logn, int p);
    bmap_t h;
    h = fft_hold(logn, logn);
    return logn - 1 - h[p];
  endfunction

  // ---------------------------------------------------------------------
  // Stream order maps
  // ---------------------------------------------------------------------
  function automatic bmap_t ord_natural();
    bmap_t o;
    for (int i = 0; i < MAXB; i++) o[i] = i;
    return o;
  endfunction

  // Order after a 1D FFT over the lowest logn positions.
  function automatic bmap_t ord_after_fft(bmap_t oin, int logn);
    bmap_t o;
    o = oin;
    for (int i = 0; i < logn; i++) o[i] = oin[fft_out_freq_bit(logn, i)];
    return o;
  endfunction

  // Order with coordinate bits base..base+logn-1 brought to the lowest
  // positions in natural order, every other bit keeping its relative order.
  function automatic bmap_t ord_front(bmap_t oin, int base, int logn, int nb);
    bmap_t o;
    int k;
    o = oin;
    for (int i = 0; i < logn; i++) o[i] = base + i;
    k = logn;
    for (int i = 0; i < nb; i++)
      if (oin[i] < base || oin[i] >= base + logn) begin
        o[k] = oin[i];
        k++;
      end
    return o;
  endfunction

  // Permutation turning stream order oin into oout: output position bit i is
  // input position bit perm[i].
  function automatic bmap_t ord_perm(bmap_t oin, bmap_t oout, int nb);
    bmap_t pm;
    for (int i = 0; i < MAXB; i++) pm[i] = i;
    for (int i = 0; i < nb; i++)
      for (int j = 0; j < nb; j++)
        if (oin[j] == oout[i]) pm[i] = j;
    return pm;
  endfunction

  // Smallest frame (in position bits) that holds a permutation, at least 4.
  function automatic int perm_frame_bits(bmap_t pm, int nb);
    int fb;
    fb = 4;
    for (int i = 0; i < nb; i++) if (pm[i] != i && i + 1 > fb) fb = i + 1;
    for (int i = 0; i < nb; i++) if (pm[i] != i && pm[i] + 1 > fb) fb = pm[i] + 1;
    return fb;
  endfunction

  // ---------------------------------------------------------------------
  // Stream orders along the long-range pipeline (see pme_lr_top):
  // stage 0 charge grid out, 1 after X FFT, 2 after X->Y turn, 3 after Y FFT,
  // 4 after Y->Z turn, 5 after Z FFT (Green multiply), 6 after Z turn,
  // 7 after Z^-1 FFT, 8 after Z->Y turn, 9 after Y^-1 FFT, 10 after Y->X
  // turn, 11 after X^-1 FFT, 12 into force interpolation.
  // ---------------------------------------------------------------------
  function automatic bmap_t lr_order(int logn, int stage);
    bmap_t o;
    int    nb;
    nb = 3 * logn;
    o  = ord_natural();
    for (int s = 1; s <= stage; s++) begin
      case (s)
        2:       o = ord_front(o, logn, logn, nb);
        4, 6:    o = ord_front(o, 2 * logn, logn, nb);
        8:       o = ord_front(o, logn, logn, nb);
        10, 12:  o = ord_front(o, 0, logn, nb);
        default: o = ord_after_fft(o, logn);
      endcase
    end
    return o;
  endfunction

endpackage
