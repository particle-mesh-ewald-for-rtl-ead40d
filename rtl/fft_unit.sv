// fft_unit: 8-wide pipelined feedforward radix-2 FFT of N complex points.
//
// Structure (after the parallel feedforward FFT of Garrido et al., as drawn
// for 64 points in the paper): log2(N) columns of radix-2 butterflies, each
// followed by a twiddle rotator, with delay commutators (a delay of D on one
// lane of a pair, a crossing switch, a delay of D on the other lane) in
// front of the columns whose butterfly pairs lie in time rather than across
// lanes. For N = 64 the commutator delays are 4, 2 and 1, as in the paper's
// figure. One vector of 8 points enters and leaves every clock, so a line of
// N points takes N/8 clocks and the log N factor of the FFT is absorbed by
// the hardware.
//
// Input order: a line arrives as N/8 consecutive vectors, element n of the
// line in vector n/8, lane n%8 (natural order). Output order: a bit
// permutation of the frequency index, given by pme_pkg::fft_out_freq_bit;
// the transpose units downstream undo it. Which lanes are paired and the
// choice of decimation in frequency are this design's; the paper only shows
// the 64-point drawing.
//
// Arithmetic: fixed point, no scaling (the word must have headroom for
// log2(N) bits of growth), twiddles of TWW bits rounded from cos/sin at
// elaboration. INVERSE = 1 conjugates input and output, giving the
// unnormalised inverse transform.
//
// Timing: lines must enter as N/8 back-to-back valid vectors; gaps between
// lines are allowed. Latency is log2(N) + sum of commutator delays clocks.
module fft_unit
  import pme_pkg::*;
#(
  parameter int N       = 64,
  parameter bit INVERSE = 1'b0
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cvec_t in_data,
  output logic  out_valid,
  output cvec_t out_data
);

  localparam int LOGN = $clog2(N);
  localparam int LOGT = LOGN - 3;

  typedef struct packed {
    logic            v;
    logic [LOGT-1:0] t;
  } tag_t;

  typedef logic signed [TWW-1:0] tw_t [N/2];

  function automatic tw_t mk_tw(bit imag);
    tw_t   r;
    real   a;
    for (int e = 0; e < N / 2; e++) begin
      a = 6.283185307179586 * e / N;
      if (imag) r[e] = TWW'($rtoi(-$sin(a) * (2.0 ** TWF) + ((-$sin(a)) >= 0.0 ? 0.5 : -0.5)));
      else      r[e] = TWW'($rtoi($cos(a) * (2.0 ** TWF) + ($cos(a) >= 0.0 ? 0.5 : -0.5)));
    end
    return r;
  endfunction

  localparam tw_t TWR = mk_tw(1'b0);
  localparam tw_t TWI = mk_tw(1'b1);

  cvec_t sd [LOGN+1];
  tag_t  st [LOGN+1];

  logic [LOGT-1:0] tcnt;

  always_ff @(posedge clk) begin
    if (rst) tcnt <= '0;
    else if (in_valid) tcnt <= tcnt + 1'b1;
  end

  always_comb begin
    sd[0] = in_data;
    if (INVERSE) for (int l = 0; l < LANES; l++) sd[0][l].im = -in_data[l].im;
    st[0].v = in_valid;
    st[0].t = tcnt;
  end

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    localparam int    B  = LOGN - 1 - s;
    localparam int    PB = fft_stage_pos(LOGN, s);
    localparam bit    SW = (PB >= 3);
    localparam int    K  = SW ? PB - 3 : 0;
    localparam int    D  = 1 << K;
    localparam int    LB = SW ? 0 : PB;
    localparam int    M  = 1 << LB;
    localparam bmap_t H  = bmap_inverse(fft_hold(LOGN, s + 1));

    cvec_t xd;
    tag_t  xt;

    if (SW) begin : g_comm
      // odd lanes delayed, switch, even lanes delayed
      cvec_t odl [D];
      cvec_t edl [D];
      tag_t  tdl [D];
      cvec_t swv;
      logic  swp;

      always_comb begin
        swp = st[s].v && st[s].t[K];
        swv = sd[s];
        for (int i = 0; i < LANES / 2; i++) begin
          swv[2*i]   = swp ? odl[D-1][2*i+1] : sd[s][2*i];
          swv[2*i+1] = swp ? sd[s][2*i]      : odl[D-1][2*i+1];
        end
      end

      always_ff @(posedge clk) begin
        odl[0] <= sd[s];
        edl[0] <= swv;
        for (int i = 1; i < D; i++) begin
          odl[i] <= odl[i-1];
          edl[i] <= edl[i-1];
        end
      end

      always_ff @(posedge clk) begin
        if (rst) for (int i = 0; i < D; i++) tdl[i] <= '0;
        else begin
          tdl[0] <= st[s];
          for (int i = 1; i < D; i++) tdl[i] <= tdl[i-1];
        end
      end

      always_comb begin
        for (int i = 0; i < LANES / 2; i++) begin
          xd[2*i]   = edl[D-1][2*i];
          xd[2*i+1] = swv[2*i+1];
        end
        xt = tdl[D-1];
      end
    end else begin : g_nocomm
      assign xd = sd[s];
      assign xt = st[s];
    end

    // butterfly and twiddle rotation
    cvec_t bo;
    always_comb begin
      logic signed [DW:0]          ar, ai, br, bi;
      logic signed [DW:0]          dr, di;
      logic signed [DW+TWW+1:0]    pr, pi;
      logic [LOGN-1:0]             r;
      logic [LOGN-2:0]             e;
      logic                        bitv;
      bo = xd;
      for (int l = 0; l < LANES; l++) begin
        if (((l >> LB) & 1) == 0) begin
          ar = (DW+1)'(xd[l].re);
          ai = (DW+1)'(xd[l].im);
          br = (DW+1)'(xd[l|M].re);
          bi = (DW+1)'(xd[l|M].im);
          bo[l].re = DW'(ar + br);
          bo[l].im = DW'(ai + bi);
          dr = ar - br;
          di = ai - bi;
          r = '0;
          for (int i = 0; i < B; i++) begin
            if (H[i] < 3) bitv = 1'(l >> H[i]);
            else          bitv = xt.t[H[i]-3];
            r[i] = bitv;
          end
          e = (LOGN-1)'(r << (LOGN - 1 - B));
          pr = dr * TWR[e] - di * TWI[e] + (1 <<< (TWF - 1));
          pi = dr * TWI[e] + di * TWR[e] + (1 <<< (TWF - 1));
          bo[l|M].re = DW'(pr >>> TWF);
          bo[l|M].im = DW'(pi >>> TWF);
        end
      end
    end

    always_ff @(posedge clk) begin
      sd[s+1] <= bo;
      if (rst) st[s+1] <= '0;
      else     st[s+1] <= xt;
    end
  end

  always_comb begin
    out_data  = sd[LOGN];
    if (INVERSE) for (int l = 0; l < LANES; l++) out_data[l].im = -sd[LOGN][l].im;
    out_valid = st[LOGN].v;
  end

endmodule
