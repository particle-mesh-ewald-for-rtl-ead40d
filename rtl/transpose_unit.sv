// transpose_unit: bit-dimension permutation of a stream of 8-wide vectors.
//
// The unit holds frames of 2^FB elements (2^FB/8 vectors) and re-emits each
// frame in a new order: output position bit i is input position bit PERM[i]
// (positions count elements, lanes are position bits 0..2). Corner turns of
// the 3D FFT and the re-ordering of FFT output are all such permutations.
//
// Structure, as in the paper's transpose unit figure: eight BRAMs, an input
// lane network, one write address WA shared by all BRAMs, eight independent
// read addresses RA[7:0], and an output lane network. Input element (vector
// v, lane l) is written to BRAM l ^ fold(v) at address v, fold(v) being the
// XOR of the 3-bit groups of v; the input network is therefore a three-level
// block swap (halves, quarters, pairs) selected by fold(v). On the read side
// the eight lanes of an output vector come from eight different BRAMs at
// their own addresses as long as the three input bits feeding the lanes
// differ modulo 3 (an assertion checks this); permutations outside that
// class are the unit's limitation. The output network here is a full 8:1
// selection per lane, a superset of the paper's three-level block network.
// The write-side skew and the address arithmetic are this design's; the
// paper says its control is generated by a program from a control file.
//
// Timing: frames are double-buffered. A complete frame is read out as
// 2^FB/8 back-to-back vectors starting the cycle after its last vector was
// written (or after the previous frame finished reading); output lags the
// read by one clock. Input may have gaps; output frames are contiguous.
module transpose_unit
  import pme_pkg::*;
#(
  parameter int    FB   = 6,
  parameter bmap_t PERM = '{0: 3, 1: 4, 2: 5, 3: 0, 4: 1, 5: 2, default: 0}
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cvec_t in_data,
  output logic  out_valid,
  output cvec_t out_data
);

  localparam int VB = FB - 3;
  localparam int FV = 1 << VB;

  function automatic logic [2:0] fold(logic [FB-1:0] p);
    logic [2:0] f;
    f = '0;
    for (int i = 0; i < FB; i++) f[i % 3] ^= p[i];
    return f;
  endfunction

  // ---------------- write side ----------------
  logic [VB-1:0] wv;
  logic          wf;
  logic [2:0]    wsel;
  cvec_t         wvec;

  always_comb begin
    wsel = fold({wv, 3'b000});
    for (int b = 0; b < LANES; b++) wvec[b] = in_data[3'(b) ^ wsel];
  end

  // ---------------- read side ----------------
  logic [1:0]    ready;
  logic          rd_act;
  logic          rf, nrf;
  logic [VB-1:0] rv;
  logic          rd_last, rd_go, wdone;
  logic [2:0]    bank_of [LANES];
  logic [VB-1:0] addr_of [LANES];
  logic [VB-1:0] ra [LANES];

  assign wdone   = in_valid && (wv == VB'(FV - 1));
  assign rd_last = rd_act && (rv == VB'(FV - 1));
  assign rd_go   = (!rd_act || rd_last) && (ready != 2'd0);

  always_comb begin
    logic [FB-1:0] q, p;
    for (int rl = 0; rl < LANES; rl++) begin
      q = {rv, 3'(rl)};
      p = '0;
      for (int i = 0; i < FB; i++) p[PERM[i]] = q[i];
      bank_of[rl] = fold(p);
      addr_of[rl] = p[FB-1:3];
    end
    for (int b = 0; b < LANES; b++) begin
      ra[b] = '0;
      for (int rl = 0; rl < LANES; rl++) if (bank_of[rl] == 3'(b)) ra[b] = addr_of[rl];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wv <= '0; wf <= 1'b0; ready <= '0; rd_act <= 1'b0; rv <= '0; rf <= 1'b0; nrf <= 1'b0;
    end else begin
      if (in_valid) begin
        wv <= wv + 1'b1;
        if (wdone) wf <= ~wf;
      end
      ready <= ready + 2'(wdone) - 2'(rd_go);
      if (rd_go) begin
        rd_act <= 1'b1;
        rv     <= '0;
        rf     <= nrf;
        nrf    <= ~nrf;
      end else if (rd_last) begin
        rd_act <= 1'b0;
      end else if (rd_act) begin
        rv <= rv + 1'b1;
      end
    end
  end

  // ---------------- the eight BRAMs ----------------
  cplx_t      rdata [LANES];
  logic [2:0] osel  [LANES];
  logic       ov;

  for (genvar b = 0; b < LANES; b++) begin : g_bram
    cplx_t mem [2*FV];
    always_ff @(posedge clk) begin
      if (in_valid) mem[{wf, wv}] <= wvec[b];
      rdata[b] <= mem[{rf, ra[b]}];
    end
  end

  always_ff @(posedge clk) begin
    for (int rl = 0; rl < LANES; rl++) osel[rl] <= bank_of[rl];
    if (rst) ov <= 1'b0;
    else     ov <= rd_act;
  end

  always_comb begin
    for (int rl = 0; rl < LANES; rl++) out_data[rl] = rdata[osel[rl]];
    out_valid = ov;
  end

  // every lane of an output vector must come from its own BRAM
  function automatic logic banks_distinct();
    logic [7:0] seen;
    seen = '0;
    for (int rl = 0; rl < LANES; rl++) seen[bank_of[rl]] = 1'b1;
    return &seen;
  endfunction

  a_no_bank_conflict: assert property (@(posedge clk) disable iff (rst) rd_act |-> banks_distinct());
  a_no_overrun: assert property (@(posedge clk) disable iff (rst) !(wdone && ready == 2'd2 && rd_act));

endmodule
