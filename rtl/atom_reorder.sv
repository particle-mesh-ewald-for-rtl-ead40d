// atom_reorder: reorders the atom stream in front of charge spreading so that
// no two atoms whose 4x4x4 grid cells overlap enter the grid update within
// WIN clocks of each other.
//
// The paper states the function ("because atom volumes of influence overlap,
// we use additional hardware to dynamically reorder atoms to avoid pipeline
// hazards") but not the mechanism; this is the simplest unit that does it.
// Atoms wait in a buffer of DEPTH slots. Every clock the oldest waiting atom
// whose cell does not overlap the cells of the atoms issued in the last WIN
// clocks is issued; if none qualifies, a bubble is issued. Two cells overlap
// when their base points are less than 4 apart (periodically) in all three
// dimensions. Every atom is issued exactly once.
//
// Interface: in_valid/in_ready handshake (in_ready when a slot is free);
// out_valid/out_atom one clock after the decision, no back-pressure.
// ev_reorder pulses when an atom is issued ahead of an older waiting atom,
// ev_bubble when atoms wait but none may issue.
module atom_reorder
  import pme_pkg::*;
#(
  parameter int LOGN  = 6,
  parameter int DEPTH = 8,
  parameter int WIN   = CS_HAZ_WIN
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  output logic  in_ready,
  input  atom_t in_atom,
  output logic  out_valid,
  output atom_t out_atom,
  output logic  ev_reorder,
  output logic  ev_bubble
);

  localparam int N = 1 << LOGN;

  typedef struct packed {
    logic [LOGN-1:0] x, y, z;
  } cell_t;

  logic           sv  [DEPTH];
  atom_t          sa  [DEPTH];
  logic [31:0]    seq [DEPTH];
  logic [31:0]    nseq;
  logic           hv  [WIN];
  cell_t          hc  [WIN];

  function automatic cell_t cell_of(atom_t a);
    cell_t c;
    c.x = a.x[PFRAC +: LOGN];
    c.y = a.y[PFRAC +: LOGN];
    c.z = a.z[PFRAC +: LOGN];
    return c;
  endfunction

  function automatic logic near(logic [LOGN-1:0] a, logic [LOGN-1:0] b);
    logic [LOGN-1:0] d;
    d = a - b + LOGN'(3);
    return d < LOGN'(7);
  endfunction

  function automatic logic overlap(cell_t a, cell_t b);
    return near(a.x, b.x) && near(a.y, b.y) && near(a.z, b.z);
  endfunction

  // selection
  logic                     any_wait, found, older_waiting;
  logic [$clog2(DEPTH)-1:0] pick, free_slot;
  logic                     has_free;

  always_comb begin
    logic ok;
    any_wait = 1'b0;
    found    = 1'b0;
    pick     = '0;
    for (int i = 0; i < DEPTH; i++) begin
      ok = sv[i];
      for (int h = 0; h < WIN; h++) if (hv[h] && overlap(cell_of(sa[i]), hc[h])) ok = 1'b0;
      if (sv[i]) any_wait = 1'b1;
      if (ok && (!found || (seq[i] - seq[pick]) >= 32'h8000_0000)) begin
        found = 1'b1;
        pick  = $clog2(DEPTH)'(i);
      end
    end
    older_waiting = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (found && sv[i] && (seq[i] - seq[pick]) >= 32'h8000_0000) older_waiting = 1'b1;
    has_free  = 1'b0;
    free_slot = '0;
    for (int i = DEPTH - 1; i >= 0; i--) if (!sv[i]) begin
      has_free  = 1'b1;
      free_slot = $clog2(DEPTH)'(i);
    end
  end

  assign in_ready = has_free;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) sv[i] <= 1'b0;
      for (int h = 0; h < WIN; h++) hv[h] <= 1'b0;
      nseq       <= '0;
      out_valid  <= 1'b0;
      ev_reorder <= 1'b0;
      ev_bubble  <= 1'b0;
    end else begin
      if (found) sv[pick] <= 1'b0;
      if (in_valid && has_free) begin
        sv[free_slot]  <= 1'b1;
        sa[free_slot]  <= in_atom;
        seq[free_slot] <= nseq;
        nseq           <= nseq + 1;
      end
      hv[0] <= found;
      hc[0] <= cell_of(sa[pick]);
      for (int h = 1; h < WIN; h++) begin
        hv[h] <= hv[h-1];
        hc[h] <= hc[h-1];
      end
      out_valid  <= found;
      ev_reorder <= found && older_waiting;
      ev_bubble  <= any_wait && !found;
    end
  end

  always_ff @(posedge clk) out_atom <= sa[pick];

endmodule
