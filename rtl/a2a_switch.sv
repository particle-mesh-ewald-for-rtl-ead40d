// a2a_switch: all-to-all crossbar of the corner turn, with a buffer at each
// crosspoint and a static switch schedule.
//
// Following the paper's description of its prototype router, the switch has
// a FIFO at every crosspoint (input i to output o) and a statically compiled
// schedule: in round s, output o is served by input (o + s) mod NI, which is
// the paper's all-to-all schedule "in round i, node n transmits to node
// (n+i) mod N" seen from the receiving side. No packet headers are needed:
// each input word carries only its destination.
//
// Virtual cables: with VCABLE = 1 the destination is a board number and is
// mapped to a physical port as (dest - board_id) mod NO, port 0 being the
// internal loopback and ports 1..NO-1 the cables. This lets every board of
// a fully connected group run the same bitstream (paper: "additional logic
// in the A2A unit routes these virtual cables to the correct external port
// or internal loopback"). Which cable reaches which board is this design's
// assumption: cable k of board b reaches board (b + k) mod NO.
//
// Timing: one word per input and per output per clock. An input is held off
// (in_ready low) while its crosspoint FIFO is full. Outputs have no
// back-pressure; link flow control belongs to the board support package.
module a2a_switch
  import pme_pkg::*;
#(
  parameter int NI     = 2,
  parameter int NO     = 4,
  parameter int W      = $bits(cvec_t),
  parameter int FD     = 16,
  parameter bit VCABLE = 1'b1,
  localparam int DB    = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DB-1:0] board_id,
  input  logic          in_valid [NI],
  output logic          in_ready [NI],
  input  logic [DB-1:0] in_dest  [NI],
  input  logic [W-1:0]  in_data  [NI],
  output logic          out_valid [NO],
  output logic [W-1:0]  out_data  [NO]
);

  localparam int FB = $clog2(FD);
  localparam int SB = (NI > 1) ? $clog2(NI) : 1;

  logic [SB-1:0] slot;
  always_ff @(posedge clk) begin
    if (rst) slot <= '0;
    else     slot <= (slot == SB'(NI - 1)) ? '0 : slot + 1'b1;
  end

  logic [DB-1:0] port_of [NI];
  always_comb begin
    for (int i = 0; i < NI; i++)
      port_of[i] = VCABLE ? DB'((int'(in_dest[i]) - int'(board_id) + NO) % NO) : in_dest[i];
  end

  logic          f_full  [NI][NO];
  logic          f_empty [NI][NO];
  logic [W-1:0]  f_head  [NI][NO];
  logic          f_pop   [NI][NO];

  for (genvar i = 0; i < NI; i++) begin : g_in
    for (genvar o = 0; o < NO; o++) begin : g_out
      logic [W-1:0] mem [FD];
      logic [FB:0]  wp, rp;
      logic         push;
      assign push            = in_valid[i] && in_ready[i] && (port_of[i] == DB'(o));
      assign f_full[i][o]    = (wp - rp) == (FB+1)'(FD);
      assign f_empty[i][o]   = (wp == rp);
      assign f_head[i][o]    = mem[rp[FB-1:0]];
      always_ff @(posedge clk) begin
        if (rst) begin
          wp <= '0; rp <= '0;
        end else begin
          if (push) wp <= wp + 1'b1;
          if (f_pop[i][o]) rp <= rp + 1'b1;
        end
        if (push) mem[wp[FB-1:0]] <= in_data[i];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NI; i++) in_ready[i] = !f_full[i][port_of[i]];
  end

  // static schedule: output o listens to input (o + slot) mod NI
  always_comb begin
    for (int i = 0; i < NI; i++)
      for (int o = 0; o < NO; o++)
        f_pop[i][o] = (i == (o + int'(slot)) % NI) && !f_empty[i][o];
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < NO; o++) begin
      out_valid[o] <= rst ? 1'b0 : !f_empty[(o + int'(slot)) % NI][o];
      out_data[o]  <= f_head[(o + int'(slot)) % NI][o];
    end
  end

endmodule
