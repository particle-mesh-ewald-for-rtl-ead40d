// tb_a2a_switch: self-checking testbench of the all-to-all switch (2 inputs,
// 4 outputs, virtual cables on, board number 1).
// Phase 1: both inputs send tagged words to random destination boards with
// random gaps. Every word must leave on port (dest - board) mod 4 exactly
// once, and the words of one input to one port must stay in order.
// Phase 2 (rate): both inputs send back to back, each cycling over the four
// destinations as in the all-to-all exchange; each input must be accepted
// on at least 95% of the clocks. Phase 3: one input sends only to one port,
// which is served every second clock, so in_ready must drop (back-pressure)
// and no word may be lost. Watchdog 50000 clocks.
module tb_a2a_switch;
  import pme_pkg::*;
  localparam int NI = 2, NO = 4, W = 32;

  logic         clk = 0, rst = 1;
  logic [1:0]   board_id = 2'd1;
  logic         in_valid [NI];
  logic         in_ready [NI];
  logic [1:0]   in_dest  [NI];
  logic [W-1:0] in_data  [NI];
  logic         out_valid [NO];
  logic [W-1:0] out_data  [NO];

  a2a_switch #(.NI(NI), .NO(NO), .W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #500_000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end

  int checks = 0, failures = 0;
  // word tag: [31:30] input, [29:28] destination board, [27:0] sequence
  int sent = 0, recv = 0, n_stall = 0;
  int last_seq [NI][NO];
  int accepted [NI];
  logic [27:0] seq [NI];

  always @(negedge clk) if (!rst) begin
    for (int i = 0; i < NI; i++) if (in_valid[i] && in_ready[i]) begin
      sent++; accepted[i]++;
    end
    for (int i = 0; i < NI; i++) if (in_valid[i] && !in_ready[i]) n_stall++;
    for (int o = 0; o < NO; o++) if (out_valid[o]) begin
      int i, d, s;
      i = int'(out_data[o][31:30]);
      d = int'(out_data[o][29:28]);
      s = int'(out_data[o][27:0]);
      recv++;
      checks++;
      if ((d - 1 + NO) % NO != o) begin failures++; $display("word for board %0d on port %0d", d, o); end
      checks++;
      if (s <= last_seq[i][o]) begin failures++; $display("port %0d input %0d order %0d after %0d", o, i, s, last_seq[i][o]); end
      last_seq[i][o] = s;
    end
  end

  task automatic drive(input int i, input logic v, input int d);
    in_valid[i] <= v;
    in_dest[i]  <= 2'(d);
    in_data[i]  <= {2'(i), 2'(d), seq[i]};
    seq[i] = seq[i] + 1'b1;   // every driven word gets a new number
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = 0; seq[i] = 0; accepted[i] = 0;
      for (int o = 0; o < NO; o++) last_seq[i][o] = -1;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // phase 1: random traffic; a word is held until accepted
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NI; i++)
        if (!in_valid[i] || in_ready[i]) drive(i, $urandom_range(0, 2) != 0, $urandom_range(0, NO - 1));
      @(posedge clk);
    end
    for (int i = 0; i < NI; i++) in_valid[i] <= 0;
    repeat (100) @(posedge clk);
    checks++;
    if (sent != recv) begin failures++; $display("phase 1: sent %0d received %0d", sent, recv); end
    // phase 2: all-to-all pattern, back to back
    for (int i = 0; i < NI; i++) accepted[i] = 0;
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < NI; i++)
        if (!in_valid[i] || in_ready[i]) drive(i, 1'b1, (int'(seq[i]) + i) % NO);
      @(posedge clk);
    end
    for (int i = 0; i < NI; i++) in_valid[i] <= 0;
    repeat (100) @(posedge clk);
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (accepted[i] < 950) begin failures++; $display("phase 2: input %0d accepted %0d of 1000", i, accepted[i]); end
    end
    checks++;
    if (sent != recv) begin failures++; $display("phase 2: sent %0d received %0d", sent, recv); end
    // phase 3: one input floods one port
    n_stall = 0;
    for (int t = 0; t < 200; t++) begin
      if (!in_valid[0] || in_ready[0]) drive(0, 1'b1, 3);
      @(posedge clk);
    end
    in_valid[0] <= 0;
    repeat (100) @(posedge clk);
    checks++;
    if (n_stall == 0) begin failures++; $display("phase 3: no back-pressure"); end
    checks++;
    if (sent != recv) begin failures++; $display("phase 3: sent %0d received %0d", sent, recv); end
    $display("sent %0d, stalls in phase 3: %0d", sent, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
