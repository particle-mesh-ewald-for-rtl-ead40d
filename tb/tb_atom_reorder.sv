// tb_atom_reorder: drives clustered atom streams into the reorder unit and
// checks, independently of the unit, that every atom comes out exactly once,
// that no two atoms with overlapping 4x4x4 cells come out within WIN clocks
// of each other, that reordering and bubbles both occur, and that a stream
// of non-overlapping atoms passes at one atom per clock.
module tb_atom_reorder;
  import pme_pkg::*;
  localparam int LOGN = 6;
  localparam int N = 64;
  localparam int NA = 200;
  localparam int WIN = CS_HAZ_WIN;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, ev_reorder, ev_bubble;
  atom_t in_atom, out_atom;
  atom_reorder #(.LOGN(LOGN)) dut (.*);

  int checks = 0, failures = 0;
  int seen [NA];
  int n_out = 0, n_reo = 0, n_bub = 0, cyc = 0;
  int last_cyc [$];
  atom_t last_atom [$];

  function automatic logic near(int a, int b);
    int d;
    d = ((a - b) % N + N) % N;
    return d <= 3 || d >= N - 3;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (!rst && ev_reorder) n_reo++;
    if (!rst && ev_bubble) n_bub++;
    if (!rst && out_valid) begin
      int id;
      id = int'(out_atom.id);
      seen[id]++;
      n_out++;
      for (int k = 0; k < last_atom.size(); k++)
        if (cyc - last_cyc[k] <= WIN) begin
          checks++;
          if (near(int'(out_atom.x[PFRAC +: LOGN]), int'(last_atom[k].x[PFRAC +: LOGN])) &&
              near(int'(out_atom.y[PFRAC +: LOGN]), int'(last_atom[k].y[PFRAC +: LOGN])) &&
              near(int'(out_atom.z[PFRAC +: LOGN]), int'(last_atom[k].z[PFRAC +: LOGN]))) begin
            failures++;
            $display("hazard: atoms %0d and %0d issued %0d clocks apart", id, last_atom[k].id, cyc - last_cyc[k]);
          end
        end
      last_atom.push_back(out_atom);
      last_cyc.push_back(cyc);
      if (last_atom.size() > 4) begin void'(last_atom.pop_front()); void'(last_cyc.pop_front()); end
    end
  end

  task automatic send(int id, int x, int y, int z);
    in_valid <= 1;
    in_atom.id <= IDW'(id);
    in_atom.q <= '0;
    in_atom.x <= PW'(x); in_atom.y <= PW'(y); in_atom.z <= PW'(z);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
  endtask

  initial begin
    int t0, x, y, z;
    for (int i = 0; i < NA; i++) seen[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // clustered: groups of 5 atoms in the same cell neighbourhood
    for (int i = 0; i < 150; i++) begin
      if (i % 5 == 0) begin x = $urandom_range(0, N * 65536 - 1); y = $urandom_range(0, N * 65536 - 1); z = $urandom_range(0, N * 65536 - 1); end
      send(i, (x + $urandom_range(0, 131072)) % (N * 65536), y, z);
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    // far-apart atoms, back to back: one per clock
    t0 = n_out;
    fork
      begin
        for (int i = 150; i < NA; i++) begin
          in_valid <= 1;
          in_atom.id <= IDW'(i); in_atom.q <= '0;
          in_atom.x <= PW'(((i * 8) % N) << PFRAC);
          in_atom.y <= PW'((((i / 8) * 8) % N) << PFRAC);
          in_atom.z <= PW'(((i % 2) * 32) << PFRAC);
          @(posedge clk);
        end
        in_valid <= 0;
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (n_out - t0 != NA - 150) begin failures++; $display("rate: %0d atoms out in %0d clocks", n_out - t0, NA - 150); end
    repeat (20) @(posedge clk);
    for (int i = 0; i < NA; i++) begin
      checks++;
      if (seen[i] != 1) begin failures++; $display("atom %0d issued %0d times", i, seen[i]); end
    end
    checks++; if (n_reo == 0) begin failures++; $display("no reorder"); end
    checks++; if (n_bub == 0) begin failures++; $display("no bubble"); end
    $display("reorders=%0d bubbles=%0d", n_reo, n_bub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
