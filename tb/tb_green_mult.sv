// tb_green_mult: self-checking testbench of the Green's function multiply.
// A behavioural coefficient memory answers each read G_LAT clocks later.
// Streams three frames of NVEC = 64 random vectors with random gaps and
// checks: the read address is the sequential vector count and wraps after
// NVEC (the sequential-read property the design relies on); every output
// sample equals the exactly computed rounded product; the output follows
// the input by G_LAT + 1 clocks. Watchdog 20000 clocks.
module tb_green_mult;
  import pme_pkg::*;
  localparam int NVEC  = 64;
  localparam int G_LAT = 2;
  localparam int SHIFT = GCF + 18;

  logic  clk = 0, rst = 1;
  logic  in_valid = 0;
  cvec_t in_data;
  logic  g_rd_en;
  logic  [$clog2(NVEC)-1:0] g_rd_addr;
  gvec_t g_rd_data;
  logic  out_valid;
  cvec_t out_data;

  green_mult #(.NVEC(NVEC), .G_LAT(G_LAT)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200_000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end

  int checks = 0, failures = 0;
  gvec_t gmem [NVEC];
  gvec_t gpipe [G_LAT];
  always @(posedge clk) begin
    gpipe[0] <= gmem[g_rd_addr];
    for (int i = 1; i < G_LAT; i++) gpipe[i] <= gpipe[i-1];
  end
  assign g_rd_data = gpipe[G_LAT-1];

  function automatic samp_t expect_mul(samp_t d, gcoef_t g);
    logic signed [DW+GCW-1:0] p;
    p = (DW+GCW)'(d) * (DW+GCW)'(g) + ((DW+GCW)'(1) <<< (SHIFT - 1));
    return DW'(p >>> SHIFT);
  endfunction

  cvec_t exp_q [$];
  int    tin_q [$];
  int    cyc = 0, nin = 0, nout = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (!rst && g_rd_en) begin
      checks++;
      if (int'(g_rd_addr) != nin % NVEC) begin
        failures++; $display("read address %0d at vector %0d", g_rd_addr, nin);
      end
    end
    if (!rst && out_valid) begin
      cvec_t e;
      int t;
      e = exp_q.pop_front();
      t = tin_q.pop_front();
      checks++;
      if (cyc - t != G_LAT + 1) begin failures++; $display("latency %0d", cyc - t); end
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (out_data[l] != e[l]) begin
          failures++;
          if (failures < 10) $display("vector %0d lane %0d got %0d/%0d exp %0d/%0d", nout, l,
                                      out_data[l].re, out_data[l].im, e[l].re, e[l].im);
        end
      end
      nout++;
    end
  end

  initial begin
    for (int v = 0; v < NVEC; v++)
      for (int l = 0; l < LANES; l++) gmem[v][l] = GCW'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int v = 0; v < 3 * NVEC; v++) begin
      cvec_t d, e;
      for (int l = 0; l < LANES; l++) begin
        d[l].re = DW'({$urandom, $urandom});
        d[l].im = DW'({$urandom, $urandom});
        e[l].re = expect_mul(d[l].re, gmem[v % NVEC][l]);
        e[l].im = expect_mul(d[l].im, gmem[v % NVEC][l]);
      end
      in_valid <= 1;
      in_data  <= d;
      exp_q.push_back(e);
      tin_q.push_back(cyc + 1);
      @(posedge clk);
      nin++;
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (G_LAT + 4) @(posedge clk);
    checks++;
    if (nout != 3 * NVEC) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
