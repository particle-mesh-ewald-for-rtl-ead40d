// tb_transpose_unit: self-checking testbench of the transpose unit.
// Two instances: the default 8x8 corner turn and a 256-element frame with a
// rotation of the position bits. Several frames stream in (with gaps in the
// input); each output element is compared with the input element that the
// permutation names, computed here from the permutation table. Checks that
// output frames are contiguous and the frame latency.
module tb_transpose_unit;
  import pme_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int NF = 4;
  localparam bmap_t P2 = '{0: 5, 1: 6, 2: 7, 3: 0, 4: 1, 5: 2, 6: 3, 7: 4, default: 0};

  logic  iv, ov1, ov2;
  cvec_t id, od1, od2;
  transpose_unit dut1 (.clk, .rst, .in_valid(iv), .in_data(id), .out_valid(ov1), .out_data(od1));
  transpose_unit #(.FB(8), .PERM(P2)) dut2 (.clk, .rst, .in_valid(iv), .in_data(id), .out_valid(ov2), .out_data(od2));

  int checks = 0, failures = 0;
  int o1 = 0, o2 = 0, gap1 = 0;
  logic pv1 = 0;

  // input element value: frame-independent function of the running element count
  function automatic samp_t val(int e);
    return samp_t'(e * 7919 + 13);
  endfunction

  function automatic int src(int q, int fb, bmap_t pm);
    int p = 0;
    for (int i = 0; i < fb; i++) if ((q >> i) & 1) p |= 1 << pm[i];
    return p;
  endfunction

  always @(posedge clk) begin
    if (!rst && ov1) begin
      for (int l = 0; l < 8; l++) begin
        int q, fr, e;
        fr = o1 / 8; q = (o1 % 8) * 8 + l;
        e = fr * 64 + src(q, 6, '{0: 3, 1: 4, 2: 5, 3: 0, 4: 1, 5: 2, default: 0});
        checks++;
        if (od1[l].re !== val(e) || od1[l].im !== -val(e)) begin
          failures++;
          if (failures < 8) $display("T1 mismatch vec %0d lane %0d: got %0d exp %0d", o1, l, od1[l].re, val(e));
        end
      end
      if (pv1 == 0 && (o1 % 8) != 0) gap1++;
      o1++;
    end
    pv1 <= ov1;
    if (!rst && ov2) begin
      for (int l = 0; l < 8; l++) begin
        int q, fr, e;
        fr = o2 / 32; q = (o2 % 32) * 8 + l;
        e = fr * 256 + src(q, 8, P2);
        checks++;
        if (od2[l].re !== val(e)) begin
          failures++;
          if (failures < 8) $display("T2 mismatch vec %0d lane %0d", o2, l);
        end
      end
      o2++;
    end
  end

  initial begin
    int e = 0;
    iv = 0; id = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int v = 0; v < NF * 32; v++) begin
      @(posedge clk);
      if (v % 37 == 5) begin iv <= 0; @(posedge clk); end
      iv <= 1;
      for (int l = 0; l < 8; l++) begin
        id[l].re <= val(e);
        id[l].im <= -val(e);
        e++;
      end
    end
    @(posedge clk) iv <= 0;
    repeat (80) @(posedge clk);
    checks++;
    if (o1 != NF * 32 || o2 != NF * 32) begin failures++; $display("counts %0d %0d", o1, o2); end
    checks++;
    if (gap1 != 0) begin failures++; $display("output frame not contiguous"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
