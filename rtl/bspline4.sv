// bspline4: order-4 cardinal B-spline weights and their derivatives for one
// coordinate of one atom.
//
// For the fractional part u of an atom coordinate (grid units), the atom
// touches the four grid points floor-1 .. floor+2 with weights
//   w0 = (1-u)^3/6          d0 = -(1-u)^2/2
//   w1 = (3u^3-6u^2+4)/6    d1 = (3u^2-4u)/2
//   w2 = (-3u^3+3u^2+3u+1)/6 d2 = (-3u^2+2u+1)/2
//   w3 = u^3/6              d3 = u^2/2
// (d = dw/du). Charge spreading uses w; force interpolation uses w and d.
// Charge spreading and force interpolation with cardinal B-splines over a
// 4x4x4 cell follow the paper; the formulas are the standard order-4 spline
// and the fixed-point evaluation is this design's own.
//
// Interface: u is unsigned Q0.PFRAC; w and d are signed Q.WF, WW bits.
// Timing: one result per clock, one clock of latency (outputs registered).
module bspline4
  import pme_pkg::*;
(
  input  logic             clk,
  input  logic [PFRAC-1:0] u,
  output wvec_t            w,
  output wvec_t            d
);

  localparam longint ONE = 64'sd1 << WF;

  logic signed [47:0] uu, vv, u2, u3, v2, v3;
  logic signed [47:0] tw [4];
  logic signed [47:0] td [4];

  always_comb begin
    uu = 48'(u) <<< (WF - PFRAC);
    vv = 48'(ONE) - uu;
    u2 = (uu * uu) >>> WF;
    u3 = (u2 * uu) >>> WF;
    v2 = (vv * vv) >>> WF;
    v3 = (v2 * vv) >>> WF;
    tw[0] = v3 / 6;
    tw[1] = (3 * u3 - 6 * u2 + 4 * 48'(ONE)) / 6;
    tw[2] = (-3 * u3 + 3 * u2 + 3 * uu + 48'(ONE)) / 6;
    tw[3] = u3 / 6;
    td[0] = -(v2 >>> 1);
    td[1] = (3 * u2 - 4 * uu) >>> 1;
    td[2] = (-3 * u2 + 2 * uu + 48'(ONE)) >>> 1;
    td[3] = u2 >>> 1;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      w[i] <= WW'(tw[i]);
      d[i] <= WW'(td[i]);
    end
  end

endmodule
