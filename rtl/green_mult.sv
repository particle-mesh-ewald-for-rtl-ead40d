// green_mult: multiplies the forward-transformed charge grid by the
// (real) Green's function coefficients of the convolution.
//
// In the paper the coefficients live in HBM, the only use of HBM in the
// long-range pipeline, and HBM is read strictly sequentially because any
// other pattern loses bandwidth. Here, likewise, the coefficients are
// stored by the host in exactly the order in which the forward FFT
// delivers the grid, so the unit reads them as one sequential stream: the
// read address is simply the count of vectors seen so far (wrapping after
// NVEC). The memory itself is outside this unit (g_rd_* port).
//
// Each sample is multiplied by its coefficient and shifted right by SHIFT,
// which folds in the coefficient's fraction bits and the 1/N^3
// normalisation of the forward transform. Placing the normalisation here,
// the fixed-point format and the port are this design's choices.
//
// Timing: g_rd_en/g_rd_addr are issued with each input vector; the memory
// must return g_rd_data G_LAT clocks later. Output follows G_LAT + 1 clocks
// after the input, gaps preserved.
module green_mult
  import pme_pkg::*;
#(
  parameter int NVEC  = 32768,
  parameter int G_LAT = 2,
  parameter int SHIFT = GCF + 18
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  cvec_t                    in_data,
  output logic                     g_rd_en,
  output logic [$clog2(NVEC)-1:0]  g_rd_addr,
  input  gvec_t                    g_rd_data,
  output logic                     out_valid,
  output cvec_t                    out_data
);

  localparam int AW = $clog2(NVEC);

  logic [AW-1:0] cnt;
  cvec_t         dd [G_LAT];
  logic          dv [G_LAT];

  assign g_rd_en   = in_valid;
  assign g_rd_addr = cnt;

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else if (in_valid) cnt <= (cnt == AW'(NVEC - 1)) ? '0 : cnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    dd[0] <= in_data;
    for (int i = 1; i < G_LAT; i++) dd[i] <= dd[i-1];
    if (rst) for (int i = 0; i < G_LAT; i++) dv[i] <= 1'b0;
    else begin
      dv[0] <= in_valid;
      for (int i = 1; i < G_LAT; i++) dv[i] <= dv[i-1];
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      out_data[l].re <= DW'(((DW+GCW)'(dd[G_LAT-1][l].re) * (DW+GCW)'(g_rd_data[l])
                             + ((DW+GCW)'(1) <<< (SHIFT - 1))) >>> SHIFT);
      out_data[l].im <= DW'(((DW+GCW)'(dd[G_LAT-1][l].im) * (DW+GCW)'(g_rd_data[l])
                             + ((DW+GCW)'(1) <<< (SHIFT - 1))) >>> SHIFT);
    end
    if (rst) out_valid <= 1'b0;
    else     out_valid <= dv[G_LAT-1];
  end

endmodule
