// fpn_coef_mem: per-pixel store of the fixed-pattern-noise coefficients.
//
// The paper models the FPN of pixel (x, y) as K(x,y) * analog_gain * t +
// B(x,y) and fits K and B offline from dark frames. This memory holds one
// {K, B} word per pixel, in raster order (address = y * IMG_W + x). The host
// writes it after calibration through the write port; fpn_remover reads one
// word per pixel through the read port.
//
// Both coefficients are signed COEF_W-bit fixed-point numbers. Their width
// and the single-port-write / single-port-read organisation are this
// design's choices; the paper does not say where K and B are kept.
//
// Timing: synchronous write; synchronous read with one cycle of latency
// (rd_k / rd_b hold the word addressed in the cycle rd_en was high).
// Nothing is reset: the memory must be written before it is used.
module fpn_coef_mem #(
  parameter int unsigned IMG_W  = 400,
  parameter int unsigned IMG_H  = 400,
  parameter int unsigned COEF_W = 12,
  localparam int unsigned DEPTH = IMG_W * IMG_H,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [COEF_W-1:0] wr_k,
  input  logic signed [COEF_W-1:0] wr_b,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [COEF_W-1:0] rd_k,
  output logic signed [COEF_W-1:0] rd_b
);
  logic [2*COEF_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (AW+1)'(wr_addr) < (AW+1)'(DEPTH))
      mem[wr_addr] <= {wr_k, wr_b};
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      {rd_k, rd_b} <= mem[rd_addr];
  end
endmodule
