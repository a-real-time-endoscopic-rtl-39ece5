// fpn_remover: subtracts the calibrated fixed-pattern noise from each pixel.
//
// Following the paper's Eq. 3 (temperature ignored, as the paper does for
// its sensor), the FPN of pixel (x, y) in a frame taken with analog gain g
// and exposure time t is
//
//   N_FPN(x, y) = K(x, y) * g * t + B(x, y)
//
// and the block outputs clamp(in - N_FPN, 0, 2^PIX_W - 1). K and B come from
// fpn_coef_mem, read in raster order: the block counts pixels from each
// start-of-frame beat and issues one read per pixel. The product g * t is
// formed once per frame from the gain and exposure sampled on the
// start-of-frame beat.
//
// Fixed-point formats (this design's choice, the paper gives none):
// analog_gain is unsigned with GAIN_FRAC fractional bits, exposure is an
// unsigned integer (for example in line times), K is signed with K_SHIFT
// fractional bits relative to the g * t product, and B is a signed pixel
// code. The product K * g * t is rounded to whole pixel codes. With enable
// low the stream passes unchanged (the paper's ablation without FPN removal).
//
// Timing: one pixel per cycle, three cycles of latency (memory read,
// FPN value, subtraction); flags travel with the data.
module fpn_remover
  import denoise_pkg::*;
#(
  parameter int unsigned IMG_W     = 400,
  parameter int unsigned IMG_H     = 400,
  parameter int unsigned COEF_W    = 12,
  parameter int unsigned GAIN_W    = 8,
  parameter int unsigned GAIN_FRAC = 4,
  parameter int unsigned EXP_W     = 16,
  parameter int unsigned K_SHIFT   = 16,
  localparam int unsigned AW       = $clog2(IMG_W * IMG_H)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic [GAIN_W-1:0]        analog_gain,
  input  logic [EXP_W-1:0]         exposure,
  input  logic                     in_valid,
  input  pix_beat_t                in_beat,
  // coefficient memory read port
  output logic                     coef_rd_en,
  output logic [AW-1:0]            coef_rd_addr,
  input  logic signed [COEF_W-1:0] coef_k,
  input  logic signed [COEF_W-1:0] coef_b,
  output logic                     out_valid,
  output pix_beat_t                out_beat
);
  localparam int unsigned GT_W   = GAIN_W + EXP_W;        // g * t
  localparam int unsigned PROD_W = COEF_W + GT_W + 1;     // signed K * g * t

  // -------------------------------------------------- stage 0: address, g*t
  logic [AW-1:0]  addr;
  logic [AW-1:0]  addr_cur;
  logic [GT_W-1:0] gt_f;
  logic            en_f;

  always_comb begin
    addr_cur     = in_beat.sof ? '0 : addr;
    coef_rd_en   = in_valid;
    coef_rd_addr = addr_cur;
  end

  logic      v1;
  pix_beat_t b1;
  logic      e1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0;
      gt_f <= '0;
      en_f <= 1'b0;
      v1   <= 1'b0;
      b1   <= '0;
      e1   <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        addr <= addr_cur + 1'b1;
        b1   <= in_beat;
        if (in_beat.sof) begin
          gt_f <= GT_W'(analog_gain) * GT_W'(exposure);
          en_f <= enable;
          e1   <= enable;
        end else begin
          e1   <= en_f;
        end
      end
    end
  end

  // --------------------------------------------- stage 1: FPN of this pixel
  logic signed [PROD_W-1:0] prod;
  logic signed [PROD_W-1:0] kgt;    // K * g * t in pixel codes, rounded
  logic signed [PROD_W:0]   fpn_c;

  always_comb begin
    prod  = PROD_W'(coef_k) * $signed({1'b0, gt_f});
    kgt   = (prod + PROD_W'(2**(K_SHIFT + GAIN_FRAC - 1))) >>> (K_SHIFT + GAIN_FRAC);
    fpn_c = (PROD_W+1)'(kgt) + (PROD_W+1)'(coef_b);
  end

  logic      v2;
  pix_beat_t b2;
  logic      e2;
  logic signed [PROD_W:0] fpn2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2   <= 1'b0;
      b2   <= '0;
      e2   <= 1'b0;
      fpn2 <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        b2   <= b1;
        e2   <= e1;
        fpn2 <= fpn_c;
      end
    end
  end

  // ------------------------------------------------- stage 2: subtraction
  logic signed [PROD_W+1:0] diff;
  logic signed [31:0]       diff_sat;
  always_comb begin
    diff = $signed((PROD_W+2)'(b2.data)) - (PROD_W+2)'(fpn2);
    if (diff > (PROD_W+2)'(2**PIX_W - 1))
      diff_sat = 32'(2**PIX_W - 1);
    else if (diff < 0)
      diff_sat = '0;
    else
      diff_sat = 32'(diff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      out_valid <= v2;
      if (v2) begin
        out_beat.sof  <= b2.sof;
        out_beat.eol  <= b2.eol;
        out_beat.data <= e2 ? clamp_pix(diff_sat) : b2.data;
      end
    end
  end
endmodule
