// endo_denoise_top: real-time raw-domain denoiser for an endoscope sensor.
//
// The raw frames of an ultra-compact analog endoscope sensor carry three
// kinds of noise: periodic vertical banding (PBN) from the long analog
// cable, fixed-pattern noise (FPN) that differs from pixel to pixel, and
// signal-dependent Poisson-Gaussian noise. The denoiser removes them in
// that order:
//
//   raw in -> pbn_remover -> fpn_remover -> out (to the U-Net CNN)
//      \-> pbn_estimator --kappa, phase--^
//
// * pbn_estimator watches every raw frame and measures the amplitude and
//   phase of the period-4 square wave; pbn_remover subtracts the wave using
//   the estimate of the previous frame.
// * fpn_remover subtracts K(x,y) * analog_gain * t + B(x,y), with K and B
//   read from fpn_coef_mem, which the host loads after offline calibration.
// * The remaining Poisson-Gaussian noise is removed by a U-Net of depth-wise
//   and point-wise convolutions in 12-bit fixed point, executed on a
//   systolic array. The array (systolic_array) and the 12-bit requantizer
//   (requant) are here; the U-Net sequencer that feeds them from the
//   feature-map memory is not part of this RTL, so the array's load, stream
//   and result ports and the cleaned pixel stream are ports of this module.
//
// The order of the stages, the equations of the two corrections and the
// 12-bit arithmetic follow the paper. The stream format, the use of the
// previous frame's PBN estimate, the coefficient formats and the array's
// dataflow and size are this design's choices (see each module).
//
// Timing: one raw pixel per cycle with no backpressure; the cleaned pixel
// leaves 4 cycles after it entered (1 for PBN, 3 for FPN). The sensor
// stream needs horizontal blanking only if a row is shorter than the
// estimator's per-row division (about 26 cycles).
//
// Lint note: Verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions in pbn_estimator and systolic_array (see there).
module endo_denoise_top
  import denoise_pkg::*;
#(
  parameter int unsigned IMG_W     = 400,
  parameter int unsigned IMG_H     = 400,
  parameter int unsigned KFRAC     = 4,
  parameter int unsigned COEF_W    = 12,
  parameter int unsigned GAIN_W    = 8,
  parameter int unsigned GAIN_FRAC = 4,
  parameter int unsigned EXP_W     = 16,
  parameter int unsigned K_SHIFT   = 16,
  parameter int unsigned SA_ROWS   = 16,
  parameter int unsigned SA_COLS   = 16,
  parameter int unsigned ACC_W     = 32,
  localparam int unsigned KAPPA_W  = PIX_W + KFRAC,
  localparam int unsigned AW       = $clog2(IMG_W * IMG_H)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     pbn_enable,
  input  logic                     fpn_enable,
  input  pix_t                     pbn_theta,
  input  logic [GAIN_W-1:0]        analog_gain,
  input  logic [EXP_W-1:0]         exposure,
  // raw pixel stream from the bridge chip's ADC
  input  logic                     raw_valid,
  input  pix_beat_t                raw_beat,
  // host write port of the FPN coefficient memory
  input  logic                     coef_wr_en,
  input  logic [AW-1:0]            coef_wr_addr,
  input  logic signed [COEF_W-1:0] coef_wr_k,
  input  logic signed [COEF_W-1:0] coef_wr_b,
  // PBN estimate (status)
  output logic [KAPPA_W-1:0]       pbn_kappa_q,
  output band_pat_t                pbn_band_pat,
  output logic                     pbn_est_valid,
  output logic [$clog2(IMG_H+1)-1:0] pbn_est_rows,
  output logic                     pbn_row_overrun,
  // PBN- and FPN-free stream, to the U-Net sequencer
  output logic                     clean_valid,
  output pix_beat_t                clean_beat,
  // systolic array, driven by the U-Net sequencer
  input  logic                     sa_w_load,
  input  logic [$clog2(SA_ROWS)-1:0] sa_w_row,
  input  q12_t                     sa_w_data  [SA_COLS],
  input  logic                     sa_in_valid,
  input  q12_t                     sa_in_act  [SA_ROWS],
  input  logic signed [ACC_W-1:0]  sa_in_psum [SA_COLS],
  input  logic [4:0]               rq_shift,
  input  logic                     rq_relu,
  output logic                     sa_busy,
  output logic                     sa_acc_valid,
  output logic signed [ACC_W-1:0]  sa_acc     [SA_COLS],
  output logic                     sa_q_valid,
  output q12_t                     sa_q       [SA_COLS]
);
  // ------------------------------------------------------------------- PBN
  logic      pbn_valid;
  pix_beat_t pbn_beat;

  pbn_estimator #(.IMG_W(IMG_W), .IMG_H(IMG_H), .KFRAC(KFRAC)) u_pbn_est (
    .clk, .rst_n,
    .in_valid    (raw_valid),
    .in_beat     (raw_beat),
    .theta       (pbn_theta),
    .kappa_q     (pbn_kappa_q),
    .band_pat    (pbn_band_pat),
    .est_valid   (pbn_est_valid),
    .est_rows    (pbn_est_rows),
    .row_overrun (pbn_row_overrun)
  );

  pbn_remover #(.KFRAC(KFRAC)) u_pbn_rm (
    .clk, .rst_n,
    .enable    (pbn_enable),
    .kappa_q   (pbn_kappa_q),
    .band_pat  (pbn_band_pat),
    .in_valid  (raw_valid),
    .in_beat   (raw_beat),
    .out_valid (pbn_valid),
    .out_beat  (pbn_beat)
  );

  // ------------------------------------------------------------------- FPN
  logic                     coef_rd_en;
  logic [AW-1:0]            coef_rd_addr;
  logic signed [COEF_W-1:0] coef_k, coef_b;

  fpn_coef_mem #(.IMG_W(IMG_W), .IMG_H(IMG_H), .COEF_W(COEF_W)) u_fpn_mem (
    .clk,
    .wr_en   (coef_wr_en),
    .wr_addr (coef_wr_addr),
    .wr_k    (coef_wr_k),
    .wr_b    (coef_wr_b),
    .rd_en   (coef_rd_en),
    .rd_addr (coef_rd_addr),
    .rd_k    (coef_k),
    .rd_b    (coef_b)
  );

  fpn_remover #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .COEF_W(COEF_W), .GAIN_W(GAIN_W),
    .GAIN_FRAC(GAIN_FRAC), .EXP_W(EXP_W), .K_SHIFT(K_SHIFT)
  ) u_fpn_rm (
    .clk, .rst_n,
    .enable       (fpn_enable),
    .analog_gain  (analog_gain),
    .exposure     (exposure),
    .in_valid     (pbn_valid),
    .in_beat      (pbn_beat),
    .coef_rd_en   (coef_rd_en),
    .coef_rd_addr (coef_rd_addr),
    .coef_k       (coef_k),
    .coef_b       (coef_b),
    .out_valid    (clean_valid),
    .out_beat     (clean_beat)
  );

  // --------------------------------------------------- CNN compute engine
  systolic_array #(.ROWS(SA_ROWS), .COLS(SA_COLS), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n,
    .w_load    (sa_w_load),
    .w_row     (sa_w_row),
    .w_data    (sa_w_data),
    .in_valid  (sa_in_valid),
    .in_act    (sa_in_act),
    .in_psum   (sa_in_psum),
    .out_valid (sa_acc_valid),
    .out_acc   (sa_acc),
    .busy      (sa_busy)
  );

  requant #(.N(SA_COLS), .ACC_W(ACC_W)) u_rq (
    .clk, .rst_n,
    .shift     (rq_shift),
    .relu      (rq_relu),
    .in_valid  (sa_acc_valid),
    .in_acc    (sa_acc),
    .out_valid (sa_q_valid),
    .out_q     (sa_q)
  );
endmodule
