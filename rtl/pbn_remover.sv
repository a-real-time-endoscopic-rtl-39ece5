// pbn_remover: subtracts the periodic banding noise from a raw pixel stream.
//
// The banding model is N(x) = kappa * f(sin(theta x)), a square wave of
// period 4 pixels along x (paper, Eq. 4 and Sec. 2.2.1). With the amplitude
// kappa_q (KFRAC fractional bits) and the sign pattern band_pat (bit r set =
// wave positive at x mod 4 == r) from pbn_estimator, each pixel becomes
//
//   out = clamp(in - s(x mod 4) * round(kappa), 0, 2^PIX_W - 1),  s = +-1.
//
// kappa and band_pat are sampled on each start-of-frame beat and held for
// the whole frame, so a frame is corrected with one estimate. In the system
// the estimate comes from the previous frame: the paper finds the banding
// stable under fixed transmission conditions, and using the previous frame
// avoids a frame buffer. That reuse, the rounding to whole pixel codes and
// the clamp are this design's choices. With enable low the stream passes
// unchanged (the paper's ablation without PBN removal).
//
// Timing: one pixel per cycle, one cycle of latency, flags delayed with the
// data.
module pbn_remover
  import denoise_pkg::*;
#(
  parameter int unsigned KFRAC = 4,
  parameter int unsigned KAPPA_W = PIX_W + KFRAC
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  logic [KAPPA_W-1:0] kappa_q,
  input  band_pat_t          band_pat,
  input  logic               in_valid,
  input  pix_beat_t          in_beat,
  output logic               out_valid,
  output pix_beat_t          out_beat
);
  logic [1:0]          xm;       // x mod 4 of the next beat
  logic [1:0]          xm_cur;
  logic [KAPPA_W-1:0]  kap_f;    // frame copy of kappa
  band_pat_t           pat_f;
  logic                en_f;

  logic [KAPPA_W-1:0]  kap_use;
  band_pat_t           pat_use;
  logic                en_use;
  logic [KAPPA_W-KFRAC:0] corr;  // rounded |kappa| in pixel codes
  logic signed [31:0]  res;

  always_comb begin
    xm_cur  = in_beat.sof ? 2'd0 : xm;
    kap_use = in_beat.sof ? kappa_q  : kap_f;
    pat_use = in_beat.sof ? band_pat : pat_f;
    en_use  = in_beat.sof ? enable   : en_f;
    corr    = (KAPPA_W-KFRAC+1)'(({1'b0, kap_use} + (KAPPA_W+1)'(2**(KFRAC-1))) >> KFRAC);
    if (pat_use[xm_cur])
      res = $signed(32'(in_beat.data)) - $signed(32'(corr));
    else
      res = $signed(32'(in_beat.data)) + $signed(32'(corr));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xm        <= '0;
      kap_f     <= '0;
      pat_f     <= 4'b0011;
      en_f      <= 1'b0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        xm <= in_beat.eol ? 2'd0 : xm_cur + 2'd1;
        if (in_beat.sof) begin
          kap_f <= kappa_q;
          pat_f <= band_pat;
          en_f  <= enable;
        end
        out_beat.sof  <= in_beat.sof;
        out_beat.eol  <= in_beat.eol;
        out_beat.data <= en_use ? clamp_pix(res) : in_beat.data;
      end
    end
  end
endmodule
