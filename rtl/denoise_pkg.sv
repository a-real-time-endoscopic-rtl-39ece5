// denoise_pkg: types and constants shared by the raw-domain denoiser.
//
// Raw pixels travel as a one-pixel-per-beat stream (pix_beat_t) with a
// valid strobe beside it. A beat carries start-of-frame and end-of-line
// flags, so every stage can track its own (x, y) position. There is no
// backpressure: a sensor cannot be stalled, so every stage accepts a beat
// on every cycle.
//
// The 12-bit fixed-point width of the CNN follows the paper. The raw pixel
// width is not given there; 12 bits is this design's choice.
package denoise_pkg;

  // Raw pixel width (design choice, see above).
  parameter int unsigned PIX_W = 12;
  // Fixed-point width of CNN weights and activations (from the paper).
  parameter int unsigned Q_W   = 12;

  typedef logic [PIX_W-1:0] pix_t;
  typedef logic signed [Q_W-1:0] q12_t;

  // One beat of the raw pixel stream.
  typedef struct packed {
    logic sof;   // first pixel of a frame
    logic eol;   // last pixel of a line
    pix_t data;  // raw sample
  } pix_beat_t;

  // Band sign pattern of the period-4 square wave: bit r is 1 where the
  // wave is positive at x mod 4 == r.
  typedef logic [3:0] band_pat_t;

  // Saturate a signed value to the unsigned pixel range.
  function automatic pix_t clamp_pix(input logic signed [31:0] v);
    if (v < 0) return '0;
    if (v > 32'(2**PIX_W - 1)) return '1;
    return pix_t'(v);
  endfunction

endpackage
