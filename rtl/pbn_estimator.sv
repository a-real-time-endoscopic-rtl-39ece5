// pbn_estimator: measures the periodic banding noise (PBN) of a raw frame.
//
// The banding is a vertical square wave with a period of 4 pixels along x:
// +kappa on two adjacent columns, -kappa on the next two. Pixels two apart
// share a Bayer phase and carry opposite signs of the wave, so in a flat
// region the second difference I(i-2) + I(i+2) - 2 I(i) equals +-4 kappa.
// For every row y this block computes, following the paper's Eq. 5 and 6,
//
//   4 kappa_y = sum_i |I(i-2) + I(i+2) - 2 I(i)| * w_i / sum_i w_i
//   w_i       = 1 if |I(i+2) - I(i-2)| < theta else 0
//
// over the centres i = 2 .. IMG_W-3 (the windows that lie inside the row),
// and averages kappa_y over the rows of the frame. Rows with no flat window
// (sum w = 0) are left out of the average; this is a choice of this design.
//
// The phase of the wave is found from the sign of I(i+2) - I(i), which is
// -2 kappa where the wave is positive at i. This design sums that difference
// over all flat windows with i mod 4 == 0 and with i mod 4 == 1 over the
// whole frame, and takes the wave as positive at x mod 4 == r when the sum
// for r is negative; x mod 4 == 2, 3 then have the opposite signs of 0, 1.
// Summing over the frame (rather than voting per window) is this design's
// choice.
//
// Interface: a valid-qualified pixel stream (sof / eol flags, no
// backpressure) and the flatness threshold theta. At the end of the frame's
// last row the estimate appears on kappa_q (kappa with KFRAC fractional
// bits) and band_pat (bit r set = wave positive at x mod 4 == r), with a
// one-cycle est_valid pulse. A frame in which no row had a flat window keeps
// the previous estimate and pulses est_valid with est_rows == 0.
//
// Timing: one pixel per cycle in. Each row end starts a serial division of
// RNUM_W + 2 cycles (26 at the defaults), so a row, pixels plus blanking,
// must last longer than that; a row that ends while the previous division
// still runs is dropped and flagged on row_overrun. The estimate is ready
// about RNUM_W + FS_W + 6 cycles (56 at the defaults) after the frame's last
// pixel, well inside the vertical blanking.
//
// Lint note: the assertions below use rst_n in `disable iff`, so the
// linter reports rst_n as a reset used both synchronously and
// asynchronously (SYNCASYNCNET). The logic itself uses rst_n only as an asynchronous reset.
module pbn_estimator
  import denoise_pkg::*;
#(
  parameter int unsigned IMG_W = 400,
  parameter int unsigned IMG_H = 400,
  parameter int unsigned KFRAC = 4,
  parameter int unsigned KAPPA_W = PIX_W + KFRAC
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  pix_beat_t          in_beat,
  input  pix_t               theta,
  output logic [KAPPA_W-1:0] kappa_q,
  output band_pat_t          band_pat,
  output logic               est_valid,
  output logic [$clog2(IMG_H+1)-1:0] est_rows,
  output logic               row_overrun
);
  localparam int unsigned XW     = $clog2(IMG_W + 1);
  localparam int unsigned YW     = $clog2(IMG_H + 1);
  localparam int unsigned A_W    = PIX_W + 1;            // |second difference|
  localparam int unsigned RS_W   = A_W + XW;             // row sum of a*w
  localparam int unsigned RNUM_W = RS_W + KFRAC - 2;     // scaled row numerator
  localparam int unsigned QY_W   = A_W + KFRAC - 2;      // per-row kappa (Q.KFRAC)
  localparam int unsigned FS_W   = QY_W + YW;            // frame sum of kappa_y
  localparam int unsigned D_W    = PIX_W + 2 + XW + YW;  // signed phase sums

  // ---------------------------------------------------------------- position
  logic [XW-1:0] x;          // x of the incoming beat
  logic [YW-1:0] y;
  logic [XW-1:0] x_cur;
  logic [YW-1:0] y_cur;

  always_comb begin
    x_cur = in_beat.sof ? '0 : x;
    y_cur = in_beat.sof ? '0 : y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (in_valid) begin
      if (in_beat.eol) begin
        x <= '0;
        y <= y_cur + 1'b1;
      end else begin
        x <= x_cur + 1'b1;
        y <= y_cur;
      end
    end
  end

  // ---------------------------------------------- 5-pixel window along a row
  // p1 = I(x-1) ... p4 = I(x-4); the incoming pixel is I(x) = I(i+2) for the
  // window centre i = x-2.
  pix_t p1, p2, p3, p4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {p1, p2, p3, p4} <= '0;
    end else if (in_valid) begin
      p4 <= p3;
      p3 <= p2;
      p2 <= p1;
      p1 <= in_beat.data;
    end
  end

  logic               win_ok;     // window lies inside the row
  logic signed [PIX_W+2:0] sd;    // I(i-2) + I(i+2) - 2 I(i)
  logic [A_W-1:0]     a_abs;
  logic signed [PIX_W:0] dfar;    // I(i+2) - I(i-2)
  logic signed [PIX_W:0] dnear;   // I(i+2) - I(i)
  logic               w;
  logic [1:0]         i_mod4;

  always_comb begin
    win_ok = in_valid && (x_cur >= XW'(4));
    sd     = $signed({3'b000, p4}) + $signed({3'b000, in_beat.data})
           - $signed({2'b00, p2, 1'b0});
    a_abs  = A_W'(sd < 0 ? -sd : sd);
    dfar   = $signed({1'b0, in_beat.data}) - $signed({1'b0, p4});
    dnear  = $signed({1'b0, in_beat.data}) - $signed({1'b0, p2});
    w      = win_ok && ((dfar < 0 ? -dfar : dfar) < $signed({1'b0, theta}));
    i_mod4 = 2'(x_cur - XW'(2));
  end

  // -------------------------------------------------------- row accumulators
  logic [RS_W-1:0] row_num, row_num_nx;
  logic [XW-1:0]   row_den, row_den_nx;
  logic signed [D_W-1:0] dsum0, dsum1;   // frame sums for phase

  always_comb begin
    row_num_nx = row_num + (w ? RS_W'(a_abs) : '0);
    row_den_nx = row_den + (w ? XW'(1) : '0);
  end

  // Row hand-off to the divider.
  logic            rdiv_start;
  logic [RNUM_W-1:0] rdiv_num;
  logic [XW-1:0]   rdiv_den;
  logic            rdiv_busy, rdiv_done;
  logic [RNUM_W-1:0] rdiv_quo;
  logic            rdiv_last;     // the division belongs to the frame's last row
  logic            row_skip_last; // last row ended with no flat window

  logic            fdiv_start;
  logic [FS_W-1:0] fdiv_num;
  logic [YW-1:0]   fdiv_den;
  logic            fdiv_busy, fdiv_done;
  logic [FS_W-1:0] fdiv_quo;

  logic [FS_W-1:0] frame_sum;
  logic [YW-1:0]   frame_rows;
  logic            frame_close;   // all rows of the frame are accounted for
  logic signed [D_W-1:0] dsum0_f, dsum1_f; // phase sums of the closing frame

  logic row_end;
  assign row_end = in_valid && in_beat.eol;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_num       <= '0;
      row_den       <= '0;
      dsum0         <= '0;
      dsum1         <= '0;
      rdiv_start    <= 1'b0;
      rdiv_num      <= '0;
      rdiv_den      <= '0;
      rdiv_last     <= 1'b0;
      row_skip_last <= 1'b0;
      row_overrun   <= 1'b0;
      dsum0_f       <= '0;
      dsum1_f       <= '0;
    end else begin
      rdiv_start    <= 1'b0;
      row_skip_last <= 1'b0;
      row_overrun   <= 1'b0;
      if (in_valid) begin
        // Phase sums, cleared at the start of each frame.
        if (in_beat.sof) begin
          dsum0 <= '0;
          dsum1 <= '0;
        end
        if (w && i_mod4 == 2'd0)
          dsum0 <= (in_beat.sof ? '0 : dsum0) + D_W'(dnear);
        if (w && i_mod4 == 2'd1)
          dsum1 <= (in_beat.sof ? '0 : dsum1) + D_W'(dnear);
        if (row_end) begin
          row_num <= '0;
          row_den <= '0;
          if (y_cur == YW'(IMG_H - 1)) begin
            dsum0_f <= (w && i_mod4 == 2'd0) ? dsum0 + D_W'(dnear) : dsum0;
            dsum1_f <= (w && i_mod4 == 2'd1) ? dsum1 + D_W'(dnear) : dsum1;
          end
          if (row_den_nx == '0) begin
            row_skip_last <= (y_cur == YW'(IMG_H - 1));
          end else if (rdiv_busy || rdiv_start) begin
            row_overrun   <= 1'b1;
            row_skip_last <= (y_cur == YW'(IMG_H - 1));
          end else begin
            rdiv_start <= 1'b1;
            rdiv_num   <= RNUM_W'(row_num_nx) << (KFRAC - 2);
            rdiv_den   <= row_den_nx;
            rdiv_last  <= (y_cur == YW'(IMG_H - 1));
          end
        end else begin
          row_num <= row_num_nx;
          row_den <= row_den_nx;
        end
      end
    end
  end

  serial_divider #(.NUM_W(RNUM_W), .DEN_W(XW)) u_row_div (
    .clk, .rst_n,
    .start (rdiv_start),
    .num   (rdiv_num),
    .den   (rdiv_den),
    .busy  (rdiv_busy),
    .done  (rdiv_done),
    .quo   (rdiv_quo)
  );

  // ------------------------------------------------------ frame accumulation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_sum   <= '0;
      frame_rows  <= '0;
      frame_close <= 1'b0;
      fdiv_start  <= 1'b0;
      fdiv_num    <= '0;
      fdiv_den    <= '0;
    end else begin
      fdiv_start  <= 1'b0;
      frame_close <= 1'b0;
      if (rdiv_done) begin
        frame_sum  <= frame_sum + FS_W'(rdiv_quo);
        frame_rows <= frame_rows + 1'b1;
        frame_close <= rdiv_last;
      end
      if (row_skip_last)
        frame_close <= 1'b1;
      if (frame_close) begin
        fdiv_start <= (frame_rows != '0);
        fdiv_num   <= frame_sum;
        fdiv_den   <= frame_rows;
        frame_sum  <= '0;
        frame_rows <= '0;
      end
    end
  end

  serial_divider #(.NUM_W(FS_W), .DEN_W(YW)) u_frame_div (
    .clk, .rst_n,
    .start (fdiv_start),
    .num   (fdiv_num),
    .den   (fdiv_den),
    .busy  (fdiv_busy),
    .done  (fdiv_done),
    .quo   (fdiv_quo)
  );

  // ----------------------------------------------------------------- result
  logic close_d;        // frame closed with no usable row
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kappa_q   <= '0;
      band_pat  <= 4'b0011;
      est_valid <= 1'b0;
      est_rows  <= '0;
      close_d   <= 1'b0;
    end else begin
      est_valid <= 1'b0;
      close_d   <= frame_close && (frame_rows == '0);
      if (close_d) begin
        est_valid <= 1'b1;
        est_rows  <= '0;
      end
      if (fdiv_done) begin
        kappa_q   <= (fdiv_quo > FS_W'(2**KAPPA_W - 1)) ? '1 : KAPPA_W'(fdiv_quo);
        band_pat  <= {~(dsum1_f < 0), ~(dsum0_f < 0), (dsum1_f < 0), (dsum0_f < 0)};
        est_valid <= 1'b1;
        est_rows  <= fdiv_den;
      end
    end
  end

  // A row must not end while the previous one is still being divided.
  // The frame division must finish before the next frame closes.
  a_frame_div: assert property (@(posedge clk) disable iff (!rst_n) fdiv_start |-> !fdiv_busy)
    else $error("pbn_estimator: frame division still running");

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !row_overrun)
    else $error("pbn_estimator: row ended while the previous row's division was running");

endmodule
