// tb_pbn_estimator: self-checking test of the banding estimator.
//
// Frames are synthesised as a smooth scene (a ramp along x, a step edge in
// some rows) plus a period-4 square wave of known amplitude and phase, with
// optional random noise. The expected estimate is computed here directly
// from the frame with the same integer arithmetic (Eq. 5 and 6 per row,
// average over rows), and for noise-free frames also checked against the
// true amplitude (kappa_q == 16 * kappa). The phase pattern is checked
// against the wave that was added. A frame with theta = 0 has no flat
// window and must keep the previous estimate. The delay from the last pixel
// to est_valid is checked against its bound.
module tb_pbn_estimator;
  import denoise_pkg::*;

  localparam int W = 48;
  localparam int H = 8;
  localparam int KFRAC = 4;
  localparam int BLANK = 6;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid;
  pix_beat_t  in_beat;
  pix_t       theta;
  logic [PIX_W+KFRAC-1:0] kappa_q;
  band_pat_t  band_pat;
  logic       est_valid;
  logic [$clog2(H+1)-1:0] est_rows;
  logic       row_overrun;

  pbn_estimator #(.IMG_W(W), .IMG_H(H), .KFRAC(KFRAC)) dut (
    .clk, .rst_n, .in_valid, .in_beat, .theta,
    .kappa_q, .band_pat, .est_valid, .est_rows, .row_overrun
  );

  int checks = 0;
  int failures = 0;
  int img [H][W];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Build a frame: ramp + optional edge + wave(kappa, phase) + noise.
  task automatic make_frame(input int kappa, input int ph, input int noise, input bit with_edge);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int v;
        v = 1500 + x + 20 * y;
        if (with_edge && y % 2 == 1 && x >= 20) v += 600;
        v += ((((x + ph) % 4) < 2) ? kappa : -kappa);
        if (noise > 0) v += int'($urandom_range(2 * noise)) - noise;
        img[y][x] = v;
      end
  endtask

  // Reference estimate, computed straight from Eq. 5 and 6.
  function automatic int ref_kappa(input int th, output int rows);
    longint fsum = 0;
    rows = 0;
    for (int y = 0; y < H; y++) begin
      longint num = 0;
      int den = 0;
      for (int i = 2; i <= W - 3; i++) begin
        int a, d;
        a = img[y][i-2] + img[y][i+2] - 2 * img[y][i];
        if (a < 0) a = -a;
        d = img[y][i+2] - img[y][i-2];
        if (d < 0) d = -d;
        if (d < th) begin
          num += a;
          den++;
        end
      end
      if (den > 0) begin
        fsum += (num << (KFRAC - 2)) / den;
        rows++;
      end
    end
    return (rows > 0) ? int'(fsum / rows) : -1;
  endfunction

  function automatic band_pat_t ref_pat(input int th);
    longint d0 = 0, d1 = 0;
    for (int y = 0; y < H; y++)
      for (int i = 2; i <= W - 3; i++) begin
        int d;
        d = img[y][i+2] - img[y][i-2];
        if (d < 0) d = -d;
        if (d < th) begin
          if (i % 4 == 0) d0 += img[y][i+2] - img[y][i];
          if (i % 4 == 1) d1 += img[y][i+2] - img[y][i];
        end
      end
    return {~(d1 < 0), ~(d0 < 0), (d1 < 0), (d0 < 0)};
  endfunction

  int last_pix_cycle;
  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic send_frame();
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        in_valid     <= 1'b1;
        in_beat.sof  <= (x == 0 && y == 0);
        in_beat.eol  <= (x == W - 1);
        in_beat.data <= pix_t'(img[y][x]);
        @(posedge clk);
      end
      in_valid <= 1'b0;
      in_beat  <= '0;
      if (y == H - 1) last_pix_cycle = cycle;
      else repeat (BLANK) @(posedge clk);
    end
  endtask

  // Send a frame and wait for the estimate; compare.
  task automatic run_frame(input int kappa, input int ph, input int noise, input bit with_edge,
                           input int th, input bit exact);
    int exp_k, exp_rows, lat;
    band_pat_t exp_p;
    logic [PIX_W+KFRAC-1:0] prev_k;
    band_pat_t prev_p;
    prev_k = kappa_q;
    prev_p = band_pat;
    make_frame(kappa, ph, noise, with_edge);
    exp_k = ref_kappa(th, exp_rows);
    exp_p = ref_pat(th);
    theta = pix_t'(th);
    send_frame();
    while (!est_valid) @(posedge clk);
    lat = cycle - last_pix_cycle;
    check(lat <= 2 * (PIX_W + 1 + $clog2(W + 1) + 2) + 12,
          $sformatf("estimate latency %0d cycles", lat));
    check(int'(est_rows) == exp_rows, $sformatf("rows %0d exp %0d", est_rows, exp_rows));
    if (exp_rows > 0) begin
      check(int'(kappa_q) == exp_k, $sformatf("kappa_q %0d exp %0d (kappa %0d ph %0d noise %0d)",
            kappa_q, exp_k, kappa, ph, noise));
      check(band_pat == exp_p, $sformatf("pattern %b exp %b", band_pat, exp_p));
      if (exact) begin
        band_pat_t true_p;
        for (int r = 0; r < 4; r++) true_p[r] = (((r + ph) % 4) < 2);
        check(int'(kappa_q) == 16 * kappa, $sformatf("kappa_q %0d true %0d", kappa_q, 16 * kappa));
        check(band_pat == true_p, $sformatf("pattern %b true %b", band_pat, true_p));
      end
    end else begin
      check(kappa_q == prev_k && band_pat == prev_p, "estimate kept when no row is flat");
    end
    repeat (10) @(posedge clk);
  endtask

  initial begin
    in_valid = 0;
    in_beat  = '0;
    theta    = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // Noise-free frames: every phase, several amplitudes, with edges.
    run_frame(8, 0, 0, 1'b0, 100, 1'b1);
    run_frame(5, 1, 0, 1'b1, 100, 1'b1);
    run_frame(12, 2, 0, 1'b1, 100, 1'b1);
    run_frame(3, 3, 0, 1'b1, 100, 1'b1);
    // No flat window at all: estimate kept.
    run_frame(9, 1, 0, 1'b0, 0, 1'b0);
    // Noisy frames, compared with the reference arithmetic.
    for (int n = 0; n < 6; n++)
      run_frame(int'($urandom_range(2, 30)), int'($urandom_range(3)), 4, 1'b1, 60, 1'b0);
    check(!row_overrun, "no row overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
