// tb_endo_denoise_full: end-to-end test of the raw-domain denoiser, with every parameter of the top
// at its default (400 x 400 frames, 16 x 16 array).
//
// The testbench plays sensor, host and U-Net sequencer. It loads random
// per-pixel FPN slopes and offsets, then streams frames, at analog gains
// of 1x, 2x and 4x in turn, built as
//
//   raw = clamp(scene + K * g * t + B + kappa * square_wave(x))
//
// and checks that each cleaned pixel leaves 4 cycles after its raw pixel,
// and every cleaned pixel against a bit-exact model of the chain
// worked out here: the banding estimate of the previous frame (Eq. 5 and 6
// computed directly from the raw frame), the banding subtraction and the
// FPN subtraction. For frames whose banding was estimated, the cleaned
// frame must also be close to the scene itself (mean absolute error below
// one code), while the first frame, corrected with no estimate yet, must
// not be. The frame schedule switches PBN and FPN removal off and on,
// includes a frame with no flat region (the estimate must be kept) and a
// dark frame that drives the output clamp. Finally the testbench acts as
// the U-Net sequencer for one point-wise layer: it loads weights into the
// systolic array, feeds it vectors of cleaned pixels, and checks the
// requantized 12-bit outputs. Each mechanism is counted and must occur.
module tb_endo_denoise_full;
  import denoise_pkg::*;

  localparam int W = 400;
  localparam int H = 400;
  localparam int SAR = 16;
  localparam int SAC = 16;
  localparam int KFRAC = 4;
  localparam int CW = 12;
  localparam int GAIN_FRAC = 4, K_SHIFT = 16;
  localparam int ACC_W = 32;
  localparam int AW = $clog2(W * H);
  localparam int HBLANK = 8;
  localparam int VBLANK = 120;
  localparam int NFRAMES = 7;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic pbn_enable, fpn_enable;
  pix_t pbn_theta;
  logic [7:0] analog_gain;
  logic [15:0] exposure;
  logic raw_valid;
  pix_beat_t raw_beat;
  logic coef_wr_en;
  logic [AW-1:0] coef_wr_addr;
  logic signed [CW-1:0] coef_wr_k, coef_wr_b;
  logic [PIX_W+KFRAC-1:0] pbn_kappa_q;
  band_pat_t pbn_band_pat;
  logic pbn_est_valid;
  logic [$clog2(H+1)-1:0] pbn_est_rows;
  logic pbn_row_overrun;
  logic clean_valid;
  pix_beat_t clean_beat;
  logic sa_w_load;
  logic [$clog2(SAR)-1:0] sa_w_row;
  q12_t sa_w_data [SAC];
  logic sa_in_valid;
  q12_t sa_in_act [SAR];
  logic signed [ACC_W-1:0] sa_in_psum [SAC];
  logic [4:0] rq_shift;
  logic rq_relu;
  logic sa_busy, sa_acc_valid, sa_q_valid;
  logic signed [ACC_W-1:0] sa_acc [SAC];
  q12_t sa_q [SAC];

  endo_denoise_top dut (
    .clk, .rst_n, .pbn_enable, .fpn_enable, .pbn_theta, .analog_gain, .exposure,
    .raw_valid, .raw_beat, .coef_wr_en, .coef_wr_addr, .coef_wr_k, .coef_wr_b,
    .pbn_kappa_q, .pbn_band_pat, .pbn_est_valid, .pbn_est_rows, .pbn_row_overrun,
    .clean_valid, .clean_beat, .sa_w_load, .sa_w_row, .sa_w_data, .sa_in_valid,
    .sa_in_act, .sa_in_psum, .rq_shift, .rq_relu, .sa_busy, .sa_acc_valid, .sa_acc,
    .sa_q_valid, .sa_q
  );

  int checks = 0, failures = 0;
  // mechanism counters
  int n_pbn_applied = 0, n_pbn_bypass = 0, n_fpn_bypass = 0, n_clamp = 0;
  int n_est_update = 0, n_est_kept = 0, n_sa_vectors = 0, n_relu = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int mk [W*H];
  int mb [W*H];
  int raw [H][W];
  int scene [H][W];

  // model state: estimate in use
  int kq_model = 0;
  band_pat_t pat_model = 4'b0011;

  // expected and captured output
  int exp_q[$];
  int got [H][W];
  int got_idx = 0;

  // Cycle stamps: every raw pixel must leave as a clean pixel exactly
  // LAT_PIX cycles later, so the chain sustains one pixel per cycle.
  localparam int LAT_PIX = 4;
  int cycle = 0;
  int stamp_q[$];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && raw_valid) stamp_q.push_back(cycle);
    if (rst_n && clean_valid) begin
      int t0;
      t0 = (stamp_q.size() > 0) ? stamp_q.pop_front() : -100;
      check(cycle - t0 == LAT_PIX, $sformatf("pixel latency %0d exp %0d", cycle - t0, LAT_PIX));
    end
  end

  int n_est_pulses = 0;
  always @(posedge clk) if (rst_n && pbn_est_valid) n_est_pulses++;

  always @(posedge clk) begin
    if (rst_n && clean_valid) begin
      int e;
      if (exp_q.size() == 0) check(1'b0, "unexpected output pixel");
      else begin
        e = exp_q.pop_front();
        check(int'(clean_beat.data) == e, $sformatf("pixel %0d: %0d exp %0d", got_idx,
              clean_beat.data, e));
      end
      got[got_idx / W][got_idx % W] = int'(clean_beat.data);
      got_idx++;
    end
  end

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // Reference estimator, straight from Eq. 5 and 6 (and the phase sums).
  task automatic ref_estimate(input int th, output int kq, output band_pat_t pat, output int rows);
    longint fsum = 0, d0 = 0, d1 = 0;
    rows = 0;
    for (int y = 0; y < H; y++) begin
      longint num = 0;
      int den = 0;
      for (int i = 2; i <= W - 3; i++) begin
        int a, d;
        a = raw[y][i-2] + raw[y][i+2] - 2 * raw[y][i];
        if (a < 0) a = -a;
        d = raw[y][i+2] - raw[y][i-2];
        if (d < 0) d = -d;
        if (d < th) begin
          num += a;
          den++;
          if (i % 4 == 0) d0 += raw[y][i+2] - raw[y][i];
          if (i % 4 == 1) d1 += raw[y][i+2] - raw[y][i];
        end
      end
      if (den > 0) begin
        fsum += (num << (KFRAC - 2)) / den;
        rows++;
      end
    end
    kq = (rows > 0) ? int'(fsum / rows) : 0;
    pat = {~(d1 < 0), ~(d0 < 0), (d1 < 0), (d0 < 0)};
  endtask

  task automatic run_frame(input int f, input int kappa, input int ph, input int th,
                           input bit pen, input bit fen, input bit dark);
    int g, t, corr, kq_new, rows_new, pulses0;
    longint gt;
    band_pat_t pat_new;
    real mae;
    g = (f % 3 == 0) ? 16 : (f % 3 == 1) ? 32 : 64;   // analog gain 1x, 2x, 4x (GAIN_FRAC = 4)
    t = 1000 + 100 * f;     // exposure
    gt = longint'(g) * longint'(t);
    corr = (kq_model + 8) / 16;
    if (pen && corr != 0) n_pbn_applied++;
    if (!pen) n_pbn_bypass++;
    if (!fen) n_fpn_bypass++;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int a, s, fpn, p, o;
        a = y * W + x;
        s = dark ? 2 : 800 + 2 * (x % 64) + 10 * (y % 32) + ((y % 2 == 1 && x >= W / 2) ? 500 : 0);
        scene[y][x] = s;
        fpn = int'(((longint'(mk[a]) * gt) + (64'sd1 <<< (K_SHIFT + GAIN_FRAC - 1)))
                   >>> (K_SHIFT + GAIN_FRAC)) + mb[a];
        raw[y][x] = clampi(s + fpn + (((((x + ph) % 4) < 2)) ? kappa : -kappa), 0, 4095);
        // model of the chain
        p = raw[y][x];
        if (pen) begin
          int r;
          r = pat_model[x % 4] ? p - corr : p + corr;
          if (r < 0 || r > 4095) n_clamp++;
          p = clampi(r, 0, 4095);
        end
        if (fen) begin
          o = p - fpn;
          if (o < 0 || o > 4095) n_clamp++;
          o = clampi(o, 0, 4095);
        end else o = p;
        exp_q.push_back(o);
      end
    // drive the frame
    pulses0 = n_est_pulses;
    pbn_theta = pix_t'(th);
    analog_gain = 8'(g);
    exposure = 16'(t);
    got_idx = 0;
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        raw_valid <= 1'b1;
        raw_beat.sof <= (x == 0 && y == 0);
        raw_beat.eol <= (x == W - 1);
        raw_beat.data <= pix_t'(raw[y][x]);
        pbn_enable <= pen;
        fpn_enable <= fen;
        @(posedge clk);
      end
      raw_valid <= 1'b0;
      raw_beat <= '0;
      repeat (HBLANK) @(posedge clk);
    end
    // estimate of this frame
    ref_estimate(th, kq_new, pat_new, rows_new);
    begin
      int wait_c = 0;
      while (n_est_pulses == pulses0 && wait_c < VBLANK) begin
        @(posedge clk);
        wait_c++;
      end
      check(n_est_pulses == pulses0 + 1,
            $sformatf("frame %0d: one estimate, within the vertical blanking", f));
    end
    check(int'(pbn_est_rows) == rows_new, $sformatf("frame %0d: rows %0d exp %0d", f,
          pbn_est_rows, rows_new));
    if (rows_new > 0) begin
      kq_model = kq_new;
      pat_model = pat_new;
      n_est_update++;
    end else n_est_kept++;
    repeat (2) @(posedge clk);
    check(int'(pbn_kappa_q) == kq_model, $sformatf("frame %0d: kappa_q %0d exp %0d", f,
          pbn_kappa_q, kq_model));
    check(pbn_band_pat == pat_model, $sformatf("frame %0d: pattern %b exp %b", f,
          pbn_band_pat, pat_model));
    repeat (VBLANK) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("frame %0d: all pixels out", f));
    // quality against the scene
    mae = 0.0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        mae += real'((got[y][x] > scene[y][x]) ? got[y][x] - scene[y][x] : scene[y][x] - got[y][x]);
    mae = mae / real'(W * H);
    $display("frame %0d: kappa %0d, estimate kappa_q %0d (%0.2f), MAE vs scene %0.3f", f, kappa,
             pbn_kappa_q, real'(pbn_kappa_q) / 16.0, mae);
    if (pen && fen && !dark && corr == kappa) check(mae < 1.0, $sformatf("frame %0d: MAE %0.3f", f, mae));
    if (pen && fen && !dark && corr == 0 && kappa > 0) check(mae >= 0.9 * kappa,
          $sformatf("frame %0d: uncorrected MAE %0.3f", f, mae));
  endtask

  // One point-wise layer on the systolic array, fed with cleaned pixels.
  task automatic run_pointwise();
    int wm [SAR][SAC];
    int lat, sent;
    for (int k = 0; k < SAR; k++) begin
      for (int j = 0; j < SAC; j++) begin
        wm[k][j] = int'($urandom_range(0, 255)) - 128;
        sa_w_data[j] <= q12_t'(wm[k][j]);
      end
      sa_w_load <= 1'b1;
      sa_w_row <= ($clog2(SAR))'(k);
      @(posedge clk);
    end
    sa_w_load <= 1'b0;
    rq_shift <= 5'd10;
    rq_relu <= 1'b1;
    sent = 0;
    fork
      begin
        for (int n = 0; n < 24; n++) begin
          for (int k = 0; k < SAR; k++) begin
            int idx;
            idx = (n * SAR + k) % (W * H);
            // odd vectors negated, so both signs reach the ReLU
            sa_in_act[k] <= q12_t'((n % 2 == 1) ? 2048 - got[idx / W][idx % W]
                                                : got[idx / W][idx % W] - 2048);
          end
          for (int j = 0; j < SAC; j++) sa_in_psum[j] <= ACC_W'(j * 100);
          sa_in_valid <= 1'b1;
          @(posedge clk);
          sent++;
        end
        sa_in_valid <= 1'b0;
      end
      begin
        int n = 0;
        lat = 0;
        while (n < 24) begin
          @(posedge clk);
          if (n == 0) lat++;
          if (sa_q_valid) begin
            for (int j = 0; j < SAC; j++) begin
              longint acc, r;
              acc = j * 100;
              for (int k = 0; k < SAR; k++) begin
                int idx;
                idx = (n * SAR + k) % (W * H);
                acc += longint'((n % 2 == 1) ? 2048 - got[idx / W][idx % W]
                                             : got[idx / W][idx % W] - 2048) * longint'(wm[k][j]);
              end
              r = (acc + 512) >>> 10;
              if (r < 0) begin r = 0; n_relu++; end
              if (r > 2047) r = 2047;
              check(int'(sa_q[j]) == int'(r), $sformatf("pw vec %0d col %0d: %0d exp %0d", n, j,
                    sa_q[j], r));
            end
            n++;
            n_sa_vectors++;
          end
        end
      end
    join
    // First result: array latency SAR + SAC - 1 plus one cycle in the
    // requantizer. lat counts edges from the one that samples the first
    // vector, and a register written at an edge is seen here at the next.
    check(lat - 1 == SAR + SAC, $sformatf("array + requant latency %0d exp %0d", lat - 1, SAR + SAC));
  endtask

  initial begin
    pbn_enable = 0; fpn_enable = 0; pbn_theta = 100; analog_gain = 8'd32; exposure = 16'd1000;
    raw_valid = 0; raw_beat = '0; coef_wr_en = 0; coef_wr_addr = '0; coef_wr_k = '0; coef_wr_b = '0;
    sa_w_load = 0; sa_w_row = '0; sa_in_valid = 0; rq_shift = '0; rq_relu = 0;
    for (int j = 0; j < SAC; j++) begin sa_w_data[j] = '0; sa_in_psum[j] = '0; end
    for (int k = 0; k < SAR; k++) sa_in_act[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // host loads the calibration
    for (int a = 0; a < W * H; a++) begin
      mk[a] = int'($urandom_range(0, 100)) - 50;
      mb[a] = int'($urandom_range(0, 7)) + 20;
      coef_wr_en <= 1'b1;
      coef_wr_addr <= AW'(a);
      coef_wr_k <= CW'(mk[a]);
      coef_wr_b <= CW'(mb[a]);
      @(posedge clk);
    end
    coef_wr_en <= 1'b0;
    @(posedge clk);
    //         f kappa ph  th  pbn  fpn  dark
    run_frame(0, 10, 1, 100, 1'b1, 1'b1, 1'b0);  // no estimate yet
    run_frame(1, 10, 1, 100, 1'b1, 1'b1, 1'b0);  // corrected with frame 0's estimate
    run_frame(2, 10, 1, 100, 1'b0, 1'b1, 1'b0);  // PBN removal off
    run_frame(3, 10, 1, 100, 1'b1, 1'b0, 1'b0);  // FPN removal off
    run_frame(4, 6, 3, 0, 1'b1, 1'b1, 1'b0);     // no flat window: estimate kept
    run_frame(5, 6, 3, 100, 1'b1, 1'b1, 1'b1);   // dark frame, drives the clamp
    run_frame(6, 6, 3, 100, 1'b1, 1'b1, 1'b0);  // corrected with frame 5's estimate
    run_pointwise();
    check(!pbn_row_overrun, "no row overrun");
    $display("mechanisms: pbn_applied=%0d pbn_bypass=%0d fpn_bypass=%0d clamp=%0d est_update=%0d est_kept=%0d sa_vectors=%0d relu=%0d",
             n_pbn_applied, n_pbn_bypass, n_fpn_bypass, n_clamp, n_est_update, n_est_kept,
             n_sa_vectors, n_relu);
    check(n_pbn_applied > 0, "PBN correction happened");
    check(n_pbn_bypass > 0, "PBN bypass happened");
    check(n_fpn_bypass > 0, "FPN bypass happened");
    check(n_clamp > 0, "output clamp happened");
    check(n_est_update > 0, "estimate update happened");
    check(n_est_kept > 0, "estimate kept happened");
    check(n_sa_vectors > 0, "systolic array ran");
    check(n_relu > 0, "ReLU happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (W * H * 3 + NFRAMES * ((W + HBLANK) * H + 2 * VBLANK + 10) + 4000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
