// tb_pbn_remover: self-checking test of the banding subtraction.
//
// Streams frames of random pixels (including values near 0 and full scale,
// to reach the clamp) with random amplitude, phase pattern and enable. Each
// output is compared with in - s(x mod 4) * round(kappa), clamped, where s
// is +1 where the pattern bit is set. The estimate inputs are changed in
// the middle of a frame to check that a frame keeps the values sampled at
// its start, and the one-cycle latency is checked on every beat.
module tb_pbn_remover;
  import denoise_pkg::*;

  localparam int W = 10;
  localparam int H = 3;
  localparam int KFRAC = 4;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic enable;
  logic [PIX_W+KFRAC-1:0] kappa_q;
  band_pat_t band_pat;
  logic in_valid, out_valid;
  pix_beat_t in_beat, out_beat;

  pbn_remover #(.KFRAC(KFRAC)) dut (
    .clk, .rst_n, .enable, .kappa_q, .band_pat,
    .in_valid, .in_beat, .out_valid, .out_beat
  );

  int checks = 0, failures = 0;
  int clamps = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Expected output queue, filled when a beat is sent.
  pix_beat_t exp_q[$];

  // One cycle of latency: out_valid follows in_valid by exactly one cycle.
  logic in_valid_d = 1'b0;
  always @(posedge clk) begin
    in_valid_d <= in_valid;
    if (rst_n && (out_valid || in_valid_d))
      check(out_valid == in_valid_d, "latency is one cycle");
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      pix_beat_t e;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(out_beat == e, $sformatf("out %0d/%b%b exp %0d/%b%b",
              out_beat.data, out_beat.sof, out_beat.eol, e.data, e.sof, e.eol));
      end
    end
  end

  initial begin
    in_valid = 0;
    in_beat  = '0;
    enable   = 0;
    kappa_q  = '0;
    band_pat = 4'b0011;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < 40; f++) begin
      logic [PIX_W+KFRAC-1:0] k_f;
      band_pat_t p_f;
      logic e_f;
      int corr;
      k_f = (f % 5 == 0) ? '0 : (PIX_W+KFRAC)'($urandom_range(0, 16 * 300));
      p_f = band_pat_t'($urandom_range(15));
      e_f = (f % 4 != 3);
      corr = (int'(k_f) + 8) / 16;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          pix_beat_t b, e;
          int v, r;
          case ($urandom_range(3))
            0: v = $urandom_range(0, 200);
            1: v = $urandom_range(4095 - 200, 4095);
            default: v = $urandom_range(0, 4095);
          endcase
          b.sof = (x == 0 && y == 0);
          b.eol = (x == W - 1);
          b.data = pix_t'(v);
          r = p_f[x % 4] ? v - corr : v + corr;
          if (r < 0 || r > 4095) clamps++;
          if (r < 0) r = 0;
          if (r > 4095) r = 4095;
          e = b;
          e.data = e_f ? pix_t'(r) : pix_t'(v);
          exp_q.push_back(e);
          // Inputs seen at sof are the frame's; later changes must not matter.
          if (b.sof) begin
            kappa_q  <= k_f;
            band_pat <= p_f;
            enable   <= e_f;
          end else begin
            kappa_q  <= (PIX_W+KFRAC)'($urandom);
            band_pat <= band_pat_t'($urandom);
            enable   <= 1'($urandom);
          end
          in_valid <= 1'b1;
          in_beat  <= b;
          @(posedge clk);
          // occasional idle cycle
          if ($urandom_range(3) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
        end
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    check(exp_q.size() == 0, "all beats came out");
    check(clamps > 0, "clamp was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
