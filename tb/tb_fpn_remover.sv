// tb_fpn_remover: self-checking test of the FPN subtraction.
//
// Loads random per-pixel slopes K and offsets B into an fpn_coef_mem, then
// streams frames with random analog gain, exposure and enable. Each output
// is compared with in - (round(K * g * t / 2^(K_SHIFT+GAIN_FRAC)) + B),
// clamped to the pixel range, worked out here in 64-bit integers. Gain and
// exposure are changed in the middle of frames to check that a frame keeps
// the values sampled at its start. The three-cycle latency is checked.
module tb_fpn_remover;
  import denoise_pkg::*;

  localparam int W = 12;
  localparam int H = 4;
  localparam int CW = 12;
  localparam int GAIN_W = 8, GAIN_FRAC = 4, EXP_W = 16, K_SHIFT = 16;
  localparam int DEPTH = W * H;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic enable;
  logic [GAIN_W-1:0] analog_gain;
  logic [EXP_W-1:0] exposure;
  logic in_valid, out_valid;
  pix_beat_t in_beat, out_beat;
  logic rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic signed [CW-1:0] k, b, wr_k, wr_b;

  fpn_coef_mem #(.IMG_W(W), .IMG_H(H), .COEF_W(CW)) mem (
    .clk, .wr_en, .wr_addr, .wr_k, .wr_b, .rd_en, .rd_addr, .rd_k(k), .rd_b(b)
  );

  fpn_remover #(.IMG_W(W), .IMG_H(H), .COEF_W(CW), .GAIN_W(GAIN_W),
                .GAIN_FRAC(GAIN_FRAC), .EXP_W(EXP_W), .K_SHIFT(K_SHIFT)) dut (
    .clk, .rst_n, .enable, .analog_gain, .exposure, .in_valid, .in_beat,
    .coef_rd_en(rd_en), .coef_rd_addr(rd_addr), .coef_k(k), .coef_b(b),
    .out_valid, .out_beat
  );

  int checks = 0, failures = 0, clamps = 0;
  int mk [DEPTH];
  int mb [DEPTH];
  pix_beat_t exp_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [2:0] vhist = '0;
  always @(posedge clk) begin
    vhist <= {vhist[1:0], in_valid};
    if (rst_n && (out_valid || vhist[2]))
      check(out_valid == vhist[2], "latency is three cycles");
    if (rst_n && out_valid) begin
      pix_beat_t e;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(out_beat == e, $sformatf("out %0d exp %0d", out_beat.data, e.data));
      end
    end
  end

  initial begin
    in_valid = 0; in_beat = '0; enable = 0; analog_gain = '0; exposure = '0;
    wr_en = 0; wr_addr = '0; wr_k = '0; wr_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      mk[a] = $urandom_range(0, 4095) - 2048;
      mb[a] = $urandom_range(0, 300) - 50;
      wr_en <= 1'b1; wr_addr <= AW'(a); wr_k <= CW'(mk[a]); wr_b <= CW'(mb[a]);
      @(posedge clk);
    end
    wr_en <= 1'b0;
    for (int f = 0; f < 30; f++) begin
      int g, t, e_f;
      longint gt;
      g = $urandom_range(16, 255);
      t = $urandom_range(1, 4000);
      e_f = (f % 5 != 4);
      gt = longint'(g) * longint'(t);
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          pix_beat_t bt, ex;
          longint prod, fpn, r;
          int v, a;
          a = y * W + x;
          v = $urandom_range(0, 4095);
          bt.sof = (a == 0);
          bt.eol = (x == W - 1);
          bt.data = pix_t'(v);
          prod = longint'(mk[a]) * gt;
          fpn = ((prod + (64'sd1 <<< (K_SHIFT + GAIN_FRAC - 1))) >>> (K_SHIFT + GAIN_FRAC)) + mb[a];
          r = v - fpn;
          if (r < 0 || r > 4095) clamps++;
          if (r < 0) r = 0;
          if (r > 4095) r = 4095;
          ex = bt;
          ex.data = (e_f != 0) ? pix_t'(r) : pix_t'(v);
          exp_q.push_back(ex);
          if (bt.sof) begin
            analog_gain <= GAIN_W'(g); exposure <= EXP_W'(t); enable <= (e_f != 0);
          end else begin
            analog_gain <= GAIN_W'($urandom); exposure <= EXP_W'($urandom); enable <= 1'($urandom);
          end
          in_valid <= 1'b1;
          in_beat  <= bt;
          @(posedge clk);
          if ($urandom_range(4) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
        end
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
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
