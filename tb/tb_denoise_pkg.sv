// tb_denoise_pkg: self-checking test of the shared package.
//
// clamp_pix saturates a signed 32-bit value to the unsigned pixel range
// 0 .. 2^PIX_W - 1. It is checked at and around both ends of the range,
// at the extremes of the 32-bit input and on random values, against the
// expected result worked out here. The pixel beat layout is checked too.
module tb_denoise_pkg;
  import denoise_pkg::*;

  int checks = 0, failures = 0;
  localparam int MAXV = 2 ** PIX_W - 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int expect_clamp(input int v);
    return (v < 0) ? 0 : (v > MAXV) ? MAXV : v;
  endfunction

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    int vals [$];
    pix_beat_t b;
    vals = '{0, 1, -1, -2, MAXV, MAXV - 1, MAXV + 1, MAXV + 2, 2048, 32'h7fffffff, 32'h80000000};
    for (int n = 0; n < 2000; n++) vals.push_back(int'($urandom_range(0, 3 * MAXV)) - MAXV);
    foreach (vals[i]) begin
      pix_t r;
      r = clamp_pix(vals[i]);
      check(int'(r) == expect_clamp(vals[i]),
            $sformatf("clamp_pix(%0d) = %0d, expected %0d", vals[i], r, expect_clamp(vals[i])));
    end
    check(Q_W == 12, "12-bit fixed-point width");
    check($bits(pix_beat_t) == PIX_W + 2, "beat is {sof, eol, pixel}");
    b = '{sof: 1'b1, eol: 1'b0, data: pix_t'(5)};
    check(b[PIX_W+1] == 1'b1 && b[PIX_W] == 1'b0 && b[PIX_W-1:0] == 5, "beat field order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
