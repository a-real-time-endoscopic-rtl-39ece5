// tb_requant: self-checking test of the 12-bit requantizer.
//
// Feeds random 32-bit accumulators (small, large and extreme) with random
// shift amounts and ReLU settings. Each lane is compared with
// sat12(floor((acc + 2^(shift-1)) / 2^shift)), with the ReLU applied before
// saturation, computed here in 64-bit integers. Checks the one-cycle
// latency and that saturation at both ends and the ReLU were exercised.
module tb_requant;
  import denoise_pkg::*;

  localparam int N = 4;
  localparam int ACC_W = 32;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] shift;
  logic relu;
  logic in_valid, out_valid;
  logic signed [ACC_W-1:0] in_acc [N];
  q12_t out_q [N];

  requant #(.N(N), .ACC_W(ACC_W)) dut (
    .clk, .rst_n, .shift, .relu, .in_valid, .in_acc, .out_valid, .out_q
  );

  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0, relu_hits = 0;
  int exp_v [N];
  bit exp_pending = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    shift = '0; relu = 0; in_valid = 0;
    for (int n = 0; n < N; n++) in_acc[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 2000; it++) begin
      int sh;
      bit rl;
      sh = $urandom_range(0, 20);
      rl = 1'($urandom);
      for (int n = 0; n < N; n++) begin
        longint a, r;
        case ($urandom_range(3))
          0: a = longint'($urandom_range(0, 8191)) - 4096;
          1: a = longint'(int'($urandom));
          2: a = (n % 2) ? -longint'(2**31) : longint'(2**31 - 1);
          default: a = longint'($urandom_range(0, 2000000)) - 1000000;
        endcase
        in_acc[n] <= ACC_W'(a);
        r = (sh > 0) ? ((a + (64'sd1 <<< (sh - 1))) >>> sh) : a;
        if (rl && r < 0) begin r = 0; relu_hits++; end
        if (r > 2047) begin r = 2047; sat_hi++; end
        if (r < -2048) begin r = -2048; sat_lo++; end
        exp_v[n] = int'(r);
      end
      shift <= 5'(sh);
      relu <= rl;
      in_valid <= 1'b1;
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      check(out_valid == 1'b1, "output one cycle after input");
      for (int n = 0; n < N; n++)
        check(int'(out_q[n]) == exp_v[n],
              $sformatf("lane %0d shift %0d relu %0d: %0d exp %0d", n, sh, rl, out_q[n], exp_v[n]));
      @(posedge clk);
      #1;
      check(out_valid == 1'b0, "valid drops after one cycle");
    end
    check(sat_hi > 0 && sat_lo > 0 && relu_hits > 0, "saturation and ReLU exercised");
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
