// tb_systolic_array: self-checking test of the weight-stationary MAC array.
//
// A 5 x 3 array (unequal sides, so a swapped index shows) is loaded with
// random signed 12-bit weights, including the extreme values, and fed
// random activation vectors and partial-sum inputs, back to back and with
// gaps. Every result is compared with psum[j] + sum_k a[k] * W[k][j]
// computed here, and must appear exactly ROWS + COLS - 1 cycles after its
// input. The weights are reloaded between batches.
module tb_systolic_array;
  import denoise_pkg::*;

  localparam int R = 5;
  localparam int C = 3;
  localparam int ACC_W = 32;
  localparam int LAT = R + C - 1;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic w_load;
  logic [$clog2(R)-1:0] w_row;
  q12_t w_data [C];
  logic in_valid, out_valid, busy;
  q12_t in_act [R];
  logic signed [ACC_W-1:0] in_psum [C];
  logic signed [ACC_W-1:0] out_acc [C];

  systolic_array #(.ROWS(R), .COLS(C), .ACC_W(ACC_W)) dut (
    .clk, .rst_n, .w_load, .w_row, .w_data, .in_valid, .in_act, .in_psum,
    .out_valid, .out_acc, .busy
  );

  int checks = 0, failures = 0;
  int wm [R][C];
  int cycle = 0;

  typedef struct {
    int t;
    longint v [C];
  } exp_t;
  exp_t exp_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // cycle counts edges; updated with <= so every process at an edge sees
  // the same value.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      exp_t e;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(cycle - e.t == LAT, $sformatf("latency %0d exp %0d", cycle - e.t, LAT));
        for (int j = 0; j < C; j++)
          check(longint'(out_acc[j]) == e.v[j],
                $sformatf("col %0d got %0d exp %0d", j, out_acc[j], e.v[j]));
      end
    end
  end

  function automatic int rnd12();
    case ($urandom_range(5))
      0: return 2047;
      1: return -2048;
      default: return int'($urandom_range(0, 4095)) - 2048;
    endcase
  endfunction

  task automatic load_weights();
    for (int k = 0; k < R; k++) begin
      for (int j = 0; j < C; j++) begin
        wm[k][j] = rnd12();
        w_data[j] <= q12_t'(wm[k][j]);
      end
      w_load <= 1'b1;
      w_row  <= ($clog2(R))'(k);
      @(posedge clk);
    end
    w_load <= 1'b0;
  endtask

  initial begin
    w_load = 0; w_row = '0; in_valid = 0;
    for (int j = 0; j < C; j++) begin w_data[j] = '0; in_psum[j] = '0; end
    for (int k = 0; k < R; k++) in_act[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int batch = 0; batch < 6; batch++) begin
      load_weights();
      for (int n = 0; n < 40; n++) begin
        exp_t e;
        int a [R];
        for (int k = 0; k < R; k++) begin
          a[k] = rnd12();
          in_act[k] <= q12_t'(a[k]);
        end
        for (int j = 0; j < C; j++) begin
          int p;
          p = (batch % 2 == 0) ? 0 : int'($urandom_range(0, 2000000)) - 1000000;
          in_psum[j] <= p;
          e.v[j] = p;
          for (int k = 0; k < R; k++) e.v[j] += longint'(a[k]) * longint'(wm[k][j]);
        end
        e.t = cycle + 1;  // edge that samples this vector
        exp_q.push_back(e);
        in_valid <= 1'b1;
        @(posedge clk);
        if (batch >= 3 && $urandom_range(2) == 0) begin
          in_valid <= 1'b0;
          repeat ($urandom_range(1, 3)) @(posedge clk);
        end
      end
      in_valid <= 1'b0;
      while (busy) @(posedge clk);
      @(posedge clk);
    end
    check(exp_q.size() == 0, "all vectors came out");
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
