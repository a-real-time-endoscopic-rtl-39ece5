// tb_fpn_coef_mem: self-checking test of the per-pixel coefficient store.
//
// Writes random {K, B} pairs to every address of a small frame, then reads
// them back in random order and compares with a copy kept here. Checks the
// one-cycle read latency, that the output holds while rd_en is low, and
// that a write to one address leaves the others alone.
module tb_fpn_coef_mem;
  localparam int W = 8;
  localparam int H = 5;
  localparam int CW = 12;
  localparam int DEPTH = W * H;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [CW-1:0] wr_k = '0, wr_b = '0, rd_k, rd_b;

  fpn_coef_mem #(.IMG_W(W), .IMG_H(H), .COEF_W(CW)) dut (
    .clk, .wr_en, .wr_addr, .wr_k, .wr_b, .rd_en, .rd_addr, .rd_k, .rd_b
  );

  int checks = 0, failures = 0;
  logic signed [CW-1:0] mk [DEPTH];
  logic signed [CW-1:0] mb [DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic read_check(input int a);
    rd_en   <= 1'b1;
    rd_addr <= AW'(a);
    @(posedge clk);
    rd_en   <= 1'b0;
    #1;
    check(rd_k == mk[a] && rd_b == mb[a],
          $sformatf("addr %0d read %0d,%0d exp %0d,%0d", a, rd_k, rd_b, mk[a], mb[a]));
  endtask

  initial begin
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      mk[a] = CW'($urandom);
      mb[a] = CW'($urandom);
      wr_en <= 1'b1; wr_addr <= AW'(a); wr_k <= mk[a]; wr_b <= mb[a];
      @(posedge clk);
    end
    wr_en <= 1'b0;
    @(posedge clk);
    for (int n = 0; n < 3 * DEPTH; n++)
      read_check($urandom_range(DEPTH - 1));
    // Output holds while rd_en is low.
    read_check(7);
    rd_addr <= AW'(3);
    repeat (2) @(posedge clk);
    #1;
    check(rd_k == mk[7] && rd_b == mb[7], "output held with rd_en low");
    // Overwrite one word; neighbours unchanged.
    mk[9] = 12'sd1234; mb[9] = -12'sd77;
    wr_en <= 1'b1; wr_addr <= AW'(9); wr_k <= mk[9]; wr_b <= mb[9];
    @(posedge clk);
    wr_en <= 1'b0;
    read_check(8);
    read_check(9);
    read_check(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
