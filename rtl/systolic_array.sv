// systolic_array: 12-bit fixed-point weight-stationary systolic MAC array.
//
// The paper runs its U-Net denoiser, whose convolutions are split into
// depth-wise and point-wise parts, on a systolic array built on an FPGA,
// with all weights and intermediate results quantized to 12-bit fixed
// point. It names the array but does not describe it; this is the simplest
// array that executes those convolutions.
//
// ROWS x COLS processing elements (sa_pe) each hold one weight W[k][j].
// An input vector a[0..ROWS-1] (for a point-wise convolution: the ROWS
// input channels of one pixel) enters from the left, row k skewed by k
// cycles; partial sums flow down the columns, starting from in_psum[j] (a
// bias, or the sum of an earlier channel tile), so column j produces
//
//   out_acc[j] = in_psum[j] + sum_k a[k] * W[k][j]
//
// i.e. one output pixel of COLS output channels per cycle. A depth-wise
// 3x3 convolution maps onto it through im2col: the 9 taps of a window go to
// rows 0..8 and the channel's 9 weights to one column. Longer reductions
// are tiled by feeding a tile's result back in as in_psum. The sequencing
// of layers (im2col, tiling, skip connections) belongs to the U-Net
// sequencer, which the paper does not describe and which is not part of
// this RTL. The weight-stationary dataflow, the array size and the
// accumulator width are this design's choices.
//
// Interface: weights load one row per cycle (w_load, w_row, w_data) while
// the array is idle. Vectors stream in with in_valid, one per cycle, and
// leave on out_acc with out_valid exactly LAT = ROWS + COLS - 1 cycles later,
// at full throughput. Input and output skews are handled inside.
//
// Lint note: the assertions below use rst_n in `disable iff`, so the
// linter reports rst_n as a reset used both synchronously and
// asynchronously (SYNCASYNCNET). The logic itself uses rst_n only as an asynchronous reset.
module systolic_array
  import denoise_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned LAT  = ROWS + COLS - 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight load
  input  logic                    w_load,
  input  logic [$clog2(ROWS)-1:0] w_row,
  input  q12_t                    w_data  [COLS],
  // streaming input
  input  logic                    in_valid,
  input  q12_t                    in_act  [ROWS],
  input  logic signed [ACC_W-1:0] in_psum [COLS],
  // streaming output
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_acc [COLS],
  output logic                    busy
);
  // Activation / partial-sum wires between PEs.
  q12_t                    a_w [ROWS][COLS+1];
  logic signed [ACC_W-1:0] p_w [ROWS+1][COLS];

  // ------------------------------------------------------------ input skew
  for (genvar k = 0; k < ROWS; k++) begin : g_askew
    if (k == 0) begin : g_d0
      assign a_w[0][0] = in_valid ? in_act[0] : '0;
    end else begin : g_dk
      q12_t sr [k];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < k; d++) sr[d] <= '0;
        end else begin
          sr[0] <= in_valid ? in_act[k] : '0;
          for (int d = 1; d < k; d++) sr[d] <= sr[d-1];
        end
      end
      assign a_w[k][0] = sr[k-1];
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_pskew
    if (j == 0) begin : g_d0
      assign p_w[0][0] = in_valid ? in_psum[0] : '0;
    end else begin : g_dj
      logic signed [ACC_W-1:0] sr [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < j; d++) sr[d] <= '0;
        end else begin
          sr[0] <= in_valid ? in_psum[j] : '0;
          for (int d = 1; d < j; d++) sr[d] <= sr[d-1];
        end
      end
      assign p_w[0][j] = sr[j-1];
    end
  end

  // -------------------------------------------------------------- PE grid
  for (genvar k = 0; k < ROWS; k++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      sa_pe #(.ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .w_load (w_load && (w_row == k[$clog2(ROWS)-1:0])),
        .w_in   (w_data[j]),
        .a_in   (a_w[k][j]),
        .p_in   (p_w[k][j]),
        .a_out  (a_w[k][j+1]),
        .p_out  (p_w[k+1][j])
      );
    end
  end

  // ----------------------------------------------------------- output deskew
  for (genvar j = 0; j < COLS; j++) begin : g_oskew
    localparam int unsigned D = COLS - 1 - j;
    if (D == 0) begin : g_d0
      assign out_acc[j] = p_w[ROWS][j];
    end else begin : g_dj
      logic signed [ACC_W-1:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < D; d++) sr[d] <= '0;
        end else begin
          sr[0] <= p_w[ROWS][j];
          for (int d = 1; d < D; d++) sr[d] <= sr[d-1];
        end
      end
      assign out_acc[j] = sr[D-1];
    end
  end

  // ----------------------------------------------------------------- valid
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];
  assign busy      = in_valid || (vpipe != '0);

  // Weights are stationary: they must not change under a vector in flight.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) w_load |-> !busy)
    else $error("systolic_array: weight load while vectors are in flight");

endmodule
