// requant: returns a wide accumulator value to Q_W-bit fixed point.
//
// The paper quantizes all intermediate results and parameters of its CNN
// to 12-bit fixed point. Between layers an accumulator therefore has to be
// rescaled: this block shifts it right arithmetically by `shift` bits with
// round-half-up, optionally applies a ReLU, and saturates to the signed
// Q_W-bit range. The rounding mode, the ReLU option and the run-time shift
// are this design's choices. N lanes are handled in parallel.
//
// Timing: one vector per cycle, one cycle of latency.
module requant
  import denoise_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [4:0]              shift,
  input  logic                    relu,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_acc [N],
  output logic                    out_valid,
  output q12_t                    out_q  [N]
);
  localparam logic signed [ACC_W:0] QMAX = (ACC_W+1)'(2**(Q_W-1) - 1);
  localparam logic signed [ACC_W:0] QMIN = -(ACC_W+1)'(2**(Q_W-1));

  q12_t res [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [ACC_W:0] rnd;
      logic signed [ACC_W:0] sh;
      rnd = (ACC_W+1)'(in_acc[n]);
      if (shift != '0)
        rnd = rnd + ((ACC_W+1)'(1) <<< (shift - 5'd1));
      sh = rnd >>> shift;
      if (relu && sh < 0)
        sh = '0;
      if (sh > QMAX)
        res[n] = q12_t'(QMAX);
      else if (sh < QMIN)
        res[n] = q12_t'(QMIN);
      else
        res[n] = q12_t'(sh);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < N; n++) out_q[n] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int n = 0; n < N; n++) out_q[n] <= res[n];
    end
  end
endmodule
