// serial_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Pulse `start` with `num` and `den`; `busy` stays high for NUM_W cycles and
// `done` pulses for one cycle with `quo` = num / den (truncated). A zero
// divisor gives an all-ones quotient. A new start while busy is ignored.
// The PBN estimator uses it once per image row and once per frame, where a
// few tens of cycles are available, so a small sequential divider suffices.
// The published method only states the divisions; how they are computed is
// this design's choice.
module serial_divider #(
  parameter int unsigned NUM_W = 32,
  parameter int unsigned DEN_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quo
);
  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] q_sh;       // dividend shifting out / quotient shifting in
  logic [DEN_W-1:0] rem;        // partial remainder (always < den)
  logic [DEN_W-1:0] d_r;
  logic [CNT_W-1:0] cnt;

  logic [DEN_W:0]   trial;
  logic [DEN_W:0]   rem_sh;

  always_comb begin
    rem_sh = {rem, q_sh[NUM_W-1]};
    trial  = rem_sh - {1'b0, d_r};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_sh <= '0;
      rem  <= '0;
      d_r  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          q_sh <= num;
          rem  <= '0;
          d_r  <= den;
          cnt  <= CNT_W'(NUM_W);
          busy <= 1'b1;
        end
      end else begin
        if (!trial[DEN_W]) begin
          rem  <= trial[DEN_W-1:0];
          q_sh <= {q_sh[NUM_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh[DEN_W-1:0];
          q_sh <= {q_sh[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (!trial[DEN_W]) ? {q_sh[NUM_W-2:0], 1'b1} : {q_sh[NUM_W-2:0], 1'b0};
        end
      end
    end
  end
endmodule
