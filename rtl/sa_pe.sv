// sa_pe: one processing element of the weight-stationary systolic array.
//
// It holds one Q_W-bit signed weight, loaded when w_load is high. Each
// cycle it passes the activation arriving from the left on to the right
// and adds activation * weight to the partial sum arriving from above,
// passing the result down. Both outputs are registered, so an activation
// and the partial sum it meets move one PE per cycle.
module sa_pe
  import denoise_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_load,
  input  q12_t                    w_in,
  input  q12_t                    a_in,
  input  logic signed [ACC_W-1:0] p_in,
  output q12_t                    a_out,
  output logic signed [ACC_W-1:0] p_out
);
  q12_t w_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_r   <= '0;
      a_out <= '0;
      p_out <= '0;
    end else begin
      if (w_load)
        w_r <= w_in;
      a_out <= a_in;
      p_out <= p_in + ACC_W'(a_in * w_r);
    end
  end
endmodule
