// linear_pe: one processing element of the weight-stationary low-bit linear array.
//
// The PE holds one NBIT-bit weight W[o][i], loaded while w_we is high.  Every cycle it
// multiplies the low-bit activation arriving from the left by that weight, adds the partial
// sum arriving from above, and registers both the activation (passed right) and the new
// partial sum (passed down).  Latency: one cycle in each direction.
module linear_pe #(
  parameter int NBIT  = sa_pkg::NBIT,
  parameter int ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic signed [NBIT-1:0]  w_d,
  input  logic signed [NBIT-1:0]  x_in,
  input  logic signed [ACC_W-1:0] ps_in,
  output logic signed [NBIT-1:0]  x_out,
  output logic signed [ACC_W-1:0] ps_out
);
  logic signed [NBIT-1:0]   w;
  logic signed [2*NBIT-1:0] prod;

  assign prod = x_in * w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w      <= '0;
      x_out  <= '0;
      ps_out <= '0;
    end else begin
      if (w_we) w <= w_d;
      x_out  <= x_in;
      ps_out <= ps_in + ACC_W'(prod);
    end
  end
endmodule
