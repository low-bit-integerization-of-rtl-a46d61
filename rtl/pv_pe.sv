// pv_pe: processing element of the attention-times-value array.
//
// Output stationary low-bit MAC: the attention code arrives from the left, the value code
// from above; both are registered and passed on (right and down), and their product is
// accumulated locally.  sen (the row's scan-enable line) hands the finished sum to the scan
// chain; the accumulator then restarts with the product of that same cycle.
module pv_pe #(
  parameter int NBIT  = sa_pkg::NBIT,
  parameter int ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [NBIT-1:0]  p_in,
  input  logic signed [NBIT-1:0]  v_in,
  input  logic                    sen,
  output logic signed [NBIT-1:0]  p_out,
  output logic signed [NBIT-1:0]  v_out,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [2*NBIT-1:0] prod;
  assign prod = p_in * v_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_out <= '0;
      v_out <= '0;
      acc   <= '0;
    end else begin
      p_out <= p_in;
      v_out <= v_in;
      acc   <= (sen ? '0 : acc) + ACC_W'(prod);
    end
  end
endmodule
