// qk_pe: processing element of the QK^T array with embedded exponential and row sum.
//
// Output stationary.  Q_(i,t) arrives from the left and K_(t,j) from above; both are
// registered and passed on (right and down).  The low-bit MAC accumulates Q_(i,t)*K_(t,j)
// over t.  When the enable token en_in reaches the PE (one cycle after its last product)
// the accumulated dot product is multiplied by the exponent scale (s*log2(e)*dQ*dK), turned
// into 2^z by exp2_unit, captured in the hold register that feeds the scan chain, and added
// to the running row sum arriving from the left, sum_in = sum over k < j of exp(QK^T)_(i,k).
// The accumulator restarts with the product of that same cycle.  en and the sum are
// registered towards the right neighbour, so the enable wave and the sum move along the
// row one PE per cycle, exactly as the operand skew does.
// Structure (MAC, scale multiplier, e^x, sum adder, en register, hold register with en
// multiplexer) follows the paper's PE figure; widths are this design's choices.
module qk_pe #(
  parameter int NBIT = sa_pkg::NBIT,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int N    = sa_pkg::N_TOK,
  localparam int ACC_W = sa_pkg::acc_width(NBIT, O),
  localparam int SCW   = sa_pkg::SC_W,
  localparam int EW    = sa_pkg::EXP_W,
  localparam int SUMW  = EW + $clog2(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [NBIT-1:0] q_in,
  input  logic signed [NBIT-1:0] k_in,
  input  logic                   en_in,
  input  logic [SUMW-1:0]        sum_in,
  input  logic signed [SCW-1:0]  scale,
  output logic signed [NBIT-1:0] q_out,
  output logic signed [NBIT-1:0] k_out,
  output logic                   en_out,
  output logic [SUMW-1:0]        sum_out,
  output logic [EW-1:0]          hold
);
  localparam int ZW = ACC_W + SCW;

  logic signed [ACC_W-1:0]  acc;
  logic signed [2*NBIT-1:0] prod;
  logic signed [ZW-1:0]     z;
  logic [EW-1:0]            e;

  assign prod = q_in * k_in;
  assign z    = ZW'(acc) * ZW'(scale);

  exp2_unit #(.ZW(ZW)) u_exp (.z(z), .e(e));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      q_out   <= '0;
      k_out   <= '0;
      en_out  <= 1'b0;
      sum_out <= '0;
      hold    <= '0;
    end else begin
      q_out   <= q_in;
      k_out   <= k_in;
      en_out  <= en_in;
      acc     <= (en_in ? '0 : acc) + ACC_W'(prod);
      sum_out <= sum_in + (en_in ? SUMW'(e) : '0);
      if (en_in) hold <= e;
    end
  end
endmodule
