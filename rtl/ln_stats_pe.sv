// ln_stats_pe: one column of the systolic mean / variance rows of the LayerNorm.
//
// Implements one step of the incremental statistics
//     mu_i  = mu_{i-1} + (x_i - mu_{i-1}) / i
//     M2_i  = M2_{i-1} + (x_i - mu_{i-1}) * (x_i - mu_i)
// for channel i = IDX (1-based).  M2 is the running sum of squared deviations; the variance
// is M2 / O, and the division by O is folded into the comparator (ln_compare).  The division
// by i is a multiplication by the constant round(2^RCP_FRAC / i) followed by an arithmetic
// right shift (rounding toward minus infinity); statistics carry LN_FRAC fraction bits.
// The pair (mu, M2) is registered and handed to the next column one cycle later, matching
// the one-cycle skew between neighbouring channels of the incoming token.
module ln_stats_pe #(
  parameter int IDX = 1,
  parameter int O   = sa_pkg::D_HEAD,
  localparam int FW   = sa_pkg::FP_W,
  localparam int SW   = FW + sa_pkg::LN_FRAC - sa_pkg::FP_FRAC + 2,
  localparam int M2W  = 2 * (SW + 1) - sa_pkg::LN_FRAC + $clog2(O) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [FW-1:0]  x,
  input  logic signed [SW-1:0]  mu_in,
  input  logic signed [M2W-1:0] m2_in,
  output logic signed [SW-1:0]  mu_out,
  output logic signed [M2W-1:0] m2_out
);
  localparam int RF = sa_pkg::RCP_FRAC;
  localparam logic signed [RF+1:0] RCP = (RF+2)'(((2**RF) + IDX / 2) / IDX);
  localparam int PW = SW + 1 + RF + 2;

  logic signed [SW-1:0]      xe, mu_new;
  logic signed [SW:0]        d_old, d_new;
  logic signed [PW-1:0]      step_full;
  logic signed [2*SW+1:0]    dd;

  assign xe        = SW'(x) <<< (sa_pkg::LN_FRAC - sa_pkg::FP_FRAC);
  assign d_old     = (SW+1)'(xe) - (SW+1)'(mu_in);
  assign step_full = PW'(d_old) * PW'(RCP);
  assign mu_new    = mu_in + SW'(step_full >>> RF);
  assign d_new     = (SW+1)'(xe) - (SW+1)'(mu_new);
  assign dd        = (2*SW+2)'(d_old) * (2*SW+2)'(d_new);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_out <= '0;
      m2_out <= '0;
    end else begin
      mu_out <= mu_new;
      m2_out <= m2_in + M2W'(dd >>> sa_pkg::LN_FRAC);
    end
  end
endmodule
