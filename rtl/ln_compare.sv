// ln_compare: division- and square-root-free LayerNorm threshold comparator.
//
// Decides whether the normalized value (x - mu) / sigma * gamma + beta exceeds a reference s
// without dividing or taking a square root.  With d = x - mu and s' = (s - beta) / gamma
// (computed by the caller as (s - beta) * (1/gamma)) the magnitude test
//     cmp = d^2 > sigma^2 * s'^2,  here  O * d^2 > M2 * s'^2   (sigma^2 = M2 / O)
// is combined with the signs of d and s' as in the paper's sign-logic figure:
//     above = (d > 0 AND cmp) OR (s' < 0 AND NOT cmp).
// The paper's figure labels the second term "s' > 0"; that label would make the output
// true whenever s' > 0, so the sign of s' that keeps the test exact (s' < 0) is used here.
// For a negative gamma the inequality flips; neg_gamma inverts the result (this design's
// addition).  Formats: d has LN_FRAC fraction bits, s' has 2*FP_FRAC, M2 has LN_FRAC.
// Purely combinational.
module ln_compare #(
  parameter int O   = sa_pkg::D_HEAD,
  parameter int DW  = 27,
  parameter int M2W = 45,
  parameter int SPW = 33
) (
  input  logic signed [DW-1:0]  d,
  input  logic signed [M2W-1:0] m2,
  input  logic signed [SPW-1:0] sp,
  input  logic                  neg_gamma,
  output logic                  above
);
  // d^2 has 2*LN_FRAC fraction bits, M2 * s'^2 has LN_FRAC + 4*FP_FRAC
  localparam int ALIGN = sa_pkg::LN_FRAC + 4 * sa_pkg::FP_FRAC - 2 * sa_pkg::LN_FRAC;
  localparam int CW    = M2W + 2 * SPW + 2 * DW + $clog2(O) + 4;

  logic [CW-1:0] d2, sp2, lhs, rhs;
  logic          m2_neg;
  logic          cmp;

  assign m2_neg = m2[M2W-1];
  assign d2     = CW'($unsigned(d[DW-1] ? -d : d)) * CW'($unsigned(d[DW-1] ? -d : d));
  assign sp2    = CW'($unsigned(sp[SPW-1] ? -sp : sp)) * CW'($unsigned(sp[SPW-1] ? -sp : sp));
  assign lhs    = (d2 * CW'(O)) << ALIGN;
  assign rhs    = m2_neg ? '0 : sp2 * CW'($unsigned(m2));
  assign cmp    = lhs > rhs;
  assign above  = neg_gamma ^ (((d > 0) && cmp) || (sp[SPW-1] && !cmp));
endmodule
