// softmax_quant: quantizer of the softmax output, scaled by the exponential row sum.
//
// Instead of dividing exp(QK^T)_(i,j) by the row sum S_i and comparing with the references
// (k - 1/2) * d_ATTN, the references are multiplied by S_i (a row of multipliers) and the
// comparator bank works on the undivided exponential:
//     exp > th[k] * S  for every k,  code = count - 2^(NBIT-1).
// th[] carries SMT_FRAC fraction bits, e and S EXP_FRAC.  Purely combinational.
// The multiplier-scaled references are the paper's; the formats are this design's.
module softmax_quant #(
  parameter int NBIT = sa_pkg::NBIT,
  parameter int SUMW = 33,
  localparam int NT  = (1 << NBIT) - 1,
  localparam int EW  = sa_pkg::EXP_W,
  localparam int THW = sa_pkg::SMT_W
) (
  input  logic [EW-1:0]          e,
  input  logic [SUMW-1:0]        sum,
  input  logic signed [THW-1:0]  th [NT],
  output logic signed [NBIT-1:0] code
);
  localparam int CW = THW + SUMW + 2;

  logic signed [CW-1:0] lhs;
  logic [NBIT-1:0]      cnt;

  assign lhs = CW'({1'b0, e}) <<< sa_pkg::SMT_FRAC;

  always_comb begin
    cnt = '0;
    for (int k = 0; k < NT; k++)
      cnt = cnt + NBIT'(lhs > (CW'(th[k]) * CW'($signed({1'b0, sum}))));
  end
  assign code = {~cnt[NBIT-1], cnt[NBIT-2:0]};
endmodule
