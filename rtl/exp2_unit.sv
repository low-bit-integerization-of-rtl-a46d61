// exp2_unit: shift-based approximation of the exponential used by the on-PE softmax.
//
// e^(s*a) is rewritten as 2^z with z = s*log2(e)*a, supplied here already scaled as a
// fixed-point number with SC_FRAC fraction bits.  Splitting z = floor(z) + r, 0 <= r < 1,
// the unit returns (1 + r) << floor(z), i.e. 2^r is replaced by its linear approximation
// 1 + r.  Output: unsigned, EXP_W bits with EXP_FRAC fraction bits; values below one LSB
// flush to zero and values beyond the range saturate to all ones (range handling is this
// design's choice).  Purely combinational.
module exp2_unit #(
  parameter int ZW = 29,
  localparam int ZF = sa_pkg::SC_FRAC,
  localparam int EW = sa_pkg::EXP_W,
  localparam int EF = sa_pkg::EXP_FRAC
) (
  input  logic signed [ZW-1:0] z,
  output logic [EW-1:0]        e
);
  localparam int TW = EW + ZF + 1;

  logic signed [ZW-ZF-1:0] fl;
  logic [ZF:0]             mant;
  logic signed [ZW-ZF+1:0] sh;
  logic [TW-1:0]           shifted;

  assign fl      = (ZW-ZF)'(z >>> ZF);
  assign mant    = {1'b1, z[ZF-1:0]};
  assign sh      = (ZW-ZF+2)'(fl) + (ZW-ZF+2)'(EF);
  assign shifted = TW'(mant) << sh[$clog2(TW)-1:0];

  always_comb begin
    if (sh < 0)                       e = '0;
    else if (sh > (ZW-ZF+2)'(EW - 1)) e = '1;
    else                              e = EW'(shifted >> ZF);
  end
endmodule
