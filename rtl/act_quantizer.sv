// act_quantizer: uniform quantizer built from a parallel comparator bank and an adder.
//
// The value x is compared at once against the 2^NBIT - 1 references th[0..NT-1] (ascending,
// normally (k - 1/2) * step for k = -(2^(NBIT-1) - 1) .. 2^(NBIT-1) - 1, i.e. -3.5 .. 2.5 steps
// for 3 bits).  The adder counts the references that x exceeds and the count, offset by
// -2^(NBIT-1), is the signed low-bit code.  Any scale factor that sits in front of the
// quantizer is absorbed into the references by whoever programs them.
// Purely combinational; the instantiating block registers the code.
// The comparator-plus-adder structure is the paper's; strict ">" at a reference is this
// design's choice.
module act_quantizer #(
  parameter int W    = sa_pkg::FP_W,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int NT  = (1 << NBIT) - 1
) (
  input  logic signed [W-1:0]    x,
  input  logic signed [W-1:0]    th [NT],
  output logic signed [NBIT-1:0] code
);
  logic [NBIT-1:0] cnt;

  always_comb begin
    cnt = '0;
    for (int k = 0; k < NT; k++) cnt = cnt + NBIT'(x > th[k]);
  end

  // count - 2^(NBIT-1) is the count with its MSB inverted
  assign code = {~cnt[NBIT-1], cnt[NBIT-2:0]};
endmodule
