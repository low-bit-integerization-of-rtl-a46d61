// tb_sa_top: end-to-end test of the self-attention datapath.
//
// Loads random 3-bit weights, programs step sizes, streams two images of N random tokens
// and compares every attention-output code with a behavioural model of the whole chain
// (X quantizer, three linear layers, LayerNorm quantizers, QK^T exponential, softmax
// quantizer, PV product, output quantizer) computed in sa_ref_pkg arithmetic.  It also
// checks the cycle at which each row starts to emit and the done pulse, and counts how
// often each mechanism of the design was exercised: LayerNorm codes at both ends of the
// range, negative-gamma channels, exponential flush-to-zero, nonzero and zero attention
// codes, clipped output codes, and the back-to-back second operation.
// Sizes are reduced (8 tokens, 16 input channels, 8 head channels); at the default size the
// design is far too large for a quick simulation.
module tb_sa_top;
  import sa_ref_pkg::*;
  localparam int N = 8, I = 16, O = 8, NBIT = 3;
  localparam int NT = (1 << NBIT) - 1;
  localparam int FW = 16;
  localparam int LAW = sa_pkg::acc_width(NBIT, I);
  localparam int PVW = sa_pkg::acc_width(NBIT, N);
  localparam int FRAMES = 2;

  `include "tb_sa_top_body.svh"

  sa_top #(.N(N), .I(I), .O(O), .NBIT(NBIT)) dut (.*);
endmodule
