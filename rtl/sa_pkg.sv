// sa_pkg: sizes and number formats shared by the integerized self-attention datapath.
//
// The array sizes are those of one DeiT-S attention head as implied by the PE counts of the
// power table (I x O = 24,576 -> I = 384, O = 64; N x N = 39,204 -> N = 198 tokens), and the
// low-bit width is the 3-bit configuration the design is evaluated in.  The 16-bit width of
// full-precision values is the width given for the non-low-bit datapath; every fraction
// width below is a choice of this implementation (the source leaves fixed-point formats open).
//
// Formats (two's complement unless noted, "Qm.f" = f fraction bits):
//   low-bit code          NBIT-bit signed integer, levels -2^(NBIT-1) .. 2^(NBIT-1)-1
//   full precision        FP_W-bit, FP_FRAC fraction bits (Q8.8 by default)
//   linear post-scale     PS_W-bit, PS_FRAC fraction bits (per output channel)
//   LayerNorm statistics  LN_FRAC fraction bits, 1/i constants with RCP_FRAC fraction bits
//   exponent scale        SC_W-bit, SC_FRAC fraction bits: s * log2(e) * dQ * dK
//   exponential           EXP_W-bit unsigned, EXP_FRAC fraction bits
//   softmax references    SMT_W-bit, SMT_FRAC fraction bits: (k - 1/2) * d_ATTN
package sa_pkg;
  parameter int NBIT     = 3;
  parameter int N_TOK    = 198;
  parameter int D_IN     = 384;
  parameter int D_HEAD   = 64;

  parameter int FP_W     = 16;
  parameter int FP_FRAC  = 8;
  parameter int PS_W     = 16;
  parameter int PS_FRAC  = 12;
  parameter int LN_FRAC  = 16;
  parameter int RCP_FRAC = 16;
  parameter int SC_W     = 16;
  parameter int SC_FRAC  = 12;
  parameter int EXP_W    = 24;
  parameter int EXP_FRAC = 8;
  parameter int SMT_W    = 16;
  parameter int SMT_FRAC = 12;

  // Accumulator width of a low-bit MAC chain of LEN products of two NBIT-bit operands.
  function automatic int acc_width(int nbit, int len);
    return 2 * nbit + $clog2(len) + 1;
  endfunction
endpackage
