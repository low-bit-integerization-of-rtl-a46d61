// sa_ref_pkg: behavioural reference arithmetic for the testbenches.
//
// Each function recomputes, with plain integer arithmetic on wide signed values, what one
// hardware block should produce, following the fixed-point definitions of the design
// (formats in sa_pkg): floor division by powers of two, saturation, the incremental LayerNorm
// statistics, the sign/magnitude LayerNorm comparison written as the plain inequality
// (x - mu) / sigma > s', and the 2^z ~ (1 + r) << floor(z) exponential.
package sa_ref_pkg;
  typedef logic signed [255:0] wide_t;

  // floor(a / 2^s)
  function automatic wide_t fdiv2(wide_t a, int s);
    return a >>> s;
  endfunction

  // uniform quantizer: number of references exceeded, minus 2^(nbit-1)
  function automatic int quant(longint x, longint th[], int nbit);
    int c = 0;
    foreach (th[k]) if (x > th[k]) c++;
    return c - (1 << (nbit - 1));
  endfunction

  function automatic longint sat(longint v, int w);
    longint mx = (longint'(1) <<< (w - 1)) - 1;
    longint mn = -(longint'(1) <<< (w - 1));
    return v > mx ? mx : (v < mn ? mn : v);
  endfunction

  // linear post-processing: (acc + bias) * ps, to Q8.8, saturated
  function automatic longint lin_post(longint acc, longint bias, longint ps);
    longint p = (acc + bias) * ps;
    return sat(p >>> (sa_pkg::PS_FRAC - sa_pkg::FP_FRAC), sa_pkg::FP_W);
  endfunction

  // LayerNorm-then-quantize of one token (O channels, Q8.8), references s[] in Q8.8.
  function automatic void ln_quant(input longint x[], input longint s[], input longint beta[],
                                   input longint invg[], input int nbit, output int code[]);
    int o_n = x.size();
    wide_t mu = 0, m2 = 0, xe, d_old, d_new, mu_new, rcp;
    code = new[o_n];
    for (int i = 1; i <= o_n; i++) begin
      xe     = wide_t'(x[i-1]) <<< (sa_pkg::LN_FRAC - sa_pkg::FP_FRAC);
      rcp    = ((wide_t'(1) <<< sa_pkg::RCP_FRAC) + i / 2) / i;
      d_old  = xe - mu;
      mu_new = mu + fdiv2(d_old * rcp, sa_pkg::RCP_FRAC);
      d_new  = xe - mu_new;
      m2     = m2 + fdiv2(d_old * d_new, sa_pkg::LN_FRAC);
      mu     = mu_new;
    end
    for (int o = 0; o < o_n; o++) begin
      int c = 0;
      wide_t d = (wide_t'(x[o]) <<< (sa_pkg::LN_FRAC - sa_pkg::FP_FRAC)) - mu;
      foreach (s[k]) begin
        // s' = (s - beta) / gamma with 2*FP_FRAC fraction bits; compare d/sigma with s'
        wide_t sp  = (wide_t'(s[k]) - beta[o]) * invg[o];
        wide_t l   = d * d * o_n * (wide_t'(1) <<< (4 * sa_pkg::FP_FRAC - sa_pkg::LN_FRAC));
        wide_t r   = (m2 < 0 ? 0 : m2) * sp * sp;
        bit    gt;   // d / sigma > s', written as the plain case analysis
        if (d > 0)       gt = (sp <= 0) ? 1'b1 : (l > r);
        else if (d == 0) gt = (sp < 0);
        else             gt = (sp < 0) ? (l < r) : 1'b0;
        if (invg[o] < 0) gt = !gt;
        c += gt;
      end
      code[o] = c - (1 << (nbit - 1));
    end
  endfunction

  // 2^z approximation; z has SC_FRAC fraction bits, result EXP_FRAC fraction bits
  function automatic longint exp2a(longint z);
    longint fl = z >>> sa_pkg::SC_FRAC;
    longint r  = z & ((longint'(1) << sa_pkg::SC_FRAC) - 1);
    longint sh = fl + sa_pkg::EXP_FRAC;
    if (sh < 0) return 0;
    if (sh > sa_pkg::EXP_W - 1) return (longint'(1) << sa_pkg::EXP_W) - 1;
    return (((longint'(1) << sa_pkg::SC_FRAC) + r) << sh) >> sa_pkg::SC_FRAC;
  endfunction

  // softmax quantizer: exp / sum compared with th[k] (SMT_FRAC fraction bits)
  function automatic int sm_quant(longint e, longint sum, longint th[], int nbit);
    int c = 0;
    foreach (th[k]) if ((wide_t'(e) <<< sa_pkg::SMT_FRAC) > wide_t'(th[k]) * sum) c++;
    return c - (1 << (nbit - 1));
  endfunction
endpackage
