// layernorm_q: systolic LayerNorm fused with the low-bit quantizer that follows it.
//
// Input: one token per cycle, its O full-precision channels skewed (channel o of token n
// arrives at cycle n + o, v_in high at cycle n).  A row of O ln_stats_pe (the "mu" and
// "sigma^2" rows, 2 x O processing elements) accumulates mean and squared deviations while
// the token sweeps across; at the right edge the final mu and M2 of token n appear at cycle
// n + O.  Meanwhile a reversed skew_delay re-aligns the raw channels to that same cycle.
// The comparator array then quantizes every channel with the references s[k] (ascending,
// (k - 1/2) * dQ) in the normalized domain: per channel and reference one ln_compare works on
// d = x - mu, s' = (s - beta) * (1/gamma) and M2, and an adder turns the comparator outputs
// into the signed code.  Output: all O codes of token n together, registered, at cycle
// n + O + 1, flagged by q_valid.
// Statistics rows, comparator logic and reference scaling are the paper's; the formats, the
// per-channel 1/gamma input (Q8.8) and the gamma sign handling are this design's choices.
module layernorm_q #(
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int NT  = (1 << NBIT) - 1,
  localparam int FW  = sa_pkg::FP_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [FW-1:0]   x_in     [O],
  input  logic                   v_in,
  input  logic signed [FW-1:0]   s_ref    [NT],
  input  logic signed [FW-1:0]   beta     [O],
  input  logic signed [FW-1:0]   inv_gamma[O],
  output logic signed [NBIT-1:0] q_out    [O],
  output logic                   q_valid
);
  localparam int SW  = FW + sa_pkg::LN_FRAC - sa_pkg::FP_FRAC + 2;
  localparam int M2W = 2 * (SW + 1) - sa_pkg::LN_FRAC + $clog2(O) + 1;
  localparam int SPW = 2 * FW + 1;

  // ---- mu / sigma^2 rows ----
  logic signed [SW-1:0]  mu [O+1];
  logic signed [M2W-1:0] m2 [O+1];
  assign mu[0] = '0;
  assign m2[0] = '0;
  for (genvar o = 0; o < O; o++) begin : g_stat
    ln_stats_pe #(.IDX(o + 1), .O(O)) u_st (
      .clk, .rst_n, .x(x_in[o]),
      .mu_in(mu[o]), .m2_in(m2[o]), .mu_out(mu[o+1]), .m2_out(m2[o+1])
    );
  end

  // ---- re-align the raw channels with the finished statistics ----
  logic [FW-1:0] raw [O], aligned [O];
  for (genvar o = 0; o < O; o++) begin : g_raw
    assign raw[o] = x_in[o];
  end
  skew_delay #(.LANES(O), .W(FW), .REVERSE(1'b1), .BASE(1)) u_deskew (
    .clk, .rst_n, .d(raw), .q(aligned)
  );

  // ---- comparator array ----
  for (genvar o = 0; o < O; o++) begin : g_cmp
    logic signed [SW:0]   d;
    logic [NT-1:0]        above;
    logic [NBIT-1:0]      cnt;
    assign d = (SW+1)'($signed(aligned[o]) <<< (sa_pkg::LN_FRAC - sa_pkg::FP_FRAC))
             - (SW+1)'(mu[O]);
    for (genvar k = 0; k < NT; k++) begin : g_ref
      logic signed [SPW-1:0] sp;
      assign sp = (SPW'(s_ref[k]) - SPW'(beta[o])) * SPW'(inv_gamma[o]);
      ln_compare #(.O(O), .DW(SW + 1), .M2W(M2W), .SPW(SPW)) u_c (
        .d(d), .m2(m2[O]), .sp(sp), .neg_gamma(inv_gamma[o][FW-1]), .above(above[k])
      );
    end
    always_comb begin
      cnt = '0;
      for (int k = 0; k < NT; k++) cnt = cnt + NBIT'(above[k]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q_out[o] <= '0;
      else        q_out[o] <= {~cnt[NBIT-1], cnt[NBIT-2:0]};
    end
  end

  // ---- valid tag ----
  logic [O:0] vd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vd <= '0;
    else        vd <= {vd[O-1:0], v_in};
  end
  assign q_valid = vd[O];
endmodule
