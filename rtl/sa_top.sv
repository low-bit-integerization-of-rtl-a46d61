// sa_top: integerized single-head self-attention datapath.
//
// Dataflow (one token per cycle in, one attention-output code per row per cycle out):
//   x_in -> input register -> X quantizer (act_quantizer per channel) -> skew
//        -> linear_array Q -> linear_array K -> linear_array V   (activations chained)
//   Q, K : linear_array -> layernorm_q -> transpose_delay        (token-parallel streams)
//   V    : linear_array -> act_quantizer per channel -> reverse_buffer
//   transpose_delay Q/K -> qk_softmax_array -> pv_array <- reverse_buffer
// All matrix products run on low-bit codes; dequantization happens after them: the linear
// post-scale rows, the LayerNorm references, the exponent scale and the references of the
// softmax and output quantizers absorb every step size.
//
// Protocol.  Load weights first: while w_we is high, wq/wk/wv_data[o] go to input channel
// w_row of output channel o of the three linear arrays.  The configuration inputs must be
// stable for a whole operation.  Then present the N tokens of one image, one per cycle with
// x_valid high (gaps are allowed).  When the K LayerNorm has delivered token N-1 (cycle T)
// the sequencer takes over: busy rises, the two transposing delays start at T, the enable
// and scan pulses of the QK^T array follow at T+2+O and T+2+N+O, the V replay starts at
// T+2+N+O and the PV scan at T+3+2N+2O.  Output: y_out[i] carries the code of query token
// i, channel O-1-k, at cycle T+5+2N+2O+i+k (y_valid[i] high); done pulses at T+4+3N+3O and
// busy falls.  No new token may be sent while busy is high (asserted).
// Blocks and their order are the paper's; the sequencer, the protocol and the timing are
// this design's.
module sa_top #(
  parameter int N    = sa_pkg::N_TOK,
  parameter int I    = sa_pkg::D_IN,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int NT   = (1 << NBIT) - 1,
  localparam int FW   = sa_pkg::FP_W,
  localparam int LAW  = sa_pkg::acc_width(NBIT, I),
  localparam int PVW  = sa_pkg::acc_width(NBIT, N),
  localparam int PSW  = sa_pkg::PS_W,
  localparam int SCW  = sa_pkg::SC_W,
  localparam int THW  = sa_pkg::SMT_W,
  localparam int RW   = $clog2(I)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight load
  input  logic                   w_we,
  input  logic [RW-1:0]          w_row,
  input  logic signed [NBIT-1:0] wq_data [O],
  input  logic signed [NBIT-1:0] wk_data [O],
  input  logic signed [NBIT-1:0] wv_data [O],
  // configuration (static during an operation)
  input  logic signed [FW-1:0]   x_th    [NT],  // input quantizer references, Q8.8
  input  logic signed [LAW-1:0]  bias_q  [O],   // equivalent integer biases
  input  logic signed [LAW-1:0]  bias_k  [O],
  input  logic signed [LAW-1:0]  bias_v  [O],
  input  logic signed [PSW-1:0]  ps_q    [O],   // per-channel post-scales
  input  logic signed [PSW-1:0]  ps_k    [O],
  input  logic signed [PSW-1:0]  ps_v    [O],
  input  logic signed [FW-1:0]   lnq_s   [NT],  // LayerNorm quantizer references, Q8.8
  input  logic signed [FW-1:0]   lnq_beta[O],
  input  logic signed [FW-1:0]   lnq_invg[O],   // 1 / gamma, Q8.8
  input  logic signed [FW-1:0]   lnk_s   [NT],
  input  logic signed [FW-1:0]   lnk_beta[O],
  input  logic signed [FW-1:0]   lnk_invg[O],
  input  logic signed [FW-1:0]   v_th    [NT],  // V quantizer references, Q8.8
  input  logic signed [SCW-1:0]  qk_scale,      // s * log2(e) * dQ * dK
  input  logic signed [THW-1:0]  sm_th   [NT],  // (k - 1/2) * d_ATTN
  input  logic signed [PVW-1:0]  out_th  [NT],  // output references in PV integer units
  // tokens
  input  logic signed [FW-1:0]   x_in    [I],
  input  logic                   x_valid,
  // attention output
  output logic signed [NBIT-1:0] y_out   [N],
  output logic                   y_valid [N],
  output logic                   busy,
  output logic                   done
);
  // ---------------- input register, X quantizer, skew ----------------
  logic signed [FW-1:0] x_r [I];
  logic                 xv_r, xv_q;
  logic [NBIT-1:0]      xq_r [I], xq_s [I];
  logic signed [NBIT-1:0] xq_lane [I];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xv_r <= 1'b0;
      xv_q <= 1'b0;
    end else begin
      xv_r <= x_valid;
      xv_q <= xv_r;
    end
  end

  for (genvar i = 0; i < I; i++) begin : g_xin
    logic signed [NBIT-1:0] code;
    act_quantizer #(.W(FW), .NBIT(NBIT)) u_q (.x(x_r[i]), .th(x_th), .code(code));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x_r[i]  <= '0;
        xq_r[i] <= '0;
      end else begin
        x_r[i]  <= x_in[i];
        xq_r[i] <= code;
      end
    end
    assign xq_lane[i] = $signed(xq_s[i]);
  end

  skew_delay #(.LANES(I), .W(NBIT), .REVERSE(1'b0), .BASE(0)) u_xskew (
    .clk, .rst_n, .d(xq_r), .q(xq_s)
  );

  // ---------------- Q, K, V linear arrays (chained) ----------------
  logic signed [NBIT-1:0] xa_k [I], xa_v [I], xa_end [I];
  logic                   va_k, va_v, va_end;
  logic signed [FW-1:0]   yq [O], yk [O], yv [O];
  logic                   yq_v [O], yk_v [O], yv_v [O];

  linear_array #(.I(I), .O(O), .NBIT(NBIT)) u_lin_q (
    .clk, .rst_n, .w_we, .w_row, .w_data(wq_data), .bias(bias_q), .pscale(ps_q),
    .x_in(xq_lane), .v_in(xv_q), .x_out(xa_k), .v_out(va_k), .y(yq), .y_valid(yq_v)
  );
  linear_array #(.I(I), .O(O), .NBIT(NBIT)) u_lin_k (
    .clk, .rst_n, .w_we, .w_row, .w_data(wk_data), .bias(bias_k), .pscale(ps_k),
    .x_in(xa_k), .v_in(va_k), .x_out(xa_v), .v_out(va_v), .y(yk), .y_valid(yk_v)
  );
  linear_array #(.I(I), .O(O), .NBIT(NBIT)) u_lin_v (
    .clk, .rst_n, .w_we, .w_row, .w_data(wv_data), .bias(bias_v), .pscale(ps_v),
    .x_in(xa_v), .v_in(va_v), .x_out(xa_end), .v_out(va_end), .y(yv), .y_valid(yv_v)
  );

  // ---------------- LayerNorm + quantizer on Q and K ----------------
  logic signed [NBIT-1:0] nq [O], nk [O];
  logic                   nq_v, nk_v;

  layernorm_q #(.O(O), .NBIT(NBIT)) u_ln_q (
    .clk, .rst_n, .x_in(yq), .v_in(yq_v[0]), .s_ref(lnq_s), .beta(lnq_beta),
    .inv_gamma(lnq_invg), .q_out(nq), .q_valid(nq_v)
  );
  layernorm_q #(.O(O), .NBIT(NBIT)) u_ln_k (
    .clk, .rst_n, .x_in(yk), .v_in(yk_v[0]), .s_ref(lnk_s), .beta(lnk_beta),
    .inv_gamma(lnk_invg), .q_out(nk), .q_valid(nk_v)
  );

  // ---------------- sequencer ----------------
  localparam int CNTW = $clog2(3 * N + 3 * O + 8);
  localparam int C_EN    = 2 + O;
  localparam int C_QKSEN = 2 + N + O;
  localparam int C_PVSEN = 3 + 2 * N + 2 * O;
  localparam int C_DONE  = 4 + 3 * N + 3 * O;

  logic            tq_full, tk_full, rd_start;
  logic [CNTW-1:0] cnt;

  assign rd_start = tk_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (rd_start) begin
      busy <= 1'b1;
      cnt  <= CNTW'(1);
    end else if (busy) begin
      if (cnt == CNTW'(C_DONE)) begin
        busy <= 1'b0;
        cnt  <= '0;
      end else begin
        cnt  <= cnt + 1'b1;
      end
    end
  end
  assign done = busy && (cnt == CNTW'(C_DONE));

  // ---------------- transposing delays ----------------
  logic signed [NBIT-1:0] q_lane [N], k_lane [N];

  transpose_delay #(.N(N), .O(O), .NBIT(NBIT)) u_tq (
    .clk, .rst_n, .wr_en(nq_v), .wr_data(nq), .wr_full(tq_full),
    .rd_start(rd_start), .rd_data(q_lane)
  );
  transpose_delay #(.N(N), .O(O), .NBIT(NBIT)) u_tk (
    .clk, .rst_n, .wr_en(nk_v), .wr_data(nk), .wr_full(tk_full),
    .rd_start(rd_start), .rd_data(k_lane)
  );

  // ---------------- V quantizer and reversing buffer ----------------
  logic signed [NBIT-1:0] vq [O], v_lane [O];
  logic                   vq_v [O];

  for (genvar o = 0; o < O; o++) begin : g_vq
    logic signed [NBIT-1:0] code;
    act_quantizer #(.W(FW), .NBIT(NBIT)) u_q (.x(yv[o]), .th(v_th), .code(code));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vq[o]   <= '0;
        vq_v[o] <= 1'b0;
      end else begin
        vq[o]   <= code;
        vq_v[o] <= yv_v[o];
      end
    end
  end

  reverse_buffer #(.N(N), .O(O), .NBIT(NBIT)) u_rev (
    .clk, .rst_n, .in_data(vq), .in_valid(vq_v),
    .rd_start(busy && cnt == CNTW'(C_QKSEN)), .rd_data(v_lane)
  );

  // ---------------- QK^T + softmax, then PV ----------------
  logic signed [NBIT-1:0] p_lane [N];
  logic                   p_v [N];

  qk_softmax_array #(.N(N), .O(O), .NBIT(NBIT)) u_qk (
    .clk, .rst_n, .q_in(q_lane), .k_in(k_lane),
    .en_in (busy && cnt == CNTW'(C_EN)),
    .sen_in(busy && cnt == CNTW'(C_QKSEN)),
    .scale(qk_scale), .sm_th(sm_th), .p_out(p_lane), .p_valid(p_v)
  );

  pv_array #(.N(N), .O(O), .NBIT(NBIT)) u_pv (
    .clk, .rst_n, .p_in(p_lane), .v_in(v_lane),
    .sen_in(busy && cnt == CNTW'(C_PVSEN)),
    .out_th(out_th), .y_out(y_out), .y_valid(y_valid)
  );

  a_no_input_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(x_valid && busy));
endmodule
