// qk_softmax_array: QK^T matrix multiplication with embedded softmax and quantizer.
//
// N x N output-stationary array of qk_pe.  Row i receives token i of Q on q_in[i], one
// channel per cycle; column j receives token j of K on k_in[j] the same way.  Lanes are
// skewed: channel t of lane n arrives at cycle B + n + t.  PE (i,j) therefore finishes
// exp(QK^T)_(i,j) after O channels.  The enable token en_in (a pulse at cycle B + O) is
// delayed one cycle per row and then moves along each row with the data; as it passes, every
// PE latches its exponential and adds it into the row sum, so the full sum S_i leaves the
// end of row i at cycle B + O + N + i.  sen_in (a pulse at cycle B + O + N) is delayed one
// cycle per row in the same way; it captures S_i and loads the row's scan chain.  The scan
// chain shifts the exponentials, last column first, into the row's softmax_quant, whose
// references are scaled by S_i.  The low-bit score for (i, j = N-1-k) is on p_out[i] at
// cycle B + O + N + i + 2 + k with p_valid[i] high.
// Everything but the control pulse timing, the formats and the valid flags follows the
// paper's matmul-with-embedded-softmax figure and text.
module qk_softmax_array #(
  parameter int N    = sa_pkg::N_TOK,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int NT   = (1 << NBIT) - 1,
  localparam int SCW  = sa_pkg::SC_W,
  localparam int THW  = sa_pkg::SMT_W,
  localparam int EW   = sa_pkg::EXP_W,
  localparam int SUMW = EW + $clog2(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [NBIT-1:0] q_in   [N],
  input  logic signed [NBIT-1:0] k_in   [N],
  input  logic                   en_in,
  input  logic                   sen_in,
  input  logic signed [SCW-1:0]  scale,
  input  logic signed [THW-1:0]  sm_th  [NT],
  output logic signed [NBIT-1:0] p_out  [N],
  output logic                   p_valid[N]
);
  logic signed [NBIT-1:0] qh [N][N+1];
  logic signed [NBIT-1:0] kv [N+1][N];
  logic                   en [N][N+1];
  logic [SUMW-1:0]        sm [N][N+1];
  logic [EW-1:0]          hold [N][N];
  logic                   en_row [N];
  logic                   sen_row[N];

  assign en_row[0]  = en_in;
  assign sen_row[0] = sen_in;

  for (genvar j = 0; j < N; j++) begin : g_ktop
    assign kv[0][j] = k_in[j];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    if (i > 0) begin : g_dly
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          en_row[i]  <= 1'b0;
          sen_row[i] <= 1'b0;
        end else begin
          en_row[i]  <= en_row[i-1];
          sen_row[i] <= sen_row[i-1];
        end
      end
    end

    assign qh[i][0] = q_in[i];
    assign en[i][0] = en_row[i];
    assign sm[i][0] = '0;

    for (genvar j = 0; j < N; j++) begin : g_col
      qk_pe #(.NBIT(NBIT), .O(O), .N(N)) u_pe (
        .clk, .rst_n,
        .q_in  (qh[i][j]),   .k_in   (kv[i][j]),
        .en_in (en[i][j]),   .sum_in (sm[i][j]),
        .scale (scale),
        .q_out (qh[i][j+1]), .k_out  (kv[i+1][j]),
        .en_out(en[i][j+1]), .sum_out(sm[i][j+1]),
        .hold  (hold[i][j])
      );
    end

    // row sum captured for the duration of the scan
    logic [SUMW-1:0] row_sum;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          row_sum <= '0;
      else if (sen_row[i]) row_sum <= sm[i][N];
    end

    logic [EW-1:0] sout;
    logic          svalid;
    scan_chain #(.LEN(N), .W(EW)) u_sc (
      .clk, .rst_n, .sen(sen_row[i]), .par(hold[i]), .sout(sout), .svalid(svalid)
    );

    logic signed [NBIT-1:0] code;
    softmax_quant #(.NBIT(NBIT), .SUMW(SUMW)) u_q (
      .e(sout), .sum(row_sum), .th(sm_th), .code(code)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        p_out[i]   <= '0;
        p_valid[i] <= 1'b0;
      end else begin
        p_out[i]   <= code;
        p_valid[i] <= svalid;
      end
    end
  end
endmodule
