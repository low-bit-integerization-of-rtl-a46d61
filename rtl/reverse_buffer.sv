// reverse_buffer: the "reversing" and "delay" blocks of the V path.
//
// The attention scores leave the QK^T array's scan chains last key token first, so the
// value matrix must reach the PV array in reversed token order as well.  Each of the O
// lanes is a last-in first-out stack of N low-bit entries built as a bidirectional shift
// register.  Lane o pushes in_data[o] whenever in_valid[o] is high (lanes may be skewed,
// as they come from the linear array).  A pulse on rd_start at cycle T pops lane o during
// an N-cycle window that starts o cycles after lane 0's (the output skew), so rd_data[o]
// carries V[N-1-k][o] at cycle T + 2 + o + k and zero outside the window.
// Pushing during a pop is not allowed (asserted).  The reversal is the paper's; the stack
// structure and timing are this design's choices.
module reverse_buffer #(
  parameter int N    = sa_pkg::N_TOK,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [NBIT-1:0] in_data [O],
  input  logic                   in_valid[O],
  input  logic                   rd_start,
  output logic signed [NBIT-1:0] rd_data [O]
);
  localparam int RW = $clog2(N + 1);

  logic [RW-1:0] rcnt;
  logic          win [O];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            rcnt <= '0;
    else if (rd_start)     rcnt <= RW'(N);
    else if (rcnt != '0)   rcnt <= rcnt - 1'b1;
  end
  assign win[0] = (rcnt != '0);

  for (genvar o = 0; o < O; o++) begin : g_lane
    logic signed [NBIT-1:0] st [N];
    if (o > 0) begin : g_win
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) win[o] <= 1'b0;
        else        win[o] <= win[o-1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < N; k++) st[k] <= '0;
        rd_data[o] <= '0;
      end else begin
        if (in_valid[o]) begin
          st[0] <= in_data[o];
          for (int k = 1; k < N; k++) st[k] <= st[k-1];
        end else if (win[o]) begin
          for (int k = 0; k < N - 1; k++) st[k] <= st[k+1];
          st[N-1] <= '0;
        end
        rd_data[o] <= win[o] ? st[0] : '0;
      end
    end
    a_no_push_in_pop: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_valid[o] && win[o]));
  end
endmodule
