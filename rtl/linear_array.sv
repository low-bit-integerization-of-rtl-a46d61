// linear_array: low-bit linear layer Y = (Xq * Wq^T + b') * diag(dW) as a systolic array.
//
// I rows by O columns of linear_pe, weight stationary.  Input channel i enters row i from
// the left (lanes skewed: channel i of a token arrives i cycles after channel 0) and travels
// right; partial sums travel down, so column o delivers the integer dot product of token n
// with weight row o at the bottom.  Below the array each column has the two rows the paper
// draws under every linear array: "+" adds the equivalent integer bias b' = b / (dX * dW),
// and "x" multiplies by the per-channel post-scale (dW for Q and K, whose common input step
// cancels in the following LayerNorm; dX * dW for V).  The product is rounded down to the
// Q8.8 full-precision format and saturated.
//
// The activations leave the right edge unchanged (x_out) so that the next linear array can
// be chained behind this one, as the Q, K and V arrays are.
//
// Weights: while w_we is high, w_data[o] is written into PE (w_row, o) for every o.
// Timing: if channel i of token n enters at cycle n + i, with v_in high at cycle n, then
// y[o] holds output channel o of token n at cycle n + I + o + 2, flagged by y_valid[o];
// x_out[i] repeats x_in[i] O cycles later, with v_out likewise delayed by O.
// The array organisation and the +/x rows are the paper's; the weight load port, the
// latencies and the number formats are this design's choices.
module linear_array #(
  parameter int I    = sa_pkg::D_IN,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int ACC_W = sa_pkg::acc_width(NBIT, I),
  localparam int FW    = sa_pkg::FP_W,
  localparam int PSW   = sa_pkg::PS_W,
  localparam int RW    = $clog2(I)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic [RW-1:0]           w_row,
  input  logic signed [NBIT-1:0]  w_data [O],
  input  logic signed [ACC_W-1:0] bias   [O],
  input  logic signed [PSW-1:0]   pscale [O],
  input  logic signed [NBIT-1:0]  x_in   [I],
  input  logic                    v_in,
  output logic signed [NBIT-1:0]  x_out  [I],
  output logic                    v_out,
  output logic signed [FW-1:0]    y      [O],
  output logic                    y_valid[O]
);
  localparam int PW  = ACC_W + 1 + PSW;
  localparam int SH  = sa_pkg::PS_FRAC - sa_pkg::FP_FRAC;
  localparam int VL  = I + O + 2;

  logic signed [NBIT-1:0]  xh [I][O+1];
  logic signed [ACC_W-1:0] ps [I+1][O];

  for (genvar i = 0; i < I; i++) begin : g_row
    assign xh[i][0] = x_in[i];
    assign x_out[i] = xh[i][O];
    for (genvar o = 0; o < O; o++) begin : g_col
      linear_pe #(.NBIT(NBIT), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .w_we  (w_we && (w_row == RW'(i))),
        .w_d   (w_data[o]),
        .x_in  (xh[i][o]),
        .ps_in (ps[i][o]),
        .x_out (xh[i][o+1]),
        .ps_out(ps[i+1][o])
      );
    end
  end

  for (genvar o = 0; o < O; o++) begin : g_post
    logic signed [ACC_W:0] biased;
    logic signed [PW-1:0]  prod, shifted;

    assign ps[0][o] = '0;
    assign prod     = biased * PW'(pscale[o]);
    assign shifted  = prod >>> SH;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        biased <= '0;
        y[o]   <= '0;
      end else begin
        biased <= (ACC_W+1)'(ps[I][o]) + (ACC_W+1)'(bias[o]);
        if (shifted > PW'(2**(FW-1) - 1))       y[o] <= FW'(2**(FW-1) - 1);
        else if (shifted < -PW'(2**(FW-1)))     y[o] <= FW'(-(2**(FW-1)));
        else                                    y[o] <= FW'(shifted);
      end
    end
  end

  // valid tags: one shared delay line tapped per column
  logic [VL-1:0] vd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vd <= '0;
    else        vd <= {vd[VL-2:0], v_in};
  end
  assign v_out = vd[O-1];
  for (genvar o = 0; o < O; o++) begin : g_vld
    assign y_valid[o] = vd[I+o+1];
  end
endmodule
