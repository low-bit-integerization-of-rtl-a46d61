// pv_array: attention-times-value matrix multiplication with scan chains and quantizer.
//
// N x O output-stationary array of pv_pe.  Row i receives the low-bit attention scores of
// query token i on p_in[i], one key token per cycle; column o receives channel o of V on
// v_in[o] in the same key order.  Lanes are skewed: element k of lane n arrives at cycle
// B + n + k.  After N elements PE (i,o) holds the integer dot product.  sen_in, a pulse at
// cycle B + N + O - 1, is delayed one cycle per row; at row i it loads the row's scan chain
// from all accumulators.  The chain shifts the sums, last channel first, into the row's
// act_quantizer, whose integer references absorb the attention step, the value step and the
// output step.  The code of (i, o = O-1-k) is on y_out[i] at cycle B + N + O + i + 1 + k
// with y_valid[i] high.  Array, scan chain and comparator-plus-adder quantizer follow the
// paper; timing and widths are this design's.
module pv_array #(
  parameter int N    = sa_pkg::N_TOK,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT,
  localparam int NT    = (1 << NBIT) - 1,
  localparam int ACC_W = sa_pkg::acc_width(NBIT, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [NBIT-1:0]  p_in   [N],
  input  logic signed [NBIT-1:0]  v_in   [O],
  input  logic                    sen_in,
  input  logic signed [ACC_W-1:0] out_th [NT],
  output logic signed [NBIT-1:0]  y_out  [N],
  output logic                    y_valid[N]
);
  logic signed [NBIT-1:0]  ph [N][O+1];
  logic signed [NBIT-1:0]  vv [N+1][O];
  logic [ACC_W-1:0]        acc [N][O];
  logic                    sen_row [N];

  assign sen_row[0] = sen_in;
  for (genvar o = 0; o < O; o++) begin : g_vtop
    assign vv[0][o] = v_in[o];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    if (i > 0) begin : g_dly
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sen_row[i] <= 1'b0;
        else        sen_row[i] <= sen_row[i-1];
      end
    end
    assign ph[i][0] = p_in[i];

    for (genvar o = 0; o < O; o++) begin : g_col
      logic signed [ACC_W-1:0] a;
      pv_pe #(.NBIT(NBIT), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .p_in (ph[i][o]), .v_in (vv[i][o]), .sen(sen_row[i]),
        .p_out(ph[i][o+1]), .v_out(vv[i+1][o]), .acc(a)
      );
      assign acc[i][o] = a;
    end

    logic [ACC_W-1:0] sout;
    logic             svalid;
    scan_chain #(.LEN(O), .W(ACC_W)) u_sc (
      .clk, .rst_n, .sen(sen_row[i]), .par(acc[i]), .sout(sout), .svalid(svalid)
    );

    logic signed [NBIT-1:0] code;
    act_quantizer #(.W(ACC_W), .NBIT(NBIT)) u_q (.x($signed(sout)), .th(out_th), .code(code));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        y_out[i]   <= '0;
        y_valid[i] <= 1'b0;
      end else begin
        y_out[i]   <= code;
        y_valid[i] <= svalid;
      end
    end
  end
endmodule
