// transpose_delay: the N x O "delay" between a LayerNorm quantizer and the QK^T array.
//
// The LayerNorm delivers one token per cycle with its O channels side by side; the
// output-stationary QK^T array wants the opposite: every token on a lane of its own, its
// channels one after the other, lane n trailing lane 0 by n cycles.  This block is the
// N x O register buffer that does that corner turn.
//   write: while wr_en is high, wr_data (the O codes of one token) is stored in row wcnt,
//          a counter that advances with every write and wraps after N tokens; wr_full
//          pulses on the write of token N-1.
//   read:  a pulse on rd_start at cycle T starts the readout.  Row n shifts its channels out
//          on rd_data[n], channel t at cycle T + 2 + n + t; outside its O-cycle window a
//          lane carries zero.  The windows are made by a chain of flip-flops, one per row.
// Writing during a readout is not allowed (asserted).  Size N x O is the paper's delay
// block; the corner-turn organisation is this design's reading of it.
module transpose_delay #(
  parameter int N    = sa_pkg::N_TOK,
  parameter int O    = sa_pkg::D_HEAD,
  parameter int NBIT = sa_pkg::NBIT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic signed [NBIT-1:0] wr_data [O],
  output logic                   wr_full,
  input  logic                   rd_start,
  output logic signed [NBIT-1:0] rd_data [N]
);
  localparam int CW = $clog2(N + 1);
  localparam int RW = $clog2(O + 1);

  logic signed [NBIT-1:0] buf_q [N][O];
  logic [CW-1:0]          wcnt;
  logic [RW-1:0]          rcnt;
  logic                   win [N];

  assign wr_full = wr_en && (wcnt == CW'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0;
      rcnt <= '0;
    end else begin
      if (wr_en) wcnt <= (wcnt == CW'(N - 1)) ? '0 : wcnt + 1'b1;
      if (rd_start)            rcnt <= RW'(O);
      else if (rcnt != '0)     rcnt <= rcnt - 1'b1;
    end
  end

  assign win[0] = (rcnt != '0);
  for (genvar n = 0; n < N; n++) begin : g_row
    if (n > 0) begin : g_win
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) win[n] <= 1'b0;
        else        win[n] <= win[n-1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int o = 0; o < O; o++) buf_q[n][o] <= '0;
        rd_data[n] <= '0;
      end else begin
        if (wr_en && wcnt == CW'(n)) begin
          for (int o = 0; o < O; o++) buf_q[n][o] <= wr_data[o];
        end else if (win[n]) begin
          for (int o = 0; o < O - 1; o++) buf_q[n][o] <= buf_q[n][o+1];
          buf_q[n][O-1] <= '0;
        end
        rd_data[n] <= win[n] ? buf_q[n][0] : '0;
      end
    end
  end

  a_no_write_in_readout: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && rcnt != '0));
endmodule
