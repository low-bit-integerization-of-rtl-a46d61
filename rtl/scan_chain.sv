// scan_chain: per-row output scan chain of an output-stationary array.
//
// LEN registers, each behind a 2:1 multiplexer.  When sen is high every register loads the
// result of its own PE (par[j]); otherwise each register takes its left neighbour's value,
// so the row shifts towards the output end, which is register LEN-1.  The results therefore
// leave last column first: par[LEN-1] appears on sout one cycle after the sen cycle,
// par[LEN-1-k] k cycles later.  A parallel chain of valid bits marks the LEN shifted-out
// values (svalid).  The mux-and-register chain is the paper's; the valid bits are this
// design's addition.
module scan_chain #(
  parameter int LEN = 4,
  parameter int W   = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sen,
  input  logic [W-1:0] par [LEN],
  output logic [W-1:0] sout,
  output logic         svalid
);
  logic [W-1:0] sc [LEN];
  logic [LEN-1:0] vb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < LEN; j++) sc[j] <= '0;
      vb <= '0;
    end else if (sen) begin
      for (int j = 0; j < LEN; j++) sc[j] <= par[j];
      vb <= '1;
    end else begin
      sc[0] <= '0;
      for (int j = 1; j < LEN; j++) sc[j] <= sc[j-1];
      vb <= {vb[LEN-2:0], 1'b0};
    end
  end
  assign sout   = sc[LEN-1];
  assign svalid = vb[LEN-1];
endmodule
