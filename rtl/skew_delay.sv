// skew_delay: the triangular "delay" of a systolic dataflow.
//
// Lane l of LANES is delayed by BASE + l clock cycles (REVERSE = 0, skews an aligned vector
// so that lane l trails lane 0 by l cycles) or by BASE + LANES-1-l cycles (REVERSE = 1,
// re-aligns a vector whose lane l arrives l cycles after lane 0).  Each lane is a plain
// shift register cleared by reset; a lane with zero delay is a wire.
module skew_delay #(
  parameter int LANES   = 4,
  parameter int W       = 8,
  parameter bit REVERSE = 1'b0,
  parameter int BASE    = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d [LANES],
  output logic [W-1:0] q [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int DLY = BASE + (REVERSE ? LANES - 1 - l : l);
    if (DLY == 0) begin : g_wire
      assign q[l] = d[l];
    end else begin : g_sr
      logic [W-1:0] sr [DLY];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < DLY; k++) sr[k] <= '0;
        end else begin
          sr[0] <= d[l];
          for (int k = 1; k < DLY; k++) sr[k] <= sr[k-1];
        end
      end
      assign q[l] = sr[DLY-1];
    end
  end
endmodule
