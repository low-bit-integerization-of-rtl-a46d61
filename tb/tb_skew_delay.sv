// tb_skew_delay: random lane data through a forward skew (BASE 0) and a reverse skew
// (BASE 2); every output lane must equal its input lane delayed by the lane's depth.
module tb_skew_delay;
  localparam int L = 5, W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] d [L], qf [L], qr [L];
  logic [W-1:0] hist [L][64];
  int cyc = 0, checks = 0, failures = 0;

  skew_delay #(.LANES(L), .W(W), .REVERSE(1'b0), .BASE(0)) u_f (.clk, .rst_n, .d(d), .q(qf));
  skew_delay #(.LANES(L), .W(W), .REVERSE(1'b1), .BASE(2)) u_r (.clk, .rst_n, .d(d), .q(qr));

  initial begin : watchdog
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (d[l]) d[l] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (cyc = 0; cyc < 60; cyc++) begin
      @(negedge clk);
      foreach (d[l]) begin d[l] = W'($urandom); hist[l][cyc] = d[l]; end
      #1;
      for (int l = 0; l < L; l++) begin
        automatic int df = l, dr = 2 + L - 1 - l;
        if (cyc >= df) begin checks++; if (qf[l] != hist[l][cyc-df]) failures++; end
        if (cyc >= dr) begin checks++; if (qr[l] != hist[l][cyc-dr]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
