// tb_transpose_delay: writes N random token vectors (with an idle cycle in between), starts
// the readout and checks that lane n carries channel t of token n at cycle T + 2 + n + t and
// zero outside its window; wr_full must pulse on the last write.  Two rounds test the wrap
// of the write counter.
module tb_transpose_delay;
  localparam int N = 5, O = 4, NBIT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_full, rd_start;
  logic signed [NBIT-1:0] wr_data [O], rd_data [N];
  int m [N][O];
  int checks = 0, failures = 0;

  transpose_delay #(.N(N), .O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_start = 0; foreach (wr_data[o]) wr_data[o] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        if (n == 3) begin wr_en = 0; @(negedge clk); end
        wr_en = 1;
        for (int o = 0; o < O; o++) begin
          m[n][o] = $urandom_range(0, 7) - 4; wr_data[o] = NBIT'(m[n][o]);
        end
        #1; checks++; if (wr_full != (n == N - 1)) failures++;
      end
      @(negedge clk); wr_en = 0; rd_start = 1;
      @(negedge clk); rd_start = 0;
      // now at cycle T + 1
      for (int c = 1; c < N + O + 4; c++) begin
        #1;
        for (int n = 0; n < N; n++) begin
          automatic int t = c - 2 - n;
          automatic int e = (t >= 0 && t < O) ? m[n][t] : 0;
          checks++;
          if (rd_data[n] != e) begin
            failures++;
            if (failures < 5) $display("c=%0d n=%0d got %0d exp %0d", c, n, rd_data[n], e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
