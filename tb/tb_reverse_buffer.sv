// tb_reverse_buffer: pushes N random tokens into O lanes with the lanes skewed by one cycle
// each, starts the replay and checks that lane o carries token N-1-k at cycle T + 2 + o + k
// and zero outside its window.  Two rounds.
module tb_reverse_buffer;
  localparam int N = 6, O = 4, NBIT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [NBIT-1:0] in_data [O], rd_data [O];
  logic in_valid [O], rd_start;
  int m [N][O];
  int checks = 0, failures = 0;

  reverse_buffer #(.N(N), .O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_start = 0;
    foreach (in_data[o]) begin in_data[o] = '0; in_valid[o] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int n = 0; n < N; n++) for (int o = 0; o < O; o++) m[n][o] = $urandom_range(0, 7) - 4;
      for (int c = 0; c < N + O; c++) begin
        @(negedge clk);
        for (int o = 0; o < O; o++) begin
          automatic int n = c - o;
          in_valid[o] = (n >= 0 && n < N);
          in_data[o]  = (n >= 0 && n < N) ? NBIT'(m[n][o]) : '0;
        end
      end
      @(negedge clk);
      foreach (in_valid[o]) in_valid[o] = 0;
      rd_start = 1;
      @(negedge clk); rd_start = 0;
      for (int c = 1; c < N + O + 4; c++) begin
        #1;
        for (int o = 0; o < O; o++) begin
          automatic int k = c - 2 - o;
          automatic int e = (k >= 0 && k < N) ? m[N-1-k][o] : 0;
          checks++;
          if (rd_data[o] != e) begin
            failures++;
            if (failures < 5) $display("c=%0d o=%0d got %0d exp %0d", c, o, rd_data[o], e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
