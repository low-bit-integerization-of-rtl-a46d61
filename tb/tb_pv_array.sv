// tb_pv_array: drives random attention and value codes as skewed lane streams, issues the
// scan pulse at B + N + O - 1 and checks every output code of row i (channel O-1-k at cycle
// B + N + O + i + 1 + k) against the quantized integer product; also checks y_valid.
// Two rounds back to back exercise the accumulator restart.
module tb_pv_array;
  import sa_ref_pkg::*;
  localparam int N = 6, O = 4, NBIT = 3, NT = 7;
  localparam int ACC_W = sa_pkg::acc_width(NBIT, N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [NBIT-1:0] p_in [N], v_in [O], y_out [N];
  logic sen_in, y_valid [N];
  logic signed [ACC_W-1:0] out_th [NT];
  int p [N][N], v [N][O], ey [N][O];
  int checks = 0, failures = 0;

  pv_array #(.N(N), .O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint th[];
    th = new[NT];
    for (int t = 0; t < NT; t++) begin out_th[t] = ACC_W'((2*t - 7) * 3); th[t] = out_th[t]; end
    sen_in = 0;
    foreach (p_in[n]) p_in[n] = '0;
    foreach (v_in[o]) v_in[o] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) p[i][j] = $urandom_range(0, 7) - 4;
      for (int j = 0; j < N; j++) for (int o = 0; o < O; o++) v[j][o] = $urandom_range(0, 7) - 4;
      for (int i = 0; i < N; i++) for (int o = 0; o < O; o++) begin
        automatic longint a = 0;
        for (int j = 0; j < N; j++) a += p[i][j] * v[j][o];
        ey[i][o] = quant(a, th, NBIT);
      end
      for (int c = 0; c < 2 * N + 2 * O + 6; c++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          automatic int j = c - i;
          p_in[i] = (j >= 0 && j < N) ? NBIT'(p[i][j]) : '0;
        end
        for (int o = 0; o < O; o++) begin
          automatic int j = c - o;
          v_in[o] = (j >= 0 && j < N) ? NBIT'(v[j][o]) : '0;
        end
        sen_in = (c == N + O - 1);
        #1;
        for (int i = 0; i < N; i++) begin
          automatic int kk = c - (N + O + i + 1);
          checks++;
          if (y_valid[i] != (kk >= 0 && kk < O)) failures++;
          if (kk >= 0 && kk < O) begin
            checks++;
            if (y_out[i] != ey[i][O-1-kk]) begin
              failures++;
              if (failures < 6) $display("i=%0d o=%0d got %0d exp %0d", i, O-1-kk, y_out[i], ey[i][O-1-kk]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
