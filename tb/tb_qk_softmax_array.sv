// tb_qk_softmax_array: drives random 3-bit Q and K codes as skewed lane streams, issues the
// enable pulse at B + O and the scan pulse at B + O + N, and checks every softmax code of
// row i (key token N-1-k at cycle B + O + N + i + 2 + k) against the model: integer dot
// product, scaled 2^z approximation, exact row sum, sum-scaled references.  Also checks
// p_valid.  Two rounds back to back exercise the accumulator restart.
module tb_qk_softmax_array;
  import sa_ref_pkg::*;
  localparam int N = 5, O = 6, NBIT = 3, NT = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [NBIT-1:0] q_in [N], k_in [N], p_out [N];
  logic en_in, sen_in, p_valid [N];
  logic signed [15:0] scale, sm_th [NT];
  int q [N][O], k [N][O], ep [N][N];
  int checks = 0, failures = 0, nonzero = 0;

  qk_softmax_array #(.N(N), .O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic model();
    longint th[];
    th = new[NT];
    foreach (th[t]) th[t] = sm_th[t];
    for (int i = 0; i < N; i++) begin
      longint e[N];
      longint sum = 0;
      for (int j = 0; j < N; j++) begin
        longint a = 0;
        for (int t = 0; t < O; t++) a += q[i][t] * k[j][t];
        e[j] = exp2a(a * scale); sum += e[j];
      end
      for (int j = 0; j < N; j++) begin
        ep[i][j] = sm_quant(e[j], sum, th, NBIT);
        if (ep[i][j] != 0) nonzero++;
      end
    end
  endtask

  initial begin
    scale = 16'(2500);
    for (int t = 0; t < NT; t++) sm_th[t] = 16'((2*t - 7) * 256);
    en_in = 0; sen_in = 0;
    foreach (q_in[n]) begin q_in[n] = '0; k_in[n] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int n = 0; n < N; n++) for (int t = 0; t < O; t++) begin
        q[n][t] = $urandom_range(0, 7) - 4; k[n][t] = $urandom_range(0, 7) - 4;
      end
      model();
      // cycle c relative to B
      for (int c = 0; c < 2 * N + O + O + 8; c++) begin
        @(negedge clk);
        for (int n = 0; n < N; n++) begin
          automatic int t = c - n;
          q_in[n] = (t >= 0 && t < O) ? NBIT'(q[n][t]) : '0;
          k_in[n] = (t >= 0 && t < O) ? NBIT'(k[n][t]) : '0;
        end
        en_in  = (c == O);
        sen_in = (c == O + N);
        #1;
        for (int i = 0; i < N; i++) begin
          automatic int kk = c - (O + N + i + 2);
          checks++;
          if (p_valid[i] != (kk >= 0 && kk < N)) failures++;
          if (kk >= 0 && kk < N) begin
            checks++;
            if (p_out[i] != ep[i][N-1-kk]) begin
              failures++;
              if (failures < 6) $display("i=%0d j=%0d got %0d exp %0d", i, N-1-kk, p_out[i], ep[i][N-1-kk]);
            end
          end
        end
      end
    end
    if (nonzero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
