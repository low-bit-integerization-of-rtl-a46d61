// tb_layernorm_q: streams 12 skewed random tokens of 8 channels (one channel with negative
// gamma) through the LayerNorm quantizer and checks all codes, at cycle n + O + 1, against
// the incremental-statistics model with the plain normalized comparison.
module tb_layernorm_q;
  import sa_ref_pkg::*;
  localparam int O = 8, NBIT = 3, NT = 7, NTOK = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [15:0] x_in [O], s_ref [NT], beta [O], inv_gamma [O];
  logic v_in, q_valid;
  logic signed [NBIT-1:0] q_out [O];
  longint xs [NTOK][O];
  int exp_c [NTOK][O];
  int checks = 0, failures = 0, cyc, seen_min = 0, seen_max = 0;

  layernorm_q #(.O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint s[], b[], g[], xv[];
    int c[];
    s = new[NT]; b = new[O]; g = new[O]; xv = new[O];
    for (int k = 0; k < NT; k++) begin s_ref[k] = 16'((2*k - 7) * 64); s[k] = s_ref[k]; end
    for (int o = 0; o < O; o++) begin
      beta[o] = 16'($urandom_range(0, 100) - 50);
      inv_gamma[o] = 16'($urandom_range(60, 250));
    end
    inv_gamma[3] = -16'sd300;
    for (int o = 0; o < O; o++) begin b[o] = beta[o]; g[o] = inv_gamma[o]; end
    for (int n = 0; n < NTOK; n++) begin
      for (int o = 0; o < O; o++) begin xs[n][o] = $urandom_range(0, 4000) - 2000; xv[o] = xs[n][o]; end
      ln_quant(xv, s, b, g, NBIT, c);
      for (int o = 0; o < O; o++) begin
        exp_c[n][o] = c[o];
        if (c[o] == -4) seen_min++;
        if (c[o] == 3) seen_max++;
      end
    end
    v_in = 0; foreach (x_in[o]) x_in[o] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (cyc = 0; cyc < NTOK + O + 6; cyc++) begin
      v_in = (cyc < NTOK);
      for (int o = 0; o < O; o++)
        x_in[o] = (cyc - o >= 0 && cyc - o < NTOK) ? 16'(xs[cyc-o][o]) : '0;
      #1;
      begin
        automatic int n = cyc - O - 1;
        checks++;
        if (q_valid != (n >= 0 && n < NTOK)) failures++;
        if (n >= 0 && n < NTOK) for (int o = 0; o < O; o++) begin
          checks++;
          if (q_out[o] != exp_c[n][o]) begin
            failures++;
            if (failures < 6) $display("n=%0d o=%0d got %0d exp %0d", n, o, q_out[o], exp_c[n][o]);
          end
        end
      end
      @(negedge clk);
    end
    if (seen_min == 0 || seen_max == 0) begin failures++; $display("codes did not reach both ends"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
