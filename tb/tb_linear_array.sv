// tb_linear_array: loads random 3-bit weights into an 8 x 4 array, streams 10 skewed random
// tokens and checks every output channel, at cycle n + I + o + 2, against the integer
// dot product followed by bias, post-scale and saturation; also checks the y_valid tags and
// that the chained activations reappear O cycles later on x_out.
module tb_linear_array;
  import sa_ref_pkg::*;
  localparam int I = 8, O = 4, NBIT = 3, NTOK = 10;
  localparam int ACC_W = sa_pkg::acc_width(NBIT, I);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we; logic [$clog2(I)-1:0] w_row;
  logic signed [NBIT-1:0] w_data [O], x_in [I], x_out [I];
  logic signed [ACC_W-1:0] bias [O];
  logic signed [15:0] pscale [O], y [O];
  logic v_in, v_out, y_valid [O];
  int w [O][I], xs [NTOK][I];
  longint exp_y [NTOK][O];
  int checks = 0, failures = 0, cyc = 0;

  linear_array #(.I(I), .O(O), .NBIT(NBIT)) dut (.*);

  initial begin : watchdog
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_we = 0; w_row = '0; v_in = 0;
    foreach (x_in[i]) x_in[i] = '0;
    for (int o = 0; o < O; o++) begin
      bias[o] = ACC_W'($urandom_range(0, 20) - 10);
      pscale[o] = 16'($urandom_range(100, 3000));
      w_data[o] = '0;
    end
    pscale[0] = 16'(30000);                 // drives column 0 into saturation
    for (int o = 0; o < O; o++) for (int i = 0; i < I; i++) w[o][i] = $urandom_range(0, 7) - 4;
    for (int n = 0; n < NTOK; n++) for (int i = 0; i < I; i++) xs[n][i] = $urandom_range(0, 7) - 4;
    for (int n = 0; n < NTOK; n++) for (int o = 0; o < O; o++) begin
      automatic longint a = 0;
      for (int i = 0; i < I; i++) a += xs[n][i] * w[o][i];
      exp_y[n][o] = lin_post(a, bias[o], pscale[o]);
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < I; i++) begin
      @(negedge clk); w_we = 1; w_row = i[$clog2(I)-1:0];
      for (int o = 0; o < O; o++) w_data[o] = w[o][i][NBIT-1:0];
    end
    @(negedge clk); w_we = 0;
    // cycle c of the stream: lane i carries token c - i
    for (cyc = 0; cyc < NTOK + I + O + 8; cyc++) begin
      v_in = (cyc < NTOK);
      for (int i = 0; i < I; i++)
        x_in[i] = (cyc - i >= 0 && cyc - i < NTOK) ? NBIT'(xs[cyc-i][i]) : '0;
      #1;
      for (int o = 0; o < O; o++) begin
        automatic int n = cyc - I - o - 2;
        checks++;
        if (y_valid[o] != (n >= 0 && n < NTOK)) failures++;
        if (n >= 0 && n < NTOK) begin
          checks++;
          if (y[o] != exp_y[n][o]) begin
            failures++;
            if (failures < 5) $display("n=%0d o=%0d y=%0d exp=%0d", n, o, y[o], exp_y[n][o]);
          end
        end
      end
      for (int i = 0; i < I; i++) begin
        automatic int n = cyc - i - O;
        if (n >= 0 && n < NTOK) begin checks++; if (x_out[i] != xs[n][i]) failures++; end
      end
      checks++; if (v_out != (cyc - O >= 0 && cyc - O < NTOK)) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
