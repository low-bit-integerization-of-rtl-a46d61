// Body of the end-to-end testbench, kept apart so that a copy with other sizes is easy to
// make.  Expects the localparams N, I, O, NBIT, NT, FW, LAW, PVW and FRAMES of the
// including module, which instantiates sa_top as dut after the include.
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   w_we;
  logic [$clog2(I)-1:0]   w_row;
  logic signed [NBIT-1:0] wq_data [O], wk_data [O], wv_data [O];
  logic signed [FW-1:0]   x_th [NT], lnq_s [NT], lnk_s [NT], v_th [NT];
  logic signed [LAW-1:0]  bias_q [O], bias_k [O], bias_v [O];
  logic signed [15:0]     ps_q [O], ps_k [O], ps_v [O];
  logic signed [FW-1:0]   lnq_beta [O], lnq_invg [O], lnk_beta [O], lnk_invg [O];
  logic signed [15:0]     qk_scale;
  logic signed [15:0]     sm_th [NT];
  logic signed [PVW-1:0]  out_th [NT];
  logic signed [FW-1:0]   x_in [I];
  logic                   x_valid;
  logic signed [NBIT-1:0] y_out [N];
  logic                   y_valid [N];
  logic                   busy, done;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // model data
  int     wq [O][I], wk [O][I], wv [O][I];
  longint xs [N][I];
  int     exp_y [N][O];
  int     got_k [N];
  longint t_busy, first_valid [N];
  // mechanism counters
  int m_ln_min = 0, m_ln_max = 0, m_neg_gamma = 0, m_exp_zero = 0, m_p_nonzero = 0,
      m_p_zero = 0, m_y_min = 0, m_y_max = 0, m_frames = 0;

  task automatic model();
    longint th[], s_q[], s_k[], b_q[], b_k[], g_q[], g_k[], tv[], tsm[], to[];
    int xq [N][I];
    int qc [N][O], kc [N][O], vc [N][O], pc [N][N];
    longint e [N][N];
    th = new[NT]; s_q = new[NT]; s_k = new[NT]; tv = new[NT]; tsm = new[NT]; to = new[NT];
    foreach (th[k]) begin
      th[k] = x_th[k]; s_q[k] = lnq_s[k]; s_k[k] = lnk_s[k]; tv[k] = v_th[k];
      tsm[k] = sm_th[k]; to[k] = out_th[k];
    end
    b_q = new[O]; b_k = new[O]; g_q = new[O]; g_k = new[O];
    foreach (b_q[o]) begin
      b_q[o] = lnq_beta[o]; b_k[o] = lnk_beta[o]; g_q[o] = lnq_invg[o]; g_k[o] = lnk_invg[o];
    end
    for (int n = 0; n < N; n++) for (int i = 0; i < I; i++) xq[n][i] = quant(xs[n][i], th, NBIT);
    for (int n = 0; n < N; n++) begin
      longint yq[], yk[];
      int cq[], ck[];
      yq = new[O]; yk = new[O];
      for (int o = 0; o < O; o++) begin
        longint aq = 0, ak = 0, av = 0;
        for (int i = 0; i < I; i++) begin
          aq += xq[n][i] * wq[o][i]; ak += xq[n][i] * wk[o][i]; av += xq[n][i] * wv[o][i];
        end
        yq[o] = lin_post(aq, bias_q[o], ps_q[o]);
        yk[o] = lin_post(ak, bias_k[o], ps_k[o]);
        vc[n][o] = quant(lin_post(av, bias_v[o], ps_v[o]), tv, NBIT);
      end
      ln_quant(yq, s_q, b_q, g_q, NBIT, cq);
      ln_quant(yk, s_k, b_k, g_k, NBIT, ck);
      for (int o = 0; o < O; o++) begin
        qc[n][o] = cq[o]; kc[n][o] = ck[o];
        if (cq[o] == -(1 << (NBIT-1)) || ck[o] == -(1 << (NBIT-1))) m_ln_min++;
        if (cq[o] == (1 << (NBIT-1)) - 1 || ck[o] == (1 << (NBIT-1)) - 1) m_ln_max++;
      end
    end
    for (int i = 0; i < N; i++) begin
      longint sum = 0;
      for (int j = 0; j < N; j++) begin
        longint a = 0;
        for (int t = 0; t < O; t++) a += qc[i][t] * kc[j][t];
        e[i][j] = exp2a(a * qk_scale);
        if (e[i][j] == 0) m_exp_zero++;
        sum += e[i][j];
      end
      for (int j = 0; j < N; j++) begin
        pc[i][j] = sm_quant(e[i][j], sum, tsm, NBIT);
        if (pc[i][j] != 0) m_p_nonzero++; else m_p_zero++;
      end
    end
    for (int i = 0; i < N; i++) for (int o = 0; o < O; o++) begin
      longint a = 0;
      for (int j = 0; j < N; j++) a += pc[i][j] * vc[j][o];
      exp_y[i][o] = quant(a, to, NBIT);
      if (exp_y[i][o] == -(1 << (NBIT-1))) m_y_min++;
      if (exp_y[i][o] == (1 << (NBIT-1)) - 1) m_y_max++;
    end
  endtask

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (busy && !$past(busy)) t_busy = cyc;
    for (int i = 0; i < N; i++) if (y_valid[i]) begin
      if (got_k[i] == 0) first_valid[i] = cyc;
      if (got_k[i] < O) begin
        checks++;
        if (y_out[i] != exp_y[i][O-1-got_k[i]]) begin
          failures++;
          if (failures < 10) $display("MISMATCH row %0d ch %0d got %0d exp %0d", i,
                                      O-1-got_k[i], y_out[i], exp_y[i][O-1-got_k[i]]);
        end
      end
      got_k[i]++;
    end
  end

  initial begin : watchdog
    repeat (FRAMES * (2 * I + 6 * N + 6 * O + 200) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; w_row = '0; x_valid = 0;
    foreach (x_in[i]) x_in[i] = '0;
    foreach (wq_data[o]) begin wq_data[o] = '0; wk_data[o] = '0; wv_data[o] = '0; end
    // steps: dX = 0.5 for the input, dV = 0.5, LayerNorm step 0.5, attention step 1/8
    for (int k = 0; k < NT; k++) begin
      x_th[k]  = 16'(((2*k - NT + 1) - 1) * 64);   // (k' - 1/2) * 0.5 in Q8.8
      lnq_s[k] = 16'(((2*k - NT + 1) - 1) * 64);
      lnk_s[k] = 16'(((2*k - NT + 1) - 1) * 64);
      v_th[k]  = 16'(((2*k - NT + 1) - 1) * 64);
      sm_th[k] = 16'(((2*k - NT + 1) - 1) * 256); // (k' - 1/2) / 8 in Q4.12
      out_th[k] = PVW'(((2*k - NT + 1) - 1) * 2);  // step 4 in PV integer units
    end
    qk_scale = 16'(1800);                           // about 0.44
    for (int o = 0; o < O; o++) begin
      bias_q[o] = LAW'($signed($urandom_range(0, 8)) - 4);
      bias_k[o] = LAW'($signed($urandom_range(0, 8)) - 4);
      bias_v[o] = LAW'($signed($urandom_range(0, 8)) - 4);
      ps_q[o] = 16'($urandom_range(200, 600));
      ps_k[o] = 16'($urandom_range(200, 600));
      ps_v[o] = 16'($urandom_range(200, 600));
      lnq_beta[o] = 16'($signed($urandom_range(0, 128)) - 64);
      lnk_beta[o] = 16'($signed($urandom_range(0, 128)) - 64);
      lnq_invg[o] = 16'($urandom_range(128, 512));
      lnk_invg[o] = 16'($urandom_range(128, 512));
    end
    lnq_invg[1] = -16'sd256;   // one channel with a negative gamma
    m_neg_gamma++;
    for (int n = 0; n < N; n++) got_k[n] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      // weights (reloaded per frame)
      for (int o = 0; o < O; o++) for (int i = 0; i < I; i++) begin
        wq[o][i] = $urandom_range(0, 7) - 4;
        wk[o][i] = $urandom_range(0, 7) - 4;
        wv[o][i] = $urandom_range(0, 7) - 4;
      end
      for (int i = 0; i < I; i++) begin
        @(negedge clk);
        w_we = 1; w_row = i[$clog2(I)-1:0];
        for (int o = 0; o < O; o++) begin
          wq_data[o] = wq[o][i][NBIT-1:0]; wk_data[o] = wk[o][i][NBIT-1:0];
          wv_data[o] = wv[o][i][NBIT-1:0];
        end
      end
      @(negedge clk); w_we = 0;
      for (int n = 0; n < N; n++) for (int i = 0; i < I; i++)
        xs[n][i] = longint'($urandom_range(0, 1024)) - 512;
      model();
      for (int n = 0; n < N; n++) got_k[n] = 0;
      for (int n = 0; n < N; n++) begin
        if (n == 2) begin @(negedge clk); x_valid = 0; end   // one idle cycle in the stream
        @(negedge clk);
        x_valid = 1;
        for (int i = 0; i < I; i++) x_in[i] = FW'(xs[n][i]);
      end
      @(negedge clk); x_valid = 0;
      @(posedge done);
      @(posedge clk);
      m_frames++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (got_k[i] != O) begin failures++; $display("row %0d gave %0d values", i, got_k[i]); end
        checks++;
        if (first_valid[i] != t_busy + 4 + 2*N + 2*O + i) begin
          failures++;
          $display("row %0d first output at %0d, expected %0d", i, first_valid[i],
                   t_busy + 4 + 2*N + 2*O + i);
        end
      end
      repeat (4) @(negedge clk);
    end
    $display("mechanisms: ln_min=%0d ln_max=%0d neg_gamma=%0d exp_zero=%0d p_nonzero=%0d p_zero=%0d y_min=%0d y_max=%0d frames=%0d",
             m_ln_min, m_ln_max, m_neg_gamma, m_exp_zero, m_p_nonzero, m_p_zero, m_y_min, m_y_max, m_frames);
    if (m_ln_min == 0 || m_ln_max == 0 || m_neg_gamma == 0 || m_p_nonzero == 0 ||
        m_p_zero == 0 || m_frames < FRAMES) failures++;
    if (N >= 8 && (m_exp_zero == 0 || m_y_min == 0 || m_y_max == 0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
