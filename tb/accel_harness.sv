// accel_harness: reusable end-to-end check of one transformer_accel instance
// at a chosen size (N, D, M) and bitwidth B; the workload testbench places
// several of these side by side. It is the default-size testbench made
// generic: random B-bit weights, biases and BN parameters, a sinusoidal
// positional-encoding table and Softmax tables built from exp() are loaded
// through the cfg port, RUNS inferences run on random windows, and a
// reference model (integer-only, floor rounding, clamping to B bits)
// predicts every activation buffer and the forecast y, which are compared
// with the design after each inference. The clock count of each inference
// is compared with the sum of the component latencies and printed next to
// PAPER_CYCLES, the count the paper reports for that configuration.
//
// Interface: clk in; finished rises when all runs are over; checks and
// failures count the comparisons made and the ones that failed.
module accel_harness
  import tt_pkg::*;
#(
  parameter int N = N_SEQ,
  parameter int D = D_MODEL,
  parameter int M = M_IN,
  parameter int B = tt_pkg::B,
  parameter int RUNS = 1,
  parameter int PAPER_CYCLES = 0
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int F = 4 * D;
  localparam int LO = -(1 << (B - 1)), HI = (1 << (B - 1)) - 1;
  localparam int SH_ADJ = B - 4;
  localparam int L = 1 << B;

  logic rst_n, start, busy, done;
  cfg_wr_t cfg;
  stage_e stage;
  logic signed [B-1:0] y;

  transformer_accel #(.N(N), .D(D), .M(M), .B(B)) dut (.*);

  // ------------------------------------------------------------ model data
  int x [], w_in [], b_in [], w_q [], b_q [], w_k [], b_k [], w_v [], b_v [], w_o [], b_o [], w_f1 [], b_f1 [], w_f2 [], b_f2 [], w_out [], b_out [], pe [], nlut [], dlut [], g1 [], bt1 [], g2 [], bt2 [], emb [], xe [], q [], k [], v [], s [], p [], a [], o [], mh [], n1 [], f1 [], f2 [], r2 [], n2 [], gp [];
  int z_e;

  // reference tensors
  int y_ref;

  // ---------------------------------------------------- integer helpers
  function automatic longint fl(longint val, int sh);
    return (val >= 0) ? (val >> sh) : -((-val + (longint'(1) << sh) - 1) >> sh);
  endfunction
  function automatic int clampq(longint val);
    return (val > HI) ? HI : (val < LO) ? LO : int'(val);
  endfunction
  function automatic int rq(longint acc, qparam_t c);
    return clampq(fl(acc * c.m, c.shr + SH_ADJ) + c.zy);
  endfunction

  // y[r][o] = rq(bias[o] + sum_k (x[r][k]-zx)(w[o][k]-zw))
  task automatic linear(input int xin[], input int w[], input int bias[], input int rows,
                        input int inf, input int outf, input qparam_t c, output int yout[]);
    yout = new[rows * outf];
    for (int r = 0; r < rows; r++)
      for (int oo = 0; oo < outf; oo++) begin
        longint acc = bias[oo];
        for (int kk = 0; kk < inf; kk++)
          acc += longint'(xin[r * inf + kk] - c.zx) * (w[oo * inf + kk] - c.zw);
        yout[r * outf + oo] = rq(acc, c);
      end
  endtask

  task automatic add(input int a1[], input int a2[], input qadd_t c, output int yout[]);
    yout = new[a1.size()];
    foreach (a1[i])
      yout[i] = clampq(fl(longint'(a1[i] - c.z1) * c.m1, c.sh1) +
                       fl(longint'(a2[i] - c.z2) * c.m2, c.sh2) + c.z3);
  endtask

  task automatic bnorm(input int xin[], input int g[], input int bt[], input qparam_t c,
                       output int yout[]);
    yout = new[N * D];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < D; j++)
        yout[i * D + j] = rq(longint'(g[j] - c.zw) * (xin[i * D + j] - c.zx) + bt[j], c);
  endtask

  task automatic alloc_all();
    x = new[N * M];
    w_in = new[D * M];
    b_in = new[D];
    w_q = new[D * D];
    b_q = new[D];
    w_k = new[D * D];
    b_k = new[D];
    w_v = new[D * D];
    b_v = new[D];
    w_o = new[D * D];
    b_o = new[D];
    w_f1 = new[F * D];
    b_f1 = new[F];
    w_f2 = new[D * F];
    b_f2 = new[D];
    w_out = new[D];
    b_out = new[1];
    pe = new[N * D];
    nlut = new[L];
    dlut = new[L];
    g1 = new[D];
    bt1 = new[D];
    g2 = new[D];
    bt2 = new[D];
    emb = new[N * D];
    xe = new[N * D];
    q = new[N * D];
    k = new[N * D];
    v = new[N * D];
    s = new[N * N];
    p = new[N * N];
    a = new[N * D];
    o = new[N * D];
    mh = new[N * D];
    n1 = new[N * D];
    f1 = new[N * F];
    f2 = new[N * D];
    r2 = new[N * D];
    n2 = new[N * D];
    gp = new[D];
  endtask

  task automatic reference_model();
    int tmp [];
    linear(x, w_in, b_in, N, M, D, Q_LIN_IN, tmp);    emb = tmp;
    add(emb, pe, Q_ADD_PE, tmp);                      xe = tmp;
    linear(xe, w_q, b_q, N, D, D, Q_LIN_Q, tmp);      q = tmp;
    linear(xe, w_k, b_k, N, D, D, Q_LIN_K, tmp);      k = tmp;
    linear(xe, w_v, b_v, N, D, D, Q_LIN_V, tmp);      v = tmp;
    // score = Q K^T
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        longint acc = 0;
        for (int kk = 0; kk < D; kk++)
          acc += longint'(q[i * D + kk] - Q_MM_SCORE.zx) * (k[j * D + kk] - Q_MM_SCORE.zw);
        s[i * N + j] = rq(acc, Q_MM_SCORE);
      end
    // softmax, row by row
    for (int i = 0; i < N; i++) begin
      int mx = LO, sum = 0;
      for (int j = 0; j < N; j++) if (s[i * N + j] > mx) mx = s[i * N + j];
      for (int j = 0; j < N; j++) sum += dlut[mx - s[i * N + j]] - z_e;
      if (sum <= 0) sum = 1;
      for (int j = 0; j < N; j++) begin
        int num = nlut[mx - s[i * N + j]];
        if (num < 0) num = 0;
        p[i * N + j] = clampq(num / sum + LO);
      end
    end
    // attention = P V
    for (int i = 0; i < N; i++)
      for (int j = 0; j < D; j++) begin
        longint acc = 0;
        for (int kk = 0; kk < N; kk++)
          acc += longint'(p[i * N + kk] - LO) * (v[kk * D + j] - Q_MM_ATTN.zw);
        a[i * D + j] = rq(acc, Q_MM_ATTN);
      end
    linear(a, w_o, b_o, N, D, D, Q_LIN_O, tmp);       o = tmp;
    add(o, xe, Q_ADD_MHA, tmp);                       mh = tmp;
    bnorm(mh, g1, bt1, Q_BN_MHA, tmp);                n1 = tmp;
    linear(n1, w_f1, b_f1, N, D, F, Q_LIN_F1, tmp);
    foreach (tmp[i]) if (tmp[i] < Q_LIN_F1.zy) tmp[i] = Q_LIN_F1.zy;   // ReLU
    f1 = tmp;
    linear(f1, w_f2, b_f2, N, F, D, Q_LIN_F2, tmp);   f2 = tmp;
    add(f2, n1, Q_ADD_FFN, tmp);                      r2 = tmp;
    bnorm(r2, g2, bt2, Q_BN_FFN, tmp);                n2 = tmp;
    for (int j = 0; j < D; j++) begin
      longint acc = 0;
      for (int i = 0; i < N; i++) acc += n2[i * D + j] - Q_GAP.zx;
      gp[j] = clampq(fl(acc * Q_GAP.m, Q_GAP.shr) + Q_GAP.zy);
    end
    linear(gp, w_out, b_out, 1, D, 1, Q_LIN_OUT, tmp); y_ref = tmp[0];
  endtask

  // ------------------------------------------------------------ loading
  task automatic cfg_write(cfg_target_e t, int addr, int data);
    cfg.we = 1'b1; cfg.target = t; cfg.addr = CFG_AW'(addr); cfg.data = CFG_DW'(data);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic rand_fill(ref int arr[], input int lo, input int hi);
    foreach (arr[i]) arr[i] = $urandom_range(0, hi - lo) + lo;
  endtask

  task automatic load_params();
    real s_e, s_a, s_s;
    foreach (w_in[i]) begin w_in[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LIN_IN_W, i, w_in[i]); end
    foreach (b_in[i]) begin b_in[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LIN_IN_B, i, b_in[i]); end
    foreach (w_q[i])  begin w_q[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LQ_W, i, w_q[i]); end
    foreach (b_q[i])  begin b_q[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LQ_B, i, b_q[i]); end
    foreach (w_k[i])  begin w_k[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LK_W, i, w_k[i]); end
    foreach (b_k[i])  begin b_k[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LK_B, i, b_k[i]); end
    foreach (w_v[i])  begin w_v[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LV_W, i, w_v[i]); end
    foreach (b_v[i])  begin b_v[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LV_B, i, b_v[i]); end
    foreach (w_o[i])  begin w_o[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LO_W, i, w_o[i]); end
    foreach (b_o[i])  begin b_o[i]  = $urandom_range(0, L - 1) - L / 2; cfg_write(T_LO_B, i, b_o[i]); end
    foreach (w_f1[i]) begin w_f1[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_F1_W, i, w_f1[i]); end
    foreach (b_f1[i]) begin b_f1[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_F1_B, i, b_f1[i]); end
    foreach (w_f2[i]) begin w_f2[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_F2_W, i, w_f2[i]); end
    foreach (b_f2[i]) begin b_f2[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_F2_B, i, b_f2[i]); end
    foreach (w_out[i]) begin w_out[i] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_OUT_W, i, w_out[i]); end
    b_out[0] = $urandom_range(0, L - 1) - L / 2; cfg_write(T_OUT_B, 0, b_out[0]);
    // BN: gamma 1..L/4 (zero point 0), offsets within +-L/4
    foreach (g1[i])  begin g1[i]  = $urandom_range(1, L / 4);  cfg_write(T_BN1_G, i, g1[i]); end
    foreach (bt1[i]) begin bt1[i] = $urandom_range(0, L / 2) - L / 4; cfg_write(T_BN1_B, i, bt1[i]); end
    foreach (g2[i])  begin g2[i]  = $urandom_range(1, L / 4);  cfg_write(T_BN2_G, i, g2[i]); end
    foreach (bt2[i]) begin bt2[i] = $urandom_range(0, L / 2) - L / 4; cfg_write(T_BN2_B, i, bt2[i]); end
    // positional encoding: sin / cos, scale 1/7
    for (int ps = 0; ps < N; ps++)
      for (int f = 0; f < D; f++) begin
        automatic real ang = ps / (10000.0 ** (real'(f - f % 2) / D));
        automatic real val = (f % 2 == 0) ? $sin(ang) : $cos(ang);
        pe[ps * D + f] = $rtoi(val * HI + ((val >= 0) ? 0.5 : -0.5));
        cfg_write(T_PE, ps * D + f, pe[ps * D + f]);
      end
    // Softmax tables: S_E = n^2 h / (2^(2b) - 1), Z_E = 2^(2b-1) - 1/S_E,
    // S_A = 1/(2^b - 1), scores at scale s_s; DLUT carries Z_E
    s_e = real'(N * N) / ((1 << (2 * B)) - 1);
    s_a = 1.0 / ((1 << B) - 1);
    s_s = 4.0 / L;
    z_e = (1 << (2 * B - 1)) - $rtoi(1.0 / s_e + 0.5);
    for (int d = 0; d < L; d++) begin
      automatic real e = $exp(-s_s * d);
      automatic int dv = $rtoi(e / s_e + 0.5) + z_e;
      automatic int nv = $rtoi(e / (s_e * s_a) + 0.5);
      dlut[d] = (dv > (1 << (2 * B - 1)) - 1) ? (1 << (2 * B - 1)) - 1 : dv;
      nlut[d] = (nv > (1 << (3 * B - 1)) - 1) ? (1 << (3 * B - 1)) - 1 : nv;
      cfg_write(T_DLUT, d, dlut[d]);
      cfg_write(T_NLUT, d, nlut[d]);
    end
  endtask

  // ---------------------------------------------------- mechanism counters
  int cyc, n_relu, n_sat, n_div, n_score_map, n_attn_plain, n_neg_res, n_pos_res, n_ignored;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
    if (dut.f1_we && dut.u_relu.clamped) n_relu++;
    if (dut.u_lin_q.sat || dut.u_lin_f2.sat || dut.u_add_mha.sat || dut.u_lin_in.sat) n_sat++;
    if (dut.u_softmax.u_div.done) n_div++;
    if (dut.sc_we) n_score_map++;
    if (dut.at_we) n_attn_plain++;
    if (dut.am_we && dut.am_yd < 0) n_neg_res++;
    if (dut.am_we && dut.am_yd > 0) n_pos_res++;
    end
  end

  task automatic compare(string name, input int ref_t[], input int got[]);
    int bad = 0;
    foreach (ref_t[i]) if (got[i] != ref_t[i]) begin
      if (bad < 3) $display("FAIL %s[%0d]: got %0d expected %0d", name, i, got[i], ref_t[i]);
      bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d of %0d differ", name, bad, ref_t.size()); end
  endtask

  // read one of the design's activation buffers into a plain array
  `define GRAB_H(buf_inst, len, dst) begin dst = new[len]; foreach (dst[i]) dst[i] = int'(dut.buf_inst.mem[i]); end

  initial begin
    int t0, lat, expect_lat, got [];
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 0; start = 0; cfg = '0;
    cyc = 0; n_relu = 0; n_sat = 0; n_div = 0; n_score_map = 0; n_attn_plain = 0;
    n_neg_res = 0; n_pos_res = 0; n_ignored = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    alloc_all();
    load_params();
    // component latencies: MAC loops R*O*I + 2, element passes LEN + 2,
    // softmax 1 + N*(2(N+1) + N(3B+4)); plus one clock per stage hand-over
    expect_lat = (N*D*M + 2) + (N*D + 2) + 3 * (N*D*D + 2) + (N*N*D + 2)
               + (1 + N * (2 * (N + 1) + N * (3 * B + 4))) + (N*D*N + 2) + (N*D*D + 2)
               + 2 * (N*D + 2) + (N*F*D + 2) + (N*D*F + 2) + 2 * (N*D + 2)
               + (N*D + 2) + (D + 2) + 17 + 2;
    for (int run = 0; run < RUNS; run++) begin
      foreach (x[i]) begin
        x[i] = $urandom_range(0, L - 1) - L / 2;
        cfg_write(T_X, i, x[i]);
      end
      reference_model();
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      repeat (50) @(negedge clk);
      // a start while busy must be ignored
      start = 1; @(negedge clk); start = 0;
      n_ignored++;
      while (!done) @(negedge clk);
      lat = cyc - t0;
      $display("(n=%0d, d=%0d, m=%0d, b=%0d) inference %0d: %0d clocks (paper: %0d), y = %0d (reference %0d)",
               N, D, M, B, run, lat, PAPER_CYCLES, y, y_ref);
      checks++;
      if (lat != expect_lat) begin failures++; $display("FAIL latency %0d expected %0d", lat, expect_lat); end
      checks++;
      if (int'(y) != y_ref) begin failures++; $display("FAIL y"); end
      `GRAB_H(u_buf_emb, N * D, got) compare("emb", emb, got);
      `GRAB_H(u_buf_xe, N * D, got)  compare("x_embed", xe, got);
      `GRAB_H(u_buf_q, N * D, got)   compare("Q", q, got);
      `GRAB_H(u_buf_k, N * D, got)   compare("K", k, got);
      `GRAB_H(u_buf_v, N * D, got)   compare("V", v, got);
      `GRAB_H(u_buf_s, N * N, got)   compare("score", s, got);
      `GRAB_H(u_buf_p, N * N, got)   compare("softmax", p, got);
      `GRAB_H(u_buf_a, N * D, got)   compare("attention", a, got);
      `GRAB_H(u_buf_o, N * D, got)   compare("L_O", o, got);
      `GRAB_H(u_buf_m, N * D, got)   compare("add_mha", mh, got);
      `GRAB_H(u_buf_n1, N * D, got)  compare("bn_mha", n1, got);
      `GRAB_H(u_buf_f1, N * F, got)  compare("ffn1_relu", f1, got);
      `GRAB_H(u_buf_f2, N * D, got)  compare("ffn2", f2, got);
      `GRAB_H(u_buf_r2, N * D, got)  compare("add_ffn", r2, got);
      `GRAB_H(u_buf_n2, N * D, got)  compare("bn_ffn", n2, got);
      `GRAB_H(u_buf_g, D, got)       compare("gap", gp, got);
      repeat (5) @(negedge clk);
    end
    $display("(n=%0d, d=%0d, m=%0d, b=%0d) mechanisms: score writes %0d, attention writes %0d, divisions %0d,",
             N, D, M, B, n_score_map, n_attn_plain, n_div);
    $display("    ReLU clamps %0d, saturations %0d, negative/positive residuals %0d/%0d, ignored starts %0d",
             n_relu, n_sat, n_neg_res, n_pos_res, n_ignored);
    checks++; if (n_score_map != RUNS * N * N) begin failures++; $display("FAIL score writes"); end
    checks++; if (n_attn_plain != RUNS * N * D) begin failures++; $display("FAIL attention writes"); end
    checks++; if (n_div != RUNS * N * N) begin failures++; $display("FAIL division count"); end
    checks++; if (n_relu == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    checks++; if (n_neg_res == 0 || n_pos_res == 0) begin failures++; $display("FAIL residual sign coverage"); end
    finished = 1'b1;
  end
  `undef GRAB_H
endmodule
