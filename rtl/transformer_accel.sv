// transformer_accel: integer-only single-head Transformer encoder accelerator
// for single-step time-series forecasting.
//
// Model (n = N time steps of M features in, one forecast value out):
//   input module   X (N x M) -> L_input (M -> D) -> + positional encoding
//   encoder layer  Q, K, V = L_Q, L_K, L_V (D -> D)
//                  S = Q K^T (scaled)  -> row-wise Softmax -> P
//                  attention = P V -> L_O (D -> D)
//                  residual add, batch norm
//                  L_FFN1 (D -> 4D) with ReLU -> L_FFN2 (4D -> D)
//                  residual add, batch norm
//   output module  global average pooling over N -> L_output (D -> 1)
// With one head, head split and concat are the identity and do not appear.
//
// Every tensor is a B-bit signed integer with its own scale and zero point;
// each layer rescales with an ApproxMul constant pair taken from tt_pkg. The
// components work one at a time, in the order above, under layer_sequencer,
// and hand results on through activation buffers (one per tensor).
//
// Interface:
//   cfg    : write port for the input window (T_X), the weights and biases of
//            the eight linear layers, the positional-encoding table, the
//            Softmax tables and the two BN parameter sets (see cfg_target_e);
//            one word per clock, addresses row-major
//   start  : begins an inference on the loaded window (ignored while busy)
//   busy   : high during an inference
//   done   : one-clock pulse when y is valid; y holds until the next result
//   stage  : the component currently running
// The host interface is this design's own; the paper's accelerator bakes all
// parameters into the generated hardware. Do not write cfg while busy.
//
// N, D, M and the bitwidth B can be set per instance. The ApproxMul constants
// in tt_pkg belong to the 4-bit model; for another B the shift of every stage
// that multiplies two B-bit operands (linear layers, matmuls, BN) grows by
// B - 4, so that values keep the same share of the output range (this
// design's choice; a trained model would bring its own constants).
//
// Timing: one inference takes the sum of the component latencies plus 19
// clocks of stage hand-over, 164,364 clocks at the defaults (N=12, D=32, M=7,
// B=4), almost all of it in the multiply-accumulate loops (one MAC per clock).
// done rises that many clocks after the start pulse is sampled.
module transformer_accel
  import tt_pkg::*;
#(
  parameter int unsigned N = N_SEQ,
  parameter int unsigned D = D_MODEL,
  parameter int unsigned M = M_IN,
  parameter int unsigned B = tt_pkg::B
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output stage_e              stage,
  output logic signed [B-1:0] y
);
  localparam int SH_ADJ        = int'(B) - 4;
  localparam int unsigned F   = 4 * D;
  localparam int unsigned NM  = N * M;
  localparam int unsigned ND  = N * D;
  localparam int unsigned NN  = N * N;
  localparam int unsigned NF  = N * F;
  localparam int unsigned AX  = $clog2(NM);
  localparam int unsigned AD  = $clog2(ND);
  localparam int unsigned AN  = $clog2(NN);
  localparam int unsigned AF  = $clog2(NF);
  localparam int unsigned AG  = (D > 1) ? $clog2(D) : 1;
  // Softmax output zero point: scale 1/(2^B - 1) over [0, 1] puts 0 at -2^(B-1)
  // (tt_pkg's SM_Z_A at B = 4); the attention matmul reads P with it
  localparam int Z_A = -(1 << (B - 1));
  // softmax denominator zero point: 2^(2B-1) - (2^(2B)-1)/(N^2 h), h = 1
  localparam int Z_E = (1 << (2 * B - 1)) - (((1 << (2 * B)) - 1 + (NN / 2)) / NN);

  // ------------------------------------------------------------ control
  logic stage_start, stage_done;

  layer_sequencer u_seq (
    .clk, .rst_n, .start, .stage_done, .stage, .stage_start, .busy, .done);

  function automatic logic go(stage_e s_now, stage_e s);
    return (s_now == s);
  endfunction

  // --------------------------------------------------------- load port
  function automatic logic hit(cfg_wr_t c, cfg_target_e t);
    return c.we && (c.target == t);
  endfunction

  // --------------------------------------------------------- wires
  // per-component ports (widths as each component declares them)
  logic [$clog2(NM+1)-1:0]  li_xa;  logic [$clog2(ND+1)-1:0] li_ya;
  logic [$clog2(ND+1)-1:0]  pe_ra,  pe_ya;
  logic [$clog2(ND+1)-1:0]  lq_xa, lq_ya, lk_xa, lk_ya, lv_xa, lv_ya;
  logic [$clog2(ND+1)-1:0]  sc_aa, sc_ba;  logic [$clog2(NN+1)-1:0] sc_ya;
  logic [$clog2(NN+1)-1:0]  sm_xa, sm_ya;
  logic [$clog2(NN+1)-1:0]  at_aa;  logic [$clog2(ND+1)-1:0] at_ba, at_ya;
  logic [$clog2(ND+1)-1:0]  lo_xa, lo_ya;
  logic [$clog2(ND+1)-1:0]  am_ra, am_ya;
  logic [$clog2(ND+1)-1:0]  b1_xa, b1_ya;
  logic [$clog2(ND+1)-1:0]  f1_xa;  logic [$clog2(NF+1)-1:0] f1_ya;
  logic [$clog2(NF+1)-1:0]  f2_xa;  logic [$clog2(ND+1)-1:0] f2_ya;
  logic [$clog2(ND+1)-1:0]  af_ra, af_ya;
  logic [$clog2(ND+1)-1:0]  b2_xa, b2_ya;
  logic [$clog2(ND+1)-1:0]  gp_xa;  logic [$clog2(D+1)-1:0]  gp_ya;
  logic [$clog2(D+1)-1:0]   lu_xa;  logic [$clog2(2)-1:0]    lu_ya;

  logic li_we, pe_we, lq_we, lk_we, lv_we, sc_we, sm_we, at_we, lo_we,
        am_we, b1_we, f1_we, f2_we, af_we, b2_we, gp_we, lu_we;
  logic signed [B-1:0] li_yd, pe_yd, lq_yd, lk_yd, lv_yd, sc_yd, sm_yd, at_yd,
        lo_yd, am_yd, b1_yd, f1_yd, f1_relu, f2_yd, af_yd, b2_yd, gp_yd, lu_yd;
  logic li_dn, pe_dn, lq_dn, lk_dn, lv_dn, sc_dn, sm_dn, at_dn, lo_dn,
        am_dn, b1_dn, f1_dn, f2_dn, af_dn, b2_dn, gp_dn, lu_dn;

  // buffer read data
  logic signed [B-1:0] x_rd, emb_rd, pe_rd, xe_rd, q_rd, k_rd, v_rd, s_rd,
        p_rd, a_rd, o_rd, m_rd, n1_rd, f1_rd, f2_rd, r2_rd, n2_rd, g_rd;
  logic [AD-1:0] xe_ra, n1_ra;

  // ------------------------------------------------------ input module
  act_buffer #(.DEPTH(NM), .W(B)) u_buf_x (
    .clk, .wr_en(hit(cfg, T_X)), .wr_addr(cfg.addr[AX-1:0]), .wr_data(cfg.data[B-1:0]),
    .rd_addr(AX'(li_xa)), .rd_data(x_rd));

  linear_layer #(.ROWS(N), .IN_F(M), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_IN.zx), .ZW(Q_LIN_IN.zw), .ZY(Q_LIN_IN.zy), .M_MUL(Q_LIN_IN.m),
    .SHIFT(Q_LIN_IN.shr + SH_ADJ)) u_lin_in (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LIN_IN)), .busy(), .done(li_dn),
    .x_raddr(li_xa), .x_rdata(x_rd), .y_we(li_we), .y_waddr(li_ya), .y_wdata(li_yd), .sat(),
    .prm_we(hit(cfg, T_LIN_IN_W) || hit(cfg, T_LIN_IN_B)), .prm_bias(cfg.target == T_LIN_IN_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_emb (
    .clk, .wr_en(li_we), .wr_addr(AD'(li_ya)), .wr_data(li_yd),
    .rd_addr(AD'(pe_ra)), .rd_data(emb_rd));

  pe_lut #(.N(N), .D(D), .B(B)) u_pe (
    .clk, .wr_en(hit(cfg, T_PE)), .wr_addr(cfg.addr[AD-1:0]), .wr_data(cfg.data[B-1:0]),
    .rd_addr(AD'(pe_ra)), .rd_data(pe_rd));

  add_q #(.LEN(ND), .B(B), .ACC_W(ACC_W), .Z1(Q_ADD_PE.z1), .Z2(Q_ADD_PE.z2),
    .Z3(Q_ADD_PE.z3), .M1(Q_ADD_PE.m1), .SH1(Q_ADD_PE.sh1), .M2(Q_ADD_PE.m2),
    .SH2(Q_ADD_PE.sh2)) u_add_pe (
    .clk, .rst_n, .start(stage_start && go(stage, ST_ADD_PE)), .busy(), .done(pe_dn),
    .rd_addr(pe_ra), .a_rdata(emb_rd), .b_rdata(pe_rd),
    .y_we(pe_we), .y_waddr(pe_ya), .y_wdata(pe_yd), .sat());

  // X_embed: read by L_Q, L_K, L_V and by the first residual add
  always_comb begin
    unique case (stage)
      ST_LK:      xe_ra = AD'(lk_xa);
      ST_LV:      xe_ra = AD'(lv_xa);
      ST_ADD_MHA: xe_ra = AD'(am_ra);
      default:    xe_ra = AD'(lq_xa);
    endcase
  end

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_xe (
    .clk, .wr_en(pe_we), .wr_addr(AD'(pe_ya)), .wr_data(pe_yd),
    .rd_addr(xe_ra), .rd_data(xe_rd));

  // ------------------------------------------------ multi-head attention
  linear_layer #(.ROWS(N), .IN_F(D), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_Q.zx), .ZW(Q_LIN_Q.zw), .ZY(Q_LIN_Q.zy), .M_MUL(Q_LIN_Q.m),
    .SHIFT(Q_LIN_Q.shr + SH_ADJ)) u_lin_q (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LQ)), .busy(), .done(lq_dn),
    .x_raddr(lq_xa), .x_rdata(xe_rd), .y_we(lq_we), .y_waddr(lq_ya), .y_wdata(lq_yd), .sat(),
    .prm_we(hit(cfg, T_LQ_W) || hit(cfg, T_LQ_B)), .prm_bias(cfg.target == T_LQ_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  linear_layer #(.ROWS(N), .IN_F(D), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_K.zx), .ZW(Q_LIN_K.zw), .ZY(Q_LIN_K.zy), .M_MUL(Q_LIN_K.m),
    .SHIFT(Q_LIN_K.shr + SH_ADJ)) u_lin_k (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LK)), .busy(), .done(lk_dn),
    .x_raddr(lk_xa), .x_rdata(xe_rd), .y_we(lk_we), .y_waddr(lk_ya), .y_wdata(lk_yd), .sat(),
    .prm_we(hit(cfg, T_LK_W) || hit(cfg, T_LK_B)), .prm_bias(cfg.target == T_LK_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  linear_layer #(.ROWS(N), .IN_F(D), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_V.zx), .ZW(Q_LIN_V.zw), .ZY(Q_LIN_V.zy), .M_MUL(Q_LIN_V.m),
    .SHIFT(Q_LIN_V.shr + SH_ADJ)) u_lin_v (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LV)), .busy(), .done(lv_dn),
    .x_raddr(lv_xa), .x_rdata(xe_rd), .y_we(lv_we), .y_waddr(lv_ya), .y_wdata(lv_yd), .sat(),
    .prm_we(hit(cfg, T_LV_W) || hit(cfg, T_LV_B)), .prm_bias(cfg.target == T_LV_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_q (
    .clk, .wr_en(lq_we), .wr_addr(AD'(lq_ya)), .wr_data(lq_yd),
    .rd_addr(AD'(sc_aa)), .rd_data(q_rd));
  act_buffer #(.DEPTH(ND), .W(B)) u_buf_k (
    .clk, .wr_en(lk_we), .wr_addr(AD'(lk_ya)), .wr_data(lk_yd),
    .rd_addr(AD'(sc_ba)), .rd_data(k_rd));
  act_buffer #(.DEPTH(ND), .W(B)) u_buf_v (
    .clk, .wr_en(lv_we), .wr_addr(AD'(lv_ya)), .wr_data(lv_yd),
    .rd_addr(AD'(at_ba)), .rd_data(v_rd));

  // score = Q K^T, K read through the address mapping (no transpose buffer)
  matmul_q #(.ROWS(N), .INNER(D), .COLS(N), .ADDR_MAP(1'b1), .B(B), .ACC_W(ACC_W),
    .ZA(Q_MM_SCORE.zx), .ZB(Q_MM_SCORE.zw), .ZY(Q_MM_SCORE.zy), .M_MUL(Q_MM_SCORE.m),
    .SHIFT(Q_MM_SCORE.shr + SH_ADJ)) u_mm_score (
    .clk, .rst_n, .start(stage_start && go(stage, ST_SCORE)), .busy(), .done(sc_dn),
    .a_raddr(sc_aa), .a_rdata(q_rd), .b_raddr(sc_ba), .b_rdata(k_rd),
    .y_we(sc_we), .y_waddr(sc_ya), .y_wdata(sc_yd), .sat());

  act_buffer #(.DEPTH(NN), .W(B)) u_buf_s (
    .clk, .wr_en(sc_we), .wr_addr(AN'(sc_ya)), .wr_data(sc_yd),
    .rd_addr(AN'(sm_xa)), .rd_data(s_rd));

  softmax_q #(.N(N), .B(B), .Z_E(Z_E), .Z_A(Z_A)) u_softmax (
    .clk, .rst_n, .start(stage_start && go(stage, ST_SOFTMAX)), .busy(), .done(sm_dn),
    .x_raddr(sm_xa), .x_rdata(s_rd), .y_we(sm_we), .y_waddr(sm_ya), .y_wdata(sm_yd), .sat(),
    .lut_we(hit(cfg, T_NLUT) || hit(cfg, T_DLUT)), .lut_sel(cfg.target == T_DLUT),
    .lut_addr(cfg.addr[B-1:0]), .lut_data(cfg.data[3*B-1:0]));

  act_buffer #(.DEPTH(NN), .W(B)) u_buf_p (
    .clk, .wr_en(sm_we), .wr_addr(AN'(sm_ya)), .wr_data(sm_yd),
    .rd_addr(AN'(at_aa)), .rd_data(p_rd));

  // attention = P V, address mapping off
  matmul_q #(.ROWS(N), .INNER(N), .COLS(D), .ADDR_MAP(1'b0), .B(B), .ACC_W(ACC_W),
    .ZA(Z_A), .ZB(Q_MM_ATTN.zw), .ZY(Q_MM_ATTN.zy), .M_MUL(Q_MM_ATTN.m),
    .SHIFT(Q_MM_ATTN.shr + SH_ADJ)) u_mm_attn (
    .clk, .rst_n, .start(stage_start && go(stage, ST_ATTN)), .busy(), .done(at_dn),
    .a_raddr(at_aa), .a_rdata(p_rd), .b_raddr(at_ba), .b_rdata(v_rd),
    .y_we(at_we), .y_waddr(at_ya), .y_wdata(at_yd), .sat());

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_a (
    .clk, .wr_en(at_we), .wr_addr(AD'(at_ya)), .wr_data(at_yd),
    .rd_addr(AD'(lo_xa)), .rd_data(a_rd));

  linear_layer #(.ROWS(N), .IN_F(D), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_O.zx), .ZW(Q_LIN_O.zw), .ZY(Q_LIN_O.zy), .M_MUL(Q_LIN_O.m),
    .SHIFT(Q_LIN_O.shr + SH_ADJ)) u_lin_o (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LO)), .busy(), .done(lo_dn),
    .x_raddr(lo_xa), .x_rdata(a_rd), .y_we(lo_we), .y_waddr(lo_ya), .y_wdata(lo_yd), .sat(),
    .prm_we(hit(cfg, T_LO_W) || hit(cfg, T_LO_B)), .prm_bias(cfg.target == T_LO_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_o (
    .clk, .wr_en(lo_we), .wr_addr(AD'(lo_ya)), .wr_data(lo_yd),
    .rd_addr(AD'(am_ra)), .rd_data(o_rd));

  // ---------------------------------------------- residual + batch norm
  add_q #(.LEN(ND), .B(B), .ACC_W(ACC_W), .Z1(Q_ADD_MHA.z1), .Z2(Q_ADD_MHA.z2),
    .Z3(Q_ADD_MHA.z3), .M1(Q_ADD_MHA.m1), .SH1(Q_ADD_MHA.sh1), .M2(Q_ADD_MHA.m2),
    .SH2(Q_ADD_MHA.sh2)) u_add_mha (
    .clk, .rst_n, .start(stage_start && go(stage, ST_ADD_MHA)), .busy(), .done(am_dn),
    .rd_addr(am_ra), .a_rdata(o_rd), .b_rdata(xe_rd),
    .y_we(am_we), .y_waddr(am_ya), .y_wdata(am_yd), .sat());

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_m (
    .clk, .wr_en(am_we), .wr_addr(AD'(am_ya)), .wr_data(am_yd),
    .rd_addr(AD'(b1_xa)), .rd_data(m_rd));

  batchnorm_q #(.ROWS(N), .D(D), .B(B), .BETA_W(B), .ACC_W(ACC_W), .ZX(Q_BN_MHA.zx),
    .ZG(Q_BN_MHA.zw), .ZY(Q_BN_MHA.zy), .M_MUL(Q_BN_MHA.m), .SHIFT(Q_BN_MHA.shr + SH_ADJ)) u_bn_mha (
    .clk, .rst_n, .start(stage_start && go(stage, ST_BN_MHA)), .busy(), .done(b1_dn),
    .x_raddr(b1_xa), .x_rdata(m_rd), .y_we(b1_we), .y_waddr(b1_ya), .y_wdata(b1_yd), .sat(),
    .prm_we(hit(cfg, T_BN1_G) || hit(cfg, T_BN1_B)), .prm_beta(cfg.target == T_BN1_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  // BN_MHA output: read by L_FFN1 and by the second residual add
  assign n1_ra = (stage == ST_ADD_FFN) ? AD'(af_ra) : AD'(f1_xa);

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_n1 (
    .clk, .wr_en(b1_we), .wr_addr(AD'(b1_ya)), .wr_data(b1_yd),
    .rd_addr(n1_ra), .rd_data(n1_rd));

  // ------------------------------------------------------ feed-forward
  linear_layer #(.ROWS(N), .IN_F(D), .OUT_F(F), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_F1.zx), .ZW(Q_LIN_F1.zw), .ZY(Q_LIN_F1.zy), .M_MUL(Q_LIN_F1.m),
    .SHIFT(Q_LIN_F1.shr + SH_ADJ)) u_lin_f1 (
    .clk, .rst_n, .start(stage_start && go(stage, ST_FFN1)), .busy(), .done(f1_dn),
    .x_raddr(f1_xa), .x_rdata(n1_rd), .y_we(f1_we), .y_waddr(f1_ya), .y_wdata(f1_yd), .sat(),
    .prm_we(hit(cfg, T_F1_W) || hit(cfg, T_F1_B)), .prm_bias(cfg.target == T_F1_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  relu #(.B(B), .Z(Q_LIN_F1.zy)) u_relu (.x(f1_yd), .y(f1_relu), .clamped());

  act_buffer #(.DEPTH(NF), .W(B)) u_buf_f1 (
    .clk, .wr_en(f1_we), .wr_addr(AF'(f1_ya)), .wr_data(f1_relu),
    .rd_addr(AF'(f2_xa)), .rd_data(f1_rd));

  linear_layer #(.ROWS(N), .IN_F(F), .OUT_F(D), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_F2.zx), .ZW(Q_LIN_F2.zw), .ZY(Q_LIN_F2.zy), .M_MUL(Q_LIN_F2.m),
    .SHIFT(Q_LIN_F2.shr + SH_ADJ)) u_lin_f2 (
    .clk, .rst_n, .start(stage_start && go(stage, ST_FFN2)), .busy(), .done(f2_dn),
    .x_raddr(f2_xa), .x_rdata(f1_rd), .y_we(f2_we), .y_waddr(f2_ya), .y_wdata(f2_yd), .sat(),
    .prm_we(hit(cfg, T_F2_W) || hit(cfg, T_F2_B)), .prm_bias(cfg.target == T_F2_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_f2 (
    .clk, .wr_en(f2_we), .wr_addr(AD'(f2_ya)), .wr_data(f2_yd),
    .rd_addr(AD'(af_ra)), .rd_data(f2_rd));

  add_q #(.LEN(ND), .B(B), .ACC_W(ACC_W), .Z1(Q_ADD_FFN.z1), .Z2(Q_ADD_FFN.z2),
    .Z3(Q_ADD_FFN.z3), .M1(Q_ADD_FFN.m1), .SH1(Q_ADD_FFN.sh1), .M2(Q_ADD_FFN.m2),
    .SH2(Q_ADD_FFN.sh2)) u_add_ffn (
    .clk, .rst_n, .start(stage_start && go(stage, ST_ADD_FFN)), .busy(), .done(af_dn),
    .rd_addr(af_ra), .a_rdata(f2_rd), .b_rdata(n1_rd),
    .y_we(af_we), .y_waddr(af_ya), .y_wdata(af_yd), .sat());

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_r2 (
    .clk, .wr_en(af_we), .wr_addr(AD'(af_ya)), .wr_data(af_yd),
    .rd_addr(AD'(b2_xa)), .rd_data(r2_rd));

  batchnorm_q #(.ROWS(N), .D(D), .B(B), .BETA_W(B), .ACC_W(ACC_W), .ZX(Q_BN_FFN.zx),
    .ZG(Q_BN_FFN.zw), .ZY(Q_BN_FFN.zy), .M_MUL(Q_BN_FFN.m), .SHIFT(Q_BN_FFN.shr + SH_ADJ)) u_bn_ffn (
    .clk, .rst_n, .start(stage_start && go(stage, ST_BN_FFN)), .busy(), .done(b2_dn),
    .x_raddr(b2_xa), .x_rdata(r2_rd), .y_we(b2_we), .y_waddr(b2_ya), .y_wdata(b2_yd), .sat(),
    .prm_we(hit(cfg, T_BN2_G) || hit(cfg, T_BN2_B)), .prm_beta(cfg.target == T_BN2_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  act_buffer #(.DEPTH(ND), .W(B)) u_buf_n2 (
    .clk, .wr_en(b2_we), .wr_addr(AD'(b2_ya)), .wr_data(b2_yd),
    .rd_addr(AD'(gp_xa)), .rd_data(n2_rd));

  // ---------------------------------------------------- output module
  gap_q #(.ROWS(N), .D(D), .B(B), .ACC_W(ACC_W), .ZX(Q_GAP.zx), .ZY(Q_GAP.zy),
    .M_MUL(Q_GAP.m), .SHIFT(Q_GAP.shr)) u_gap (
    .clk, .rst_n, .start(stage_start && go(stage, ST_GAP)), .busy(), .done(gp_dn),
    .x_raddr(gp_xa), .x_rdata(n2_rd), .y_we(gp_we), .y_waddr(gp_ya), .y_wdata(gp_yd), .sat());

  act_buffer #(.DEPTH(D), .W(B)) u_buf_g (
    .clk, .wr_en(gp_we), .wr_addr(AG'(gp_ya)), .wr_data(gp_yd),
    .rd_addr(AG'(lu_xa)), .rd_data(g_rd));

  linear_layer #(.ROWS(1), .IN_F(D), .OUT_F(1), .B(B), .BIAS_W(B), .ACC_W(ACC_W),
    .ZX(Q_LIN_OUT.zx), .ZW(Q_LIN_OUT.zw), .ZY(Q_LIN_OUT.zy), .M_MUL(Q_LIN_OUT.m),
    .SHIFT(Q_LIN_OUT.shr + SH_ADJ)) u_lin_out (
    .clk, .rst_n, .start(stage_start && go(stage, ST_LIN_OUT)), .busy(), .done(lu_dn),
    .x_raddr(lu_xa), .x_rdata(g_rd), .y_we(lu_we), .y_waddr(lu_ya), .y_wdata(lu_yd), .sat(),
    .prm_we(hit(cfg, T_OUT_W) || hit(cfg, T_OUT_B)), .prm_bias(cfg.target == T_OUT_B),
    .prm_addr(cfg.addr), .prm_data(cfg.data[B-1:0]));

  always_ff @(posedge clk) begin
    if (!rst_n) y <= '0;
    else if (lu_we) y <= lu_yd;
  end

  assign stage_done = li_dn | pe_dn | lq_dn | lk_dn | lv_dn | sc_dn | sm_dn | at_dn |
                      lo_dn | am_dn | b1_dn | f1_dn | f2_dn | af_dn | b2_dn | gp_dn | lu_dn;

  a_no_cfg_while_busy: assert property (@(posedge clk) disable iff (!rst_n) cfg.we |-> !busy);
endmodule
