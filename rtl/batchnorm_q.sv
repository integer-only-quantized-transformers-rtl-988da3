// batchnorm_q: batch normalisation folded into one integer multiply-add per
// element.
//
// With the running statistics fixed after training, BN reduces to
// A = gamma_hat_j * X + beta_hat_j per feature j. In the integer domain
//   y[i][j] = clamp( (((g[j] - ZG) * (x[i][j] - ZX) + beta[j]) * M) >>> SHIFT + ZY )
// where g is the quantized gamma_hat and beta the offset expressed at scale
// S_gamma * S_x, so it adds straight into the product (as in the paper).
// Per-feature g and beta sit in two small memories loaded through prm_*
// (prm_beta = 1 selects beta); they are read in step with the input so the
// multiply happens while the data is being fetched.
//
// Timing: after start, x is read row-major at addresses 0 .. ROWS*D-1, one per
// clock, and each result is written to the same address two clocks later;
// done pulses with the last write. A pass takes ROWS*D + 2 clocks.
module batchnorm_q
#(
  parameter int unsigned ROWS   = 12,
  parameter int unsigned D      = 32,
  parameter int unsigned B      = 4,
  parameter int unsigned BETA_W = 4,
  parameter int unsigned ACC_W  = 32,
  parameter int          ZX     = 0,
  parameter int          ZG     = 0,
  parameter int          ZY     = 0,
  parameter int          M_MUL  = 2048,
  parameter int          SHIFT  = 13,
  localparam int unsigned AW  = $clog2(ROWS * D + 1),
  localparam int unsigned FW  = (D > 1) ? $clog2(D) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            x_raddr,
  input  logic signed [B-1:0]      x_rdata,
  output logic                     y_we,
  output logic [AW-1:0]            y_waddr,
  output logic signed [B-1:0]      y_wdata,
  output logic                     sat,
  input  logic                     prm_we,
  input  logic                     prm_beta,
  input  logic [tt_pkg::CFG_AW-1:0]        prm_addr,
  input  logic signed [BETA_W-1:0] prm_data
);
  logic          run, p_valid, p_final;
  logic [FW-1:0] feat;
  logic [AW-1:0] p_addr;

  logic signed [B-1:0]      g_rdata;
  logic signed [BETA_W-1:0] bt_rdata;

  act_buffer #(.DEPTH(D), .W(B)) u_gamma (
    .clk, .wr_en(prm_we && !prm_beta), .wr_addr(prm_addr[FW-1:0]),
    .wr_data(prm_data[B-1:0]), .rd_addr(feat), .rd_data(g_rdata));
  act_buffer #(.DEPTH(D), .W(BETA_W)) u_beta (
    .clk, .wr_en(prm_we && prm_beta), .wr_addr(prm_addr[FW-1:0]),
    .wr_data(prm_data), .rd_addr(feat), .rd_data(bt_rdata));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; x_raddr <= '0; feat <= '0;
      p_valid <= 1'b0; p_final <= 1'b0; p_addr <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1; x_raddr <= '0; feat <= '0;
      end else if (run) begin
        if (x_raddr == AW'(ROWS * D - 1)) run <= 1'b0;
        else x_raddr <= x_raddr + 1'b1;
        feat <= (feat == FW'(D - 1)) ? '0 : feat + 1'b1;
      end
      p_valid <= run;
      p_final <= run && (x_raddr == AW'(ROWS * D - 1));
      p_addr  <= x_raddr;
    end
  end

  logic signed [ACC_W-1:0] val;
  logic signed [B-1:0]     yq;
  logic                    ysat;

  assign val = (ACC_W'(g_rdata) - ACC_W'(ZG)) * (ACC_W'(x_rdata) - ACC_W'(ZX))
             + ACC_W'(bt_rdata);

  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(B), .M_MUL(M_MUL),
               .SHIFT(SHIFT), .Z_OUT(ZY)) u_rq (.x(val), .scaled(), .y(yq), .sat(ysat));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_we <= 1'b0; y_waddr <= '0; y_wdata <= '0; sat <= 1'b0; done <= 1'b0;
    end else begin
      y_we    <= p_valid;
      y_waddr <= p_addr;
      y_wdata <= yq;
      sat     <= p_valid && ysat;
      done    <= p_valid && p_final;
    end
  end

  assign busy = run || p_valid;

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
