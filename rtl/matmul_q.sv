// matmul_q: integer-only product of two buffered matrices, without bias.
//
//   y[i][j] = clamp( (sum_k (a[i][k] - ZA) * (b(k, j) - ZB) * M) >>> SHIFT + ZY )
// A is ROWS x INNER and B supplies INNER x COLS values; both are read from
// activation buffers, one element pair per clock, with one multiply-accumulate
// unit. The attention score Q K^T needs B = K^T. Instead of transposing K, an
// address-mapping step reads element (k, j) of K^T at address j*INNER + k of
// the untransposed K buffer (ADDR_MAP = 1). With ADDR_MAP = 0 the mapping is
// bypassed and element (k, j) is read at k*COLS + j, which serves the second
// product (attention weights times V). The scaling 1/sqrt(d_model/h) of the
// score is folded into M and SHIFT. The paper describes the address mapping and
// the folding; the exact address formula and the MAC pipeline are this design's.
//
// Timing: like linear_layer. After start, addresses are issued one pair per
// clock in order i, j, k; y[i][j] is written at i*COLS + j two clocks after its
// last pair; done pulses with the last write. One pass takes
// ROWS*COLS*INNER + 2 clocks. sat pulses with each clamped write.
module matmul_q
#(
  parameter int unsigned ROWS     = 12,
  parameter int unsigned INNER    = 32,
  parameter int unsigned COLS     = 12,
  parameter bit          ADDR_MAP = 1'b1,
  parameter int unsigned B        = 4,
  parameter int unsigned ACC_W    = 32,
  parameter int          ZA       = 0,
  parameter int          ZB       = 0,
  parameter int          ZY       = 0,
  parameter int          M_MUL    = 150,
  parameter int          SHIFT    = 13,
  localparam int unsigned AAW = $clog2(ROWS * INNER + 1),
  localparam int unsigned BAW = $clog2(INNER * COLS + 1),
  localparam int unsigned YAW = $clog2(ROWS * COLS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [AAW-1:0]      a_raddr,
  input  logic signed [B-1:0] a_rdata,
  output logic [BAW-1:0]      b_raddr,
  input  logic signed [B-1:0] b_rdata,
  output logic                y_we,
  output logic [YAW-1:0]      y_waddr,
  output logic signed [B-1:0] y_wdata,
  output logic                sat
);
  localparam int unsigned IW = $clog2(ROWS + 1);
  localparam int unsigned JW = $clog2(COLS + 1);
  localparam int unsigned KW = $clog2(INNER + 1);

  logic          run;
  logic [IW-1:0] i;
  logic [JW-1:0] j;
  logic [KW-1:0] k;
  logic          k_last, j_last, i_last;

  assign k_last  = (k == KW'(INNER - 1));
  assign j_last  = (j == JW'(COLS - 1));
  assign i_last  = (i == IW'(ROWS - 1));
  assign a_raddr = AAW'(i) * AAW'(INNER) + AAW'(k);

  // address mapping: transpose on the fly, or plain row-major access
  always_comb begin
    if (ADDR_MAP) b_raddr = BAW'(j) * BAW'(INNER) + BAW'(k);
    else          b_raddr = BAW'(k) * BAW'(COLS) + BAW'(j);
  end

  logic           p_valid, p_first, p_last, p_final;
  logic [YAW-1:0] p_yaddr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      i <= '0; j <= '0; k <= '0;
      p_valid <= 1'b0; p_first <= 1'b0; p_last <= 1'b0; p_final <= 1'b0;
      p_yaddr <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1;
        i <= '0; j <= '0; k <= '0;
      end else if (run) begin
        if (!k_last) k <= k + 1'b1;
        else begin
          k <= '0;
          if (!j_last) j <= j + 1'b1;
          else begin
            j <= '0;
            if (!i_last) i <= i + 1'b1;
            else run <= 1'b0;
          end
        end
      end
      p_valid <= run;
      p_first <= run && (k == '0);
      p_last  <= run && k_last;
      p_final <= run && k_last && j_last && i_last;
      p_yaddr <= YAW'(i) * YAW'(COLS) + YAW'(j);
    end
  end

  logic signed [ACC_W-1:0] acc, prod, acc_next;
  logic signed [B-1:0]     yq;
  logic                    ysat;

  always_comb begin
    prod     = (ACC_W'(a_rdata) - ACC_W'(ZA)) * (ACC_W'(b_rdata) - ACC_W'(ZB));
    acc_next = (p_first ? '0 : acc) + prod;
  end

  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(B), .M_MUL(M_MUL),
               .SHIFT(SHIFT), .Z_OUT(ZY)) u_rq (
    .x(acc_next), .scaled(), .y(yq), .sat(ysat));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
      y_we <= 1'b0; y_waddr <= '0; y_wdata <= '0; sat <= 1'b0; done <= 1'b0;
    end else begin
      if (p_valid) acc <= acc_next;
      y_we    <= p_valid && p_last;
      y_waddr <= p_yaddr;
      y_wdata <= yq;
      sat     <= p_valid && p_last && ysat;
      done    <= p_valid && p_final;
    end
  end

  assign busy = run || p_valid;

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
