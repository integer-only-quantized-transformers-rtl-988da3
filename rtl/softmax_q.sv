// softmax_q: row-wise integer Softmax over an N x N score matrix, built from
// two look-up tables and a sequential divider.
//
// Each row is handled in three passes over its N scores:
//   1. scan the row for its maximum;
//   2. re-read the row; for every score x the offset index max - x (0 .. 2^B-1,
//      i.e. x - max mapped to a non-negative address) looks up the numerator
//      table NLUT (3B bits, kept in a row-local register file) and the
//      denominator table DLUT (2B bits); sum += DLUT - Z_E;
//   3. for every element divide its numerator by sum with the radix-2
//      non-restoring divider and write clamp(quotient + Z_A).
// The tables contain exp() of every possible offset, prescaled offline; they
// cover all 2^B possible offsets and are loaded through the lut_* port
// (lut_sel = 1 selects DLUT). The three passes, both tables and the divider
// follow the paper's algorithm. Guarding a negative numerator (used as 0) and
// a non-positive sum (used as 1) is this design's addition.
//
// Timing: after start, each row takes 2*(N+1) clocks for passes 1 and 2 and
// N*(3B+4) clocks for pass 3 (3B+2 of them in the divider); the whole matrix
// takes 1 + N*(2*(N+1) + N*(3B+4)) clocks, 2,617 for N = 12, B = 4. Scores
// are read with one clock of latency; results are written row-major at
// i*N + j; done pulses with the last write.
module softmax_q
#(
  parameter int unsigned N     = 12,
  parameter int unsigned B     = 4,
  parameter int          Z_E   = 126,
  parameter int          Z_A   = -8,
  localparam int unsigned AW    = $clog2(N * N + 1),
  localparam int unsigned NW    = 3 * B,                  // NLUT width
  localparam int unsigned DLW   = 2 * B,                  // DLUT width
  localparam int unsigned SUM_W = DLW + $clog2(N + 1) + 2 // denominator sum
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [AW-1:0]        x_raddr,
  input  logic signed [B-1:0]  x_rdata,
  output logic                 y_we,
  output logic [AW-1:0]        y_waddr,
  output logic signed [B-1:0]  y_wdata,
  output logic                 sat,
  input  logic                 lut_we,
  input  logic                 lut_sel,
  input  logic [B-1:0]         lut_addr,
  input  logic signed [NW-1:0] lut_data
);
  localparam int unsigned IW = $clog2(N + 1);
  localparam int unsigned LUT_N = 1 << B;

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_SUM, S_DIV_GO, S_DIV_WAIT} state_e;
  state_e state;

  // ------------------------------------------------------------ tables
  logic signed [NW-1:0]  nlut [LUT_N];
  logic signed [DLW-1:0] dlut [LUT_N];

  always_ff @(posedge clk) begin
    if (lut_we && !lut_sel) nlut[lut_addr] <= lut_data;
    if (lut_we &&  lut_sel) dlut[lut_addr] <= lut_data[DLW-1:0];
  end

  // ------------------------------------------------------ row pipeline
  logic [IW-1:0]              i, cnt, j;
  logic signed [B-1:0]        mx;
  logic signed [SUM_W-1:0]    sum;
  logic signed [NW-1:0]       num [N];
  logic [B-1:0]               idx;
  logic [IW-1:0]              cnt_rd;

  // read address: clamp the extra (N-th) step of a pass to the last element
  assign cnt_rd  = (cnt < IW'(N)) ? cnt : IW'(N - 1);
  assign x_raddr = AW'(i) * AW'(N) + AW'(cnt_rd);
  // offset of the returned score from the row maximum, max - x >= 0
  assign idx     = B'(mx - x_rdata);

  // ---------------------------------------------------------- divider
  logic                  div_start, div_busy, div_done;
  logic [NW-1:0]         div_q;
  logic [NW-1:0]         dividend;
  logic [SUM_W-1:0]      divisor;

  assign dividend = num[j][NW-1] ? '0 : num[j];
  assign divisor  = (sum > 0) ? SUM_W'(sum) : SUM_W'(1);

  nr_divider #(.DIVIDEND_W(NW), .DIVISOR_W(SUM_W)) u_div (
    .clk, .rst_n, .start(div_start), .dividend, .divisor,
    .busy(div_busy), .done(div_done), .quotient(div_q), .remainder());

  logic signed [B-1:0] yq;
  logic                ysat;
  approx_mul #(.ACC_W(NW + 2), .MUL_W(2), .OUT_W(B), .M_MUL(1), .SHIFT(0),
               .Z_OUT(Z_A)) u_out (
    .x($signed({2'b00, div_q})), .scaled(), .y(yq), .sat(ysat));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i <= '0; cnt <= '0; j <= '0; mx <= '0; sum <= '0;
      div_start <= 1'b0;
      y_we <= 1'b0; y_waddr <= '0; y_wdata <= '0; sat <= 1'b0; done <= 1'b0;
    end else begin
      div_start <= 1'b0;
      y_we <= 1'b0; sat <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i <= '0; cnt <= '0;
          state <= S_MAX;
        end
        // pass 1: row maximum (element cnt-1 returns while cnt is issued)
        S_MAX: begin
          if (cnt != '0)
            if (cnt == IW'(1) || x_rdata > mx) mx <= x_rdata;
          if (cnt == IW'(N)) begin
            cnt <= '0; sum <= '0;
            state <= S_SUM;
          end else cnt <= cnt + 1'b1;
        end
        // pass 2: table look-ups and denominator sum
        S_SUM: begin
          if (cnt != '0) begin
            num[cnt - 1'b1] <= nlut[idx];
            sum <= sum + SUM_W'(dlut[idx]) - SUM_W'(Z_E);
          end
          if (cnt == IW'(N)) begin
            j <= '0;
            state <= S_DIV_GO;
          end else cnt <= cnt + 1'b1;
        end
        // pass 3: one division per element
        S_DIV_GO: begin
          div_start <= 1'b1;
          state <= S_DIV_WAIT;
        end
        S_DIV_WAIT: if (div_done) begin
          y_we    <= 1'b1;
          y_waddr <= AW'(i) * AW'(N) + AW'(j);
          y_wdata <= yq;
          sat     <= ysat;
          if (j != IW'(N - 1)) begin
            j <= j + 1'b1;
            state <= S_DIV_GO;
          end else if (i != IW'(N - 1)) begin
            i <= i + 1'b1; cnt <= '0;
            state <= S_MAX;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_div_idle:   assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
endmodule
