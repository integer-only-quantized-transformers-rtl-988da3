// gap_q: global average pooling over the sequence dimension.
//
//   y[j] = clamp( ((sum_i (x[i][j] - ZX)) * M) >>> SHIFT + ZY ),  j = 0 .. D-1
// The 1/n of the average is folded into M and SHIFT (the sequence length is
// fixed), so the block needs only an adder and one ApproxMul, as in the paper.
//
// Timing: after start, x is read column by column (address i*D + j for
// i = 0 .. ROWS-1, then the next j), one element per clock with one clock of
// read latency; y[j] is written at address j two clocks after the last element
// of its column; done pulses with the last write. A pass takes ROWS*D + 2
// clocks.
module gap_q
#(
  parameter int unsigned ROWS  = 12,
  parameter int unsigned D     = 32,
  parameter int unsigned B     = 4,
  parameter int unsigned ACC_W = 32,
  parameter int          ZX    = 0,
  parameter int          ZY    = 0,
  parameter int          M_MUL = 1365,
  parameter int          SHIFT = 14,
  localparam int unsigned AW = $clog2(ROWS * D + 1),
  localparam int unsigned YW = $clog2(D + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [AW-1:0]       x_raddr,
  input  logic signed [B-1:0] x_rdata,
  output logic                y_we,
  output logic [YW-1:0]       y_waddr,
  output logic signed [B-1:0] y_wdata,
  output logic                sat
);
  localparam int unsigned IW = $clog2(ROWS + 1);

  logic          run, p_valid, p_first, p_last, p_final;
  logic [IW-1:0] i;
  logic [YW-1:0] j, p_j;

  assign x_raddr = AW'(i) * AW'(D) + AW'(j);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; i <= '0; j <= '0;
      p_valid <= 1'b0; p_first <= 1'b0; p_last <= 1'b0; p_final <= 1'b0; p_j <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1; i <= '0; j <= '0;
      end else if (run) begin
        if (i != IW'(ROWS - 1)) i <= i + 1'b1;
        else begin
          i <= '0;
          if (j != YW'(D - 1)) j <= j + 1'b1;
          else run <= 1'b0;
        end
      end
      p_valid <= run;
      p_first <= run && (i == '0);
      p_last  <= run && (i == IW'(ROWS - 1));
      p_final <= run && (i == IW'(ROWS - 1)) && (j == YW'(D - 1));
      p_j     <= j;
    end
  end

  logic signed [ACC_W-1:0] acc, acc_next;
  logic signed [B-1:0]     yq;
  logic                    ysat;

  assign acc_next = (p_first ? '0 : acc) + (ACC_W'(x_rdata) - ACC_W'(ZX));

  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(B), .M_MUL(M_MUL),
               .SHIFT(SHIFT), .Z_OUT(ZY)) u_rq (.x(acc_next), .scaled(), .y(yq), .sat(ysat));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
      y_we <= 1'b0; y_waddr <= '0; y_wdata <= '0; sat <= 1'b0; done <= 1'b0;
    end else begin
      if (p_valid) acc <= acc_next;
      y_we    <= p_valid && p_last;
      y_waddr <= p_j;
      y_wdata <= yq;
      sat     <= p_valid && p_last && ysat;
      done    <= p_valid && p_final;
    end
  end

  assign busy = run || p_valid;

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
