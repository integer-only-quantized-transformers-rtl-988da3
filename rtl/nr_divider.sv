// nr_divider: sequential radix-2 non-restoring divider for unsigned operands.
//
// Softmax needs one division per attention weight. A single-cycle divider
// would limit the clock, so the quotient is produced one bit per clock with the
// non-restoring rule: shift the partial remainder left and bring in the next
// dividend bit; subtract the divisor if the remainder was non-negative, add it
// if it was negative; the new quotient bit is 1 when the result is
// non-negative. A final step adds the divisor back to a negative remainder.
// The choice of a radix-2 non-restoring divider follows the paper; its
// structure here is the textbook one.
//
// Interface: pulse start with dividend and divisor valid (they are captured).
// done pulses DIVIDEND_W + 2 clocks later with quotient and remainder valid;
// they hold until the next start. busy is high in between. Division by zero
// gives an all-ones quotient.
module nr_divider #(
  parameter int unsigned DIVIDEND_W = 12,
  parameter int unsigned DIVISOR_W  = 14
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [DIVIDEND_W-1:0] dividend,
  input  logic [DIVISOR_W-1:0]  divisor,
  output logic                  busy,
  output logic                  done,
  output logic [DIVIDEND_W-1:0] quotient,
  output logic [DIVISOR_W-1:0]  remainder
);
  localparam int unsigned PW = DIVISOR_W + 2;   // partial remainder, signed
  localparam int unsigned CW = $clog2(DIVIDEND_W + 1);

  logic signed [PW-1:0] p, p_sh, p_new, d;
  logic [CW-1:0]        cnt;
  logic                 fix;

  always_comb begin
    p_sh  = {p[PW-2:0], quotient[DIVIDEND_W-1]};
    p_new = p[PW-1] ? (p_sh + d) : (p_sh - d);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p <= '0; d <= '0; cnt <= '0; busy <= 1'b0; fix <= 1'b0; done <= 1'b0;
      quotient <= '0; remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        p        <= '0;
        d        <= PW'(divisor);
        quotient <= dividend;
        cnt      <= CW'(DIVIDEND_W);
        busy     <= 1'b1;
        fix      <= 1'b0;
      end else if (busy && !fix) begin
        p        <= p_new;
        quotient <= {quotient[DIVIDEND_W-2:0], ~p_new[PW-1]};
        cnt      <= cnt - 1'b1;
        if (cnt == CW'(1)) fix <= 1'b1;
      end else if (busy && fix) begin
        // remainder correction
        remainder <= p[PW-1] ? DIVISOR_W'(p + d) : DIVISOR_W'(p);
        busy <= 1'b0;
        fix  <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
