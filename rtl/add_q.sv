// add_q: integer-only element-wise addition of two quantized tensors.
//
// The real sum A3 = A1 + A2 becomes, in the integer domain,
//   a3 = clamp( ((a1 - Z1) * M1) >>> SH1 + ((a2 - Z2) * M2) >>> SH2 + Z3 )
// where M1 * 2^-SH1 and M2 * 2^-SH2 approximate S1/S3 and S2/S3. Each operand
// gets its own ApproxMul step, as in the paper; the accelerator uses three of
// these: adding the positional encoding, and the two residual connections.
//
// Timing: after a start pulse the block reads both operand buffers at the same
// address rd_addr = 0 .. LEN-1, one per clock (one clock of read latency), and
// writes the result at the same address two clocks after issuing it. done
// pulses with the last write; the whole pass takes LEN + 2 clocks.
// sat pulses with each clamped result.
module add_q
#(
  parameter int unsigned LEN   = 384,
  parameter int unsigned B     = 4,
  parameter int unsigned ACC_W = 32,
  parameter int          Z1    = 0,
  parameter int          Z2    = 0,
  parameter int          Z3    = 0,
  parameter int          M1    = 1,
  parameter int          SH1   = 1,
  parameter int          M2    = 1,
  parameter int          SH2   = 1,
  localparam int unsigned AW = $clog2(LEN + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [AW-1:0]       rd_addr,
  input  logic signed [B-1:0] a_rdata,
  input  logic signed [B-1:0] b_rdata,
  output logic                y_we,
  output logic [AW-1:0]       y_waddr,
  output logic signed [B-1:0] y_wdata,
  output logic                sat
);
  logic          run, p_valid, p_final;
  logic [AW-1:0] p_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; rd_addr <= '0;
      p_valid <= 1'b0; p_final <= 1'b0; p_addr <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1; rd_addr <= '0;
      end else if (run) begin
        if (rd_addr == AW'(LEN - 1)) run <= 1'b0;
        else rd_addr <= rd_addr + 1'b1;
      end
      p_valid <= run;
      p_final <= run && (rd_addr == AW'(LEN - 1));
      p_addr  <= rd_addr;
    end
  end

  logic signed [ACC_W-1:0] d1, d2, s1, s2, total;
  logic signed [B-1:0]     yq;
  logic                    ysat;

  assign d1 = ACC_W'(a_rdata) - ACC_W'(Z1);
  assign d2 = ACC_W'(b_rdata) - ACC_W'(Z2);

  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(ACC_W), .M_MUL(M1),
               .SHIFT(SH1), .Z_OUT(0)) u_am1 (.x(d1), .scaled(s1), .y(), .sat());
  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(ACC_W), .M_MUL(M2),
               .SHIFT(SH2), .Z_OUT(0)) u_am2 (.x(d2), .scaled(s2), .y(), .sat());
  // the final clamp is an ApproxMul with factor 1
  approx_mul #(.ACC_W(ACC_W), .MUL_W(tt_pkg::MUL_W), .OUT_W(B), .M_MUL(1),
               .SHIFT(0), .Z_OUT(Z3)) u_clamp (.x(total), .scaled(), .y(yq), .sat(ysat));

  assign total = s1 + s2;

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
