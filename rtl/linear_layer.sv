// linear_layer: integer-only fully connected layer applied to every row of a
// sequence.
//
// For each row r (sequence position) and output feature o it computes
//   acc     = bias[o] + sum_k (x[r][k] - ZX) * (w[o][k] - ZW)
//   y[r][o] = clamp( (acc * M) >>> SHIFT + ZY )        (ApproxMul)
// with one multiply-accumulate per clock. Rows, outputs and inputs are
// processed one after another by a single MAC instead of a parallel array,
// which keeps the layer small on a small FPGA, as in the paper. The loop order
// (row, then output, then input) and the MAC pipeline are this design's own.
//
// Weights (OUT_F x IN_F, row-major) and biases live in local memories written
// through the prm_* port (prm_bias selects the bias memory). Biases are b-bit
// symmetric integers at scale S_x * S_w, added straight into the accumulator.
//
// Timing: a start pulse begins the layer; the input buffer is read at
// x_raddr = r*IN_F + k with one clock of read latency; each output is written
// at y_waddr = r*OUT_F + o two clocks after its last input address; done pulses
// together with the final write. One layer takes ROWS*OUT_F*IN_F + 2 clocks.
// sat pulses with every write whose value was clamped.
module linear_layer
#(
  parameter int unsigned ROWS   = 12,
  parameter int unsigned IN_F   = 32,
  parameter int unsigned OUT_F  = 32,
  parameter int unsigned B      = 4,
  parameter int unsigned BIAS_W = 4,
  parameter int unsigned ACC_W  = 32,
  parameter int          ZX     = 0,
  parameter int          ZW     = 0,
  parameter int          ZY     = 0,
  parameter int          M_MUL  = 205,
  parameter int          SHIFT  = 13,
  localparam int unsigned XAW = $clog2(ROWS * IN_F + 1),
  localparam int unsigned YAW = $clog2(ROWS * OUT_F + 1),
  localparam int unsigned WAW = (OUT_F * IN_F > 1) ? $clog2(OUT_F * IN_F) : 1,
  localparam int unsigned BAW = (OUT_F > 1) ? $clog2(OUT_F) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic [XAW-1:0]           x_raddr,
  input  logic signed [B-1:0]      x_rdata,
  output logic                     y_we,
  output logic [YAW-1:0]           y_waddr,
  output logic signed [B-1:0]      y_wdata,
  output logic                     sat,
  input  logic                     prm_we,
  input  logic                     prm_bias,
  input  logic [tt_pkg::CFG_AW-1:0]        prm_addr,
  input  logic signed [BIAS_W-1:0] prm_data
);
  localparam int unsigned RW = $clog2(ROWS + 1);
  localparam int unsigned OW = $clog2(OUT_F + 1);
  localparam int unsigned KW = $clog2(IN_F + 1);

  // ---------------------------------------------------------- parameters
  logic signed [B-1:0]      w_rdata;
  logic signed [BIAS_W-1:0] b_rdata;
  logic [WAW-1:0]           w_raddr;
  logic [BAW-1:0]           b_raddr;

  act_buffer #(.DEPTH(OUT_F * IN_F), .W(B)) u_wmem (
    .clk, .wr_en(prm_we && !prm_bias), .wr_addr(prm_addr[WAW-1:0]),
    .wr_data(prm_data[B-1:0]), .rd_addr(w_raddr), .rd_data(w_rdata));

  act_buffer #(.DEPTH(OUT_F), .W(BIAS_W)) u_bmem (
    .clk, .wr_en(prm_we && prm_bias), .wr_addr(prm_addr[BAW-1:0]),
    .wr_data(prm_data), .rd_addr(b_raddr), .rd_data(b_rdata));

  // --------------------------------------------------------- issue stage
  logic          run;
  logic [RW-1:0] r;
  logic [OW-1:0] o;
  logic [KW-1:0] k;
  logic          k_last, o_last, r_last;

  assign k_last  = (k == KW'(IN_F - 1));
  assign o_last  = (o == OW'(OUT_F - 1));
  assign r_last  = (r == RW'(ROWS - 1));
  assign x_raddr = XAW'(r) * XAW'(IN_F) + XAW'(k);
  assign w_raddr = WAW'(o) * WAW'(IN_F) + WAW'(k);
  assign b_raddr = BAW'(o);

  // ------------------------------------------------ data-return stage
  logic           p_valid, p_first, p_last, p_final;
  logic [YAW-1:0] p_yaddr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      r <= '0; o <= '0; k <= '0;
      p_valid <= 1'b0; p_first <= 1'b0; p_last <= 1'b0; p_final <= 1'b0;
      p_yaddr <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1;
        r <= '0; o <= '0; k <= '0;
      end else if (run) begin
        if (!k_last) k <= k + 1'b1;
        else begin
          k <= '0;
          if (!o_last) o <= o + 1'b1;
          else begin
            o <= '0;
            if (!r_last) r <= r + 1'b1;
            else run <= 1'b0;
          end
        end
      end
      p_valid <= run;
      p_first <= run && (k == '0);
      p_last  <= run && k_last;
      p_final <= run && k_last && o_last && r_last;
      p_yaddr <= YAW'(r) * YAW'(OUT_F) + YAW'(o);
    end
  end

  // ------------------------------------------------------- accumulate
  logic signed [ACC_W-1:0] acc, prod, acc_next;
  logic signed [B-1:0]     yq;
  logic                    ysat;

  always_comb begin
    prod     = (ACC_W'(x_rdata) - ACC_W'(ZX)) * (ACC_W'(w_rdata) - ACC_W'(ZW));
    acc_next = (p_first ? ACC_W'(b_rdata) : acc) + prod;
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

  // a new start is only accepted while idle
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
