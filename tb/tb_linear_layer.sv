// tb_linear_layer: loads random 4-bit weights and biases, fills a model of the
// input buffer with random activations, runs the layer twice and compares
// every written output with a reference computed here:
//   y = clamp(floor((bias + sum (x-ZX)(w-ZW)) * M / 2^SHIFT) + ZY).
// Also checks the write addresses, the single done pulse and the latency of
// ROWS*OUT_F*IN_F + 2 clocks from start to done.
module tb_linear_layer;
  import tt_pkg::CFG_AW;
  localparam int ROWS = 3, IN_F = 5, OUT_F = 4, B = 4;
  localparam int ZX = -1, ZW = 2, ZY = 1, MM = 300, SH = 10;
  localparam int XAW = $clog2(ROWS * IN_F + 1), YAW = $clog2(ROWS * OUT_F + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, y_we, sat, prm_we, prm_bias;
  logic [XAW-1:0] x_raddr;
  logic signed [B-1:0] x_rdata, y_wdata;
  logic [YAW-1:0] y_waddr;
  logic [CFG_AW-1:0] prm_addr;
  logic signed [B-1:0] prm_data;

  linear_layer #(.ROWS(ROWS), .IN_F(IN_F), .OUT_F(OUT_F), .B(B), .BIAS_W(B), .ACC_W(32),
    .ZX(ZX), .ZW(ZW), .ZY(ZY), .M_MUL(MM), .SHIFT(SH)) dut (.*);

  // input buffer model, one clock read latency
  logic signed [B-1:0] xmem [ROWS * IN_F];
  always_ff @(posedge clk) x_rdata <= xmem[x_raddr];

  logic signed [B-1:0] w [OUT_F * IN_F];
  logic signed [B-1:0] bias [OUT_F];
  logic signed [B-1:0] got [ROWS * OUT_F];
  int writes, dones, cyc;

  always @(posedge clk) begin
    cyc++;
    if (y_we) begin got[y_waddr] <= y_wdata; writes++; end
    if (done) dones++;
  end

  function automatic int reference(int r, int o);
    longint acc = bias[o];
    longint s, v;
    for (int k = 0; k < IN_F; k++) acc += (xmem[r * IN_F + k] - ZX) * (w[o * IN_F + k] - ZW);
    s = acc * MM;
    v = (s >= 0) ? (s >> SH) : -((-s + (1 << SH) - 1) >> SH);
    v = v + ZY;
    return (v > 7) ? 7 : (v < -8) ? -8 : int'(v);
  endfunction

  initial begin
    int t0;
    rst_n = 0; start = 0; prm_we = 0; prm_bias = 0; prm_addr = 0; prm_data = 0;
    writes = 0; dones = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      // load parameters
      for (int a = 0; a < OUT_F * IN_F; a++) begin
        w[a] = B'($urandom());
        prm_we = 1; prm_bias = 0; prm_addr = CFG_AW'(a); prm_data = w[a];
        @(negedge clk);
      end
      for (int a = 0; a < OUT_F; a++) begin
        bias[a] = B'($urandom());
        prm_we = 1; prm_bias = 1; prm_addr = CFG_AW'(a); prm_data = bias[a];
        @(negedge clk);
      end
      prm_we = 0;
      foreach (xmem[i]) xmem[i] = B'($urandom());
      writes = 0; dones = 0;
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != ROWS * OUT_F * IN_F + 2) begin
        failures++; $display("FAIL latency %0d", cyc - t0);
      end
      @(negedge clk);
      checks++;
      if (writes != ROWS * OUT_F || dones != 1 || busy) begin
        failures++; $display("FAIL writes=%0d dones=%0d busy=%0b", writes, dones, busy);
      end
      for (int r = 0; r < ROWS; r++)
        for (int o = 0; o < OUT_F; o++) begin
          checks++;
          if (got[r * OUT_F + o] != B'(reference(r, o))) begin
            failures++;
            $display("FAIL r=%0d o=%0d got %0d expected %0d", r, o, got[r * OUT_F + o], reference(r, o));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
