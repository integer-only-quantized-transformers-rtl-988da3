// tb_softmax_q: loads numerator and denominator tables, runs the Softmax over
// random N x N score matrices and compares every output with a reference
// computed here from the same three passes: row maximum, table look-ups at
// max - x with sum of (DLUT - Z_E), then floor(NLUT / sum) + Z_A, clamped.
// One table set is built from exp(), one is random. Also checks the latency
// of 1 + N*(2*(N+1) + N*(3B+4)) clocks, the write count and one done pulse.
module tb_softmax_q;
  localparam int N = 5, B = 4, NW = 3 * B, AW = $clog2(N * N + 1);
  localparam int Z_E = -100, Z_A = -8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, y_we, sat, lut_we, lut_sel;
  logic [AW-1:0] x_raddr, y_waddr;
  logic signed [B-1:0] x_rdata, y_wdata;
  logic [B-1:0] lut_addr;
  logic signed [NW-1:0] lut_data;

  softmax_q #(.N(N), .B(B), .Z_E(Z_E), .Z_A(Z_A)) dut (.*);

  logic signed [B-1:0] xmem [N * N], got [N * N];
  int nlut [16], dlut [16];
  always_ff @(posedge clk) x_rdata <= xmem[x_raddr];
  int writes, dones, cyc;
  always @(posedge clk) begin
    cyc++;
    if (y_we) begin got[y_waddr] <= y_wdata; writes++; end
    if (done) dones++;
  end

  function automatic int reference(int i, int j);
    int mx = -8, sum = 0, num, q, v;
    for (int k = 0; k < N; k++) if (xmem[i * N + k] > mx) mx = xmem[i * N + k];
    for (int k = 0; k < N; k++) sum += dlut[mx - xmem[i * N + k]] - Z_E;
    num = nlut[mx - xmem[i * N + j]];
    if (num < 0) num = 0;
    if (sum <= 0) sum = 1;
    q = num / sum;
    v = q + Z_A;
    return (v > 7) ? 7 : (v < -8) ? -8 : v;
  endfunction

  initial begin
    int t0, expect_lat;
    rst_n = 0; start = 0; lut_we = 0; lut_sel = 0; lut_addr = 0; lut_data = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      // tables: exp(-0.4 d) scaled, or random non-negative numerators
      for (int d = 0; d < 16; d++) begin
        automatic real e = $exp(-0.4 * d);
        if (run < 2) begin
          dlut[d] = $rtoi(e * 40.0 + 0.5) + Z_E;
          nlut[d] = $rtoi(e * 600.0 + 0.5);
        end else begin
          dlut[d] = $urandom_range(0, 60) + Z_E;
          nlut[d] = (d == 3) ? -5 : $urandom_range(0, 2047);
        end
        lut_we = 1; lut_sel = 0; lut_addr = B'(d); lut_data = NW'(nlut[d]);
        @(negedge clk);
        lut_sel = 1; lut_data = NW'(dlut[d]);
        @(negedge clk);
      end
      lut_we = 0;
      foreach (xmem[i]) xmem[i] = B'($urandom());
      if (run == 3) foreach (xmem[i]) xmem[i] = 4'sd2;   // all equal
      writes = 0; dones = 0;
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      expect_lat = 1 + N * (2 * (N + 1) + N * (NW + 4));
      checks++;
      if (cyc - t0 != expect_lat) begin
        failures++; $display("FAIL latency %0d expected %0d", cyc - t0, expect_lat);
      end
      @(negedge clk);
      checks++;
      if (writes != N * N || dones != 1) begin failures++; $display("FAIL writes=%0d dones=%0d", writes, dones); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (got[i * N + j] != B'(reference(i, j))) begin
            failures++;
            $display("FAIL run %0d (%0d,%0d) got %0d expected %0d", run, i, j, got[i * N + j], reference(i, j));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
