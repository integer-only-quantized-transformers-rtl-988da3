// tb_batchnorm_q: loads random per-feature gamma and beta values, runs the
// folded batch normalisation over a random ROWS x D input and compares every
// output with clamp(floor(((g-ZG)(x-ZX) + beta) * M / 2^SHIFT) + ZY), computed
// here. Checks addresses, one done pulse and ROWS*D + 2 clocks of latency.
module tb_batchnorm_q;
  import tt_pkg::CFG_AW;
  localparam int R = 4, D = 6, B = 4, AW = $clog2(R * D + 1);
  localparam int ZX = 2, ZG = -1, ZY = -1, MM = 1500, SH = 11;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, y_we, sat, prm_we, prm_beta;
  logic [AW-1:0] x_raddr, y_waddr;
  logic signed [B-1:0] x_rdata, y_wdata, prm_data;
  logic [CFG_AW-1:0] prm_addr;

  batchnorm_q #(.ROWS(R), .D(D), .B(B), .BETA_W(B), .ACC_W(32), .ZX(ZX), .ZG(ZG), .ZY(ZY),
                .M_MUL(MM), .SHIFT(SH)) dut (.*);

  logic signed [B-1:0] xmem [R * D], got [R * D], g [D], bt [D];
  always_ff @(posedge clk) x_rdata <= xmem[x_raddr];
  int writes, dones, cyc;
  always @(posedge clk) begin
    cyc++;
    if (y_we) begin got[y_waddr] <= y_wdata; writes++; end
    if (done) dones++;
  end

  function automatic longint fl(longint v, int sh);
    return (v >= 0) ? (v >> sh) : -((-v + (longint'(1) << sh) - 1) >> sh);
  endfunction
  function automatic int reference(int i, int j);
    longint v = fl(((g[j] - ZG) * (xmem[i * D + j] - ZX) + bt[j]) * MM, SH) + ZY;
    return (v > 7) ? 7 : (v < -8) ? -8 : int'(v);
  endfunction

  initial begin
    int t0;
    rst_n = 0; start = 0; prm_we = 0; prm_beta = 0; prm_addr = 0; prm_data = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int j = 0; j < D; j++) begin
        g[j] = B'($urandom()); bt[j] = B'($urandom());
        prm_we = 1; prm_beta = 0; prm_addr = CFG_AW'(j); prm_data = g[j];
        @(negedge clk);
        prm_beta = 1; prm_data = bt[j];
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
      if (cyc - t0 != R * D + 2) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      @(negedge clk);
      checks++;
      if (writes != R * D || dones != 1) begin failures++; $display("FAIL writes=%0d dones=%0d", writes, dones); end
      for (int i = 0; i < R; i++)
        for (int j = 0; j < D; j++) begin
          checks++;
          if (got[i * D + j] != B'(reference(i, j))) begin
            failures++;
            $display("FAIL (%0d,%0d) got %0d expected %0d", i, j, got[i * D + j], reference(i, j));
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
