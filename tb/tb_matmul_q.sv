// tb_matmul_q: tests both uses of the matrix-product component.
// Instance "score" (address mapping on) computes A * B^T from an untransposed
// B buffer (ROWS x INNER times (COLS x INNER)^T); instance "attn" (mapping off)
// computes A * B with B stored INNER x COLS. Every output is compared with a
// reference computed here, and the latency ROWS*COLS*INNER + 2 is checked.
module tb_matmul_q;
  localparam int R = 3, K = 5, C = 4, B = 4;
  localparam int ZA = 1, ZB = -2, ZY = -1, MM = 700, SH = 12;
  localparam int AAW = $clog2(R * K + 1), BAW = $clog2(K * C + 1), YAW = $clog2(R * C + 1);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start;
  logic [1:0] busy, done, y_we, sat;
  logic [AAW-1:0] a_raddr [2];
  logic [BAW-1:0] b_raddr [2];
  logic [YAW-1:0] y_waddr [2];
  logic signed [B-1:0] a_rdata [2], b_rdata [2], y_wdata [2];

  logic signed [B-1:0] amem [R * K], bmem [K * C], got [2][R * C];

  matmul_q #(.ROWS(R), .INNER(K), .COLS(C), .ADDR_MAP(1'b1), .B(B), .ACC_W(32), .ZA(ZA),
    .ZB(ZB), .ZY(ZY), .M_MUL(MM), .SHIFT(SH)) dut_score (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]), .a_raddr(a_raddr[0]),
    .a_rdata(a_rdata[0]), .b_raddr(b_raddr[0]), .b_rdata(b_rdata[0]), .y_we(y_we[0]),
    .y_waddr(y_waddr[0]), .y_wdata(y_wdata[0]), .sat(sat[0]));
  matmul_q #(.ROWS(R), .INNER(K), .COLS(C), .ADDR_MAP(1'b0), .B(B), .ACC_W(32), .ZA(ZA),
    .ZB(ZB), .ZY(ZY), .M_MUL(MM), .SHIFT(SH)) dut_attn (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]), .a_raddr(a_raddr[1]),
    .a_rdata(a_rdata[1]), .b_raddr(b_raddr[1]), .b_rdata(b_rdata[1]), .y_we(y_we[1]),
    .y_waddr(y_waddr[1]), .y_wdata(y_wdata[1]), .sat(sat[1]));

  always_ff @(posedge clk)
    for (int u = 0; u < 2; u++) begin
      a_rdata[u] <= amem[a_raddr[u]];
      b_rdata[u] <= bmem[b_raddr[u]];
    end

  int writes [2], dones [2], cyc;
  always @(posedge clk) begin
    cyc++;
    for (int u = 0; u < 2; u++) begin
      if (y_we[u]) begin got[u][y_waddr[u]] <= y_wdata[u]; writes[u]++; end
      if (done[u]) dones[u]++;
    end
  end

  function automatic longint fl(longint v, int sh);
    return (v >= 0) ? (v >> sh) : -((-v + (longint'(1) << sh) - 1) >> sh);
  endfunction
  // transposed: B holds C rows of K values and the product uses B^T
  function automatic int reference(int i, int j, bit transposed);
    longint acc = 0, v;
    for (int k = 0; k < K; k++)
      acc += (amem[i * K + k] - ZA) * ((transposed ? bmem[j * K + k] : bmem[k * C + j]) - ZB);
    v = fl(acc * MM, SH) + ZY;
    return (v > 7) ? 7 : (v < -8) ? -8 : int'(v);
  endfunction

  initial begin
    int t0;
    rst_n = 0; start = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      foreach (amem[i]) amem[i] = B'($urandom());
      foreach (bmem[i]) bmem[i] = B'($urandom());
      writes = '{0, 0}; dones = '{0, 0};
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done[0]) @(negedge clk);
      checks++;
      if (cyc - t0 != R * C * K + 2 || !done[1]) begin
        failures++; $display("FAIL latency %0d", cyc - t0);
      end
      @(negedge clk);
      for (int u = 0; u < 2; u++) begin
        checks++;
        if (writes[u] != R * C || dones[u] != 1) begin
          failures++; $display("FAIL unit %0d writes=%0d dones=%0d", u, writes[u], dones[u]);
        end
        for (int i = 0; i < R; i++)
          for (int j = 0; j < C; j++) begin
            checks++;
            if (got[u][i * C + j] != B'(reference(i, j, u == 0))) begin
              failures++;
              $display("FAIL unit %0d (%0d,%0d) got %0d expected %0d", u, i, j,
                       got[u][i * C + j], reference(i, j, u == 0));
            end
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
