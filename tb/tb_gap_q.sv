// tb_gap_q: runs global average pooling over random ROWS x D inputs and
// compares each pooled feature with clamp(floor(sum_i(x-ZX) * M / 2^SHIFT) + ZY),
// computed here; checks write addresses, one done pulse and ROWS*D + 2 clocks.
module tb_gap_q;
  localparam int R = 5, D = 7, B = 4, AW = $clog2(R * D + 1), YW = $clog2(D + 1);
  localparam int ZX = -1, ZY = 2, MM = 3277, SH = 14;   // about 1/5
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, y_we, sat;
  logic [AW-1:0] x_raddr;
  logic [YW-1:0] y_waddr;
  logic signed [B-1:0] x_rdata, y_wdata;

  gap_q #(.ROWS(R), .D(D), .B(B), .ACC_W(32), .ZX(ZX), .ZY(ZY), .M_MUL(MM), .SHIFT(SH)) dut (.*);

  logic signed [B-1:0] xmem [R * D], got [D];
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
  function automatic int reference(int j);
    longint s = 0, v;
    for (int i = 0; i < R; i++) s += xmem[i * D + j] - ZX;
    v = fl(s * MM, SH) + ZY;
    return (v > 7) ? 7 : (v < -8) ? -8 : int'(v);
  endfunction

  initial begin
    int t0;
    rst_n = 0; start = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
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
      if (writes != D || dones != 1) begin failures++; $display("FAIL writes=%0d dones=%0d", writes, dones); end
      for (int j = 0; j < D; j++) begin
        checks++;
        if (got[j] != B'(reference(j))) begin
          failures++; $display("FAIL j=%0d got %0d expected %0d", j, got[j], reference(j));
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
