// tb_add_q: fills two operand-buffer models with random 4-bit values, runs the
// addition and compares every result with
//   clamp(floor((a-Z1)*M1/2^SH1) + floor((b-Z2)*M2/2^SH2) + Z3),
// computed here. Checks addresses, one done pulse, LEN + 2 clocks of latency
// and that both clamped and unclamped results occurred.
module tb_add_q;
  localparam int LEN = 37, B = 4, AW = $clog2(LEN + 1);
  localparam int Z1 = -2, Z2 = 3, Z3 = 1, M1 = 5, SH1 = 2, M2 = 3, SH2 = 1;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, y_we, sat;
  logic [AW-1:0] rd_addr, y_waddr;
  logic signed [B-1:0] a_rdata, b_rdata, y_wdata;

  add_q #(.LEN(LEN), .B(B), .ACC_W(32), .Z1(Z1), .Z2(Z2), .Z3(Z3), .M1(M1), .SH1(SH1),
          .M2(M2), .SH2(SH2)) dut (.*);

  logic signed [B-1:0] amem [LEN], bmem [LEN], got [LEN];
  always_ff @(posedge clk) begin a_rdata <= amem[rd_addr]; b_rdata <= bmem[rd_addr]; end
  int writes, dones, cyc, sats;
  always @(posedge clk) begin
    cyc++;
    if (y_we) begin got[y_waddr] <= y_wdata; writes++; end
    if (done) dones++;
    if (sat) sats++;
  end

  function automatic longint fl(longint v, int sh);
    return (v >= 0) ? (v >> sh) : -((-v + (longint'(1) << sh) - 1) >> sh);
  endfunction
  function automatic int reference(int i);
    longint v = fl((amem[i] - Z1) * M1, SH1) + fl((bmem[i] - Z2) * M2, SH2) + Z3;
    return (v > 7) ? 7 : (v < -8) ? -8 : int'(v);
  endfunction

  initial begin
    int t0, nsat;
    rst_n = 0; start = 0; writes = 0; dones = 0; cyc = 0; sats = 0; nsat = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      foreach (amem[i]) begin amem[i] = B'($urandom()); bmem[i] = B'($urandom()); end
      writes = 0; dones = 0;
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != LEN + 2) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      @(negedge clk);
      checks++;
      if (writes != LEN || dones != 1) begin failures++; $display("FAIL writes=%0d dones=%0d", writes, dones); end
      for (int i = 0; i < LEN; i++) begin
        checks++;
        if (reference(i) == 7 || reference(i) == -8) nsat++;
        if (got[i] != B'(reference(i))) begin
          failures++; $display("FAIL i=%0d got %0d expected %0d", i, got[i], reference(i));
        end
      end
    end
    checks++;
    if (sats == 0 || sats == 3 * LEN) begin failures++; $display("FAIL sat coverage %0d", sats); end
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
