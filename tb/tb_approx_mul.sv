// tb_approx_mul: self-checking test of the ApproxMul rescaling step.
// Drives random wide inputs (and the extreme values) through two instances
// with different constants and compares y, scaled and sat with a reference
// computed here with 64-bit integer arithmetic: floor(x*M / 2^n) + Z, clamped
// to the signed output range.
module tb_approx_mul;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [31:0] x;
  logic signed [31:0] sc_a, sc_b;
  logic signed [3:0]  y_a;
  logic signed [7:0]  y_b;
  logic               sat_a, sat_b;

  approx_mul #(.ACC_W(32), .MUL_W(16), .OUT_W(4), .M_MUL(205), .SHIFT(13), .Z_OUT(-1))
    dut_a (.x, .scaled(sc_a), .y(y_a), .sat(sat_a));
  approx_mul #(.ACC_W(32), .MUL_W(16), .OUT_W(8), .M_MUL(40000), .SHIFT(20), .Z_OUT(3))
    dut_b (.x, .scaled(sc_b), .y(y_b), .sat(sat_b));

  function automatic longint floordiv(longint a, longint d);
    longint q = a / d;
    if ((a % d != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  task automatic check_one(longint v);
    longint s, r, lo, hi;
    x = 32'(v);
    #1;
    // instance a
    s = floordiv(v * 205, 64'd8192);
    r = s - 1; lo = -8; hi = 7;
    checks++;
    if (sc_a != 32'(s) || y_a != 4'((r > hi) ? hi : (r < lo) ? lo : r) || sat_a != (r > hi || r < lo)) begin
      failures++;
      $display("FAIL a: x=%0d scaled=%0d/%0d y=%0d sat=%0b", v, sc_a, s, y_a, sat_a);
    end
    // instance b
    s = floordiv(v * 40000, 64'd1048576);
    r = s + 3; lo = -128; hi = 127;
    checks++;
    if (sc_b != 32'(s) || y_b != 8'((r > hi) ? hi : (r < lo) ? lo : r) || sat_b != (r > hi || r < lo)) begin
      failures++;
      $display("FAIL b: x=%0d scaled=%0d/%0d y=%0d sat=%0b", v, sc_b, s, y_b, sat_b);
    end
  endtask

  initial begin
    int n_sat = 0;
    check_one(0); check_one(1); check_one(-1); check_one(40); check_one(-40);
    check_one(2147483647); check_one(-64'sd2147483648);
    for (int i = 0; i < 2000; i++) begin
      automatic longint v = longint'($signed($urandom_range(0, 1200))) - 600;
      if (i % 4 == 0) v = longint'($signed($urandom()));
      check_one(v);
      if (sat_a) n_sat++;
    end
    // both clamping and non-clamping results must have been seen
    checks++;
    if (n_sat == 0 || n_sat == 2000) begin failures++; $display("FAIL: sat coverage %0d", n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
