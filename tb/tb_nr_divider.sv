// tb_nr_divider: divides random and corner-case operands (zero dividend,
// divisor 1, divisor larger than the dividend, largest values) and checks the
// quotient and remainder against integer division, the latency of
// DIVIDEND_W + 2 clocks from start to done, and busy during the operation.
module tb_nr_divider;
  localparam int DW = 12, VW = 14;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done;
  logic [DW-1:0] dividend, quotient;
  logic [VW-1:0] divisor, remainder;

  nr_divider #(.DIVIDEND_W(DW), .DIVISOR_W(VW)) dut (.*);

  int cyc;
  always @(posedge clk) cyc++;

  task automatic divide(int a, int b);
    int t0;
    dividend = DW'(a); divisor = VW'(b); start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    dividend = '0; divisor = '0;   // operands must have been captured
    checks++;
    if (!busy) begin failures++; $display("FAIL busy low after start"); end
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != DW + 2) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    checks++;
    if (quotient != DW'(a / b) || remainder != VW'(a % b)) begin
      failures++;
      $display("FAIL %0d / %0d: q=%0d r=%0d", a, b, quotient, remainder);
    end
    @(negedge clk);
  endtask

  initial begin
    rst_n = 0; start = 0; dividend = 0; divisor = 1; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    divide(0, 5); divide(4095, 1); divide(7, 100); divide(4095, 16383);
    divide(4095, 2); divide(100, 7); divide(1, 1); divide(2047, 24);
    for (int i = 0; i < 300; i++)
      divide($urandom_range(0, 4095), (i % 3 == 0) ? $urandom_range(1, 30) : $urandom_range(1, 16383));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
