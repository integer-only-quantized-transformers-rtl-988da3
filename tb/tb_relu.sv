// tb_relu: exhaustive test of the quantized ReLU for two zero points:
// y must equal max(x, Z) and clamped must be set exactly when x < Z.
module tb_relu;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [3:0] x, y0, y1;
  logic              c0, c1;

  relu #(.B(4), .Z(0))  dut0 (.x, .y(y0), .clamped(c0));
  relu #(.B(4), .Z(-3)) dut1 (.x, .y(y1), .clamped(c1));

  initial begin
    for (int v = -8; v < 8; v++) begin
      x = 4'(v);
      #1;
      checks += 2;
      if (y0 != 4'((v < 0) ? 0 : v) || c0 != (v < 0)) begin
        failures++; $display("FAIL Z=0 x=%0d y=%0d c=%0b", v, y0, c0);
      end
      if (y1 != 4'((v < -3) ? -3 : v) || c1 != (v < -3)) begin
        failures++; $display("FAIL Z=-3 x=%0d y=%0d c=%0b", v, y1, c1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
