// tb_pe_lut: loads a positional-encoding table computed here from the usual
// sinusoidal formula (quantized to 4 bits), reads every entry back in random
// order with one clock of latency and compares.
module tb_pe_lut;
  localparam int N = 12, D = 32, B = 4, AW = $clog2(N * D);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic signed [B-1:0] wr_data, rd_data;
  logic signed [B-1:0] ref_pe [N * D];

  pe_lut #(.N(N), .D(D), .B(B)) dut (.*);

  initial begin
    // PE(pos, 2i) = sin(pos / 10000^(2i/D)), PE(pos, 2i+1) = cos(...),
    // quantized with scale 1/7 (range [-1, 1] -> [-7, 7])
    for (int p = 0; p < N; p++)
      for (int f = 0; f < D; f++) begin
        automatic real ang = p / (10000.0 ** (real'(f - f % 2) / D));
        automatic real v   = (f % 2 == 0) ? $sin(ang) : $cos(ang);
        ref_pe[p * D + f] = B'($rtoi(v * 7.0 + ((v >= 0) ? 0.5 : -0.5)));
      end
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    @(negedge clk);
    for (int a = 0; a < N * D; a++) begin
      wr_en = 1; wr_addr = AW'(a); wr_data = ref_pe[a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int c = 0; c < 2 * N * D; c++) begin
      automatic int a = (c < N * D) ? c : $urandom_range(0, N * D - 1);
      rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== ref_pe[a]) begin
        failures++; $display("FAIL addr %0d got %0d expected %0d", a, rd_data, ref_pe[a]);
      end
    end
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
