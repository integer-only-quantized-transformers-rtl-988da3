// tb_workloads: runs the accelerator at the model configurations the paper
// evaluates on hardware, one accel_harness per configuration, side by side
// on one clock:
//   (n, d_model, b) = (6, 64, 8)  with m = 7 features (paper: 282,974 clocks)
//   (n, d_model, b) = (12, 64, 6) with m = 7 features (paper: 575,696 clocks)
//   (n, d_model, b) = (12, 32, 4) with m = 1 feature, the single-feature
//                     dataset of the paper (its cycle count is not reported)
// and three further points of the paper's configuration grid (n in 6..24,
// d_model in 8..64, b in 8/6/4; cycle counts not reported there):
//   (6, 8, 8), (18, 16, 6), (24, 32, 4), all with m = 7
// The 4-bit, n = 12, d_model = 32, m = 7 configuration is covered by the
// default-size testbench.
// Each harness checks every activation buffer and the forecast against its
// reference model and the clock count against the component latencies; this
// module adds up the results and has a watchdog.
module tb_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fin_a, fin_b, fin_c, fin_d, fin_e, fin_f;
  int ck_a, ck_b, ck_c, ck_d, ck_e, ck_f, fl_a, fl_b, fl_c, fl_d, fl_e, fl_f;

  accel_harness #(.N(6), .D(64), .M(7), .B(8), .RUNS(1), .PAPER_CYCLES(282974)) u_a (
    .clk, .finished(fin_a), .checks(ck_a), .failures(fl_a));
  accel_harness #(.N(12), .D(64), .M(7), .B(6), .RUNS(1), .PAPER_CYCLES(575696)) u_b (
    .clk, .finished(fin_b), .checks(ck_b), .failures(fl_b));
  accel_harness #(.N(12), .D(32), .M(1), .B(4), .RUNS(2), .PAPER_CYCLES(0)) u_c (
    .clk, .finished(fin_c), .checks(ck_c), .failures(fl_c));
  accel_harness #(.N(6), .D(8), .M(7), .B(8), .RUNS(2), .PAPER_CYCLES(0)) u_d (
    .clk, .finished(fin_d), .checks(ck_d), .failures(fl_d));
  accel_harness #(.N(18), .D(16), .M(7), .B(6), .RUNS(1), .PAPER_CYCLES(0)) u_e (
    .clk, .finished(fin_e), .checks(ck_e), .failures(fl_e));
  accel_harness #(.N(24), .D(32), .M(7), .B(4), .RUNS(1), .PAPER_CYCLES(0)) u_f (
    .clk, .finished(fin_f), .checks(ck_f), .failures(fl_f));

  initial begin
    #1;
    wait (fin_a && fin_b && fin_c && fin_d && fin_e && fin_f);
    $display("TB_RESULT checks=%0d failures=%0d", ck_a + ck_b + ck_c + ck_d + ck_e + ck_f, fl_a + fl_b + fl_c + fl_d + fl_e + fl_f);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ck_a + ck_b + ck_c + ck_d + ck_e + ck_f, fl_a + fl_b + fl_c + fl_d + fl_e + fl_f + 1);
    $finish;
  end
endmodule
