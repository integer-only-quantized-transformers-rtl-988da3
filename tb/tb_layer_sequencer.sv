// tb_layer_sequencer: stands in for the components, answering every
// stage_start with a done pulse after a random delay, and checks that the
// stages follow the model order from the input linear layer to the output
// linear layer, that each stage is started exactly once, that start is
// ignored while busy and that done pulses once at the end.
module tb_layer_sequencer;
  import tt_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, stage_done, stage_start, busy, done;
  stage_e stage;

  layer_sequencer dut (.*);

  initial begin
    rst_n = 0; start = 0; stage_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int expected, ndone;
      @(negedge clk);
      checks++;
      if (busy || stage != ST_IDLE) begin failures++; $display("FAIL not idle"); end
      start = 1;
      @(negedge clk);
      start = 0;
      expected = int'(ST_LIN_IN);
      ndone = 0;
      while (expected <= int'(ST_LIN_OUT)) begin
        checks++;
        if (!stage_start || int'(stage) != expected) begin
          failures++; $display("FAIL run %0d: stage %0d start %0b, expected stage %0d", run, stage, stage_start, expected);
        end
        repeat ($urandom_range(0, 4)) begin
          @(negedge clk);
          start = (run == 1);          // must be ignored while busy
          checks++;
          if (stage_start || int'(stage) != expected) begin
            failures++; $display("FAIL run %0d: extra start or moved", run);
          end
        end
        start = 0;
        stage_done = 1;
        @(negedge clk);
        stage_done = 0;
        expected++;
      end
      // ST_DONE, then the done pulse
      while (!done && ndone < 5) begin @(negedge clk); ndone++; end
      checks++;
      if (!done) begin failures++; $display("FAIL no done"); end
      @(negedge clk);
      checks++;
      if (done || busy) begin failures++; $display("FAIL done longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
