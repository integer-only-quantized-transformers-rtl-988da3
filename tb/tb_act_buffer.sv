// tb_act_buffer: writes random words to random addresses of the buffer while
// reading random addresses, and checks every read against a shadow array,
// one clock after the address, including same-address read-during-write
// (old data is returned). A second instance with a power-of-two depth (32)
// receives the same traffic restricted to its address range, so both the
// general and the full-address-range cases of the write guard are covered.
module tb_act_buffer;
  localparam int DEPTH = 40, W = 6, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic signed [W-1:0] wr_data, rd_data;
  logic signed [W-1:0] shadow [DEPTH];
  bit                  known  [DEPTH];

  act_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  localparam int DEPTH2 = 32, AW2 = $clog2(DEPTH2);
  logic                wr_en2;
  logic signed [W-1:0] rd_data2;
  logic signed [W-1:0] shadow2 [DEPTH2];
  bit                  known2  [DEPTH2];
  assign wr_en2 = wr_en && (32'(wr_addr) < DEPTH2);
  act_buffer #(.DEPTH(DEPTH2), .W(W)) dut2 (
    .clk, .wr_en(wr_en2), .wr_addr(wr_addr[AW2-1:0]), .wr_data,
    .rd_addr(rd_addr[AW2-1:0]), .rd_data(rd_data2));

  initial begin
    logic signed [W-1:0] expect_q;
    bit                  expect_v;
    logic signed [W-1:0] expect_q2;
    bit                  expect_v2;
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0; expect_v = 0; expect_q = 0;
    foreach (known[i]) known[i] = 0;
    foreach (known2[i]) known2[i] = 0;
    expect_v2 = 0; expect_q2 = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (expect_v) begin
        checks++;
        if (rd_data !== expect_q) begin
          failures++;
          $display("FAIL cycle %0d: got %0d expected %0d", c, rd_data, expect_q);
        end
      end
      if (expect_v2) begin
        checks++;
        if (rd_data2 !== expect_q2) begin
          failures++;
          $display("FAIL depth-32 cycle %0d: got %0d expected %0d", c, rd_data2, expect_q2);
        end
      end
      wr_en   = ($urandom_range(0, 1) == 1) || (c < 2 * DEPTH);
      wr_addr = (c < DEPTH) ? AW'(c) : AW'($urandom_range(0, DEPTH - 1));
      wr_data = W'($urandom());
      rd_addr = (c % 7 == 0) ? wr_addr : AW'($urandom_range(0, DEPTH - 1));
      expect_v = known[rd_addr];
      expect_q = shadow[rd_addr];
      expect_v2 = (32'(rd_addr) < DEPTH2) && known2[rd_addr[AW2-1:0]];
      expect_q2 = shadow2[rd_addr[AW2-1:0]];
      @(posedge clk);
      if (wr_en) begin shadow[wr_addr] = wr_data; known[wr_addr] = 1; end
      if (wr_en2) begin shadow2[wr_addr[AW2-1:0]] = wr_data; known2[wr_addr[AW2-1:0]] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
