// act_buffer: activation buffer between two components.
//
// A simple dual-port memory with one write port and one read port, read
// synchronously: rd_data shows the word at rd_addr one clock after the
// address is applied, as an FPGA block RAM does. Every component of the
// accelerator writes its result tensor, row-major, into one of these and the
// next component reads it back. The memory is not reset; the accelerator
// writes every word before reading it. A write and a read of the same address
// in the same cycle return the old word.
module act_buffer #(
  parameter int unsigned DEPTH = 384,
  parameter int unsigned W     = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic signed [W-1:0] wr_data,
  input  logic [AW-1:0]       rd_addr,
  output logic signed [W-1:0] rd_data
);
  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
