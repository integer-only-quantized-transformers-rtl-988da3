// pe_lut: positional-encoding look-up table.
//
// The positional encoding is a fixed n x d_model tensor, computed offline and
// quantized with the same bitwidth as the activations; the input module adds it
// to the embedded input (Add_PE). The table is held here as a two-dimensional
// register array indexed by sequence position and feature. Its contents are
// written through the load port (wr_*), addressed row-major (pos * D + feature),
// which lets the host install the table of a trained model; the paper fixes
// the table at synthesis, loading it is this design's choice.
// Read: rd_data is valid one clock after rd_addr (row-major address), so the
// table can stand in for an activation buffer on Add_PE's second operand.
module pe_lut #(
  parameter int unsigned N  = 12,
  parameter int unsigned D  = 32,
  parameter int unsigned B  = 4,
  localparam int unsigned AW = $clog2(N * D)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic signed [B-1:0] wr_data,
  input  logic [AW-1:0]       rd_addr,
  output logic signed [B-1:0] rd_data
);
  localparam int unsigned PW = $clog2(N);
  localparam int unsigned FW = (D > 1) ? $clog2(D) : 1;

  logic signed [B-1:0] table_q [N][D];
  logic [PW-1:0] wr_pos, rd_pos;
  logic [FW-1:0] wr_feat, rd_feat;

  always_comb begin
    wr_pos  = PW'(wr_addr / AW'(D));
    wr_feat = FW'(wr_addr % AW'(D));
    rd_pos  = PW'(rd_addr / AW'(D));
    rd_feat = FW'(rd_addr % AW'(D));
  end

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < N * D)) table_q[wr_pos][wr_feat] <= wr_data;
    rd_data <= (32'(rd_addr) < N * D) ? table_q[rd_pos][rd_feat] : '0;
  end
endmodule
