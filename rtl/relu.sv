// relu: quantized rectifier.
//
// Real zero maps to the zero point Z of the quantized tensor, so ReLU on a
// quantized value is max(x, Z) and keeps the same scale and zero point.
// Combinational; the accelerator places it on the write path of the first
// feed-forward layer so it adds no cycles (a choice of this design).
//   x       : signed B-bit input
//   y       : signed B-bit output
//   clamped : x was below Z and was replaced by Z
// With Z >= 0 (the default) the sign bit of y is constant 0, since y >= Z;
// it stays a port so that negative zero points work too.
module relu #(
  parameter int unsigned B = 4,
  parameter int          Z = 0
) (
  input  logic signed [B-1:0] x,
  output logic signed [B-1:0] y,
  output logic                clamped
);
  localparam logic signed [B-1:0] ZQ = B'(Z);
  always_comb begin
    clamped = (x < ZQ);
    y       = clamped ? ZQ : x;
  end
endmodule
