// approx_mul: the "ApproxMul" rescaling step used by every integer-only layer.
//
// A real-valued scale ratio (for example S_in / S_out) is replaced offline by a
// positive integer M and a right shift n, so that the ratio is M * 2^-n. The
// block multiplies the wide input by M, shifts the product right by n bits
// (arithmetic shift, so the result is rounded towards minus infinity), adds the
// output zero point and clamps the sum to the signed OUT_W-bit range.
// The multiply/shift form follows the paper; truncating instead of rounding
// is this design's choice.
//
// Interface: purely combinational.
//   x      : signed ACC_W-bit input (an accumulator)
//   scaled : (x * M) >>> n, before zero point and clamping (ACC_W bits; the
//            caller makes sure it fits)
//   y      : clamp(scaled + Z_OUT) to OUT_W bits
//   sat    : y was clamped
module approx_mul #(
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned MUL_W  = 16,
  parameter int unsigned OUT_W  = 4,
  parameter int          M_MUL  = 205,
  parameter int          SHIFT  = 13,
  parameter int          Z_OUT  = 0
) (
  input  logic signed [ACC_W-1:0] x,
  output logic signed [ACC_W-1:0] scaled,
  output logic signed [OUT_W-1:0] y,
  output logic                    sat
);
  localparam int unsigned PW = ACC_W + MUL_W + 1;
  localparam logic signed [PW-1:0] HI = (PW'(1) <<< (OUT_W - 1)) - PW'(1);
  localparam logic signed [PW-1:0] LO = -(PW'(1) <<< (OUT_W - 1));

  logic signed [PW-1:0] prod, shifted, biased;

  always_comb begin
    prod    = PW'(x) * PW'(M_MUL);
    shifted = prod >>> SHIFT;
    biased  = shifted + PW'(Z_OUT);
    scaled  = shifted[ACC_W-1:0];
    sat     = (biased > HI) || (biased < LO);
    if (biased > HI)      y = HI[OUT_W-1:0];
    else if (biased < LO) y = LO[OUT_W-1:0];
    else                  y = biased[OUT_W-1:0];
  end
endmodule
