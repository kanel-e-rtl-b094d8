// kan_requant: quantization and saturation of a neuron sum at the end of its adder tree.
//
// The sum arrives with FRAC fractional bits below the LSB of the next layer's code. It is
// rounded to that LSB (round half up: add half an LSB, then shift right arithmetically)
// and clipped to the signed OUT_W-bit range [-2^(OUT_W-1), 2^(OUT_W-1)-1]. This is the
// integer form of the layer output quantizer s * Quantize[n](clip(x, a, b) / s): the
// clip bounds of the shared domain [a, b] are the ends of the OUT_W-bit code range.
//
// Interface: sum (signed IN_W bits) in, q (signed OUT_W bits) out.
// Timing: combinational; the layer registers q.
//
// Follows the paper: the sum is quantized and saturated to the following layer's input
// width. This design's choices: signed codes, round half up, and the FRAC-bit split.
module kan_requant #(
  parameter int IN_W  = 14,
  parameter int OUT_W = 8,
  parameter int FRAC  = 2
) (
  input  logic signed [IN_W-1:0]  sum,
  output logic signed [OUT_W-1:0] q
);

  localparam int W = IN_W + 1;  // one guard bit for the rounding add
  localparam logic signed [W-1:0] MAXV = W'((longint'(1) << (OUT_W - 1)) - 1);
  localparam logic signed [W-1:0] MINV = W'(-(longint'(1) << (OUT_W - 1)));

  logic signed [W-1:0] rounded;
  logic                sat_hi, sat_lo;

  always_comb begin
    if (FRAC > 0) rounded = (W'(sum) + (W'(1) <<< (FRAC > 0 ? FRAC - 1 : 0))) >>> FRAC;
    else          rounded = W'(sum);
    sat_hi = rounded > MAXV;
    sat_lo = rounded < MINV;
    if (sat_hi)      q = MAXV[OUT_W-1:0];
    else if (sat_lo) q = MINV[OUT_W-1:0];
    else             q = rounded[OUT_W-1:0];
  end

  initial assert (IN_W - FRAC >= OUT_W)
    else $fatal(1, "kan_requant: IN_W - FRAC must be at least OUT_W");

endmodule
