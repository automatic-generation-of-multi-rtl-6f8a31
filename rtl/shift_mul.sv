// shift_mul: shift-and-add processing element for power-of-two weights.
//
// A shift-quantized weight has the value s * 2^(e - b), with s in {-1, 0, +1}, a
// per-weight exponent e and a layer-wide bias b. The product with an activation is
// therefore a barrel shift and an optional negation, with no multiplier. The bias
// b is not applied here: it only moves the binary point of the layer's sums and is
// folded into the rounding after batch normalization.
//
// Weight code (this design's encoding): w[WB-1] is the sign, w[WB-2:0] is e.
// e = 0 encodes zero; e > 0 gives p = +/- (x << (e - 1)). A 3-bit code therefore
// holds 0 and +/-1, +/-2, +/-4 in units of 2^(1-b).
//
// Purely combinational; the enclosing engine registers the product.
module shift_mul #(
  parameter int WB = 3,
  parameter int PW = tomato_pkg::ACT_W + (1 << (WB - 1)) - 1
) (
  input  logic signed [tomato_pkg::ACT_W-1:0] x,
  input  logic        [WB-1:0]                w,
  output logic signed [PW-1:0]                p
);
  logic        [WB-2:0] e;
  logic signed [PW-1:0] mag;

  assign e = w[WB-2:0];

  always_comb begin
    mag = PW'(x) <<< (e - 1'b1);
    if (e == '0)          p = '0;
    else if (w[WB-1])     p = -mag;
    else                  p = mag;
  end
endmodule
