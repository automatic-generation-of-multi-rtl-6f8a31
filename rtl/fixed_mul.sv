// fixed_mul: short fixed-point multiplier processing element.
//
// Multiplies an 8-bit two's-complement activation by a WB-bit two's-complement
// weight mantissa. The weight's binary point (its layer-wide fraction width p) is
// not applied here; like the shift bias it is folded into the rounding after
// batch normalization. On an FPGA this maps to a small LUT multiplier.
//
// Purely combinational; the enclosing engine registers the product.
module fixed_mul #(
  parameter int WB = 8,
  parameter int PW = tomato_pkg::ACT_W + WB
) (
  input  logic signed [tomato_pkg::ACT_W-1:0] x,
  input  logic signed [WB-1:0]                w,
  output logic signed [PW-1:0]                p
);
  assign p = PW'(x) * PW'(w);
endmodule
