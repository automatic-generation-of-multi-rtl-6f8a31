// bn_relu: fused batch normalization, ReLU and rounding for NO rolled channels.
//
// At inference time batch normalization is a per-channel affine map. Its scale
// gamma/sigma and offset beta - gamma*mu/sigma are stored as 16-bit fixed-point
// numbers with 8 fraction bits (Q8.8). For each of the NO lanes of a rolled chunk
// the unit computes y = scale * x + offset, applies ReLU when RELU is set, and
// rounds to the 8-bit Q3.5 activation format. The accumulated value x has
// ACT_FRAC + WFRAC fraction bits, WFRAC being the layer-wide weight bias; that
// bias is absorbed here, since it only moves the binary point of the final
// right shift. Because the chunk index walks over C'/U' chunks, NO multipliers
// serve all C' channels.
//
// Rounding is round-half-up followed by saturation to [-128, 127] (this design's
// choice). Parameters: NCH words of NO x {scale, offset}, loaded in LW-bit chunks
// through the ld_* port; lane n of a word occupies bits n*32 .. n*32+31, scale in
// the upper half.
//
// Timing: two cycles. Cycle 1 reads the parameter word of in_idx and registers
// the data; cycle 2 registers the rounded result, out_valid two cycles after
// in_valid. Never stalls.
module bn_relu
  import tomato_pkg::*;
#(
  parameter int   NO    = 16,
  parameter int   NCH   = 4,
  parameter int   AW    = 16,
  parameter int   WFRAC = 4,
  parameter logic RELU  = 1'b1,
  parameter int   LW    = 512
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [NO-1:0][AW-1:0]  in_data,
  input  logic [15:0]                   in_idx,
  output logic                          out_valid,
  output logic [NO-1:0][ACT_W-1:0]      out_data,
  input  logic                          ld_en,
  input  logic [15:0]                   ld_addr,
  input  logic [15:0]                   ld_chunk,
  input  logic [LW-1:0]                 ld_data
);
  localparam int FR = ACT_FRAC + WFRAC;        // fraction bits of in_data
  localparam int SH = FR + BN_FRAC - ACT_FRAC; // right shift back to Q3.5
  localparam int YW = AW + BN_W + FR + 2;

  logic [NO-1:0][2*BN_W-1:0]     prm;
  logic signed [NO-1:0][AW-1:0]  x1;
  logic                          v1;

  weight_buffer #(.DEPTH(NCH), .WIDTH(NO * 2 * BN_W), .LW(LW)) u_prm (
    .clk(clk), .ld_en(ld_en), .ld_addr(ld_addr), .ld_chunk(ld_chunk), .ld_data(ld_data),
    .rd_en(in_valid), .rd_addr(in_idx), .rd_data(prm));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk)
    if (in_valid) x1 <= in_data;

  for (genvar n = 0; n < NO; n++) begin : g_lane
    logic signed [BN_W-1:0]  scale, offset;
    logic signed [YW-1:0]    y, yr;
    logic signed [ACT_W-1:0] q;

    assign scale  = prm[n][2*BN_W-1:BN_W];
    assign offset = prm[n][BN_W-1:0];

    always_comb begin
      y = YW'($signed(x1[n])) * YW'(scale) + (YW'(offset) <<< FR);
      if (RELU && y < 0) y = '0;
      yr = (y + (YW'(1) <<< (SH - 1))) >>> SH;
      if (yr > 127)       q = 8'sd127;
      else if (yr < -128) q = -8'sd128;
      else                q = yr[ACT_W-1:0];
    end

    always_ff @(posedge clk)
      if (v1) out_data[n] <= q;
  end
endmodule
