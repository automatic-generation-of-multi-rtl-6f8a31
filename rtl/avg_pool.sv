// avg_pool: global average pooling over a streamed feature map.
//
// The input is an H x W x C map, U channels per beat, C/U beats per pixel. A
// running sum per channel is kept in a small memory; the first pixel overwrites
// it and every later pixel adds to it. During the beats of the last pixel the
// sum including that pixel is divided by H*W, implemented as a multiply by
// RECIP = round(2^16 / (H*W)) and a round-half-up shift by 16 (this design's
// choice), and the C averages leave through an act_buffer, U per beat, at the
// same rate they arrive. The architecture lists average pooling with one channel
// per beat as a stage of the pipeline; its inside is not specified.
//
// Interface and timing: in_valid/in_ready/in_data stream in, out_* stream out
// through the FIFO (a result enters it in the cycle its last input is taken).
// in_ready is low only while the output FIFO is full.
module avg_pool
  import tomato_pkg::*;
#(
  parameter int C     = 1024,
  parameter int U     = 1,
  parameter int H     = 7,
  parameter int W     = 7,
  parameter int DEPTH = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [U-1:0][ACT_W-1:0] in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [U-1:0][ACT_W-1:0] out_data
);
  localparam int NB    = C / U;
  localparam int HW    = H * W;
  localparam int SW    = ACT_W + clog2c(HW) + 1;
  localparam int RECIP = ((1 << 17) / HW + 1) / 2;
  localparam int MW    = SW + 18;

  logic signed [U-1:0][SW-1:0] acc [NB];
  logic signed [U-1:0][SW-1:0] nsum;
  logic [U-1:0][ACT_W-1:0]     avg;
  int unsigned                 p, b;
  logic                        fire;
  logic [$clog2(DEPTH+1)-1:0]  free;

  assign in_ready = (free != 0);
  assign fire     = in_valid && in_ready;

  always_comb begin
    for (int u = 0; u < U; u++) begin
      logic signed [MW-1:0] m;
      nsum[u] = (p == 0) ? SW'($signed(in_data[u])) : $signed(acc[b][u]) + SW'($signed(in_data[u]));
      m       = (MW'($signed(nsum[u])) * MW'(RECIP) + (MW'(1) <<< 15)) >>> 16;
      avg[u]  = m[ACT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= 0; b <= 0;
    end else if (fire) begin
      if (b == NB - 1) begin
        b <= 0;
        p <= (p == HW - 1) ? 0 : p + 1;
      end else b <= b + 1;
    end
  end

  always_ff @(posedge clk)
    if (fire) acc[b] <= nsum;

  act_buffer #(.N(U), .DEPTH(DEPTH), .W(ACT_W)) u_out (
    .clk(clk), .rst_n(rst_n), .push(fire && p == HW - 1), .din(avg), .free(free),
    .out_valid(out_valid), .out_ready(out_ready), .dout(out_data));
endmodule
