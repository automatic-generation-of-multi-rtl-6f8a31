// conv_layer: one streaming core of the flattened pipeline.
//
// Each convolution of the network gets its own core: a slide buffer that forms
// K x K windows from the incoming pixel stream, a weight buffer holding that
// layer's weights, a compute engine (roll-unrolled conv_engine for normal,
// pointwise and fully connected layers, dw_engine for depthwise layers), a
// channel roller that narrows the results to U' channels per cycle, the fused
// batch-norm/ReLU/rounding unit and an activation FIFO. The input stream carries
// U channels per beat (C/U beats per pixel), the output stream U' channels per
// beat (C'/U' beats per output pixel). With the unroll factors chosen so that a
// core's output rate equals the next core's input rate, a chain of cores runs
// without idle compute. A fully connected layer is a K = 1 core on a 1 x 1 map
// with its bias in the BN offset and RELU off (this design's choice).
//
// Flow control (this design's choice). Streams are valid/ready. The engine
// pipeline advances on en; en drops only when a finished result reaches the
// engine's tail while the roller's result queue is full. For a strided core the
// queue holds half an output row of results (WO/2 + 1 pixels), because such a
// core produces its outputs only in every other row but its U' is matched to the
// average rate; for stride 1 two entries suffice. The
// roller hands a chunk to the 2-cycle BN pipeline only when at least 3 FIFO
// entries are free, so the BN never needs to stall. Back-pressure from a full
// FIFO thus propagates to in_ready.
//
// Load port: ld_en with ld_target = LD_WEIGHT writes weight word ld_addr (the
// input-channel block; see conv_engine/dw_engine for the packing), LD_BN writes
// BN word ld_addr (the output chunk; see bn_relu), in LW-bit chunks ld_chunk.
//
// Latency from a window beat to its result: 1 (window) + 1 (products) +
// ceil(log2(U*K^2)) (tree) cycles, then the roller, 2 cycles of BN and the FIFO.
module conv_layer
  import tomato_pkg::*;
#(
  parameter layer_kind_e KIND   = L_CONV,
  parameter int          K      = 3,
  parameter int          STRIDE = 2,
  parameter int          C      = 3,
  parameter int          CO     = 32,
  parameter int          U      = 3,
  parameter int          UO     = 8,
  parameter int          H      = 224,
  parameter int          W      = 224,
  parameter arith_e      ARITH  = A_FIXED,
  parameter int          WB     = 8,
  parameter int          WFRAC  = 6,
  parameter logic        RELU   = 1'b1,
  parameter int          LW     = 512,
  parameter int          WO     = (W - 1) / STRIDE + 1,
  parameter int          FDEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [U-1:0][ACT_W-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [UO-1:0][ACT_W-1:0] out_data,
  input  logic                     ld_en,
  input  ld_target_e               ld_target,
  input  logic [15:0]              ld_addr,
  input  logic [15:0]              ld_chunk,
  input  logic [LW-1:0]            ld_data
);
  localparam logic DW   = (KIND == L_DW);
  localparam int   NB   = C / U;
  localparam int   PW   = prod_w(ARITH, WB);
  localparam int   AW   = PW + clog2c(DW ? K * K : C * K * K) + 1;
  localparam int   WWID = DW ? U * K * K * WB : CO * U * K * K * WB;
  localparam int   NI   = DW ? U : CO;   // values per roller push
  localparam int   RQ   = ((STRIDE > 1) ? (WO / 2 + 1) : 1) * (DW ? NB : 1) + 1;  // roller queue

  logic                              en, fire;
  logic [K*K-1:0][U-1:0][ACT_W-1:0]  win;
  beat_t                             ctl, tail;
  logic [15:0]                       nxt_blk;
  logic [WWID-1:0]                   wgt;
  logic signed [NI-1:0][AW-1:0]      res;
  logic                              res_valid, can_push, take;
  logic                              r_valid, bn_valid;
  logic [UO-1:0][AW-1:0]             r_data;
  logic [15:0]                       r_idx;
  logic [UO-1:0][ACT_W-1:0]          bn_data;
  logic [$clog2(FDEPTH+1)-1:0]       free;

  assign en   = !(res_valid && !can_push);
  assign take = (free >= 3);

  slide_buffer #(.K(K), .STRIDE(STRIDE), .C(C), .U(U), .H(H), .W(W)) u_sb (
    .clk(clk), .rst_n(rst_n), .en(en), .in_valid(in_valid), .in_ready(in_ready),
    .in_data(in_data), .win(win), .ctl(ctl), .fire(fire), .nxt_blk(nxt_blk));

  weight_buffer #(.DEPTH(NB), .WIDTH(WWID), .LW(LW)) u_wb (
    .clk(clk), .ld_en(ld_en && ld_target == LD_WEIGHT), .ld_addr(ld_addr),
    .ld_chunk(ld_chunk), .ld_data(ld_data), .rd_en(fire), .rd_addr(nxt_blk),
    .rd_data(wgt));

  if (DW) begin : g_dw
    dw_engine #(.K(K), .U(U), .ARITH(ARITH), .WB(WB), .PW(PW), .AW(AW)) u_eng (
      .clk(clk), .rst_n(rst_n), .en(en), .win(win), .wgt(wgt), .ctl_in(ctl),
      .res(res), .res_valid(res_valid), .tail(tail));
  end else begin : g_conv
    conv_engine #(.K(K), .U(U), .C(C), .CO(CO), .ARITH(ARITH), .WB(WB), .PW(PW), .AW(AW)) u_eng (
      .clk(clk), .rst_n(rst_n), .en(en), .win(win), .wgt(wgt), .ctl_in(ctl),
      .res(res), .res_valid(res_valid), .tail(tail));
  end

  channel_roller #(.NI(NI), .NO(UO), .AW(AW), .QD(RQ)) u_roll (
    .clk(clk), .rst_n(rst_n), .push(res_valid && en), .in_data(res),
    .in_base(DW ? 16'(tail.blk * (U / UO)) : 16'd0), .can_push(can_push),
    .take(take), .out_valid(r_valid), .out_data(r_data), .out_idx(r_idx));

  bn_relu #(.NO(UO), .NCH(CO / UO), .AW(AW), .WFRAC(WFRAC), .RELU(RELU), .LW(LW)) u_bn (
    .clk(clk), .rst_n(rst_n), .in_valid(r_valid), .in_data(r_data), .in_idx(r_idx),
    .out_valid(bn_valid), .out_data(bn_data),
    .ld_en(ld_en && ld_target == LD_BN), .ld_addr(ld_addr), .ld_chunk(ld_chunk),
    .ld_data(ld_data));

  act_buffer #(.N(UO), .DEPTH(FDEPTH), .W(ACT_W)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(bn_valid), .din(bn_data), .free(free),
    .out_valid(out_valid), .out_ready(out_ready), .dout(out_data));

  initial begin
    assert (C % U == 0 && CO % UO == 0) else $error("conv_layer: unroll factors must divide channels");
    assert (!DW || (C == CO && U % UO == 0)) else $error("conv_layer: depthwise needs C == C' and U' | U");
  end
endmodule
