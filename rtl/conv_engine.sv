// conv_engine: roll-unrolled compute engine for normal, pointwise and FC layers.
//
// Each beat brings one K x K window of U input channels (input block b of
// NB = C/U blocks) and the weight word of that block. All C' output channels are
// computed in parallel: for every output channel o, U*K^2 processing elements
// (barrel shifters for shift-quantized layers, short multipliers for fixed-point
// layers) form the products, a pipelined adder tree sums them, and an
// accumulator adds the NB block sums of one output pixel. The engine thus uses
// U*C'*K^2 processing elements instead of C*C'*K^2 and needs C/U beats per
// output pixel, which is the roll-unrolled scheme: input channels rolled,
// output channels fully unrolled so that the stream never waits on them.
//
// Weight word layout: weight (o, u, t), t = kr*K + kc, sits at bit
// ((o*U + u)*K*K + t)*WB. Window layout: win[t][u].
//
// Timing. Products are registered (1 cycle), the tree adds LAT = ceil(log2(U*K^2))
// cycles, and the tail of the pipeline (tail control word) is combinational into
// the accumulator: in the cycle where tail.valid & tail.last, res holds the
// finished C' sums and res_valid is high. Everything advances only while en is
// high; the enclosing core lowers en when the result cannot be handed on.
module conv_engine
  import tomato_pkg::*;
#(
  parameter int     K     = 1,
  parameter int     U     = 8,
  parameter int     C     = 32,
  parameter int     CO    = 64,
  parameter arith_e ARITH = A_SHIFT,
  parameter int     WB    = 3,
  parameter int     PW    = prod_w(ARITH, WB),
  parameter int     AW    = PW + clog2c(C * K * K) + 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic [K*K-1:0][U-1:0][ACT_W-1:0] win,
  input  logic [CO*U*K*K*WB-1:0]         wgt,
  input  beat_t                          ctl_in,
  output logic signed [CO-1:0][AW-1:0]   res,
  output logic                           res_valid,
  output beat_t                          tail
);
  localparam int KK  = K * K;
  localparam int N   = U * KK;
  localparam int LAT = clog2c(N);

  logic signed [CO-1:0][N-1:0][PW-1:0] prod;
  logic signed [CO-1:0][AW-1:0]        sum, acc;
  beat_t                               ctl_p [LAT+1];

  for (genvar o = 0; o < CO; o++) begin : g_o
    for (genvar u = 0; u < U; u++) begin : g_u
      for (genvar t = 0; t < KK; t++) begin : g_t
        localparam int WI = ((o * U + u) * KK + t) * WB;
        logic signed [PW-1:0] p;
        if (ARITH == A_SHIFT) begin : g_sh
          shift_mul #(.WB(WB), .PW(PW)) u_pe (.x(win[t][u]), .w(wgt[WI +: WB]), .p(p));
        end else begin : g_fx
          fixed_mul #(.WB(WB), .PW(PW)) u_pe (.x(win[t][u]), .w(wgt[WI +: WB]), .p(p));
        end
        always_ff @(posedge clk)
          if (en) prod[o][u*KK + t] <= p;
      end
    end
    adder_tree #(.N(N), .IW(PW), .OW(AW)) u_tree (
      .clk(clk), .en(en), .in(prod[o]), .sum(sum[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ctl_p[0] <= '0;
    else if (en) ctl_p[0] <= ctl_in;
  end
  for (genvar l = 1; l <= LAT; l++) begin : g_ctl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ctl_p[l] <= '0;
      else if (en) ctl_p[l] <= ctl_p[l-1];
    end
  end
  assign tail = ctl_p[LAT];

  // accumulation over the C/U input-channel blocks of one output pixel
  for (genvar o = 0; o < CO; o++) begin : g_acc
    assign res[o] = tail.first ? $signed(sum[o]) : $signed(acc[o]) + $signed(sum[o]);
    always_ff @(posedge clk)
      if (en && tail.valid) acc[o] <= res[o];
  end
  assign res_valid = tail.valid && tail.last;
endmodule
