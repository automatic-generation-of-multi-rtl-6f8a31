// dw_engine: compute engine for depthwise convolutions.
//
// A depthwise convolution does not mix channels, so input channels are not
// reduced across beats: each beat brings the K x K windows of U channels and the
// engine produces U finished output channels, one per lane. Every lane has K^2
// processing elements (shift or short multiply) and a pipelined adder tree of
// K^2 inputs. Rolling the input channels therefore rolls the outputs in the same
// way; the channel_roller behind the engine narrows the U results to U' lanes
// where the layer is strided.
//
// Weight word layout: weight (u, t), t = kr*K + kc, at bit (u*K*K + t)*WB of the
// word of block b (channels b*U + u). Window layout: win[t][u].
//
// Timing: products registered (1 cycle) plus ceil(log2(K^2)) tree stages; res and
// res_valid (= tail.valid) appear with the tail control word, which carries the
// block index. All stages advance only while en is high.
module dw_engine
  import tomato_pkg::*;
#(
  parameter int     K     = 3,
  parameter int     U     = 8,
  parameter arith_e ARITH = A_FIXED,
  parameter int     WB    = 6,
  parameter int     PW    = prod_w(ARITH, WB),
  parameter int     AW    = PW + clog2c(K * K) + 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             en,
  input  logic [K*K-1:0][U-1:0][ACT_W-1:0] win,
  input  logic [U*K*K*WB-1:0]              wgt,
  input  beat_t                            ctl_in,
  output logic signed [U-1:0][AW-1:0]      res,
  output logic                             res_valid,
  output beat_t                            tail
);
  localparam int KK  = K * K;
  localparam int LAT = clog2c(KK);

  logic signed [U-1:0][KK-1:0][PW-1:0] prod;
  beat_t                               ctl_p [LAT+1];

  for (genvar u = 0; u < U; u++) begin : g_u
    for (genvar t = 0; t < KK; t++) begin : g_t
      localparam int WI = (u * KK + t) * WB;
      logic signed [PW-1:0] p;
      if (ARITH == A_SHIFT) begin : g_sh
        shift_mul #(.WB(WB), .PW(PW)) u_pe (.x(win[t][u]), .w(wgt[WI +: WB]), .p(p));
      end else begin : g_fx
        fixed_mul #(.WB(WB), .PW(PW)) u_pe (.x(win[t][u]), .w(wgt[WI +: WB]), .p(p));
      end
      always_ff @(posedge clk)
        if (en) prod[u][t] <= p;
    end
    adder_tree #(.N(KK), .IW(PW), .OW(AW)) u_tree (
      .clk(clk), .en(en), .in(prod[u]), .sum(res[u]));
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
  assign tail      = ctl_p[LAT];
  assign res_valid = tail.valid;
endmodule
