// tomato_mobilenet: flattened streaming CNN accelerator, MobileNet-V1 by default.
//
// Instead of one large compute core that is time-shared by all layers, every layer
// of the network has its own small streaming core (conv_layer, or avg_pool for
// the global pooling), and the cores are chained: each takes the activation
// stream of its predecessor and produces the stream of its successor, so all
// layers work at the same time on different parts of the image and consecutive
// images follow each other without a gap. Each core can use its own arithmetic
// (shift or fixed-point weights) and precision, set per layer in the table CFG.
//
// The default table (tomato_pkg::MBN_CFG) is MobileNet-V1 with an input rate of
// one pixel per clock: 224 x 224 x 3 images stream in one RGB pixel per beat and
// the 1000 class scores leave one per beat, as 8-bit Q3.5 values. The unroll
// factors make the rates match from layer to layer. Any other network can be
// built by passing NL, CFG and IMG; a layer's uo must equal the next layer's u.
//
// Interface. in_* and out_* are valid/ready streams. All weights and BN
// parameters live on chip and are written before use through the shared load
// port: ld_valid with ld_layer selects the core, ld_target the weight or BN
// memory, ld_addr the word and ld_chunk the LW-bit slice of the word (word
// layouts in conv_engine, dw_engine and bn_relu). Nothing is read from off-chip
// memory while images stream.
module tomato_mobilenet
  import tomato_pkg::*;
#(
  parameter int         NL       = MBN_NL,
  parameter layer_cfg_t CFG [NL] = MBN_CFG,
  parameter int         IMG      = 224,
  parameter int         LW       = 512
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  output logic                            in_ready,
  input  logic [CFG[0].u-1:0][ACT_W-1:0]  in_data,
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [CFG[NL-1].uo-1:0][ACT_W-1:0] out_data,
  input  logic                            ld_valid,
  input  logic [7:0]                      ld_layer,
  input  ld_target_e                      ld_target,
  input  logic [15:0]                     ld_addr,
  input  logic [15:0]                     ld_chunk,
  input  logic [LW-1:0]                   ld_data
);
  // edge of the square feature map at the input of layer i
  function automatic int fmap(int i);
    int s = IMG;
    for (int j = 0; j < i; j++)
      s = (CFG[j].kind == L_POOL) ? 1 : (s - 1) / CFG[j].stride + 1;
    return s;
  endfunction

  function automatic int max_lanes();
    int m = 1;
    for (int j = 0; j < NL; j++) begin
      if (CFG[j].u  > m) m = CFG[j].u;
      if (CFG[j].uo > m) m = CFG[j].uo;
    end
    return m;
  endfunction

  localparam int ML = max_lanes();

  logic [ML-1:0][ACT_W-1:0] d     [NL+1];
  logic                     v     [NL+1];
  logic                     r     [NL+1];

  assign d[0]     = (ML * ACT_W)'(in_data);
  assign v[0]     = in_valid;
  assign in_ready = r[0];
  assign out_valid = v[NL];
  assign r[NL]     = out_ready;
  assign out_data  = d[NL][CFG[NL-1].uo-1:0];

  for (genvar i = 0; i < NL; i++) begin : g_layer
    localparam layer_cfg_t LC = CFG[i];
    localparam int         HI = fmap(i);
    logic [LC.uo-1:0][ACT_W-1:0] od;

    assign d[i+1] = (ML * ACT_W)'(od);

    if (LC.kind == L_POOL) begin : g_pool
      avg_pool #(.C(LC.cin), .U(LC.u), .H(HI), .W(HI)) u_core (
        .clk(clk), .rst_n(rst_n),
        .in_valid(v[i]), .in_ready(r[i]), .in_data(d[i][LC.u-1:0]),
        .out_valid(v[i+1]), .out_ready(r[i+1]), .out_data(od));
    end else begin : g_conv
      conv_layer #(
        .KIND(LC.kind), .K(LC.k), .STRIDE(LC.stride), .C(LC.cin), .CO(LC.cout),
        .U(LC.u), .UO(LC.uo), .H(HI), .W(HI), .ARITH(LC.arith), .WB(LC.wb),
        .WFRAC(LC.wfrac), .RELU(LC.relu), .LW(LW)) u_core (
        .clk(clk), .rst_n(rst_n),
        .in_valid(v[i]), .in_ready(r[i]), .in_data(d[i][LC.u-1:0]),
        .out_valid(v[i+1]), .out_ready(r[i+1]), .out_data(od),
        .ld_en(ld_valid && ld_layer == 8'(i)), .ld_target(ld_target),
        .ld_addr(ld_addr), .ld_chunk(ld_chunk), .ld_data(ld_data));
    end

    initial if (i > 0)
      assert (CFG[i-1].uo == LC.u) else $error("layer %0d: u does not match the previous uo", i);
  end
endmodule
