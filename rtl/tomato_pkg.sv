// tomato_pkg: types, constants and layer tables shared by the streaming CNN cores.
//
// Number formats. Every activation that travels between two layers is an 8-bit
// two's-complement fixed-point value with 3 integer and 5 fraction bits (Q3.5).
// Weights are either shift-quantized (a sign and an exponent, value s*2^(e-b)) or
// short two's-complement fixed-point numbers. Fused batch-normalization scale and
// offset are 16-bit fixed point with the binary point at bit 8 (Q8.8). The
// accumulated convolution result keeps full precision; its binary point sits at
// ACT_FRAC + wfrac, where wfrac is the layer's weight fraction width (the
// layer-wide weight bias b), which the BN rounding stage removes again.
//
// Layer table. A network is a packed array of layer_cfg_t, one entry per streaming
// core, in pipeline order. u is the number of input channels a core takes per
// beat and uo the number of output channels it hands on per beat; a core's uo must
// equal the next core's u. The default table is MobileNet-V1 with the unroll
// factors of an input rate of one pixel per clock. The unroll factors, strides
// and channel counts follow the published table of this architecture; the split
// of depthwise precisions between 3 and 7 bits is this design's own choice.
package tomato_pkg;

  localparam int ACT_W    = 8;   // activation width
  localparam int ACT_FRAC = 5;   // activation fraction bits (Q3.5)
  localparam int BN_W     = 16;  // BN scale / offset width
  localparam int BN_FRAC  = 8;   // BN scale / offset fraction bits (Q8.8)

  typedef enum logic [1:0] {L_CONV = 2'd0, L_DW = 2'd1, L_POOL = 2'd2} layer_kind_e;
  typedef enum logic       {A_FIXED = 1'b0, A_SHIFT = 1'b1} arith_e;

  typedef struct packed {
    layer_kind_e kind;
    arith_e      arith;
    logic        relu;
    int          k;      // kernel size
    int          stride;
    int          cin;
    int          cout;
    int          u;      // input channels per beat (U)
    int          uo;     // output channels per beat (U')
    int          wb;     // weight bits
    int          wfrac;  // weight fraction bits (layer-wide bias)
  } layer_cfg_t;

  // Control word that travels down a compute pipeline with each beat.
  typedef struct packed {
    logic        valid;  // beat belongs to an output position
    logic        first;  // first input-channel block of the position
    logic        last;   // last input-channel block of the position
    logic [15:0] blk;    // input-channel block index
  } beat_t;

  // Target of a load-port write.
  typedef enum logic {LD_WEIGHT = 1'b0, LD_BN = 1'b1} ld_target_e;

  // Width of one product of an 8-bit activation and a weight.
  function automatic int prod_w(arith_e a, int wb);
    // shift: x << (2^(wb-1)-2) needs 8 + 2^(wb-1)-2 bits, +1 for negating -128
    return (a == A_SHIFT) ? ACT_W + (1 << (wb - 1)) - 1 : ACT_W + wb;
  endfunction

  function automatic int clog2c(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction


  function automatic layer_cfg_t mk(layer_kind_e kind, arith_e arith, int k, int s,
                                    int cin, int cout, int u, int uo, int wb,
                                    int wfrac, logic relu);
    layer_cfg_t c;
    c.kind = kind; c.arith = arith; c.relu = relu; c.k = k; c.stride = s;
    c.cin = cin; c.cout = cout; c.u = u; c.uo = uo; c.wb = wb; c.wfrac = wfrac;
    return c;
  endfunction

  localparam int MBN_NL = 29;

  // MobileNet-V1: conv, 13 depthwise/pointwise pairs, global average pool, FC.
  localparam layer_cfg_t MBN_CFG [MBN_NL] = '{
    mk(L_CONV, A_FIXED, 3, 2,    3,   32,  3, 8, 8, 6, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,   32,   32,  8, 8, 7, 5, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,   32,   64,  8,16, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 2,   64,   64, 16, 4, 7, 5, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,   64,  128,  4, 8, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  128,  128,  8, 8, 6, 4, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  128,  128,  8, 8, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 2,  128,  128,  8, 2, 6, 4, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  128,  256,  2, 4, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  256,  256,  4, 4, 5, 3, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  256,  256,  4, 4, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 2,  256,  256,  4, 1, 5, 3, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  256,  512,  1, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  512,  512,  2, 2, 5, 3, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512,  512,  2, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  512,  512,  2, 2, 5, 3, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512,  512,  2, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  512,  512,  2, 2, 4, 2, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512,  512,  2, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  512,  512,  2, 2, 4, 2, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512,  512,  2, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  512,  512,  2, 2, 4, 2, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512,  512,  2, 2, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 2,  512,  512,  2, 1, 4, 2, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  512, 1024,  1, 1, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1, 1024, 1024,  1, 1, 3, 1, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1, 1024, 1024,  1, 1, 3, 4, 1'b1),
    mk(L_POOL, A_FIXED, 1, 1, 1024, 1024,  1, 1, 8, 0, 1'b0),
    mk(L_CONV, A_FIXED, 1, 1, 1024, 1000,  1, 1, 8, 6, 1'b0)
  };

endpackage
