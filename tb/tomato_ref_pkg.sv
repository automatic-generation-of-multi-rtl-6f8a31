// tomato_ref_pkg: bit-exact software model of the streaming CNN, used by the
// testbenches as the independent reference.
//
// Activations are ints holding 8-bit Q3.5 values, stored per layer as a flat
// array indexed (row * W + col) * C + channel. Weights are codes as the hardware
// holds them: signed mantissas for fixed-point layers, {sign, exponent} codes for
// shift layers. Normal convolutions index weights ((o * C + ci) * K*K + t),
// depthwise ones (ch * K*K + t), t = kr * K + kc. The model computes each layer
// straight from its definition (zero padding (K-1)/2, output centred on
// multiples of the stride), not the way the hardware streams it.
package tomato_ref_pkg;
  import tomato_pkg::*;

  localparam int WORD_MAX = 16384;
  typedef bit [WORD_MAX-1:0] word_t;

  function automatic int prod(layer_cfg_t c, int x, int code);
    int e, s;
    if (c.arith == A_SHIFT) begin
      e = code & ((1 << (c.wb - 1)) - 1);
      s = (code >> (c.wb - 1)) & 1;
      if (e == 0) return 0;
      return (s != 0 ? -1 : 1) * x * (1 << (e - 1));
    end
    return x * code;
  endfunction

  // BN + optional ReLU + round-half-up + saturation; flags report what happened
  function automatic int bn(layer_cfg_t c, longint acc, int scale, int offset,
                            inout int n_relu, inout int n_sat);
    longint y, yr;
    int sh = c.wfrac + BN_FRAC;
    y = acc * scale + (longint'(offset) <<< (ACT_FRAC + c.wfrac));
    if (c.relu && y < 0) begin
      y = 0;
      n_relu++;
    end
    yr = (y + (longint'(1) <<< (sh - 1))) >>> sh;
    if (yr > 127)  begin yr = 127;  n_sat++; end
    if (yr < -128) begin yr = -128; n_sat++; end
    return int'(yr);
  endfunction

  function automatic int out_size(layer_cfg_t c, int h);
    if (c.kind == L_POOL) return 1;
    return (h - 1) / c.stride + 1;
  endfunction

  // random weights and BN parameters of one layer
  function automatic void gen_layer(layer_cfg_t c, ref int w[], ref int sc[], ref int of[]);
    int nw = (c.kind == L_DW) ? c.cin * c.k * c.k : c.cout * c.cin * c.k * c.k;
    w  = new[nw];
    sc = new[c.cout];
    of = new[c.cout];
    for (int i = 0; i < nw; i++)
      if (c.arith == A_SHIFT) w[i] = int'($urandom_range((1 << c.wb) - 1));
      else w[i] = int'($urandom_range((1 << c.wb) - 1)) - (1 << (c.wb - 1));
    for (int i = 0; i < c.cout; i++) begin
      sc[i] = int'($urandom_range(320)) + 32;     // 0.125 .. 1.375
      of[i] = int'($urandom_range(512)) - 256;    // -1.0 .. 1.0
    end
  endfunction

  // one layer of the network
  function automatic void run_layer(layer_cfg_t c, int h, const ref int ain[],
                                    const ref int w[], const ref int sc[], const ref int of[],
                                    ref int aout[], inout int n_relu, inout int n_sat);
    int ho = out_size(c, h);
    int kk = c.k * c.k, p = (c.k - 1) / 2;
    aout = new[ho * ho * c.cout];
    if (c.kind == L_POOL) begin
      int hw = h * h;
      int recip = ((1 << 17) / hw + 1) / 2;
      for (int ch = 0; ch < c.cin; ch++) begin
        longint s = 0, m;
        for (int i = 0; i < hw; i++) s += ain[i * c.cin + ch];
        m = (s * recip + (longint'(1) <<< 15)) >>> 16;
        aout[ch] = int'(signed'(8'(m)));
      end
      return;
    end
    for (int oi = 0; oi < ho; oi++)
      for (int oj = 0; oj < ho; oj++)
        for (int o = 0; o < c.cout; o++) begin
          longint acc = 0;
          for (int kr = 0; kr < c.k; kr++)
            for (int kc = 0; kc < c.k; kc++) begin
              int r = oi * c.stride - p + kr, q = oj * c.stride - p + kc;
              if (r < 0 || r >= h || q < 0 || q >= h) continue;
              if (c.kind == L_DW)
                acc += prod(c, ain[(r * h + q) * c.cin + o], w[o * kk + kr * c.k + kc]);
              else
                for (int ci = 0; ci < c.cin; ci++)
                  acc += prod(c, ain[(r * h + q) * c.cin + ci], w[(o * c.cin + ci) * kk + kr * c.k + kc]);
            end
          aout[(oi * ho + oj) * c.cout + o] = bn(c, acc, sc[o], of[o], n_relu, n_sat);
        end
  endfunction

  // weight word b of a layer, in the layout of conv_engine / dw_engine
  function automatic word_t weight_word(layer_cfg_t c, const ref int w[], int b);
    word_t wd = '0;
    int kk = c.k * c.k, pos = 0;
    if (c.kind == L_DW) begin
      for (int u = 0; u < c.u; u++)
        for (int t = 0; t < kk; t++) begin
          int v = w[(b * c.u + u) * kk + t];
          for (int i = 0; i < c.wb; i++) wd[pos + i] = v[i];
          pos += c.wb;
        end
    end else begin
      for (int o = 0; o < c.cout; o++)
        for (int u = 0; u < c.u; u++)
          for (int t = 0; t < kk; t++) begin
            int v = w[(o * c.cin + b * c.u + u) * kk + t];
            for (int i = 0; i < c.wb; i++) wd[pos + i] = v[i];
            pos += c.wb;
          end
    end
    return wd;
  endfunction

  function automatic int weight_words(layer_cfg_t c);
    return c.cin / c.u;
  endfunction

  function automatic int weight_bits(layer_cfg_t c);
    return (c.kind == L_DW) ? c.u * c.k * c.k * c.wb : c.cout * c.u * c.k * c.k * c.wb;
  endfunction

  // BN word j: lane n is channel j*uo+n, {scale, offset} at bits n*32
  function automatic word_t bn_word(layer_cfg_t c, const ref int sc[], const ref int of[], int j);
    word_t wd = '0;
    for (int n = 0; n < c.uo; n++) begin
      wd[n*32 +: 16]      = 16'(of[j * c.uo + n]);
      wd[n*32 + 16 +: 16] = 16'(sc[j * c.uo + n]);
    end
    return wd;
  endfunction
endpackage
