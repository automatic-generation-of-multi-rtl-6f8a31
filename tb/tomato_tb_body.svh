// tomato_tb_body.svh: end-to-end test of the streaming accelerator, shared by the
// reduced-size and the full-size testbench.
//
// The including module defines NL_T, CFG_T, IMG_T, NF_T (frames) and BP_T (1 to
// hold the output for 2000 cycles from the third frame on, then apply random
// output back-pressure), then instantiates the
// top as `dut` on the signals declared here. The body loads random weights and
// BN parameters through the load port, streams NF_T random images back to back
// at one input beat per cycle, compares every output with tomato_ref_pkg, and
// counts how often each mechanism of the design occurred: input stalls, engine
// stalls, bottom-padding windows emitted during the next frame's first rows,
// flush beats after the last frame, skipped stride positions, shift- and
// fixed-point beats, rolled chunks, ReLU clipping, saturation and output
// back-pressure. A mechanism that never occurs counts as a failure. It also
// checks the frame period (one input beat per cycle: H*W*C/U cycles) and
// reports the latency of the first frame.

  import tomato_pkg::*;
  import tomato_ref_pkg::*;

  localparam int LW_T = 512;
  localparam int U0   = CFG_T[0].u;
  localparam int UOL  = CFG_T[NL_T-1].uo;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     in_valid, in_ready, out_valid, out_ready;
  logic [U0-1:0][7:0]       in_data;
  logic [UOL-1:0][7:0]      out_data;
  logic                     ld_valid;
  logic [7:0]               ld_layer;
  ld_target_e               ld_target;
  logic [15:0]              ld_addr, ld_chunk;
  logic [LW_T-1:0]          ld_data;

  // per-layer model data
  int wts [NL_T][];
  int scs [NL_T][];
  int ofs [NL_T][];
  int acts [NL_T+1][];
  int exp_out [NF_T][];
  int n_relu = 0, n_sat = 0;
  int fsize [NL_T+1];

  // mechanism counters
  int c_in_stall = 0, c_eng_stall = 0, c_merge = 0, c_flush = 0, c_skip = 0, c_shift = 0, c_fixed = 0;
  int c_roll = 0, c_out_bp = 0;
  int t_start [NF_T];
  int t_end = 0, n_out = 0, cyc = 0;
  logic bp_on = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && !in_ready) c_in_stall++;
    if (out_valid && !out_ready) c_out_bp++;
  end

  for (genvar i = 0; i < NL_T; i++) begin : g_mon
    if (CFG_T[i].kind != L_POOL) begin : g_c
      always @(posedge clk) if (rst_n) begin
        if (!dut.g_layer[i].g_conv.u_core.en) c_eng_stall++;
        if (dut.g_layer[i].g_conv.u_core.u_sb.fire && dut.g_layer[i].g_conv.u_core.u_sb.flush) c_flush++;
        else if (dut.g_layer[i].g_conv.u_core.u_sb.fire && dut.g_layer[i].g_conv.u_core.u_sb.cprev &&
                 dut.g_layer[i].g_conv.u_core.u_sb.pend) c_merge++;
        if (dut.g_layer[i].g_conv.u_core.u_sb.fire && !dut.g_layer[i].g_conv.u_core.u_sb.out_pos) c_skip++;
        if (dut.g_layer[i].g_conv.u_core.en && dut.g_layer[i].g_conv.u_core.ctl.valid) begin
          if (CFG_T[i].arith == A_SHIFT) c_shift++; else c_fixed++;
        end
        if (dut.g_layer[i].g_conv.u_core.r_valid && (CFG_T[i].kind == L_DW ? CFG_T[i].u : CFG_T[i].cout) > CFG_T[i].uo)
          c_roll++;
      end
    end
  end

  // every core's output stream in frame 0 against the model
  int ref0 [NL_T+1][];
  for (genvar i = 0; i < NL_T; i++) begin : g_lchk
    int idx = 0;
    always @(posedge clk) if (rst_n && dut.v[i+1] && dut.r[i+1] && idx < ref0[i+1].size()) begin
      for (int n = 0; n < CFG_T[i].uo; n++) begin
        checks++;
        if (int'($signed(dut.d[i+1][n])) != ref0[i+1][idx + n]) begin
          failures++;
          if (failures < 10) $display("layer %0d value %0d: got %0d exp %0d", i, idx + n,
                                      int'($signed(dut.d[i+1][n])), ref0[i+1][idx + n]);
        end
      end
      idx += CFG_T[i].uo;
    end
  end

  task automatic load_word(int layer, ld_target_e tgt, int addr, word_t wd, int bits);
    for (int ch = 0; ch * LW_T < bits; ch++) begin
      @(negedge clk);
      ld_valid = 1; ld_layer = 8'(layer); ld_target = tgt;
      ld_addr = 16'(addr); ld_chunk = 16'(ch); ld_data = wd[ch * LW_T +: LW_T];
    end
    @(negedge clk);
    ld_valid = 0;
  endtask

  // output collector
  int of_idx = 0, oc_idx = 0, bp_hold_end = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      // one long stall from the first output on, so that back-pressure fills
      // the queues of the last cores and reaches their engines; random
      // stalls after it
      if (bp_on && bp_hold_end == 0) bp_hold_end = cyc + 2000;
      out_ready = (bp_on && BP_T) ? 1'((bp_hold_end != 0 && cyc >= bp_hold_end) && $urandom_range(1) != 0)
                                  : 1'b1;
    end
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready && of_idx < NF_T) begin
    for (int n = 0; n < UOL; n++) begin
      checks++;
      if (int'($signed(out_data[n])) != exp_out[of_idx][oc_idx + n]) begin
        failures++;
        if (failures < 10) $display("frame %0d out %0d: got %0d exp %0d", of_idx, oc_idx + n,
                                    int'($signed(out_data[n])), exp_out[of_idx][oc_idx + n]);
      end
    end
    n_out += UOL;
    oc_idx += UOL;
    if (oc_idx == CFG_T[NL_T-1].cout) begin
      oc_idx = 0;
      of_idx++;
      t_end = cyc;
    end
  end

  int img [NF_T][];

  initial begin
    int nb0, hw;
    in_valid = 0; in_data = '0; ld_valid = 0; ld_layer = 0; ld_target = LD_WEIGHT;
    ld_addr = 0; ld_chunk = 0; ld_data = '0; out_ready = 1;
    fsize[0] = IMG_T;
    for (int i = 0; i < NL_T; i++) fsize[i+1] = out_size(CFG_T[i], fsize[i]);
    // model data and reference outputs
    for (int i = 0; i < NL_T; i++) gen_layer(CFG_T[i], wts[i], scs[i], ofs[i]);
    for (int f = 0; f < NF_T; f++) begin
      img[f] = new[IMG_T * IMG_T * CFG_T[0].cin];
      foreach (img[f][j]) img[f][j] = int'($urandom_range(255)) - 128;
      acts[0] = img[f];
      for (int i = 0; i < NL_T; i++)
        run_layer(CFG_T[i], fsize[i], acts[i], wts[i], scs[i], ofs[i], acts[i+1], n_relu, n_sat);
      exp_out[f] = acts[NL_T];
      if (f == 0) for (int i = 0; i <= NL_T; i++) ref0[i] = acts[i];
    end
    $display("reference model done: %0d outputs per frame", exp_out[0].size());
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights and BN parameters
    for (int i = 0; i < NL_T; i++) if (CFG_T[i].kind != L_POOL) begin
      for (int b = 0; b < weight_words(CFG_T[i]); b++)
        load_word(i, LD_WEIGHT, b, weight_word(CFG_T[i], wts[i], b), weight_bits(CFG_T[i]));
      for (int j = 0; j < CFG_T[i].cout / CFG_T[i].uo; j++)
        load_word(i, LD_BN, j, bn_word(CFG_T[i], scs[i], ofs[i], j), 32 * CFG_T[i].uo);
    end
    $display("weights loaded at cycle %0d", cyc);
    // stream the frames back to back, one beat per cycle
    nb0 = CFG_T[0].cin / U0;
    hw = IMG_T * IMG_T;
    for (int f = 0; f < NF_T; f++) begin
      if (f == 2 || f == NF_T - 1) bp_on = 1;
      for (int p = 0; p < hw; p++)
        for (int b = 0; b < nb0; b++) begin
          @(negedge clk);
          for (int u = 0; u < U0; u++) in_data[u] = 8'(img[f][p * CFG_T[0].cin + b * U0 + u]);
          in_valid = 1;
          do @(posedge clk); while (!in_ready);
          if (p == 0 && b == 0) t_start[f] = cyc;
        end
    end
    @(negedge clk);
    in_valid = 0;
    wait (of_idx == NF_T);
    repeat (5) @(posedge clk);
    $display("latency of frame 0: %0d cycles from first input beat to last output", t_end - t_start[0]);
    if (NF_T > 1) begin
      int period, bound, pd, beats;
      period = t_start[1] - t_start[0];
      bound = 0;
      for (int i = 0; i < NL_T; i++) begin
        pd = (CFG_T[i].k - 1) / 2;
        beats = fsize[i] * fsize[i] * (CFG_T[i].cin / CFG_T[i].u);
        if (beats > bound) bound = beats;
      end
      $display("frame period %0d cycles; input %0d beats; slowest core %0d beats", period, hw * nb0, bound);
      checks++;
      if (period < hw * nb0 || period > bound + bound / 20 + 16) begin
        failures++;
        $display("frame period out of range");
      end
    end
    $display("mechanisms: input stalls %0d, engine stalls %0d, merged padding beats %0d, flush beats %0d, stride skips %0d",
             c_in_stall, c_eng_stall, c_merge, c_flush, c_skip);
    $display("            shift beats %0d, fixed beats %0d, rolled chunks %0d, relu clips %0d, saturations %0d, out back-pressure %0d",
             c_shift, c_fixed, c_roll, n_relu, n_sat, c_out_bp);
    checks += 10;
    // with back-to-back frames the input only stalls under output back-pressure
    if (BP_T && c_in_stall == 0) begin failures++; $display("no input stall seen"); end
    if (NF_T > 1 && c_merge == 0) begin failures++; $display("no merged padding beat seen"); end
    if (c_flush == 0)     begin failures++; $display("no flush beat seen"); end
    if (c_skip == 0)      begin failures++; $display("no stride skip seen"); end
    if (c_shift == 0)     begin failures++; $display("no shift-arithmetic beat seen"); end
    if (c_fixed == 0)     begin failures++; $display("no fixed-point beat seen"); end
    if (c_roll == 0)      begin failures++; $display("no rolled chunk seen"); end
    if (n_relu == 0)      begin failures++; $display("no ReLU clip seen"); end
    if (n_sat == 0)       begin failures++; $display("no saturation seen"); end
    if (BP_T && (c_out_bp == 0 || c_eng_stall == 0)) begin failures++; $display("no back-pressure / engine stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
