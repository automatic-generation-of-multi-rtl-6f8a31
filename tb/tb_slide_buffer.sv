// tb_slide_buffer: streams three 5x6 frames with C=4 channels in blocks of U=2
// through a K=3, stride-2 slide buffer and a K=3 stride-1 one, with random input
// gaps and random stalls of en. Every window consumed (ctl.valid on a cycle with
// en high) is compared with a window cut from the zero-padded frame by an
// independent model. Before the third frame the input pauses long enough for
// the buffer to flush the second frame's bottom rows on its own; the other frames
// follow each other closely, so their bottom rows are emitted during the next
// frame's first rows, and the last frame is flushed at the end. A fourth frame
// runs with input always valid and en always high: its H*W*C/U beats must be
// taken on consecutive cycles, without a single input stall.
module tb_slide_buffer;
  import tomato_pkg::*;
  localparam int K = 3, C = 4, U = 2, H = 5, W = 6, NB = C / U, NF = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  always #5 clk = ~clk;

  int img [NF+1][H][W][C];

  function automatic int pix(int f, int r, int c, int ch);
    if (r < 0 || r >= H || c < 0 || c >= W) return 0;
    return img[f][r][c][ch];
  endfunction

  for (genvar S = 1; S <= 2; S++) begin : g_s
    localparam int HO = (H - 1) / S + 1, WO = (W - 1) / S + 1;
    logic en, in_valid, in_ready, fire;
    logic [U-1:0][7:0] in_data;
    logic [K*K-1:0][U-1:0][7:0] win;
    beat_t ctl;
    logic [15:0] nxt_blk;
    int consumed, fed, beats_frame;
    logic timing_run;

    slide_buffer #(.K(K), .STRIDE(S), .C(C), .U(U), .H(H), .W(W)) dut (
      .clk(clk), .rst_n(rst_n), .en(en), .in_valid(in_valid), .in_ready(in_ready),
      .in_data(in_data), .win(win), .ctl(ctl), .fire(fire), .nxt_blk(nxt_blk));

    // driver: feeds pixels in raster order, U channels per beat
    initial begin
      en = 0; in_valid = 0; in_data = '0; fed = 0; timing_run = 0;
      wait (rst_n);
      for (int f = 0; f <= NF; f++) begin
        if (f == 2) begin
          @(negedge clk);
          in_valid = 0;
          repeat (4 * (W + 1) * NB) @(negedge clk);
        end
        for (int r = 0; r < H; r++)
          for (int c = 0; c < W; c++)
            for (int b = 0; b < NB; b++) begin
              @(negedge clk);
              if (f == NF) timing_run = 1;
              for (int u = 0; u < U; u++) in_data[u] = 8'(img[f][r][c][b*U+u]);
              in_valid = timing_run ? 1'b1 : 1'($urandom_range(3) != 0);
              while (!in_valid) begin
                @(negedge clk);
                in_valid = 1'b1;
              end
              do @(posedge clk); while (!in_ready);
              fed++;
            end
      end
      @(negedge clk);
      in_valid = 0;
    end

    // en: random stalls except in the timing frame

    // checker: expected consumption order is output raster, then block
    int of, oi, oj, ob;
    initial begin
      of = 0; oi = 0; oj = 0; ob = 0; consumed = 0;
    end
    always @(negedge clk) begin
      logic bad;
      en = (timing_run || !rst_n) ? 1'b1 : 1'($urandom_range(4) != 0);
      if (rst_n && en && ctl.valid && of < NF + 1) begin
      bad = (ctl.blk != 16'(ob)) || (ctl.first != (ob == 0)) || (ctl.last != (ob == NB - 1));
      for (int kr = 0; kr < K; kr++)
        for (int kc = 0; kc < K; kc++)
          for (int u = 0; u < U; u++)
            if (win[kr*K+kc][u] != 8'(pix(of, oi*S - 1 + kr, oj*S - 1 + kc, ob*U + u))) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 4) begin $display("S=%0d frame %0d out (%0d,%0d) blk %0d mismatch blk=%0d f%0d l%0d", S, of, oi, oj, ob, ctl.blk, ctl.first, ctl.last); for (int t = 0; t < K*K; t++) $display("  t%0d got %0d %0d exp %0d %0d", t, int'($signed(win[t][0])), int'($signed(win[t][1])), pix(of, oi*S-1+t/K, oj*S-1+t%K, ob*U), pix(of, oi*S-1+t/K, oj*S-1+t%K, ob*U+1)); end
      end
      consumed++;
      if (ob == NB - 1) begin
        ob = 0;
        if (oj == WO - 1) begin
          oj = 0;
          if (oi == HO - 1) begin oi = 0; of++; end else oi++;
        end else oj++;
      end else ob++;
      end
    end

    // input beats of the stall-free frame, input stalls in it, flush cycles
    int t_first, t_last, n_stall = 0, n_flush = 0;
    always @(posedge clk) begin
      if (timing_run && in_valid && in_ready) begin
        if (t_first == 0) t_first = $time;
        t_last = $time;
      end
      if (timing_run && fed < (NF + 1) * H * W * NB && in_valid && !in_ready) n_stall++;
      if (dut.flush && fire) n_flush++;
    end
  end

  initial begin
    for (int f = 0; f <= NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int ch = 0; ch < C; ch++) img[f][r][c][ch] = int'($urandom_range(255)) - 128;
    g_s[1].t_first = 0; g_s[2].t_first = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_s[1].of == NF + 1 && g_s[2].of == NF + 1);
    repeat (4) @(posedge clk);
    // the last frame ran without gaps: its H*W*NB input beats on consecutive cycles
    for (int s = 1; s <= 2; s++) begin
      int span, stalls, flushes;
      span    = (s == 1) ? (g_s[1].t_last - g_s[1].t_first) / 10 + 1 : (g_s[2].t_last - g_s[2].t_first) / 10 + 1;
      stalls  = (s == 1) ? g_s[1].n_stall : g_s[2].n_stall;
      flushes = (s == 1) ? g_s[1].n_flush : g_s[2].n_flush;
      checks += 2;
      if (span != H * W * NB || stalls != 0) begin
        failures++;
        $display("S=%0d frame took %0d cycles with %0d input stalls, expected %0d and none", s, span, stalls, H * W * NB);
      end
      // two flushes: after the second frame and after the last one
      if (flushes != 2 * (W + 1) * NB) begin
        failures++;
        $display("S=%0d: %0d flush beats, expected %0d", s, flushes, 2 * (W + 1) * NB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
