// tb_conv_layer: three streaming cores checked against the bit-exact model:
// a strided 3x3 depthwise core with fixed-point weights that rolls 4 channels to
// 2, a 3x3 normal convolution with shift weights and U' < C', and a pointwise
// core. Each gets random weights and BN parameters through the load port and
// two random frames, the first with random input gaps and output back-pressure,
// the second at full rate, where the frame's input beats must arrive on exactly
// H^2 * C/U consecutive cycles: padding costs no beat, because it is produced
// while the next frame's first rows stream in (or by a flush after an idle gap).
module tb_conv_layer;
  import tomato_pkg::*;
  import tomato_ref_pkg::*;
  localparam int NC = 3, HH = 7, NF = 2;
  localparam layer_cfg_t CFGS [NC] = '{
    mk(L_DW,   A_FIXED, 3, 2, 8, 8, 4, 2, 6, 4, 1'b1),
    mk(L_CONV, A_SHIFT, 3, 1, 4, 6, 2, 3, 3, 4, 1'b1),
    mk(L_CONV, A_FIXED, 1, 1, 6, 4, 3, 2, 5, 3, 1'b0)
  };
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int done_cnt = 0;

  for (genvar g = 0; g < NC; g++) begin : g_c
    localparam layer_cfg_t LC = CFGS[g];
    localparam int NB = LC.cin / LC.u, HO = (HH - 1) / LC.stride + 1, PD = (LC.k - 1) / 2;
    logic in_valid, in_ready, out_valid, out_ready, ld_en;
    logic [LC.u-1:0][7:0] in_data;
    logic [LC.uo-1:0][7:0] out_data;
    ld_target_e ld_target;
    logic [15:0] ld_addr, ld_chunk;
    logic [511:0] ld_data;
    int w[], sc[], of[], img[NF][], ex[NF][];
    int nr = 0, ns = 0, oc = 0, ofr = 0, t0 = 0, t1 = 0;
    logic full_rate = 0;

    conv_layer #(.KIND(LC.kind), .K(LC.k), .STRIDE(LC.stride), .C(LC.cin), .CO(LC.cout),
                 .U(LC.u), .UO(LC.uo), .H(HH), .W(HH), .ARITH(LC.arith), .WB(LC.wb),
                 .WFRAC(LC.wfrac), .RELU(LC.relu), .LW(512)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
      .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
      .ld_en(ld_en), .ld_target(ld_target), .ld_addr(ld_addr), .ld_chunk(ld_chunk),
      .ld_data(ld_data));

    task automatic load(ld_target_e tg, int a, word_t wd, int bits);
      for (int ch = 0; ch * 512 < bits; ch++) begin
        @(negedge clk);
        ld_en = 1; ld_target = tg; ld_addr = 16'(a); ld_chunk = 16'(ch); ld_data = wd[ch*512 +: 512];
      end
      @(negedge clk);
      ld_en = 0;
    endtask

    initial begin
      in_valid = 0; in_data = '0; ld_en = 0; ld_target = LD_WEIGHT; ld_addr = 0; ld_chunk = 0; ld_data = '0;
      gen_layer(LC, w, sc, of);
      for (int f = 0; f < NF; f++) begin
        img[f] = new[HH * HH * LC.cin];
        foreach (img[f][j]) img[f][j] = int'($urandom_range(255)) - 128;
        run_layer(LC, HH, img[f], w, sc, of, ex[f], nr, ns);
      end
      wait (rst_n);
      for (int b = 0; b < weight_words(LC); b++) load(LD_WEIGHT, b, weight_word(LC, w, b), weight_bits(LC));
      for (int j = 0; j < LC.cout / LC.uo; j++) load(LD_BN, j, bn_word(LC, sc, of, j), 32 * LC.uo);
      for (int f = 0; f < NF; f++)
        for (int p = 0; p < HH * HH; p++)
          for (int b = 0; b < NB; b++) begin
            @(negedge clk);
            full_rate = (f == NF - 1);
            for (int u = 0; u < LC.u; u++) in_data[u] = 8'(img[f][p * LC.cin + b * LC.u + u]);
            in_valid = full_rate ? 1'b1 : 1'($urandom_range(3) != 0);
            while (!in_valid) begin @(negedge clk); in_valid = 1; end
            do @(posedge clk); while (!in_ready);
            if (full_rate && p == 0 && b == 0) t0 = $time;
            if (full_rate) t1 = $time;
          end
      @(negedge clk);
      in_valid = 0;
    end

    always @(negedge clk) out_ready = full_rate ? 1'b1 : 1'($urandom_range(2) != 0);

    always @(posedge clk) if (rst_n && out_valid && out_ready && ofr < NF) begin
      for (int n = 0; n < LC.uo; n++) begin
        checks++;
        if (int'($signed(out_data[n])) != ex[ofr][oc + n]) begin
          failures++;
          if (failures < 10) $display("core %0d frame %0d value %0d: got %0d exp %0d", g, ofr, oc + n,
                                      int'($signed(out_data[n])), ex[ofr][oc + n]);
        end
      end
      oc += LC.uo;
      if (oc == HO * HO * LC.cout) begin
        oc = 0;
        ofr++;
        if (ofr == NF) begin
          int beats, span;
          beats = HH * HH * NB;
          span = (t1 - t0) / 10 + 1;
          checks++;
          // the previous frame's bottom rows are emitted meanwhile: no input stall
          if (span != beats) begin
            failures++;
            $display("core %0d: full-rate frame took %0d cycles, expected %0d", g, span, beats);
          end
          done_cnt++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_cnt == NC);
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
