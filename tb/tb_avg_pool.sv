// tb_avg_pool: streams random 3x3x6 feature maps (two channels per beat) with
// random input gaps and random output back-pressure, including a long output
// stall that fills the result FIFO so that in_ready must drop; each frame's
// C/U output beats must equal the reference global average (sum times the
// rounded reciprocal of H*W, rounded half up).
module tb_avg_pool;
  import tomato_pkg::*;
  import tomato_ref_pkg::*;
  localparam int C = 6, U = 2, H = 3, DEPTH = 4, NF = 8, NB = C / U;
  localparam layer_cfg_t LC = mk(L_POOL, A_FIXED, 1, 1, C, C, U, U, 8, 0, 1'b0);
  int checks = 0, failures = 0, n_block = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [U-1:0][7:0] in_data = '0, out_data;
  int img[NF][], ex[NF][], ofr = 0, oc = 0, cyc = 0, nr = 0, ns = 0;
  int w[], sc[], of[];

  avg_pool #(.C(C), .U(U), .H(H), .W(H), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) out_ready = (cyc > 60 && cyc < 200) ? 1'b0 : 1'($urandom_range(2) != 0);
  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_block++;

  always @(posedge clk) if (rst_n && out_valid && out_ready && ofr < NF) begin
    for (int u = 0; u < U; u++) begin
      checks++;
      if (int'($signed(out_data[u])) != ex[ofr][oc + u]) begin
        failures++;
        if (failures < 10) $display("frame %0d ch %0d: got %0d exp %0d", ofr, oc + u,
                                    int'($signed(out_data[u])), ex[ofr][oc + u]);
      end
    end
    oc += U;
    if (oc == C) begin oc = 0; ofr++; end
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      img[f] = new[H * H * C];
      // frame 0 all at the positive limit, frame 1 all at the negative limit
      foreach (img[f][j]) img[f][j] = (f == 0) ? 127 : (f == 1) ? -128 : int'($urandom_range(255)) - 128;
      run_layer(LC, H, img[f], w, sc, of, ex[f], nr, ns);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < H * H; p++)
        for (int b = 0; b < NB; b++) begin
          @(negedge clk);
          for (int u = 0; u < U; u++) in_data[u] = 8'(img[f][p * C + b * U + u]);
          in_valid = 1'($urandom_range(3) != 0);
          while (!in_valid) begin @(negedge clk); in_valid = 1; end
          do @(posedge clk); while (!in_ready);
        end
    @(negedge clk);
    in_valid = 0;
    wait (ofr == NF);
    checks++;
    if (n_block == 0) begin failures++; $display("input never blocked by a full FIFO"); end
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
