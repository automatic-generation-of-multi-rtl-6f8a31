// tb_act_buffer: pushes random beats whenever the FIFO reports free space (and a
// random choice allows), pops with random out_ready, and checks order, data,
// the free count against a model queue, and that the FIFO both fills and
// empties during the run.
module tb_act_buffer;
  localparam int N = 3, DEPTH = 5, W = 8;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, out_ready = 0, out_valid;
  logic [N-1:0][W-1:0] din = '0, dout;
  logic [$clog2(DEPTH+1)-1:0] free;
  logic [N*W-1:0] q[$];
  logic did_push = 0, did_pop = 0;

  act_buffer #(.N(N), .DEPTH(DEPTH), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .push(push), .din(din), .free(free),
    .out_valid(out_valid), .out_ready(out_ready), .dout(dout));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // apply the transfers of the posedge just passed, then check the state
      if (did_push) q.push_back(din);
      if (did_pop) void'(q.pop_front());
      checks += 2;
      if (int'(free) != DEPTH - q.size()) begin
        failures++;
        if (failures < 5) $display("free %0d, model holds %0d", free, q.size());
      end
      if (out_valid !== (q.size() != 0) || (out_valid && dout !== q[0])) begin
        failures++;
        if (failures < 5) $display("head mismatch at cycle %0d", cyc);
      end
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      // phases that favour filling or draining
      out_ready = 1'($urandom_range(9) < (((cyc / 200) % 2) ? 8 : 3));
      push = (free != 0 || (out_valid && out_ready)) ? 1'($urandom_range(3) != 0) : 1'b0;
      if (free == 0) push = 0;
      for (int n = 0; n < N; n++) din[n] = W'($urandom);
      did_push = push;
      did_pop  = out_valid && out_ready;
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin
      failures++;
      $display("FIFO never full (%0d) or never empty (%0d)", n_full, n_empty);
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
