// tb_channel_roller: pushes random wide results (with random base indices)
// whenever can_push allows and a random choice wants to, with random take, and
// checks that each result leaves as NI/NO chunks in order, each with the right
// data and global chunk index base + j. Also checks that the queue really fills
// (can_push low) and that can_push is low only with QD results waiting.
module tb_channel_roller;
  localparam int NI = 12, NO = 4, AW = 10, QD = 3, NCH = NI / NO;
  int checks = 0, failures = 0, n_full = 0, n_out = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, take = 0, can_push, out_valid;
  logic [NI-1:0][AW-1:0] in_data = '0;
  logic [15:0] in_base = '0, out_idx;
  logic [NO-1:0][AW-1:0] out_data;
  logic [NO*AW+15:0] q[$];   // expected chunks {index, data}
  int pending = 0;           // results pushed but not fully handed out
  int left[$];               // chunks still to go per pending result

  channel_roller #(.NI(NI), .NO(NO), .AW(AW), .QD(QD)) dut (
    .clk(clk), .rst_n(rst_n), .push(push), .in_data(in_data), .in_base(in_base),
    .can_push(can_push), .take(take), .out_valid(out_valid), .out_data(out_data),
    .out_idx(out_idx));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // queued results = pending minus the one in the holding register
      checks++;
      if (!can_push && pending - int'(dut.busy) < QD) begin
        failures++;
        $display("can_push low with only %0d results waiting", pending - int'(dut.busy));
      end
      if (!can_push) n_full++;
      // take for the coming posedge first: out_valid follows it directly
      take = 1'($urandom_range(9) < (((cyc / 300) % 2) ? 9 : 4));
      #1;
      if (out_valid) begin
        checks++;
        n_out++;
        if (q.size() == 0 || {out_idx, out_data} !== q[0]) begin
          failures++;
          if (failures < 5) $display("chunk mismatch at cycle %0d: idx %0d", cyc, out_idx);
        end
        if (q.size() != 0) void'(q.pop_front());
        left[0]--;
        if (left[0] == 0) begin
          void'(left.pop_front());
          pending--;
        end
      end
      push = can_push && ($urandom_range(2) != 0);
      for (int n = 0; n < NI; n++) in_data[n] = AW'($urandom);
      in_base = 16'($urandom_range(1000));
      if (push) begin
        for (int j = 0; j < NCH; j++) q.push_back({in_base + 16'(j), in_data[j*NO +: NO]});
        left.push_back(NCH);
        pending++;
      end
    end
    checks++;
    if (n_full == 0 || n_out < 500) begin
      failures++;
      $display("queue never full (%0d) or too few chunks (%0d)", n_full, n_out);
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
