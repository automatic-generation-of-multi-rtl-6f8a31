// tb_adder_tree: random sums through a 9-input tree (4 pipeline levels) with a
// randomly toggling enable. The expected sum of each input set is delivered
// after exactly 4 enabled cycles, which also checks the latency.
module tb_adder_tree;
  localparam int N = 9, IW = 11, OW = 15, LAT = 4;
  int checks = 0, failures = 0;
  logic clk = 0, en;
  logic signed [N-1:0][IW-1:0] in;
  logic signed [OW-1:0] sum;
  int exp_pipe [LAT+1];

  adder_tree #(.N(N), .IW(IW), .OW(OW)) dut (.clk(clk), .en(en), .in(in), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    en = 0; in = '0;
    for (int i = 0; i <= LAT; i++) exp_pipe[i] = 0;
    // fill the pipeline once with zeros
    en = 1;
    repeat (LAT + 1) @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int s;
      @(negedge clk);
      // the value at the output now belongs to the set entered LAT enabled cycles ago
      if (cyc > LAT + 2) begin
        checks++;
        if (int'(sum) != exp_pipe[LAT]) begin
          failures++;
          if (failures < 10) $display("cyc %0d: sum %0d exp %0d", cyc, sum, exp_pipe[LAT]);
        end
      end
      en = (cyc < 1000) ? 1'b1 : 1'($urandom_range(1));
      s = 0;
      for (int i = 0; i < N; i++) begin
        int v = int'($urandom_range(2047)) - 1024;
        in[i] = IW'(v);
        s += v;
      end
      if (en) begin
        for (int i = LAT; i > 0; i--) exp_pipe[i] = exp_pipe[i-1];
        exp_pipe[1] = s;
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
