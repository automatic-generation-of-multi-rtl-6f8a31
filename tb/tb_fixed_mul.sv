// tb_fixed_mul: exhaustive check of the fixed-point multiplier for 5-bit weights
// and a random sweep for 8-bit weights.
module tb_fixed_mul;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic signed [7:0] x;
  logic signed [4:0] w5;
  logic signed [7:0] w8;
  logic signed [12:0] p5;
  logic signed [15:0] p8;

  fixed_mul #(.WB(5)) dut5 (.x(x), .w(w5), .p(p5));
  fixed_mul #(.WB(8)) dut8 (.x(x), .w(w8), .p(p8));

  always #5 clk = ~clk;

  initial begin
    for (int xv = -128; xv < 128; xv++) begin
      for (int c = -16; c < 16; c++) begin
        int r8;
        r8 = int'($urandom_range(255)) - 128;
        x = 8'(xv); w5 = 5'(c); w8 = 8'(r8);
        @(posedge clk);
        checks += 2;
        if (int'(p5) != xv * c) begin
          failures++;
          if (failures < 10) $display("WB5 %0d*%0d got %0d", xv, c, p5);
        end
        if (int'(p8) != xv * r8) begin
          failures++;
          if (failures < 10) $display("WB8 %0d*%0d got %0d", xv, r8, p8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
