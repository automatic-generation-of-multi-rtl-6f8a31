// tb_shift_mul: exhaustive check of the shift-and-add processing element for
// 3-bit and 4-bit weight codes against an arithmetic model (x * s * 2^(e-1),
// zero for e = 0).
module tb_shift_mul;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic signed [7:0] x;
  logic [2:0] w3;
  logic [3:0] w4;
  logic signed [10:0] p3;
  logic signed [14:0] p4;

  shift_mul #(.WB(3)) dut3 (.x(x), .w(w3), .p(p3));
  shift_mul #(.WB(4)) dut4 (.x(x), .w(w4), .p(p4));

  always #5 clk = ~clk;

  function automatic int model(int xv, int code, int wb);
    int e = code & ((1 << (wb - 1)) - 1);
    int s = (code >> (wb - 1)) & 1;
    if (e == 0) return 0;
    return (s ? -1 : 1) * xv * (2 ** (e - 1));
  endfunction

  initial begin
    for (int xv = -128; xv < 128; xv++) begin
      for (int c = 0; c < 16; c++) begin
        x = 8'(xv); w3 = 3'(c); w4 = 4'(c);
        @(posedge clk);
        if (c < 8) begin
          checks++;
          if (int'(p3) != model(xv, c, 3)) begin
            failures++;
            if (failures < 10) $display("WB3 x=%0d w=%0d got %0d exp %0d", xv, c, p3, model(xv, c, 3));
          end
        end
        checks++;
        if (int'(p4) != model(xv, c, 4)) begin
          failures++;
          if (failures < 10) $display("WB4 x=%0d w=%0d got %0d exp %0d", xv, c, p4, model(xv, c, 4));
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
