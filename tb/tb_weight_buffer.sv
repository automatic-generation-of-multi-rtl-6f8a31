// tb_weight_buffer: writes random words through the chunked load port (three
// LW-bit chunks per word, the last one partly unused) in random order,
// interleaved with reads, and checks that every read returns the model word one
// cycle after rd_en and that the output holds while rd_en is low.
module tb_weight_buffer;
  localparam int DEPTH = 5, WIDTH = 700, LW = 256, NCH = (WIDTH + LW - 1) / LW;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_en = 0, rd_en = 0;
  logic [15:0] ld_addr = 0, ld_chunk = 0, rd_addr = 0;
  logic [LW-1:0] ld_data = '0;
  logic [WIDTH-1:0] rd_data, model [DEPTH], expv;
  logic [NCH*LW-1:0] tmp;

  weight_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH), .LW(LW)) dut (
    .clk(clk), .ld_en(ld_en), .ld_addr(ld_addr), .ld_chunk(ld_chunk), .ld_data(ld_data),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data));

  initial begin
    logic have;
    have = 0;
    // fill every word once
    for (int a = 0; a < DEPTH; a++)
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        ld_en = 1; ld_addr = 16'(a); ld_chunk = 16'(c);
        for (int i = 0; i < LW / 32; i++) ld_data[i*32 +: 32] = $urandom;
        tmp = (NCH*LW)'(model[a]);
        tmp[c*LW +: LW] = ld_data;
        model[a] = tmp[WIDTH-1:0];
      end
    @(negedge clk);
    ld_en = 0;
    // random mix of chunk writes and reads
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (rd_data !== expv) begin
          failures++;
          if (failures < 5) $display("read mismatch at cycle %0d", cyc);
        end
      end
      rd_en = 1'($urandom_range(2) != 0);
      ld_en = 1'($urandom_range(3) == 0);
      rd_addr = 16'($urandom_range(DEPTH - 1));
      ld_addr = 16'($urandom_range(DEPTH - 1));
      ld_chunk = 16'($urandom_range(NCH - 1));
      for (int i = 0; i < LW / 32; i++) ld_data[i*32 +: 32] = $urandom;
      // a read in the same cycle as a write to the same word sees the old word
      if (rd_en) begin
        expv = model[rd_addr];
        have = 1;
      end
      if (ld_en) begin
        tmp = (NCH*LW)'(model[ld_addr]);
        tmp[ld_chunk*LW +: LW] = ld_data;
        model[ld_addr] = tmp[WIDTH-1:0];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
