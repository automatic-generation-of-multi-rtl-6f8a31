// tb_tomato_full: one 224 x 224 image through the full MobileNet-V1 accelerator
// at its default parameters (29 cores), compared output by output, and every
// core's output stream, with the bit-exact model; it also reports the latency in
// cycles from the first pixel to the last class score.
module tb_tomato_full;
  import tomato_pkg::*;
  localparam int NL_T = MBN_NL, IMG_T = 224, NF_T = 1, BP_T = 0;
  localparam layer_cfg_t CFG_T [NL_T] = MBN_CFG;

`include "tomato_tb_body.svh"

  tomato_mobilenet dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .ld_valid(ld_valid), .ld_layer(ld_layer), .ld_target(ld_target), .ld_addr(ld_addr),
    .ld_chunk(ld_chunk), .ld_data(ld_data));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
