// tb_tomato_top: end-to-end test of tomato_mobilenet on a reduced 7-core network
// that has every kind of core of MobileNet-V1 (strided conv, depthwise with and
// without stride, pointwise shift layers, average pool, FC) on 12 x 12 images,
// sixteen frames back to back. From the third frame on the output is held for
// 2000 cycles, long enough for back-pressure to reach the input, then random
// back-pressure follows.
module tb_tomato_top;
  import tomato_pkg::*;
  localparam int NL_T = 7, IMG_T = 12, NF_T = 16, BP_T = 1;
  localparam layer_cfg_t CFG_T [NL_T] = '{
    mk(L_CONV, A_FIXED, 3, 2,  3,  8, 3, 4, 8, 6, 1'b1),
    mk(L_DW,   A_FIXED, 3, 1,  8,  8, 4, 4, 5, 3, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1,  8, 16, 4, 8, 3, 4, 1'b1),
    mk(L_DW,   A_FIXED, 3, 2, 16, 16, 8, 2, 6, 4, 1'b1),
    mk(L_CONV, A_SHIFT, 1, 1, 16, 16, 2, 2, 3, 4, 1'b1),
    mk(L_POOL, A_FIXED, 1, 1, 16, 16, 2, 2, 8, 0, 1'b0),
    mk(L_CONV, A_FIXED, 1, 1, 16, 10, 2, 1, 8, 6, 1'b0)
  };

`include "tomato_tb_body.svh"

  tomato_mobilenet #(.NL(NL_T), .CFG(CFG_T), .IMG(IMG_T)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .ld_valid(ld_valid), .ld_layer(ld_layer), .ld_target(ld_target), .ld_addr(ld_addr),
    .ld_chunk(ld_chunk), .ld_data(ld_data));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
