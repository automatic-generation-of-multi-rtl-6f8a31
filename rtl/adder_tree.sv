// adder_tree: fully pipelined binary adder tree.
//
// Sums N signed IW-bit values into one signed OW-bit value. The inputs are padded
// with zeros to the next power of two and reduced pairwise, one register stage
// per level, so a new set of N values can enter every cycle and the sum appears
// LAT = ceil(log2(N)) cycles later (N = 1 is a plain wire). All stages advance
// only while en is high, so the tree can be stalled together with the rest of a
// compute engine. One tree per output channel (or per depthwise channel) forms
// the reduction of the roll-unrolled engines; the tree itself is the
// architecture's, the one-register-per-level timing is this design's choice.
module adder_tree #(
  parameter int N  = 9,
  parameter int IW = 11,
  parameter int OW = 15
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic signed [N-1:0][IW-1:0] in,
  output logic signed [OW-1:0]     sum
);
  localparam int LAT = tomato_pkg::clog2c(N);
  localparam int NP  = 1 << LAT;

  // lvl holds every level packed side by side: level l starts at NP*2 - (NP*2 >> l)
  // and has NP >> l entries. Level 0 is the zero-padded input.
  localparam int TOT = 2 * NP - 1;
  logic signed [OW-1:0] lvl [TOT];

  function automatic int base(int l);
    return 2 * NP - ((2 * NP) >> l);
  endfunction

  for (genvar i = 0; i < NP; i++) begin : g_in
    if (i < N) begin : g_v
      assign lvl[i] = OW'($signed(in[i]));
    end else begin : g_z
      assign lvl[i] = '0;
    end
  end

  for (genvar l = 1; l <= LAT; l++) begin : g_lvl
    for (genvar i = 0; i < (NP >> l); i++) begin : g_add
      always_ff @(posedge clk)
        if (en) lvl[base(l) + i] <= lvl[base(l-1) + 2*i] + lvl[base(l-1) + 2*i + 1];
    end
  end

  assign sum = lvl[TOT-1];
endmodule
