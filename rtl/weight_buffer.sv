// weight_buffer: on-chip weight memory of one streaming core.
//
// A core reads one word per beat: the word at address b holds every weight that
// the beat of input-channel block b needs (U * C' * K^2 weights for a normal
// convolution, U * K^2 for a depthwise one), packed WB bits each. Because weights
// are short shift or fixed-point codes, a word is narrow per weight and the whole
// network fits in block RAM; the memory is addressed by the rolled block index,
// so its single read port is time-shared over the C/U blocks.
//
// Loading (this design's choice): words are written in LW-bit chunks through
// ld_en/ld_addr/ld_chunk/ld_data, chunk j covering bits j*LW .. j*LW+LW-1 of
// the word. Reading has one cycle of latency like a block RAM: rd_data updates on
// the clock edge where rd_en is high and then holds.
module weight_buffer #(
  parameter int DEPTH = 4,
  parameter int WIDTH = 216,
  parameter int LW    = 512
) (
  input  logic             clk,
  input  logic             ld_en,
  input  logic [15:0]      ld_addr,
  input  logic [15:0]      ld_chunk,
  input  logic [LW-1:0]    ld_data,
  input  logic             rd_en,
  input  logic [15:0]      rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  localparam int NCH = (WIDTH + LW - 1) / LW;
  localparam int AB  = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CB  = (NCH > 1) ? $clog2(NCH) : 1;

  logic [NCH-1:0][LW-1:0] mem [DEPTH];
  logic [NCH*LW-1:0]      rd_word;

  always_ff @(posedge clk) begin
    if (ld_en && (int'(ld_addr) < DEPTH) && (int'(ld_chunk) < NCH))
      mem[ld_addr[AB-1:0]][ld_chunk[CB-1:0]] <= ld_data;
    if (rd_en)
      rd_word <= mem[rd_addr[AB-1:0]];
  end

  assign rd_data = rd_word[WIDTH-1:0];
endmodule
