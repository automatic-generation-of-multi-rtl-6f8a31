// channel_roller: rolls a wide set of results into narrow per-cycle blocks.
//
// After accumulation all output channels of a pixel exist at once (NI values),
// but batch normalization and the next core only need U' = NO channels per
// cycle. The roller holds the NI values and hands them out NO at a time over
// NI/NO cycles, so that the BN multipliers are time-shared over the rolled
// channels. For a depthwise core NI = U and in_base gives the chunk number of the
// first chunk (block b times U/U').
//
// Interface and timing. push loads in_data (only when can_push is high). While
// holding data, each cycle with take high emits one chunk: out_valid is high for
// exactly that cycle, with out_data and its global chunk index out_idx. Pushed
// results wait in a queue of QD entries in front of the holding register;
// can_push is high while the queue has room. A strided core produces all its
// results in the even rows and none in the odd ones, so QD is sized by the core
// to hold half an output row, and the roller drains that backlog during the odd
// rows at one chunk per cycle. The queue and its sizing are this design's
// choice (the paper does not describe how bursts of a strided layer are
// absorbed). Latency: a result pushed into an empty roller gives its first
// chunk two cycles later.
module channel_roller #(
  parameter int NI = 64,
  parameter int NO = 16,
  parameter int AW = 16,
  parameter int QD = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    push,
  input  logic [NI-1:0][AW-1:0]   in_data,
  input  logic [15:0]             in_base,
  output logic                    can_push,
  input  logic                    take,
  output logic                    out_valid,
  output logic [NO-1:0][AW-1:0]   out_data,
  output logic [15:0]             out_idx
);
  localparam int NCH = NI / NO;
  localparam int QW  = (QD > 1) ? $clog2(QD) : 1;

  logic [NCH-1:0][NO-1:0][AW-1:0] hold;
  logic                           busy;
  int unsigned                    j;
  logic [15:0]                    base;
  logic [NI-1:0][AW-1:0]          q_data [QD];
  logic [15:0]                    q_base [QD];
  logic [QW-1:0]                  q_rp, q_wp;
  logic [QW:0]                    q_cnt;
  logic                           load;   // holding register takes the queue head

  assign out_valid = busy && take;
  assign out_data  = hold[j];
  assign out_idx   = base + 16'(j);
  assign can_push  = (q_cnt != (QW+1)'(QD));
  assign load      = (q_cnt != 0) && (!busy || (out_valid && j == NCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      j     <= 0;
      base  <= '0;
      q_rp  <= '0;
      q_wp  <= '0;
      q_cnt <= '0;
    end else begin
      if (out_valid) begin
        if (j == NCH - 1) begin
          busy <= 1'b0;
          j    <= 0;
        end else j <= j + 1;
      end
      if (load) begin
        busy <= 1'b1;
        j    <= 0;
        base <= q_base[q_rp];
        q_rp <= (q_rp == QW'(QD - 1)) ? '0 : q_rp + 1'b1;
      end
      if (push) q_wp <= (q_wp == QW'(QD - 1)) ? '0 : q_wp + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(load);
    end
  end

  always_ff @(posedge clk) begin
    if (load) hold <= q_data[q_rp];
    if (push) begin
      q_data[q_wp] <= in_data;
      q_base[q_wp] <= in_base;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> can_push)
    else $error("channel_roller: push while full");
endmodule
