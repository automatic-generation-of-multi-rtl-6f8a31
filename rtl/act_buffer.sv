// act_buffer: activation FIFO between two streaming cores.
//
// Holds rolled activation beats (N channels of 8 bits) produced by one core until
// the next core's slide buffer takes them. A core's average output rate matches
// the next core's input rate, but a strided core emits a row's outputs in a burst
// and none in the skipped rows, so the FIFO is sized by the enclosing core to
// absorb such a burst. free counts empty entries; producers with a fixed-latency
// tail (the BN pipeline) only start a beat when enough entries are free.
//
// Interface and timing: push writes din (must not overflow, asserted); the head
// is presented on dout with out_valid, and leaves on a cycle with out_ready high.
// A pushed beat is visible at the head one cycle later. The FIFO itself is this
// design's choice; the architecture only names an activation buffer per layer.
module act_buffer #(
  parameter int N     = 8,
  parameter int DEPTH = 16,
  parameter int W     = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [N-1:0][W-1:0]      din,
  output logic [$clog2(DEPTH+1)-1:0] free,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [N-1:0][W-1:0]      dout
);
  localparam int AB = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CB = $clog2(DEPTH + 1);

  logic [N-1:0][W-1:0] mem [DEPTH];
  logic [AB-1:0]       wp, rp;
  logic [CB-1:0]       cnt;
  logic                pop;

  assign pop       = out_valid && out_ready;
  assign out_valid = (cnt != 0);
  assign dout      = mem[rp];
  assign free      = CB'(DEPTH) - cnt;

  function automatic logic [AB-1:0] inc(logic [AB-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + CB'(push) - CB'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wp] <= din;

  assert property (@(posedge clk) disable iff (!rst_n) push |-> (free != 0))
    else $error("act_buffer: overflow");
endmodule
