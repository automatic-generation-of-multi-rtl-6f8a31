// slide_buffer: sliding-window line buffer for a rolled pixel stream.
//
// The input stream carries a feature map of H x W pixels with C channels in
// raster order; each pixel arrives as NB = C/U beats of U channels (channel block
// b holds channels b*U .. b*U+U-1). For every beat the buffer presents the K x K
// window of the same U channels around the current output position, so a compute
// engine sees, each cycle, exactly one window block (the blue slab of the
// roll-unrolled figure).
//
// How it works. K-1 lines of W*C values and K-1 values per channel of the current
// line are kept, P = (K-1)/2. The window centre trails the incoming pixel by P
// rows and P columns of a raster that runs on from one frame into the next, so
// the bottom and right zero padding of frame f is produced while the first
// P*W+P pixels (the head region) of frame f+1 arrive: no beat is spent on
// padding and a frame of H*W*NB beats leaves the buffer in H*W*NB beats. Every
// window entry whose row or column falls outside the frame of its centre is
// masked to zero. pend records that the previous frame still owes the centres
// of its last P rows; if no next frame starts within WAIT = (P*W+P)*NB cycles,
// flush walks the head region without input (in_ready low) to emit them, then
// the raster restarts at the origin. A window is tagged valid when its centre
// is an output position of the stride (both coordinates multiples of STRIDE);
// output size is ceil(H/STRIDE) x ceil(W/STRIDE). K = 1 (pointwise, FC) needs
// no storage and no delay. Padding P on every side, the centring, the merge of
// padding into the next frame's head and the flush wait are this design's
// choices; the paper states only the one-pixel-per-cycle input rate.
//
// Interface and timing. A beat fires when en is high and either in_valid is high
// or a flush is running; in_ready = en & !flush. The window and its control word
// (beat_t) are registered: they appear the cycle after the beat fires and hold
// while en is low. nxt_blk/fire expose the block of the firing beat so that a
// weight memory with a one-cycle read can be addressed in step. A frame's last
// windows come out only once the next frame's head region has been streamed in,
// or WAIT cycles after the input goes idle.
module slide_buffer
  import tomato_pkg::*;
#(
  parameter int K      = 3,
  parameter int STRIDE = 1,
  parameter int C      = 32,
  parameter int U      = 8,
  parameter int H      = 112,
  parameter int W      = 112
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [U-1:0][ACT_W-1:0]      in_data,
  output logic [K*K-1:0][U-1:0][ACT_W-1:0] win,
  output beat_t                        ctl,
  output logic                         fire,
  output logic [15:0]                  nxt_blk
);
  localparam int NB   = C / U;
  localparam int P    = (K - 1) / 2;
  localparam int HEAD = P * W + P;                    // positions of the head region
  localparam int WAIT = (HEAD * NB > 0) ? HEAD * NB : 1;  // input wait before a flush

  typedef logic [U-1:0][ACT_W-1:0] blk_t;

  int unsigned r, c, b;      // raster position and channel block of the next beat
  logic        pend;         // the last HEAD centres of the previous frame are still due
  logic        flush;        // emitting them without input
  int unsigned idle;         // cycles waited for the first beat of a frame
  logic        in_head, at_start, last_beat;
  int          crow, ccol;   // window centre, in the frame it belongs to
  logic        cprev, out_pos;
  blk_t        v;

  assign in_head   = (r < P) || (r == P && c < P);
  assign at_start  = (r == 0) && (c == 0) && (b == 0);
  assign last_beat = (b == NB - 1);
  assign in_ready  = en && !flush;
  assign fire      = en && (flush || in_valid);
  assign nxt_blk   = 16'(b);
  assign v         = flush ? '0 : in_data;

  // centre of the window: P rows and P columns behind the current position in
  // the raster that runs on across frames
  always_comb begin
    if (int'(c) >= P) begin
      ccol = int'(c) - P;
      crow = int'(r) - P;
    end else begin
      ccol = W + int'(c) - P;
      crow = int'(r) - P - 1;
    end
    cprev = (crow < 0);
    if (cprev) crow = crow + H;
    out_pos = (!cprev || pend) && (crow % STRIDE == 0) && (ccol % STRIDE == 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= 0; c <= 0; b <= 0;
      pend <= 1'b0; flush <= 1'b0; idle <= 0;
    end else begin
      // a frame that does not begin soon enough gets its predecessor flushed
      if (pend && !flush && at_start && !in_valid) begin
        idle <= idle + 1;
        if (idle + 1 >= WAIT) flush <= 1'b1;
      end else idle <= 0;
      if (fire) begin
        if (last_beat) begin
          b <= 0;
          if (flush && r == P && c == P - 1) begin
            // flush done: the next frame starts afresh
            r <= 0; c <= 0;
            flush <= 1'b0;
            pend  <= 1'b0;
          end else if (c == W - 1) begin
            c <= 0;
            if (r == H - 1) begin
              r    <= 0;
              pend <= (P > 0);
            end else r <= r + 1;
          end else begin
            c <= c + 1;
            if (!flush && r == P && c == P - 1) pend <= 1'b0;  // head region over
          end
        end else b <= b + 1;
      end
    end
  end

  // window assembly
  blk_t wnd [K][K];

  if (K == 1) begin : g_k1
    always_comb wnd[0][0] = v;
  end else begin : g_kn
    blk_t lb  [K-1][W][NB];  // lb[K-2] is the row just above the current one
    blk_t col [NB][K][K-1];  // previous K-1 columns of the window
    blk_t cn  [K];           // new column

    always_comb begin
      for (int k = 0; k < K; k++)
        cn[k] = (k < K - 1) ? lb[k][c][b] : v;
      for (int k = 0; k < K; k++)
        for (int j = 0; j < K; j++) begin
          wnd[k][j] = (j < K - 1) ? col[b][k][j] : cn[k];
          // zero padding: rows and columns outside the centre's frame
          if (crow - P + k < 0 || crow - P + k >= H || ccol - P + j < 0 || ccol - P + j >= W)
            wnd[k][j] = '0;
        end
    end

    always_ff @(posedge clk) begin
      if (fire) begin
        for (int k = 0; k < K; k++) begin
          for (int j = 0; j < K - 2; j++) col[b][k][j] <= col[b][k][j+1];
          col[b][k][K-2] <= cn[k];
        end
        for (int k = 0; k < K - 2; k++) lb[k][c][b] <= lb[k+1][c][b];
        lb[K-2][c][b] <= v;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl <= '0;
    end else if (en) begin
      ctl.valid <= fire && out_pos;
      ctl.first <= (b == 0);
      ctl.last  <= (b == NB - 1);
      ctl.blk   <= 16'(b);
    end
  end

  always_ff @(posedge clk) begin
    if (en)
      for (int k = 0; k < K; k++)
        for (int j = 0; j < K; j++)
          win[k*K + j] <= wnd[k][j];
  end

  // the output rate of stride 2 must be representable: block counts are exact
  initial assert (C % U == 0) else $error("C must be a multiple of U");
endmodule
