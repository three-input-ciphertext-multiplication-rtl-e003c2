// commutator: delay-switch-delay reordering between two butterfly stages of
// the 2-parallel pipelined (I)NTT.
//
// The source places "delay and switching elements" between the processing
// elements of its 2-parallel transform; this is the classic feed-forward
// (multi-path delay commutator) arrangement, chosen here because its delays
// add up to the N/2 - 1 cycles the source gives per transform.
//   - the lower input lane is delayed by D cycles (u);
//   - a 2x2 switch passes (upper, u) straight in the first D cycles of every
//     2D-cycle group of the frame and crosses them in the second D cycles;
//   - the switch's upper output is delayed by D cycles.
// If the input frame carries, in cycle c, coefficients (a[j], a[j+T]) with
// j = 2T*(c div T) + (c mod T), the output carries the same for distance T/2
// (forward transform, D = T/2) or 2T (inverse transform, D = T), one frame
// position shifted by D cycles.  Latency D cycles.  The switch phase follows
// the cycle index of valid input beats and keeps counting through idle
// cycles, so a frame's tail drains; frames must follow each other back to
// back or leave at least D idle cycles between them.
module commutator
  import he_pkg::*;
#(
  parameter int LOG_N = 4,
  parameter int D     = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t in,
  output beat_t out
);
  localparam int CW  = LOG_N - 1;         // frame index width, N/2 cycles
  localparam int LGD = $clog2(D);

  typedef struct packed {
    logic  v;
    word_t w;
  } elem_t;

  logic [CW-1:0] cnt_q, cur, idx_out;
  logic          swap;
  elem_t         x, y, u, p, r, o;

  always_comb begin
    cur   = in.valid ? in.idx[CW-1:0] : cnt_q + 1'b1;
    swap  = cur[LGD];
    x     = '{v: in.valid, w: in.d[0]};
    y     = '{v: in.valid, w: in.d[1]};
    p     = swap ? u : x;
    r     = swap ? x : u;
  end

  always_ff @(posedge clk) begin
    if (rst) cnt_q <= '1;
    else     cnt_q <= cur;
  end

  delay_line #(.WIDTH($bits(elem_t)), .DEPTH(D)) u_dly_lo (
    .clk(clk), .rst(rst), .din(y), .dout(u));
  delay_line #(.WIDTH($bits(elem_t)), .DEPTH(D)) u_dly_up (
    .clk(clk), .rst(rst), .din(p), .dout(o));

  always_comb begin
    out.valid = o.v & r.v;
    idx_out   = cur - CW'(D);
    out.idx   = IDX_W'(idx_out);
    out.d[0]  = o.w;
    out.d[1]  = r.w;
  end
endmodule
