// ntt_pe: processing element of the 2-parallel forward NTT (one butterfly
// stage), Cooley-Tukey butterfly (a, b) -> (a + w*b, a - w*b) mod q.
//
// As in the source, the PE has one modular multiplier and two modular adders,
// and is pipelined into five stages.  Its N/2-word twiddle memory sits in the
// enclosing ntt, so that transforms running in lock step can share it; the
// memory is read with the incoming cycle index and its word arrives here as tw
// one cycle after the beat.
//   1: input register, twiddle arrives
//   2-4: Barrett multiplication w*b (upper lane a delayed alongside)
//   5: modular addition and subtraction, output register
// Interface: one beat (two coefficients, valid, frame cycle index) in and out
// per cycle; latency 5 cycles; no stalls.  The valid bit is reset.
module ntt_pe
  import he_pkg::*;
#(
  parameter int MOD   = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t in,
  input  word_t tw,           // twiddle of the beat, one cycle after it
  output beat_t out
);
  localparam word_t Q = word_t'(MODULI[MOD]);

  word_t            s1_d [2];
  logic [IDX_W-1:0] s1_idx;
  logic             s1_v;
  word_t prod;
  word_t a_d [3];
  word_t o_d0, o_d1;
  logic [IDX_W-1:0] o_idx;
  logic o_v;
  logic             v_d   [3];
  logic [IDX_W-1:0] idx_d [3];

  mod_mult #(.Q(MODULI[MOD])) u_mul (.clk(clk), .a(s1_d[1]), .b(tw), .r(prod));

  always_ff @(posedge clk) begin
    s1_d[0]  <= in.d[0];
    s1_d[1]  <= in.d[1];
    s1_idx   <= in.idx;
    a_d[0]   <= s1_d[0];
    a_d[1]   <= a_d[0];
    a_d[2]   <= a_d[1];
    idx_d[0] <= s1_idx;
    for (int k = 1; k < 3; k++) idx_d[k] <= idx_d[k-1];
    o_d0     <= add_mod(a_d[2], prod, Q);
    o_d1     <= sub_mod(a_d[2], prod, Q);
    o_idx    <= idx_d[2];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_v  <= 1'b0;
      for (int k = 0; k < 3; k++) v_d[k] <= 1'b0;
      o_v       <= 1'b0;
    end else begin
      s1_v  <= in.valid;
      v_d[0]    <= s1_v;
      for (int k = 1; k < 3; k++) v_d[k] <= v_d[k-1];
      o_v       <= v_d[2];
    end
  end
  always_comb begin
    out.valid = o_v;
    out.idx   = o_idx;
    out.d[0]  = o_d0;
    out.d[1]  = o_d1;
  end
endmodule
