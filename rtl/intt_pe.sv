// intt_pe: processing element of the 2-parallel inverse NTT (one butterfly
// stage), Gentleman-Sande butterfly with the 1/2 scaling folded in:
//   (a, b) -> ((a + b)/2, w * (a - b)/2) mod q.
// Halving at each of the log2 N stages gives the 1/N factor of the inverse
// transform, so no final scaling pass is needed.  The source gives the PE one
// modular multiplier, four modular adders and two multiplexors: here these are
// the add/sub pair and the two halvers (x/2 = (x + (x odd ? q : 0)) >> 1).
// The N/2-word twiddle memory the source gives each PE sits in the enclosing
// intt, so that transforms running in lock step can share it; its word must
// arrive as tw two cycles after the beat (the memory is addressed by the index
// of the stage-1 register).  Five pipeline stages:
//   1: input register
//   2: add, subtract and halve both
//   3-5: Barrett multiplication of the difference by the twiddle
// Latency 5 cycles, one beat per cycle, no stalls.
module intt_pe
  import he_pkg::*;
#(
  parameter int MOD   = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t in,
  input  word_t tw,           // twiddle of the beat, two cycles after it
  output beat_t out
);
  localparam word_t Q = word_t'(MODULI[MOD]);

  word_t            s1_d [2];
  logic [IDX_W-1:0] s1_idx;
  logic             s1_v;
  word_t prod, sum2, dif2;
  word_t sum_d [3];
  logic             v_d   [4];
  logic [IDX_W-1:0] idx_d [4];

  mod_mult #(.Q(MODULI[MOD])) u_mul (.clk(clk), .a(dif2), .b(tw), .r(prod));

  always_ff @(posedge clk) begin
    s1_d[0]  <= in.d[0];
    s1_d[1]  <= in.d[1];
    s1_idx   <= in.idx;
    sum2     <= half_mod(add_mod(s1_d[0], s1_d[1], Q), Q);
    dif2     <= half_mod(sub_mod(s1_d[0], s1_d[1], Q), Q);
    sum_d[0] <= sum2;
    sum_d[1] <= sum_d[0];
    sum_d[2] <= sum_d[1];
    idx_d[0] <= s1_idx;
    for (int k = 1; k < 4; k++) idx_d[k] <= idx_d[k-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_v <= 1'b0;
      for (int k = 0; k < 4; k++) v_d[k] <= 1'b0;
    end else begin
      s1_v <= in.valid;
      v_d[0]   <= s1_v;
      for (int k = 1; k < 4; k++) v_d[k] <= v_d[k-1];
    end
  end

  always_comb begin
    out.valid = v_d[3];
    out.idx   = idx_d[3];
    out.d[0]  = sum_d[2];
    out.d[1]  = prod;
  end
endmodule
