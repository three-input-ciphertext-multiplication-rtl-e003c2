// relin_mac: the evaluation-key products of relinearization for one modulus
// (a p_i or a q_j), in the NTT domain, two coefficients per cycle:
//   C0 = D2 * EVK0 + D3 * EVK0',     C1 = (D2 + D3) * EVK1.
// Because the two keys evk and evk' share the same second component evk_1,
// the two products with EVK1 are merged by adding D2 and D3 first, as the
// source proposes: 3 modular multipliers and 2 modular adders per lane.
// Pipeline: C0 = 3 multiplier stages + 1 addition stage; C1 = 1 stage for the
// addition (key word registered with it) + 3 multiplier stages.  Latency 4.
// The key words must arrive in the same cycle as the D2/D3 beat they belong to.
// Valid and index travel with d2; those fields of d3 are unused (lint notes
// them), as the two streams are in lock step.
module relin_mac
  import he_pkg::*;
#(
  parameter int MOD = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t d2,
  input  beat_t d3,
  input  word_t evk0  [2],   // EVK_0 for the two coefficients of the beat
  input  word_t evk0p [2],   // EVK'_0
  input  word_t evk1  [2],   // EVK_1, shared by evk and evk'
  output beat_t c0,
  output beat_t c1
);
  localparam word_t Q = word_t'(MODULI[MOD]);

  logic             v_o;
  logic [IDX_W-1:0] idx_o;

  sb_pipe #(.DEPTH(4)) u_sb (.clk(clk), .rst(rst), .v_in(d2.valid), .idx_in(d2.idx),
                             .v_out(v_o), .idx_out(idx_o));

  for (genvar l = 0; l < 2; l++) begin : g_lane
    word_t m0, m0p, sum_r, k1_r, c0_r;
    mod_mult #(.Q(MODULI[MOD])) u_m0  (.clk(clk), .a(d2.d[l]), .b(evk0[l]),  .r(m0));
    mod_mult #(.Q(MODULI[MOD])) u_m0p (.clk(clk), .a(d3.d[l]), .b(evk0p[l]), .r(m0p));
    always_ff @(posedge clk) begin
      sum_r <= add_mod(d2.d[l], d3.d[l], Q);
      k1_r  <= evk1[l];
      c0_r  <= add_mod(m0, m0p, Q);
    end
    mod_mult #(.Q(MODULI[MOD])) u_m1 (.clk(clk), .a(sum_r), .b(k1_r), .r(c1.d[l]));
    assign c0.d[l] = c0_r;
  end

  assign c0.valid = v_o;
  assign c0.idx   = idx_o;
  assign c1.valid = v_o;
  assign c1.idx   = idx_o;
endmodule
