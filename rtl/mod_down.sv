// mod_down: ModDown of one polynomial stream from the basis {p_i} u {q_j}
// back to {q_j}, dividing by P = p_0 ... p_{K-1}:
//   out_j = (c_j - FBC_{P->q_j}(c_p)) * [P^-1]_{q_j}  mod q_j.
// Per lane: K multiplications by [p^_i^-1]_{p_i}, L*K by [p^_i]_{q_j}, an adder
// tree, one modular subtraction and L multiplications by [P^-1]_{q_j}, which
// for two lanes is the 2L + 2K + 2LK multipliers of the source.  Latency 10
// cycles (3 + 3 multiplier stages, 1 add/subtract stage, 3 multiplier stages),
// the source's pipeline depth.  All input streams must be in lock step.
module mod_down
  import he_pkg::*;
#(
  parameter int L = 3,
  parameter int K = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t cp [K],   // residues mod p_i, coefficient domain
  input  beat_t cq [L],   // residues mod q_j, coefficient domain
  output beat_t r  [L]    // result mod q_j
);
  logic             v_o;
  logic [IDX_W-1:0] idx_o;

  sb_pipe #(.DEPTH(10)) u_sb (.clk(clk), .rst(rst), .v_in(cq[0].valid), .idx_in(cq[0].idx),
                              .v_out(v_o), .idx_out(idx_o));

  for (genvar l = 0; l < 2; l++) begin : g_lane
    word_t src [K];
    word_t conv [L];
    for (genvar i = 0; i < K; i++) begin : g_in
      assign src[i] = cp[i].d[l];
    end
    fbc #(.SRC_BASE(p_idx(0)), .SRC_N(K), .DST_BASE(q_idx(0)), .DST_N(L)) u_fbc (
      .clk(clk), .src(src), .dst(conv));
    for (genvar j = 0; j < L; j++) begin : g_out
      localparam word_t           QW   = word_t'(MODULI[q_idx(j)]);
      localparam longint unsigned PINV = p_inv_mod(K, MODULI[q_idx(j)]);
      word_t cq_d, diff;
      word_pipe #(.DEPTH(7)) u_dly (.clk(clk), .din(cq[j].d[l]), .dout(cq_d));
      always_comb diff = sub_mod(cq_d, conv[j], QW);
      mod_mult #(.Q(MODULI[q_idx(j)])) u_m (.clk(clk), .a(diff), .b(word_t'(PINV)),
                                            .r(r[j].d[l]));
    end
  end

  for (genvar j = 0; j < L; j++) begin : g_sb
    assign r[j].valid = v_o;
    assign r[j].idx   = idx_o;
  end
endmodule
