// mod_up: ModUp of one polynomial stream, from the L ciphertext moduli q_j to
// the K special moduli p_i, two coefficients per cycle.
//
// Each lane is a fast basis conversion (fbc): L multiplications by the
// constants [q^_j^-1]_{q_j}, L*K multiplications by [q^_j]_{p_i} and an adder
// tree per output, i.e. 2L + 2LK modular multipliers for the two lanes and
// L + LK stored constants, as the source counts.  Only the K new residues are
// produced: the q_j residues stay available to the caller.  Latency 7 cycles,
// the source's pipeline depth.  All input streams must be in lock step.
module mod_up
  import he_pkg::*;
#(
  parameter int L = 3,
  parameter int K = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t a [L],   // residues mod q_0 .. q_{L-1}, coefficient domain
  output beat_t b [K]    // residues mod p_0 .. p_{K-1}
);
  logic             v_o;
  logic [IDX_W-1:0] idx_o;

  sb_pipe #(.DEPTH(7)) u_sb (.clk(clk), .rst(rst), .v_in(a[0].valid), .idx_in(a[0].idx),
                             .v_out(v_o), .idx_out(idx_o));

  for (genvar l = 0; l < 2; l++) begin : g_lane
    word_t src [L];
    word_t dst [K];
    for (genvar j = 0; j < L; j++) begin : g_in
      assign src[j] = a[j].d[l];
    end
    fbc #(.SRC_BASE(q_idx(0)), .SRC_N(L), .DST_BASE(p_idx(0)), .DST_N(K)) u_fbc (
      .clk(clk), .src(src), .dst(dst));
    for (genvar i = 0; i < K; i++) begin : g_out
      assign b[i].d[l] = dst[i];
    end
  end

  for (genvar i = 0; i < K; i++) begin : g_sb
    assign b[i].valid = v_o;
    assign b[i].idx   = idx_o;
  end
endmodule
