// rescale: CKKS rescaling by the last modulus of the current basis.
// Input: residues of a polynomial modulo q_0 .. q_{L_IN-1}, coefficient domain.
// Output: residues modulo q_0 .. q_{L_IN-2} of
//   r_j = [q_{L_IN-1}^-1]_{q_j} * (c_j - c_{L_IN-1})  mod q_j,
// the formula of the source.  The dropped residue c_{L_IN-1} is below
// q_{L_IN-1} < 2^W and every q_j exceeds 2^(W-1), so one conditional
// subtraction brings it below q_j before the modular subtraction.
// Pipeline: 1 stage reduce-and-subtract, 3 stages Barrett multiplication:
// latency 4 cycles, the source's depth; 2(L_IN-1) multipliers and modular
// subtracters for two lanes.  The multiplier applies rescaling twice in
// series (by q_{L-1}, then q_{L-2}) using two instances.
module rescale
  import he_pkg::*;
#(
  parameter int L_IN = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t c [L_IN],
  output beat_t r [L_IN-1]
);
  localparam longint unsigned QL = MODULI[q_idx(L_IN - 1)];

  logic             v_o;
  logic [IDX_W-1:0] idx_o;

  sb_pipe #(.DEPTH(4)) u_sb (.clk(clk), .rst(rst), .v_in(c[0].valid), .idx_in(c[0].idx),
                             .v_out(v_o), .idx_out(idx_o));

  for (genvar j = 0; j < L_IN - 1; j++) begin : g_mod
    localparam longint unsigned QJ   = MODULI[q_idx(j)];
    localparam word_t           QW   = word_t'(QJ);
    localparam longint unsigned QINV = invmod(QL % QJ, QJ);
    for (genvar l = 0; l < 2; l++) begin : g_lane
      word_t last_r, diff;
      always_comb last_r = (c[L_IN-1].d[l] >= QW) ? c[L_IN-1].d[l] - QW : c[L_IN-1].d[l];
      always_ff @(posedge clk) diff <= sub_mod(c[j].d[l], last_r, QW);
      mod_mult #(.Q(QJ)) u_m (.clk(clk), .a(diff), .b(word_t'(QINV)), .r(r[j].d[l]));
    end
    assign r[j].valid = v_o;
    assign r[j].idx   = idx_o;
  end
endmodule
