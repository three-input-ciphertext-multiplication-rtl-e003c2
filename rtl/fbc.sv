// fbc: fast basis conversion of one coefficient, the core of ModUp and
// ModDown.  For a value x given by residues x_j modulo the SRC_N moduli
// b_j = MODULI[SRC_BASE + j] (product B), it computes for every target modulus
// t_i = MODULI[DST_BASE + i]
//   y_i = sum_j [x_j * (B/b_j)^-1]_{b_j} * [B/b_j]_{t_i}  mod t_i,
// the formula quoted in the source.  The result equals x + u*B for a small
// integer u (0 <= u < SRC_N), the usual approximation of this conversion.
// Pipeline: 3 stages of multipliers by the constants (B/b_j)^-1, 3 stages of
// multipliers by [B/b_j]_{t_i}, 1 stage of modular additions: latency 7.
// All constants are computed from the moduli at elaboration.
module fbc
  import he_pkg::*;
#(
  parameter int SRC_BASE = 0,
  parameter int SRC_N    = 3,
  parameter int DST_BASE = 3,
  parameter int DST_N    = 3
) (
  input  logic  clk,
  input  word_t src [SRC_N],
  output word_t dst [DST_N]
);
  word_t y [SRC_N];

  for (genvar j = 0; j < SRC_N; j++) begin : g_src
    localparam longint unsigned HINV = hat_inv(SRC_BASE, SRC_N, j);
    mod_mult #(.Q(MODULI[SRC_BASE + j])) u_m (
      .clk(clk), .a(src[j]), .b(word_t'(HINV)), .r(y[j]));
  end

  for (genvar i = 0; i < DST_N; i++) begin : g_dst
    localparam longint unsigned T  = MODULI[DST_BASE + i];
    localparam word_t           TW = word_t'(T);
    word_t t [SRC_N];
    for (genvar j = 0; j < SRC_N; j++) begin : g_term
      localparam longint unsigned HMOD = hat_mod(SRC_BASE, SRC_N, j, T);
      mod_mult #(.Q(T)) u_m (.clk(clk), .a(y[j]), .b(word_t'(HMOD)), .r(t[j]));
    end
    always_ff @(posedge clk) begin
      word_t acc;
      acc = t[0];
      for (int j = 1; j < SRC_N; j++) acc = add_mod(acc, t[j], TW);
      dst[i] <= acc;
    end
  end
endmodule
