// poly_mult3: NTT-domain product of three ciphertexts over one RNS modulus,
// the "3-input polynomial multiplication" block.
//
// Inputs are the NTT-domain polynomials of ct^1 = (c0[0], c1[0]),
// ct^2 = (c0[1], c1[1]) and ct^3 = (c0[2], c1[2]); outputs are D0..D3 of
//   (c0^1 + c1^1 s)(c0^2 + c1^2 s)(c0^3 + c1^3 s) = D0 + D1 s + D2 s^2 + D3 s^3,
// coefficient-wise mod q.  Following the source, Karatsuba is applied twice:
//   f0 = c0^1 c0^2,  f2 = c1^1 c1^2,  f1 = (c0^1 + c1^1)(c0^2 + c1^2) - f0 - f2
//   d0 = f0 c0^3,  d3 = f2 c1^3,  g1 = f1 c1^3,  g2 = f2 c0^3
//   d1 = (f0 + f1)(c0^3 + c1^3) - g1 - d0,  d2 = g1 + g2
// which is 8 modular multiplications and 9 modular additions per coefficient
// (16 and 18 for the two lanes, as counted by the source).  f0 + f1 is formed
// as (c0^1 + c1^1)(c0^2 + c1^2) - f2, the same value with one subtraction.
// Pipeline (8 stages, the source's number): input sums feed the first
// multipliers directly (3 stages), one stage of subtractions, the second
// multipliers (3 stages), one stage of final additions.  The six input
// streams must be in lock step; the side band of c0[0] is used.
module poly_mult3
  import he_pkg::*;
#(
  parameter int MOD = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t c0 [3],
  input  beat_t c1 [3],
  output beat_t d  [4]
);
  localparam word_t Q = word_t'(MODULI[MOD]);

  logic             v_o;
  logic [IDX_W-1:0] idx_o;

  sb_pipe #(.DEPTH(8)) u_sb (.clk(clk), .rst(rst), .v_in(c0[0].valid), .idx_in(c0[0].idx),
                             .v_out(v_o), .idx_out(idx_o));

  for (genvar l = 0; l < 2; l++) begin : g_lane
    word_t s1, s2, s3, s3_d, c30_d, c31_d;
    word_t f0, f2, pp;
    word_t f0_r, f1_r, f2_r, f01_r, s3_r, c30_r, c31_r;
    word_t d0, d3, g1, g2, m;
    word_t d0_o, d1_o, d2_o, d3_o;

    always_comb begin
      s1 = add_mod(c0[0].d[l], c1[0].d[l], Q);
      s2 = add_mod(c0[1].d[l], c1[1].d[l], Q);
      s3 = add_mod(c0[2].d[l], c1[2].d[l], Q);
    end

    // stages 1-3: f0, f2 and the Karatsuba middle product
    mod_mult #(.Q(MODULI[MOD])) u_f0 (.clk(clk), .a(c0[0].d[l]), .b(c0[1].d[l]), .r(f0));
    mod_mult #(.Q(MODULI[MOD])) u_f2 (.clk(clk), .a(c1[0].d[l]), .b(c1[1].d[l]), .r(f2));
    mod_mult #(.Q(MODULI[MOD])) u_pp (.clk(clk), .a(s1),         .b(s2),         .r(pp));
    word_pipe #(.DEPTH(3)) u_s3  (.clk(clk), .din(s3),         .dout(s3_d));
    word_pipe #(.DEPTH(3)) u_c30 (.clk(clk), .din(c0[2].d[l]), .dout(c30_d));
    word_pipe #(.DEPTH(3)) u_c31 (.clk(clk), .din(c1[2].d[l]), .dout(c31_d));

    // stage 4: f1 and f0 + f1
    always_ff @(posedge clk) begin
      f0_r  <= f0;
      f2_r  <= f2;
      f1_r  <= sub_mod(sub_mod(pp, f0, Q), f2, Q);
      f01_r <= sub_mod(pp, f2, Q);
      s3_r  <= s3_d;
      c30_r <= c30_d;
      c31_r <= c31_d;
    end

    // stages 5-7: products with the third ciphertext
    mod_mult #(.Q(MODULI[MOD])) u_d0 (.clk(clk), .a(f0_r),  .b(c30_r), .r(d0));
    mod_mult #(.Q(MODULI[MOD])) u_d3 (.clk(clk), .a(f2_r),  .b(c31_r), .r(d3));
    mod_mult #(.Q(MODULI[MOD])) u_g1 (.clk(clk), .a(f1_r),  .b(c31_r), .r(g1));
    mod_mult #(.Q(MODULI[MOD])) u_g2 (.clk(clk), .a(f2_r),  .b(c30_r), .r(g2));
    mod_mult #(.Q(MODULI[MOD])) u_m  (.clk(clk), .a(f01_r), .b(s3_r),  .r(m));

    // stage 8: d1 and d2
    always_ff @(posedge clk) begin
      d0_o <= d0;
      d1_o <= sub_mod(sub_mod(m, g1, Q), d0, Q);
      d2_o <= add_mod(g1, g2, Q);
      d3_o <= d3;
    end

    assign d[0].d[l] = d0_o;
    assign d[1].d[l] = d1_o;
    assign d[2].d[l] = d2_o;
    assign d[3].d[l] = d3_o;
  end

  for (genvar k = 0; k < 4; k++) begin : g_sb
    assign d[k].valid = v_o;
    assign d[k].idx   = idx_o;
  end
endmodule
