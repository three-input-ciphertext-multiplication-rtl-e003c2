// ct_mult3: fully pipelined 3-input ciphertext multiplier for RNS-CKKS.
//
// Computes the product of three ciphertexts ct^t = (c0^t, c1^t), t = 1..3,
// each given by its residues modulo q_0 .. q_{L-1}, with one relinearization
// using two evaluation keys evk = (evk_0, evk_1) and evk' = (evk'_0, evk_1)
// that share evk_1, followed by two rescalings (by q_{L-1}, then q_{L-2}).
// Data path, per the block diagram of the source:
//   6L  NTT_q        input polynomials to the NTT domain (L 6-lane ntt)
//   L   poly_mult3   D0..D3 of the triple product (8 multiplications each)
//   4L  INTT_q       D0, D1 (to the output adders) and D2, D3 (to ModUp)
//                    (L 4-lane intt)
//   2   mod_up       d2, d3 extended to the K special moduli p_i
//   2K  NTT_p        back to the NTT domain (K 2-lane ntt)
//   K+L relin_mac    C0 = D2*EVK0 + D3*EVK0', C1 = (D2 + D3)*EVK1 per modulus
//   2(K+L) INTT      C0, C1 to the coefficient domain (K+L 2-lane intt)
// Transforms that run in lock step over one modulus are built as one
// multi-lane ntt/intt, so they share one twiddle memory per stage.
//   2   mod_down     one for C0, one for C1: the sum of the two key products
//                    is taken before ModDown, so only two are needed
//   2L  adders       c0* = d0 + ModDown(C0), c1* = d1 + ModDown(C1)
//   4   rescale      L -> L-1 -> L-2 residues for c0* and c1*
// The q_j branch of the key products uses D2, D3 straight from poly_mult3;
// these are delayed to meet the p_i branch (INTT + ModUp + NTT), and d0, d1
// are delayed to meet the ModDown outputs.
//
// Interface.  Every polynomial travels as a frame of N/2 beats, beat c holding
// coefficients (c, c + N/2) with idx = c and valid set; all 6L input streams
// must be in lock step, and frames follow each other back to back or at least
// N/2 cycles apart.  One ciphertext triple is accepted every N/2 cycles.
// Evaluation keys are read from an external synchronous memory: when
// evk_rd_en is high with index evk_rd_idx = c, the key words of NTT-domain
// positions 2c and 2c+1 (bit-reversed order, as ntt produces) must be on the
// evk* inputs in the next cycle, for every modulus m: m = 0..K-1 is p_m,
// m = K..K+L-1 is q_{m-K}.  Output: the L-2 residues of c0* and c1* in the
// same frame format.
// Latency from an input beat to the matching output beat: 4X + 39 cycles,
// X = N/2 - 1 + 5 log2 N, i.e. 2N + 20 log2 N + 35 (the source: 2N + 20 log2 N
// + 32; the extra cycles here are the key-read register, the fourth relin_mac
// stage and the registered output adder).
module ct_mult3
  import he_pkg::*;
#(
  parameter int LOG_N = 12,
  parameter int L     = 3,
  parameter int K     = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t in_c0 [L][3],        // [modulus q_j][ciphertext t-1]
  input  beat_t in_c1 [L][3],
  output logic             evk_rd_en,
  output logic [IDX_W-1:0] evk_rd_idx,
  input  word_t evk0  [K+L][2],      // [modulus m][lane]
  input  word_t evk0p [K+L][2],
  input  word_t evk1  [K+L][2],
  output beat_t out_c0 [L-2],
  output beat_t out_c1 [L-2]
);
  localparam int N   = 1 << LOG_N;
  localparam int X   = N / 2 - 1 + 5 * LOG_N;      // (I)NTT latency
  localparam int DLY_KEYQ = 2 * X + 7;             // INTT + ModUp + NTT
  localparam int DLY_D01  = 2 * X + 22;            // ModUp+NTT+reg+relin+INTT+ModDown
  localparam int BW  = $bits(beat_t);

  // ---------------- polynomial multiplications ----------------
  beat_t n_c0 [L][3];
  beat_t n_c1 [L][3];
  beat_t dd   [L][4];          // D0..D3 per q_j, NTT domain
  beat_t dc   [4][L];          // d0..d3 per q_j, coefficient domain

  // The six input NTTs of one q_j run in lock step and share their twiddle
  // memories (one 6-lane ntt); so do the four INTTs of D0..D3.
  beat_t nin  [L][6];
  beat_t nout [L][6];
  beat_t iout [L][4];

  for (genvar j = 0; j < L; j++) begin : g_q
    for (genvar t = 0; t < 3; t++) begin : g_ct
      assign nin[j][t]     = in_c0[j][t];
      assign nin[j][3 + t] = in_c1[j][t];
      assign n_c0[j][t]    = nout[j][t];
      assign n_c1[j][t]    = nout[j][3 + t];
    end
    ntt #(.LOG_N(LOG_N), .MOD(q_idx(j)), .LANES(6)) u_ntt (
      .clk(clk), .rst(rst), .in(nin[j]), .out(nout[j]));
    poly_mult3 #(.MOD(q_idx(j))) u_pm (
      .clk(clk), .rst(rst), .c0(n_c0[j]), .c1(n_c1[j]), .d(dd[j]));
    intt #(.LOG_N(LOG_N), .MOD(q_idx(j)), .LANES(4)) u_intt (
      .clk(clk), .rst(rst), .in(dd[j]), .out(iout[j]));
    for (genvar k = 0; k < 4; k++) begin : g_dc
      assign dc[k][j] = iout[j][k];
    end
  end

  // ---------------- relinearization: p_i branch ----------------
  beat_t up2 [K], up3 [K];
  beat_t kin2 [K+L], kin3 [K+L];      // key-product inputs, NTT domain

  mod_up #(.L(L), .K(K)) u_up2 (.clk(clk), .rst(rst), .a(dc[2]), .b(up2));
  mod_up #(.L(L), .K(K)) u_up3 (.clk(clk), .rst(rst), .a(dc[3]), .b(up3));

  // NTT_p of d2 and d3 run in lock step: one 2-lane ntt per p_i.
  beat_t pin [K][2], pout [K][2];
  for (genvar i = 0; i < K; i++) begin : g_p
    assign pin[i][0] = up2[i];
    assign pin[i][1] = up3[i];
    ntt #(.LOG_N(LOG_N), .MOD(p_idx(i)), .LANES(2)) u_ntt (
      .clk(clk), .rst(rst), .in(pin[i]), .out(pout[i]));
    assign kin2[i] = pout[i][0];
    assign kin3[i] = pout[i][1];
  end

  // ---------------- relinearization: q_j branch (delay only) ----------------
  for (genvar j = 0; j < L; j++) begin : g_qk
    delay_line #(.WIDTH(BW), .DEPTH(DLY_KEYQ)) u_d2 (
      .clk(clk), .rst(rst), .din(dd[j][2]), .dout(kin2[K+j]));
    delay_line #(.WIDTH(BW), .DEPTH(DLY_KEYQ)) u_d3 (
      .clk(clk), .rst(rst), .din(dd[j][3]), .dout(kin3[K+j]));
  end

  // ---------------- key read and key products ----------------
  beat_t kr2 [K+L], kr3 [K+L];
  beat_t ct0 [K+L], ct1 [K+L];        // C~0, C~1, NTT domain
  beat_t cc0 [K+L], cc1 [K+L];        // c~0, c~1, coefficient domain

  assign evk_rd_en  = kin2[0].valid;
  assign evk_rd_idx = kin2[0].idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int m = 0; m < K + L; m++) begin
        kr2[m] <= '0;
        kr3[m] <= '0;
      end
    end else begin
      kr2 <= kin2;
      kr3 <= kin3;
    end
  end

  // The INTTs of C0 and C1 run in lock step: one 2-lane intt per modulus.
  beat_t kiin [K+L][2], kiout [K+L][2];
  for (genvar m = 0; m < K + L; m++) begin : g_key
    localparam int MI = (m < K) ? p_idx(m) : q_idx(m - K);
    relin_mac #(.MOD(MI)) u_mac (
      .clk(clk), .rst(rst), .d2(kr2[m]), .d3(kr3[m]),
      .evk0(evk0[m]), .evk0p(evk0p[m]), .evk1(evk1[m]),
      .c0(ct0[m]), .c1(ct1[m]));
    assign kiin[m][0] = ct0[m];
    assign kiin[m][1] = ct1[m];
    intt #(.LOG_N(LOG_N), .MOD(MI), .LANES(2)) u_intt (
      .clk(clk), .rst(rst), .in(kiin[m]), .out(kiout[m]));
    assign cc0[m] = kiout[m][0];
    assign cc1[m] = kiout[m][1];
  end

  // ---------------- ModDown ----------------
  beat_t md0 [L], md1 [L];
  mod_down #(.L(L), .K(K)) u_md0 (
    .clk(clk), .rst(rst), .cp(cc0[0:K-1]), .cq(cc0[K:K+L-1]), .r(md0));
  mod_down #(.L(L), .K(K)) u_md1 (
    .clk(clk), .rst(rst), .cp(cc1[0:K-1]), .cq(cc1[K:K+L-1]), .r(md1));

  // ---------------- d0/d1 alignment and output adders ----------------
  beat_t d0a [L], d1a [L];
  beat_t cs0 [L], cs1 [L];            // c0*, c1* before rescaling

  for (genvar j = 0; j < L; j++) begin : g_out
    localparam word_t QW = word_t'(MODULI[q_idx(j)]);
    delay_line #(.WIDTH(BW), .DEPTH(DLY_D01)) u_a0 (
      .clk(clk), .rst(rst), .din(dc[0][j]), .dout(d0a[j]));
    delay_line #(.WIDTH(BW), .DEPTH(DLY_D01)) u_a1 (
      .clk(clk), .rst(rst), .din(dc[1][j]), .dout(d1a[j]));
    always_ff @(posedge clk) begin
      if (rst) begin
        cs0[j].valid <= 1'b0;
        cs1[j].valid <= 1'b0;
      end else begin
        cs0[j].valid <= md0[j].valid;
        cs1[j].valid <= md1[j].valid;
      end
      cs0[j].idx <= md0[j].idx;
      cs1[j].idx <= md1[j].idx;
      for (int l = 0; l < 2; l++) begin
        cs0[j].d[l] <= add_mod(d0a[j].d[l], md0[j].d[l], QW);
        cs1[j].d[l] <= add_mod(d1a[j].d[l], md1[j].d[l], QW);
      end
    end
  end

  // ---------------- two rescalings ----------------
  beat_t rs0 [L-1], rs1 [L-1];
  rescale #(.L_IN(L))     u_rs0a (.clk(clk), .rst(rst), .c(cs0), .r(rs0));
  rescale #(.L_IN(L))     u_rs1a (.clk(clk), .rst(rst), .c(cs1), .r(rs1));
  rescale #(.L_IN(L - 1)) u_rs0b (.clk(clk), .rst(rst), .c(rs0), .r(out_c0));
  rescale #(.L_IN(L - 1)) u_rs1b (.clk(clk), .rst(rst), .c(rs1), .r(out_c1));

  // Alignment rules of the pipeline: the branches that meet must agree.
  always_ff @(posedge clk) begin
    if (!rst) begin
      assert (kin2[K].valid == kin2[0].valid)
        else $error("q-branch key inputs out of step with p-branch");
      assert (md0[0].valid == d0a[0].valid)
        else $error("d0 out of step with ModDown output");
    end
  end
endmodule
