// tb_ct_mult3: end-to-end test of the 3-input ciphertext multiplier.
//
// Random ciphertexts (three per operation) and random evaluation keys are
// generated; the reference result is worked out in the coefficient domain
// with schoolbook negacyclic products, the fast basis conversion formulas for
// ModUp and ModDown, and the rescaling formula, so it shares no transform,
// Barrett or pipeline code with the design.  The key memory is modelled as a
// synchronous memory holding the keys' NTT (direct evaluation, bit-reversed).
// Operations: OPS_B2B frames back to back, then one more after an idle gap.
// Checked: every output coefficient of c0* and c1* after the two rescalings,
// the latency 2N + 20 log2 N + 35, one key-read beat per relinearized beat,
// and that the back-to-back and after-gap cases both occurred.
module tb_ct_mult3;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int LOG_N   = 4;
  localparam int L       = 3;
  localparam int K       = 3;
  localparam int OPS_B2B = 2;
  localparam int WATCHDOG = 200000;

  localparam int N   = 1 << LOG_N;
  localparam int OPS = OPS_B2B + 1;
  localparam int LAT = 2 * N + 20 * LOG_N + 35;

  logic clk = 0, rst = 1;
  beat_t in_c0 [L][3];
  beat_t in_c1 [L][3];
  logic             evk_rd_en;
  logic [IDX_W-1:0] evk_rd_idx;
  word_t evk0 [K+L][2], evk0p [K+L][2], evk1 [K+L][2];
  beat_t out_c0 [L-2], out_c1 [L-2];

  ct_mult3 #(.LOG_N(LOG_N), .L(L), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  int first_in = -1, first_out = -1;
  int n_key_reads = 0, n_b2b = 0, n_gap = 0, out_op = 0, out_beat = 0;

  // ct[op][t][b][j]: ciphertext t, component b, residue mod q_j
  poly_t ct [OPS][3][2][L];
  poly_t ek [3][K+L];          // evk0, evk0', evk1 per modulus, coefficient domain
  poly_t ekn [3][K+L];         // the same in the NTT domain
  poly_t exp_c [OPS][2][L-2];  // expected c0*, c1* after two rescalings

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic u64 modm(int m);
    return (m < K) ? MODULI[p_idx(m)] : MODULI[q_idx(m - K)];
  endfunction

  // Reference of one operation.
  task automatic reference(int op);
    poly_t d [4][L];
    poly_t x2 [K+L], x3 [K+L], c0t [K+L], c1t [K+L];
    poly_t cs [2][L], r1 [2][L-1];
    for (int j = 0; j < L; j++) begin
      u64 q = MODULI[q_idx(j)];
      poly_t f0, f1, f2;
      f0 = negconv(ct[op][0][0][j], ct[op][1][0][j], q);
      f1 = padd(negconv(ct[op][0][0][j], ct[op][1][1][j], q),
                negconv(ct[op][0][1][j], ct[op][1][0][j], q), q);
      f2 = negconv(ct[op][0][1][j], ct[op][1][1][j], q);
      d[0][j] = negconv(f0, ct[op][2][0][j], q);
      d[1][j] = padd(negconv(f0, ct[op][2][1][j], q), negconv(f1, ct[op][2][0][j], q), q);
      d[2][j] = padd(negconv(f1, ct[op][2][1][j], q), negconv(f2, ct[op][2][0][j], q), q);
      d[3][j] = negconv(f2, ct[op][2][1][j], q);
      x2[K+j] = d[2][j];
      x3[K+j] = d[3][j];
    end
    // ModUp by fast basis conversion
    for (int i = 0; i < K; i++) begin
      u64 p = MODULI[p_idx(i)];
      x2[i] = new[N];
      x3[i] = new[N];
      for (int n = 0; n < N; n++) begin
        u64 s2 = 0, s3 = 0;
        for (int j = 0; j < L; j++) begin
          u64 q = MODULI[q_idx(j)];
          s2 = (s2 + mulmod(mulmod(d[2][j][n], hat_inv(0, L, j), q), hat_mod(0, L, j, p), p)) % p;
          s3 = (s3 + mulmod(mulmod(d[3][j][n], hat_inv(0, L, j), q), hat_mod(0, L, j, p), p)) % p;
        end
        x2[i][n] = s2;
        x3[i][n] = s3;
      end
    end
    // key products
    for (int m = 0; m < K + L; m++) begin
      u64 mm = modm(m);
      c0t[m] = padd(negconv(x2[m], ek[0][m], mm), negconv(x3[m], ek[1][m], mm), mm);
      c1t[m] = negconv(padd(x2[m], x3[m], mm), ek[2][m], mm);
    end
    // ModDown and output addition
    for (int j = 0; j < L; j++) begin
      u64 q = MODULI[q_idx(j)];
      cs[0][j] = new[N];
      cs[1][j] = new[N];
      for (int n = 0; n < N; n++) begin
        u64 v0 = 0, v1 = 0, r0, rr1;
        for (int i = 0; i < K; i++) begin
          u64 p = MODULI[p_idx(i)];
          v0 = (v0 + mulmod(mulmod(c0t[i][n], hat_inv(L, K, i), p), hat_mod(L, K, i, q), q)) % q;
          v1 = (v1 + mulmod(mulmod(c1t[i][n], hat_inv(L, K, i), p), hat_mod(L, K, i, q), q)) % q;
        end
        r0  = mulmod((c0t[K+j][n] + q - v0) % q, p_inv_mod(K, q), q);
        rr1 = mulmod((c1t[K+j][n] + q - v1) % q, p_inv_mod(K, q), q);
        cs[0][j][n] = (d[0][j][n] + r0) % q;
        cs[1][j][n] = (d[1][j][n] + rr1) % q;
      end
    end
    // two rescalings
    for (int b = 0; b < 2; b++) begin
      for (int j = 0; j < L - 1; j++) begin
        u64 q = MODULI[q_idx(j)], ql = MODULI[q_idx(L-1)];
        r1[b][j] = new[N];
        for (int n = 0; n < N; n++)
          r1[b][j][n] = mulmod((cs[b][j][n] + q - cs[b][L-1][n] % q) % q, invmod(ql % q, q), q);
      end
      for (int j = 0; j < L - 2; j++) begin
        u64 q = MODULI[q_idx(j)], ql = MODULI[q_idx(L-2)];
        exp_c[op][b][j] = new[N];
        for (int n = 0; n < N; n++)
          exp_c[op][b][j][n] = mulmod((r1[b][j][n] + q - r1[b][L-2][n] % q) % q, invmod(ql % q, q), q);
      end
    end
  endtask

  // evaluation-key memory: synchronous read, one cycle
  always @(posedge clk) begin
    if (evk_rd_en) begin
      if (!rst) n_key_reads++;
      for (int m = 0; m < K + L; m++)
        for (int l = 0; l < 2; l++) begin
          evk0[m][l]  <= word_t'(ekn[0][m][2 * evk_rd_idx + l]);
          evk0p[m][l] <= word_t'(ekn[1][m][2 * evk_rd_idx + l]);
          evk1[m][l]  <= word_t'(ekn[2][m][2 * evk_rd_idx + l]);
        end
    end
  end

  // output checker
  always @(posedge clk) begin
    if (!rst && out_c0[0].valid) begin
      if (first_out < 0) first_out = cyc;
      for (int j = 0; j < L - 2; j++)
        for (int l = 0; l < 2; l++) begin
          checks += 2;
          if (u64'(out_c0[j].d[l]) != exp_c[out_op][0][j][out_beat + l * N / 2]) begin
            failures++;
            if (failures < 10) $display("op %0d c0 j%0d beat %0d lane %0d: got %0d exp %0d",
              out_op, j, out_beat, l, out_c0[j].d[l], exp_c[out_op][0][j][out_beat + l * N / 2]);
          end
          if (u64'(out_c1[j].d[l]) != exp_c[out_op][1][j][out_beat + l * N / 2]) begin
            failures++;
            if (failures < 10) $display("op %0d c1 j%0d beat %0d lane %0d: got %0d exp %0d",
              out_op, j, out_beat, l, out_c1[j].d[l], exp_c[out_op][1][j][out_beat + l * N / 2]);
          end
        end
      checks++;
      if (out_c0[0].idx != IDX_W'(out_beat)) failures++;
      out_beat++;
      if (out_beat == N / 2) begin
        out_beat = 0;
        if (out_op < OPS_B2B && out_op > 0) n_b2b++;
        if (out_op == OPS_B2B) n_gap++;
        out_op++;
      end
    end
  end

  initial begin
    for (int op = 0; op < OPS; op++)
      for (int t = 0; t < 3; t++)
        for (int b = 0; b < 2; b++)
          for (int j = 0; j < L; j++)
            ct[op][t][b][j] = rand_poly(N, MODULI[q_idx(j)]);
    for (int k = 0; k < 3; k++)
      for (int m = 0; m < K + L; m++) begin
        automatic int mi = (m < K) ? p_idx(m) : q_idx(m - K);
        ek[k][m]  = rand_poly(N, MODULI[mi]);
        ekn[k][m] = ntt_ref(ek[k][m], mi, LOG_N);
      end
    for (int op = 0; op < OPS; op++) reference(op);
    for (int j = 0; j < L; j++)
      for (int t = 0; t < 3; t++) begin
        in_c0[j][t] = '0;
        in_c1[j][t] = '0;
      end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int op = 0; op < OPS; op++) begin
      if (op == OPS_B2B) begin
        for (int j = 0; j < L; j++)
          for (int t = 0; t < 3; t++) begin
            in_c0[j][t] <= '0;
            in_c1[j][t] <= '0;
          end
        repeat (N) @(posedge clk);
      end
      for (int c = 0; c < N / 2; c++) begin
        for (int j = 0; j < L; j++)
          for (int t = 0; t < 3; t++) begin
            beat_t b0, b1;
            b0.valid = 1'b1; b0.idx = IDX_W'(c);
            b1.valid = 1'b1; b1.idx = IDX_W'(c);
            b0.d[0] = word_t'(ct[op][t][0][j][c]);
            b0.d[1] = word_t'(ct[op][t][0][j][c + N / 2]);
            b1.d[0] = word_t'(ct[op][t][1][j][c]);
            b1.d[1] = word_t'(ct[op][t][1][j][c + N / 2]);
            in_c0[j][t] <= b0;
            in_c1[j][t] <= b1;
          end
        if (first_in < 0) first_in = cyc + 1;
        @(posedge clk);
      end
    end
    for (int j = 0; j < L; j++)
      for (int t = 0; t < 3; t++) begin
        in_c0[j][t] <= '0;
        in_c1[j][t] <= '0;
      end
    wait (out_op == OPS);
    repeat (10) @(posedge clk);
    checks++;
    if (first_out - first_in != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", first_out - first_in, LAT);
    end
    checks++;
    if (n_key_reads != OPS * N / 2) begin
      failures++;
      $display("key reads %0d, expected %0d", n_key_reads, OPS * N / 2);
    end
    $display("mechanisms: back-to-back ops=%0d, ops after idle gap=%0d, key-read beats=%0d, latency=%0d",
             n_b2b, n_gap, n_key_reads, first_out - first_in);
    checks++;
    if ((OPS_B2B > 1 && n_b2b == 0) || n_gap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
