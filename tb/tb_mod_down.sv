// tb_mod_down: self-checking test of ModDown ({p} u {q} basis -> {q}, / P).
// Random residue beats with idle cycles; expected
//   r_j = (c_j - sum_i [c_i (P/p_i)^-1]_{p_i} [P/p_i]_{q_j}) * P^-1  mod q_j,
// constants worked out here from the moduli.  Latency 10 is checked.
module tb_mod_down;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 3, K = 3, LAT = 10, NB = 300;

  typedef struct { int cyc; u64 d [L][2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t cp [K], cq [L], r [L];
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];

  mod_down #(.L(L), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic u64 phat(int i, u64 m);
    u64 h = 1;
    for (int k = 0; k < K; k++) if (k != i) h = (h * (MODULI[MAX_L + k] % m)) % m;
    return h;
  endfunction

  function automatic u64 pfull(u64 m);
    u64 h = 1;
    for (int k = 0; k < K; k++) h = (h * (MODULI[MAX_L + k] % m)) % m;
    return h;
  endfunction

  always @(posedge clk) if (!rst && r[0].valid) begin
    exp_t e;
    if (sb.size() == 0) failures++;
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int j = 0; j < L; j++)
        for (int l = 0; l < 2; l++) begin
          checks++;
          if (u64'(r[j].d[l]) != e.d[j][l]) begin
            failures++;
            if (failures < 8) $display("q%0d lane %0d got %0d exp %0d", j, l, r[j].d[l], e.d[j][l]);
          end
        end
    end
  end

  initial begin
    for (int i = 0; i < K; i++) cp[i] = '0;
    for (int j = 0; j < L; j++) cq[j] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic bit v = ($urandom_range(0, 3) != 0);
      automatic exp_t e;
      u64 xp [K][2], xq [L][2];
      for (int i = 0; i < K; i++) begin
        beat_t bt;
        bt.valid = v; bt.idx = IDX_W'(n);
        for (int l = 0; l < 2; l++) begin
          xp[i][l] = (n < 2) ? MODULI[MAX_L + i] - 1 : rnd(MODULI[MAX_L + i]);
          bt.d[l] = word_t'(xp[i][l]);
        end
        cp[i] <= bt;
      end
      for (int j = 0; j < L; j++) begin
        beat_t bt;
        bt.valid = v; bt.idx = IDX_W'(n);
        for (int l = 0; l < 2; l++) begin
          xq[j][l] = (n < 2) ? 0 : rnd(MODULI[j]);
          bt.d[l] = word_t'(xq[j][l]);
        end
        cq[j] <= bt;
      end
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        for (int j = 0; j < L; j++)
          for (int l = 0; l < 2; l++) begin
            automatic u64 q = MODULI[j], s = 0;
            for (int i = 0; i < K; i++) begin
              automatic u64 p = MODULI[MAX_L + i];
              automatic u64 y = (xp[i][l] * invmod(phat(i, p), p)) % p;
              s = (s + (y * phat(i, q)) % q) % q;
            end
            e.d[j][l] = (((xq[j][l] + q - s) % q) * invmod(pfull(q), q)) % q;
          end
        sb.push_back(e);
        seen++;
      end
      @(posedge clk);
    end
    for (int i = 0; i < K; i++) cp[i] <= '0;
    for (int j = 0; j < L; j++) cq[j] <= '0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
