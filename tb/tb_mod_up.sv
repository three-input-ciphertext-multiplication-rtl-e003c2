// tb_mod_up: self-checking test of ModUp (q basis -> p basis).
// Random residue beats with idle cycles; expected outputs from the fast basis
// conversion formula y_i = sum_j [x_j (Q/q_j)^-1]_{q_j} [Q/q_j]_{p_i} mod p_i,
// with the constants worked out here from the moduli.  Latency 7 is checked.
module tb_mod_up;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 3, K = 3, LAT = 7, NB = 300;

  typedef struct { int cyc; u64 d [K][2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t a [L], b [K];
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];

  mod_up #(.L(L), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // [prod_{k != j} q_k]_m and its inverse, without the package helpers
  function automatic u64 qhat(int j, u64 m);
    u64 h = 1;
    for (int k = 0; k < L; k++) if (k != j) h = (h * (MODULI[k] % m)) % m;
    return h;
  endfunction

  always @(posedge clk) if (!rst && b[0].valid) begin
    exp_t e;
    if (sb.size() == 0) failures++;
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int i = 0; i < K; i++)
        for (int l = 0; l < 2; l++) begin
          checks++;
          if (u64'(b[i].d[l]) != e.d[i][l]) begin
            failures++;
            if (failures < 8) $display("p%0d lane %0d got %0d exp %0d", i, l, b[i].d[l], e.d[i][l]);
          end
        end
    end
  end

  initial begin
    for (int j = 0; j < L; j++) a[j] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic bit v = ($urandom_range(0, 3) != 0);
      automatic exp_t e;
      u64 x [L][2];
      for (int j = 0; j < L; j++) begin
        beat_t bt;
        bt.valid = v; bt.idx = IDX_W'(n);
        for (int l = 0; l < 2; l++) begin
          x[j][l] = (n < 2) ? MODULI[j] - 1 : rnd(MODULI[j]);
          bt.d[l] = word_t'(x[j][l]);
        end
        a[j] <= bt;
      end
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        for (int i = 0; i < K; i++)
          for (int l = 0; l < 2; l++) begin
            automatic u64 p = MODULI[MAX_L + i], s = 0;
            for (int j = 0; j < L; j++) begin
              automatic u64 q = MODULI[j];
              automatic u64 y = (x[j][l] * invmod(qhat(j, q), q)) % q;
              s = (s + (y * qhat(j, p)) % p) % p;
            end
            e.d[i][l] = s;
          end
        sb.push_back(e);
        seen++;
      end
      @(posedge clk);
    end
    for (int j = 0; j < L; j++) a[j] <= '0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
