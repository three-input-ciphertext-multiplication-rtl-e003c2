// tb_relin_mac: self-checking test of the evaluation-key products.
// Random D2, D3 and key words with idle cycles; expected
//   C0 = D2*EVK0 + D3*EVK0',  C1 = D2*EVK1 + D3*EVK1  (mod q),
// i.e. the unmerged form of the shared-evk_1 product.  Latency 4 is checked.
module tb_relin_mac;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int MOD = 4, LAT = 4, NB = 400;
  localparam u64 Q   = MODULI[MOD];

  typedef struct { int cyc; u64 d [2][2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t d2, d3, c0, c1;
  word_t evk0 [2], evk0p [2], evk1 [2];
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];

  relin_mac #(.MOD(MOD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && c0.valid) begin
    exp_t e;
    if (sb.size() == 0) failures++;
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc || !c1.valid) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int l = 0; l < 2; l++) begin
        checks += 2;
        if (u64'(c0.d[l]) != e.d[0][l]) begin
          failures++;
          if (failures < 8) $display("C0 lane %0d got %0d exp %0d", l, c0.d[l], e.d[0][l]);
        end
        if (u64'(c1.d[l]) != e.d[1][l]) begin
          failures++;
          if (failures < 8) $display("C1 lane %0d got %0d exp %0d", l, c1.d[l], e.d[1][l]);
        end
      end
    end
  end

  initial begin
    d2 = '0; d3 = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic bit v = ($urandom_range(0, 3) != 0);
      automatic exp_t e;
      u64 x2 [2], x3 [2], k0 [2], k0p [2], k1 [2];
      beat_t b2, b3;
      b2.valid = v; b2.idx = IDX_W'(n);
      b3.valid = v; b3.idx = IDX_W'(n);
      for (int l = 0; l < 2; l++) begin
        x2[l] = rnd(Q); x3[l] = (n < 3) ? Q - 1 : rnd(Q);
        k0[l] = rnd(Q); k0p[l] = rnd(Q); k1[l] = rnd(Q);
        b2.d[l] = word_t'(x2[l]); b3.d[l] = word_t'(x3[l]);
        evk0[l]  <= word_t'(k0[l]);
        evk0p[l] <= word_t'(k0p[l]);
        evk1[l]  <= word_t'(k1[l]);
      end
      d2 <= b2;
      d3 <= b3;
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        for (int l = 0; l < 2; l++) begin
          e.d[0][l] = (mulmod(x2[l], k0[l], Q) + mulmod(x3[l], k0p[l], Q)) % Q;
          e.d[1][l] = (mulmod(x2[l], k1[l], Q) + mulmod(x3[l], k1[l], Q)) % Q;
        end
        sb.push_back(e);
        seen++;
      end
      @(posedge clk);
    end
    d2 <= '0; d3 <= '0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
