// tb_poly_mult3: self-checking test of the NTT-domain 3-input product.
// Random coefficient beats (with random idle cycles) are applied; for each the
// expected D0..D3 are computed from the direct expansion
//   d0 = a0 b0 e0, d1 = a1 b0 e0 + a0 b1 e0 + a0 b0 e1,
//   d2 = a1 b1 e0 + a1 b0 e1 + a0 b1 e1, d3 = a1 b1 e1   (mod q),
// (16 products, not the Karatsuba form the block uses).  Each result must
// appear exactly 8 cycles after its input.
module tb_poly_mult3;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int MOD = 2;
  localparam int LAT = 8;
  localparam int NB  = 400;
  localparam u64 Q   = MODULI[MOD];

  typedef struct { int cyc; u64 d [4][2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t c0 [3], c1 [3], d [4];
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];

  poly_mult3 #(.MOD(MOD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && d[0].valid) begin
    exp_t e;
    seen++;
    if (sb.size() == 0) begin failures++; end
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int k = 0; k < 4; k++)
        for (int l = 0; l < 2; l++) begin
          checks++;
          if (u64'(d[k].d[l]) != e.d[k][l]) begin
            failures++;
            if (failures < 8) $display("D%0d lane %0d got %0d exp %0d", k, l, d[k].d[l], e.d[k][l]);
          end
        end
    end
  end

  initial begin
    for (int t = 0; t < 3; t++) begin c0[t] = '0; c1[t] = '0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < NB; i++) begin
      bit v;
      exp_t e;
      u64 a [3][2][2];   // [ct][component][lane]
      v = ($urandom_range(0, 4) != 0);
      for (int t = 0; t < 3; t++)
        for (int b = 0; b < 2; b++)
          for (int l = 0; l < 2; l++) a[t][b][l] = (i < 4) ? Q - 1 - u64'(i) : rnd(Q);
      for (int t = 0; t < 3; t++) begin
        beat_t x0, x1;
        x0.valid = v; x0.idx = IDX_W'(i);
        x1.valid = v; x1.idx = IDX_W'(i);
        for (int l = 0; l < 2; l++) begin
          x0.d[l] = word_t'(a[t][0][l]);
          x1.d[l] = word_t'(a[t][1][l]);
        end
        c0[t] <= x0;
        c1[t] <= x1;
      end
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        for (int l = 0; l < 2; l++) begin
          automatic u64 a0 = a[0][0][l], a1 = a[0][1][l], b0 = a[1][0][l], b1 = a[1][1][l];
          automatic u64 e0 = a[2][0][l], e1 = a[2][1][l];
          e.d[0][l] = mulmod(mulmod(a0, b0, Q), e0, Q);
          e.d[1][l] = (mulmod(mulmod(a1, b0, Q), e0, Q) + mulmod(mulmod(a0, b1, Q), e0, Q)
                       + mulmod(mulmod(a0, b0, Q), e1, Q)) % Q;
          e.d[2][l] = (mulmod(mulmod(a1, b1, Q), e0, Q) + mulmod(mulmod(a1, b0, Q), e1, Q)
                       + mulmod(mulmod(a0, b1, Q), e1, Q)) % Q;
          e.d[3][l] = mulmod(mulmod(a1, b1, Q), e1, Q);
        end
        sb.push_back(e);
      end
      @(posedge clk);
    end
    for (int t = 0; t < 3; t++) begin c0[t] <= '0; c1[t] <= '0; end
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
