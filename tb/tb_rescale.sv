// tb_rescale: self-checking test of rescaling by the last modulus.
// Random residue beats with idle cycles; expected
//   r_j = (c_j - c_last) * q_last^-1 mod q_j, with c_last reduced mod q_j,
// for the three-modulus input.  Latency 4 is checked.
module tb_rescale;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int L_IN = 3, LAT = 4, NB = 400;

  typedef struct { int cyc; u64 d [L_IN-1][2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t c [L_IN], r [L_IN-1];
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];

  rescale #(.L_IN(L_IN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && r[0].valid) begin
    exp_t e;
    if (sb.size() == 0) failures++;
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int j = 0; j < L_IN - 1; j++)
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
    for (int j = 0; j < L_IN; j++) c[j] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic bit v = ($urandom_range(0, 3) != 0);
      automatic exp_t e;
      u64 x [L_IN][2];
      for (int j = 0; j < L_IN; j++) begin
        beat_t bt;
        bt.valid = v; bt.idx = IDX_W'(n);
        for (int l = 0; l < 2; l++) begin
          x[j][l] = (n < 3) ? MODULI[j] - 1 - u64'(n) : rnd(MODULI[j]);
          bt.d[l] = word_t'(x[j][l]);
        end
        c[j] <= bt;
      end
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        for (int j = 0; j < L_IN - 1; j++)
          for (int l = 0; l < 2; l++) begin
            automatic u64 q = MODULI[j], ql = MODULI[L_IN - 1];
            e.d[j][l] = (((x[j][l] + q - x[L_IN-1][l] % q) % q) * invmod(ql % q, q)) % q;
          end
        sb.push_back(e);
        seen++;
      end
      @(posedge clk);
    end
    for (int j = 0; j < L_IN; j++) c[j] <= '0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
