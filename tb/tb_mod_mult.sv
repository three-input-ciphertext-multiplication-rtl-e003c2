// tb_mod_mult: self-checking test of the Barrett modular multiplier.
// Operands are random 30-bit words (not only residues) plus corner cases
// (0, 1, q-1, 2^30-1); every result must equal a*b mod q computed with 64-bit
// integer arithmetic and must appear exactly 3 cycles after its operands.
module tb_mod_mult;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int MOD = 3;
  localparam u64 Q   = MODULI[MOD];
  localparam int NB  = 3000;

  logic clk = 0;
  word_t a, b, r;
  u64 ea [$];
  int checks = 0, failures = 0, cyc = 0;

  mod_mult #(.Q(Q)) dut (.clk(clk), .a(a), .b(b), .r(r));

  always #5 clk = ~clk;

  initial begin
    repeat (NB + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u64 hist [$];
    u64 corner [4] = '{0, 1, Q - 1, (64'd1 << W) - 1};
    for (int i = 0; i < NB; i++) begin
      u64 x, y;
      x = (i < 16) ? corner[i % 4] : u64'($urandom()) & ((64'd1 << W) - 1);
      y = (i < 16) ? corner[i / 4] : u64'($urandom()) & ((64'd1 << W) - 1);
      a <= word_t'(x);
      b <= word_t'(y);
      hist.push_back((x * y) % Q);
      @(posedge clk);
      // operands sampled at edge i-2 have their result registered at edge i
      if (i >= 2) begin
        automatic u64 e = hist.pop_front();
        #1;
        checks++;
        if (u64'(r) != e) begin
          failures++;
          if (failures < 8) $display("cycle %0d: got %0d exp %0d", i, r, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
