// tb_twiddle_rom: self-checking test of the per-stage twiddle memories.
// For N = 32 and every stage distance T, forward and inverse, each word c is
// read and compared with psi^(+-brv(N/(2T) + c/T)) computed by plain modular
// exponentiation (psi = primitive 64th root of unity of the modulus, obtained
// here as psi_8192^128, and its inverse by Fermat).  Read latency 1 cycle.
module tb_twiddle_rom;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int LOG_N = 5;
  localparam int N     = 1 << LOG_N;
  localparam int MOD   = 5;
  localparam u64 Q     = MODULI[MOD];

  logic clk = 0;
  logic [LOG_N-2:0] addr;
  word_t data [2][LOG_N];
  int checks = 0, failures = 0;

  for (genvar inv = 0; inv < 2; inv++) begin : g_dir
    for (genvar s = 0; s < LOG_N; s++) begin : g_t
      twiddle_rom #(.LOG_N(LOG_N), .MOD(MOD), .T(1 << s), .INVERSE(inv)) u_rom (
        .clk(clk), .addr(addr), .data(data[inv][s]));
    end
  end

  always #5 clk = ~clk;

  function automatic u64 pw(u64 b, int e);
    u64 r = 1;
    for (int i = 0; i < e; i++) r = (r * b) % Q;
    return r;
  endfunction

  function automatic int brv(int v);
    int r = 0;
    for (int b = 0; b < LOG_N; b++) if (v & (1 << b)) r |= 1 << (LOG_N - 1 - b);
    return r;
  endfunction

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u64 psi, psi_inv;
    psi = pw(PSI_8192[MOD], 8192 / (2 * N));
    psi_inv = pw(psi, 2 * N - 1);
    checks++;
    if (pw(psi, N) != Q - 1) begin failures++; $display("psi is not a 2N-th root"); end
    for (int c = 0; c < N / 2; c++) begin
      addr <= (LOG_N-1)'(c);
      @(posedge clk);
      #1;
      for (int inv = 0; inv < 2; inv++)
        for (int s = 0; s < LOG_N; s++) begin
          automatic int t = 1 << s;
          automatic u64 e = pw(inv ? psi_inv : psi, brv(N / (2 * t) + c / t));
          checks++;
          if (u64'(data[inv][s]) != e) begin
            failures++;
            if (failures < 8) $display("inv %0d T %0d c %0d got %0d exp %0d", inv, t, c, data[inv][s], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
