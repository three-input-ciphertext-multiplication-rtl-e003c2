// tb_intt_pe: self-checking test of the inverse butterfly PE.
// For N = 32 and stage distance T = 4, random pairs (a, b) with random frame
// indices c are applied (with idle cycles); expected outputs are
// ((a + b)/2, w (a - b)/2) mod q with w = psi^-brv(N/(2T) + c/T), computed by
// repeated multiplication.  Each result must appear 5 cycles after its input.
module tb_intt_pe;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int LOG_N = 5, N = 1 << LOG_N, T = 4, MOD = 3, LAT = 5, NB = 400;
  localparam u64 Q = MODULI[MOD];

  typedef struct { int cyc; u64 d [2]; } exp_t;

  logic clk = 0, rst = 1;
  beat_t in, out;
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  exp_t sb [$];
  u64 psi;

  // The PE with its twiddle memory, read one cycle after the beat.
  word_t tw;
  logic [LOG_N-2:0] tw_addr;
  always_ff @(posedge clk) tw_addr <= in.idx[LOG_N-2:0];
  twiddle_rom #(.LOG_N(LOG_N), .MOD(MOD), .T(T), .INVERSE(1'b1)) u_rom (
    .clk(clk), .addr(tw_addr), .data(tw));
  intt_pe #(.MOD(MOD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

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
    repeat (NB * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out.valid) begin
    exp_t e;
    if (sb.size() == 0) failures++;
    else begin
      e = sb.pop_front();
      checks++;
      if (cyc != e.cyc) begin failures++; $display("latency: out at %0d, exp %0d", cyc, e.cyc); end
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (u64'(out.d[l]) != e.d[l]) begin
          failures++;
          if (failures < 8) $display("lane %0d got %0d exp %0d", l, out.d[l], e.d[l]);
        end
      end
    end
  end

  initial begin
    psi = pw(PSI_8192[MOD], 8192 / (2 * N));
    in = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic bit v = ($urandom_range(0, 3) != 0);
      automatic int c = $urandom_range(0, N / 2 - 1);
      automatic u64 a = rnd(Q), b = (n < 3) ? Q - 1 : rnd(Q);
      automatic u64 w = pw(psi, 2 * N - brv(N / (2 * T) + c / T)), h = (Q + 1) / 2;
      automatic exp_t e;
      beat_t bt;
      bt.valid = v; bt.idx = IDX_W'(c);
      bt.d[0] = word_t'(a); bt.d[1] = word_t'(b);
      in <= bt;
      if (v) begin
        e.cyc = cyc + 1 + LAT;
        e.d[0] = (((a + b) % Q) * h) % Q;
        e.d[1] = (((((a + Q - b) % Q) * h) % Q) * w) % Q;
        sb.push_back(e);
        seen++;
      end
      @(posedge clk);
    end
    in <= '0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (sb.size() != 0 || seen == 0) begin failures++; $display("%0d results missing", sb.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
