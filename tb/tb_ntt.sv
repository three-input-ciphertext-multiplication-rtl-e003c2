// tb_ntt: self-checking test of the 2-parallel forward NTT, built with two
// lanes that share the twiddle memories.
// Streams four random polynomials (three back to back, one after a gap) for
// N = 32 through the transform and compares every output beat with a direct
// evaluation of the negacyclic NTT in bit-reversed order.  Also checks the
// latency 5*log2 N + N/2 - 1 from the first input beat to the first output beat.
module tb_ntt;
  import he_pkg::*;
  import tb_ref_pkg::*;

  localparam int LOG_N = 5;
  localparam int N     = 1 << LOG_N;
  localparam int MOD   = 1;
  localparam int FRAMES = 4;

  logic clk = 0, rst = 1;
  beat_t in, out;
  int checks = 0, failures = 0;
  int cyc = 0;
  int first_in = -1, first_out = -1;
  poly_t a [FRAMES];
  poly_t e [FRAMES];
  int out_frame = 0, out_beats = 0;

  // Two lanes share the twiddle memories: lane 1 carries the negated input,
  // so its output must be the negated output of lane 0.
  beat_t ins [2], outs [2];
  ntt #(.LOG_N(LOG_N), .MOD(MOD), .LANES(2)) dut (.clk(clk), .rst(rst), .in(ins), .out(outs));

  function automatic word_t negq(word_t x);
    return (x == '0) ? '0 : word_t'(MODULI[MOD] - u64'(x));
  endfunction

  always_comb begin
    ins[0] = in;
    ins[1] = in;
    for (int l = 0; l < 2; l++) ins[1].d[l] = negq(in.d[l]);
    out = outs[0];
  end

  always @(posedge clk) if (!rst) begin
    checks++;
    if (outs[1].valid != outs[0].valid || (outs[0].valid &&
        (outs[1].idx != outs[0].idx || outs[1].d[0] != negq(outs[0].d[0]) ||
         outs[1].d[1] != negq(outs[0].d[1])))) begin
      failures++;
      if (failures < 10) $display("lane 1 differs from the negated lane 0 at cycle %0d", cyc);
    end
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out.valid) begin
    if (first_out < 0) first_out = cyc;
    if (out.idx != IDX_W'(out_beats)) begin
      failures++;
      $display("idx mismatch frame %0d beat %0d got %0d", out_frame, out_beats, out.idx);
    end
    for (int l = 0; l < 2; l++) begin
      checks++;
      if (u64'(out.d[l]) != e[out_frame][2*out_beats+l]) begin
        failures++;
        if (failures < 10) $display("frame %0d beat %0d lane %0d got %0d exp %0d",
          out_frame, out_beats, l, out.d[l], e[out_frame][2*out_beats+l]);
      end
    end
    out_beats++;
    if (out_beats == N / 2) begin out_beats = 0; out_frame++; end
  end

  initial begin
    in = '0;
    for (int f = 0; f < FRAMES; f++) begin
      a[f] = rand_poly(N, MODULI[MOD]);
      e[f] = ntt_ref(a[f], MOD, LOG_N);
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      if (f == 3) begin in <= '0; repeat (N) @(posedge clk); end
      for (int c = 0; c < N / 2; c++) begin
        in.valid <= 1'b1;
        in.idx   <= IDX_W'(c);
        in.d[0]  <= word_t'(a[f][c]);
        in.d[1]  <= word_t'(a[f][c + N/2]);
        if (first_in < 0) first_in = cyc + 1;
        @(posedge clk);
      end
    end
    in <= '0;
    wait (out_frame == FRAMES);
    repeat (5) @(posedge clk);
    checks++;
    if (first_out - first_in != 5 * LOG_N + N / 2 - 1) begin
      failures++;
      $display("latency %0d, expected %0d", first_out - first_in, 5 * LOG_N + N / 2 - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
