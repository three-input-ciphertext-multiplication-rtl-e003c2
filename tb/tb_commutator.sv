// tb_commutator: self-checking test of the delay-switch-delay reordering.
// Coefficient positions are sent as data so that the pairing can be read off
// the output.  For N = 32: (a) forward use, input distance 8, D = 4, output
// must pair (j, j+4); (b) inverse use, input distance 2, D = 2, output must
// pair (j, j+4).  Two frames back to back, then one after a gap of N cycles.
// Output beat c' must carry idx c' and arrive D cycles after input beat c'.
module tb_commutator;
  import he_pkg::*;

  localparam int LOG_N = 5;
  localparam int N     = 1 << LOG_N;
  localparam int H     = N / 2;

  logic clk = 0, rst = 1;
  beat_t in_f, in_i, out_f, out_i;
  int checks = 0, failures = 0, cyc = 0;
  int first_in = -1, first_f = -1, first_i = -1, nf = 0, ni = 0;

  commutator #(.LOG_N(LOG_N), .D(4)) u_f (.clk(clk), .rst(rst), .in(in_f), .out(out_f));
  commutator #(.LOG_N(LOG_N), .D(2)) u_i (.clk(clk), .rst(rst), .in(in_i), .out(out_i));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // upper index of the pair seen in frame cycle c for butterfly distance t
  function automatic int upper(int c, int t);
    return 2 * t * (c / t) + (c % t);
  endfunction

  initial begin
    repeat (400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(beat_t o, int t, string name);
    int c = int'(o.idx);
    int j = upper(c, t);
    checks++;
    if (int'(o.d[0]) != j || int'(o.d[1]) != j + t) begin
      failures++;
      if (failures < 8) $display("%s c %0d got (%0d,%0d) exp (%0d,%0d)", name, c, o.d[0], o.d[1], j, j + t);
    end
  endtask

  always @(posedge clk) if (!rst) begin
    if (out_f.valid) begin
      if (first_f < 0) first_f = cyc;
      checks++;
      if (int'(out_f.idx) != nf % H) failures++;
      check(out_f, 4, "fwd");
      nf++;
    end
    if (out_i.valid) begin
      if (first_i < 0) first_i = cyc;
      checks++;
      if (int'(out_i.idx) != ni % H) failures++;
      check(out_i, 4, "inv");
      ni++;
    end
  end

  initial begin
    in_f = '0; in_i = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < 3; f++) begin
      if (f == 2) begin
        in_f <= '0; in_i <= '0;
        repeat (N) @(posedge clk);
      end
      for (int c = 0; c < H; c++) begin
        beat_t bf, bi;
        bf.valid = 1'b1; bf.idx = IDX_W'(c);
        bf.d[0] = word_t'(upper(c, 8)); bf.d[1] = word_t'(upper(c, 8) + 8);
        bi.valid = 1'b1; bi.idx = IDX_W'(c);
        bi.d[0] = word_t'(upper(c, 2)); bi.d[1] = word_t'(upper(c, 2) + 2);
        in_f <= bf; in_i <= bi;
        if (first_in < 0) first_in = cyc + 1;
        @(posedge clk);
      end
    end
    in_f <= '0; in_i <= '0;
    repeat (20) @(posedge clk);
    checks += 2;
    if (nf != 3 * H || ni != 3 * H) begin failures++; $display("beats out %0d %0d", nf, ni); end
    if (first_f - first_in != 4 || first_i - first_in != 2) begin
      failures++;
      $display("latency %0d %0d", first_f - first_in, first_i - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
