// intt: 2-parallel pipelined negacyclic inverse NTT over one RNS modulus,
// N = 2^LOG_N coefficients, two coefficients per clock cycle.
//
// Structure (as in the source): log2 N processing elements (intt_pe) with
// delay/switch commutators in between.  Stage s pairs coefficients at
// distance T = 2^s (Gentleman-Sande order); the commutator after stage s has
// delay T.  Every PE halves its outputs, so the result carries the 1/N factor.
// Input frame: the output order of ntt, beat c = (A[2c], A[2c+1]) with A in
// bit-reversed order.  Output frame: natural order, beat c = (a[c], a[c+N/2]).
// Twiddle sharing: LANES lock-step transforms over the same modulus share one
// N/2-word twiddle memory per stage, as in ntt.  The memory is addressed with
// lane 0's index one cycle after the beat enters the stage (a register here),
// so its word meets the PE's subtract/halve stage.
// Latency: 5*log2 N + N/2 - 1 cycles, as for the forward transform.
module intt
  import he_pkg::*;
#(
  parameter int LOG_N = 12,
  parameter int MOD   = 0,
  parameter int LANES = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t in  [LANES],
  output beat_t out [LANES]
);

  beat_t pe_in  [LOG_N][LANES];
  beat_t pe_out [LOG_N][LANES];
  logic [LOG_N-2:0] tw_addr [LOG_N];
  word_t            tw      [LOG_N];

  assign pe_in[0] = in;

  for (genvar s = 0; s < LOG_N; s++) begin : g_stage
    localparam int T = 1 << s;
    always_ff @(posedge clk) tw_addr[s] <= pe_in[s][0].idx[LOG_N-2:0];
    twiddle_rom #(.LOG_N(LOG_N), .MOD(MOD), .T(T), .INVERSE(1'b1)) u_rom (
      .clk(clk), .addr(tw_addr[s]), .data(tw[s]));
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      intt_pe #(.MOD(MOD)) u_pe (
        .clk(clk), .rst(rst), .in(pe_in[s][l]), .tw(tw[s]), .out(pe_out[s][l]));
      if (s < LOG_N - 1) begin : g_comm
        commutator #(.LOG_N(LOG_N), .D(T)) u_comm (
          .clk(clk), .rst(rst), .in(pe_out[s][l]), .out(pe_in[s+1][l]));
      end
    end
  end

  for (genvar l = 1; l < LANES; l++) begin : g_chk
    a_lock: assert property (@(posedge clk) disable iff (rst)
        in[l].valid == in[0].valid && (!in[0].valid || in[l].idx == in[0].idx))
      else $error("intt lane %0d out of step with lane 0", l);
  end

  assign out = pe_out[LOG_N-1];
endmodule
