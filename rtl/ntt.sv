// ntt: 2-parallel pipelined negacyclic number theoretic transform over one
// RNS modulus, N = 2^LOG_N coefficients, two coefficients per clock cycle.
//
// Structure (as in the source): log2 N processing elements (ntt_pe), one per
// butterfly stage, with delay/switch commutators in between.  Stage s pairs
// coefficients at distance T = N / 2^(s+1); the commutator before stage s+1
// has delay T/2.  The transform is the merged-psi Cooley-Tukey NTT, so the
// negacyclic (x^N + 1) wrap needs no pre-multiplication.
// Input frame: N/2 consecutive beats, beat c = (a[c], a[c + N/2]), idx = c.
// Output frame: beat c = (A[2c], A[2c+1]) where A is the NTT in bit-reversed
// order, A[k] = a(psi^(2*brv(k)+1)) mod q.  The inverse transform (intt)
// accepts exactly this order.
// Twiddle sharing: LANES transforms over the same modulus whose frames run in
// lock step (same idx in every cycle) are built as one ntt with LANES lanes.
// Each stage then has a single N/2-word twiddle memory, read with lane 0's
// index, that feeds the PEs of every lane, as the source suggests for blocks
// that read the same twiddle sequence.  An assertion checks the lock step.
// Latency: 5*log2 N + N/2 - 1 cycles from a beat of stage 0 to the matching
// beat of the output frame, the number of pipeline stages given in the source.
module ntt
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
  localparam int N = 1 << LOG_N;

  beat_t pe_in  [LOG_N][LANES];
  beat_t pe_out [LOG_N][LANES];
  word_t tw     [LOG_N];

  assign pe_in[0] = in;

  for (genvar s = 0; s < LOG_N; s++) begin : g_stage
    localparam int T = N >> (s + 1);
    twiddle_rom #(.LOG_N(LOG_N), .MOD(MOD), .T(T), .INVERSE(1'b0)) u_rom (
      .clk(clk), .addr(pe_in[s][0].idx[LOG_N-2:0]), .data(tw[s]));
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      ntt_pe #(.MOD(MOD)) u_pe (
        .clk(clk), .rst(rst), .in(pe_in[s][l]), .tw(tw[s]), .out(pe_out[s][l]));
      if (s < LOG_N - 1) begin : g_comm
        commutator #(.LOG_N(LOG_N), .D(T / 2)) u_comm (
          .clk(clk), .rst(rst), .in(pe_out[s][l]), .out(pe_in[s+1][l]));
      end
    end
  end

  for (genvar l = 1; l < LANES; l++) begin : g_chk
    a_lock: assert property (@(posedge clk) disable iff (rst)
        in[l].valid == in[0].valid && (!in[0].valid || in[l].idx == in[0].idx))
      else $error("ntt lane %0d out of step with lane 0", l);
  end

  assign out = pe_out[LOG_N-1];
endmodule
