// mod_mult: pipelined W-bit modular multiplier r = a * b mod Q, Barrett reduction.
//
// The modulus is a fixed parameter, as the moduli of the scheme are known at
// design time, so the Barrett constant MU = floor(2^(2W)/Q) is a constant too.
// Three pipeline stages, each with one multiplier, as the source describes:
//   stage 1: x  = a * b                                   (2W bits)
//   stage 2: qh = ((x >> (W-1)) * MU) >> (W+1)            (estimate of x / Q)
//   stage 3: r  = x - qh * Q, then corrected into [0, Q)
// The estimate is at most two below the true quotient, so stage 3 picks among
// x - qh*Q, minus Q, minus 2Q.  The source counts one comparator and one
// multiplexer for the correction; this design uses two so that any product of
// two W-bit operands (not only of two residues below Q) is reduced exactly.
// Latency: 3 cycles, one result per cycle.  Inputs a, b < 2^W; Q odd, Q > 2^(W-1).
// Only the upper bits of the stage-2 product are the estimate; lint reports
// the discarded low W+1 bits as unused.
module mod_mult
  import he_pkg::*;
#(
  parameter longint unsigned Q = MODULI[0]
) (
  input  logic  clk,
  input  word_t a,
  input  word_t b,
  output word_t r
);
  localparam longint unsigned MU = barrett_mu(Q);
  localparam logic [W:0]      MU_W = MU[W:0];
  localparam logic [W-1:0]    Q_W  = Q[W-1:0];

  logic [2*W-1:0] x1, x2;
  logic [W:0]     qh2;

  logic [2*W+1:0] est;
  assign est = (2*W+2)'(x1[2*W-1:W-1]) * (2*W+2)'(MU_W);

  always_ff @(posedge clk) begin
    x1  <= (2*W)'(a) * (2*W)'(b);
    x2  <= x1;
    qh2 <= est[2*W+1:W+1];
  end

  logic [W+1:0] rem, rem1, rem2;
  always_comb begin
    rem  = (W+2)'(x2 - (2*W)'(qh2) * (2*W)'(Q_W));
    rem1 = rem - (W+2)'(Q_W);
    rem2 = rem - (W+2)'({Q_W, 1'b0});
  end

  always_ff @(posedge clk) begin
    if (!rem2[W+1])      r <= rem2[W-1:0];
    else if (!rem1[W+1]) r <= rem1[W-1:0];
    else                 r <= rem[W-1:0];
  end
endmodule
