// twiddle_rom: twiddle-factor memory of one butterfly stage of the 2-parallel
// (inverse) NTT, N/2 words of W bits, synchronous read (1 cycle).
//
// Each processing element of the pipelined transform owns an N/2 x w memory,
// read with the cycle index of the 2-parallel frame (0 .. N/2-1).  For a stage
// whose butterflies pair coefficients at distance T, the pair seen in cycle c
// belongs to butterfly group g = c / T, and the negacyclic twiddle with the
// psi factor merged in is psi^brv(N/(2T) + g) for the forward transform and
// psi^-brv(N/(2T) + g) for the inverse (brv = log2(N)-bit reversal).  The
// contents are computed from the modulus and its root of unity when the
// memory is initialised, as the moduli are fixed at design time.  The memory
// size follows the source; the indexing and the formula are the standard
// merged-psi Cooley-Tukey / Gentleman-Sande schedule chosen for this design.
module twiddle_rom
  import he_pkg::*;
#(
  parameter int LOG_N   = 12,
  parameter int MOD     = 0,   // index into he_pkg::MODULI
  parameter int T       = 1,   // butterfly distance of the stage
  parameter bit INVERSE = 1'b0
) (
  input  logic             clk,
  input  logic [LOG_N-2:0] addr,
  output word_t            data
);
  localparam int HALF = 1 << (LOG_N - 1);

  word_t rom [HALF];

  // Fill: with S = N/(2T) groups, the exponent brv(S + g) equals
  // brv(S) + brv(g) for g < S, and brv(g + 2^k) = brv(g) + N/2^(k+1) for
  // g < 2^k.  The group twiddles are therefore built with one modular
  // multiplication each, by doubling the table, starting from psi^brv(S).
  initial begin
    longint unsigned q, psi, sq;
    word_t grp [HALF];
    q   = MODULI[MOD];
    psi = psi_n(MOD, LOG_N);
    if (INVERSE) psi = invmod(psi, q);
    // grp[0] = psi^brv(S) = psi^(T)  (brv of 2^s in log2 N bits is N/2^(s+1) = T)
    grp[0] = word_t'(powmod(psi, longint'(T), q));
    sq = powmod(psi, longint'(HALF), q);           // psi^brv(1) = psi^(N/2)
    for (int k = 1; k < HALF / T; k = 2 * k) begin
      for (int g = 0; g < k; g++) grp[g + k] = word_t'(mulmod(longint'(grp[g]), sq, q));
      sq = powmod(psi, longint'(HALF) / longint'(2 * k), q); // psi^brv(2k)
    end
    for (int c = 0; c < HALF; c++) rom[c] = grp[c / T];
  end

  always_ff @(posedge clk) data <= rom[addr];
endmodule
