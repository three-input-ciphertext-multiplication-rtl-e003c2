// he_pkg: shared types, RNS moduli and constant functions of the 3-input
// ciphertext multiplier.
//
// Every datapath word is W = 30 bits, the modulus width used for the area
// example (L = K = 3, log2 N = 12, w = 30).  The six moduli below are this
// design's own choice (the source gives no concrete primes): they are the six
// largest 30-bit primes with q = 1 (mod 8192), so each has a primitive 8192-th
// root of unity psi and supports a negacyclic NTT of any length N <= 4096.
// Index 0..2 are the ciphertext moduli q_0..q_2, index 3..5 the special
// moduli p_0..p_2 of P.  A design with L < 3 or K < 3 uses the first entries.
//
// A "beat" is one clock cycle of a 2-parallel polynomial stream: two
// coefficients plus a valid bit and the cycle index inside the N/2-cycle
// frame.  All constant functions are evaluated at elaboration time or in ROM
// initialisation and are not meant to become hardware; their int arguments
// are modulus indices, so lint reports their upper bits as unused.
package he_pkg;

  localparam int W          = 30;    // bit width of one residue
  localparam int IDX_W      = 16;    // frame cycle index width (N/2 <= 2^16)
  localparam int MAX_LOG_N  = 12;    // largest supported transform, N = 4096
  localparam int NUM_MOD    = 6;     // q_0..q_2, p_0..p_2
  localparam int MAX_L      = 3;

  typedef logic [W-1:0] word_t;

  typedef struct packed {
    logic             valid;
    logic [IDX_W-1:0] idx;    // cycle index inside the frame, 0 .. N/2-1
    word_t [1:0]      d;      // d[0] = upper lane, d[1] = lower lane
  } beat_t;


  // Moduli and primitive 8192-th roots of unity (psi^4096 = -1 mod q).
  localparam longint unsigned MODULI [NUM_MOD] = '{
    64'd1073692673, 64'd1073668097, 64'd1073651713,
    64'd1073643521, 64'd1073569793, 64'd1073479681};
  localparam longint unsigned PSI_8192 [NUM_MOD] = '{
    64'd510015274,  64'd1047115509, 64'd724005969,
    64'd917716233,  64'd1067926601, 64'd371836615};

  // Index into MODULI of q_j and of p_i.
  function automatic int q_idx(int j);
    return j;
  endfunction
  function automatic int p_idx(int i);
    return MAX_L + i;
  endfunction

  // ---------------------------------------------------------------------
  // Scalar modular helpers (64-bit arithmetic, operands below 2^30)
  // ---------------------------------------------------------------------
  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b,
                                             longint unsigned m);
    return ((a % m) * (b % m)) % m;
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned m);
    longint unsigned r = 1;
    longint unsigned x = b % m;
    longint unsigned k = e;
    while (k != 0) begin
      if (k[0]) r = mulmod(r, x, m);
      x = mulmod(x, x, m);
      k = k >> 1;
    end
    return r;
  endfunction

  // Inverse modulo a prime (Fermat).
  function automatic longint unsigned invmod(longint unsigned a, longint unsigned m);
    return powmod(a, m - 2, m);
  endfunction

  function automatic int clog2(longint unsigned v);
    int r = 0;
    while ((64'd1 << r) < v) r++;
    return r;
  endfunction

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) r = (r << 1) | ((v >> b) & 1);
    return r;
  endfunction

  // Barrett constant mu = floor(2^(2W) / q).
  function automatic longint unsigned barrett_mu(longint unsigned q);
    return (64'd1 << (2 * W)) / q;
  endfunction

  // Primitive 2N-th root of unity for modulus index m.
  function automatic longint unsigned psi_n(int m, int log_n);
    return powmod(PSI_8192[m], 64'd1 << (MAX_LOG_N - log_n), MODULI[m]);
  endfunction

  // ---------------------------------------------------------------------
  // Fast basis conversion and rescaling constants
  // ---------------------------------------------------------------------
  // [ (prod_{k<n, k!=j} b_k)^-1 ]_{b_j}, basis b = MODULI[base .. base+n-1]
  function automatic longint unsigned hat_inv(int base, int n, int j);
    longint unsigned h = 1;
    longint unsigned m = MODULI[base + j];
    for (int k = 0; k < n; k++)
      if (k != j) h = mulmod(h, MODULI[base + k], m);
    return invmod(h, m);
  endfunction

  // [ prod_{k<n, k!=j} b_k ]_{t}, basis b = MODULI[base ..], target modulus t
  function automatic longint unsigned hat_mod(int base, int n, int j, longint unsigned t);
    longint unsigned h = 1;
    for (int k = 0; k < n; k++)
      if (k != j) h = mulmod(h, MODULI[base + k], t);
    return h;
  endfunction

  // [ (prod of the K special moduli)^-1 ]_{t}
  function automatic longint unsigned p_inv_mod(int k_num, longint unsigned t);
    longint unsigned h = 1;
    for (int i = 0; i < k_num; i++) h = mulmod(h, MODULI[p_idx(i)], t);
    return invmod(h, t);
  endfunction

  // ---------------------------------------------------------------------
  // Combinational modular adders (two adders, one comparator, one mux)
  // ---------------------------------------------------------------------
  function automatic word_t add_mod(word_t a, word_t b, word_t q);
    logic [W:0] s = {1'b0, a} + {1'b0, b};
    logic [W:0] t = s - {1'b0, q};
    return t[W] ? s[W-1:0] : t[W-1:0];
  endfunction

  function automatic word_t sub_mod(word_t a, word_t b, word_t q);
    logic [W:0] s = {1'b0, a} - {1'b0, b};
    word_t      t = s[W-1:0] + q;
    return s[W] ? t : s[W-1:0];
  endfunction

  // a / 2 mod q for odd q: (a + (a odd ? q : 0)) >> 1
  function automatic word_t half_mod(word_t a, word_t q);
    return word_t'(({1'b0, a} + (a[0] ? {1'b0, q} : '0)) >> 1);
  endfunction

endpackage
