// tb_ref_pkg: reference arithmetic for the testbenches, written directly from
// the definitions (no pipelining, no Barrett, no fast transforms):
//   - NTT by direct evaluation at the odd powers of psi, in the bit-reversed
//     order the hardware produces;
//   - negacyclic polynomial products by schoolbook convolution mod x^N + 1;
//   - fast basis conversion, ModDown and rescaling by their formulas.
package tb_ref_pkg;
  import he_pkg::*;

  typedef longint unsigned u64;
  typedef u64 poly_t [];

  function automatic u64 rnd(u64 m);
    u64 r = {$urandom(), $urandom()};
    return r % m;
  endfunction

  function automatic poly_t rand_poly(int n, u64 m);
    poly_t p = new[n];
    foreach (p[i]) p[i] = rnd(m);
    return p;
  endfunction

  // A[k] = sum_n a[n] * psi^((2*brv(k)+1)*n) mod q
  function automatic poly_t ntt_ref(poly_t a, int mod_i, int log_n);
    int n = 1 << log_n;
    u64 q = MODULI[mod_i];
    u64 psi = psi_n(mod_i, log_n);
    poly_t r = new[n];
    for (int k = 0; k < n; k++) begin
      u64 x = powmod(psi, 2 * bitrev(k, log_n) + 1, q);
      u64 acc = 0, xp = 1;
      for (int i = 0; i < n; i++) begin
        acc = (acc + mulmod(a[i], xp, q)) % q;
        xp = mulmod(xp, x, q);
      end
      r[k] = acc;
    end
    return r;
  endfunction

  // c = a * b mod (x^N + 1, q)
  function automatic poly_t negconv(poly_t a, poly_t b, u64 q);
    int n = a.size();
    poly_t c = new[n];
    foreach (c[i]) c[i] = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        u64 p = mulmod(a[i], b[j], q);
        if (i + j < n) c[i+j]     = (c[i+j] + p) % q;
        else           c[i+j-n]   = (c[i+j-n] + q - p) % q;
      end
    return c;
  endfunction

  function automatic poly_t padd(poly_t a, poly_t b, u64 q);
    poly_t c = new[a.size()];
    foreach (c[i]) c[i] = (a[i] + b[i]) % q;
    return c;
  endfunction

  function automatic poly_t pred(poly_t a, u64 q);
    poly_t c = new[a.size()];
    foreach (c[i]) c[i] = a[i] % q;
    return c;
  endfunction
endpackage
