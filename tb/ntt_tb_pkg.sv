// ntt_tb_pkg: arbitrary-precision reference arithmetic for the testbenches.
//
// Everything is computed on 512-bit integers, enough for words of up to 256
// bits and their products. Provides modular multiplication and powers, a
// search for a primitive n-th root of unity, conversion into Montgomery form
// (R = 2^w), -Q^-1 mod 2^d, a word-level model of digit-serial Montgomery
// multiplication (the exact value the hardware must produce), bit reversal and
// a direct O(n^2) NTT.
package ntt_tb_pkg;

  typedef logic [511:0] big_t;

  function automatic big_t mulmod(big_t a, big_t b, big_t q);
    return (a * b) % q;
  endfunction

  function automatic big_t powmod(big_t b, big_t e, big_t q);
    big_t r = 1;
    big_t x = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, q);
      x = mulmod(x, x, q);
      e = e >> 1;
    end
    return r;
  endfunction

  // a primitive n-th root of unity modulo prime q (n a power of two, n | q-1)
  function automatic big_t find_root(big_t q, int unsigned n);
    big_t w;
    for (int g = 2; g < 1000; g++) begin
      w = powmod(big_t'(g), (q - 1) / n, q);
      if (n == 1) return 1;
      if (powmod(w, big_t'(n / 2), q) == q - 1) return w;
    end
    return 0;
  endfunction

  // a * 2^w mod q
  function automatic big_t to_mont(big_t a, big_t q, int unsigned w);
    return ((a % q) << w) % q;
  endfunction

  // -q^-1 mod 2^d (q odd)
  function automatic big_t neg_qinv(big_t q, int unsigned d);
    big_t inv = 1;
    big_t mask = (big_t'(1) << d) - 1;
    for (int i = 0; i < 10; i++) inv = inv * (2 - q * inv);
    return (-inv) & mask;
  endfunction

  // word-level radix-2^d Montgomery multiplication, k digits:
  // S <- (S + x*w_i + m*q) / 2^d for each digit w_i of w
  function automatic big_t mont_mul(big_t x, big_t w, big_t q, int unsigned d, int unsigned k);
    big_t s = 0;
    big_t mask = (big_t'(1) << d) - 1;
    big_t qi = neg_qinv(q, d);
    big_t wi, t, m;
    for (int unsigned i = 0; i < k; i++) begin
      wi = (w >> (i * d)) & mask;
      t  = s + x * wi;
      m  = ((t & mask) * qi) & mask;
      s  = (t + m * q) >> d;
    end
    return s;
  endfunction

  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  // direct NTT: out[k] = sum_j a[j] * w^(j*k) mod q
  function automatic void ntt_direct(input big_t a[], input big_t w, input big_t q,
                                     output big_t out[]);
    int unsigned n = a.size();
    big_t pw[];
    pw = new[n];
    out = new[n];
    pw[0] = 1;
    for (int unsigned i = 1; i < n; i++) pw[i] = mulmod(pw[i-1], w, q);
    for (int unsigned k = 0; k < n; k++) begin
      big_t acc = 0;
      for (int unsigned j = 0; j < n; j++) begin
        acc = acc + mulmod(a[j], pw[(j * k) % n], q);
        if (acc >= q) acc = acc - q;
      end
      out[k] = acc;
    end
  endfunction

endpackage
