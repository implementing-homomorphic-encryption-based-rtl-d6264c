// tb_ref_pkg: independent big-integer reference model used by the testbenches.
//
// Everything here uses plain wide-integer division (%, /) on BW-bit values, so
// it shares no arithmetic with the Montgomery datapath under test.  It derives
// every Paillier key constant the hardware needs from two primes p and q:
//   N, N^2, N^2+2, M' = -M^-1 mod 2^16 for each modulus, lambda = lcm(p-1,q-1),
//   mu = lambda^-1 mod N, R mod N^2, R^2 mod N^2, N R mod N^2,
//   N^-1 R^2 mod (N^2+2) and mu R^2 mod N, with R = 2^opw,
// and provides textbook Paillier encryption / decryption and conversion to
// and from Montgomery form.
package tb_ref_pkg;

  localparam int BW = 1200;
  typedef logic [BW-1:0] big_t;

  function automatic big_t mulmod(big_t a, big_t b, big_t m);
    return (a * b) % m;
  endfunction

  function automatic big_t powmod(big_t b, big_t e, big_t m);
    big_t r = 1 % m;
    big_t x = b % m;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, m);
      x = mulmod(x, x, m);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic big_t gcd(big_t a, big_t b);
    big_t t;
    while (b != 0) begin
      t = a % b; a = b; b = t;
    end
    return a;
  endfunction

  // a^-1 mod m by the extended Euclidean algorithm, coefficients kept in [0,m).
  function automatic big_t modinv(big_t a, big_t m);
    big_t r0 = m, r1 = a % m, t0 = 0, t1 = 1, q, tmp;
    while (r1 != 0) begin
      q   = r0 / r1;
      tmp = r0 - q * r1; r0 = r1; r1 = tmp;
      tmp = (t0 + m - mulmod(q, t1, m)) % m; t0 = t1; t1 = tmp;
    end
    return t0;
  endfunction

  typedef struct {
    big_t n, n2, n2p2, lambda, mu, r, rinv_n2;
    big_t one_n2, r2_n2, nr_n2, ninv_r2, mu_r2;
    logic [15:0] mp_n2, mp_n2p2, mp_n;
  } key_t;

  function automatic logic [15:0] mprime_of(big_t m);
    big_t inv = modinv(m % 65536, 65536);
    return 16'((65536 - inv) % 65536);
  endfunction

  function automatic key_t make_key(big_t p, big_t q, int opw);
    key_t k;
    big_t r2;
    k.n      = p * q;
    k.n2     = k.n * k.n;
    k.n2p2   = k.n2 + 2;
    k.lambda = ((p - 1) * (q - 1)) / gcd(p - 1, q - 1);
    k.mu     = modinv(k.lambda % k.n, k.n);
    k.r      = big_t'(1) << opw;
    r2       = big_t'(1) << (2 * opw);
    k.one_n2 = k.r % k.n2;
    k.rinv_n2 = modinv(k.one_n2, k.n2);
    k.r2_n2  = r2 % k.n2;
    k.nr_n2  = mulmod(k.n, k.r, k.n2);
    k.ninv_r2 = mulmod(modinv(k.n, k.n2p2), r2 % k.n2p2, k.n2p2);
    k.mu_r2  = mulmod(k.mu, r2 % k.n, k.n);
    k.mp_n2  = mprime_of(k.n2);
    k.mp_n2p2 = mprime_of(k.n2p2);
    k.mp_n   = mprime_of(k.n);
    return k;
  endfunction

  // Textbook Paillier: E(t) = (1 + N t) r^N mod N^2.
  function automatic big_t encrypt(key_t k, big_t t, big_t r);
    return mulmod((1 + k.n * (t % k.n)) % k.n2, powmod(r, k.n, k.n2), k.n2);
  endfunction

  // D(c) = L(c^lambda mod N^2) mu mod N, L(u) = (u-1)/N.
  function automatic big_t decrypt(key_t k, big_t c);
    big_t u = powmod(c, k.lambda, k.n2);
    return mulmod((u - 1) / k.n, k.mu, k.n);
  endfunction

  function automatic big_t to_mont(key_t k, big_t c);
    return mulmod(c, k.r % k.n2, k.n2);
  endfunction

  function automatic big_t from_mont(key_t k, big_t cm);
    return mulmod(cm % k.n2, k.rinv_n2, k.n2);
  endfunction

  // Decrypt a ciphertext held in (modified) Montgomery form.
  function automatic big_t decrypt_mont(key_t k, big_t cm);
    return decrypt(k, from_mont(k, cm));
  endfunction

  // A pseudo-random value in [1, m).
  function automatic big_t rand_below(big_t m);
    big_t v = 0;
    for (int i = 0; i < BW / 32; i++) v = (v << 32) | big_t'($urandom);
    v = v % m;
    return (v == 0) ? 1 : v;
  endfunction

endpackage
