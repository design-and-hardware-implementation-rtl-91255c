// tb_pkg -- reference arithmetic for the testbenches: modular
// exponentiation, inverses, Paillier encryption/decryption and test keys,
// computed with plain 64-bit integers, independently of the RTL.
package tb_pkg;

  typedef longint unsigned u64;

  function automatic u64 mulmod(u64 a, u64 b, u64 m);
    return (a * b) % m;            // operands < 2^24, product < 2^48
  endfunction

  function automatic u64 powmod(u64 b, u64 e, u64 m);
    u64 r = 1 % m;
    b = b % m;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, m);
      b = mulmod(b, b, m);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic u64 gcd(u64 a, u64 b);
    while (b != 0) begin
      u64 t = a % b;
      a = b;
      b = t;
    end
    return a;
  endfunction

  // inverse of a mod m by exhaustive search (m is small)
  function automatic u64 modinv(u64 a, u64 m);
    for (u64 x = 1; x < m; x++) if (mulmod(a, x, m) == 1) return x;
    return 0;
  endfunction

  // Montgomery product with R = 2^w
  function automatic u64 montp(u64 x, u64 y, u64 m, int w);
    u64 rinv = modinv((u64'(1) << w) % m, m);
    return mulmod(mulmod(x, y, m), rinv, m);
  endfunction

  // A Paillier key, with the constants the hardware expects.
  typedef struct {
    u64 p, q, n, n2, g, lambda, mu, r2;
  } key_t;

  function automatic key_t make_key(u64 p, u64 q, u64 g_off);
    key_t k;
    u64 l, lg;
    k.p      = p;
    k.q      = q;
    k.n      = p * q;
    k.n2     = k.n * k.n;
    k.g      = (k.n + 1 + g_off * k.n) % k.n2;   // g = (1 + n)(...) form: 1 + (1+g_off) n
    l        = ((p - 1) * (q - 1)) / gcd(p - 1, q - 1);
    k.lambda = l;
    lg       = (powmod(k.g, l, k.n2) - 1) / k.n;
    k.mu     = modinv(lg % k.n, k.n);
    k.r2     = (u64'(1) << 48) % k.n2;
    return k;
  endfunction

  function automatic u64 enc(key_t k, u64 m, u64 r);
    return mulmod(powmod(k.g, m, k.n2), powmod(r, k.n, k.n2), k.n2);
  endfunction

  function automatic u64 dec(key_t k, u64 c);
    u64 u = powmod(c, k.lambda, k.n2);
    return mulmod((u - 1) / k.n, k.mu, k.n);
  endfunction

  // a random r in Z*_n
  function automatic u64 rand_r(key_t k);
    u64 r;
    do r = u64'($urandom) % k.n; while (r == 0 || gcd(r, k.n) != 1);
    return r;
  endfunction

endpackage
