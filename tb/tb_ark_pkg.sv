// tb_ark_pkg: reference arithmetic shared by the ARK testbenches.
//
// Plain modular arithmetic on 64-bit words through 128-bit intermediates,
// used to compute expected values independently of the RTL. PRIMES are
// primes just above 2^59 with q = 1 mod 2^17; ROOT17[i] is an element of
// order 2^17 modulo PRIMES[i], so a primitive n-th root of unity for any
// power of two n <= 2^17 is ROOT17^(2^17/n).
package tb_ark_pkg;
  typedef logic [63:0]  u64;
  typedef logic [127:0] u128;

  localparam u64 PRIMES [8] = '{64'h8000000004a0001, 64'h800000000b80001,
                                64'h800000000ee0001, 64'h800000000f40001,
                                64'h800000001160001, 64'h800000001540001,
                                64'h8000000017c0001, 64'h800000001880001};
  localparam u64 ROOT17 [8] = '{64'h5d9d2f5a58bb171, 64'h5b254c7fe85cb48,
                                64'h74566f0557f9b53, 64'h0b5c1c3f72a0914,
                                64'h0ec05a3163b037f, 64'h47743f695fdd2a9,
                                64'h13eef5c47add4f2, 64'h65a14d932cb1af4};

  function automatic u64 mulmod(u64 a, u64 b, u64 q);
    u128 p = u128'(a) * u128'(b);
    return u64'(p % u128'(q));
  endfunction
  function automatic u64 addmod(u64 a, u64 b, u64 q);
    u128 s = u128'(a) + u128'(b);
    return u64'(s % u128'(q));
  endfunction
  function automatic u64 submod(u64 a, u64 b, u64 q);
    u128 s = u128'(a) + u128'(q) - u128'(b % q);
    return u64'(s % u128'(q));
  endfunction
  function automatic u64 powmod(u64 b, u64 e, u64 q);
    u64 r = 1;
    u64 x = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, q);
      x = mulmod(x, x, q);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic u64 invmod(u64 a, u64 q);
    return powmod(a, q - 2, q);
  endfunction
  // Montgomery form x * 2^64 mod q
  function automatic u64 mont(u64 x, u64 q);
    u128 t = {x % q, 64'd0};
    return u64'(t % u128'(q));
  endfunction
  // -q^-1 mod 2^64 (Newton iteration)
  function automatic u64 qinv_of(u64 q);
    u64 inv = 1;
    for (int i = 0; i < 7; i++) inv = inv * (64'd2 - q * inv);
    return -inv;
  endfunction
  function automatic u64 root_of(int idx, int unsigned n);
    return powmod(ROOT17[idx], 64'((1 << 17) / n), PRIMES[idx]);
  endfunction
  // Reference cyclic NTT, X[k] = sum_n a[n] * w^(n*k) mod q, in place, for
  // a power-of-two length: textbook radix-2 decimation in time
  // (bit-reversal permutation, then log2(n) butterfly passes).
  function automatic void ntt_ref(ref u64 a [], input u64 w, input u64 q);
    int n = a.size();
    int lg = $clog2(n);
    for (int i = 0; i < n; i++) begin
      int r = 0;
      for (int b = 0; b < lg; b++) if (i[b]) r |= 1 << (lg - 1 - b);
      if (r > i) begin u64 t = a[i]; a[i] = a[r]; a[r] = t; end
    end
    for (int len = 2; len <= n; len *= 2) begin
      u64 wl = powmod(w, 64'(n / len), q);
      for (int st = 0; st < n; st += len) begin
        u64 wk = 1;
        for (int k = 0; k < len / 2; k++) begin
          u64 u = a[st + k];
          u64 v = mulmod(a[st + k + len / 2], wk, q);
          a[st + k] = addmod(u, v, q);
          a[st + k + len / 2] = submod(u, v, q);
          wk = mulmod(wk, wl, q);
        end
      end
    end
  endfunction
  function automatic u64 rnd(u64 q);
    u64 r = {$urandom, $urandom};
    return r % q;
  endfunction
endpackage
