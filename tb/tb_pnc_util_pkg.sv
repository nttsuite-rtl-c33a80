// tb_pnc_util_pkg: reference arithmetic for the NTT testbenches.
//
// Everything here is computed the slow, obvious way with 64-bit integer
// division, independently of the hardware's Shoup reduction and Pease
// schedule: modular add/sub/mul, modular power, a primitive N-th root of unity,
// the Shoup quotient floor(w * 2^32 / p) and a direct O(N^2) transform.
package tb_pnc_util_pkg;

  // 2^32 - 2^20 + 1, prime; p - 1 is divisible by 2^20.
  localparam longint unsigned P_DEFAULT = 64'hFFF0_0001;

  function automatic longint unsigned addm(longint unsigned a, longint unsigned b, longint unsigned p);
    return (a + b) % p;
  endfunction

  function automatic longint unsigned subm(longint unsigned a, longint unsigned b, longint unsigned p);
    return (a + p - b) % p;
  endfunction

  function automatic longint unsigned mulm(longint unsigned a, longint unsigned b, longint unsigned p);
    return (a * b) % p;   // a, b < 2^32, so the product fits in 64 bits
  endfunction

  function automatic longint unsigned powm(longint unsigned b, longint unsigned e, longint unsigned p);
    longint unsigned r = 1;
    b = b % p;
    while (e != 0) begin
      if (e[0]) r = mulm(r, b, p);
      b = mulm(b, b, p);
      e = e >> 1;
    end
    return r;
  endfunction

  // Primitive n-th root of unity mod p (n a power of two dividing p - 1).
  function automatic longint unsigned root_of_unity(longint unsigned n, longint unsigned p);
    for (longint unsigned g = 2; g < 1000; g++) begin
      longint unsigned w = powm(g, (p - 1) / n, p);
      if (n == 1 || powm(w, n / 2, p) != 1) return w;
    end
    return 0;
  endfunction

  // Shoup quotient floor(w * 2^32 / p), w < p < 2^32.
  function automatic longint unsigned shoup(longint unsigned w, longint unsigned p);
    return (w << 32) / p;
  endfunction

  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) if (v[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // Direct transform X[k] = sum_n x[n] w^(nk) mod p.
  function automatic void dft(input longint unsigned x[], input longint unsigned w,
                              input longint unsigned p, output longint unsigned y[]);
    int unsigned n = x.size();
    longint unsigned wk, wkn;
    y = new[n];
    wk = 1;
    for (int unsigned k = 0; k < n; k++) begin
      longint unsigned acc = 0;
      wkn = 1;
      for (int unsigned i = 0; i < n; i++) begin
        acc = (acc + x[i] * wkn) % p;
        wkn = mulm(wkn, wk, p);
      end
      y[k] = acc;
      wk = mulm(wk, w, p);
    end
  endfunction

  // The same transform by the textbook in-place iterative Cooley-Tukey
  // algorithm (bit-reversal permutation, then radix-2 DIT passes with strides
  // 1, 2, 4, ...), for sizes where the direct transform is too slow. It shares
  // nothing with the hardware's constant-geometry schedule.
  function automatic void fast_ntt(input longint unsigned x[], input longint unsigned w,
                                   input longint unsigned p, output longint unsigned y[]);
    int unsigned n = x.size();
    int unsigned lg = $clog2(n);
    y = new[n];
    for (int unsigned i = 0; i < n; i++) y[bitrev(i, lg)] = x[i];
    for (int unsigned len = 2; len <= n; len = len * 2) begin
      longint unsigned wl = powm(w, n / len, p);
      for (int unsigned st = 0; st < n; st += len) begin
        longint unsigned t = 1;
        for (int unsigned k = 0; k < len / 2; k++) begin
          longint unsigned u = y[st + k];
          longint unsigned v = mulm(y[st + k + len / 2], t, p);
          y[st + k]           = addm(u, v, p);
          y[st + k + len / 2] = subm(u, v, p);
          t = mulm(t, wl, p);
        end
      end
    end
  endfunction

  // Random residue below p.
  function automatic longint unsigned rand_res(longint unsigned p);
    longint unsigned r = {$urandom(), $urandom()};
    return r % p;
  endfunction

endpackage
