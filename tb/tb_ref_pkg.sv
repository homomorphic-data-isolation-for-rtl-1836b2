// tb_ref_pkg: reference arithmetic for the testbenches, written with plain
// integer operators (%, *, loops) so that it shares nothing with the
// add-shift-subtract datapaths under test.
package tb_ref_pkg;

  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b,
                                             longint unsigned m);
    return (a * b) % m;
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned m);
    longint unsigned r = 1 % m;
    longint unsigned x = b % m;
    while (e != 0) begin
      if (e[0]) r = (r * x) % m;
      x = (x * x) % m;
      e = e >> 1;
    end
    return r;
  endfunction

  // Inverse modulo a prime (Fermat).
  function automatic longint unsigned invmod(longint unsigned a, longint unsigned p);
    return powmod(a, p - 2, p);
  endfunction

  // Montgomery product x*y*2^-k mod m, by searching the unique z < m with
  // z*2^k = x*y (mod m).
  function automatic longint unsigned montmod(longint unsigned x, longint unsigned y,
                                              longint unsigned m, int k);
    longint unsigned r = (longint'(1) << k) % m;
    longint unsigned t = (x * y) % m;
    for (longint unsigned z = 0; z < m; z++)
      if ((z * r) % m == t) return z;
    return 0;
  endfunction

  // A few primes below 256 used as moduli.
  function automatic int unsigned prime8(int unsigned i);
    int unsigned p [8] = '{251, 241, 239, 233, 199, 131, 13, 3};
    return p[i % 8];
  endfunction

endpackage
