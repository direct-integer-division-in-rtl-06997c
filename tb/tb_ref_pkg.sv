// tb_ref_pkg -- reference arithmetic for the testbenches, written independently
// of the design's look-up-table generators: powers, brute-force modular
// inverses, and the moduli of the 18-digit word (digit i: base, max power).
package tb_ref_pkg;

  function automatic int unsigned base(int unsigned i);
    int unsigned t[18] = '{11, 5, 13, 3, 2, 17, 7, 19, 457, 461, 463, 467, 479,
                           487, 491, 499, 503, 509};
    return t[i];
  endfunction

  function automatic int unsigned maxp(int unsigned i);
    int unsigned t[18] = '{2, 3, 2, 5, 8, 2, 3, 2, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1};
    return t[i];
  endfunction

  function automatic longint unsigned pw(longint unsigned b, int unsigned k);
    longint unsigned r = 1;
    repeat (k) r *= b;
    return r;
  endfunction

  function automatic int unsigned full_mod(int unsigned i);
    return int'(pw(base(i), maxp(i)));
  endfunction

  // Brute-force inverse of a modulo m.
  function automatic int unsigned bf_inv(longint unsigned a, int unsigned m);
    for (int unsigned v = 1; v < m; v++)
      if (((a % m) * v) % m == 1) return v;
    return 0;
  endfunction

endpackage
