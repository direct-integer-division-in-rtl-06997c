// rns_pkg -- number format, operation codes and look-up-table generators shared
// by every block of the RNS integer divide unit.
//
// The machine word is the 18-digit, 9-bit-per-digit residue format of the MOD-9
// ALU: eight power-based moduli (powers of the primes 2..19, ascending) followed
// by ten non-power primes close to 2^9. Digit i (0-based here, i+1 in the usual
// 1-based notation) has base b_i and maximum power P_i, so its full modulus is
// M_i = b_i^P_i. The moduli and their order follow the paper's Tables 1 and 2.
//
// The inverse and power-constant LUTs of the digit processing units are
// computed here at elaboration time with constant functions (extended Euclid
// for the inverses) instead of being read from a file. An entry is addressed by
// {mod_select, power}, as the paper addresses its inverse LUT by the
// concatenation of the mod_select and pwr_valid buses.
package rns_pkg;

  localparam int unsigned N_DIG = 18;  // digits in an RNS word
  localparam int unsigned N_PWR = 8;   // digits 0..7 are power-based
  localparam int unsigned DW    = 9;   // bits per digit
  localparam int unsigned PW    = 4;   // width of a power count (0..8)
  localparam int unsigned SW    = 5;   // width of mod_select (0..17)
  localparam int unsigned MAX_P = 8;   // largest power of any base (2^8)
  localparam int unsigned IDX_TWO = 4; // digit whose base is 2 (M = 256)
  localparam int unsigned LUT_N = N_DIG * (MAX_P + 1); // entries per LUT

  typedef logic [DW-1:0]            digit_t;
  typedef logic [PW-1:0]            pwr_t;
  typedef logic [SW-1:0]            sel_t;
  typedef digit_t [N_DIG-1:0]       rns_word_t;   // digit i at [i]
  typedef pwr_t   [N_DIG-1:0]       pwr_vec_t;
  typedef logic   [LUT_N*DW-1:0]    lut_t;        // entry sel*(MAX_P+1)+k
  typedef logic   [MAX_P:0][9:0]    pwr_tab_t;    // b^k for k = 0..P

  // Operation code of a divisor / dividend digit processing unit.
  typedef enum logic [2:0] {
    DOP_NOP,   // hold
    DOP_LOAD,  // digit <= digit_in, power count <= P
    DOP_SUB,   // cycle 1: reg <= |digit - crossbar|
    DOP_PASS,  // cycle 1: reg <= digit (scaling of the divisor)
    DOP_MUL,   // cycle 2: selected: digit <= reg / b^k, count -= k
               //          others:   digit <= |reg * (b_sel^k)^-1|
    DOP_INC    // digit <= |digit + 1| (divisor only)
  } dop_t;

  // Operation code of the recombination / arithmetic register (RECOMP).
  typedef enum logic [2:0] {
    ROP_NOP,
    ROP_LOAD_XY,   // keep X and Y, ACCUM <= 0, DIFF <= X
    ROP_BE_CLR,    // start of base extension: digit <= 0, power <= 1
    ROP_BE_MULX,   // cycle 1: reg <= |crossbar * power|
    ROP_BE_MULP,   // cycle 2: digit <= |digit + reg|, power <= |power * b_sel^k|
    ROP_ACC_ADD,   // ACCUM <= |ACCUM + digit|
    ROP_ACC_INC,   // ACCUM <= |ACCUM + 1|
    ROP_CALC_DIFF  // DIFF <= |X - ACCUM * Y|
  } rop_t;

  // Load source of the dividend register (NUMER).
  typedef enum logic [1:0] {NSRC_DIVIDEND, NSRC_BE, NSRC_DIFF} nsrc_t;
  // Load source of the divisor register (DENOM).
  typedef enum logic [1:0] {DSRC_DIVISOR, DSRC_BE, DSRC_YCOPY} dsrc_t;

  function automatic int unsigned base_of(int unsigned i);
    case (i)
      0: return 11;   1: return 5;    2: return 13;   3: return 3;
      4: return 2;    5: return 17;   6: return 7;    7: return 19;
      8: return 457;  9: return 461;  10: return 463; 11: return 467;
      12: return 479; 13: return 487; 14: return 491; 15: return 499;
      16: return 503; default: return 509;
    endcase
  endfunction

  function automatic int unsigned maxp_of(int unsigned i);
    case (i)
      0: return 2; 1: return 3; 2: return 2; 3: return 5;
      4: return 8; 5: return 2; 6: return 3; 7: return 2;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned ipow(int unsigned b, int unsigned p);
    int unsigned r = 1;
    for (int unsigned k = 0; k < p; k++) r = r * b;
    return r;
  endfunction

  function automatic int unsigned modulus_of(int unsigned i);
    return ipow(base_of(i), maxp_of(i));
  endfunction

  // b^k for k = 0..P_i; entries above P_i are 1 and never addressed.
  function automatic pwr_tab_t pwr_tab(int unsigned i);
    pwr_tab_t t;
    for (int unsigned k = 0; k <= MAX_P; k++)
      t[k] = 10'(k <= maxp_of(i) ? ipow(base_of(i), k) : 1);
    return t;
  endfunction

  // Multiplicative inverse of a modulo m (extended Euclid); 0 if none exists.
  function automatic int unsigned modinv(int unsigned a, int unsigned m);
    int r0 = int'(m), r1 = int'(a % m), t0 = 0, t1 = 1, q, tmp;
    while (r1 != 0) begin
      q = r0 / r1;
      tmp = r0 - q * r1; r0 = r1; r1 = tmp;
      tmp = t0 - q * t1; t0 = t1; t1 = tmp;
    end
    if (r0 != 1) return 0;
    if (t0 < 0) t0 = t0 + int'(m);
    return int'(t0);
  endfunction

  // Inverse LUT of digit i: entry (sel,k) = |(b_sel^k)^-1|_{M_i}.
  // Taken with respect to the full modulus M_i; it stays valid for any
  // reduced modulus b_i^p because b_i^p divides M_i.
  function automatic lut_t inv_lut(int unsigned i);
    lut_t l = '0;
    for (int unsigned s = 0; s < N_DIG; s++)
      for (int unsigned k = 1; k <= MAX_P; k++)
        if (s != i && k <= maxp_of(s))
          l[(s*(MAX_P+1)+k)*DW +: DW] =
            DW'(modinv(ipow(base_of(s), k) % modulus_of(i), modulus_of(i)));
    return l;
  endfunction

  // Power-constant LUT of recombination digit i: entry (sel,k) = |b_sel^k|_{M_i}.
  function automatic lut_t pow_lut(int unsigned i);
    lut_t l = '0;
    for (int unsigned s = 0; s < N_DIG; s++)
      for (int unsigned k = 0; k <= MAX_P; k++)
        if (k <= maxp_of(s))
          l[(s*(MAX_P+1)+k)*DW +: DW] =
            DW'(ipow(base_of(s), k) % modulus_of(i));
    return l;
  endfunction

  function automatic digit_t lut_rd(lut_t l, sel_t sel, pwr_t k);
    return l[(int'(sel)*(MAX_P+1)+int'(k))*DW +: DW];
  endfunction

endpackage
