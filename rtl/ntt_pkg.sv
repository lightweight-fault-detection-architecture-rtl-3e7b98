// ntt_pkg -- constants and elaboration-time helper functions shared by the
// fault-detecting NTT core.
//
// The default sizes are those of the Kyber configuration the design is built
// for: n = 256 coefficients, q = 3329, l = 12-bit coefficients and a Montgomery
// word size of w = 4 bits. The primitive 256th root of unity 17 is the one
// Kyber (FIPS 203) uses; the REMO encoding constant K = 3 and its 4-bit width
// are this design's own choice, the paper leaves K open.
//
// The functions are only used on constants (parameter defaults and the twiddle
// ROM contents); none of them becomes hardware.
package ntt_pkg;

  localparam int unsigned N_DEF    = 256;   // polynomial length n
  localparam int unsigned Q_DEF    = 3329;  // modulus q
  localparam int unsigned L_DEF    = 12;    // coefficient width l
  localparam int unsigned W_DEF    = 4;     // Montgomery word size w
  localparam int unsigned KW_DEF   = 4;     // width of the REMO constant K
  localparam int unsigned K_DEF    = 3;     // REMO constant K
  localparam int unsigned ZETA_256 = 17;    // primitive 256th root of unity mod 3329

  // Number of w-bit words in an l-bit operand after zero padding (Alg. 2 lines 4-10).
  function automatic int unsigned num_words(int unsigned l, int unsigned w);
    return (l + w - 1) / w;
  endfunction

  function automatic int unsigned max3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned m;
    m = (a > b) ? a : b;
    return (m > c) ? m : c;
  endfunction

  // b^e mod m
  function automatic int unsigned modpow(int unsigned b, int unsigned e, int unsigned m);
    longint unsigned r, x, mm;
    int unsigned     ee;
    mm = longint'(m);
    r  = 1 % mm;
    x  = longint'(b) % mm;
    ee = e;
    while (ee != 0) begin
      if (ee[0]) r = (r * x) % mm;
      x  = (x * x) % mm;
      ee = ee >> 1;
    end
    return int'(r);
  endfunction

  // q' = -q^-1 mod 2^w, so that q*q' = -1 mod 2^w (used in the proof of the lemma).
  function automatic int unsigned qprime(int unsigned q, int unsigned w);
    longint unsigned m;
    m = longint'(1) << w;
    for (longint unsigned x = 0; x < m; x++)
      if (((longint'(q) * x) + 1) % m == 0) return int'(x);
    return 0;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < bits; b++)
      if (v[b]) r |= (1 << (bits - 1 - b));
    return r;
  endfunction

  // Primitive n-th root of unity mod 3329 for n a power of two up to 256.
  function automatic int unsigned root_3329(int unsigned n);
    return modpow(ZETA_256, 256 / n, 3329);
  endfunction

  // Twiddle ROM word at address a (0 <= a < 2n). The lower half serves the
  // forward transform: a = 2^i + j (stage i, group j) holds
  //   omega^(bitrev_i(j) * n / 2^(i+1)) * R mod q,  R = 2^(w * num_words(l, w)).
  // The upper half serves the inverse transform: a = n + 2^i + j (stage i,
  // twiddle index j) holds omega^(-j * n / 2^(i+1)) * R mod q.
  // Words are held in Montgomery form so that the Montgomery product
  // alpha*entry*R^-1 is the plain product alpha*omega^e mod q. Addresses 0 and n
  // hold R mod q (omega^0) and are never read by the transform.
  function automatic int unsigned twiddle(int unsigned a, int unsigned n, int unsigned q,
                                          int unsigned omega, int unsigned l, int unsigned w);
    int unsigned stage, grp, e, loc;
    bit          inv;
    longint unsigned r_mont;
    r_mont = longint'(modpow(2, w * num_words(l, w), q));
    inv    = (a >= n);
    loc    = inv ? a - n : a;
    if (loc == 0) return int'(r_mont);
    stage = $clog2(loc + 1) - 1;
    grp   = loc - (1 << stage);
    if (inv) e = (n - grp * (n >> (stage + 1))) % n;
    else     e = bitrev(grp, stage) * (n >> (stage + 1));
    return int'((longint'(modpow(omega, e, q)) * r_mont) % longint'(q));
  endfunction

endpackage
