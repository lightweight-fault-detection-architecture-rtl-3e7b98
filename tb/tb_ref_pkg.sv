// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the RTL: plain modular arithmetic on 64-bit integers.
package tb_ref_pkg;

  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b,
                                             longint unsigned q);
    return (a % q) * (b % q) % q;
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned q);
    longint unsigned r;
    r = 1;
    for (longint unsigned t = 0; t < e; t++) r = mulmod(r, b, q);
    return r;
  endfunction

  // inverse mod prime q by Fermat
  function automatic longint unsigned invmod(longint unsigned a, longint unsigned q);
    longint unsigned r, x, e;
    r = 1; x = a % q; e = q - 2;
    while (e != 0) begin
      if (e & 1) r = r * x % q;
      x = x * x % q;
      e = e >> 1;
    end
    return r;
  endfunction

  // a * b * 2^-(w*nw) mod q
  function automatic longint unsigned montmul(longint unsigned a, longint unsigned b,
                                              int unsigned l, int unsigned w,
                                              longint unsigned q);
    int unsigned nw;
    longint unsigned rinv;
    nw   = (l + w - 1) / w;
    rinv = invmod(powmod(2, w * nw, q), q);
    return mulmod(mulmod(a, b, q), rinv, q);
  endfunction

  function automatic int unsigned brev(int unsigned v, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < bits; b++) r = (r << 1) | ((v >> b) & 1);
    return r;
  endfunction

endpackage
