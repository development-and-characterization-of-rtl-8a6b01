`timescale 1ps / 1fs
// tb_ref_pkg -- reference models used by the testbenches, written
// independently of the RTL: a bit-serial scrambler and descrambler
// (x^58 + x^39 + 1, the textbook shift-register form), GF(32) arithmetic by
// log/antilog tables built from x^5 = x^2 + 1, the RS(31,27) generator
// polynomial expanded from its roots, a symbol-serial RS encoder (the
// shift-register form with taps g1..g4) and the syndrome check
// c(a^j) = 0 for j = 27..30 that every valid codeword must pass.
package tb_ref_pkg;

  typedef logic [4:0] sym_t;

  // ---------------- GF(32) via tables ----------------
  function automatic sym_t alog(int e);
    sym_t v;
    e = e % 31;
    if (e < 0) e += 31;
    v = 5'd1;
    repeat (e) v = {v[3:0], 1'b0} ^ (v[4] ? 5'b00101 : 5'b00000);
    return v;
  endfunction

  function automatic int glog(sym_t v);
    for (int e = 0; e < 31; e++) if (alog(e) == v) return e;
    return -1;
  endfunction

  function automatic sym_t gmul(sym_t a, sym_t b);
    if (a == 0 || b == 0) return 5'd0;
    return alog(glog(a) + glog(b));
  endfunction

  // g(x) coefficients, gc[0] = constant term, gc[4] = 1
  function automatic void gen_poly(output sym_t gc [5]);
    sym_t t [5];
    for (int i = 0; i < 5; i++) gc[i] = 0;
    gc[0] = 1;
    for (int r = 27; r <= 30; r++) begin
      for (int i = 0; i < 5; i++) t[i] = 0;
      for (int i = 0; i < 4; i++) begin
        t[i+1] ^= gc[i];                 // x * gc
        t[i]   ^= gmul(gc[i], alog(r));  // a^r * gc
      end
      gc = t;
    end
  endfunction

  // symbol-serial encoder; data[0] is the first (highest-degree) symbol.
  // par[0] is sent first (b4).
  function automatic void rs_encode(input sym_t data [27], output sym_t par [4]);
    sym_t gc [5];
    sym_t b [4];   // b[0] = b1 ... b[3] = b4
    sym_t fb;
    gen_poly(gc);
    for (int i = 0; i < 4; i++) b[i] = 0;
    for (int n = 0; n < 27; n++) begin
      fb   = data[n] ^ b[3];
      b[3] = b[2] ^ gmul(fb, gc[3]);
      b[2] = b[1] ^ gmul(fb, gc[2]);
      b[1] = b[0] ^ gmul(fb, gc[1]);
      b[0] = gmul(fb, gc[0]);
    end
    par[0] = b[3]; par[1] = b[2]; par[2] = b[1]; par[3] = b[0];
  endfunction

  // codeword cw[0] highest degree (x^30) ... cw[30] constant; true if all
  // four syndromes are zero
  function automatic bit rs_check(input sym_t cw [31]);
    sym_t s;
    for (int j = 27; j <= 30; j++) begin
      s = 0;
      for (int n = 0; n < 31; n++) s ^= gmul(cw[n], alog(j * (30 - n)));
      if (s != 0) return 1'b0;
    end
    return 1'b1;
  endfunction

  // ---------------- scrambler ----------------
  // st[k] = output bit k+1 steps ago
  function automatic logic scr_bit(inout logic [57:0] st, input logic din);
    logic o;
    o  = din ^ st[38] ^ st[57];
    st = {st[56:0], o};
    return o;
  endfunction

  function automatic logic descr_bit(inout logic [57:0] st, input logic din);
    logic o;
    o  = din ^ st[38] ^ st[57];
    st = {st[56:0], din};
    return o;
  endfunction

endpackage
