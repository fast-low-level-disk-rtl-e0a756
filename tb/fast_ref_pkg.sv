// fast_ref_pkg: plain reference models used by the testbenches to work out
// expected values independently of the RTL.
//   - AES-128 encryption on byte arrays; the S-box comes from the classic
//     generator loop over the multiplicative group (not from inversion by
//     exponentiation as in the RTL).
//   - GF(2^128) multiplication by shift-and-add (not Karatsuba).
//   - BRW evaluated bottom-up straight from its recursive definition, for
//     2^L - 1 blocks (not by the accumulator schedule of the RTL).
//   - FAST encryption of an m-block sector following the algorithm as written.
package fast_ref_pkg;

  typedef logic [127:0] blk_t;
  typedef logic [7:0]   sbox_t [256];

  function automatic logic [7:0] rotl8(input logic [7:0] x, input int s);
    return (x << s) | (x >> (8 - s));
  endfunction

  function automatic sbox_t make_sbox();
    sbox_t t;
    logic [7:0] p, q, x;
    p = 8'd1;
    q = 8'd1;
    do begin
      p = p ^ (p << 1) ^ (p[7] ? 8'h1b : 8'h00);   // p *= 3
      q = q ^ (q << 1);                           // q /= 3
      q = q ^ (q << 2);
      q = q ^ (q << 4);
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      t[p] = x ^ 8'h63;
    end while (p != 8'd1);
    t[0] = 8'h63;
    return t;
  endfunction

  function automatic logic [7:0] xt(input logic [7:0] a);
    return (a << 1) ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic blk_t aes128_enc(input blk_t key, input blk_t pt);
    sbox_t sb;
    logic [7:0] st [16], tmp [16], w [176], rc, t0, t1, t2, t3, a0, a1, a2, a3;
    sb = make_sbox();
    for (int i = 0; i < 16; i++) w[i] = key[127-8*i -: 8];
    rc = 8'h01;
    for (int i = 16; i < 176; i += 4) begin
      t0 = w[i-4]; t1 = w[i-3]; t2 = w[i-2]; t3 = w[i-1];
      if (i % 16 == 0) begin
        {t0, t1, t2, t3} = {sb[t1] ^ rc, sb[t2], sb[t3], sb[t0]};
        rc = xt(rc);
      end
      w[i] = w[i-16] ^ t0; w[i+1] = w[i-15] ^ t1; w[i+2] = w[i-14] ^ t2; w[i+3] = w[i-13] ^ t3;
    end
    for (int i = 0; i < 16; i++) st[i] = pt[127-8*i -: 8] ^ w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) tmp[i] = sb[st[i]];
      for (int c = 0; c < 4; c++)              // ShiftRows: st[r + 4c] = tmp[r + 4(c+r)]
        for (int rr = 0; rr < 4; rr++) st[rr + 4*c] = tmp[rr + 4*((c + rr) % 4)];
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          a0 = st[4*c]; a1 = st[4*c+1]; a2 = st[4*c+2]; a3 = st[4*c+3];
          st[4*c]   = xt(a0) ^ (xt(a1) ^ a1) ^ a2 ^ a3;
          st[4*c+1] = a0 ^ xt(a1) ^ (xt(a2) ^ a2) ^ a3;
          st[4*c+2] = a0 ^ a1 ^ xt(a2) ^ (xt(a3) ^ a3);
          st[4*c+3] = (xt(a0) ^ a0) ^ a1 ^ a2 ^ xt(a3);
        end
      for (int i = 0; i < 16; i++) st[i] = st[i] ^ w[16*r + i];
    end
    for (int i = 0; i < 16; i++) aes128_enc[127-8*i -: 8] = st[i];
  endfunction

  // a*b in GF(2^128), psi = x^128 + x^7 + x^2 + x + 1, bit i = coeff of x^i
  function automatic blk_t gmul(input blk_t a, input blk_t b);
    blk_t r, x;
    r = '0;
    x = a;
    for (int i = 0; i < 128; i++) begin
      if (b[i]) r ^= x;
      x = x[127] ? ((x << 1) ^ 128'h87) : (x << 1);
    end
    return r;
  endfunction

  // BRW_tau(y[0..n-1]) for n = 2^L - 1, L >= 2, bottom-up from the definition:
  // B(Y1..Y3) = (tau+Y1)(tau^2+Y2)+Y3 and, with t = 2^s,
  // B(Y1..Y_{2t-1}) = B(Y1..Y_{t-1}) (tau^t + Y_t) + B(Y_{t+1}..Y_{2t-1}).
  function automatic blk_t brw(input blk_t tau, input blk_t y [], input int L);
    blk_t b [], nb [], tp;
    int cnt;
    cnt = 1 << (L - 2);                     // number of 3-block subtrees
    b = new[cnt];
    for (int q = 0; q < cnt; q++)
      b[q] = gmul(tau ^ y[4*q], gmul(tau, tau) ^ y[4*q+1]) ^ y[4*q+2];
    tp = gmul(gmul(tau, tau), gmul(tau, tau));  // tau^4
    for (int s = 2; s < L; s++) begin       // merge pairs of (2^s - 1)-subtrees
      cnt = cnt / 2;
      nb = new[cnt];
      for (int q = 0; q < cnt; q++)
        nb[q] = gmul(b[2*q], tp ^ y[(1 << s) * (2*q + 1) - 1]) ^ b[2*q+1];
      b  = nb;
      tp = gmul(tp, tp);
    end
    return b[0];
  endfunction

  // FAST[Fx_m, BRW] encryption of x[1..m] (x[0] unused), m = 2^L.
  function automatic void fast_enc(input blk_t key, input blk_t fstr, input blk_t tweak,
                                   input blk_t x [], input int L, output blk_t c []);
    int m;
    blk_t tau, h, a1, f1, f2, b2, z, hp;
    blk_t y [];
    m = 1 << L;
    c = new[m + 1];
    y = new[m - 1];
    tau = aes128_enc(key, fstr);
    for (int i = 3; i <= m; i++) y[i-3] = x[i];
    y[m-2] = tweak;
    h  = gmul(tau, brw(tau, y, L));
    a1 = x[1] ^ h;
    f1 = x[2] ^ gmul(tau, a1);
    f2 = a1 ^ aes128_enc(key, f1);
    b2 = f1 ^ aes128_enc(key, f2);
    z  = f1 ^ f2;
    for (int i = 3; i <= m; i++) c[i] = x[i] ^ aes128_enc(key, z ^ 128'(i - 2));
    for (int i = 3; i <= m; i++) y[i-3] = c[i];
    hp = gmul(gmul(tau, tau), brw(tau, y, L));
    c[1] = f2 ^ gmul(tau, b2);
    c[2] = b2 ^ hp;
    c[0] = '0;
  endfunction

endpackage
