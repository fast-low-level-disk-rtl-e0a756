// fast_pkg: types, constants and pure functions shared by the FAST[AES,BRW]-2
// encryption engine.
//
// Field GF(2^128): an element is a 128-bit vector whose bit i is the coefficient
// of alpha^i, so the multiplicative identity is 0...01. The field polynomial is
// psi(alpha) = alpha^128 + alpha^7 + alpha^2 + alpha + 1, as FAST and AEZ use.
//
// AES: a 128-bit block holds byte 0 in bits [127:120] (the usual hex order of
// the AES test vectors). The S-box table is computed here at elaboration time
// from its definition (inverse in GF(2^8) followed by the affine map), so no
// table of numbers is stored in the source.
package fast_pkg;

  typedef logic [127:0] blk_t;

  // Kinds of work that travel as a tag with a block through the odd AES core.
  typedef enum logic [2:0] {
    TG_NONE = 3'd0,
    TG_TAU  = 3'd1,   // E_K(fStr): the hash key
    TG_F1   = 3'd2,   // first Feistel encryption, E_K(F1)
    TG_F2   = 3'd3,   // second Feistel encryption, E_K(F2)
    TG_CTR  = 3'd4,   // counter-mode keystream block
    TG_FIN  = 3'd5    // marker: end of the counter stream
  } tag_kind_t;

  // Kinds of operation the BRW/multiplier unit accepts.
  typedef enum logic [1:0] {
    BOP_PAIR   = 2'd0,  // one pair (Y_{2k-1}, Y_{2k}) of the BRW polynomial
    BOP_FINAL  = 2'd1,  // last block Y_m; result tau^e * BRW(...)
    BOP_SINGLE = 2'd2   // one stand-alone product x * tau
  } brw_op_t;

  // ---------------------------------------------------------------- GF(2^128)

  // Carry-less product of two 16-bit polynomials (31-bit result).
  function automatic logic [30:0] clmul16(input logic [15:0] a, input logic [15:0] b);
    logic [30:0] r;
    r = '0;
    for (int i = 0; i < 16; i++)
      if (b[i]) r = r ^ (31'(a) << i);
    return r;
  endfunction

  // Reduce a 255-bit polynomial modulo psi.
  function automatic blk_t gf128_reduce(input logic [254:0] p);
    logic [134:0] t;
    logic [126:0] hi;
    logic [6:0]   hi2;
    hi = p[254:128];
    t  = {7'd0, p[127:0]} ^ {8'd0, hi} ^ {7'd0, hi, 1'b0} ^ {6'd0, hi, 2'b0} ^ {1'b0, hi, 7'b0};
    hi2 = t[134:128];
    return t[127:0] ^ 128'(hi2) ^ (128'(hi2) << 1) ^ (128'(hi2) << 2) ^ (128'(hi2) << 7);
  endfunction

  // Squaring is linear: spread the bits to even positions, then reduce.
  function automatic blk_t gf128_sq(input blk_t a);
    logic [254:0] s;
    s = '0;
    for (int i = 0; i < 128; i++) s[2*i] = a[i];
    return gf128_reduce(s);
  endfunction

  // Multiplication by alpha ("doubling").
  function automatic blk_t gf128_dbl(input blk_t a);
    return {a[126:0], 1'b0} ^ (a[127] ? 128'h87 : 128'h0);
  endfunction

  // ---------------------------------------------------------------- AES

  function automatic logic [7:0] xtime8(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r, x;
    r = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r = r ^ x;
      x = xtime8(x);
    end
    return r;
  endfunction

  // S-box from its definition: s = A(x^254) + 0x63.
  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] t;
    logic [7:0] inv, p;
    for (int x = 0; x < 256; x++) begin
      // x^254 = x^-1 (and 0 -> 0) by square-and-multiply: 254 = 11111110b
      p   = 8'(x);
      inv = 8'd1;
      for (int i = 1; i < 8; i++) begin
        p   = gf8_mul(p, p);      // x^(2^i)
        inv = gf8_mul(inv, p);
      end
      t[x] = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
                 ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    end
    return t;
  endfunction

  // The S-box table, evaluated once for the whole design.
  localparam logic [255:0][7:0] SBOX = gen_sbox();

  // Byte b (0..15) of a block, byte 0 being the most significant.
  function automatic logic [7:0] get_byte(input blk_t s, input int b);
    return s[127-8*b -: 8];
  endfunction

  // ShiftRows: output byte (row r, column c) = input byte (r, c+r mod 4).
  function automatic blk_t shift_rows(input blk_t s);
    blk_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(4*c+r) -: 8] = get_byte(s, 4*((c+r)%4) + r);
    return o;
  endfunction

  function automatic blk_t mix_columns(input blk_t s);
    blk_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);   a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime8(a0) ^ xtime8(a1) ^ a1 ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime8(a1) ^ xtime8(a2) ^ a2 ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime8(a2) ^ xtime8(a3) ^ a3;
      o[127-8*(4*c+3) -: 8] = xtime8(a0) ^ a0 ^ a1 ^ a2 ^ xtime8(a3);
    end
    return o;
  endfunction

  // Number of trailing zero bits of a nonzero value.
  function automatic int unsigned tz(input logic [15:0] v);
    for (int i = 0; i < 16; i++)
      if (v[i]) return i;
    return 16;
  endfunction

endpackage
