// aes_ref_pkg: reference AES-128 model for the testbenches.
//
// Written apart from the RTL and computed a different way: the S-box is
// derived from the GF(2^8) inverse and the affine map instead of a table,
// and MixColumns uses a general GF(2^8) multiply. Blocks and keys are 128
// bits in FIPS-197 byte order (byte 0 in bits [127:120]).
package aes_ref_pkg;

  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    p = 8'h00;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = a[7] ? ({a[6:0], 1'b0} ^ 8'h1b) : {a[6:0], 1'b0};
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] ginv(logic [7:0] x);
    // x^254 = x^-1 (0 maps to 0)
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < 254; i++) r = gmul(r, x);
    return (x == 8'h00) ? 8'h00 : r;
  endfunction

  function automatic logic [7:0] ref_sbox(logic [7:0] x);
    logic [7:0] b, s;
    b = ginv(x);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [7:0] get_byte(logic [127:0] s, int k);
    return s[127-8*k -: 8];
  endfunction

  function automatic logic [127:0] ref_subbytes(logic [127:0] s);
    logic [127:0] o;
    for (int k = 0; k < 16; k++) o[127-8*k -: 8] = ref_sbox(get_byte(s, k));
    return o;
  endfunction

  function automatic logic [127:0] ref_shiftrows(logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*c) -: 8] = get_byte(s, r + 4*((c+r)%4));
    return o;
  endfunction

  function automatic logic [127:0] ref_mixcolumns(logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c); a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      o[127-8*(4*c+0) -: 8] = gmul(a0,2) ^ gmul(a1,3) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ gmul(a1,2) ^ gmul(a2,3) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ gmul(a2,2) ^ gmul(a3,3);
      o[127-8*(4*c+3) -: 8] = gmul(a0,3) ^ a1 ^ a2 ^ gmul(a3,2);
    end
    return o;
  endfunction

  // Next round key from the previous one; rnd = 1..10.
  function automatic logic [127:0] ref_next_key(logic [127:0] k, int rnd);
    logic [31:0] w [8];
    logic [31:0] t;
    logic [7:0]  rc;
    rc = 8'h01;
    for (int i = 1; i < rnd; i++) rc = gmul(rc, 8'h02);
    for (int i = 0; i < 4; i++) w[i] = k[127-32*i -: 32];
    t = {ref_sbox(w[3][23:16]), ref_sbox(w[3][15:8]), ref_sbox(w[3][7:0]), ref_sbox(w[3][31:24])};
    t[31:24] ^= rc;
    w[4] = w[0] ^ t;
    for (int i = 5; i < 8; i++) w[i] = w[i-1] ^ w[i-4];
    return {w[4], w[5], w[6], w[7]};
  endfunction

  function automatic logic [127:0] ref_round(logic [127:0] s, logic [127:0] rk, bit last);
    logic [127:0] o;
    o = ref_shiftrows(ref_subbytes(s));
    if (!last) o = ref_mixcolumns(o);
    return o ^ rk;
  endfunction

  function automatic logic [127:0] ref_encrypt(logic [127:0] pt, logic [127:0] key);
    logic [127:0] s, k;
    k = key;
    s = pt ^ k;
    for (int r = 1; r <= 10; r++) begin
      k = ref_next_key(k, r);
      s = ref_round(s, k, r == 10);
    end
    return s;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

endpackage
