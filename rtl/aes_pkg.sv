// aes_pkg -- AES-128 (FIPS-197) round functions used by the OTP generator.
//
// The paper only names "the AES circuit"; AES-128 is this design's choice.
// The S-box is not stored as a typed-in table: it is computed at elaboration
// from its definition (multiplicative inverse in GF(2^8) modulo
// x^8+x^4+x^3+x+1, followed by the affine map b ^ rotl(b,1..4) ^ 0x63),
// walking the field with the generator 3 and its inverse.
// Byte order: byte 0 of a block is bits [127:120]; the state is column-major
// as in FIPS-197.
package aes_pkg;

  typedef logic [255:0][7:0] sbox_t;

  function automatic logic [7:0] rotl8(logic [7:0] b, int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic sbox_t gen_sbox();
    sbox_t s;
    logic [7:0] p, q, x;
    s = '0;
    p = 8'h01;
    q = 8'h01;
    for (int k = 0; k < 255; k++) begin
      // p <- p * 3
      p = p ^ (p << 1) ^ ((p[7]) ? 8'h1B : 8'h00);
      // q <- q / 3
      q = q ^ (q << 1);
      q = q ^ (q << 2);
      q = q ^ (q << 4);
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      s[p] = x ^ 8'h63;
    end
    s[0] = 8'h63;
    return s;
  endfunction

  localparam sbox_t SBOX = gen_sbox();

  function automatic logic [7:0] xtime(logic [7:0] b);
    return (b << 1) ^ (b[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [127:0] sub_bytes(logic [127:0] s);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[127-8*i -: 8] = SBOX[s[127-8*i -: 8]];
    return r;
  endfunction

  // byte index b = 4*col + row
  function automatic logic [127:0] shift_rows(logic [127:0] s);
    logic [127:0] r;
    for (int c = 0; c < 4; c++)
      for (int rw = 0; rw < 4; rw++)
        r[127-8*(4*c+rw) -: 8] = s[127-8*(4*((c+rw)%4)+rw) -: 8];
    return r;
  endfunction

  function automatic logic [127:0] mix_columns(logic [127:0] s);
    logic [127:0] r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[127-32*c -: 8];
      a1 = s[119-32*c -: 8];
      a2 = s[111-32*c -: 8];
      a3 = s[103-32*c -: 8];
      r[127-32*c -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[119-32*c -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[111-32*c -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[103-32*c -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  // Next AES-128 round key from the current one and the round constant.
  function automatic logic [127:0] next_round_key(logic [127:0] k, logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {SBOX[w3[23:16]], SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    t[31:24] = t[31:24] ^ rcon;
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
