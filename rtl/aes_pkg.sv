// aes_pkg: AES (FIPS-197) building blocks for the pipelined AES-128 core.
//
// The S-box is not typed in: it is computed at elaboration time from its
// definition, the multiplicative inverse in GF(2^8) (modulus x^8+x^4+x^3+x+1,
// inverse of 0 taken as 0) followed by the affine map with constant 0x63.
// The result is a 256-entry constant table that synthesis turns into a ROM.
// State layout: a 128-bit block holds byte 0 in bits 127:120, bytes in column
// order (byte 4c+r is row r of column c), as in FIPS-197.
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // x^254 = x^-1 in GF(2^8)
  function automatic logic [7:0] ginv(input logic [7:0] a);
    logic [7:0] r, s;
    r = 8'h01;
    s = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, s);  // exponent 254 = 0b11111110
      s = gmul(s, s);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] b, r;
    b = ginv(a);
    for (int i = 0; i < 8; i++)
      r[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return r ^ 8'h63;
  endfunction

  typedef logic [7:0] sbox_t [256];

  function automatic sbox_t sbox_gen();
    sbox_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam sbox_t SBOX = sbox_gen();

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8*i +: 8] = SBOX[s[8*i +: 8]];
    return r;
  endfunction

  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        // out byte (row, c) = in byte (row, c+row mod 4); byte n at bits 127-8n
        r[127 - 8*(4*c + row) -: 8] = s[127 - 8*(4*((c + row) % 4) + row) -: 8];
    return r;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[127 - 32*c      -: 8];
      a1 = s[127 - 32*c - 8  -: 8];
      a2 = s[127 - 32*c - 16 -: 8];
      a3 = s[127 - 32*c - 24 -: 8];
      r[127 - 32*c      -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[127 - 32*c - 8  -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[127 - 32*c - 16 -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[127 - 32*c - 24 -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  // Next round key from the previous one (AES-128 key expansion).
  function automatic logic [127:0] next_round_key(input logic [127:0] k,
                                                  input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = sub_word({w3[23:0], w3[31:24]}) ^ {rcon, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  localparam logic [7:0] RCON [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10,
                                       8'h20, 8'h40, 8'h80, 8'h1B, 8'h36};

endpackage
