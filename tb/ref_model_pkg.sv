// ref_model_pkg: independent reference models used by the testbenches.
//
// Written separately from the RTL so that the checks do not share its code:
//  * AES-128 on a byte array, S-box found by searching for the inverse in
//    GF(2^8) instead of exponentiation;
//  * FF3 encryption exactly as in NIST SP 800-38G (Algorithm 9) on symbol
//    arrays, with any radix, even length and 64-bit tweak;
//  * the 8b/10b symbol <-> [0,266] mapping, written as a list of the eleven
//    control values;
//  * the 5b/6b and 3b/4b code tables of IEEE 802.3 Clause 36 as literal
//    tables, and a full 8b/10b encoder built on them.
package ref_model_pkg;

  // ------------------------------------------------------------------ AES
  function automatic byte unsigned gm(byte unsigned a, byte unsigned b);
    byte unsigned p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = (a & 8'h80) ? ((a << 1) ^ 8'h1B) : (a << 1);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic byte unsigned sb(byte unsigned x);
    byte unsigned inv = 0;
    byte unsigned s;
    if (x != 0)
      for (int c = 1; c < 256; c++) if (gm(x, 8'(c)) == 1) inv = 8'(c);
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= 8'((inv << i) | (inv >> (8 - i)));
    return s ^ 8'h63;
  endfunction

  function automatic logic [127:0] aes128(logic [127:0] key, logic [127:0] pt);
    byte unsigned w [44][4];
    byte unsigned s [16];
    byte unsigned t [16];
    byte unsigned tmp [4];
    byte unsigned rc = 1;
    byte unsigned sbt [256];
    logic [127:0] out;
    for (int i = 0; i < 256; i++) sbt[i] = sb(8'(i));
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) w[i][j] = key[127 - 8*(4*i+j) -: 8];
    for (int i = 4; i < 44; i++) begin
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = '{sbt[w[i-1][1]] ^ rc, sbt[w[i-1][2]], sbt[w[i-1][3]], sbt[w[i-1][0]]};
        rc = gm(rc, 2);
      end
      for (int j = 0; j < 4; j++) w[i][j] = w[i-4][j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) s[i] = pt[127 - 8*i -: 8] ^ w[i/4][i%4];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sbt[s[i]];
      for (int c = 0; c < 4; c++) for (int row = 0; row < 4; row++) t[4*c+row] = s[4*((c+row)%4)+row];
      s = t;
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          t[4*c+0] = gm(s[4*c],2) ^ gm(s[4*c+1],3) ^ s[4*c+2] ^ s[4*c+3];
          t[4*c+1] = s[4*c] ^ gm(s[4*c+1],2) ^ gm(s[4*c+2],3) ^ s[4*c+3];
          t[4*c+2] = s[4*c] ^ s[4*c+1] ^ gm(s[4*c+2],2) ^ gm(s[4*c+3],3);
          t[4*c+3] = gm(s[4*c],3) ^ s[4*c+1] ^ s[4*c+2] ^ gm(s[4*c+3],2);
        end
      s = t;
      for (int i = 0; i < 16; i++) s[i] ^= w[4*r + i/4][i%4];
    end
    for (int i = 0; i < 16; i++) out[127 - 8*i -: 8] = s[i];
    return out;
  endfunction

  // ------------------------------------------------------------------ FF3
  // x[0..n-1] are the symbols in string order (x[0] = X[1] of the standard).
  typedef int unsigned sym_arr_t [];

  function automatic logic [127:0] bswap(logic [127:0] x);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8*i +: 8] = x[127 - 8*i -: 8];
    return r;
  endfunction

  // NUM_radix(REV(x[lo..lo+m-1]))
  function automatic logic [255:0] num_rev(sym_arr_t x, int lo, int m, int radix);
    logic [255:0] v = 0;
    for (int j = m - 1; j >= 0; j--) v = v * radix + x[lo + j];
    return v;
  endfunction

  function automatic sym_arr_t ff3_encrypt(logic [127:0] key, logic [63:0] tweak,
                                           int radix, sym_arr_t x);
    int n = x.size();
    int u = (n + 1) / 2;
    int v = n - u;
    sym_arr_t a, b, c, y;
    logic [255:0] bn, an, yy, modm, cc;
    logic [127:0] p, s;
    logic [31:0] w;
    int m;
    a = new[u]; b = new[v];
    for (int i = 0; i < u; i++) a[i] = x[i];
    for (int i = 0; i < v; i++) b[i] = x[u + i];
    for (int i = 0; i < 8; i++) begin
      if (i % 2 == 0) begin m = u; w = tweak[31:0];  end
      else            begin m = v; w = tweak[63:32]; end
      bn = num_rev(b, 0, b.size(), radix);
      p = {w ^ 32'(i), bn[95:0]};
      s = bswap(aes128(bswap(key), bswap(p)));
      yy = {128'd0, s};
      an = num_rev(a, 0, a.size(), radix);
      modm = 1;
      for (int j = 0; j < m; j++) modm = modm * radix;
      cc = (an + yy) % modm;
      c = new[m];
      // C = REV(STR(c)): symbol j = digit j counted from the least significant
      for (int j = 0; j < m; j++) begin
        c[j] = int'(cc % radix);
        cc = cc / radix;
      end
      a = b;
      b = c;
    end
    y = new[n];
    for (int i = 0; i < u; i++) y[i] = a[i];
    for (int i = 0; i < v; i++) y[u + i] = b[i];
    return y;
  endfunction

  // CTR counter: c + b in radix 'radix', last symbol least significant
  function automatic sym_arr_t ctr_add(sym_arr_t c, int b, int radix);
    sym_arr_t r = new[c.size()](c);
    int carry = b;
    for (int j = c.size() - 1; j >= 0 && carry != 0; j--) begin
      int t = int'(r[j]) + carry;
      r[j] = t % radix;
      carry = t / radix;
    end
    return r;
  endfunction

  // keystream symbol t of a CTR/FF3 generator started at cnt0 (zero tweak)
  function automatic int ks_ref(logic [127:0] key, sym_arr_t cnt0, int t);
    sym_arr_t y = ff3_encrypt(key, 64'h0, 267, ctr_add(cnt0, t / 22, 267));
    return int'(y[t % 22]);
  endfunction

  // ------------------------------------------------------- symbol mapping
  localparam byte unsigned KVAL [11] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC,
                                         8'hDC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};

  // returns -1 for symbols outside the alphabet
  function automatic int map_ref(bit k, byte unsigned d);
    if (!k) return int'(d);
    for (int i = 0; i < 11; i++) if (KVAL[i] == d) return 256 + i;
    return -1;
  endfunction

  function automatic void demap_ref(int v, output bit k, output byte unsigned d);
    if (v < 256) begin k = 0; d = 8'(v); end
    else begin k = 1; d = KVAL[v - 256]; end
  endfunction

  // ------------------------------------------------------------- 8b/10b
  // abcdei for RD- (as listed in IEEE 802.3 Table 36-1a), index EDCBA
  localparam logic [5:0] T6 [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
  // fghj for RD-, index HGF (7 = primary P7)
  localparam logic [3:0] T4 [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100,
                                    4'b1101, 4'b1010, 4'b0110, 4'b1110};

  function automatic int ones(logic [9:0] x, int w);
    int c = 0;
    for (int i = 0; i < w; i++) c += x[i];
    return c;
  endfunction

  // Encode one symbol; rd = 1 means positive running disparity. Returns
  // {a,b,c,d,e,i,f,g,h,j} with 'a' in bit 9.
  function automatic logic [9:0] enc_ref(bit k, byte unsigned dv, inout bit rd);
    int x = dv & 31;
    int yv = dv >> 5;
    logic [5:0] s6;
    logic [3:0] s4;
    if (k && x == 28) s6 = 6'b001111;
    else s6 = T6[x];
    if (rd && (ones({4'b0, s6}, 6) != 3 || s6 == 6'b111000)) s6 = ~s6;
    if (ones({4'b0, s6}, 6) != 3) rd = ~rd;
    // 3b/4b
    if (yv == 7 && (k || (!rd && (x == 17 || x == 18 || x == 20)) ||
                         (rd && (x == 11 || x == 13 || x == 14))))
      s4 = 4'b0111;                                     // A7
    else if (k && x == 28)
      s4 = T4[yv] ^ ((yv == 1 || yv == 2 || yv == 5 || yv == 6) ? 4'b1111 : 4'b0000);
    else s4 = T4[yv];
    // K28.1/.2/.5/.6 use the inverted balanced form at RD-
    if (k && x == 28 && (yv == 1 || yv == 2 || yv == 5 || yv == 6)) begin
      if (rd) s4 = ~s4;  // at RD+ the plain data form is used
    end else if (rd && (ones({6'b0, s4}, 4) != 2 || s4 == 4'b1100)) s4 = ~s4;
    if (ones({6'b0, s4}, 4) != 2) rd = ~rd;
    return {s6, s4};
  endfunction

endpackage
