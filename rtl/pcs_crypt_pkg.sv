// pcs_crypt_pkg: constants and small helpers shared by the 8b/10b-symbol
// stream cipher.
//
// The cipher works on the alphabet of valid 1000BASE-X code-groups: 256 data
// symbols plus 11 control symbols (K28.7 is left out because it can form a
// comma with its neighbours), so the radix is 267 and a symbol value needs
// 9 bits. The keystream comes from FF3 with a block of 22 symbols, split into
// two halves of 11. Radix, block size, the K28.7 exclusion and the zero tweak
// follow the paper; the numeric width of a half (96 bits, the FF3 limit of
// radix^half <= 2^96) and the helpers are this design's own.
package pcs_crypt_pkg;

  localparam int unsigned RADIX  = 267;      // size of the symbol alphabet
  localparam int unsigned BLOCK  = 22;       // FF3 block size in symbols
  localparam int unsigned HALF   = BLOCK / 2; // symbols per Feistel half
  localparam int unsigned SYM_W  = 9;        // bits per mapped symbol
  localparam int unsigned NUM_W  = 96;       // bits of a half as an integer
  localparam int unsigned ROUNDS = 8;        // FF3 Feistel rounds
  localparam int unsigned AES_LAT = 10;      // AES pipeline latency, cycles
  localparam int unsigned STR_STAGES = 10;   // digit-extraction stages
  // Pipeline latency of the FF3 core in block periods:
  // NUM (1) + 8 rounds x 2 + STR (10).
  localparam int unsigned FF3_LAT_PERIODS = 1 + 2 * ROUNDS + STR_STAGES;

  typedef logic [SYM_W-1:0] sym_t;

  // 8b/10b control code-groups used by the PCS (value = {y[2:0], x[4:0]}).
  localparam logic [7:0] K28_0 = 8'h1C;
  localparam logic [7:0] K28_5 = 8'hBC;  // comma, first symbol of IDLE
  localparam logic [7:0] K28_7 = 8'hFC;  // excluded from the alphabet
  localparam logic [7:0] K23_7 = 8'hF7;  // /R/ carrier extend
  localparam logic [7:0] K27_7 = 8'hFB;  // /S/ start of packet
  localparam logic [7:0] K29_7 = 8'hFD;  // /T/ end of packet
  localparam logic [7:0] K30_7 = 8'hFE;  // /V/ error propagation
  localparam logic [7:0] D16_2 = 8'h50;  // second symbol of /I2/

  // radix ** n as a 128-bit constant (radix^half can exceed 64 bits).
  function automatic logic [127:0] pow_radix(input int unsigned radix,
                                             input int unsigned n);
    logic [127:0] r;
    r = 128'd1;
    for (int unsigned i = 0; i < n; i++) r = r * 128'(radix);
    return r;
  endfunction

  // Reverse the byte order of a 128-bit word (REVB of NIST SP 800-38G).
  function automatic logic [127:0] revb128(input logic [127:0] x);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8*i +: 8] = x[8*(15-i) +: 8];
    return r;
  endfunction

endpackage
