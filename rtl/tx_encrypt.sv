// tx_encrypt: the TX_ENCRYPT block of the PCS, the symbol-stream encryptor.
//
// Puts together a keystream generator (FF3 in counter mode, one radix-267
// symbol per clock) and the cipher operation, which adds the keystream
// symbol modulo 267 to each 8b/10b symbol (K flag + octet) passing between
// the PCS controller and the 8b/10b encoder. Both link ends hold the same key and
// INIT_CNT; the receiver's reset is released as many cycles after the
// transmitter's as symbols take to cross the link, so symbol t of the
// ciphertext meets keystream symbol t at both ends. The structure follows the
// paper; the reset-based alignment is this design's choice.
//
// Timing: k_out/d_out follow k_in/d_in by one clock. ks_valid rises 594
// cycles after reset (the FF3 pipeline filling); until then, and whenever
// en = 0, symbols pass unchanged. block_strobe marks the last cycle of each
// 22-cycle keystream block.
module tx_encrypt #(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11,
  localparam int unsigned SW   = $clog2(RADIX),
  localparam int unsigned N    = 2 * HALF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [127:0]         key,
  input  logic [N-1:0][SW-1:0] cnt_init,
  input  logic                 en,
  input  logic                 k_in,
  input  logic [7:0]           d_in,
  output logic                 k_out,
  output logic [7:0]           d_out,
  output logic                 ks_valid,
  output logic                 block_strobe
);

  logic [SW-1:0] ks;

  keystream_generator #(.RADIX(RADIX), .HALF(HALF)) u_ksg (
    .clk, .rst_n, .key, .cnt_init, .ks, .ks_valid, .slot(), .block_strobe);

  cipher_operation #(.DECRYPT(1'b0)) u_op (
    .clk, .rst_n, .en, .k_in, .d_in, .ks(9'(ks)), .ks_valid, .k_out, .d_out);

endmodule
