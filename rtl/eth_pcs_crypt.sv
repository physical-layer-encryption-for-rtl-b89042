// eth_pcs_crypt: 1000BASE-X PCS with physical-layer encryption.
//
// One Ethernet interface's Physical Coding Sublayer with a format-preserving
// stream cipher placed between the PCS controllers and the 8b/10b coder:
//
//   GMII TX -> tx_pcs_ctrl -> tx_encrypt -> enc8b10b -> tx_code (to SERDES)
//   rx_code (from SERDES) -> dec8b10b -> rx_decrypt -> rx_pcs_ctrl -> GMII RX
//
// Every symbol on the line, data, IDLE and frame delimiters alike, is
// replaced by another valid code-group, so the link keeps its 8b/10b
// properties, adds no overhead and hides the traffic pattern. The MAC and the
// SERDES are outside this module; their buses are its ports.
//
// Structure as in the paper. This design's choices: one clock for both
// directions (the receive clock recovered by the SERDES and clock-rate
// adaptation are not modelled) and separate resets, because the receive
// keystream must start exactly when the far-end transmitter's ciphertext
// arrives: release rx_rst_n as many cycles after the far end's tx_rst_n as
// a symbol needs from that transmitter's cipher to this receiver's cipher
// (3 cycles in a direct loop-back: cipher, encoder, decoder registers), and
// switch rx_dec_en the same number of cycles after tx_enc_en.
//
// Latency: GMII TX to tx_code 3 cycles; rx_code to GMII RX 3 cycles.
module eth_pcs_crypt #(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11,
  localparam int unsigned SW   = $clog2(RADIX),
  localparam int unsigned N    = 2 * HALF
) (
  input  logic                 clk,
  input  logic                 tx_rst_n,
  input  logic                 rx_rst_n,
  input  logic [127:0]         key,
  input  logic [N-1:0][SW-1:0] tx_cnt_init,
  input  logic [N-1:0][SW-1:0] rx_cnt_init,
  input  logic                 tx_enc_en,
  input  logic                 rx_dec_en,
  // GMII from / to the MAC
  input  logic [7:0]           gmii_txd,
  input  logic                 gmii_tx_en,
  input  logic                 gmii_tx_er,
  output logic [7:0]           gmii_rxd,
  output logic                 gmii_rx_dv,
  output logic                 gmii_rx_er,
  // ten-bit interface to / from the SERDES
  output logic [9:0]           tx_code,
  input  logic [9:0]           rx_code,
  // status
  output logic                 tx_ks_valid,
  output logic                 rx_ks_valid,
  output logic                 rx_code_err,
  output logic                 rx_disp_err
);

  logic       tx_k_pl, tx_k_ct, rx_k_ct, rx_k_pl;
  logic [7:0] tx_d_pl, tx_d_ct, rx_d_ct, rx_d_pl;
  logic       tx_rd, rx_err_d;
  logic       tx_blk, rx_blk;

  tx_pcs_ctrl u_tx_ctrl (
    .clk, .rst_n(tx_rst_n), .gmii_txd, .gmii_tx_en, .gmii_tx_er,
    .k(tx_k_pl), .d(tx_d_pl));

  tx_encrypt #(.RADIX(RADIX), .HALF(HALF)) u_tx_enc (
    .clk, .rst_n(tx_rst_n), .key, .cnt_init(tx_cnt_init), .en(tx_enc_en),
    .k_in(tx_k_pl), .d_in(tx_d_pl), .k_out(tx_k_ct), .d_out(tx_d_ct),
    .ks_valid(tx_ks_valid), .block_strobe(tx_blk));

  enc8b10b u_enc (
    .clk, .rst_n(tx_rst_n), .k(tx_k_ct), .d(tx_d_ct), .code(tx_code), .rd(tx_rd));

  dec8b10b u_dec (
    .clk, .rst_n(rx_rst_n), .code(rx_code), .k(rx_k_ct), .d(rx_d_ct),
    .code_err(rx_code_err), .disp_err(rx_disp_err));

  // decoder errors travel alongside the symbol through the decryptor
  always_ff @(posedge clk) rx_err_d <= rx_rst_n && rx_code_err;

  rx_decrypt #(.RADIX(RADIX), .HALF(HALF)) u_rx_dec (
    .clk, .rst_n(rx_rst_n), .key, .cnt_init(rx_cnt_init), .en(rx_dec_en),
    .k_in(rx_k_ct), .d_in(rx_d_ct), .k_out(rx_k_pl), .d_out(rx_d_pl),
    .ks_valid(rx_ks_valid), .block_strobe(rx_blk));

  rx_pcs_ctrl u_rx_ctrl (
    .clk, .rst_n(rx_rst_n), .k(rx_k_pl), .d(rx_d_pl), .err(rx_err_d),
    .gmii_rxd, .gmii_rx_dv, .gmii_rx_er);

endmodule
