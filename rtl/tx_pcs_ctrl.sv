// tx_pcs_ctrl: TX_PCS_CTRL, the transmit PCS controller (simplified Clause 36).
//
// Turns the GMII transmit bus of the MAC into the 8b/10b symbol stream that
// the encryptor ciphers. Between frames it sends IDLE ordered sets /I2/, each
// the comma K28.5 followed by the data symbol D16.2, with K28.5 always in an
// even position. A frame (TX_EN high) starts with /S/ (K27.7) in place of a
// preamble octet, carries the MAC octets as data symbols (/V/ = K30.7 where
// TX_ER is high) and ends with /T/ (K29.7) and /R/ (K23.7), plus a second /R/
// when needed to bring the next IDLE back to an even position.
//
// The paper names this controller and describes its IDLE pattern; the rest
// follows IEEE 802.3 Clause 36, reduced: only /I2/ IDLEs (no /I1/), no
// auto-negotiation, no carrier extension. Own choice: if TX_EN rises where
// the next symbol is odd, the IDLE is completed with D16.2 and /S/ replaces
// the second preamble octet, so the preamble loses one octet.
//
// Timing: one register, k/d follow the GMII inputs by one clock.
module tx_pcs_ctrl
  import pcs_crypt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] gmii_txd,
  input  logic       gmii_tx_en,
  input  logic       gmii_tx_er,
  output logic       k,
  output logic [7:0] d
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_DATA, S_END_R, S_END_R2} state_t;

  state_t     state, state_n;
  logic       odd;            // position of the symbol produced this cycle
  logic       k_n;
  logic [7:0] d_n;

  always_comb begin
    state_n = state;
    k_n     = 1'b0;
    d_n     = gmii_txd;
    unique case (state)
      S_IDLE: begin
        if (gmii_tx_en && !odd) begin
          k_n = 1'b1; d_n = K27_7;            // /S/
          state_n = S_DATA;
        end else begin
          k_n = !odd; d_n = odd ? D16_2 : K28_5;
          if (gmii_tx_en) state_n = S_START;   // /S/ next, at even position
        end
      end
      S_START: begin
        k_n = 1'b1; d_n = K27_7;
        state_n = S_DATA;
      end
      S_DATA: begin
        if (!gmii_tx_en) begin
          k_n = 1'b1; d_n = K29_7;            // /T/
          state_n = S_END_R;
        end else if (gmii_tx_er) begin
          k_n = 1'b1; d_n = K30_7;            // /V/
        end
      end
      S_END_R: begin
        k_n = 1'b1; d_n = K23_7;              // /R/
        state_n = odd ? S_IDLE : S_END_R2;
      end
      default: begin                          // S_END_R2
        k_n = 1'b1; d_n = K23_7;
        state_n = S_IDLE;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      odd   <= 1'b0;
      k     <= 1'b1;
      d     <= K28_5;
    end else begin
      state <= state_n;
      odd   <= !odd;
      k     <= k_n;
      d     <= d_n;
    end
  end

  // IDLE commas only in even positions
  always_ff @(posedge clk)
    if (rst_n && state == S_IDLE && !(gmii_tx_en && !odd))
      assert (odd || (k_n && d_n == K28_5));

endmodule
