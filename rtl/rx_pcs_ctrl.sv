// rx_pcs_ctrl: RX_PCS_CTRL, the receive PCS controller (simplified Clause 36).
//
// Turns the decrypted 8b/10b symbol stream back into the GMII receive bus.
// /S/ (K27.7) opens a frame and is delivered as a preamble octet 0x55 with
// RX_DV high; data symbols follow as octets; /T/ (K29.7) closes the frame.
// Inside a frame any other control symbol, or a decoder error, raises RX_ER
// (a K28.5 comma there also closes the frame). Outside frames RX_DV is low.
//
// The paper only names this controller; the behaviour is the data path of
// IEEE 802.3 Clause 36 receive, without its synchronisation and
// auto-negotiation state machines. Timing: one register, outputs follow the
// symbol inputs by one clock.
module rx_pcs_ctrl
  import pcs_crypt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       k,
  input  logic [7:0] d,
  input  logic       err,
  output logic [7:0] gmii_rxd,
  output logic       gmii_rx_dv,
  output logic       gmii_rx_er
);

  logic in_frame;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_frame   <= 1'b0;
      gmii_rxd   <= '0;
      gmii_rx_dv <= 1'b0;
      gmii_rx_er <= 1'b0;
    end else if (!in_frame) begin
      gmii_rx_er <= 1'b0;
      if (k && d == K27_7 && !err) begin
        in_frame   <= 1'b1;
        gmii_rx_dv <= 1'b1;
        gmii_rxd   <= 8'h55;
      end else begin
        gmii_rx_dv <= 1'b0;
        gmii_rxd   <= '0;
      end
    end else begin
      gmii_rxd <= d;
      if (k && d == K29_7 && !err) begin
        in_frame   <= 1'b0;
        gmii_rx_dv <= 1'b0;
        gmii_rx_er <= 1'b0;
      end else if (k && d == K28_5) begin
        in_frame   <= 1'b0;
        gmii_rx_dv <= 1'b0;
        gmii_rx_er <= 1'b1;
      end else begin
        gmii_rx_dv <= 1'b1;
        gmii_rx_er <= k || err;
      end
    end
  end

endmodule
