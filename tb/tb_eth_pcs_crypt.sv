// tb_eth_pcs_crypt: the whole encrypted PCS at its default size, end to end.
//
// The ten-bit transmit bus is looped back to the receive bus, so the receive
// path decrypts what the transmit path encrypted. The receive reset and
// decryption enable follow the transmit ones by LINK = 3 cycles (cipher,
// encoder and decoder registers), which aligns the two keystreams. The run:
//   1. reset and keystream start-up (594 cycles; symbols pass in the clear);
//   2. encryption off: IDLE and two frames in the clear;
//   3. encryption on, traffic pattern A (IDLE only), then B, C, D: frames of
//      1024 octets at 10.2 %, 50 % and 91 % of the line rate;
//   4. encryption off again and one more frame.
// Every frame must come back on GMII RX octet for octet, with no decoder
// code or disparity error and no RX_ER anywhere. The testbench also measures,
// on the cipher output, the share of control symbols and the symbol entropy
// (n = 1) per pattern: encrypted, the IDLE stream must look like any other
// (entropy close to log2(267) = 8.06 bits) while in the clear it has 1 bit.
// Each mechanism (start-up bypass, encryption off and on, both switches,
// FF3 block refresh, CTR counter carry, control symbols created from data,
// both frame start alignments, frames in each pattern) is counted and must
// occur.
module tb_eth_pcs_crypt;
  import ref_model_pkg::*;

  localparam int LINK = 3;
  logic clk = 0, tx_rst_n = 0, rx_rst_n = 0;
  logic [127:0] key;
  logic [21:0][8:0] tx_cnt_init, rx_cnt_init;
  logic tx_enc_en = 0, rx_dec_en = 0;
  logic [7:0] gmii_txd = 0, gmii_rxd;
  logic gmii_tx_en = 0, gmii_tx_er = 0, gmii_rx_dv, gmii_rx_er;
  logic [9:0] tx_code, rx_code;
  logic tx_ks_valid, rx_ks_valid, rx_code_err, rx_disp_err;
  int checks = 0, failures = 0;

  eth_pcs_crypt dut (.*);
  assign rx_code = tx_code;       // fibre loop-back
  always #4 clk = ~clk;

  // receive side follows the transmit side by LINK cycles
  always @(posedge clk) begin
    logic [LINK-1:0] rst_d, en_d;
    rst_d = {rst_d[LINK-2:0], tx_rst_n};
    en_d  = {en_d[LINK-2:0], tx_enc_en};
    rx_rst_n  <= rst_d[LINK-1];
    rx_dec_en <= en_d[LINK-1];
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- GMII RX
  int sent_q [$][$];         // octets after the SFD of each frame sent
  int rx_frame [$];
  int frames_ok = 0, frames_rx = 0;
  always @(negedge clk) if (rx_rst_n) begin
    if (rx_code_err || rx_disp_err || gmii_rx_er) begin
      checks++; failures++;
      $display("receive error: code %0d disp %0d rx_er %0d", rx_code_err, rx_disp_err, gmii_rx_er);
    end
    if (gmii_rx_dv) rx_frame.push_back(int'(gmii_rxd));
    else if (rx_frame.size() != 0) begin
      automatic int idx = -1;
      automatic int exp [$];
      frames_rx++;
      checks++;
      foreach (rx_frame[i]) if (idx < 0 && rx_frame[i] == 'hD5) idx = i;
      if (sent_q.size() == 0 || idx < 0) begin failures++; $display("unexpected frame"); end
      else begin
        exp = sent_q.pop_front();
        if (rx_frame.size() - idx - 1 != exp.size()) begin
          failures++; $display("frame length %0d exp %0d", rx_frame.size() - idx - 1, exp.size());
        end else begin
          bit ok = 1;
          foreach (exp[i]) if (rx_frame[idx + 1 + i] != exp[i]) ok = 0;
          if (!ok) begin failures++; $display("frame content differs"); end
          else frames_ok++;
        end
      end
      rx_frame.delete();
    end
  end

  // ------------------------------------------------------ line observation
  // symbol at the cipher output (input of the 8b/10b encoder)
  int hist [267];
  int nsym = 0, nk = 0, n_k_from_d = 0, n_blocks = 0, n_bypass_startup = 0;
  bit measuring = 0;
  always @(negedge clk) if (tx_rst_n) begin
    if (dut.u_tx_enc.u_op.k_out && !$past(dut.u_tx_enc.u_op.k_in) && tx_enc_en && tx_ks_valid)
      n_k_from_d++;
    if (dut.tx_blk) n_blocks++;
    if (!tx_ks_valid) n_bypass_startup++;
    if (measuring) begin
      automatic int m = map_ref(dut.u_tx_enc.u_op.k_out, dut.u_tx_enc.u_op.d_out);
      if (m >= 0) hist[m]++;
      nsym++;
      if (dut.u_tx_enc.u_op.k_out) nk++;
    end
  end

  task automatic measure_start();
    foreach (hist[i]) hist[i] = 0;
    nsym = 0; nk = 0; measuring = 1;
  endtask

  function automatic real entropy();
    real h = 0.0;
    foreach (hist[i]) if (hist[i] != 0) begin
      real p = real'(hist[i]) / real'(nsym);
      h -= p * $ln(p) / $ln(2.0);
    end
    return h;
  endfunction

  // ------------------------------------------------------------ GMII TX
  int cyc = 0;
  int n_odd = 0, n_even = 0;
  task automatic idle(int n);
    repeat (n) begin @(negedge clk); cyc++; end
  endtask

  task automatic send_frame(int payload);
    int body [$];
    if (cyc % 2) n_odd++; else n_even++;
    for (int i = 0; i < 8 + payload; i++) begin
      gmii_tx_en = 1;
      gmii_txd = (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : 8'($urandom);
      if (i >= 8) body.push_back(int'(gmii_txd));
      @(negedge clk); cyc++;
    end
    gmii_tx_en = 0;
    sent_q.push_back(body);
  endtask

  // frames of 1024 octets (+8 preamble/SFD) at a given share of line rate
  task automatic pattern(string name, real rate, int nframes, bit enc);
    int gap;
    real h, kshare;
    int f0 = frames_ok;
    gap = int'(1032.0 / rate) - 1032;
    measure_start();
    for (int f = 0; f < nframes; f++) begin
      send_frame(1024);
      idle(gap);
    end
    measuring = 0;
    h = entropy();
    kshare = real'(nk) / real'(nsym);
    $display("pattern %s %s: %0d symbols, entropy %f bit/symbol, control symbols %f",
             name, enc ? "encrypted" : "clear", nsym, h, kshare);
    if (enc) begin
      checks++;
      if (kshare < 0.02 || kshare > 0.07) begin failures++; $display("control share off"); end
    end
    idle(LINK + 4);
    checks++;
    if (frames_ok - f0 != nframes) begin failures++; $display("pattern %s: %0d of %0d frames", name, frames_ok - f0, nframes); end
  endtask

  int n_enc_on = 0, n_enc_off = 0, n_frames_clear = 0, n_frames_enc = 0;

  initial begin
    real h;
    key = {$urandom, $urandom, $urandom, $urandom};
    foreach (tx_cnt_init[j]) tx_cnt_init[j] = 9'($urandom % 267);
    tx_cnt_init[21] = 9'd266;       // first increment carries
    rx_cnt_init = tx_cnt_init;
    repeat (3) @(negedge clk);
    tx_rst_n = 1;
    // 1. start-up, encryption requested but keystream not yet valid
    tx_enc_en = 1;
    while (!tx_ks_valid) idle(1);
    idle(LINK + 2);
    checks++;
    if (!rx_ks_valid) begin failures++; $display("rx keystream not valid"); end
    // 2. encryption off: IDLE then frames in the clear
    tx_enc_en = 0; n_enc_off++;
    idle(20);
    measure_start();
    idle(2000);
    measuring = 0;
    h = entropy();
    $display("pattern A clear: %0d symbols, entropy %f bit/symbol, control symbols %f", nsym, h, real'(nk) / real'(nsym));
    checks++;
    if (h < 0.99 || h > 1.01) begin failures++; $display("clear IDLE entropy %f", h); end
    send_frame(100); idle(20);
    send_frame(1024); idle(20);
    n_frames_clear += 2;
    // 3. encryption on
    tx_enc_en = 1; n_enc_on++;
    idle(LINK + 2);
    measure_start();
    idle(30000);
    measuring = 0;
    h = entropy();
    $display("pattern A encrypted (E): %0d symbols, entropy %f bit/symbol, control symbols %f", nsym, h, real'(nk) / real'(nsym));
    checks++;
    if (h < 7.95) begin failures++; $display("encrypted IDLE entropy %f", h); end
    pattern("B", 0.102, 2, 1);
    pattern("C", 0.50, 4, 1);
    pattern("D", 0.91, 8, 1);
    n_frames_enc += 14;
    // 4. encryption off again
    tx_enc_en = 0; n_enc_off++;
    idle(LINK + 2);
    send_frame(200); idle(30);
    n_frames_clear++;
    idle(10);
    checks++;
    if (frames_ok != n_frames_clear + n_frames_enc || sent_q.size() != 0) begin
      failures++; $display("frames ok %0d of %0d", frames_ok, n_frames_clear + n_frames_enc);
    end
    // mechanism coverage
    $display("coverage: startup bypass %0d cycles, enc on %0d, enc off %0d, blocks %0d, K from D %0d, starts even %0d odd %0d, counter carry %0d",
             n_bypass_startup, n_enc_on, n_enc_off, n_blocks, n_k_from_d, n_even, n_odd,
             int'(dut.u_tx_enc.u_ksg.cnt[20] != tx_cnt_init[20]));
    checks++;
    if (n_bypass_startup == 0 || n_enc_on == 0 || n_enc_off < 2 || n_blocks < 100 ||
        n_k_from_d == 0 || n_even == 0 || n_odd == 0 ||
        dut.u_tx_enc.u_ksg.cnt[20] == tx_cnt_init[20]) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
