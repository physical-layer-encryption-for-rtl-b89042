// tb_tx_pcs_ctrl: GMII frames of random length with random gaps (so both
// start alignments occur, and one frame carries TX_ER). The symbol stream
// is parsed: between frames only K28.5 at even positions each followed by
// D16.2; /S/ at an even position; then exactly the frame's octets minus the
// first one (start at an even position) or two (odd), with /V/ where TX_ER
// was high; then /T/, /R/ and a second /R/ only if needed to make the next
// K28.5 even. Counts starts of both alignments and both /R/ endings.
module tb_tx_pcs_ctrl;
  logic clk = 0, rst_n = 0;
  logic [7:0] gmii_txd = 0;
  logic gmii_tx_en = 0, gmii_tx_er = 0;
  logic k;
  logic [7:0] d;
  int checks = 0, failures = 0;

  tx_pcs_ctrl dut (.clk, .rst_n, .gmii_txd, .gmii_tx_en, .gmii_tx_er, .k, .d);
  always #4 clk = ~clk;

  initial begin
    #800000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected octets per frame (0x1FF marks a /V/)
  int exp_q [$];
  int cyc = 0;            // cycle index of the GMII input being driven
  int n_even = 0, n_odd = 0, n_r1 = 0, n_r2 = 0, n_v = 0, n_frames = 0;

  // symbol monitor: symbol sampled after the edge ending cycle c has position c%2
  typedef enum {M_IDLE0, M_IDLE1, M_DATA, M_R, M_R2} mstate_t;
  mstate_t ms = M_IDLE0;
  int pos = 0;
  logic started = 0;
  always @(posedge clk) started <= rst_n;
  always @(negedge clk) if (started) begin
    bit even;
    even = (pos % 2 == 0);
    pos++;
    case (ms)
      M_IDLE0: begin
        checks++;
        if (k && d == 8'hBC && even) ms = M_IDLE1;
        else if (k && d == 8'hFB && even) ms = M_DATA;
        else begin failures++; $display("bad idle/start %0d/%h at pos %0d", k, d, pos - 1); end
      end
      M_IDLE1: begin
        checks++;
        if (!(!k && d == 8'h50)) begin failures++; $display("bad D16.2"); end
        ms = M_IDLE0;
      end
      M_DATA: begin
        if (k && d == 8'hFD) begin
          checks++;
          if (exp_q.size() != 0) begin failures++; $display("frame short by %0d", exp_q.size()); end
          exp_q.delete();
          n_frames++;
          ms = M_R;
        end else begin
          int e;
          e = exp_q.size() ? exp_q.pop_front() : -1;
          checks++;
          if (e == 'h1FF) begin
            n_v++;
            if (!(k && d == 8'hFE)) begin failures++; $display("missing /V/"); end
          end else if (k || int'(d) != e) begin
            failures++; $display("data got %0d/%h exp %h", k, d, e);
          end
        end
      end
      M_R: begin
        checks++;
        if (!(k && d == 8'hF7)) begin failures++; $display("missing /R/"); end
        if (even) ms = M_R2; else begin ms = M_IDLE0; n_r1++; end
      end
      M_R2: begin
        checks++;
        if (!(k && d == 8'hF7)) begin failures++; $display("missing 2nd /R/"); end
        n_r2++;
        ms = M_IDLE0;
      end
    endcase
  end

  task automatic send_frame(int len, bit with_er);
    // GMII cycle cyc produces the symbol at position cyc
    bit odd_start;
    odd_start = (cyc % 2 == 1);
    if (odd_start) n_odd++; else n_even++;
    for (int i = 0; i < len; i++) begin
      logic [7:0] b;
      b = (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : 8'($urandom);
      gmii_tx_en = 1;
      gmii_tx_er = with_er && (i == 20);
      gmii_txd = b;
      if (i >= (odd_start ? 2 : 1)) exp_q.push_back(gmii_tx_er ? 'h1FF : int'(b));
      @(negedge clk); cyc++;
    end
    gmii_tx_en = 0; gmii_tx_er = 0;
  endtask

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    repeat (10) begin @(negedge clk); cyc++; end
    for (int f = 0; f < 40; f++) begin
      send_frame(30 + $urandom % 60, f == 5);
      repeat (12 + $urandom % 7) begin @(negedge clk); cyc++; end
    end
    repeat (6) @(negedge clk);
    checks++;
    if (n_even == 0 || n_odd == 0 || n_r1 == 0 || n_r2 == 0 || n_v != 1 || n_frames != 40) begin
      failures++;
      $display("coverage: even %0d odd %0d R %0d RR %0d V %0d frames %0d", n_even, n_odd, n_r1, n_r2, n_v, n_frames);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
