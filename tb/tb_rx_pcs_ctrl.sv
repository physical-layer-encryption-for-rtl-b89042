// tb_rx_pcs_ctrl: feeds symbol streams of IDLEs and frames (/S/ data /T/ /R/)
// and checks the GMII receive bus one clock later: RX_DV high from /S/
// (delivered as 0x55) through the last data octet, the octets themselves,
// RX_DV low outside frames, RX_ER for a /V/ and for a decoder error inside a
// frame, and a K28.5 inside a frame ending it with RX_ER.
module tb_rx_pcs_ctrl;
  logic clk = 0, rst_n = 0;
  logic k = 1, err = 0;
  logic [7:0] d = 8'hBC;
  logic [7:0] gmii_rxd;
  logic gmii_rx_dv, gmii_rx_er;
  int checks = 0, failures = 0;

  rx_pcs_ctrl dut (.clk, .rst_n, .k, .d, .err, .gmii_rxd, .gmii_rx_dv, .gmii_rx_er);
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one symbol in, expected GMII out one clock later
  task automatic sym(bit sk, logic [7:0] sd, bit serr, bit edv, bit eer, logic [7:0] ed, bit chk_d);
    k = sk; d = sd; err = serr;
    @(negedge clk);
    checks++;
    if (gmii_rx_dv !== edv || gmii_rx_er !== eer || (chk_d && gmii_rxd !== ed)) begin
      failures++;
      $display("in %0d/%h/%0d: got dv %0d er %0d d %h exp %0d %0d %h", sk, sd, serr, gmii_rx_dv, gmii_rx_er, gmii_rxd, edv, eer, ed);
    end
  endtask

  task automatic idle(int n);
    for (int i = 0; i < n; i++) begin
      sym(1, 8'hBC, 0, 0, 0, 0, 0);
      sym(0, 8'h50, 0, 0, 0, 0, 0);
    end
  endtask

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    idle(4);
    for (int f = 0; f < 30; f++) begin
      automatic int len = 10 + $urandom % 50;
      automatic int kind = f % 5;   // 1: /V/, 2: decoder error, 3: K28.5 inside
      sym(1, 8'hFB, 0, 1, 0, 8'h55, 1);
      for (int i = 0; i < len; i++) begin
        automatic logic [7:0] b = 8'($urandom);
        if (kind == 1 && i == 5) sym(1, 8'hFE, 0, 1, 1, 8'hFE, 1);
        else if (kind == 2 && i == 5) sym(0, b, 1, 1, 1, b, 1);
        else sym(0, b, 0, 1, 0, b, 1);
      end
      if (kind == 3) begin
        sym(1, 8'hBC, 0, 0, 1, 0, 0);
        sym(0, 8'h50, 0, 0, 0, 0, 0);
      end else begin
        sym(1, 8'hFD, 0, 0, 0, 0, 0);
        sym(1, 8'hF7, 0, 0, 0, 0, 0);
      end
      idle(6 + $urandom % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
