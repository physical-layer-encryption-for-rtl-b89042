// tb_enc8b10b: the encoder against the Clause 36 tables of the reference
// model for a long random sequence of all 268 valid symbols (K28.7 included),
// plus fixed code-groups (K28.5 at RD+, D21.5, D0.0), and line properties of
// the serial stream: running digital sum within +-3 at code-group
// boundaries, no run longer than 5, and commas only inside K28.1/.5/.7
// (except across K28.7 and its neighbour, which the standard allows).
module tb_enc8b10b;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic k;
  logic [7:0] d;
  logic [9:0] code;
  logic rd;
  int checks = 0, failures = 0;

  enc8b10b dut (.clk, .rst_n, .k, .d, .code, .rd);
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam byte unsigned KALL [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC,
                                         8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};

  initial begin
    bit rrd = 1;           // RD after the reset code-group K28.5(RD-)
    bit pk;
    byte unsigned pd;
    logic [9:0] e;
    int rds = 0, run = 0;
    bit last = 0;
    logic [19:0] win = 0;
    bit comma_ok_prev = 0, comma_ok, prev_k287 = 0;
    k = 1; d = 8'hBC;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      if (i == 0) begin pk = 1; pd = 8'hBC; end
      else if (i == 1) begin pk = 0; pd = 8'hB5; end        // D21.5
      else if ($urandom % 5 == 0) begin pk = 1; pd = KALL[$urandom % 12]; end
      else begin pk = 0; pd = 8'($urandom); end
      k = pk; d = pd;
      e = enc_ref(pk, pd, rrd);
      @(negedge clk);
      checks++;
      if (code !== e || rd !== rrd) begin
        failures++;
        if (failures < 10) $display("sym %0d/%h got %b exp %b", pk, pd, code, e);
      end
      if (i == 0) begin checks++; if (code !== 10'b110000_0101) failures++; end
      if (i == 1) begin checks++; if (code !== 10'b101010_1010) failures++; end
      // serial stream properties, bit 9 first
      for (int b = 9; b >= 0; b--) begin
        rds += code[b] ? 1 : -1;
        run = (code[b] == last) ? run + 1 : 1;
        last = code[b];
        if (run > 5) begin failures++; checks++; $display("run > 5"); end
      end
      checks++;
      if (rds > 3 || rds < -3) begin failures++; $display("disparity %0d", rds); end
      // comma search on the last two code-groups, positions not at a
      // boundary of a K28.1/.5/.7 code-group must not hold one
      win = {win[9:0], code};
      comma_ok = pk && pd[4:0] == 5'd28 && (pd[7:5] == 1 || pd[7:5] == 5 || pd[7:5] == 7);
      // K28.7 followed by some symbols makes such a comma by design
      for (int s = 1; s < 10 && !prev_k287 && !(pk && pd == 8'hFC); s++) begin
        logic [6:0] w7;
        w7 = win[19 - s -: 7];
        if (w7 == 7'b0011111 || w7 == 7'b1100000) begin
          checks++; failures++; $display("misaligned comma");
        end
      end
      if ((code[9:3] == 7'b0011111 || code[9:3] == 7'b1100000) && !comma_ok) begin
        checks++; failures++; $display("comma in %0d/%h", pk, pd);
      end
      comma_ok_prev = comma_ok;
      prev_k287 = pk && pd == 8'hFC;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
