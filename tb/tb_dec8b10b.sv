// tb_dec8b10b: the decoder fed code-groups made by the reference encoder
// (not the RTL one) for a random sequence of all 268 valid symbols must
// return each symbol one clock later without errors. Then invalid code-groups
// must raise code_err and a code-group from the wrong disparity column must
// raise disp_err while still decoding to its symbol.
module tb_dec8b10b;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [9:0] code;
  logic k, code_err, disp_err;
  logic [7:0] d;
  int checks = 0, failures = 0;

  dec8b10b dut (.clk, .rst_n, .code, .k, .d, .code_err, .disp_err);
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
    bit rrd = 0;
    bit pk;
    byte unsigned pd;
    code = 10'b0011111010;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    // the reset value is K28.5 (RD-), leaving RD+ in the decoder too
    @(negedge clk);
    rrd = 1;
    for (int i = 0; i < 20000; i++) begin
      if ($urandom % 5 == 0) begin pk = 1; pd = KALL[$urandom % 12]; end
      else begin pk = 0; pd = 8'($urandom); end
      code = enc_ref(pk, pd, rrd);
      @(negedge clk);
      checks++;
      if (k !== pk || d !== pd || code_err || disp_err) begin
        failures++;
        if (failures < 10) $display("code %b: got %0d/%h err %0d%0d exp %0d/%h", code, k, d, code_err, disp_err, pk, pd);
      end
    end
    // invalid code-groups
    code = 10'b0000000000;
    @(negedge clk);
    checks++;
    if (!code_err) begin failures++; $display("no code_err for 0000000000"); end
    code = 10'b1111000000;       // 111100 is in no 6b column
    @(negedge clk);
    checks++;
    if (!code_err) begin failures++; $display("no code_err for 1111000000"); end
    // decoder RD is now negative; D0.0 from the RD+ column is a disparity error
    rrd = 1;
    code = enc_ref(0, 8'h00, rrd);
    @(negedge clk);
    checks++;
    if (!disp_err || k || d !== 8'h00) begin failures++; $display("no disp_err"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
