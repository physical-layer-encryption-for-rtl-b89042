// tb_ff3_modadd: random round inputs (A below 267^11, any B, any 128-bit y,
// plus the corner cases y = 0, y = 2^128-1, A = 267^11-1); after two period
// strobes the outputs must be A' = B and B' = (A + y) mod 267^11, computed
// here with wide arithmetic. Inputs change every period, so the two-stage
// pipeline is checked with a new operand set in flight each period.
module tb_ff3_modadd;
  logic clk = 0, adv = 0;
  logic [95:0] a_in, b_in, a_out, b_out;
  logic [127:0] y_in;
  int checks = 0, failures = 0;
  localparam logic [255:0] M = 256'd491613584498601037846604883;  // 267^11

  ff3_modadd dut (.clk, .adv, .a_in, .b_in, .y_in, .a_out, .b_out);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [95:0] ea [$], eb [$];

  initial begin
    logic [255:0] a, y;
    for (int i = 0; i < 300; i++) begin
      a = {$urandom, $urandom, $urandom} % M;
      y = {$urandom, $urandom, $urandom, $urandom};
      if (i == 0) y = 0;
      if (i == 1) begin y = {128{1'b1}}; a = M - 1; end
      a_in = a[95:0];
      b_in = {$urandom, $urandom, $urandom};
      y_in = y[127:0];
      ea.push_back(b_in);
      eb.push_back(96'((a + y) % M));
      adv = 1;
      @(negedge clk);
      adv = 0;
      @(negedge clk);
      if (i >= 1) begin
        logic [95:0] xa, xb;
        xa = ea.pop_front(); xb = eb.pop_front();
        checks++;
        if (a_out !== xa || b_out !== xb) begin
          failures++;
          $display("op %0d: got %h %h exp %h %h", i - 1, a_out, b_out, xa, xb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
