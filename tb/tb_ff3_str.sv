// tb_ff3_str: random integers below 267^11 (and 0, 267^11-1) enter every
// period; ten period strobes later the 11 digits must equal the base-267
// digits of the value, least significant first (STR then REV), as computed
// by the reference conversion in this testbench.
module tb_ff3_str;
  logic clk = 0, adv = 0;
  logic [95:0] num;
  logic [10:0][8:0] digits;
  int checks = 0, failures = 0;
  localparam logic [255:0] M = 256'd491613584498601037846604883;  // 267^11

  ff3_str dut (.clk, .adv, .num, .digits);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [95:0] q [$];

  initial begin
    logic [255:0] v;
    for (int i = 0; i < 200; i++) begin
      v = {$urandom, $urandom, $urandom} % M;
      if (i == 0) v = 0;
      if (i == 1) v = M - 1;
      num = v[95:0];
      q.push_back(num);
      adv = 1;
      @(negedge clk);
      adv = 0;
      @(negedge clk);
      if (q.size() >= 10) begin
        logic [255:0] e;
        e = {160'd0, q.pop_front()};
        checks++;
        for (int j = 0; j < 11; j++) begin
          if (digits[j] !== 9'(e % 267)) begin
            failures++;
            $display("digit %0d got %0d exp %0d", j, digits[j], e % 267);
            break;
          end
          e = e / 267;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
