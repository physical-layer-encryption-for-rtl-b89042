// tb_slot_counter: after reset the count must run 0..21 and wrap, with
// 'wrap' high exactly in the cycles where the count is 21, i.e. once every
// 22 cycles (the keystream block period).
module tb_slot_counter;
  logic clk = 0, rst_n = 0;
  logic [4:0] slot;
  logic wrap;
  int checks = 0, failures = 0;

  slot_counter dut (.clk, .rst_n, .slot, .wrap);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_wrap = -1;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 500; c++) begin
      checks++;
      if (slot !== 5'(c % 22) || wrap !== (c % 22 == 21)) begin
        failures++;
        $display("cycle %0d slot %0d wrap %0d", c, slot, wrap);
      end
      if (wrap) begin
        if (last_wrap >= 0) begin
          checks++;
          if (c - last_wrap != 22) failures++;
        end
        last_wrap = c;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
