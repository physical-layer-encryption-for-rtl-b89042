// tb_ff3_num: random halves of 11 radix-267 symbols; the registered value
// must equal NUM(REV(x)) of the reference model one period strobe later and
// hold while the strobe is low.
module tb_ff3_num;
  import ref_model_pkg::*;
  logic clk = 0, adv = 0;
  logic [10:0][8:0] digits;
  logic [95:0] num;
  int checks = 0, failures = 0;

  ff3_num dut (.clk, .adv, .digits, .num);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_arr_t x;
    logic [255:0] e;
    x = new[11];
    for (int i = 0; i < 200; i++) begin
      for (int j = 0; j < 11; j++) begin
        x[j] = (i == 0) ? 266 : (i == 1) ? 0 : $urandom % 267;
        digits[j] = 9'(x[j]);
      end
      e = num_rev(x, 0, 11, 267);
      adv = 1;
      @(negedge clk);
      adv = 0;
      checks++;
      if (num !== e[95:0]) begin failures++; $display("num %h exp %h", num, e[95:0]); end
      // value must hold without the strobe
      for (int j = 0; j < 11; j++) digits[j] = 9'($urandom % 267);
      @(negedge clk);
      checks++;
      if (num !== e[95:0]) begin failures++; $display("num changed without adv"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
