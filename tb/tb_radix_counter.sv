// tb_radix_counter: loads INIT_CNT during reset (low digits close to 266 so
// carries ripple across several digits), then increments at random cycles
// and compares every cycle with a base-267 reference addition; also checks
// the all-266 value wraps to zero.
module tb_radix_counter;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0, inc = 0;
  logic [21:0][8:0] init, value;
  int checks = 0, failures = 0;

  radix_counter dut (.clk, .rst_n, .init, .inc, .value);
  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(sym_arr_t e);
    checks++;
    for (int j = 0; j < 22; j++)
      if (value[j] !== 9'(e[j])) begin
        failures++;
        $display("digit %0d got %0d exp %0d", j, value[j], e[j]);
        break;
      end
  endtask

  initial begin
    sym_arr_t c0;
    int n = 0;
    for (int pass = 0; pass < 2; pass++) begin
      c0 = new[22];
      for (int j = 0; j < 22; j++) c0[j] = (pass == 1) ? 266 : $urandom % 267;
      if (pass == 0) begin c0[21] = 260; c0[20] = 266; c0[19] = 266; end
      for (int j = 0; j < 22; j++) init[j] = 9'(c0[j]);
      rst_n = 0;
      @(negedge clk); @(negedge clk);
      rst_n = 1;
      n = 0;
      compare(c0);
      for (int c = 0; c < (pass == 0 ? 2000 : 3); c++) begin
        inc = ($urandom % 2 == 0);
        @(negedge clk);
        if (inc) n++;
        inc = 0;
        compare(ctr_add(c0, n, 267));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
