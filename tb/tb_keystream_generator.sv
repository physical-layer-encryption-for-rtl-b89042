// tb_keystream_generator: after reset ks_valid must rise after exactly
// 27 x 22 = 594 cycles, and from then on ks must deliver one symbol per
// clock equal to symbol (t mod 22) of FF3_K(INIT_CNT + t/22) from the
// reference model, for 12 blocks. INIT_CNT's low digit starts at 262 so the
// counter carries into the next digit within the run.
module tb_keystream_generator;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [127:0] key;
  logic [21:0][8:0] cnt_init;
  logic [8:0] ks;
  logic ks_valid, block_strobe;
  logic [4:0] slot;
  int checks = 0, failures = 0;

  keystream_generator dut (.clk, .rst_n, .key, .cnt_init, .ks, .ks_valid, .slot, .block_strobe);
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_arr_t c0, y;
    int cyc = 0;
    key = {$urandom, $urandom, $urandom, $urandom};
    c0 = new[22];
    for (int j = 0; j < 22; j++) c0[j] = $urandom % 267;
    c0[21] = 262;
    for (int j = 0; j < 22; j++) cnt_init[j] = 9'(c0[j]);
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    while (!ks_valid && cyc < 2000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 594) begin failures++; $display("ks_valid after %0d cycles", cyc); end
    for (int b = 0; b < 12; b++) begin
      y = ff3_encrypt(key, 64'h0, 267, ctr_add(c0, b, 267));
      for (int j = 0; j < 22; j++) begin
        checks++;
        if (!ks_valid || ks !== 9'(y[j]) || slot !== 5'(j) || block_strobe !== (j == 21)) begin
          failures++;
          if (failures < 10) $display("block %0d sym %0d got %0d exp %0d", b, j, ks, y[j]);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
