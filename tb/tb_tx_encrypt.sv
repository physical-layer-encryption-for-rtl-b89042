// tb_tx_encrypt: the encryptor end to end against the reference model. Random
// alphabet symbols enter every clock; before ks_valid (which must rise 594
// cycles after reset) they pass unchanged; afterwards output t+1 must be
// demap((map(p_t) + k_t) mod 267) with k_t symbol t of the FF3-CTR reference
// keystream. For one block (22 symbols) en is low and symbols pass unchanged
// while the keystream still advances.
module tb_tx_encrypt;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0, en = 1;
  logic [127:0] key;
  logic [21:0][8:0] cnt_init;
  logic k_in, k_out, ks_valid, block_strobe;
  logic [7:0] d_in, d_out;
  int checks = 0, failures = 0;

  tx_encrypt dut (.clk, .rst_n, .key, .cnt_init, .en, .k_in, .d_in, .k_out, .d_out, .ks_valid, .block_strobe);
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NBLK = 10;
  int ks [NBLK*22];

  function automatic void rand_sym(output bit k, output byte unsigned d);
    if ($urandom % 4 == 0) begin k = 1; d = KVAL[$urandom % 11]; end
    else begin k = 0; d = 8'($urandom); end
  endfunction

  initial begin
    sym_arr_t c0, y;
    int cyc = 0;
    bit pk, ck, ek;
    byte unsigned pd, cd, ed;
    key = {$urandom, $urandom, $urandom, $urandom};
    c0 = new[22];
    for (int j = 0; j < 22; j++) begin c0[j] = $urandom % 267; cnt_init[j] = 9'(c0[j]); end
    for (int b = 0; b < NBLK; b++) begin
      y = ff3_encrypt(key, 64'h0, 267, ctr_add(c0, b, 267));
      for (int j = 0; j < 22; j++) ks[22*b + j] = int'(y[j]);
    end
    k_in = 1; d_in = 8'hBC;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    while (!ks_valid && cyc < 2000) begin
      rand_sym(pk, pd);
      k_in = pk; d_in = pd;
      @(negedge clk);
      cyc++;
      if (cyc > 1 && !ks_valid) begin
        checks++;
        if (k_out !== pk || d_out !== pd) failures++;
      end
    end
    checks++;
    if (cyc != 594) begin failures++; $display("ks_valid after %0d cycles", cyc); end
    for (int t = 0; t < NBLK*22; t++) begin
      en = !(t >= 44 && t < 66);
      rand_sym(pk, pd);
      k_in = pk; d_in = pd;
      if (en) demap_ref((map_ref(pk, pd) + ks[t]) % 267, ek, ed);
      else begin ek = pk; ed = pd; end
      @(negedge clk);
      checks++;
      if (k_out !== ek || d_out !== ed) begin
        failures++;
        if (failures < 10) $display("symbol %0d: got %0d/%h exp %0d/%h", t, k_out, d_out, ek, ed);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
