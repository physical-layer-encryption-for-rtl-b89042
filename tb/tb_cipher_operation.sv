// tb_cipher_operation: an encrypting and a decrypting instance in series.
// Random symbols from the 267-symbol alphabet (plus some K28.7 and invalid
// K values) and random keystream symbols; the encrypted symbol must be
// demap((map(s) + ks) mod 267) by the reference numbering one clock later,
// the decrypting instance (fed the same keystream one clock later) must give
// the plaintext back (keystream, enable and valid delayed by one clock), and with en = 0 or ks_valid = 0 symbols pass unchanged.
module tb_cipher_operation;
  import ref_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, ks_valid, en_d, ksv_d;
  logic k_in, k_ct, k_pt;
  logic [7:0] d_in, d_ct, d_pt;
  logic [8:0] ks, ks_d;
  int checks = 0, failures = 0;

  cipher_operation #(.DECRYPT(1'b0)) enc (.clk, .rst_n, .en, .k_in, .d_in, .ks, .ks_valid,
                                          .k_out(k_ct), .d_out(d_ct));
  cipher_operation #(.DECRYPT(1'b1)) dec (.clk, .rst_n, .k_in(k_ct), .d_in(d_ct), .ks(ks_d), .ks_valid(ksv_d), .en(en_d),
                                          .k_out(k_pt), .d_out(d_pt));
  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ek, pk, pk2, ck;
    byte unsigned ed, pd, pd2, cd;
    bit pen, pen2;
    int m;
    en = 1; ks_valid = 1; en_d = 1; ksv_d = 1; k_in = 0; d_in = 0; ks = 0; ks_d = 0;
    pk = 0; pd = 0; pk2 = 0; pd2 = 0; pen = 0; pen2 = 0; ck = 0; cd = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      // drive a new plaintext symbol and keystream symbol
      automatic int r = $urandom % 100;
      pk2 = pk; pd2 = pd; pen2 = pen;
      if (r < 3) begin k_in = 1; d_in = 8'hFC; end                 // K28.7
      else if (r < 5) begin k_in = 1; d_in = 8'h00; end            // not a control code
      else if (r < 25) begin k_in = 1; d_in = KVAL[$urandom % 11]; end
      else begin k_in = 0; d_in = 8'($urandom); end
      en_d = en; ksv_d = ks_valid;
      en = (i < 2500) || (i % 2 == 0);
      ks_valid = (i != 100);
      pk = k_in; pd = d_in; pen = en && ks_valid;
      ks_d = ks;
      ks = 9'($urandom % 267);
      m = map_ref(k_in, d_in);
      if (!pen || m < 0) begin ek = k_in; ed = d_in; end
      else demap_ref((m + ks) % 267, ek, ed);
      @(negedge clk);
      checks++;
      if (k_ct !== ek || d_ct !== ed) begin
        failures++;
        if (failures < 10) $display("enc %0d: got %0d/%h exp %0d/%h", i, k_ct, d_ct, ek, ed);
      end
      if (i > 0) begin
        checks++;
        if (k_pt !== pk2 || d_pt !== pd2) begin
          failures++;
          if (failures < 10) $display("dec %0d: got %0d/%h exp %0d/%h", i, k_pt, d_pt, pk2, pd2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
