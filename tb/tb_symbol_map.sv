// tb_symbol_map: all 512 (K, octet) inputs against the reference numbering:
// data symbols keep their value, the eleven control symbols take 256..266,
// anything else (K28.7 included) is reported as outside the alphabet.
module tb_symbol_map;
  import ref_model_pkg::*;
  logic k;
  logic [7:0] d;
  logic [8:0] v;
  logic ok;
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  symbol_map dut (.k, .d, .v, .ok);

  initial begin
    int e, nk = 0;
    for (int i = 0; i < 512; i++) begin
      k = i[8]; d = i[7:0];
      #1;
      e = map_ref(k, d);
      checks++;
      if (e < 0) begin
        if (ok !== 1'b0) begin failures++; $display("k=%0d d=%h should be rejected", k, d); end
      end else begin
        if (k) nk++;
        if (ok !== 1'b1 || v !== 9'(e)) begin failures++; $display("k=%0d d=%h got %0d exp %0d", k, d, v, e); end
      end
    end
    checks++;
    if (nk != 11) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
