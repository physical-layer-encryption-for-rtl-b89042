// tb_symbol_demap: every value 0..266 against the reference inverse
// numbering, and map(demap(v)) = v through an instance of symbol_map.
module tb_symbol_demap;
  import ref_model_pkg::*;
  logic [8:0] v, v2;
  logic k, ok;
  logic [7:0] d;
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  symbol_demap dut (.v, .k, .d);
  symbol_map   inv (.k, .d, .v(v2), .ok);

  initial begin
    bit ek;
    byte unsigned ed;
    for (int i = 0; i < 267; i++) begin
      v = 9'(i);
      #1;
      demap_ref(i, ek, ed);
      checks++;
      if (k !== ek || d !== ed) begin failures++; $display("v=%0d got %0d/%h exp %0d/%h", i, k, d, ek, ed); end
      checks++;
      if (!ok || v2 !== v) begin failures++; $display("round trip of %0d gives %0d", i, v2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
