// symbol_demap: the DEMAP block, integer in [0, 266] -> 8b/10b symbol.
//
// Inverse of symbol_map: values 0..255 are data symbols with that octet,
// 256..266 are the eleven control symbols in the order K28.0..K28.6, K23.7,
// K27.7, K29.7, K30.7 (the order is this design's choice). Inputs above 266
// cannot occur after a modulo-267 operation; they map to K28.5.
// Purely combinational.
module symbol_demap (
  input  logic [8:0] v,
  output logic       k,
  output logic [7:0] d
);

  always_comb begin
    k = v[8];
    d = v[7:0];
    if (v[8]) begin
      unique case (v)
        9'd256:  d = 8'h1C;  // K28.0
        9'd257:  d = 8'h3C;  // K28.1
        9'd258:  d = 8'h5C;  // K28.2
        9'd259:  d = 8'h7C;  // K28.3
        9'd260:  d = 8'h9C;  // K28.4
        9'd261:  d = 8'hBC;  // K28.5
        9'd262:  d = 8'hDC;  // K28.6
        9'd263:  d = 8'hF7;  // K23.7
        9'd264:  d = 8'hFB;  // K27.7
        9'd265:  d = 8'hFD;  // K29.7
        9'd266:  d = 8'hFE;  // K30.7
        default: d = 8'hBC;
      endcase
    end
  end

endmodule
