// symbol_map: the MAP block, 8b/10b symbol -> integer in [0, 266].
//
// The cipher adds keystream symbols modulo 267, the number of code-groups a
// 1000BASE-X link may carry without a code error once K28.7 is excluded (its
// comma could realign the receiver). MAP numbers that alphabet:
//   data symbol Dx.y (K = 0)  -> its octet value, 0..255
//   K28.0 .. K28.6            -> 256 .. 262
//   K23.7, K27.7, K29.7, K30.7 -> 263 .. 266
// The alphabet follows the paper; the numbering order is this design's own.
// Anything else (K28.7 or a K flag with a value that is no control code)
// gives ok = 0 and is left unciphered by the cipher operation.
// Purely combinational.
module symbol_map (
  input  logic       k,
  input  logic [7:0] d,
  output logic [8:0] v,
  output logic       ok
);

  always_comb begin
    ok = 1'b1;
    v  = {1'b0, d};
    if (k) begin
      unique case (d)
        8'h1C: v = 9'd256;  // K28.0
        8'h3C: v = 9'd257;  // K28.1
        8'h5C: v = 9'd258;  // K28.2
        8'h7C: v = 9'd259;  // K28.3
        8'h9C: v = 9'd260;  // K28.4
        8'hBC: v = 9'd261;  // K28.5
        8'hDC: v = 9'd262;  // K28.6
        8'hF7: v = 9'd263;  // K23.7
        8'hFB: v = 9'd264;  // K27.7
        8'hFD: v = 9'd265;  // K29.7
        8'hFE: v = 9'd266;  // K30.7
        default: begin
          v  = '0;
          ok = 1'b0;
        end
      endcase
    end
  end

endmodule
