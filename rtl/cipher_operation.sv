// cipher_operation: MAP, modulo-267 addition (or subtraction), DEMAP.
//
// The heart of the stream cipher. Each incoming 8b/10b symbol (K flag and
// octet) is numbered 0..266 by MAP, the current keystream symbol is added
// modulo 267 (DECRYPT = 0) or subtracted modulo 267 (DECRYPT = 1), and DEMAP
// turns the result back into a K flag and octet. Because the result is
// again one of the 267 allowed code-groups, the 8b/10b encoder downstream
// keeps its DC balance, run length and comma properties, and control symbols
// and IDLEs are hidden along with the data. This follows the paper.
//
// This design's own choices: one output register (latency 1 cycle); with
// en = 0 or ks_valid = 0 the symbol passes unchanged (the keystream is still
// consumed, so both link ends stay aligned); a symbol outside the alphabet
// (ok = 0 from MAP, e.g. K28.7) also passes unchanged. Ciphertext never
// contains such a symbol, so the receiver passes it in the same way.
module cipher_operation #(
  parameter bit DECRYPT = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       k_in,
  input  logic [7:0] d_in,
  input  logic [8:0] ks,
  input  logic       ks_valid,
  output logic       k_out,
  output logic [7:0] d_out
);

  localparam logic [9:0] R = 10'd267;

  logic [8:0] v, r;
  logic       ok;
  logic       k_c;
  logic [7:0] d_c;
  logic [9:0] t;

  symbol_map u_map (.k(k_in), .d(d_in), .v, .ok);

  always_comb begin
    if (!DECRYPT) begin
      t = {1'b0, v} + {1'b0, ks};
      r = (t >= R) ? 9'(t - R) : t[8:0];
    end else begin
      t = {1'b0, v} - {1'b0, ks};
      r = (v < ks) ? 9'(t + R) : t[8:0];
    end
  end

  symbol_demap u_demap (.v(r), .k(k_c), .d(d_c));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k_out <= 1'b1;
      d_out <= 8'hBC;
    end else if (en && ks_valid && ok) begin
      k_out <= k_c;
      d_out <= d_c;
    end else begin
      k_out <= k_in;
      d_out <= d_in;
    end
  end

endmodule
