// ff3_modadd: tail of one FF3 Feistel round, c = (A + y) mod RADIX**HALF.
//
// In FF3 each round adds the AES-derived value y = NUM(S) (a 128-bit integer)
// to the numeric value of the A half and reduces modulo radix^m; the result
// becomes the new B and the old B becomes the new A. Halves travel between
// rounds as integers: REV(STR(c)) read back by REV and NUM is c again, so the
// string conversions are only needed at the very end of the cipher.
// The paper gives this function two pipeline stages. The split is this
// design's choice:
//   stage 1: t = y mod M            (M = RADIX**HALF, 267^11 by default)
//   stage 2: c = A + t, minus M once if A + t >= M  (A < M always holds)
// Both stages advance on the period strobe 'adv'; B is carried along and
// comes out as the next round's A.
//
// Interface: a_in, b_in, y_in are sampled when adv is high; a_out/b_out
// change two periods later. a_in must be below M.
module ff3_modadd
  import pcs_crypt_pkg::pow_radix;
#(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11
) (
  input  logic         clk,
  input  logic         adv,
  input  logic [95:0]  a_in,
  input  logic [95:0]  b_in,
  input  logic [127:0] y_in,
  output logic [95:0]  a_out,
  output logic [95:0]  b_out
);

  localparam logic [127:0] MOD = pow_radix(RADIX, HALF);

  logic [95:0] a1, b1, t1;
  logic [95:0] t_red;
  logic [96:0] sum;

  assign t_red  = 96'(y_in % MOD);  // < MOD, fits in 96 bits
  assign sum    = {1'b0, a1} + {1'b0, t1};

  always_ff @(posedge clk) begin
    if (adv) begin
      // stage 1
      a1 <= a_in;
      b1 <= b_in;
      t1 <= t_red;
      // stage 2
      a_out <= b1;
      b_out <= (sum >= 97'(MOD)) ? 96'(sum - 97'(MOD)) : sum[95:0];
    end
  end

endmodule
