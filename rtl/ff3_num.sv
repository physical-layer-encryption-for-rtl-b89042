// ff3_num: REV + NUM of NIST SP 800-38G for one Feistel half.
//
// FF3 reads each half of its input block with REV followed by NUM_radix, i.e.
// the first symbol of the half is the least significant digit. This module
// evaluates that value with Horner's rule, num = sum(digits[j] * RADIX**j),
// and registers it once per block period (the 'adv' strobe), which is the one
// pipeline stage the paper allots to NUM. REV costs nothing: it is the order
// in which the digits are read.
//
// Interface: digits[j] is symbol j of the half (0 <= digits[j] < RADIX);
// num is updated at the clock edge where adv is high. Latency: one period.
module ff3_num #(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11,
  localparam int unsigned SW   = $clog2(RADIX)
) (
  input  logic                     clk,
  input  logic                     adv,
  input  logic [HALF-1:0][SW-1:0]  digits,
  output logic [95:0]              num
);

  logic [95:0] value;

  always_comb begin
    value = '0;
    for (int j = HALF - 1; j >= 0; j--)
      value = value * 96'(RADIX) + 96'(digits[j]);
  end

  always_ff @(posedge clk) if (adv) num <= value;

endmodule
