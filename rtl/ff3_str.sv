// ff3_str: STR + REV of NIST SP 800-38G for one Feistel half.
//
// Turns an integer below RADIX**HALF back into HALF radix-RADIX symbols, the
// least significant digit first (STR gives the most significant first and
// REV reverses it). One digit is peeled per pipeline stage:
// digit k = q mod RADIX, q <= q / RADIX. After HALF-1 stages (10 by default,
// the paper's stage count for STR) the remaining quotient is the last digit.
// All stages advance on the period strobe 'adv'.
//
// Interface: num is sampled when adv is high; digits holds the result
// HALF-1 periods later, digits[j] = (num / RADIX**j) mod RADIX.
module ff3_str #(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11,
  localparam int unsigned SW   = $clog2(RADIX),
  localparam int unsigned STAGES = HALF - 1
) (
  input  logic                     clk,
  input  logic                     adv,
  input  logic [95:0]              num,
  output logic [HALF-1:0][SW-1:0]  digits
);

  // stage s (1..STAGES): quotient left and the digits found so far
  logic [95:0]              q_q   [1:STAGES];
  logic [HALF-1:0][SW-1:0]  dig_q [1:STAGES];

  for (genvar s = 1; s <= STAGES; s++) begin : g_stage
    logic [95:0]             q_in;
    logic [HALF-1:0][SW-1:0] d_in;
    logic [HALF-1:0][SW-1:0] d_new;
    if (s == 1) begin : g_first
      assign q_in = num;
      assign d_in = '0;
    end else begin : g_next
      assign q_in = q_q[s-1];
      assign d_in = dig_q[s-1];
    end
    always_comb begin
      d_new      = d_in;
      d_new[s-1] = SW'(q_in % 96'(RADIX));
    end
    always_ff @(posedge clk) if (adv) begin
      q_q[s]   <= q_in / 96'(RADIX);
      dig_q[s] <= d_new;
    end
  end

  always_comb begin
    digits         = dig_q[STAGES];
    digits[HALF-1] = SW'(q_q[STAGES]);
  end

endmodule
