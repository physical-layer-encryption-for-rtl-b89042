// radix_counter: the CTR-mode COUNTER, a DIGITS-symbol number in radix RADIX.
//
// Counter mode needs a stream of distinct cipher inputs CNT_0, CNT_0+1, ...
// Since the FF3 cipher takes blocks of 22 radix-267 symbols, the counter is
// kept directly in that form: 22 digits of 9 bits, each below 267, with the
// last digit (index DIGITS-1) least significant. An increment adds one to
// that digit and ripples the carry towards digit 0; the count wraps to zero
// after RADIX**DIGITS steps. The initial value INIT_CNT is loaded while reset
// is held. The paper gives the counter's size and increment; the digit order
// and the load-at-reset are this design's choices.
//
// Interface: value changes at the clock edge where inc is high.
module radix_counter #(
  parameter int unsigned RADIX  = 267,
  parameter int unsigned DIGITS = 22,
  localparam int unsigned SW    = $clog2(RADIX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [DIGITS-1:0][SW-1:0] init,
  input  logic                      inc,
  output logic [DIGITS-1:0][SW-1:0] value
);

  logic [DIGITS-1:0][SW-1:0] nxt;

  always_comb begin
    logic carry;
    carry = 1'b1;
    nxt   = value;
    for (int j = DIGITS - 1; j >= 0; j--) begin
      if (carry) begin
        if (value[j] == SW'(RADIX - 1)) nxt[j] = '0;
        else begin
          nxt[j] = value[j] + SW'(1);
          carry  = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)   value <= init;
    else if (inc) value <= nxt;
  end

endmodule
