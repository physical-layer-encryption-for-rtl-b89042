// slot_counter: the 'cnt mod 22' counter of the keystream generator.
//
// Counts 0, 1, ..., MODULUS-1, 0, ... one step per clock. Its value picks the
// keystream symbol S_slot out of the current FF3 output block, and 'wrap',
// high in the last cycle of each count, is the period strobe that advances
// the CTR counter and every stage of the FF3 pipeline, so that a fresh block
// of MODULUS symbols is ready every MODULUS cycles. The modulus follows the
// paper (22, the FF3 block size); starting from 0 after reset is this
// design's choice.
module slot_counter #(
  parameter int unsigned MODULUS = 22
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic [4:0] slot,
  output logic       wrap
);

  assign wrap = (slot == 5'(MODULUS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n)    slot <= '0;
    else if (wrap) slot <= '0;
    else           slot <= slot + 5'd1;
  end

  initial assert (MODULUS >= 2 && MODULUS <= 32)
    else $error("slot_counter: MODULUS out of range");

endmodule
