// keystream_generator: FF3 in counter mode, one radix-267 symbol per clock.
//
// The generator of the paper's Fig. 6: a CTR counter of 22 radix-267 digits
// feeds the pipelined FF3 block cipher; the 22 symbols S_0..S_21 of each
// output block are handed out one per cycle by a multiplexer driven by the
// modulo-22 slot counter. Counter and cipher pipeline advance together once
// per 22 cycles, so the keystream is K = F_K(CNT_0) || F_K(CNT_0+1) || ...
// without gaps, i.e. the full line rate of one 8b/10b symbol per 8 ns clock.
//
// After reset the FF3 pipeline needs FF3_LAT periods (27 x 22 = 594 cycles at
// the defaults) before its output belongs to CNT_0; ks_valid rises then,
// with slot = 0 and ks = S_0 of F_K(CNT_0). The start-up flag is this
// design's; the paper does not describe start-up.
//
// Interface: key and cnt_init must be stable while reset is low and after.
// ks/ks_valid are combinational from registers; slot and block_strobe (last
// cycle of a period) are exported for observation.
module keystream_generator #(
  parameter int unsigned RADIX = 267,
  parameter int unsigned HALF  = 11,
  parameter logic [63:0] TWEAK = 64'h0,
  localparam int unsigned SW   = $clog2(RADIX),
  localparam int unsigned N    = 2 * HALF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [127:0]         key,
  input  logic [N-1:0][SW-1:0] cnt_init,
  output logic [SW-1:0]        ks,
  output logic                 ks_valid,
  output logic [4:0]           slot,
  output logic                 block_strobe
);

  localparam int unsigned FF3_LAT = 1 + 2 * 8 + (HALF - 1);

  logic [N-1:0][SW-1:0] cnt, blk;
  logic [5:0] fill;

  slot_counter #(.MODULUS(N)) u_slot (.clk, .rst_n, .slot, .wrap(block_strobe));

  radix_counter #(.RADIX(RADIX), .DIGITS(N)) u_cnt (
    .clk, .rst_n, .init(cnt_init), .inc(block_strobe), .value(cnt));

  ff3_blockcipher #(.RADIX(RADIX), .HALF(HALF), .PERIOD(N), .TWEAK(TWEAK)) u_ff3 (
    .clk, .rst_n, .adv(block_strobe), .slot, .key, .x_in(cnt), .y_out(blk));

  // keystream multiplexer
  always_comb begin
    ks = '0;
    for (int j = 0; j < N; j++) if (slot == 5'(j)) ks = blk[j];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) fill <= '0;
    else if (block_strobe && fill != 6'(FF3_LAT)) fill <= fill + 6'd1;
  end
  assign ks_valid = (fill == 6'(FF3_LAT));

endmodule
