// ff3_blockcipher: pipelined FF3 format-preserving block cipher.
//
// Encrypts a block of 2*HALF symbols of radix RADIX (22 symbols of radix 267
// by default) with FF3 (NIST SP 800-38G): an eight-round Feistel network whose
// round function is AES-128 with the byte-reversed key. Per round i, with A
// and B the two halves as integers (REV+NUM form):
//   P = (W xor i) || B as 12 bytes,  W = tweak right half (even i) or left
//   S = REVB(AES(REVB(K), REVB(P))),  y = S as a 128-bit integer
//   A, B <= B, (A + y) mod RADIX**HALF
// and the output is STR+REV of both halves. The tweak is a parameter fixed at
// zero, as in the paper; only the key is an input.
//
// Pipeline (one stage = one block period of PERIOD cycles, advanced by the
// 'adv' strobe in the period's last cycle):
//   NUM (1 stage) -> 8 x [AES + reduction stage 1 | reduction stage 2]
//   -> STR (HALF-1 stages)
// for 1 + 16 + 10 = 27 periods of latency at the defaults. A new block enters
// every period, so the cipher delivers 2*HALF symbols per 2*HALF cycles: one
// keystream symbol per clock. The stage counts of NUM, AES, the reduction and
// STR follow the paper; the grouping of AES and the first reduction stage in
// one period is this design's.
//
// The eight rounds share one pipelined AES core (latency 10). In cycle 'slot'
// = r of every period (r = 0..7) the multiplexer feeds round r's block; its
// result returns in cycle r+10 and is caught in round r's register (the
// demultiplexer), well before the period ends. This needs PERIOD >= 19.
//
// Interface: x_in[j] is symbol j of the input block, sampled when adv is
// high; y_out[j] is symbol j of the output block, valid from the edge where
// adv is high, 27 periods after its input (HALF-1 + 17 in general).
module ff3_blockcipher
  import pcs_crypt_pkg::revb128;
#(
  parameter int unsigned RADIX  = 267,
  parameter int unsigned HALF   = 11,
  parameter int unsigned PERIOD = 22,
  parameter logic [63:0] TWEAK  = 64'h0,
  localparam int unsigned SW    = $clog2(RADIX),
  localparam int unsigned N     = 2 * HALF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adv,
  input  logic [4:0]           slot,
  input  logic [127:0]         key,
  input  logic [N-1:0][SW-1:0] x_in,
  output logic [N-1:0][SW-1:0] y_out
);

  localparam int unsigned NROUND = 8;

  // Round inputs: index r is the input of round r, index 8 the final halves.
  logic [95:0] ra [0:NROUND];
  logic [95:0] rb [0:NROUND];

  ff3_num #(.RADIX(RADIX), .HALF(HALF)) u_num_a (
    .clk, .adv, .digits(x_in[HALF-1:0]), .num(ra[0]));
  ff3_num #(.RADIX(RADIX), .HALF(HALF)) u_num_b (
    .clk, .adv, .digits(x_in[N-1:HALF]), .num(rb[0]));

  // ---- shared AES with multiplexer and demultiplexer
  logic         aes_in_valid, aes_out_valid;
  logic [2:0]   aes_in_tag, aes_out_tag;
  logic [127:0] aes_in_block, aes_out_block;
  logic [95:0]  b_sel;
  logic [31:0]  w_sel;

  always_comb begin
    b_sel = '0;
    for (int r = 0; r < NROUND; r++) if (slot == 5'(r)) b_sel = rb[r];
    w_sel = slot[0] ? TWEAK[63:32] : TWEAK[31:0];
    aes_in_valid = (slot < 5'(NROUND));
    aes_in_tag   = slot[2:0];
    aes_in_block = revb128({w_sel ^ {27'd0, slot}, b_sel});
  end

  aes128_pipe #(.TAG_W(3)) u_aes (
    .clk, .rst_n, .key(revb128(key)),
    .in_valid(aes_in_valid), .in_tag(aes_in_tag), .in_block(aes_in_block),
    .out_valid(aes_out_valid), .out_tag(aes_out_tag), .out_block(aes_out_block));

  logic [127:0] yr [NROUND];

  always_ff @(posedge clk) begin
    for (int r = 0; r < NROUND; r++)
      if (aes_out_valid && aes_out_tag == 3'(r)) yr[r] <= revb128(aes_out_block);
  end

  // ---- round tails
  for (genvar r = 0; r < NROUND; r++) begin : g_round
    ff3_modadd #(.RADIX(RADIX), .HALF(HALF)) u_mod (
      .clk, .adv, .a_in(ra[r]), .b_in(rb[r]), .y_in(yr[r]),
      .a_out(ra[r+1]), .b_out(rb[r+1]));
  end

  // ---- back to symbols
  ff3_str #(.RADIX(RADIX), .HALF(HALF)) u_str_a (
    .clk, .adv, .num(ra[NROUND]), .digits(y_out[HALF-1:0]));
  ff3_str #(.RADIX(RADIX), .HALF(HALF)) u_str_b (
    .clk, .adv, .num(rb[NROUND]), .digits(y_out[N-1:HALF]));

  // The last AES result (round 7, cycle 17) must be caught before the
  // period ends.
  initial assert (PERIOD >= NROUND + 11 && PERIOD <= 32)
    else $error("ff3_blockcipher: PERIOD out of range");

  // adv must coincide with the last slot of the period
  always_ff @(posedge clk)
    if (rst_n) assert (adv == (slot == 5'(PERIOD - 1)))
      else $error("ff3_blockcipher: adv not in last slot");

endmodule
