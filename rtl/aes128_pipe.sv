// aes128_pipe: fully unrolled, pipelined AES-128 encryption core.
//
// The FF3 Feistel network of the keystream generator calls AES once per round,
// eight times per 22-cycle block period, and all eight rounds share this one
// core through a multiplexer in front and a demultiplexer behind it. To serve
// them the core accepts a new block every cycle: the ten AES rounds are
// unrolled and each ends in a register, so a block leaves 10 cycles after it
// entered (the initial AddRoundKey is folded into the first stage). A tag
// travels with each block so the demultiplexer knows whose result it is.
//
// The key is static (the paper makes only the key configurable, never the
// tweak); the eleven round keys are expanded combinationally from it. The
// paper does not describe its AES core beyond naming it; the unrolled
// pipeline is this design's choice, made so that eight calls fit in one
// period.
//
// Interface: in_valid/in_tag/in_block are sampled every cycle; out_valid/
// out_tag/out_block appear AES_LAT = 10 cycles later. Block and key use the
// FIPS-197 byte order, byte 0 in bits 127:120.
module aes128_pipe
  import aes_pkg::*;
#(
  parameter int unsigned TAG_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [127:0]     key,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [127:0]     in_block,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic [127:0]     out_block
);

  localparam int unsigned NR = 10;

  logic [127:0] rk [NR+1];

  always_comb begin
    rk[0] = key;
    for (int r = 1; r <= NR; r++) rk[r] = next_round_key(rk[r-1], RCON[r-1]);
  end

  // Stage r (1..NR) holds the state after AES round r.
  logic [127:0]     st_q  [1:NR];
  logic             vld_q [1:NR];
  logic [TAG_W-1:0] tag_q [1:NR];

  for (genvar r = 1; r <= NR; r++) begin : g_round
    logic [127:0]     prev;
    logic             prev_vld;
    logic [TAG_W-1:0] prev_tag;
    logic [127:0]     sr;
    if (r == 1) begin : g_first
      assign prev     = in_block ^ rk[0];
      assign prev_vld = in_valid;
      assign prev_tag = in_tag;
    end else begin : g_next
      assign prev     = st_q[r-1];
      assign prev_vld = vld_q[r-1];
      assign prev_tag = tag_q[r-1];
    end
    always_comb begin
      sr = shift_rows(sub_bytes(prev));
      if (r != NR) sr = mix_columns(sr);
    end
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        vld_q[r] <= 1'b0;
        tag_q[r] <= '0;
        st_q[r]  <= '0;
      end else begin
        vld_q[r] <= prev_vld;
        tag_q[r] <= prev_tag;
        st_q[r]  <= sr ^ rk[r];
      end
    end
  end

  assign out_valid = vld_q[NR];
  assign out_tag   = tag_q[NR];
  assign out_block = st_q[NR];

endmodule
