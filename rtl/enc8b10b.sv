// enc8b10b: 8b/10b encoder of the 1000BASE-X PCS (IEEE 802.3 Clause 36).
//
// Encodes one symbol per clock: the five low bits EDCBA go through the 5b/6b
// table and the three high bits HGF through the 3b/4b table, each sub-block
// taking the form that steers the running disparity (RD) back towards zero.
// The tables below hold the form used at negative RD; at positive RD the
// unbalanced sub-blocks (and D.07 / D.x.3, whose two forms are balanced) are
// complemented. Special cases of the standard: the alternate D.x.A7 form for
// x = 17, 18, 20 at RD- and x = 11, 13, 14 at RD+, A7 for every K.x.7, and
// for K28.1/.2/.5/.6 the balanced 3b/4b form is inverted at RD- so that the
// comma survives. Sub-block RD is updated after the 6b and after the 4b
// part.
//
// The paper uses a standard encoder and does not describe it; this one is
// written from the standard. Own choices: output bit 9 is 'a', the first bit
// on the line ({a,b,c,d,e,i,f,g,h,j}); the code-group
// register holds K28.5 (sent from RD-) during reset, so RD is positive after
// it; latency
// one clock. Every symbol the cipher produces is a valid code-group.
module enc8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       k,
  input  logic [7:0] d,
  output logic [9:0] code,
  output logic       rd        // running disparity after 'code', 1 = positive
);

  function automatic logic [5:0] t6(input logic [4:0] x);
    unique case (x)
      5'd0:  t6 = 6'b100111;  5'd1:  t6 = 6'b011101;  5'd2:  t6 = 6'b101101;
      5'd3:  t6 = 6'b110001;  5'd4:  t6 = 6'b110101;  5'd5:  t6 = 6'b101001;
      5'd6:  t6 = 6'b011001;  5'd7:  t6 = 6'b111000;  5'd8:  t6 = 6'b111001;
      5'd9:  t6 = 6'b100101;  5'd10: t6 = 6'b010101;  5'd11: t6 = 6'b110100;
      5'd12: t6 = 6'b001101;  5'd13: t6 = 6'b101100;  5'd14: t6 = 6'b011100;
      5'd15: t6 = 6'b010111;  5'd16: t6 = 6'b011011;  5'd17: t6 = 6'b100011;
      5'd18: t6 = 6'b010011;  5'd19: t6 = 6'b110010;  5'd20: t6 = 6'b001011;
      5'd21: t6 = 6'b101010;  5'd22: t6 = 6'b011010;  5'd23: t6 = 6'b111010;
      5'd24: t6 = 6'b110011;  5'd25: t6 = 6'b100110;  5'd26: t6 = 6'b010110;
      5'd27: t6 = 6'b110110;  5'd28: t6 = 6'b001110;  5'd29: t6 = 6'b101110;
      5'd30: t6 = 6'b011110;  default: t6 = 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] t4(input logic [2:0] y);
    unique case (y)
      3'd0: t4 = 4'b1011;  3'd1: t4 = 4'b1001;  3'd2: t4 = 4'b0101;
      3'd3: t4 = 4'b1100;  3'd4: t4 = 4'b1101;  3'd5: t4 = 4'b1010;
      3'd6: t4 = 4'b0110;  default: t4 = 4'b1110;   // P7
    endcase
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] s6;
  logic [3:0] s4;
  logic       rd_mid, rd_nxt;
  logic       k28, bal6, bal4, use_a7;

  assign x   = d[4:0];
  assign y   = d[7:5];
  assign k28 = k && (x == 5'd28);

  always_comb begin
    // 5b/6b
    s6   = k28 ? 6'b001111 : t6(x);
    bal6 = ($countones(s6) == 3);
    if (rd && (!bal6 || s6 == 6'b111000)) s6 = ~s6;
    rd_mid = bal6 ? rd : ~rd;
    // 3b/4b
    use_a7 = (y == 3'd7) &&
             (k || (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                   ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    s4   = use_a7 ? 4'b0111 : t4(y);
    bal4 = ($countones(s4) == 2);
    if (k28 && bal4 && y != 3'd3) begin
      if (!rd_mid) s4 = ~s4;      // K28.1/.2/.5/.6: inverted at RD-
    end else if (rd_mid && (!bal4 || s4 == 4'b1100)) s4 = ~s4;
    rd_nxt = bal4 ? rd_mid : ~rd_mid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code <= 10'b0011111010;       // K28.5 sent at RD-, which leaves RD+
      rd   <= 1'b1;
    end else begin
      code <= {s6, s4};
      rd   <= rd_nxt;
    end
  end

endmodule
