// dec8b10b: 8b/10b decoder of the 1000BASE-X PCS (IEEE 802.3 Clause 36).
//
// Decodes one code-group per clock. The 6b sub-block abcdei is looked up
// against both disparity forms of the 5b/6b table (plus the K28 forms 001111
// and 110000), the 4b sub-block fghj against both forms of the 3b/4b table
// and the alternate A7 forms. K = 1 for K28.y and for the A7 form following
// x = 23, 27, 29 or 30 (K23.7, K27.7, K29.7, K30.7). After 110000 (K28 at
// RD+) the 4b sub-block is decoded inverted, mirroring the encoder's comma
// rule. code_err flags a sub-block found in neither form; disp_err flags a
// sub-block whose disparity has the same sign as the running disparity.
// Running disparity is tracked per sub-block. After reset the decoder does
// not know the line's RD: disp_err stays low until the first sub-block that
// fixes the RD (an unbalanced one, or 111000/000111/1100/0011) has been seen.
//
// The paper names the decoder only; this is written from the standard. Own
// choices: input bit 9 is 'a' (the first bit received); latency one clock;
// code_err catches table misses only, not every illegal combination of two
// valid sub-blocks.
module dec8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [9:0] code,
  output logic       k,
  output logic [7:0] d,
  output logic       code_err,
  output logic       disp_err
);

  // 5b/6b table, RD- form (same table as the encoder)
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
      3'd6: t4 = 4'b0110;  default: t4 = 4'b1110;
    endcase
  endfunction

  logic [5:0] c6;
  logic [3:0] c4, c4d;
  logic [5:0] p6;
  logic [3:0] p4;
  logic [4:0] x;
  logic [2:0] y;
  logic       f6, f4, a7, k28, kx7;
  logic       rd, rd_mid, rd_nxt, derr;
  logic       rd_known, rd_set;   // RD learnt from the line since reset

  assign c6 = code[9:4];
  assign c4 = code[3:0];

  always_comb begin
    // 6b lookup
    p6 = '0;
    p4 = '0;
    x  = '0;
    f6 = 1'b0;
    k28 = (c6 == 6'b001111) || (c6 == 6'b110000);
    if (k28) begin
      x  = 5'd28;
      f6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        p6 = t6(5'(i));
        if (c6 == p6 || (c6 == ~p6 && ($countones(p6) != 3 || p6 == 6'b111000))) begin
          x  = 5'(i);
          f6 = 1'b1;
        end
      end
    end
    // 4b lookup; after 110000 the K28 4b part is inverted
    c4d = (c6 == 6'b110000) ? ~c4 : c4;
    a7  = (c4d == 4'b0111) || (c4d == 4'b1000);
    y   = '0;
    f4  = 1'b0;
    if (a7) begin
      y  = 3'd7;
      f4 = 1'b1;
    end else begin
      for (int i = 0; i < 8; i++) begin
        p4 = t4(3'(i));
        if (c4d == p4 || (c4d == ~p4 && ($countones(p4) != 2 || i == 3))) begin
          y  = 3'(i);
          f4 = 1'b1;
        end
      end
    end
    kx7 = a7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30) && !k28;
    // running disparity check
    derr = 1'b0;
    rd_set = 1'b1;
    // 111000 / 000111 (D.07) and 1100 / 0011 (D.x.3) are balanced but only
    // legal at RD- / RD+ respectively
    if ($countones(c6) > 3 || c6 == 6'b000111) begin
      derr   = rd ^ (c6 == 6'b000111);
      rd_mid = 1'b1;
    end else if ($countones(c6) < 3 || c6 == 6'b111000) begin
      derr   = !rd ^ (c6 == 6'b111000);
      rd_mid = 1'b0;
    end else rd_mid = rd;
    if ($countones(c4) > 2 || c4 == 4'b0011) begin
      derr   = derr | (rd_mid ^ (c4 == 4'b0011));
      rd_nxt = 1'b1;
    end else if ($countones(c4) < 2 || c4 == 4'b1100) begin
      derr   = derr | (!rd_mid ^ (c4 == 4'b1100));
      rd_nxt = 1'b0;
    end else begin
      rd_nxt = rd_mid;
      rd_set = ($countones(c6) != 3) || c6 == 6'b000111 || c6 == 6'b111000;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k        <= 1'b0;
      d        <= '0;
      code_err <= 1'b0;
      disp_err <= 1'b0;
      rd       <= 1'b0;
      rd_known <= 1'b0;
    end else begin
      k        <= k28 || kx7;
      d        <= {y, x};
      code_err <= !f6 || !f4;
      disp_err <= derr && rd_known;
      rd       <= rd_nxt;
      rd_known <= rd_known || rd_set;
    end
  end

endmodule
