// enc_8b10b: combinational 8B/10B encoder (IBM/Widmer-Franaszek code).
//
// The byte is split into its low five bits (EDCBA, coded into six bits abcdei)
// and its high three bits (HGF, coded into four bits fghj). Each sub-block has
// a code for negative running disparity and, if it is unbalanced, the
// complement for positive disparity. D.x.7 uses the alternate code A7 where
// the primary one would create a run of five equal bits, and K28.y complements
// its balanced 4-bit codes so that the comma pattern stays unique.
//
// Interface: data/is_k with the running disparity rd_in (0 = negative,
// 1 = positive) produce code[9:0] = {a,b,c,d,e,i,f,g,h,j}; bit a is sent first.
// rd_out is the disparity after the symbol; the caller keeps it in a register.
// Control characters other than K28.y, K23.7, K27.7, K29.7 and K30.7 are not
// valid and are coded as the data byte with the same value.
//
// The paper names the 8B/10B encoder of its PHY; the code tables are the
// standard ones, which the paper does not reprint.
module enc_8b10b (
  input  logic [7:0] data,
  input  logic       is_k,
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out
);

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6_neg;      // 6-bit code for negative disparity
  logic [3:0] c4_pos;      // 4-bit code for positive disparity (before the 4-bit block)
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd6;         // disparity after the 6-bit sub-block
  logic       k28;
  logic       use_alt;

  assign x   = data[4:0];
  assign y   = data[7:5];
  assign k28 = is_k && (x == 5'd28);

  always_comb begin
    unique case (x)
      5'd0:  c6_neg = 6'b100111;  5'd1:  c6_neg = 6'b011101;
      5'd2:  c6_neg = 6'b101101;  5'd3:  c6_neg = 6'b110001;
      5'd4:  c6_neg = 6'b110101;  5'd5:  c6_neg = 6'b101001;
      5'd6:  c6_neg = 6'b011001;  5'd7:  c6_neg = 6'b111000;
      5'd8:  c6_neg = 6'b111001;  5'd9:  c6_neg = 6'b100101;
      5'd10: c6_neg = 6'b010101;  5'd11: c6_neg = 6'b110100;
      5'd12: c6_neg = 6'b001101;  5'd13: c6_neg = 6'b101100;
      5'd14: c6_neg = 6'b011100;  5'd15: c6_neg = 6'b010111;
      5'd16: c6_neg = 6'b011011;  5'd17: c6_neg = 6'b100011;
      5'd18: c6_neg = 6'b010011;  5'd19: c6_neg = 6'b110010;
      5'd20: c6_neg = 6'b001011;  5'd21: c6_neg = 6'b101010;
      5'd22: c6_neg = 6'b011010;  5'd23: c6_neg = 6'b111010;
      5'd24: c6_neg = 6'b110011;  5'd25: c6_neg = 6'b100110;
      5'd26: c6_neg = 6'b010110;  5'd27: c6_neg = 6'b110110;
      5'd28: c6_neg = 6'b001110;  5'd29: c6_neg = 6'b101110;
      5'd30: c6_neg = 6'b011110;  default: c6_neg = 6'b101011;
    endcase
  end

  // 6-bit sub-block: complement unbalanced codes (and D.7) at positive disparity.
  always_comb begin
    logic [5:0] base;
    base = k28 ? 6'b001111 : c6_neg;
    if (rd_in && (($countones(base) != 3) || (base == 6'b111000)))
      c6 = ~base;
    else
      c6 = base;
    rd6 = ($countones(c6) == 3) ? rd_in : ($countones(c6) > 3);
  end

  // A7 replaces P7 where P7 would give five equal bits in a row, and for K.x.7.
  assign use_alt = (y == 3'd7) &&
                   (is_k || (!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                            ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14)));

  always_comb begin
    unique case (y)
      3'd0: c4_pos = 4'b0100;
      3'd1: c4_pos = 4'b1001;
      3'd2: c4_pos = 4'b0101;
      3'd3: c4_pos = 4'b0011;
      3'd4: c4_pos = 4'b0010;
      3'd5: c4_pos = 4'b1010;
      3'd6: c4_pos = 4'b0110;
      default: c4_pos = use_alt ? 4'b1000 : 4'b0001;
    endcase
    if (k28)
      c4 = rd6 ? c4_pos : ~c4_pos;            // K28: every code follows rd6
    else if (!rd6 && (($countones(c4_pos) != 2) || (y == 3'd3)))
      c4 = ~c4_pos;                           // unbalanced codes and D.x.3 follow rd6
    else
      c4 = c4_pos;
  end

  assign code   = {c6, c4};
  assign rd_out = ($countones(c4) == 2) ? rd6 : ($countones(c4) > 2);

endmodule
