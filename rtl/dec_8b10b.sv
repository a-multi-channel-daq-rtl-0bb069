// dec_8b10b: combinational 8B/10B decoder.
//
// Inverse of enc_8b10b. The six-bit sub-block abcdei is looked up in a table
// that holds both disparity forms of every code; the four-bit sub-block fghj
// likewise, with the alternate D/K.x.7 code and, after the K28 sub-block
// 110000, the complemented balanced codes that K28.y uses. A symbol is a
// control character when its six bits are K28, or when they are 23, 27, 29 or
// 30 followed by the alternate 7 code, which data never uses with those values.
//
// Interface: code[9:0] = {a,b,c,d,e,i,f,g,h,j} and the running disparity rd_in
// (0 = negative) give data/is_k, rd_out, code_err (not a valid code word) and
// disp_err (valid code word with the wrong disparity). Purely combinational;
// the caller registers rd_out.
//
// The paper names the 10B/8B decoder of its PHY receive path; the tables are
// the standard ones.
module dec_8b10b (
  input  logic [9:0] code,
  input  logic       rd_in,
  output logic [7:0] data,
  output logic       is_k,
  output logic       rd_out,
  output logic       code_err,
  output logic       disp_err
);

  logic [5:0] c6;
  logic [3:0] c4, c4_eff;
  logic [4:0] x;
  logic [2:0] y;
  logic       ok6, ok4, k28, alt7, rd6;
  logic [3:0] n6, n4;

  assign c6 = code[9:4];
  assign c4 = code[3:0];
  assign n6 = 4'($countones(c6));
  assign n4 = 4'($countones(c4));

  always_comb begin
    ok6 = 1'b1;
    k28 = 1'b0;
    unique case (c6)
      6'b100111, 6'b011000: x = 5'd0;
      6'b011101, 6'b100010: x = 5'd1;
      6'b101101, 6'b010010: x = 5'd2;
      6'b110001:            x = 5'd3;
      6'b110101, 6'b001010: x = 5'd4;
      6'b101001:            x = 5'd5;
      6'b011001:            x = 5'd6;
      6'b111000, 6'b000111: x = 5'd7;
      6'b111001, 6'b000110: x = 5'd8;
      6'b100101:            x = 5'd9;
      6'b010101:            x = 5'd10;
      6'b110100:            x = 5'd11;
      6'b001101:            x = 5'd12;
      6'b101100:            x = 5'd13;
      6'b011100:            x = 5'd14;
      6'b010111, 6'b101000: x = 5'd15;
      6'b011011, 6'b100100: x = 5'd16;
      6'b100011:            x = 5'd17;
      6'b010011:            x = 5'd18;
      6'b110010:            x = 5'd19;
      6'b001011:            x = 5'd20;
      6'b101010:            x = 5'd21;
      6'b011010:            x = 5'd22;
      6'b111010, 6'b000101: x = 5'd23;
      6'b110011, 6'b001100: x = 5'd24;
      6'b100110:            x = 5'd25;
      6'b010110:            x = 5'd26;
      6'b110110, 6'b001001: x = 5'd27;
      6'b001110:            x = 5'd28;
      6'b101110, 6'b010001: x = 5'd29;
      6'b011110, 6'b100001: x = 5'd30;
      6'b101011, 6'b010100: x = 5'd31;
      6'b001111, 6'b110000: begin x = 5'd28; k28 = 1'b1; end
      default:              begin x = 5'd0;  ok6 = 1'b0; end
    endcase
  end

  // After K28's 110000 the balanced 4-bit codes are sent complemented.
  assign c4_eff = (k28 && c6 == 6'b110000) ? ~c4 : c4;

  always_comb begin
    ok4  = 1'b1;
    alt7 = 1'b0;
    unique case (c4_eff)
      4'b1011, 4'b0100: y = 3'd0;
      4'b1001:          y = 3'd1;
      4'b0101:          y = 3'd2;
      4'b1100, 4'b0011: y = 3'd3;
      4'b1101, 4'b0010: y = 3'd4;
      4'b1010:          y = 3'd5;
      4'b0110:          y = 3'd6;
      4'b1110, 4'b0001: y = 3'd7;
      4'b0111, 4'b1000: begin y = 3'd7; alt7 = 1'b1; end
      default:          begin y = 3'd0; ok4 = 1'b0; end
    endcase
  end

  assign data     = {y, x};
  assign is_k     = k28 || (alt7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30));
  assign code_err = !ok6 || !ok4;

  // Disparity bookkeeping: an unbalanced sub-block must push the disparity
  // back towards the other side; D.7 and D.x.3 have a fixed form per side.
  always_comb begin
    logic e6, e4;
    e6  = (n6 > 4'd3 && rd_in) || (n6 < 4'd3 && !rd_in) ||
          (c6 == 6'b111000 && rd_in) || (c6 == 6'b000111 && !rd_in);
    rd6 = (n6 == 4'd3) ? rd_in : (n6 > 4'd3);
    e4  = (n4 > 4'd2 && rd6) || (n4 < 4'd2 && !rd6) ||
          (!k28 && c4 == 4'b1100 && rd6) || (!k28 && c4 == 4'b0011 && !rd6);
    rd_out   = (n4 == 4'd2) ? rd6 : (n4 > 4'd2);
    disp_err = ok6 && ok4 && (e6 || e4 || n6 > 4'd4 || n6 < 4'd2);
  end

endmodule
