// crc16: one-byte step of the CRC-16/CCITT code (x^16 + x^12 + x^5 + 1).
//
// Combinational: crc_out is the register value after shifting the byte in,
// most significant bit first, starting from crc_in. The PHY starts each frame
// at 16'hFFFF, appends the final value high byte first, and the receiver runs
// the same step over data and CRC bytes; an intact frame leaves 16'h0000.
//
// The paper applies a CRC check to every frame of its PHY module but gives no
// polynomial; CRC-16/CCITT is this design's choice.
module crc16 (
  input  logic [15:0] crc_in,
  input  logic [7:0]  data,
  output logic [15:0] crc_out
);
  always_comb begin
    logic [15:0] c;
    c = crc_in;
    for (int i = 7; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else                 c = {c[14:0], 1'b0};
    end
    crc_out = c;
  end
endmodule
