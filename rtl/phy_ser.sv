// phy_ser: parallel-to-serial converter of the low-speed PHY.
//
// Sends 10-bit symbols most significant bit first, each bit held for OVS
// clock cycles (the receiver oversamples by the same factor). In the cycle
// where the last bit of a symbol ends, load is high and the symbol on sym is
// taken; the caller must present the next symbol then. load also marks the
// PHY's symbol slots, one every 10*OVS cycles. After reset the line idles
// low until the first load, OVS*10 cycles later.
//
// The paper names the parallel-to-serial converter; the bit timing is this
// design's own.
module phy_ser #(
  parameter int unsigned OVS = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [9:0] sym,
  output logic       load,
  output logic       ser_out
);
  logic [9:0]                  shreg;
  logic [3:0]                  bitcnt;
  logic [$clog2(OVS+1)-1:0]    phase;
  logic                        bit_end;

  assign bit_end = (phase == ($bits(phase))'(OVS - 1));
  assign load    = bit_end && (bitcnt == 4'd9);
  assign ser_out = shreg[9];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      bitcnt <= '0;
      phase  <= '0;
    end else begin
      phase <= bit_end ? '0 : phase + 1'b1;
      if (bit_end) begin
        if (bitcnt == 4'd9) begin
          bitcnt <= '0;
          shreg  <= sym;
        end else begin
          bitcnt <= bitcnt + 1'b1;
          shreg  <= {shreg[8:0], 1'b0};
        end
      end
    end
  end
endmodule
