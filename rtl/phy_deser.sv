// phy_deser: clock-data recovery and serial-to-parallel converter.
//
// The asynchronous serial input is synchronised with two flip-flops and
// oversampled OVS times per bit. Every transition restarts a phase counter,
// and the bit is taken when the counter reaches the middle of the bit
// (phase OVS/2), so the sampling point follows the sender's bit edges. Bits
// enter a 10-bit window, first bit towards the top. When the window holds the
// comma K28.5 (either disparity) the symbol boundary is set there and
// aligned goes high; from then on every tenth bit the window is output as
// sym with sym_valid high for one cycle.
//
// The paper says its PHY performs clock data recovery and serial-to-parallel
// conversion; the oversampling method and comma alignment are this design's
// choice. The sender and receiver clocks are assumed to be of the same
// frequency: the phase counter corrects phase, not a frequency offset larger
// than one OVS step per run of five equal bits.
module phy_deser #(
  parameter int unsigned OVS = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ser_in,
  output logic [9:0] sym,
  output logic       sym_valid,
  output logic       aligned
);
  localparam logic [9:0] COMMA_N = 10'b0011111010;
  localparam logic [9:0] COMMA_P = 10'b1100000101;
  localparam int unsigned PW = $clog2(OVS + 1);

  logic [2:0]    sync;
  logic [PW-1:0] phase;
  logic [8:0]    win;
  logic [9:0]    win_n;
  logic [3:0]    bitcnt;
  logic          sample;

  assign sample = (phase == PW'(OVS / 2));
  assign win_n  = {win, sync[2]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= '0;
      phase     <= '0;
      win       <= '0;
      bitcnt    <= '0;
      aligned   <= 1'b0;
      sym       <= '0;
      sym_valid <= 1'b0;
    end else begin
      sync      <= {sync[1:0], ser_in};
      sym_valid <= 1'b0;
      if (sync[2] != sync[1])              phase <= '0;
      else if (phase == PW'(OVS - 1))      phase <= '0;
      else                                 phase <= phase + 1'b1;
      if (sample) begin
        win <= win_n[8:0];
        if (win_n == COMMA_N || win_n == COMMA_P) begin
          aligned   <= 1'b1;
          bitcnt    <= '0;
          sym       <= win_n;
          sym_valid <= 1'b1;
        end else if (bitcnt == 4'd9) begin
          bitcnt    <= '0;
          sym       <= win_n;
          sym_valid <= aligned;
        end else begin
          bitcnt <= bitcnt + 1'b1;
        end
      end
    end
  end
endmodule
