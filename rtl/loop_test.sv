// loop_test: counter generator and checker for a loopback test of a link.
//
// While enable is high the generator sends a W-bit counter, one word per
// clock (tx_valid high, tx_data incrementing by one). The checker watches
// the words that come back (rx_valid/rx_data): it locks once two words in a
// row count up by one (so words still in flight from before the test, such
// as frame bytes, are ignored), and from then on every word must be the
// previous one plus one. Matching words count in words_ok, others in
// word_errs. After one wrong word the checker keeps counting on, so a single
// corrupted word counts once; after two wrong words in a row it takes the
// received word as the new reference, so a lost or repeated word costs two
// errors and the checker recovers. locked shows the checker's state.
// Dropping enable stops the generator and clears locked; the counters keep
// their values until reset.
//
// Timing: one word per clock each way; any loop delay is allowed, since the
// checker locks onto the returning stream itself.
//
// The paper tests its fibre link this way: a counter generated inside the
// FPGA is sent in loopback mode over the 16-bit transceiver interface and the
// receiver checks it. The counter width W = 16 follows the paper; the
// self-synchronising checker and its counters are this design's.
module loop_test #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  output logic [W-1:0] tx_data,
  output logic         tx_valid,
  input  logic [W-1:0] rx_data,
  input  logic         rx_valid,
  output logic         locked,
  output logic [31:0]  words_ok,
  output logic [15:0]  word_errs
);

  logic [W-1:0] expect_q;
  logic         prev_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_data  <= '0;
      tx_valid <= 1'b0;
    end else begin
      tx_valid <= enable;
      if (tx_valid) tx_data <= tx_data + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      expect_q  <= '0;
      prev_err  <= 1'b0;
      locked    <= 1'b0;
      words_ok  <= '0;
      word_errs <= '0;
    end else if (!enable) begin
      locked   <= 1'b0;
      prev_err <= 1'b0;
    end else if (rx_valid) begin
      if (!locked || rx_data == expect_q) begin
        if (rx_data == expect_q) locked <= 1'b1;
        expect_q <= rx_data + 1'b1;
        prev_err <= 1'b0;
        if (locked) words_ok <= words_ok + 1'b1;
      end else begin
        expect_q <= prev_err ? rx_data + 1'b1 : expect_q + 1'b1;
        prev_err <= 1'b1;
        if (word_errs != '1) word_errs <= word_errs + 1'b1;
      end
    end
  end

endmodule
