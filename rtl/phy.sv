// phy: low-speed physical layer of the transmission module.
//
// Transmit: bytes arrive on a GMII-style port (gmii_txd qualified by
// gmii_tx_en, one byte per symbol slot, slots marked by gmii_ce). A data
// select puts either these bytes or, in loop mode, the frames received on the
// serial input into the Transmission FIFO, each byte tagged with a
// frame-end flag. The transmit state machine sends, one symbol per slot:
// K28.5 commas while idle, K27.7 as start of frame, the frame bytes (a K28.5
// fill if the FIFO runs dry inside a frame), the CRC-16 of the bytes high
// byte first, K29.7 as end of frame and at least one comma. Symbols are
// 8B/10B encoded with a running disparity and serialized.
//
// Receive: the deserializer recovers the bits, aligns on the comma and
// hands 10-bit symbols to the decoder. Between K27.7 and K29.7 the decoded
// bytes are run through the CRC and written, two symbols late so that the
// CRC bytes are not, into the receive frame FIFO. At K29.7 the error
// judgment keeps the frame if the CRC residue is zero and no bad symbol was
// seen, and drops it otherwise. Complete frames leave the FIFO on the GMII
// receive port (gmii_rxd with gmii_rx_dv, one byte per clock, not per slot,
// so that a checked frame reaches the upper layers without waiting another
// frame time; at least one cycle with gmii_rx_dv low between frames), or go
// back to the transmitter one byte per slot in loop mode.
//
// Timing: one symbol slot is 10*OVS clock cycles; the serial line runs at
// clk/OVS bits per second. A frame of N bytes occupies N+5 slots on the line,
// so the sender must leave at least five idle slots between frames.
//
// The structure (transmission FIFO, data select, 8B/10B encode, parallel to
// serial; serial to parallel, 10B/8B decode, CRC verification, error
// judgment, FIFO read/write control, FIFO) follows the paper's PHY figure.
// Frame delimiters, CRC polynomial, loop mode as the second input of the data
// select, the GMII-style byte port with a slot strobe and all sizes are this
// design's choices.
module phy
  import daq_pkg::*;
#(
  parameter int unsigned OVS        = 4,     // clock cycles per line bit
  parameter int unsigned TXF_DEPTH  = 16,    // Transmission FIFO, bytes
  parameter int unsigned RXF_DEPTH  = 256    // receive frame FIFO, bytes
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        loop_mode,
  output logic        gmii_ce,
  input  logic [7:0]  gmii_txd,
  input  logic        gmii_tx_en,
  output logic [7:0]  gmii_rxd,
  output logic        gmii_rx_dv,
  output logic        ser_tx,
  input  logic        ser_rx,
  output logic        rx_aligned,
  output logic [15:0] frames_ok,
  output logic [15:0] frames_bad,
  output logic [15:0] sym_errs
);

  // ---------------------------------------------------------------- transmit
  typedef enum logic [2:0] {TX_IDLE, TX_DATA, TX_CRC1, TX_CRC2, TX_EOF, TX_GAP} tx_state_e;

  tx_state_e   tx_state;
  logic [8:0]  txf_wdata, txf_rdata;
  logic        txf_wr, txf_rd, txf_full, txf_empty;
  logic [7:0]  hold;
  logic        hold_valid;
  logic [7:0]  tx_byte;
  logic        tx_k, tx_rd, tx_rd_next;
  logic [9:0]  tx_code;
  logic [15:0] tx_crc, tx_crc_next;
  logic        slot;

  // receive-side FIFO read port, shared by the data select and the GMII output
  logic        rxf_valid, rxf_last, rxf_rd;
  logic [7:0]  rxf_data;
  logic        rx_gap;

  assign gmii_ce = slot;

  // Data select: GMII bytes (delayed one slot to learn the frame end) or looped frames.
  always_comb begin
    txf_wr    = 1'b0;
    txf_wdata = '0;
    rxf_rd    = 1'b0;
    if (slot) begin
      if (loop_mode) begin
        if (rxf_valid && !txf_full) begin
          txf_wr    = 1'b1;
          txf_wdata = {rxf_last, rxf_data};
          rxf_rd    = 1'b1;
        end
      end else begin
        if (hold_valid) begin
          txf_wr    = 1'b1;
          txf_wdata = {!gmii_tx_en, hold};
        end
      end
    end
    if (!loop_mode && rxf_valid && !rx_gap) rxf_rd = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold       <= '0;
      hold_valid <= 1'b0;
    end else if (slot) begin
      hold       <= gmii_txd;
      hold_valid <= gmii_tx_en && !loop_mode;
    end
  end

  sync_fifo #(.WIDTH(9), .DEPTH(TXF_DEPTH)) u_txfifo (
    .clk, .rst_n,
    .wr_en(txf_wr), .wr_data(txf_wdata), .full(txf_full),
    .rd_en(txf_rd), .rd_data(txf_rdata), .empty(txf_empty), .count()
  );

  crc16 u_tx_crc (.crc_in(tx_crc), .data(txf_rdata[7:0]), .crc_out(tx_crc_next));

  // Symbol chosen for the current slot; taken by the serializer when slot is high.
  always_comb begin
    tx_byte = K28_5;
    tx_k    = 1'b1;
    txf_rd  = 1'b0;
    unique case (tx_state)
      TX_IDLE: if (!txf_empty) tx_byte = K27_7;
      TX_DATA: if (!txf_empty) begin
                 tx_byte = txf_rdata[7:0];
                 tx_k    = 1'b0;
                 txf_rd  = slot;
               end
      TX_CRC1: begin tx_byte = tx_crc[15:8]; tx_k = 1'b0; end
      TX_CRC2: begin tx_byte = tx_crc[7:0];  tx_k = 1'b0; end
      TX_EOF:  tx_byte = K29_7;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_state <= TX_IDLE;
      tx_crc   <= 16'hFFFF;
      tx_rd    <= 1'b0;
    end else if (slot) begin
      tx_rd <= tx_rd_next;
      unique case (tx_state)
        TX_IDLE: if (!txf_empty) begin tx_state <= TX_DATA; tx_crc <= 16'hFFFF; end
        TX_DATA: if (!txf_empty) begin
                   tx_crc <= tx_crc_next;
                   if (txf_rdata[8]) tx_state <= TX_CRC1;
                 end
        TX_CRC1: tx_state <= TX_CRC2;
        TX_CRC2: tx_state <= TX_EOF;
        TX_EOF:  tx_state <= TX_GAP;
        default: tx_state <= TX_IDLE;
      endcase
    end
  end

  enc_8b10b u_enc (.data(tx_byte), .is_k(tx_k), .rd_in(tx_rd), .code(tx_code), .rd_out(tx_rd_next));

  phy_ser #(.OVS(OVS)) u_ser (.clk, .rst_n, .sym(tx_code), .load(slot), .ser_out(ser_tx));

  // ----------------------------------------------------------------- receive
  logic [9:0]  rx_sym;
  logic        rx_sym_valid;
  logic [7:0]  rx_byte;
  logic        rx_k, rx_rd, rx_rd_next, rx_cerr, rx_derr;
  logic        in_frame;
  logic [15:0] rx_crc, rx_crc_next;
  logic [7:0]  rx_hold [2];
  logic [1:0]  rx_hcnt;
  logic        f_sof, f_eof, f_wr, f_err, bad_sym;

  phy_deser #(.OVS(OVS)) u_deser (
    .clk, .rst_n, .ser_in(ser_rx), .sym(rx_sym), .sym_valid(rx_sym_valid), .aligned(rx_aligned)
  );

  dec_8b10b u_dec (
    .code(rx_sym), .rd_in(rx_rd), .data(rx_byte), .is_k(rx_k), .rd_out(rx_rd_next),
    .code_err(rx_cerr), .disp_err(rx_derr)
  );

  crc16 u_rx_crc (.crc_in(rx_crc), .data(rx_byte), .crc_out(rx_crc_next));

  assign bad_sym = rx_cerr || rx_derr ||
                   (rx_k && rx_byte != K28_5 && rx_byte != K27_7 && rx_byte != K29_7);

  always_comb begin
    f_sof = 1'b0; f_eof = 1'b0; f_wr = 1'b0; f_err = 1'b0;
    if (rx_sym_valid) begin
      if (!bad_sym && rx_k && rx_byte == K27_7)            f_sof = 1'b1;
      else if (in_frame) begin
        if (bad_sym)                                       f_err = 1'b1;
        else if (rx_k && rx_byte == K29_7)                 f_eof = 1'b1;
        else if (!rx_k && rx_hcnt == 2'd2)                 f_wr  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_rd    <= 1'b0;
      in_frame <= 1'b0;
      rx_crc   <= 16'hFFFF;
      rx_hold  <= '{default: '0};
      rx_hcnt  <= '0;
      sym_errs <= '0;
    end else if (rx_sym_valid) begin
      rx_rd <= rx_rd_next;
      if (bad_sym) sym_errs <= sym_errs + 1'b1;
      if (f_sof) begin
        in_frame <= 1'b1;
        rx_crc   <= 16'hFFFF;
        rx_hcnt  <= '0;
      end else if (f_eof) begin
        in_frame <= 1'b0;
      end else if (in_frame && !bad_sym && !rx_k) begin
        rx_crc     <= rx_crc_next;
        rx_hold[0] <= rx_hold[1];
        rx_hold[1] <= rx_byte;
        if (rx_hcnt != 2'd2) rx_hcnt <= rx_hcnt + 1'b1;
      end
    end
  end

  phy_rx_fifo #(.DEPTH(RXF_DEPTH)) u_rxfifo (
    .clk, .rst_n,
    .sof(f_sof), .wr_en(f_wr), .wr_data(rx_hold[0]), .sym_err(f_err),
    .eof(f_eof), .crc_ok(rx_crc == 16'h0000 && rx_hcnt == 2'd2),
    .rd_valid(rxf_valid), .rd_data(rxf_data), .rd_last(rxf_last), .rd_en(rxf_rd),
    .frames_ok, .frames_bad
  );

  // GMII receive output: a checked frame leaves at one byte per clock, with
  // at least one idle cycle after it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gmii_rxd   <= '0;
      gmii_rx_dv <= 1'b0;
      rx_gap     <= 1'b0;
    end else begin
      gmii_rxd   <= rxf_data;
      gmii_rx_dv <= rxf_rd && !loop_mode;
      rx_gap     <= rxf_rd && rxf_last;
    end
  end

endmodule
