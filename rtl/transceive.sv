// transceive: point-to-point transmission module (LLC, MAC, SYN, PHY).
//
// Two of these, one per FPGA, joined by a serial line in each direction,
// form a link that moves packets of 16-bit words reliably and in order, and
// carries synchronisation commands ahead of the data. The layers are chained
// as in the paper: LLC (segmentation, numbering, retransmission) - MAC
// (frame header) - SYN (commands, byte timing) - PHY (CRC, 8B/10B, serial).
// A frame lost or corrupted on the line is dropped by the PHY's CRC check and
// recovered by the LLC's retransmission.
//
// Interface: s_t* packets to send, m_t* packets received, cmd_* commands to
// send, sync_* commands received, ser_tx/ser_rx the serial line, loop_mode
// turns the PHY into a loop-back of received frames. Status outputs count
// frames accepted and dropped by the PHY, symbol errors, and segments sent
// and resent.
//
// Timing: one byte per 10*OVS cycles on the line; a segment of W words is
// 2W+3 bytes plus 5 symbols of framing and IFG idle slots. Received frames
// go up from the PHY at one byte per clock once checked. With the defaults,
// back-to-back 17-word packets take about 2300 cycles each, including the
// acknowledgement.
module transceive
  import daq_pkg::*;
#(
  parameter int unsigned OVS       = 4,
  parameter int unsigned SEG_WORDS = 32,
  parameter int unsigned TIMEOUT   = 16384,
  parameter int unsigned IFG       = 6,
  parameter int unsigned RXF_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  input  logic        cmd_valid,
  input  logic [7:0]  cmd,
  output logic        cmd_ready,
  output logic        sync_valid,
  output logic [7:0]  sync_cmd,
  input  logic        loop_mode,
  output logic        ser_tx,
  input  logic        ser_rx,
  output logic        rx_aligned,
  output logic [15:0] frames_ok,
  output logic [15:0] frames_bad,
  output logic [15:0] retransmits,
  output logic [15:0] segments_sent,
  output logic [15:0] sym_errs
);

  llc_hdr_t    hdr, rx_hdr;
  logic        hdr_valid, hdr_ready;
  logic [15:0] p_tdata, rx_word;
  logic        p_tvalid, p_tready, rx_word_valid, rx_done, rx_ok;
  logic [7:0]  mb_tdata, bm_tdata;
  logic        mb_tvalid, mb_tlast, mb_tready, bm_tvalid, bm_tlast;
  logic        gmii_ce, gmii_tx_en, gmii_rx_dv;
  logic [7:0]  gmii_txd, gmii_rxd;

  llc #(.SEG_WORDS(SEG_WORDS), .TIMEOUT(TIMEOUT)) u_llc (
    .clk, .rst_n,
    .s_tdata, .s_tvalid, .s_tlast, .s_tready,
    .m_tdata, .m_tvalid, .m_tlast, .m_tready,
    .hdr_valid, .hdr, .hdr_ready, .p_tdata, .p_tvalid, .p_tready,
    .rx_word_valid, .rx_word, .rx_done, .rx_ok, .rx_hdr,
    .retransmits, .segments_sent
  );

  mac u_mac (
    .clk, .rst_n,
    .hdr_valid, .hdr, .hdr_ready, .s_tdata(p_tdata), .s_tvalid(p_tvalid), .s_tready(p_tready),
    .m_tdata(mb_tdata), .m_tvalid(mb_tvalid), .m_tlast(mb_tlast), .m_tready(mb_tready),
    .r_tdata(bm_tdata), .r_tvalid(bm_tvalid), .r_tlast(bm_tlast),
    .rx_word_valid, .rx_word, .rx_done, .rx_ok, .rx_hdr
  );

  syn #(.IFG(IFG)) u_syn (
    .clk, .rst_n, .gmii_ce, .gmii_rx_ce(1'b1), .gmii_txd, .gmii_tx_en, .gmii_rxd, .gmii_rx_dv,
    .s_tdata(mb_tdata), .s_tvalid(mb_tvalid), .s_tlast(mb_tlast), .s_tready(mb_tready),
    .cmd_valid, .cmd, .cmd_ready,
    .m_tdata(bm_tdata), .m_tvalid(bm_tvalid), .m_tlast(bm_tlast),
    .sync_valid, .sync_cmd
  );

  phy #(.OVS(OVS), .RXF_DEPTH(RXF_DEPTH)) u_phy (
    .clk, .rst_n, .loop_mode, .gmii_ce, .gmii_txd, .gmii_tx_en, .gmii_rxd, .gmii_rx_dv,
    .ser_tx, .ser_rx, .rx_aligned, .frames_ok, .frames_bad, .sym_errs
  );

endmodule
