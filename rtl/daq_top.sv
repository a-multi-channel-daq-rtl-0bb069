// daq_top: FPGA logic of the DAQ core board.
//
// Data path: the collect interface reads the 8-channel, 24-bit ADC
// (adc_collect). Packets from other boards arrive over the electrical serial
// link through a transmission module (transceive, with the low-speed PHY)
// and wait in the Data Buffer (sync_fifo). The Data Gather merges local
// sample sets and buffered packets into its merge FIFO, whose output is sent
// to the workstation by the optical link stack: LLC, MAC and SYN, whose
// GMII-style byte port goes to the FPGA's multi-gigabit transceiver (GTX),
// which is outside this RTL and appears as the gtx_* ports.
//
// Command path: synchronisation commands received from the workstation on
// the optical link are forwarded to the other boards on the electrical link;
// the command CMD_ADC_SYNC also restarts the local ADC conversions.
// Data that the workstation sends as packets leaves on host_*.
//
// Clocking: one clock, clk (the paper's board has a 40 MHz oscillator).
// gtx_ce marks the byte slots of the transceiver's parallel interface; frame
// bytes use gtx_txd[7:0] and gtx_rxd[7:0], the upper byte is zero.
//
// Link test: with test_mode high the optical stack is frozen and loop_test
// sends a 16-bit counter on gtx_txd every clock and checks the words that
// come back on gtx_rxd (the transceiver looped back), as in the paper's
// loopback test; test_locked, test_words_ok and test_word_errs report it.
// At 16 bits per clock the port carries 800 Mb/s, 1 Gb/s after 8B/10B, when
// clk runs at the paper's 50 MHz transmission clock.
//
// The optical path adds no CRC of its own: the transceiver behind gtx_* is
// expected to deliver only clean frames, and the MAC's type and length checks
// are the only guard there. Stop-and-wait on the optical link keeps up with
// the ADC's 16 kSPS while the fibre round trip stays below about 2400 cycles;
// the electrical link carries about one 17-word packet per 2300 cycles, so
// one remote board with the same ADC at 16 kSPS (one per 2500) fits.
//
// Block structure and data flow follow the paper's board and signal-flow
// figures; the forwarding of commands to the electrical link, the packet
// format and all buffer sizes are this design's choices.
module daq_top
  import daq_pkg::*;
#(
  parameter logic [3:0]  BOARD_ID    = 4'd0,
  parameter int unsigned N_CH        = 8,       // ADC channels
  parameter int unsigned SAMPLE_W    = 24,      // ADC resolution
  parameter int unsigned OVS         = 4,       // electrical link: clock cycles per bit
  parameter int unsigned SEG_WORDS   = 32,      // LLC segment size, words
  parameter int unsigned TIMEOUT     = 16384,   // LLC retransmission timeout, cycles
  parameter int unsigned BUF_DEPTH   = 1024,    // Data Buffer, words
  parameter int unsigned MERGE_DEPTH = 1024     // merge FIFO of the Data Gather, words
) (
  input  logic        clk,
  input  logic        rst_n,
  // ADC
  input  logic        adc_dclk,
  input  logic        adc_drdy,
  input  logic [3:0]  adc_dout,
  output logic        adc_sync_n,
  // electrical interface (serial, through LVDS buffers)
  output logic        elink_tx,
  input  logic        elink_rx,
  // GTX transceiver byte interface (optical link)
  input  logic        gtx_ce,
  output logic [15:0] gtx_txd,      // frame bytes on [7:0]; test counter on all 16 bits
  output logic        gtx_tx_en,
  input  logic [15:0] gtx_rxd,
  input  logic        gtx_rx_dv,
  input  logic        test_mode,    // link loopback test instead of frames
  // packets from the workstation
  output logic [15:0] host_tdata,
  output logic        host_tvalid,
  output logic        host_tlast,
  // status
  output logic        elink_aligned,
  output logic [15:0] elink_frames_bad,
  output logic [15:0] elink_retransmits,
  output logic [15:0] opt_retransmits,
  output logic [15:0] lost_sets,
  output logic [15:0] local_pkts,
  output logic [15:0] ext_pkts,
  output logic        test_locked,
  output logic [31:0] test_words_ok,
  output logic [15:0] test_word_errs
);

  logic [7:0]  o_txd;
  logic        o_tx_en;
  logic [15:0] t_txd;
  logic        t_tx_en;

  // ------------------------------------------------------------ ADC collect
  logic                          sample_valid;
  logic [N_CH-1:0][SAMPLE_W-1:0] sample_data;
  logic [N_CH-1:0][7:0]          sample_hdr;
  logic                          adc_sync_req;

  adc_collect #(.N_CH(N_CH), .SAMPLE_W(SAMPLE_W)) u_adc (
    .clk, .rst_n, .adc_dclk, .adc_drdy, .adc_dout, .adc_sync_n,
    .sync_req(adc_sync_req), .sample_valid, .sample_data, .sample_hdr
  );

  // -------------------------------------------------- electrical link + buffer
  logic [15:0] e_tdata, b_tdata;
  logic        e_tvalid, e_tlast, e_tready, b_tvalid, b_tlast, b_tready;
  logic        b_full, b_empty;
  logic [16:0] b_rdata;
  logic        e_cmd_valid, e_cmd_ready, e_sync_valid;
  logic [7:0]  e_cmd, e_sync_cmd;
  logic [15:0] e_frames_ok, e_segs, e_sym_errs;

  transceive #(.OVS(OVS), .SEG_WORDS(SEG_WORDS), .TIMEOUT(TIMEOUT)) u_elink (
    .clk, .rst_n,
    .s_tdata(16'h0), .s_tvalid(1'b0), .s_tlast(1'b0), .s_tready(),
    .m_tdata(e_tdata), .m_tvalid(e_tvalid), .m_tlast(e_tlast), .m_tready(e_tready),
    .cmd_valid(e_cmd_valid), .cmd(e_cmd), .cmd_ready(e_cmd_ready),
    .sync_valid(e_sync_valid), .sync_cmd(e_sync_cmd),
    .loop_mode(1'b0), .ser_tx(elink_tx), .ser_rx(elink_rx), .rx_aligned(elink_aligned),
    .frames_ok(e_frames_ok), .frames_bad(elink_frames_bad), .retransmits(elink_retransmits),
    .segments_sent(e_segs), .sym_errs(e_sym_errs)
  );

  assign e_tready = !b_full;

  sync_fifo #(.WIDTH(17), .DEPTH(BUF_DEPTH)) u_data_buffer (
    .clk, .rst_n,
    .wr_en(e_tvalid && !b_full), .wr_data({e_tlast, e_tdata}), .full(b_full),
    .rd_en(b_tready && !b_empty), .rd_data(b_rdata), .empty(b_empty), .count()
  );

  // complete packets waiting in the Data Buffer
  logic [$clog2(BUF_DEPTH):0] b_pkts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_pkts <= '0;
    else b_pkts <= b_pkts + ($bits(b_pkts))'(e_tvalid && !b_full && e_tlast)
                          - ($bits(b_pkts))'(b_tready && !b_empty && b_tlast);
  end

  assign b_tvalid = !b_empty;
  assign b_tdata  = b_rdata[15:0];
  assign b_tlast  = b_rdata[16];

  // ---------------------------------------------------------- data gather
  logic [15:0] g_tdata;
  logic        g_tvalid, g_tlast, g_tready;

  data_gather #(.N_CH(N_CH), .SAMPLE_W(SAMPLE_W), .BOARD_ID(BOARD_ID), .MERGE_DEPTH(MERGE_DEPTH)) u_gather (
    .clk, .rst_n,
    .sample_valid, .sample_data, .sample_hdr,
    .x_tdata(b_tdata), .x_tvalid(b_tvalid), .x_tlast(b_tlast), .x_pkt_ready(b_pkts != '0),
    .x_tready(b_tready),
    .m_tdata(g_tdata), .m_tvalid(g_tvalid), .m_tlast(g_tlast), .m_tready(g_tready),
    .lost_sets, .local_pkts, .ext_pkts
  );

  // ---------------------------------------------- optical link: LLC/MAC/SYN
  llc_hdr_t    o_hdr, o_rx_hdr;
  logic        o_hdr_valid, o_hdr_ready, o_p_tvalid, o_p_tready;
  logic [15:0] o_p_tdata, o_rx_word, o_segs;
  logic        o_rx_word_valid, o_rx_done, o_rx_ok;
  logic [7:0]  o_mb_tdata, o_bm_tdata;
  logic        o_mb_tvalid, o_mb_tlast, o_mb_tready, o_bm_tvalid, o_bm_tlast;
  logic        o_sync_valid, o_cmd_ready;
  logic [7:0]  o_sync_cmd;

  llc #(.SEG_WORDS(SEG_WORDS), .TIMEOUT(TIMEOUT)) u_opt_llc (
    .clk, .rst_n,
    .s_tdata(g_tdata), .s_tvalid(g_tvalid), .s_tlast(g_tlast), .s_tready(g_tready),
    .m_tdata(host_tdata), .m_tvalid(host_tvalid), .m_tlast(host_tlast), .m_tready(1'b1),
    .hdr_valid(o_hdr_valid), .hdr(o_hdr), .hdr_ready(o_hdr_ready),
    .p_tdata(o_p_tdata), .p_tvalid(o_p_tvalid), .p_tready(o_p_tready),
    .rx_word_valid(o_rx_word_valid), .rx_word(o_rx_word), .rx_done(o_rx_done), .rx_ok(o_rx_ok),
    .rx_hdr(o_rx_hdr), .retransmits(opt_retransmits), .segments_sent(o_segs)
  );

  mac u_opt_mac (
    .clk, .rst_n,
    .hdr_valid(o_hdr_valid), .hdr(o_hdr), .hdr_ready(o_hdr_ready),
    .s_tdata(o_p_tdata), .s_tvalid(o_p_tvalid), .s_tready(o_p_tready),
    .m_tdata(o_mb_tdata), .m_tvalid(o_mb_tvalid), .m_tlast(o_mb_tlast), .m_tready(o_mb_tready),
    .r_tdata(o_bm_tdata), .r_tvalid(o_bm_tvalid), .r_tlast(o_bm_tlast),
    .rx_word_valid(o_rx_word_valid), .rx_word(o_rx_word), .rx_done(o_rx_done), .rx_ok(o_rx_ok),
    .rx_hdr(o_rx_hdr)
  );

  syn u_opt_syn (
    .clk, .rst_n, .gmii_ce(gtx_ce && !test_mode), .gmii_rx_ce(gtx_ce && !test_mode), .gmii_txd(o_txd), .gmii_tx_en(o_tx_en),
    .gmii_rxd(gtx_rxd[7:0]), .gmii_rx_dv(gtx_rx_dv && !test_mode),
    .s_tdata(o_mb_tdata), .s_tvalid(o_mb_tvalid), .s_tlast(o_mb_tlast), .s_tready(o_mb_tready),
    .cmd_valid(1'b0), .cmd(8'h00), .cmd_ready(o_cmd_ready),
    .m_tdata(o_bm_tdata), .m_tvalid(o_bm_tvalid), .m_tlast(o_bm_tlast),
    .sync_valid(o_sync_valid), .sync_cmd(o_sync_cmd)
  );

  // ------------------------------------------------- link loopback test
  // In test mode the optical stack is frozen (no byte slots) and the
  // transceiver port carries a 16-bit counter every clock instead.
  loop_test #(.W(16)) u_loop_test (
    .clk, .rst_n, .enable(test_mode),
    .tx_data(t_txd), .tx_valid(t_tx_en),
    .rx_data(gtx_rxd), .rx_valid(gtx_rx_dv),
    .locked(test_locked), .words_ok(test_words_ok), .word_errs(test_word_errs)
  );

  assign gtx_txd   = test_mode ? t_txd : {8'h00, o_txd};
  assign gtx_tx_en = test_mode ? t_tx_en : o_tx_en;

  // --------------------------------------------------------- command path
  assign adc_sync_req = o_sync_valid && (o_sync_cmd == CMD_ADC_SYNC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_cmd_valid <= 1'b0;
      e_cmd       <= '0;
    end else if (o_sync_valid) begin
      e_cmd_valid <= 1'b1;
      e_cmd       <= o_sync_cmd;
    end else if (e_cmd_ready) begin
      e_cmd_valid <= 1'b0;
    end
  end

endmodule
