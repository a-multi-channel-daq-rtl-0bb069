// tb_two_boards: a front-end board streaming its ADC over the electrical link
// into the core board, both at the full sampling rate.
//
// The remote board is built from the same blocks as the core board's data
// side: an ADC model converting at 16 kSPS (2500 cycles of the 40 MHz
// clock), the collect interface, a Data Gather with board number 1, and a
// transmission module whose serial output drives the core board's
// electrical input. The core board (daq_top at its default parameters) runs
// its own ADC at the same rate, so it must merge two full 8-channel streams
// and send both to the workstation, modelled by the LLC, MAC and SYN layers
// on the transceiver byte port, at the end of a fibre modelled as a delay of
// FIBRE_DLY cycles each way (500 cycles = 12.5 us, about 2.5 km).
//
// Checks: every sample set of both boards reaches the workstation as a
// correctly formatted packet, in order per board; neither board loses a set;
// the remote board's transmit stays within its rate (its merge FIFO never
// holds more than a few packets); no frame is lost on the clean link.
module tb_two_boards;
  import daq_pkg::*;
  localparam int NSETS = 80;     // sample sets per board to check
  localparam int FIBRE_DLY = 500; // one-way fibre delay, cycles
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;                 // 40 MHz

  // --- core board with its ADC
  logic adc_dclk, adc_drdy, adc_sync_n;
  logic [3:0] adc_dout;
  logic [7:0][23:0] conv_data;
  logic [7:0][7:0]  conv_hdr;
  int adc_frames, adc_syncs;
  ad7779_model adc (.clk, .adc_sync_n, .conv_data, .conv_hdr, .adc_dclk, .adc_drdy, .adc_dout,
                    .frames(adc_frames), .syncs(adc_syncs));

  logic elink_tx, elink_rx, gtx_tx_en, gtx_rx_dv, host_tvalid, host_tlast, elink_aligned;
  logic [15:0] gtx_txd, gtx_rxd;
  logic [15:0] host_tdata, e_bad, e_rt, o_rt, lost_sets, local_pkts, ext_pkts;
  logic test_locked;
  logic [31:0] test_ok;
  logic [15:0] test_errs;
  daq_top core (.clk, .rst_n, .adc_dclk, .adc_drdy, .adc_dout, .adc_sync_n,
    .elink_tx, .elink_rx, .gtx_ce(1'b1), .gtx_txd, .gtx_tx_en, .gtx_rxd, .gtx_rx_dv,
    .test_mode(1'b0), .host_tdata, .host_tvalid, .host_tlast, .elink_aligned, .elink_frames_bad(e_bad),
    .elink_retransmits(e_rt), .opt_retransmits(o_rt), .lost_sets, .local_pkts, .ext_pkts,
    .test_locked, .test_words_ok(test_ok), .test_word_errs(test_errs));

  // --- remote front-end board
  logic r_dclk, r_drdy, r_sync_n;
  logic [3:0] r_dout;
  logic [7:0][23:0] r_conv_data;
  logic [7:0][7:0]  r_conv_hdr;
  int r_frames, r_syncs;
  ad7779_model r_adc (.clk, .adc_sync_n(r_sync_n), .conv_data(r_conv_data), .conv_hdr(r_conv_hdr),
                      .adc_dclk(r_dclk), .adc_drdy(r_drdy), .adc_dout(r_dout),
                      .frames(r_frames), .syncs(r_syncs));
  logic r_sv;
  logic [7:0][23:0] r_sdata;
  logic [7:0][7:0]  r_shdr;
  adc_collect r_col (.clk, .rst_n, .adc_dclk(r_dclk), .adc_drdy(r_drdy), .adc_dout(r_dout),
    .adc_sync_n(r_sync_n), .sync_req(1'b0), .sample_valid(r_sv), .sample_data(r_sdata), .sample_hdr(r_shdr));
  logic [15:0] r_gd, r_lost, r_loc, r_ext;
  logic r_gv, r_gl, r_gr;
  data_gather #(.BOARD_ID(4'd1)) r_gather (.clk, .rst_n,
    .sample_valid(r_sv), .sample_data(r_sdata), .sample_hdr(r_shdr),
    .x_tdata(16'h0), .x_tvalid(1'b0), .x_tlast(1'b0), .x_pkt_ready(1'b0), .x_tready(),
    .m_tdata(r_gd), .m_tvalid(r_gv), .m_tlast(r_gl), .m_tready(r_gr),
    .lost_sets(r_lost), .local_pkts(r_loc), .ext_pkts(r_ext));
  logic [15:0] r_rt, r_ss, r_ok, r_bad, r_se;
  logic r_al, r_syv;
  logic [7:0] r_sc;
  transceive r_link (.clk, .rst_n, .s_tdata(r_gd), .s_tvalid(r_gv), .s_tlast(r_gl), .s_tready(r_gr),
    .m_tdata(), .m_tvalid(), .m_tlast(), .m_tready(1'b1),
    .cmd_valid(1'b0), .cmd(8'h0), .cmd_ready(), .sync_valid(r_syv), .sync_cmd(r_sc),
    .loop_mode(1'b0), .ser_tx(elink_rx), .ser_rx(elink_tx), .rx_aligned(r_al),
    .frames_ok(r_ok), .frames_bad(r_bad), .retransmits(r_rt), .segments_sent(r_ss), .sym_errs(r_se));

  // --- workstation: LLC, MAC, SYN on the transceiver byte port
  logic [8:0] f_up, f_down;     // fibre outputs towards the workstation / the board
  llc_hdr_t w_h, w_rh;
  logic w_hv, w_hr, w_pv, w_pr, w_rwv, w_rd, w_rok, w_mv, w_ml, w_tx_en;
  logic [15:0] w_pd, w_rw, w_md, w_rt, w_ss;
  logic [7:0] w_mbd, w_bmd, w_txd;
  logic w_mbv, w_mbl, w_mbr, w_bmv, w_bml;
  llc w_llc (.clk, .rst_n, .s_tdata(16'h0), .s_tvalid(1'b0), .s_tlast(1'b0), .s_tready(),
    .m_tdata(w_md), .m_tvalid(w_mv), .m_tlast(w_ml), .m_tready(1'b1),
    .hdr_valid(w_hv), .hdr(w_h), .hdr_ready(w_hr), .p_tdata(w_pd), .p_tvalid(w_pv), .p_tready(w_pr),
    .rx_word_valid(w_rwv), .rx_word(w_rw), .rx_done(w_rd), .rx_ok(w_rok), .rx_hdr(w_rh),
    .retransmits(w_rt), .segments_sent(w_ss));
  mac w_mac (.clk, .rst_n, .hdr_valid(w_hv), .hdr(w_h), .hdr_ready(w_hr),
    .s_tdata(w_pd), .s_tvalid(w_pv), .s_tready(w_pr),
    .m_tdata(w_mbd), .m_tvalid(w_mbv), .m_tlast(w_mbl), .m_tready(w_mbr),
    .r_tdata(w_bmd), .r_tvalid(w_bmv), .r_tlast(w_bml),
    .rx_word_valid(w_rwv), .rx_word(w_rw), .rx_done(w_rd), .rx_ok(w_rok), .rx_hdr(w_rh));
  syn w_syn (.clk, .rst_n, .gmii_ce(1'b1), .gmii_rx_ce(1'b1), .gmii_txd(w_txd), .gmii_tx_en(w_tx_en),
    .gmii_rxd(f_up[7:0]), .gmii_rx_dv(f_up[8]),
    .s_tdata(w_mbd), .s_tvalid(w_mbv), .s_tlast(w_mbl), .s_tready(w_mbr),
    .cmd_valid(1'b0), .cmd(8'h00), .cmd_ready(),
    .m_tdata(w_bmd), .m_tvalid(w_bmv), .m_tlast(w_bml), .sync_valid(), .sync_cmd());
  // the fibre: a delay line in each direction
  logic [8:0] up_q [$], down_q [$];
  always @(posedge clk) begin
    up_q.push_back({gtx_tx_en, gtx_txd[7:0]});
    down_q.push_back({w_tx_en, w_txd});
    f_up   <= (up_q.size() > FIBRE_DLY) ? up_q.pop_front() : 9'h0;
    f_down <= (down_q.size() > FIBRE_DLY) ? down_q.pop_front() : 9'h0;
  end
  assign gtx_rxd   = {8'h00, f_down[7:0]};
  assign gtx_rx_dv = f_down[8];

  int checks = 0, failures = 0;

  // expected packets of both boards, from the values their ADC models convert
  logic [15:0] exp_q [2][$][$];
  logic [7:0]  setno [2] = '{8'd0, 8'd0};
  task automatic add_set(input int b, input logic [7:0][23:0] d, input logic [7:0][7:0] h);
    logic [15:0] p [$];
    p.push_back({4'hA, 4'(b), setno[b]});
    for (int c = 0; c < 8; c++) begin
      p.push_back({h[c], d[c][23:16]});
      p.push_back(d[c][15:0]);
    end
    exp_q[b].push_back(p);
    setno[b]++;
  endtask
  always @(posedge adc_drdy) begin
    add_set(0, conv_data, conv_hdr);
    for (int c = 0; c < 8; c++) begin conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom); end
  end
  always @(posedge r_drdy) begin
    add_set(1, r_conv_data, r_conv_hdr);
    for (int c = 0; c < 8; c++) begin r_conv_data[c] = 24'($urandom); r_conv_hdr[c] = 8'($urandom); end
  end

  // workstation receive side
  logic [15:0] cur [$];
  int n_got [2] = '{0, 0};
  always @(posedge clk) if (rst_n && w_mv) begin
    cur.push_back(w_md);
    if (w_ml) begin
      logic [15:0] e [$];
      int b;
      b = (cur[0][15:8] == 8'hA1) ? 1 : 0;
      checks++;
      if (exp_q[b].size() == 0) begin failures++; $display("FAIL unexpected packet of board %0d", b); end
      else begin
        e = exp_q[b].pop_front();
        if (e != cur) begin failures++; $display("FAIL packet %0d of board %0d differs", n_got[b], b); end
      end
      n_got[b]++;
      cur = {};
    end
  end

  // the remote board must keep up: its merge FIFO may not build up
  int r_backlog, max_backlog = 0;
  always @(posedge clk) if (rst_n) begin
    r_backlog = int'(r_loc) - int'(r_ss);
    if (r_backlog > max_backlog) max_backlog = r_backlog;
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom);
      r_conv_data[c] = 24'($urandom); r_conv_hdr[c] = 8'($urandom);
    end
    repeat (5) @(posedge clk); rst_n = 1;
    wait (n_got[0] >= NSETS && n_got[1] >= NSETS);
    checks++; if (lost_sets != 0 || r_lost != 0) begin failures++; $display("FAIL sets lost: core %0d, remote %0d", lost_sets, r_lost); end
    checks++; if (max_backlog > 3) begin failures++; $display("FAIL remote board falls behind: %0d packets waiting", max_backlog); end
    checks++; if (e_bad != 0 || r_rt != 0) begin failures++; $display("FAIL clean link lost frames: %0d dropped, %0d retransmitted", e_bad, r_rt); end
    checks++; if (ext_pkts < NSETS) begin failures++; $display("FAIL core board counted %0d external packets", ext_pkts); end
    $display("two boards at 16 kSPS: core %0d and remote %0d sets received, remote backlog at most %0d packets, core ADC %0d / remote ADC %0d conversions",
             n_got[0], n_got[1], max_backlog, adc_frames, r_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
