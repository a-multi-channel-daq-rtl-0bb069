// tb_daq_top: the whole core board at its default parameters.
//
// Around the board logic: an ADC model converting at 16 kSPS (2500 cycles of
// the 40 MHz clock); a remote board, built from the same transmission module,
// sending packets over the electrical serial link, with bit errors injected
// for a while; and a workstation, built from the same LLC, MAC and SYN
// layers, connected to the GTX byte port (one byte per cycle) in place of
// the transceiver and fibre. The workstation sends the ADC synchronisation
// command and one other command.
//
// Checks: every ADC sample set reaches the workstation as a correctly
// formatted packet, in order; every remote packet arrives unchanged, in
// order; the ADC receives one synchronisation pulse; both commands are
// forwarded to the remote board. Each mechanism must have happened at least
// once: local packets, external packets, packets of both kinds merged into
// one stream, a frame dropped by the CRC check, a retransmission, a command
// forwarded, an ADC synchronisation.
// Finally the link loopback test: with test_mode high the transceiver port is
// looped back through a delay line, one word of which is corrupted; the
// board's checker must lock, count the loop's words as good and report
// exactly one bad word.
module tb_daq_top;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;                 // 40 MHz

  // ADC
  logic adc_dclk, adc_drdy, adc_sync_n;
  logic [3:0] adc_dout;
  logic [7:0][23:0] conv_data;
  logic [7:0][7:0]  conv_hdr;
  int adc_frames, adc_syncs;
  ad7779_model adc (.clk, .adc_sync_n, .conv_data, .conv_hdr, .adc_dclk, .adc_drdy, .adc_dout,
                    .frames(adc_frames), .syncs(adc_syncs));

  // board under test
  logic elink_tx, elink_rx, gtx_tx_en, gtx_rx_dv, host_tvalid, host_tlast, elink_aligned;
  logic [15:0] gtx_txd, gtx_rxd;
  logic [15:0] host_tdata, e_bad, e_rt, o_rt, lost_sets, local_pkts, ext_pkts;
  logic test_mode, test_locked;
  logic [31:0] test_ok;
  logic [15:0] test_errs;
  daq_top dut (.clk, .rst_n, .adc_dclk, .adc_drdy, .adc_dout, .adc_sync_n,
    .elink_tx, .elink_rx, .gtx_ce(1'b1), .gtx_txd, .gtx_tx_en, .gtx_rxd, .gtx_rx_dv,
    .test_mode, .host_tdata, .host_tvalid, .host_tlast, .elink_aligned, .elink_frames_bad(e_bad),
    .elink_retransmits(e_rt), .opt_retransmits(o_rt), .lost_sets, .local_pkts, .ext_pkts,
    .test_locked, .test_words_ok(test_ok), .test_word_errs(test_errs));

  // transceiver port: the workstation's byte stream, or in test mode the
  // board's own words looped back through LOOP_DLY cycles
  localparam int LOOP_DLY = 12;
  logic [7:0] w_txd;
  logic w_tx_en, loop_corrupt;
  logic [16:0] loop_line [LOOP_DLY];
  always @(posedge clk) begin
    loop_line[0] <= {gtx_tx_en, gtx_txd ^ (loop_corrupt ? 16'h8000 : 16'h0)};
    for (int i = 1; i < LOOP_DLY; i++) loop_line[i] <= loop_line[i-1];
  end
  assign gtx_rxd   = test_mode ? loop_line[LOOP_DLY-1][15:0] : {8'h00, w_txd};
  assign gtx_rx_dv = test_mode ? loop_line[LOOP_DLY-1][16] : w_tx_en;

  // remote board on the electrical link
  logic [15:0] r_sd, r_rt, r_ss, r_ok, r_bad, r_se;
  logic r_sv, r_sl, r_sr, r_syv, r_al, r_tx, flip, noisy;
  logic [7:0] r_sc;
  transceive remote (.clk, .rst_n, .s_tdata(r_sd), .s_tvalid(r_sv), .s_tlast(r_sl), .s_tready(r_sr),
    .m_tdata(), .m_tvalid(), .m_tlast(), .m_tready(1'b1),
    .cmd_valid(1'b0), .cmd(8'h0), .cmd_ready(), .sync_valid(r_syv), .sync_cmd(r_sc),
    .loop_mode(1'b0), .ser_tx(r_tx), .ser_rx(elink_tx), .rx_aligned(r_al),
    .frames_ok(r_ok), .frames_bad(r_bad), .retransmits(r_rt), .segments_sent(r_ss), .sym_errs(r_se));
  assign elink_rx = r_tx ^ flip;
  always @(posedge clk) flip <= noisy && ($urandom_range(0, 3999) == 0);

  // workstation: LLC, MAC, SYN on the GTX byte port
  llc_hdr_t w_h, w_rh;
  logic w_hv, w_hr, w_pv, w_pr, w_rwv, w_rd, w_rok, w_mv, w_ml;
  logic [15:0] w_pd, w_rw, w_md, w_rt, w_ss;
  logic [7:0] w_mbd, w_bmd;
  logic w_mbv, w_mbl, w_mbr, w_bmv, w_bml, w_cv, w_cr;
  logic [7:0] w_cmd;
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
    .gmii_rxd(gtx_txd[7:0]), .gmii_rx_dv(gtx_tx_en && !test_mode),
    .s_tdata(w_mbd), .s_tvalid(w_mbv), .s_tlast(w_mbl), .s_tready(w_mbr),
    .cmd_valid(w_cv), .cmd(w_cmd), .cmd_ready(w_cr),
    .m_tdata(w_bmd), .m_tvalid(w_bmv), .m_tlast(w_bml), .sync_valid(), .sync_cmd());

  int checks = 0, failures = 0;

  // expected local packets, from the values the ADC model converts
  logic [15:0] loc_q [$][$];
  logic [15:0] ext_q [$][$];
  logic [7:0]  setno = 0;
  always @(posedge adc_drdy) begin
    automatic logic [15:0] p [$];
    p.push_back({4'hA, 4'd0, setno});
    for (int c = 0; c < 8; c++) begin
      p.push_back({conv_hdr[c], conv_data[c][23:16]});
      p.push_back(conv_data[c][15:0]);
    end
    loc_q.push_back(p);
    setno++;
    for (int c = 0; c < 8; c++) begin conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom); end
  end

  // workstation receive side
  logic [15:0] cur [$];
  int n_loc = 0, n_ext = 0, switches = 0, last_kind = -1;
  always @(posedge clk) if (rst_n && w_mv) begin
    cur.push_back(w_md);
    if (w_ml) begin
      logic [15:0] e [$];
      int kind;
      kind = (cur[0][15:8] == 8'hA0) ? 0 : 1;
      checks++;
      if (kind == 0) begin
        if (loc_q.size() == 0) begin failures++; $display("FAIL unexpected local packet"); end
        else begin e = loc_q.pop_front(); n_loc++; end
      end else begin
        if (ext_q.size() == 0) begin failures++; $display("FAIL unexpected external packet"); end
        else begin e = ext_q.pop_front(); n_ext++; end
      end
      if (e != cur) begin failures++; $display("FAIL %s packet of %0d words differs", kind ? "external" : "local", cur.size()); if (n_loc < 3) $display("%p\n%p", cur, e); end
      if (last_kind >= 0 && kind != last_kind) switches++;
      last_kind = kind;
      cur = {};
    end
  end

  // commands forwarded to the remote board
  logic [7:0] fwd_q [$];
  int n_fwd = 0;
  always @(posedge clk) if (rst_n && r_syv) begin
    checks++;
    if (fwd_q.size() == 0 || r_sc !== fwd_q[0]) begin failures++; $display("FAIL forwarded command %h", r_sc); end
    if (fwd_q.size()) void'(fwd_q.pop_front());
    n_fwd++;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_cmd(input logic [7:0] c);
    @(negedge clk); w_cv = 1; w_cmd = c;
    do @(negedge clk); while (!w_cr);
    fwd_q.push_back(c);
    w_cv = 0;
  endtask

  // remote board's packets: {4'hA, board 3, n} and random words
  localparam int NREM = 30;
  bit acc;
  always @(posedge clk) if (rst_n && r_sv && r_sr) acc <= 1;
  initial begin
    r_sv = 0; r_sd = 0; r_sl = 0;
    wait (rst_n);
    repeat (5000) @(negedge clk);
    for (int k = 0; k < NREM; k++) begin
      automatic int n = $urandom_range(2, 60);
      automatic logic [15:0] p [$];
      p.push_back({4'hA, 4'd3, 8'(k)});
      for (int i = 1; i < n; i++) p.push_back(16'($urandom));
      ext_q.push_back(p);
      @(negedge clk);
      for (int i = 0; i < n; i++) begin
        r_sv = 1; r_sd = p[i]; r_sl = (i == n - 1); acc = 0;
        do @(negedge clk); while (!acc);
      end
      r_sv = 0;
      repeat ($urandom_range(0, 3000)) @(negedge clk);
    end
  end

  initial begin
    int t;
    for (int c = 0; c < 8; c++) begin conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom); end
    noisy = 0; w_cv = 0; w_cmd = 0; test_mode = 0; loop_corrupt = 0;
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (30000) @(negedge clk);
    send_cmd(CMD_ADC_SYNC);
    noisy = 1;
    repeat (60000) @(negedge clk);
    noisy = 0;
    send_cmd(8'h42);
    t = 0;
    while ((n_ext < NREM || n_fwd < 2) && t < 1500000) begin @(negedge clk); t++; end
    repeat (6000) @(negedge clk);
    checks++; if (n_ext != NREM) begin failures++; $display("FAIL %0d of %0d remote packets", n_ext, NREM); end
    checks++; if (n_loc < adc_frames - 1 || lost_sets != 0) begin failures++; $display("FAIL %0d local packets for %0d conversions, %0d lost", n_loc, adc_frames, lost_sets); end
    checks++; if (adc_syncs != 1) begin failures++; $display("FAIL %0d ADC sync pulses", adc_syncs); end
    checks++; if (n_fwd != 2) begin failures++; $display("FAIL %0d commands forwarded", n_fwd); end
    checks++; if (e_bad == 0) begin failures++; $display("FAIL no CRC drop happened"); end
    checks++; if (r_rt == 0) begin failures++; $display("FAIL no retransmission happened"); end
    checks++; if (switches == 0) begin failures++; $display("FAIL streams never merged"); end
    checks++; if (gtx_txd[15:8] != 8'h00) begin failures++; $display("FAIL upper byte of the transceiver port in use"); end
    // link loopback test
    test_mode = 1;
    repeat (2000) @(negedge clk);
    loop_corrupt = 1; @(negedge clk); loop_corrupt = 0;
    repeat (2000) @(negedge clk);
    checks++;
    if (!test_locked || test_errs != 1 || test_ok < 4000 - LOOP_DLY - 8 || test_ok > 4000) begin
      failures++; $display("FAIL loopback test: locked=%b good=%0d bad=%0d", test_locked, test_ok, test_errs);
    end
    $display("loopback test: %0d good words, %0d bad", test_ok, test_errs);
    $display("mechanisms: local=%0d external=%0d stream switches=%0d crc drops=%0d retransmits=%0d commands forwarded=%0d adc syncs=%0d",
             n_loc, n_ext, switches, e_bad, r_rt, n_fwd, adc_syncs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
