// tb_transceive: two transmission modules joined by a noisy serial link.
//
// Module A sends random packets to module B; B's serial output returns to A
// and carries B's acknowledgements. On the A-to-B line single bits are
// inverted at random during the middle part of the test, so frames are lost
// and must be recovered by retransmission. B's receiver is stalled at random.
// Synchronisation commands are sent from A while data flows and must arrive
// at B in order, each within a bound of one longest frame plus the command
// itself. Checks: every packet arrives once, in order, word-exact, with the
// right packet boundaries; CRC drops and retransmissions both happened.
module tb_transceive;
  localparam int OVS = 4, SEG = 8, TMO = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] a_sd, b_md, a_md, unused16;
  logic a_sv, a_sl, a_sr, b_mv, b_ml, b_mr, a_mv, a_ml;
  logic a_cv, a_cr, b_sv, b_cr, a_syv, flip, noisy;
  logic [7:0] a_cmd, b_sc, a_sc;
  logic ser_ab, ser_ba;
  logic [15:0] a_ok, a_bad, a_rt, a_ss, a_se, b_ok, b_bad, b_rt, b_ss, b_se;
  logic a_al, b_al;
  int checks = 0, failures = 0;

  transceive #(.OVS(OVS), .SEG_WORDS(SEG), .TIMEOUT(TMO)) a (
    .clk, .rst_n, .s_tdata(a_sd), .s_tvalid(a_sv), .s_tlast(a_sl), .s_tready(a_sr),
    .m_tdata(a_md), .m_tvalid(a_mv), .m_tlast(a_ml), .m_tready(1'b1),
    .cmd_valid(a_cv), .cmd(a_cmd), .cmd_ready(a_cr), .sync_valid(a_syv), .sync_cmd(a_sc),
    .loop_mode(1'b0), .ser_tx(ser_ab), .ser_rx(ser_ba), .rx_aligned(a_al),
    .frames_ok(a_ok), .frames_bad(a_bad), .retransmits(a_rt), .segments_sent(a_ss), .sym_errs(a_se));
  transceive #(.OVS(OVS), .SEG_WORDS(SEG), .TIMEOUT(TMO)) b (
    .clk, .rst_n, .s_tdata(16'h0), .s_tvalid(1'b0), .s_tlast(1'b0), .s_tready(),
    .m_tdata(b_md), .m_tvalid(b_mv), .m_tlast(b_ml), .m_tready(b_mr),
    .cmd_valid(1'b0), .cmd(8'h0), .cmd_ready(b_cr), .sync_valid(b_sv), .sync_cmd(b_sc),
    .loop_mode(1'b0), .ser_tx(ser_ba), .ser_rx(ser_ab ^ flip), .rx_aligned(b_al),
    .frames_ok(b_ok), .frames_bad(b_bad), .retransmits(b_rt), .segments_sent(b_ss), .sym_errs(b_se));

  // bit errors on the A-to-B line
  always @(posedge clk) flip <= noisy && ($urandom_range(0, 2999) == 0);
  always @(negedge clk) b_mr <= ($urandom_range(0, 3) != 0);

  logic [16:0] exp_q [$];     // {last, word}
  int pkts_rx = 0;
  always @(posedge clk) if (rst_n && b_mv && b_mr) begin
    checks++;
    if (exp_q.size() == 0 || {b_ml, b_md} !== exp_q[0]) begin
      failures++;
      $display("FAIL rx %b %h exp %h", b_ml, b_md, exp_q.size() ? exp_q[0] : 17'h0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
    if (b_ml) pkts_rx++;
  end

  // synchronisation commands and their latency
  logic [7:0] cmd_q [$];
  int t_sent [$];
  int n_cmd_rx = 0, n_cmd_lost = 0, max_lat = 0;
  // longest frame on the line: 2*SEG+3 bytes, 5 framing symbols, IFG idles, twice for the hold stages
  localparam int LAT_BOUND = (2 * SEG + 3 + 5 + 6 + 2 + 6) * 10 * OVS * 2;
  always @(posedge clk) if (rst_n && b_sv) begin
    int lat;
    // a command frame hit by a bit error is dropped by the CRC check: skip it
    while (cmd_q.size() > 1 && b_sc !== cmd_q[0]) begin
      void'(cmd_q.pop_front()); void'(t_sent.pop_front()); n_cmd_lost++;
    end
    checks++;
    if (cmd_q.size() == 0 || b_sc !== cmd_q[0]) begin failures++; $display("FAIL command %h", b_sc); end
    else begin
      lat = ($time / 10) - t_sent[0];
      if (lat > max_lat) max_lat = lat;
      checks++;
      if (lat > LAT_BOUND) begin failures++; $display("FAIL command latency %0d > %0d", lat, LAT_BOUND); end
      void'(cmd_q.pop_front()); void'(t_sent.pop_front());
    end
    n_cmd_rx++;
  end

  // command handshakes are recorded at the clock edge where they happen
  bit cacc;
  always @(posedge clk) if (rst_n && a_cv && a_cr) begin cmd_q.push_back(a_cmd); cacc <= 1; end

  initial begin
    a_cv = 0; a_cmd = 0;
    wait (rst_n);
    repeat (20) begin
      repeat ($urandom_range(2000, 9000)) @(posedge clk);
      @(negedge clk);
      a_cv = 1; a_cmd = 8'($urandom_range(1, 255)); cacc = 0;
      t_sent.push_back($time / 10);
      do @(negedge clk); while (!cacc);
      a_cv = 0;
    end
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int npk = 40;
    a_sv = 0; a_sd = 0; a_sl = 0; noisy = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2000) @(posedge clk);
    for (int p = 0; p < npk; p++) begin
      automatic int n = $urandom_range(1, 30);
      noisy = (p >= 10 && p < 30);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        a_sv = 1; a_sd = 16'($urandom); a_sl = (i == n - 1);
        while (!a_sr) @(negedge clk);
        exp_q.push_back({a_sl, a_sd});
        @(negedge clk);
        a_sv = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
    noisy = 0;
    while ((pkts_rx < npk || n_cmd_rx + n_cmd_lost + cmd_q.size() < 20 || cmd_q.size() > 0) && $time < 2900000 * 10) @(posedge clk);
    checks++; if (pkts_rx != npk) begin failures++; $display("FAIL %0d of %0d packets", pkts_rx, npk); end
    // commands are not retransmitted; only a few may be lost, and only on the noisy line
    checks++; if (n_cmd_rx < 15) begin failures++; $display("FAIL %0d commands", n_cmd_rx); end
    checks++; if (b_bad == 0) begin failures++; $display("FAIL no frame was dropped"); end
    checks++; if (a_rt == 0) begin failures++; $display("FAIL no retransmission"); end
    $display("commands lost=%0d dropped=%0d retransmits=%0d segments=%0d max command latency=%0d cycles", n_cmd_lost, b_bad, a_rt, a_ss, max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
