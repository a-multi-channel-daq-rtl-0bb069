// tb_llc: two LLCs talking through two MACs over a lossy channel.
//
// LLC A sends random packets (1..50 words) to LLC B with SEG_WORDS = 8, so
// most packets are cut into several segments. The channel between the MACs
// drops whole frames at random in both directions: lost data segments must be
// resent after the timeout, lost ACKs make A resend a segment that B already
// has, which B must acknowledge again and not deliver twice. B's output is
// stalled at random. Every packet must arrive once, in order, word-exact,
// with tlast only on its last word.
module tb_llc;
  import daq_pkg::*;
  localparam int SEG = 8, TMO = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // A side
  logic [15:0] a_sd, a_pd, a_rw, b_md, b_pd, b_rw;
  logic a_sv, a_sl, a_sr, a_hv, a_hr, a_pv, a_pr, a_rwv, a_rd, a_rok;
  logic b_mv, b_ml, b_mr, b_hv, b_hr, b_pv, b_pr, b_rwv, b_rd, b_rok;
  llc_hdr_t a_h, a_rh, b_h, b_rh;
  logic [7:0] ab_d, ba_d, ab_rd, ba_rd;
  logic ab_v, ab_l, ab_r, ba_v, ba_l, ba_r, ab_rv, ab_rl, ba_rv, ba_rl;
  logic [15:0] a_rt, a_ss, b_rt, b_ss;
  int checks = 0, failures = 0;

  llc #(.SEG_WORDS(SEG), .TIMEOUT(TMO)) la (.clk, .rst_n,
    .s_tdata(a_sd), .s_tvalid(a_sv), .s_tlast(a_sl), .s_tready(a_sr),
    .m_tdata(), .m_tvalid(), .m_tlast(), .m_tready(1'b1),
    .hdr_valid(a_hv), .hdr(a_h), .hdr_ready(a_hr), .p_tdata(a_pd), .p_tvalid(a_pv), .p_tready(a_pr),
    .rx_word_valid(a_rwv), .rx_word(a_rw), .rx_done(a_rd), .rx_ok(a_rok), .rx_hdr(a_rh),
    .retransmits(a_rt), .segments_sent(a_ss));
  mac ma (.clk, .rst_n, .hdr_valid(a_hv), .hdr(a_h), .hdr_ready(a_hr),
    .s_tdata(a_pd), .s_tvalid(a_pv), .s_tready(a_pr),
    .m_tdata(ab_d), .m_tvalid(ab_v), .m_tlast(ab_l), .m_tready(ab_r),
    .r_tdata(ba_rd), .r_tvalid(ba_rv), .r_tlast(ba_rl),
    .rx_word_valid(a_rwv), .rx_word(a_rw), .rx_done(a_rd), .rx_ok(a_rok), .rx_hdr(a_rh));
  llc #(.SEG_WORDS(SEG), .TIMEOUT(TMO)) lb (.clk, .rst_n,
    .s_tdata(16'h0), .s_tvalid(1'b0), .s_tlast(1'b0), .s_tready(),
    .m_tdata(b_md), .m_tvalid(b_mv), .m_tlast(b_ml), .m_tready(b_mr),
    .hdr_valid(b_hv), .hdr(b_h), .hdr_ready(b_hr), .p_tdata(b_pd), .p_tvalid(b_pv), .p_tready(b_pr),
    .rx_word_valid(b_rwv), .rx_word(b_rw), .rx_done(b_rd), .rx_ok(b_rok), .rx_hdr(b_rh),
    .retransmits(b_rt), .segments_sent(b_ss));
  mac mb (.clk, .rst_n, .hdr_valid(b_hv), .hdr(b_h), .hdr_ready(b_hr),
    .s_tdata(b_pd), .s_tvalid(b_pv), .s_tready(b_pr),
    .m_tdata(ba_d), .m_tvalid(ba_v), .m_tlast(ba_l), .m_tready(ba_r),
    .r_tdata(ab_rd), .r_tvalid(ab_rv), .r_tlast(ab_rl),
    .rx_word_valid(b_rwv), .rx_word(b_rw), .rx_done(b_rd), .rx_ok(b_rok), .rx_hdr(b_rh));

  // lossy channels: a frame is dropped with probability 1/6, decided at its first byte
  bit drop_ab = 0, drop_ba = 0, first_ab = 1, first_ba = 1;
  int dropped_ab = 0, dropped_ba = 0;
  always @(negedge clk) begin ab_r <= ($urandom_range(0, 1) != 0); ba_r <= ($urandom_range(0, 1) != 0); end
  always @(negedge clk) b_mr <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    ab_rv <= 0; ba_rv <= 0; ab_rl <= 0; ba_rl <= 0;
    if (ab_v && ab_r) begin
      if (first_ab) begin drop_ab = ($urandom_range(0, 5) == 0); if (drop_ab) dropped_ab++; end
      first_ab = ab_l;
      if (!drop_ab) begin ab_rv <= 1; ab_rd <= ab_d; ab_rl <= ab_l; end
    end
    if (ba_v && ba_r) begin
      if (first_ba) begin drop_ba = ($urandom_range(0, 5) == 0); if (drop_ba) dropped_ba++; end
      first_ba = ba_l;
      if (!drop_ba) begin ba_rv <= 1; ba_rd <= ba_d; ba_rl <= ba_l; end
    end
  end

  logic [16:0] exp_q [$];
  int pkts = 0;
  always @(posedge clk) if (rst_n && b_mv && b_mr) begin
    checks++;
    if (exp_q.size() == 0 || {b_ml, b_md} !== exp_q[0]) begin failures++; $display("FAIL got %b %h", b_ml, b_md); end
    if (exp_q.size()) void'(exp_q.pop_front());
    if (b_ml) pkts++;
  end
  bit acc;
  always @(posedge clk) if (rst_n && a_sv && a_sr) begin exp_q.push_back({a_sl, a_sd}); acc <= 1; end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_sv = 0; a_sd = 0; a_sl = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      automatic int n = $urandom_range(1, 50);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        a_sv = 1; a_sd = 16'($urandom); a_sl = (i == n - 1); acc = 0;
        while (!acc) @(negedge clk);
      end
      @(negedge clk); a_sv = 0;
    end
    while (pkts < 60) @(negedge clk);
    repeat (2 * TMO) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words left", exp_q.size()); end
    checks++; if (a_rt == 0 || dropped_ab == 0 || dropped_ba == 0) begin failures++; $display("FAIL no loss seen"); end
    $display("segments=%0d retransmits=%0d lost data frames=%0d lost ACKs=%0d", a_ss, a_rt, dropped_ab, dropped_ba);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
