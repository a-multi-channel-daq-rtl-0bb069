// tb_mac: MAC encapsulation looped back into its own decapsulation.
//
// Random segment headers (DATA with 1..40 words, or ACK with none) and
// payloads are offered; the transmitted bytes, taken with a randomly
// stalling ready, are checked against the frame layout worked out here
// ({type,last,00000}, seq, len, words high byte first, tlast on the last
// byte) and fed back to the receive side, which must report the same header
// and words with rx_ok. Truncated frames must give rx_ok low.
module tb_mac;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hdr_valid, hdr_ready, s_tvalid, s_tready, m_tvalid, m_tlast, m_tready;
  llc_hdr_t hdr, rx_hdr;
  logic [15:0] s_tdata, rx_word;
  logic [7:0] m_tdata, r_tdata;
  logic r_tvalid, r_tlast, rx_word_valid, rx_done, rx_ok;
  int checks = 0, failures = 0;

  mac dut (.*);

  logic [8:0]  exp_bytes [$];
  logic [15:0] exp_words [$];
  llc_hdr_t    exp_hdr [$];
  logic        exp_ok [$];
  bit          truncate = 0, accepted = 0, cut = 0;
  always @(posedge clk) if (rst_n && s_tvalid && s_tready) accepted <= 1;

  always @(negedge clk) m_tready <= ($urandom_range(0, 2) != 0);

  // check and loop back transmitted bytes
  always @(posedge clk) if (rst_n) begin
    r_tvalid <= 0; r_tlast <= 0;
    if (rst_n && m_tvalid && m_tready) begin
      checks++;
      if (exp_bytes.size() == 0 || {m_tlast, m_tdata} !== exp_bytes[0]) begin
        failures++; $display("FAIL byte %b %h exp %h", m_tlast, m_tdata, exp_bytes.size() ? exp_bytes[0] : 9'h0);
      end
      if (exp_bytes.size()) void'(exp_bytes.pop_front());
      // a truncated frame ends two bytes early; the bytes after the cut are not fed back
      if (!cut) begin
        r_tvalid <= 1; r_tdata <= m_tdata;
        r_tlast  <= m_tlast || (truncate && exp_bytes.size() == 2);
      end
      if (truncate && exp_bytes.size() == 2) cut = 1;
      if (m_tlast) cut = 0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (rx_word_valid) begin
      checks++;
      if (exp_words.size() == 0 || rx_word !== exp_words[0]) begin failures++; $display("FAIL word %h", rx_word); end
      if (exp_words.size()) void'(exp_words.pop_front());
    end
    if (rx_done) begin
      checks++;
      if (exp_hdr.size() == 0 || rx_ok !== exp_ok[0] || (rx_ok && rx_hdr !== exp_hdr[0])) begin
        failures++; $display("FAIL done ok=%b hdr=%h", rx_ok, rx_hdr);
      end
      if (exp_hdr.size()) begin void'(exp_hdr.pop_front()); void'(exp_ok.pop_front()); end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_valid = 0; s_tvalid = 0; s_tdata = 0; hdr = '0; r_tvalid = 0; r_tlast = 0; r_tdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      llc_hdr_t h;
      logic [15:0] w [$];
      int n;
      automatic bit ack = ($urandom_range(0, 3) == 0);
      truncate = (f % 10 == 9) && !ack;
      n = ack ? 0 : $urandom_range(1, 40);
      h.ftype = ack ? FT_ACK : FT_DATA; h.last = 1'($urandom); h.seq = 8'($urandom); h.len = 8'(n);
      exp_bytes.push_back({1'b0, h.ftype, h.last, 5'b0});
      exp_bytes.push_back({1'b0, h.seq});
      exp_bytes.push_back({n == 0, h.len});
      for (int i = 0; i < n; i++) begin
        w.push_back(16'($urandom));
        exp_bytes.push_back({1'b0, w[i][15:8]});
        exp_bytes.push_back({i == n - 1, w[i][7:0]});
        if (!(truncate && i == n - 1)) exp_words.push_back(w[i]);
      end
      exp_hdr.push_back(h); exp_ok.push_back(!truncate);
      @(negedge clk); hdr_valid = 1; hdr = h;
      while (!hdr_ready) @(negedge clk);
      @(negedge clk); hdr_valid = 0;
      for (int i = 0; i < n; i++) begin
        s_tvalid = 1; s_tdata = w[i]; accepted = 0;
        @(negedge clk);
        while (!accepted) @(negedge clk);
        s_tvalid = 0;
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      while (exp_bytes.size() != 0) @(negedge clk);
      repeat (3) @(negedge clk);
      truncate = 0;
    end
    checks++;
    if (exp_hdr.size() != 0 || exp_words.size() != 0) begin failures++; $display("FAIL leftovers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
