// tb_syn: two SYN layers joined GMII to GMII.
//
// SYN A sends random MAC frames and, at random times, commands; the byte
// slot strobe comes every third cycle. SYN B must deliver the frames byte-
// exact with tlast on the last byte, and the commands in order. On A's GMII
// output the checks are: at least IFG idle slots between frames, and a
// waiting command starts within one frame time (it overtakes waiting data).
module tb_syn;
  import daq_pkg::*;
  localparam int IFG = 6, MAXF = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ce;
  logic [7:0] txd, s_tdata, cmd, m_tdata, sync_cmd;
  logic tx_en, s_tvalid, s_tlast, s_tready, cmd_valid, cmd_ready, m_tvalid, m_tlast, sync_valid;
  int checks = 0, failures = 0;

  syn #(.IFG(IFG)) a (.clk, .rst_n, .gmii_ce(ce), .gmii_rx_ce(ce), .gmii_txd(txd), .gmii_tx_en(tx_en),
    .gmii_rxd(8'h0), .gmii_rx_dv(1'b0), .s_tdata, .s_tvalid, .s_tlast, .s_tready,
    .cmd_valid, .cmd, .cmd_ready, .m_tdata(), .m_tvalid(), .m_tlast(), .sync_valid(), .sync_cmd());
  syn #(.IFG(IFG)) b (.clk, .rst_n, .gmii_ce(ce), .gmii_rx_ce(ce), .gmii_txd(), .gmii_tx_en(),
    .gmii_rxd(txd), .gmii_rx_dv(tx_en), .s_tdata(8'h0), .s_tvalid(1'b0), .s_tlast(1'b0), .s_tready(),
    .cmd_valid(1'b0), .cmd(8'h0), .cmd_ready(), .m_tdata, .m_tvalid, .m_tlast, .sync_valid, .sync_cmd);

  int cyc = 0;
  always @(posedge clk) begin cyc++; ce <= (cyc % 3 == 0); end

  logic [8:0] exp_q [$];
  logic [7:0] cmd_q [$];
  // handshakes are recorded where they happen, at the clock edge
  bit acc;
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && s_tready) begin exp_q.push_back({s_tlast, s_tdata}); acc <= 1; end
    if (cmd_valid && cmd_ready) cmd_q.push_back(cmd);
  end
  int idle = 100, nframes = 0, ncmds = 0, wait_slots = 0;
  always @(posedge clk) if (ce && rst_n) begin
    if (tx_en) begin
      if (idle > 0) begin
        checks++;
        if (idle < IFG) begin failures++; $display("FAIL gap of %0d slots", idle); end
      end
      idle = 0;
    end else idle++;
    if (cmd_valid && !cmd_ready) begin
      wait_slots++;
      checks++;
      if (wait_slots > MAXF + IFG + 3) begin failures++; $display("FAIL command waits %0d slots", wait_slots); end
    end else wait_slots = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (m_tvalid) begin
      checks++;
      if (exp_q.size() == 0 || {m_tlast, m_tdata} !== exp_q[0]) begin failures++; $display("FAIL byte %b %h exp %h at %0d", m_tlast, m_tdata, exp_q.size() ? exp_q[0] : 0, cyc); end
      if (exp_q.size()) void'(exp_q.pop_front());
      if (m_tlast) nframes++;
    end
    if (sync_valid) begin
      checks++;
      if (cmd_q.size() == 0 || sync_cmd !== cmd_q[0]) begin failures++; $display("FAIL cmd %h", sync_cmd); end
      if (cmd_q.size()) void'(cmd_q.pop_front());
      ncmds++;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // commands
  initial begin
    cmd_valid = 0; cmd = 0;
    wait (rst_n);
    repeat (15) begin
      repeat ($urandom_range(100, 600)) @(negedge clk);
      cmd_valid = 1; cmd = 8'($urandom);
      while (!cmd_ready) @(negedge clk);
      @(negedge clk); cmd_valid = 0;
    end
  end

  initial begin
    s_tvalid = 0; s_tdata = 0; s_tlast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      automatic int n = $urandom_range(1, MAXF);
      automatic logic [7:0] first = 8'($urandom_range(0, 8'hBF));   // not the command marker
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        s_tvalid = 1; s_tdata = (i == 0) ? first : 8'($urandom); s_tlast = (i == n - 1);
        acc = 0;
        while (!acc) @(negedge clk);
      end
      @(negedge clk); s_tvalid = 0;
      repeat ($urandom_range(0, 40)) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    while (ncmds < 15 && cyc < 150000) @(negedge clk);
    checks++;
    if (nframes != 40 || ncmds != 15) begin failures++; $display("FAIL %0d frames %0d commands", nframes, ncmds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
