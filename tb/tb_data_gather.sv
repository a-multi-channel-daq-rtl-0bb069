// tb_data_gather: merging of local sample sets and external packets.
//
// Sample sets arrive every 150 cycles, external packets of random length are
// offered whenever the previous one is done, and the output is stalled at
// random. The output is split into packets at tlast; a packet whose first
// word starts with 4'hA and carries BOARD_ID is compared with the next sample
// set formatted here, any other with the next external packet (external
// packets in this test never start with 4'hA). Packets must not interleave.
// At the end the output is blocked and sample sets come faster than they can
// be stored, and lost_sets must count the lost ones.
module tb_data_gather;
  localparam logic [3:0] ID = 4'd5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sample_valid, x_pkt_ready, x_tvalid, x_tlast, x_tready, m_tvalid, m_tlast, m_tready;
  logic [7:0][23:0] sample_data;
  logic [7:0][7:0]  sample_hdr;
  logic [15:0] x_tdata, m_tdata, lost_sets, local_pkts, ext_pkts;
  int checks = 0, failures = 0;
  bit block = 0;

  data_gather #(.BOARD_ID(ID), .MERGE_DEPTH(64)) dut (.*);

  logic [15:0] loc_q [$][$];
  logic [15:0] ext_q [$][$];
  logic [15:0] cur [$];
  int n_loc = 0, n_ext = 0;
  logic [7:0] setno = 0;

  always @(negedge clk) m_tready <= !block && ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    cur.push_back(m_tdata);
    if (m_tlast) begin
      logic [15:0] e [$];
      checks++;
      if (cur[0][15:12] == 4'hA) begin
        if (loc_q.size() == 0) begin failures++; $display("FAIL unexpected local packet"); end
        else begin e = loc_q.pop_front(); n_loc++; end
      end else begin
        if (ext_q.size() == 0) begin failures++; $display("FAIL unexpected external packet"); end
        else begin e = ext_q.pop_front(); n_ext++; end
      end
      if (e != cur) begin failures++; $display("FAIL packet of %0d words differs", cur.size()); end
      cur = {};
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_set();
    logic [15:0] p [$];
    @(negedge clk);
    for (int c = 0; c < 8; c++) begin sample_data[c] = 24'($urandom); sample_hdr[c] = 8'($urandom); end
    p.push_back({4'hA, ID, setno});
    for (int c = 0; c < 8; c++) begin
      p.push_back({sample_hdr[c], sample_data[c][23:16]});
      p.push_back(sample_data[c][15:0]);
    end
    loc_q.push_back(p);
    setno++;
    sample_valid = 1; @(negedge clk); sample_valid = 0;
  endtask

  // external packets
  bit ext_on = 1;
  bit acc;
  always @(posedge clk) if (rst_n && x_tvalid && x_tready) acc <= 1;
  initial begin
    x_tvalid = 0; x_tdata = 0; x_tlast = 0; x_pkt_ready = 0;
    wait (rst_n);
    while (ext_on) begin
      automatic int n = $urandom_range(1, 40);
      automatic logic [15:0] p [$];
      for (int i = 0; i < n; i++) p.push_back(16'($urandom_range(0, 16'h9FFF)));
      ext_q.push_back(p);
      @(negedge clk);
      x_pkt_ready = 1;        // this source offers whole packets only
      for (int i = 0; i < n; i++) begin
        x_tvalid = 1; x_tdata = p[i]; x_tlast = (i == n - 1); acc = 0;
        do @(negedge clk); while (!acc);
      end
      x_tvalid = 0; x_pkt_ready = 0;
      repeat ($urandom_range(0, 50)) @(negedge clk);
    end
  end

  initial begin
    sample_valid = 0; sample_data = '0; sample_hdr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40) begin send_set(); repeat (150) @(negedge clk); end
    ext_on = 0;
    repeat (2000) @(negedge clk);
    checks++;
    if (lost_sets != 0 || n_loc != 40 || n_ext != ext_q.size() + n_ext || local_pkts != 40 || ext_pkts != n_ext) begin
      failures++; $display("FAIL lost=%0d local=%0d ext=%0d", lost_sets, n_loc, n_ext);
    end
    // overflow: output blocked, sets keep coming
    block = 1;
    repeat (10) begin send_set(); repeat (5) @(negedge clk); end
    checks++;
    if (lost_sets == 0) begin failures++; $display("FAIL no lost set counted"); end
    $display("local=%0d external=%0d lost=%0d", n_loc, n_ext, lost_sets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
