// tb_phy: end-to-end test of the low-speed PHY over a serial wire.
//
// PHY A sends frames of random length and content to PHY B; B's serial
// output goes back to A. Phase 1: B delivers every frame on its GMII receive
// port byte-exact (received bytes leave at one per clock); the GMII slot
// strobe repeats every 10*OVS cycles.
// Phase 2: one bit on the A-to-B wire is inverted inside a frame; B must drop
// exactly that frame (frames_bad counts it) and deliver the next one.
// Phase 3: B in loop mode sends received frames back, and A must receive them.
module tb_phy;
  localparam int OVS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       ce_a, ce_b, txen_a, dv_a, dv_b, ser_ab, ser_ba, flip, loop_b;
  logic [7:0] txd_a, rxd_a, rxd_b;
  logic [15:0] ok_a, bad_a, err_a, ok_b, bad_b, err_b;
  logic       al_a, al_b;
  int checks = 0, failures = 0;

  phy #(.OVS(OVS)) a (.clk, .rst_n, .loop_mode(1'b0), .gmii_ce(ce_a), .gmii_txd(txd_a),
    .gmii_tx_en(txen_a), .gmii_rxd(rxd_a), .gmii_rx_dv(dv_a), .ser_tx(ser_ab), .ser_rx(ser_ba),
    .rx_aligned(al_a), .frames_ok(ok_a), .frames_bad(bad_a), .sym_errs(err_a));
  phy #(.OVS(OVS)) b (.clk, .rst_n, .loop_mode(loop_b), .gmii_ce(ce_b), .gmii_txd(8'h00),
    .gmii_tx_en(1'b0), .gmii_rxd(rxd_b), .gmii_rx_dv(dv_b), .ser_tx(ser_ba), .ser_rx(ser_ab ^ flip),
    .rx_aligned(al_b), .frames_ok(ok_b), .frames_bad(bad_b), .sym_errs(err_b));

  // Expected frames, as a queue of bytes with frame boundaries.
  logic [7:0] exp_q [$];
  int         exp_len [$];
  int         got_frames = 0;

  // Receiver on B (phase 1/2) or A (phase 3).
  logic       mon_b = 1;
  int         cur = 0;
  always @(posedge clk) if (rst_n) begin
    logic dv; logic [7:0] d;
    dv = mon_b ? dv_b : dv_a;  d = mon_b ? rxd_b : rxd_a;
    begin
      if (dv) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected byte %h", d); end
        else begin
          if (d !== exp_q[0]) begin failures++; $display("FAIL byte %0d got %h exp %h", cur, d, exp_q[0]); end
          void'(exp_q.pop_front());
        end
        cur++;
      end else if (cur != 0) begin
        checks++;
        if (exp_len.size() == 0 || cur != exp_len[0]) begin failures++; $display("FAIL frame length %0d", cur); end
        if (exp_len.size() != 0) void'(exp_len.pop_front());
        got_frames++;
        cur = 0;
      end
    end
  end

  task automatic send_frame(input int n, input bit expect_it, input int flip_at);
    @(posedge clk iff ce_a);
    for (int i = 0; i < n; i++) begin
      logic [7:0] v = 8'($urandom);
      txen_a <= 1; txd_a <= v;
      if (expect_it) exp_q.push_back(v);
      if (i == flip_at) fork begin repeat (40 * OVS + 3) @(posedge clk); flip = 1; @(posedge clk); flip = 0; end join_none
      @(posedge clk iff ce_a);
    end
    txen_a <= 0;
    if (expect_it) exp_len.push_back(n);
    repeat (6) @(posedge clk iff ce_a);
  endtask

  task automatic wait_frames(input int n);
    int t = 0;
    while (got_frames < n && t < 200000) begin @(posedge clk); t++; end
    checks++;
    if (got_frames < n) begin failures++; $display("FAIL only %0d of %0d frames", got_frames, n); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    txen_a = 0; txd_a = 0; flip = 0; loop_b = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // slot period
    @(posedge clk iff ce_a); t0 = $time; @(posedge clk iff ce_a); t1 = $time;
    checks++;
    if (t1 - t0 != 10 * OVS * 10) begin failures++; $display("FAIL slot period %0d", t1 - t0); end
    repeat (30) @(posedge clk iff ce_a);   // commas for alignment
    checks++; if (!al_b || !al_a) begin failures++; $display("FAIL not aligned"); end

    // Phase 1
    for (int f = 0; f < 8; f++) send_frame(1 + $urandom_range(0, 40), 1, -1);
    wait_frames(8);
    checks++; if (ok_b != 8 || bad_b != 0) begin failures++; $display("FAIL counters ok=%0d bad=%0d", ok_b, bad_b); end

    // Phase 2: corrupted frame dropped, next one delivered
    send_frame(20, 0, 5);
    send_frame(12, 1, -1);
    wait_frames(9);
    checks++; if (bad_b < 1 || ok_b != 9) begin failures++; $display("FAIL after error ok=%0d bad=%0d", ok_b, bad_b); end

    // Phase 3: loop mode on B
    loop_b = 1; mon_b = 0; got_frames = 0;
    for (int f = 0; f < 4; f++) send_frame(3 + $urandom_range(0, 30), 1, -1);
    wait_frames(4);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes missing", exp_q.size()); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
