// tb_loop_test: checks the loopback counter generator and checker.
//
// The generator's output is fed back through a delay line of LOOP cycles in
// which the testbench can corrupt, drop or repeat words. Checks: the words
// sent count up by one per clock while enabled and stop when disabled; with a
// clean loop every word after the first is counted good and none bad; one
// corrupted word counts exactly one error; one dropped word counts two errors
// and the checker then counts good words again; after disable and re-enable
// the checker locks again to the new stream.
module tb_loop_test;
  localparam int W = 16, LOOP = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable;
  logic [W-1:0] tx_data, rx_data;
  logic tx_valid, rx_valid, locked;
  logic [31:0] words_ok;
  logic [15:0] word_errs;
  int checks = 0, failures = 0;

  loop_test #(.W(W)) dut (.clk, .rst_n, .enable, .tx_data, .tx_valid,
    .rx_data, .rx_valid, .locked, .words_ok, .word_errs);

  // loop: delay line with fault injection
  logic [W:0] line [LOOP];
  bit corrupt, drop;
  always @(posedge clk) begin
    line[0] <= {tx_valid, tx_data ^ (corrupt ? W'(16'h0100) : W'(0))};
    for (int i = 1; i < LOOP; i++) line[i] <= line[i-1];
  end
  assign rx_valid = line[LOOP-1][W] && !drop;
  assign rx_data  = line[LOOP-1][W-1:0];

  // the sent counter must increase by one per clock
  logic [W-1:0] last_tx;
  bit have_tx;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid) begin
      if (have_tx) begin checks++; if (tx_data !== last_tx + 1'b1) begin failures++; $display("FAIL tx %h after %h", tx_data, last_tx); end end
      last_tx <= tx_data; have_tx <= 1;
    end else have_tx <= 0;
  end

  task automatic expect_counts(input int ok_min, input int ok_max, input int errs, input string what);
    checks++;
    if (words_ok < ok_min || words_ok > ok_max || word_errs != errs || !locked) begin
      failures++;
      $display("FAIL %s: ok=%0d (%0d..%0d) errs=%0d (%0d) locked=%b", what, words_ok, ok_min, ok_max, word_errs, errs, locked);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ok0;
    enable = 0; corrupt = 0; drop = 0;
    for (int i = 0; i < LOOP; i++) line[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (tx_valid || locked || words_ok != 0) begin failures++; $display("FAIL active while disabled"); end
    enable = 1;
    repeat (1000) @(negedge clk);
    // 1000 cycles: LOOP+1 cycles to first word, first word only locks
    expect_counts(1000 - LOOP - 4, 1000 - LOOP, 0, "clean loop");
    // one corrupted word
    corrupt = 1; @(negedge clk); corrupt = 0;
    repeat (200) @(negedge clk);
    expect_counts(1190 - LOOP - 4, 1200 - LOOP, 1, "one corrupted word");
    // one dropped word
    ok0 = words_ok;
    @(negedge clk); drop = 1; @(negedge clk); drop = 0;
    repeat (200) @(negedge clk);
    expect_counts(ok0 + 190, ok0 + 201, 3, "one dropped word");
    // stop: nothing sent, checker unlocks
    enable = 0;
    repeat (LOOP + 3) @(negedge clk);
    checks++; if (tx_valid || locked) begin failures++; $display("FAIL still active after disable"); end
    ok0 = words_ok;
    enable = 1;
    repeat (300) @(negedge clk);
    expect_counts(ok0 + 300 - LOOP - 4, ok0 + 300 - LOOP, 3, "relock");
    $display("words_ok=%0d word_errs=%0d", words_ok, word_errs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
