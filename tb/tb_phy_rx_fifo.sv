// tb_phy_rx_fifo: checks commit and roll-back of the receive frame FIFO.
//
// Random frames are written, each ended with a good or a bad CRC, some with a
// symbol error, some cut short by a new start of frame; a few are long enough
// to overflow the FIFO while the reader stalls. The reader must see exactly
// the good frames, byte-exact, with the last flag on their last byte, and
// the good/bad counters must match.
module tb_phy_rx_fifo;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sof, wr_en, sym_err, eof, crc_ok, rd_valid, rd_last, rd_en;
  logic [7:0] wr_data, rd_data;
  logic [15:0] frames_ok, frames_bad;
  logic [8:0] exp_q [$];
  int n_ok = 0, n_bad = 0, checks = 0, failures = 0;
  bit reader_on = 1;

  phy_rx_fifo #(.DEPTH(D)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rd_en <= reader_on && rd_valid && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && rd_en && rd_valid) begin
    checks++;
    if (exp_q.size() == 0 || {rd_last, rd_data} !== exp_q[0]) begin
      failures++; $display("FAIL read %b %h", rd_last, rd_data);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end

  task automatic frame(input int n, input int kind); // 0 good, 1 crc, 2 sym err, 3 cut, 4 overflow
    logic [8:0] tmp [$];
    @(negedge clk); sof = 1; @(negedge clk); sof = 0;
    for (int i = 0; i < n; i++) begin
      wr_en = 1; wr_data = 8'($urandom);
      tmp.push_back({i == n - 1, wr_data});
      sym_err = (kind == 2 && i == n / 2);
      @(negedge clk); wr_en = 0; sym_err = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    if (kind == 3) return;                // next frame's sof cuts it
    eof = 1; crc_ok = (kind != 1);
    @(negedge clk); eof = 0; crc_ok = 0;
    if (kind == 0) begin foreach (tmp[i]) exp_q.push_back(tmp[i]); n_ok++; end
    else n_bad++;
  endtask

  initial begin
    sof = 0; wr_en = 0; sym_err = 0; eof = 0; crc_ok = 0; wr_data = 0; rd_en = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 80; f++) begin
      automatic int kind = $urandom_range(0, 4);
      if (kind == 4) begin
        while (rd_valid) @(negedge clk);
        reader_on = 0;
        frame(D + 3, 4);
        reader_on = 1;
      end else if (kind == 3) begin
        frame($urandom_range(1, 20), 3); n_bad++;
      end else begin
        frame($urandom_range(1, 20), kind);
      end
    end
    frame(5, 0);
    repeat (300) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes not read", exp_q.size()); end
    checks++;
    if (frames_ok != n_ok || frames_bad != n_bad) begin
      failures++; $display("FAIL counters %0d/%0d exp %0d/%0d", frames_ok, frames_bad, n_ok, n_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
