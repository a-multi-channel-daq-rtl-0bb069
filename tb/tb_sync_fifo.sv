// tb_sync_fifo: random pushes and pops against a queue model.
//
// Writes and reads are issued at random with probabilities that change in
// phases (mostly writing, mostly reading, balanced) so that full and empty
// are both reached. Every read word, the count, full and empty are compared
// with a SystemVerilog queue.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] count;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      automatic int pw = (cyc / 300) % 3 == 0 ? 80 : (cyc / 300) % 3 == 1 ? 20 : 50;
      @(negedge clk);
      checks++;
      if (count != model.size() || full != (model.size() == D) || empty != (model.size() == 0)) begin
        failures++; $display("FAIL flags count=%0d model=%0d", count, model.size());
      end
      if (!empty) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, model[0]); end
      end
      if (full) fulls++;
      if (empty) empties++;
      rd_en   = !empty && ($urandom_range(0, 99) >= pw);
      wr_en   = (!full || rd_en) && ($urandom_range(0, 99) < pw);
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("FAIL full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
