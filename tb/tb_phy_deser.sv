// tb_phy_deser: checks clock recovery, comma alignment and symbol output.
//
// The testbench drives the serial input itself, one bit per OVS cycles,
// starting at a random phase and after a random number of junk bits, with
// the serial edges placed a fraction of a clock period away from the clock
// edge. It sends three K28.5 commas followed by code words of the standard
// 8B/10B tables. After the first comma the deserializer must output exactly
// the sent symbols in order, one every 10*OVS cycles.
module tb_phy_deser;
  localparam int OVS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ser_in = 0;
  logic [9:0] sym;
  logic sym_valid, aligned;
  logic [9:0] exp_q [$];
  int checks = 0, failures = 0, got = 0;

  phy_deser #(.OVS(OVS)) dut (.*);

  localparam logic [9:0] WORDS [8] = '{10'b1010101010, 10'b0101010101, 10'b1001110100,
                                       10'b0110001011, 10'b1100011110, 10'b0101011100,
                                       10'b1000110111, 10'b0011111010};

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_t = -1;
  always @(posedge clk) if (rst_n && sym_valid) begin
    checks++;
    if (exp_q.size() == 0 || sym !== exp_q[0]) begin
      failures++; $display("FAIL got %b exp %b", sym, exp_q.size() ? exp_q[0] : 10'h0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
    if (last_t >= 0) begin
      checks++;
      if ($time - last_t != 10 * OVS * 10) begin failures++; $display("FAIL spacing"); end
    end
    last_t = $time;
    got++;
  end

  task automatic send_bit(input logic b);
    ser_in = b;
    #(OVS * 10);
  endtask

  initial begin
    logic [9:0] s;
    int n;
    repeat (3) @(posedge clk); rst_n = 1;
    #($urandom_range(1, 39) + 3);
    repeat ($urandom_range(0, 9)) send_bit(1'($urandom));
    for (int i = 0; i < 3; i++) begin
      s = 10'b0011111010;
      exp_q.push_back(s);
      for (int b = 9; b >= 0; b--) send_bit(s[b]);
    end
    n = 60;
    for (int i = 0; i < n; i++) begin
      s = WORDS[$urandom_range(0, 7)];
      exp_q.push_back(s);
      for (int b = 9; b >= 0; b--) send_bit(s[b]);
    end
    repeat (5) send_bit(0);
    checks++;
    if (got != n + 3 || !aligned) begin failures++; $display("FAIL received %0d of %0d", got, n + 3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
