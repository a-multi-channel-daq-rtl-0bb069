// tb_crc16: checks the CRC-16/CCITT byte step.
//
// The published check value of CRC-16/CCITT-FALSE for the ASCII string
// "123456789" is 16'h29B1. For random messages, running the step over the
// message followed by its CRC (high byte first) must leave zero, and any
// single flipped bit must leave a non-zero residue.
module tb_crc16;
  logic [15:0] cin, cout;
  logic [7:0]  d;
  int checks = 0, failures = 0;

  crc16 dut (.crc_in(cin), .data(d), .crc_out(cout));

  task automatic run(input logic [7:0] msg [$], output logic [15:0] c);
    c = 16'hFFFF;
    foreach (msg[i]) begin cin = c; d = msg[i]; #1; c = cout; end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]  msg [$];
    logic [15:0] c;
    msg = '{"1", "2", "3", "4", "5", "6", "7", "8", "9"};
    run(msg, c);
    checks++; if (c !== 16'h29B1) begin failures++; $display("FAIL check value %h", c); end
    for (int t = 0; t < 50; t++) begin
      automatic int n = $urandom_range(1, 40);
      int bitpos;
      msg = {};
      repeat (n) msg.push_back(8'($urandom));
      run(msg, c);
      msg.push_back(c[15:8]); msg.push_back(c[7:0]);
      checks++; run(msg, c); if (c !== 16'h0) begin failures++; $display("FAIL residue"); end
      bitpos = $urandom_range(0, 8 * (n + 2) - 1);
      msg[bitpos / 8][bitpos % 8] = ~msg[bitpos / 8][bitpos % 8];
      checks++; run(msg, c); if (c === 16'h0) begin failures++; $display("FAIL flipped bit undetected"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
