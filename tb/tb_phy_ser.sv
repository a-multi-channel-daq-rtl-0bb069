// tb_phy_ser: checks the serializer's bit order, bit time and symbol slots.
//
// A new random symbol is offered at every load. The serial output is sampled
// in the middle of each bit (OVS/2 cycles after the bit starts) and the
// rebuilt symbols must equal the offered ones, most significant bit first.
// load must repeat every 10*OVS cycles.
module tb_phy_ser;
  localparam int OVS = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [9:0] sym;
  logic load, ser_out;
  logic [9:0] sent [$];
  int checks = 0, failures = 0;

  phy_ser #(.OVS(OVS)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_load = -1;
    sym = 10'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 40 * 10 * OVS; cyc++) begin
      @(posedge clk);
      if (load) begin
        if (last_load >= 0) begin
          checks++;
          if (cyc - last_load != 10 * OVS) begin failures++; $display("FAIL slot %0d", cyc - last_load); end
        end
        last_load = cyc;
        sent.push_back(sym);
        // next bits start after this edge; sample them in the middle
        fork
          automatic logic [9:0] exp = sym;
        begin
          logic [9:0] got;
          repeat (OVS / 2 + 1) @(posedge clk);
          for (int b = 9; b >= 0; b--) begin
            got[b] = ser_out;
            repeat (OVS) @(posedge clk);
          end
          checks++;
          if (got !== exp) begin failures++; $display("FAIL symbol %b exp %b", got, exp); end
        end join_none
        #1 sym = 10'($urandom);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
