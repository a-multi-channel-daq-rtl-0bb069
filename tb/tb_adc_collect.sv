// tb_adc_collect: collect interface against the ADC behavioural model.
//
// The model converts new random values every ODR_CYCLES cycles (2500 cycles
// of the 40 MHz clock: 16 kSPS). Each sample set must come out of the collect
// interface with all channels' results and headers equal to what the model
// sent, one set per conversion period. A sync request must give one low pulse
// of SYNC_CYCLES on adc_sync_n.
module tb_adc_collect;
  localparam int ODR = 2500;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;        // 40 MHz
  logic adc_dclk, adc_drdy, adc_sync_n, sync_req, sample_valid;
  logic [3:0] adc_dout;
  logic [7:0][23:0] sample_data, conv_data, sent_d;
  logic [7:0][7:0]  sample_hdr, conv_hdr, sent_h;
  int frames, syncs, checks = 0, failures = 0, nsets = 0, last_t = -1;

  adc_collect dut (.*);
  ad7779_model #(.ODR_CYCLES(ODR)) adc (.clk, .adc_sync_n, .conv_data, .conv_hdr,
    .adc_dclk, .adc_drdy, .adc_dout, .frames, .syncs);

  // new conversion values right after each frame starts
  always @(posedge adc_drdy) begin
    sent_d = conv_data; sent_h = conv_hdr;
    for (int c = 0; c < 8; c++) begin conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom); end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && sample_valid) begin
    checks++;
    if (sample_data !== sent_d || sample_hdr !== sent_h) begin
      failures++; $display("FAIL set %0d: %h / %h", nsets, sample_data, sent_d);
    end
    if (last_t >= 0) begin
      checks++;
      if (cyc - last_t != ODR) begin failures++; $display("FAIL period %0d", cyc - last_t); end
    end
    last_t = cyc;
    nsets++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int low;
    for (int c = 0; c < 8; c++) begin conv_data[c] = 24'($urandom); conv_hdr[c] = 8'($urandom); end
    sync_req = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (nsets == 10);
    @(negedge clk) sync_req = 1; @(negedge clk) sync_req = 0;
    low = 0;
    repeat (20) begin @(posedge clk); if (!adc_sync_n) low++; end
    checks++;
    if (low != 8 || syncs != 1) begin failures++; $display("FAIL sync pulse %0d cycles, %0d pulses", low, syncs); end
    last_t = -1;
    wait (nsets == 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
