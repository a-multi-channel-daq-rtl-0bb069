// ad7779_model: behavioural model of the data output port of an 8-channel,
// 24-bit simultaneous-sampling ADC (not synthesizable).
//
// Every ODR_CYCLES clock cycles it makes one conversion of all channels,
// taking the values from conv_data/conv_hdr, and shifts them out: adc_drdy
// high during the first bit, NLINES data lines with CH_PER_LINE channels of
// {header, result} each, most significant bit first, bits changing on the
// rising edge of adc_dclk (period DCLK_DIV clock cycles). A low pulse on
// adc_sync_n restarts the output-data-rate counter. frames counts the
// conversions sent.
module ad7779_model #(
  parameter int N_CH = 8, SAMPLE_W = 24, HDR_W = 8, NLINES = 4,
  parameter int ODR_CYCLES = 2500, DCLK_DIV = 4
) (
  input  logic                          clk,
  input  logic                          adc_sync_n,
  input  logic [N_CH-1:0][SAMPLE_W-1:0] conv_data,
  input  logic [N_CH-1:0][HDR_W-1:0]    conv_hdr,
  output logic                          adc_dclk,
  output logic                          adc_drdy,
  output logic [NLINES-1:0]             adc_dout,
  output int                            frames,
  output int                            syncs
);
  localparam int CPL = N_CH / NLINES, CB = SAMPLE_W + HDR_W;
  int odr = 0, bitn = -1, ph = 0;
  logic [N_CH-1:0][SAMPLE_W-1:0] d;
  logic [N_CH-1:0][HDR_W-1:0]    h;
  initial begin adc_dclk = 0; adc_drdy = 0; adc_dout = 0; frames = 0; syncs = 0; end

  always @(negedge adc_sync_n) syncs++;

  // output data rate
  always @(posedge clk) begin
    if (!adc_sync_n) odr <= 0;
    else if (odr == ODR_CYCLES - 1) begin
      odr <= 0;
      d <= conv_data; h <= conv_hdr;
      bitn <= 0; ph <= 0;
    end else odr <= odr + 1;
    // shifting of the frame started above
    if (bitn >= 0 && !(odr == ODR_CYCLES - 1)) begin
      if (ph == 0) begin
        adc_dclk <= 1;
        adc_drdy <= (bitn == 0);
        for (int l = 0; l < NLINES; l++)
          adc_dout[l] <= bit_of(l * CPL + bitn / CB, bitn % CB);
      end
      if (ph == DCLK_DIV / 2) adc_dclk <= 0;
      if (ph == DCLK_DIV - 1) begin
        ph <= 0;
        if (bitn == CPL * CB - 1) begin bitn <= -1; adc_drdy <= 0; frames <= frames + 1; end
        else bitn <= bitn + 1;
      end else ph <= ph + 1;
    end
  end

  function automatic logic bit_of(input int c, input int k);
    return (k < HDR_W) ? h[c][HDR_W - 1 - k] : d[c][SAMPLE_W - 1 - (k - HDR_W)];
  endfunction
endmodule
