// adc_collect: collect interface to the 8-channel, 24-bit sigma-delta ADC.
//
// The ADC is the data-interface master: it drives a data clock (adc_dclk), a
// frame marker (adc_drdy) and NLINES serial data lines. Each line carries
// CH_PER_LINE channels of 32 bits (an 8-bit status header and a 24-bit
// conversion result), most significant bit first; line l carries channels
// l*CH_PER_LINE onwards. The inputs are synchronised to clk with two
// flip-flops; bits are taken at each falling edge of the synchronised data
// clock (the ADC changes them on the rising edge), and adc_drdy high at such
// an edge marks the first bit of a frame. When all bits of a frame have
// arrived, sample_valid pulses for one cycle with the results in sample_data
// and the headers in sample_hdr, channel 0 first.
//
// Command side: sync_req (one cycle) produces a low pulse of SYNC_CYCLES on
// adc_sync_n, which restarts the ADC's conversions on all channels together.
//
// The paper gives the ADC (8 channels, 24 bits, up to 16 kSPS) and says the
// FPGA receives its data and sends it commands. The serial frame format
// follows the converter's four-line output mode as this design assumes it;
// the data clock must be slower than clk/4.
module adc_collect #(
  parameter int unsigned N_CH        = 8,
  parameter int unsigned SAMPLE_W    = 24,
  parameter int unsigned HDR_W       = 8,
  parameter int unsigned NLINES      = 4,
  parameter int unsigned SYNC_CYCLES = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          adc_dclk,
  input  logic                          adc_drdy,
  input  logic [NLINES-1:0]             adc_dout,
  output logic                          adc_sync_n,
  input  logic                          sync_req,
  output logic                          sample_valid,
  output logic [N_CH-1:0][SAMPLE_W-1:0] sample_data,
  output logic [N_CH-1:0][HDR_W-1:0]    sample_hdr
);
  localparam int unsigned CH_PER_LINE = N_CH / NLINES;
  localparam int unsigned CH_BITS     = SAMPLE_W + HDR_W;
  localparam int unsigned LINE_BITS   = CH_PER_LINE * CH_BITS;
  localparam int unsigned CW          = $clog2(LINE_BITS + 1);

  logic [1:0]              s_dclk, s_drdy;
  logic [NLINES-1:0]       s_dout [2];
  logic                    dclk_q;
  logic                    fall;
  logic [LINE_BITS-1:0]    shreg [NLINES];
  logic [CW-1:0]           bitcnt;
  logic                    active;
  logic [$clog2(SYNC_CYCLES+1)-1:0] sync_cnt;

  assign fall = dclk_q && !s_dclk[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_dclk       <= '0;
      s_drdy       <= '0;
      s_dout       <= '{default: '0};
      dclk_q       <= 1'b0;
      shreg        <= '{default: '0};
      bitcnt       <= '0;
      active       <= 1'b0;
      sample_valid <= 1'b0;
      sample_data  <= '0;
      sample_hdr   <= '0;
    end else begin
      s_dclk       <= {s_dclk[0], adc_dclk};
      s_drdy       <= {s_drdy[0], adc_drdy};
      s_dout[0]    <= adc_dout;
      s_dout[1]    <= s_dout[0];
      dclk_q       <= s_dclk[1];
      sample_valid <= 1'b0;
      if (fall && (active || s_drdy[1])) begin
        for (int l = 0; l < NLINES; l++) shreg[l] <= {shreg[l][LINE_BITS-2:0], s_dout[1][l]};
        if (s_drdy[1]) begin
          bitcnt <= CW'(1);
          active <= 1'b1;
        end else if (bitcnt == CW'(LINE_BITS - 1)) begin
          bitcnt       <= '0;
          active       <= 1'b0;
          sample_valid <= 1'b1;
          for (int l = 0; l < NLINES; l++) begin
            logic [LINE_BITS-1:0] w;
            w = {shreg[l][LINE_BITS-2:0], s_dout[1][l]};
            for (int c = 0; c < CH_PER_LINE; c++) begin
              sample_hdr [l*CH_PER_LINE + c] <= w[LINE_BITS - 1 - c*CH_BITS -: HDR_W];
              sample_data[l*CH_PER_LINE + c] <= w[LINE_BITS - 1 - c*CH_BITS - HDR_W -: SAMPLE_W];
            end
          end
        end else begin
          bitcnt <= bitcnt + 1'b1;
        end
      end
    end
  end

  // Command: synchronisation pulse to the ADC.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_cnt   <= '0;
      adc_sync_n <= 1'b1;
    end else if (sync_req) begin
      sync_cnt   <= ($bits(sync_cnt))'(SYNC_CYCLES);
      adc_sync_n <= 1'b0;
    end else if (sync_cnt > 1) begin
      sync_cnt <= sync_cnt - 1'b1;
    end else begin
      sync_cnt   <= '0;
      adc_sync_n <= 1'b1;
    end
  end

endmodule
