// data_gather: merges local ADC data and data from other boards into one FIFO.
//
// Local data: each ADC sample set (sample_valid) is latched and written into
// the merge FIFO as one packet of 1 + 2*N_CH words:
//   word 0          {4'hA, BOARD_ID[3:0], set counter[7:0]}
//   word 1+2c       {header[7:0] of channel c, result[23:16]}
//   word 2+2c       result[15:0]           (last word of the packet flagged)
// External data: packets (16-bit words with tlast) from the Data Buffer of
// the electrical interface are copied into the same FIFO unchanged.
// Packets are never interleaved: between packets the arbiter prefers a
// waiting local sample set, since the ADC cannot be held, and otherwise
// copies one external packet, but only one that has arrived completely
// (x_pkt_ready), so that a packet trickling in over the slow electrical link
// never blocks the local data. A sample set that arrives while the previous
// one is still waiting is lost and counted in lost_sets.
// The merge FIFO's output (m_t*) feeds the link to the workstation.
//
// Timing: one word per cycle into the FIFO; a local packet takes 17 cycles.
//
// The paper says the local data and the data received from other boards are
// merged in a FIFO inside the FPGA; the packet format, the arbitration rule
// and the FIFO size are this design's.
module data_gather #(
  parameter int unsigned N_CH        = 8,
  parameter int unsigned SAMPLE_W    = 24,
  parameter int unsigned HDR_W       = 8,
  parameter logic [3:0]  BOARD_ID    = 4'd0,
  parameter int unsigned MERGE_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // local ADC sample sets
  input  logic                          sample_valid,
  input  logic [N_CH-1:0][SAMPLE_W-1:0] sample_data,
  input  logic [N_CH-1:0][HDR_W-1:0]    sample_hdr,
  // external packets from the Data Buffer
  input  logic [15:0]                   x_tdata,
  input  logic                          x_tvalid,
  input  logic                          x_tlast,
  input  logic                          x_pkt_ready,  // a whole packet is waiting
  output logic                          x_tready,
  // merged stream
  output logic [15:0]                   m_tdata,
  output logic                          m_tvalid,
  output logic                          m_tlast,
  input  logic                          m_tready,
  output logic [15:0]                   lost_sets,
  output logic [15:0]                   local_pkts,
  output logic [15:0]                   ext_pkts
);
  localparam int unsigned PKT_WORDS = 1 + 2 * N_CH;
  localparam int unsigned WW        = $clog2(PKT_WORDS + 1);

  typedef enum logic [1:0] {G_IDLE, G_LOCAL, G_EXT} gstate_e;
  gstate_e st;

  logic [N_CH-1:0][SAMPLE_W-1:0] d_l;
  logic [N_CH-1:0][HDR_W-1:0]    h_l;
  logic        pend;
  logic [7:0]  setcnt;
  logic [WW-1:0] widx;
  logic [16:0] f_wdata, f_rdata;
  logic        f_wr, f_full, f_empty;
  logic [15:0] local_word;
  int unsigned ch;

  // word widx of the local packet
  always_comb begin
    ch = (int'(widx) - 1) / 2;
    if (widx == '0)
      local_word = {4'hA, BOARD_ID, setcnt};
    else if (widx[0])
      local_word = {h_l[ch[$clog2(N_CH)-1:0]], d_l[ch[$clog2(N_CH)-1:0]][SAMPLE_W-1 -: 8]};
    else
      local_word = d_l[ch[$clog2(N_CH)-1:0]][15:0];
  end

  always_comb begin
    f_wr     = 1'b0;
    f_wdata  = '0;
    x_tready = 1'b0;
    unique case (st)
      G_LOCAL: begin
        f_wr    = !f_full;
        f_wdata = {widx == WW'(PKT_WORDS - 1), local_word};
      end
      G_EXT: begin
        x_tready = !f_full;
        f_wr     = x_tvalid && !f_full;
        f_wdata  = {x_tlast, x_tdata};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= G_IDLE;
      d_l        <= '0;
      h_l        <= '0;
      pend       <= 1'b0;
      setcnt     <= '0;
      widx       <= '0;
      lost_sets  <= '0;
      local_pkts <= '0;
      ext_pkts   <= '0;
    end else begin
      if (sample_valid) begin
        if (pend) lost_sets <= lost_sets + 1'b1;
        else begin
          d_l  <= sample_data;
          h_l  <= sample_hdr;
          pend <= 1'b1;
        end
      end
      unique case (st)
        G_IDLE: begin
          widx <= '0;
          if (pend)          st <= G_LOCAL;
          else if (x_pkt_ready) st <= G_EXT;
        end
        G_LOCAL: if (f_wr) begin
          widx <= widx + 1'b1;
          if (widx == WW'(PKT_WORDS - 1)) begin
            pend       <= 1'b0;
            setcnt     <= setcnt + 1'b1;
            local_pkts <= local_pkts + 1'b1;
            st         <= G_IDLE;
          end
        end
        default: if (f_wr && x_tlast) begin         // G_EXT
          ext_pkts <= ext_pkts + 1'b1;
          st       <= G_IDLE;
        end
      endcase
    end
  end

  sync_fifo #(.WIDTH(17), .DEPTH(MERGE_DEPTH)) u_merge (
    .clk, .rst_n,
    .wr_en(f_wr), .wr_data(f_wdata), .full(f_full),
    .rd_en(m_tready && !f_empty), .rd_data(f_rdata), .empty(f_empty), .count()
  );

  assign m_tvalid = !f_empty;
  assign m_tdata  = f_rdata[15:0];
  assign m_tlast  = f_rdata[16];

endmodule
