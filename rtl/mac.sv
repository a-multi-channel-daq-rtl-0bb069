// mac: frame encapsulation and decapsulation.
//
// Transmit: the LLC offers a segment header (hdr_valid/hdr) and then hdr.len
// payload words of 16 bits on s_t*. The MAC sends the frame as bytes to the
// SYN layer: {ftype, last, 5'b0}, seq, len, then each payload word high byte
// first; m_tlast marks the last byte. Words are taken only as fast as bytes
// leave, one word every second accepted byte.
//
// Receive: bytes from the SYN layer (one per m_tvalid pulse, no
// back-pressure) are parsed back into a header and payload words. Each word
// leaves on rx_word_valid/rx_word as soon as both of its bytes have arrived;
// at the frame end rx_done pulses with the header and rx_ok, which is high
// when the frame had a full header, a known type and exactly len words.
//
// The paper gives the MAC's task (data frame encapsulation) and its AXIS
// interfaces; the header layout is this design's.
module mac
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // segment from the LLC
  input  logic        hdr_valid,
  input  llc_hdr_t    hdr,
  output logic        hdr_ready,
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  // bytes to the SYN layer
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // bytes from the SYN layer
  input  logic [7:0]  r_tdata,
  input  logic        r_tvalid,
  input  logic        r_tlast,
  // to the LLC
  output logic        rx_word_valid,
  output logic [15:0] rx_word,
  output logic        rx_done,
  output logic        rx_ok,
  output llc_hdr_t    rx_hdr
);

  // ---------------------------------------------------------------- transmit
  typedef enum logic [2:0] {T_IDLE, T_H0, T_H1, T_H2, T_HI, T_LO} tx_state_e;
  tx_state_e st;
  llc_hdr_t  h;
  logic [7:0] widx;

  assign hdr_ready = (st == T_IDLE);

  always_comb begin
    m_tdata  = '0;
    m_tvalid = 1'b0;
    m_tlast  = 1'b0;
    s_tready = 1'b0;
    unique case (st)
      T_H0: begin m_tdata = {h.ftype, h.last, 5'b0}; m_tvalid = 1'b1; end
      T_H1: begin m_tdata = h.seq;                   m_tvalid = 1'b1; end
      T_H2: begin m_tdata = h.len;                   m_tvalid = 1'b1; m_tlast = (h.len == 8'd0); end
      T_HI: begin m_tdata = s_tdata[15:8];           m_tvalid = s_tvalid; end
      T_LO: begin
              m_tdata  = s_tdata[7:0];
              m_tvalid = s_tvalid;
              m_tlast  = (widx == h.len - 8'd1);
              s_tready = m_tready;
            end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= T_IDLE;
      h    <= '0;
      widx <= '0;
    end else begin
      unique case (st)
        T_IDLE: if (hdr_valid) begin h <= hdr; st <= T_H0; end
        T_H0:   if (m_tready) st <= T_H1;
        T_H1:   if (m_tready) st <= T_H2;
        T_H2:   if (m_tready) begin widx <= '0; st <= (h.len == 8'd0) ? T_IDLE : T_HI; end
        T_HI:   if (m_tready && s_tvalid) st <= T_LO;
        default: if (m_tready && s_tvalid) begin          // T_LO
                   widx <= widx + 1'b1;
                   st   <= (widx == h.len - 8'd1) ? T_IDLE : T_HI;
                 end
      endcase
    end
  end

  // ----------------------------------------------------------------- receive
  logic [8:0] bidx;           // byte index inside the frame
  logic [7:0] hi_byte;
  logic [7:0] nwords;
  llc_hdr_t   rh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bidx          <= '0;
      hi_byte       <= '0;
      nwords        <= '0;
      rh            <= '0;
      rx_word_valid <= 1'b0;
      rx_word       <= '0;
      rx_done       <= 1'b0;
      rx_ok         <= 1'b0;
      rx_hdr        <= '0;
    end else begin
      rx_word_valid <= 1'b0;
      rx_done       <= 1'b0;
      if (r_tvalid) begin
        llc_hdr_t nh;
        logic     word_now;
        nh       = rh;
        word_now = 1'b0;
        unique case (bidx)
          9'd0: begin nh.ftype = ftype_e'(r_tdata[7:6]); nh.last = r_tdata[5]; nwords <= '0; end
          9'd1: nh.seq = r_tdata;
          9'd2: nh.len = r_tdata;
          default: if (bidx[0]) hi_byte <= r_tdata;     // odd index: high byte
                   else         word_now = 1'b1;
        endcase
        rh <= nh;
        if (word_now) begin
          rx_word_valid <= 1'b1;
          rx_word       <= {hi_byte, r_tdata};
          nwords        <= nwords + 1'b1;
        end
        if (r_tlast) begin
          bidx    <= '0;
          rx_done <= 1'b1;
          rx_hdr  <= nh;
          rx_ok   <= (bidx >= 9'd2) && !bidx[0] &&
                     ((nh.ftype == FT_DATA && nh.len != 8'd0) || (nh.ftype == FT_ACK && nh.len == 8'd0)) &&
                     (9'(nh.len) == ((bidx - 9'd2) >> 1));
        end else if (bidx != 9'h1FF) begin
          bidx <= bidx + 1'b1;
        end
      end
    end
  end

endmodule
