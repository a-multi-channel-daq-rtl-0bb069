// llc: segmentation, sequencing, retransmission and reassembly.
//
// Transmit: packets arrive as 16-bit words on s_t* (tlast ends a packet). The
// LLC cuts them into segments of at most SEG_WORDS words, kept in a segment
// buffer, and gives each an 8-bit sequence number. A segment is handed to the
// MAC as a header (type DATA, last-of-packet flag, seq, len) followed by its
// words, and then held until an ACK with the same number comes back. If none
// comes within TIMEOUT cycles the segment is sent again (stop-and-wait
// automatic repeat request). Only then is the next segment accepted.
//
// Receive: the words of a DATA frame are written into a receive buffer. When
// the MAC reports the frame complete and well formed, a segment with the
// expected sequence number is acknowledged and streamed out on m_t* (m_tlast
// on the last word of a packet), and the expected number advances. A repeat
// of the previous segment (its ACK was lost) is acknowledged again and
// discarded; any other number is discarded. A frame that arrives while the
// buffer is still being emptied is dropped without ACK, and the sender's
// retransmission recovers it. ACK frames received are passed to the
// transmit side. ACKs to be sent take precedence over data segments.
//
// The paper lists the LLC's functions (segmentation and reassembly,
// sequential transmission, error retransmission). Stop-and-wait, the segment
// size, the sequence number width and the timeout are this design's choices.
module llc
  import daq_pkg::*;
#(
  parameter int unsigned SEG_WORDS = 32,       // words per segment, at most 255
  parameter int unsigned TIMEOUT   = 16384     // cycles before a segment is resent
) (
  input  logic        clk,
  input  logic        rst_n,
  // packets to send
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // received packets
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // to the MAC
  output logic        hdr_valid,
  output llc_hdr_t    hdr,
  input  logic        hdr_ready,
  output logic [15:0] p_tdata,
  output logic        p_tvalid,
  input  logic        p_tready,
  // from the MAC
  input  logic        rx_word_valid,
  input  logic [15:0] rx_word,
  input  logic        rx_done,
  input  logic        rx_ok,
  input  llc_hdr_t    rx_hdr,
  // statistics
  output logic [15:0] retransmits,
  output logic [15:0] segments_sent
);
  localparam int unsigned IW = $clog2(SEG_WORDS + 1);                // counts 0..SEG_WORDS
  localparam int unsigned AW = (SEG_WORDS > 1) ? $clog2(SEG_WORDS) : 1; // buffer address

  // ---------------------------------------------------------------- transmit
  typedef enum logic [1:0] {T_FILL, T_HDR, T_PAY, T_WAIT} tx_state_e;
  tx_state_e   st;
  logic [15:0] tbuf [SEG_WORDS];
  logic [IW-1:0] tcnt, pidx;
  logic        tlast_seg;
  logic [7:0]  tseq;
  logic [$clog2(TIMEOUT+1)-1:0] timer;
  logic        ack_pend;
  logic [7:0]  ack_seq;
  logic        ack_rx;
  logic        ack_req;
  logic [7:0]  ack_req_seq;
  logic        sent_once;

  assign s_tready  = (st == T_FILL);
  assign hdr_valid = ack_pend || (st == T_HDR);
  assign hdr       = ack_pend ? llc_hdr_t'{ftype: FT_ACK, last: 1'b0, seq: ack_seq, len: 8'd0}
                              : llc_hdr_t'{ftype: FT_DATA, last: tlast_seg, seq: tseq, len: 8'(tcnt)};
  assign p_tvalid  = (st == T_PAY);
  assign p_tdata   = tbuf[AW'(pidx < IW'(SEG_WORDS) ? pidx : '0)];
  assign ack_rx    = rx_done && rx_ok && rx_hdr.ftype == FT_ACK && rx_hdr.seq == tseq;

  always_ff @(posedge clk) begin
    if (st == T_FILL && s_tvalid) tbuf[AW'(tcnt)] <= s_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= T_FILL;
      tcnt          <= '0;
      pidx          <= '0;
      tlast_seg     <= 1'b0;
      tseq          <= '0;
      timer         <= '0;
      ack_pend      <= 1'b0;
      ack_seq       <= '0;
      retransmits   <= '0;
      segments_sent <= '0;
      sent_once     <= 1'b0;
    end else begin
      if (hdr_valid && hdr_ready && ack_pend) ack_pend <= 1'b0;
      if (ack_req) begin
        ack_pend <= 1'b1;
        ack_seq  <= ack_req_seq;
      end
      unique case (st)
        T_FILL: if (s_tvalid) begin
                  tcnt <= tcnt + 1'b1;
                  if (s_tlast || tcnt == IW'(SEG_WORDS - 1)) begin
                    tlast_seg <= s_tlast;
                    sent_once <= 1'b0;
                    st        <= T_HDR;
                  end
                end
        T_HDR:  if (hdr_ready && !ack_pend) begin
                  pidx <= '0;
                  st   <= T_PAY;
                  if (sent_once) retransmits <= retransmits + 1'b1;
                  else           segments_sent <= segments_sent + 1'b1;
                end
        T_PAY:  if (p_tready) begin
                  pidx <= pidx + 1'b1;
                  if (pidx == tcnt - 1'b1) begin
                    timer     <= '0;
                    sent_once <= 1'b1;
                    st        <= T_WAIT;
                  end
                end
        default: begin                                   // T_WAIT
                  timer <= timer + 1'b1;
                  if (ack_rx) begin
                    tseq <= tseq + 1'b1;
                    tcnt <= '0;
                    st   <= T_FILL;
                  end else if (timer == ($bits(timer))'(TIMEOUT)) begin
                    st <= T_HDR;
                  end
                end
      endcase
    end
  end

  // ----------------------------------------------------------------- receive
  logic [15:0] rbuf [SEG_WORDS];
  logic [IW-1:0] widx, oidx, olen;
  logic        busy, olast, wr_over;
  logic [7:0]  rseq;
  logic        is_data_ok;

  assign m_tvalid   = busy;
  assign m_tdata    = rbuf[AW'(oidx < IW'(SEG_WORDS) ? oidx : '0)];
  assign m_tlast    = busy && olast && (oidx == olen - 1'b1);
  assign is_data_ok = rx_done && rx_ok && rx_hdr.ftype == FT_DATA && !busy && !wr_over &&
                      rx_hdr.len <= 8'(SEG_WORDS);
  assign ack_req     = is_data_ok && (rx_hdr.seq == rseq || rx_hdr.seq == rseq - 8'd1);
  assign ack_req_seq = rx_hdr.seq;

  always_ff @(posedge clk) begin
    if (rx_word_valid && !busy && widx < IW'(SEG_WORDS)) rbuf[AW'(widx)] <= rx_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx    <= '0;
      wr_over <= 1'b0;
      oidx    <= '0;
      olen    <= '0;
      olast   <= 1'b0;
      busy    <= 1'b0;
      rseq    <= '0;
    end else begin
      if (rx_word_valid) begin
        if (busy || widx == IW'(SEG_WORDS)) wr_over <= 1'b1;
        else                                widx    <= widx + 1'b1;
      end
      if (rx_done) begin
        widx    <= '0;
        wr_over <= 1'b0;
      end
      if (is_data_ok && rx_hdr.seq == rseq) begin
        busy  <= 1'b1;
        oidx  <= '0;
        olen  <= IW'(rx_hdr.len);
        olast <= rx_hdr.last;
        rseq  <= rseq + 1'b1;
      end
      if (busy && m_tready) begin
        oidx <= oidx + 1'b1;
        if (oidx == olen - 1'b1) busy <= 1'b0;
      end
    end
  end

endmodule
