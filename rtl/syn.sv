// syn: synchronisation layer between the MAC and the PHY.
//
// Transmit: frames from the MAC (byte stream with tlast) are sent on the
// GMII-style port, one byte per PHY symbol slot (gmii_ce), with at least IFG
// idle slots between frames. A synchronisation command (cmd_valid/cmd) is a
// two-byte frame {SYNC_MARK, code}. Whenever a new frame may start, a waiting
// command goes before any waiting MAC frame, so a command waits at most for
// the frame already on the line: this is what keeps commands timely.
// The MAC must keep s_tvalid high for the whole of a frame once it has
// started it, since a GMII frame cannot pause; an assertion checks this.
//
// Receive: the port is sampled at every gmii_rx_ce (every clock behind the
// low-speed PHY, which releases checked frames at full speed; the byte slots
// behind a transceiver), and a frame's bytes must come at consecutive
// strobes. A frame whose first byte is SYNC_MARK is taken as a command and
// its code leaves on sync_valid/sync_cmd; every other frame is passed to the
// MAC as bytes with m_tvalid pulses, m_tlast on the last byte (known when
// gmii_rx_dv falls, so the stream runs one strobe behind the port).
//
// The paper says only that SYN handles all synchronisation data so that
// synchronisation commands stay timely, with AXIS towards the MAC and GMII
// towards the PHY; the command frame format and the priority rule are this
// design's.
module syn
  import daq_pkg::*;
#(
  parameter int unsigned IFG = 6            // idle slots between frames (PHY needs 5)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       gmii_ce,      // transmit byte slot
  input  logic       gmii_rx_ce,   // receive byte strobe
  output logic [7:0] gmii_txd,
  output logic       gmii_tx_en,
  input  logic [7:0] gmii_rxd,
  input  logic       gmii_rx_dv,
  // from MAC
  input  logic [7:0] s_tdata,
  input  logic       s_tvalid,
  input  logic       s_tlast,
  output logic       s_tready,
  // commands to send
  input  logic       cmd_valid,
  input  logic [7:0] cmd,
  output logic       cmd_ready,
  // to MAC (no back-pressure: a GMII frame cannot wait)
  output logic [7:0] m_tdata,
  output logic       m_tvalid,
  output logic       m_tlast,
  // received commands
  output logic       sync_valid,
  output logic [7:0] sync_cmd
);

  typedef enum logic [1:0] {S_IDLE, S_SYNC, S_DATA, S_END} tx_state_e;
  tx_state_e  st;
  logic [3:0] gap;
  logic [7:0] cmd_l;
  logic       can_start;

  assign can_start = (st == S_IDLE) && (gap >= 4'(IFG));
  assign cmd_ready = gmii_ce && can_start && cmd_valid;
  assign s_tready  = gmii_ce && s_tvalid &&
                     ((can_start && !cmd_valid) || st == S_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      gap        <= 4'(IFG);
      cmd_l      <= '0;
      gmii_txd   <= '0;
      gmii_tx_en <= 1'b0;
    end else if (gmii_ce) begin
      unique case (st)
        S_IDLE: begin
          gmii_tx_en <= 1'b0;
          if (gap != 4'hF) gap <= gap + 1'b1;
          if (cmd_ready) begin
            gmii_txd   <= SYNC_MARK;
            gmii_tx_en <= 1'b1;
            cmd_l      <= cmd;
            st         <= S_SYNC;
          end else if (s_tready) begin
            gmii_txd   <= s_tdata;
            gmii_tx_en <= 1'b1;
            st         <= s_tlast ? S_END : S_DATA;
          end
        end
        S_SYNC: begin
          gmii_txd <= cmd_l;
          st       <= S_END;
        end
        S_DATA: begin
          gmii_txd <= s_tdata;
          if (s_tlast) st <= S_END;
        end
        default: begin            // S_END: first idle slot after a frame
          gmii_tx_en <= 1'b0;
          gap        <= 4'd1;
          st         <= S_IDLE;
        end
      endcase
    end
  end

  a_frame_no_pause: assert property (@(posedge clk) disable iff (!rst_n)
                                     (gmii_ce && st == S_DATA) |-> s_tvalid);

  // ----------------------------------------------------------------- receive
  typedef enum logic [1:0] {R_IDLE, R_SYNC, R_DATA, R_SKIP} rx_state_e;
  rx_state_e  rst_q;
  logic [7:0] rhold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q      <= R_IDLE;
      rhold      <= '0;
      m_tdata    <= '0;
      m_tvalid   <= 1'b0;
      m_tlast    <= 1'b0;
      sync_valid <= 1'b0;
      sync_cmd   <= '0;
    end else begin
      m_tvalid   <= 1'b0;
      sync_valid <= 1'b0;
      if (gmii_rx_ce) begin
        unique case (rst_q)
          R_IDLE: if (gmii_rx_dv) begin
                    rhold <= gmii_rxd;
                    rst_q <= (gmii_rxd == SYNC_MARK) ? R_SYNC : R_DATA;
                  end
          R_SYNC: if (gmii_rx_dv) begin
                    sync_cmd   <= gmii_rxd;
                    sync_valid <= 1'b1;
                    rst_q      <= R_SKIP;
                  end else rst_q <= R_IDLE;
          R_DATA: begin
                    m_tdata  <= rhold;
                    m_tvalid <= 1'b1;
                    m_tlast  <= !gmii_rx_dv;
                    rhold    <= gmii_rxd;
                    if (!gmii_rx_dv) rst_q <= R_IDLE;
                  end
          default: if (!gmii_rx_dv) rst_q <= R_IDLE;
        endcase
      end
    end
  end

endmodule
