// phy_rx_fifo: receive frame FIFO with error judgment of the low-speed PHY.
//
// The write side stores the payload bytes of a frame as they are decoded,
// but only behind a tentative write pointer. At the end of the frame the
// error judgment decides: if the CRC checked out, no symbol error was seen
// and the FIFO did not overflow, the frame is committed (the committed
// pointer jumps to the write pointer and the last byte is marked as frame
// end); otherwise the write pointer falls back and the frame vanishes. A new
// start of frame while a frame is open also discards the open one. The read
// side sees committed bytes only, each with a flag for the last byte of its
// frame, so a reader never receives a corrupted frame.
//
// Write interface: sof (frame starts), wr_en/wr_data (payload byte), sym_err
// (an invalid or unexpected symbol inside the frame), eof with crc_ok (frame
// ends). Read interface: rd_valid/rd_data/rd_last, popped by rd_en.
// frames_ok and frames_bad count the judgments.
//
// The paper's figure of the PHY shows a FIFO, a FIFO read and write control
// and an error judgment fed by the CRC verification; commit and roll-back is
// this design's way of realising that.
module phy_rx_fifo #(
  parameter int unsigned DEPTH = 256          // power of two
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sof,
  input  logic        wr_en,
  input  logic [7:0]  wr_data,
  input  logic        sym_err,
  input  logic        eof,
  input  logic        crc_ok,
  output logic        rd_valid,
  output logic [7:0]  rd_data,
  output logic        rd_last,
  input  logic        rd_en,
  output logic [15:0] frames_ok,
  output logic [15:0] frames_bad
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [7:0]  mem  [DEPTH];
  logic        last [DEPTH];
  logic [AW:0] wptr, cptr, rptr;
  logic        in_frame, bad, wrote;
  logic        full, good;

  assign full     = ((wptr - rptr) == (AW+1)'(DEPTH));
  assign rd_valid = (rptr != cptr);
  assign rd_data  = mem[rptr[AW-1:0]];
  assign rd_last  = last[rptr[AW-1:0]];
  assign good     = in_frame && crc_ok && !bad && !sym_err && wrote;

  always_ff @(posedge clk) begin
    if (in_frame && wr_en && !full) begin
      mem[wptr[AW-1:0]]  <= wr_data;
      last[wptr[AW-1:0]] <= 1'b0;
    end
    if (eof && good) last[AW'(wptr - 1'b1)] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      cptr       <= '0;
      rptr       <= '0;
      in_frame   <= 1'b0;
      bad        <= 1'b0;
      wrote      <= 1'b0;
      frames_ok  <= '0;
      frames_bad <= '0;
    end else begin
      if (rd_en && rd_valid) rptr <= rptr + 1'b1;
      if (sof) begin
        if (in_frame) frames_bad <= frames_bad + 1'b1;
        wptr     <= cptr;
        in_frame <= 1'b1;
        bad      <= 1'b0;
        wrote    <= 1'b0;
      end else if (eof) begin
        in_frame <= 1'b0;
        if (good) begin
          cptr      <= wptr;
          frames_ok <= frames_ok + 1'b1;
        end else begin
          wptr       <= cptr;
          if (in_frame) frames_bad <= frames_bad + 1'b1;
        end
      end else if (in_frame) begin
        if (sym_err) bad <= 1'b1;
        if (wr_en) begin
          if (full) bad <= 1'b1;
          else begin
            wptr  <= wptr + 1'b1;
            wrote <= 1'b1;
          end
        end
      end
    end
  end
endmodule
