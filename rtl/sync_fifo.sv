// sync_fifo: single-clock first-word-fall-through FIFO.
//
// A memory of DEPTH words with read and write pointers one bit wider than the
// address, so that full and empty are told apart by the extra bit. rd_data
// shows the oldest word whenever empty is low; rd_en removes it. A read and a
// write may happen in the same cycle, also when the FIFO is full (the read
// frees the place) or empty (no: the word written appears one cycle later).
// Writing when full and reading when empty are protocol errors and are
// caught by assertions.
//
// The paper uses FIFOs as the Data Buffer of the electrical interface, the
// merge FIFO of the Data Gather and the Transmission FIFO of the PHY; it
// gives none of their sizes, so DEPTH is set where each is used.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16            // power of two
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [WIDTH-1:0]          wr_data,
  output logic                      full,
  input  logic                      rd_en,
  output logic [WIDTH-1:0]          rd_data,
  output logic                      empty,
  output logic [$clog2(DEPTH):0]    count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (wptr == rptr);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && (!full || rd_en)) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (wr_en && (!full || rd_en)) wptr <= wptr + 1'b1;
      if (rd_en && !empty)           rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
