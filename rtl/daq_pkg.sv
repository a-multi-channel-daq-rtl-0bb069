// daq_pkg: constants and types shared by the DAQ transmission stack.
//
// Holds the 8B/10B control characters used to delimit frames on the low-speed
// serial link, the frame-type encoding of the MAC header, the header structure
// that the LLC hands to the MAC, and the internal word width. The 16-bit word
// width follows the paper's measured configuration; the character choices and
// the header layout are this design's own.
package daq_pkg;

  // Internal data word width (16 bit in the paper's link test).
  localparam int unsigned WORD_W = 16;

  // 8B/10B control characters (data byte with the K flag set).
  localparam logic [7:0] K28_5 = 8'hBC;  // comma; idle fill between and inside frames
  localparam logic [7:0] K27_7 = 8'hFB;  // start of frame
  localparam logic [7:0] K29_7 = 8'hFD;  // end of frame

  // Frame type in the top two bits of the first frame byte.
  typedef enum logic [1:0] {
    FT_DATA = 2'b00,   // LLC data segment
    FT_ACK  = 2'b01,   // LLC acknowledgement of one segment
    FT_SYNC = 2'b11    // synchronisation command, owned by the SYN layer
  } ftype_e;

  // First byte of a SYN command frame; the second byte is the command code.
  localparam logic [7:0] SYNC_MARK = {FT_SYNC, 6'b0};

  // Header of one LLC segment as passed to the MAC.
  typedef struct packed {
    ftype_e     ftype;
    logic       last;   // segment ends an upper-layer packet
    logic [7:0] seq;    // segment sequence number
    logic [7:0] len;    // payload length in 16-bit words (0 for ACK)
  } llc_hdr_t;

  // Synchronisation command codes carried by the SYN layer.
  localparam logic [7:0] CMD_ADC_SYNC = 8'h01;  // restart the ADC conversions together

endpackage
