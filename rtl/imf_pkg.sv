// imf_pkg -- constants and types shared by the in-memory filtering (IMF)
// processor.
//
// The macro holds one binary frame of IMF_W x IMF_H pixels (320 x 240, QVGA),
// split into 22 banks of 15 columns. Fifteen is the least common multiple of the
// two supported kernel sizes (3 and 5), so a filter patch never straddles a
// bank. Events arrive on a 10-bit AER bus and are queued in a 128 x 32-bit
// asynchronous FIFO. These numbers follow the paper. The FIFO entry layout and
// the AER word format are this design's own choices (see aer_rx).
package imf_pkg;

  // Macro geometry
  localparam int unsigned IMF_W      = 320;  // columns (x)
  localparam int unsigned IMF_H      = 240;  // rows (y)
  localparam int unsigned BANK_COLS  = 15;   // columns per bank
  localparam int unsigned NBANK      = 22;   // ceil(320/15)
  localparam int unsigned CLR_WLS    = 16;   // word lines raised per clear cycle
  localparam int unsigned XW         = 9;    // x address width
  localparam int unsigned YW         = 8;    // y address width

  // AER / FIFO
  localparam int unsigned AER_W      = 10;
  localparam int unsigned FIFO_DEPTH = 128;
  localparam int unsigned FIFO_W     = 32;

  // One FIFO entry: either a pixel event (x, y) or an end-of-frame marker.
  typedef struct packed {
    logic           eof;      // 1: end-of-frame marker, x/y unused
    logic [13:0]    rsvd;     // unused, written as zero
    logic [XW-1:0]  x;
    logic [YW-1:0]  y;
  } fifo_entry_t;             // 32 bits

  // Controller phases (bottom of Fig. 3 plus idle/readout)
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_CLEAR  = 3'd1,
    ST_WRITE  = 3'd2,
    ST_FILTER = 3'd3,
    ST_DONE   = 3'd4
  } imf_state_t;

endpackage
