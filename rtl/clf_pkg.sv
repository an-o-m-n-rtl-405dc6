// clf_pkg: widths and the event type shared by the Cache-Like Filter (CLF).
//
// A DVS event is the quadruple (x, y, t, p): column, row, timestamp and
// polarity. The coordinate widths cover the largest sensor the filter is
// built for, 1280 x 800 pixels (11-bit column, 10-bit row), and the incoming
// timestamp is a 32-bit integer, the usual 4-byte width of DVS event streams.
// Only the low BW_T bits of the timestamp are kept in the memories; that
// width is a parameter of the modules, not of this package.
package clf_pkg;

  localparam int unsigned X_W   = 11;  // column coordinate width (up to 2048 columns)
  localparam int unsigned Y_W   = 10;  // row coordinate width (up to 1024 rows)
  localparam int unsigned TS_W  = 32;  // timestamp width of the incoming event
  localparam int unsigned CNT_W = 8;   // width of correlated-event counts and N_CR

  typedef struct packed {
    logic [X_W-1:0]  x;  // column
    logic [Y_W-1:0]  y;  // row
    logic [TS_W-1:0] t;  // timestamp
    logic            p;  // polarity (1 = ON, 0 = OFF)
  } event_t;

endpackage
