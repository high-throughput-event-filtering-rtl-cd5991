// dif_pkg: types and constants shared by the DIF event-filter modules.
//
// An event enters the filter as one 64-bit word. The packing of that word
// (timestamp in the low 32 bits, then x, y and polarity) is a choice of this
// design; the filter only needs a timestamp and the two pixel coordinates.
// Timestamps are unsigned counts of the sensor's time unit (microseconds for
// the usual sensors) and wrap at 2^32.
//
// The fixed-point widths follow the hardware variant of the algorithm:
// timestamp differences are cut to 24 bits, the weights K are reduced by
// 8 bits and saturated to 12 bits, distances carry 2 fractional bits.
// The 32-bit width of the stored timestamps and intervals is this design's
// choice (four bytes per stored value).
package dif_pkg;

  localparam int EVENT_W = 64;   // bits per input event
  localparam int TS_W    = 32;   // stored timestamp and interval width
  localparam int X_W     = 16;   // x field width in the event word
  localparam int Y_W     = 15;   // y field width in the event word
  localparam int DT_W    = 24;   // timestamp difference after truncation
  localparam int K_W     = 12;   // K after saturation (max 4095)
  localparam int K_DROP  = 8;    // low bits dropped from I*d
  localparam int KD_W    = 2 * K_W;          // Kd = K*K
  localparam int D_W     = 3 * K_W;          // D  = Kd*K
  localparam int P_W     = DT_W + D_W;       // dT*D
  localparam int DTC_W   = P_W + 2;          // sum of four products
  localparam int DSUM_W  = D_W + 2;          // sum of four D
  localparam int FL_W    = 16;               // filter length width

  typedef logic [TS_W-1:0] ts_t;

  typedef struct packed {
    logic            pol;
    logic [Y_W-1:0]  y;
    logic [X_W-1:0]  x;
    ts_t             ts;
  } event_t;

  // Kind of operation travelling down the area-update pipeline: a sensor
  // event, or one step of the sweep that refreshes inactive areas.
  typedef enum logic {OP_EVENT = 1'b0, OP_SWEEP = 1'b1} op_e;

endpackage
