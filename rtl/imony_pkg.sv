// imony_pkg: types and constants shared by the IMONY photon-counting data
// acquisition logic.
//
// The numbers the paper fixes are the 16 pixel channels (a 4x4 GAPD array),
// the 5 ns internal clock that samples the hit lines and the 100 ns (10 MHz)
// resolution of the time stamp, hence a 20:1 ratio between the two. The event
// word layout, the counter widths and the acquisition-mode encoding are this
// design's own choices.
package imony_pkg;

  localparam int unsigned NUM_PIXELS = 16; // pixels, 4x4 array
  localparam int unsigned TICK_DIV = 20;   // 5 ns clock cycles per 100 ns tick
  localparam int unsigned SUBSEC_W = 24;   // 10^7 ticks per second need 24 bits
  localparam int unsigned PPS_W    = 24;   // seconds since measurement start
  localparam int unsigned EVENT_W  = NUM_PIXELS + PPS_W + SUBSEC_W;  // 64

  // Acquisition mode selected by bit 0 of the CTRL register.
  typedef enum logic {
    MODE_LIGHTCURVE = 1'b0,   // photon event list with time stamps
    MODE_SCALER     = 1'b1    // per-pixel count map over an exposure
  } acq_mode_e;

  // One light-curve event: every pixel that fired during one 100 ns bin,
  // together with the time of that bin. Sent most significant byte first.
  typedef struct packed {
    logic [NUM_PIXELS-1:0] hits;      // bit i set: pixel i fired in the bin
    logic [PPS_W-1:0]    pps_count; // PPS pulses since measurement start
    logic [SUBSEC_W-1:0] subsec;    // 100 ns ticks since the last PPS
  } event_t;

endpackage
