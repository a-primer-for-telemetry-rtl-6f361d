// tmif_pkg: types and constants shared by the telemetry interface (TMIF).
//
// A photon event from the detector's time-to-digital converter is one 32-bit
// word: a 12-bit x coordinate, a 12-bit y coordinate and an 8-bit pulse
// height. The field widths follow the detector description; the order of the
// fields inside the word ({x, y, pulse height}, x in the top bits) is this
// design's choice, since the bit layout of the bus is not specified.
// Default clock rates are those of the flight unit: a 25 MHz board
// oscillator from which a PLL derives the detector clock C (2.5 MHz) and the
// fast strobe-search clock C' (100 MHz).
package tmif_pkg;

  localparam int unsigned X_W     = 12;
  localparam int unsigned Y_W     = 12;
  localparam int unsigned PH_W    = 8;
  localparam int unsigned EVENT_W = X_W + Y_W + PH_W;  // 32

  // FIFO geometry of the flight unit: 32 bits wide, 4,096 words deep.
  localparam int unsigned FIFO_DEPTH = 4096;

  // Rate of the fast clock C' in Hz (C itself runs at 2.5 MHz; no logic
  // depends on that number).
  localparam int unsigned CP_HZ   = 100_000_000;

  // Heartbeat rate seen on the ground ("about 60 Hz").
  localparam int unsigned HEARTBEAT_HZ = 60;

  typedef struct packed {
    logic [X_W-1:0]  x;
    logic [Y_W-1:0]  y;
    logic [PH_W-1:0] ph;
  } photon_event_t;

endpackage
