// tos_pkg: types and constants shared by the TOS corner-detection front end.
//
// An address-event (AER) word carries the pixel address, polarity and a
// timestamp. The TOS is stored as 5-bit words and updated over a 7 x 7
// patch; sensor geometry is a parameter of the modules (240 x 180 by
// default, a DAVIS240).
// Timestamp width (32 bits, microseconds) is this design's choice.
package tos_pkg;

  localparam int unsigned WORD_W     = 5;    // stored TOS bits (top 3 bits implied 111)
  localparam int unsigned PATCH      = 7;    // patch edge P
  localparam int unsigned X_W        = 9;    // x address width (covers several blocks)
  localparam int unsigned Y_W        = 8;    // y address width
  localparam int unsigned TS_W       = 32;   // timestamp width

  typedef logic [X_W-1:0]  x_t;
  typedef logic [Y_W-1:0]  y_t;
  typedef logic [TS_W-1:0] ts_t;

  // One event from the camera.
  typedef struct packed {
    x_t   x;
    y_t   y;
    logic p;   // polarity: 1 = ON
    ts_t  t;
  } event_t;

  // Event leaving the system, tagged with the Harris look-up result.
  typedef struct packed {
    event_t ev;
    logic   corner;
  } tagged_event_t;

  // DVFS operating point.
  typedef struct packed {
    logic [2:0]  level;     // 0 = 0.6 V ... 6 = 1.2 V
    logic [10:0] vdd_mv;    // supply in mV
    logic [10:0] fclk_mhz;  // NMC-TOS clock in MHz
    logic        overload;  // rate above the top operating point
  } op_point_t;

  // A full 8-bit TOS value from the 5 stored bits: 0 stays 0, any other
  // stored value s stands for 224 + s.
  function automatic logic [7:0] tos_expand(logic [WORD_W-1:0] s);
    return (s == '0) ? 8'd0 : {3'b111, s};
  endfunction

endpackage
