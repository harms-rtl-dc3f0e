// harms_pkg: types and default parameters shared by the hARMS accelerator.
//
// Event data follow the quantisation of the hARMS datapath: local flow
// components vx, vy and the local-flow magnitude mag are 16-bit integers, the
// resulting true flow is a 32-bit fixed-point number with 8 fractional bits.
// Coordinates are 11-bit pixel indices (enough for sensors up to 2048 pixels
// wide) and timestamps are 32-bit microsecond counts; both widths are choices
// of this design, the paper does not fix them.
package harms_pkg;

  // ---- data widths ----
  localparam int unsigned XY_W   = 11;  // pixel coordinate
  localparam int unsigned T_W    = 32;  // timestamp in microseconds
  localparam int unsigned V_W    = 16;  // local-flow components and magnitude
  localparam int unsigned OUT_W  = 32;  // true-flow output word
  localparam int unsigned FRAC_W = 8;   // fractional bits of the output word

  // ---- default configuration (benchmark configuration of the design) ----
  localparam int unsigned N_DEF    = 1000;  // recent flow buffer length
  localparam int unsigned ETA_DEF  = 4;     // number of spatial windows
  localparam int unsigned WM_DEF   = 320;   // largest window half-size, pixels
  localparam int unsigned TAU_DEF  = 5000;  // refraction time, microseconds
  localparam int unsigned P_DEF    = 16;    // parallel accelerator cores
  localparam int unsigned NDIV_DEF = 4;     // dividers per stream averager

  // A local-flow event as it is written into the recent flow buffer.
  typedef struct packed {
    logic [XY_W-1:0]       x;
    logic [XY_W-1:0]       y;
    logic [T_W-1:0]        t;
    logic signed [V_W-1:0] vx;
    logic signed [V_W-1:0] vy;
    logic [V_W-1:0]        mag;
  } flow_event_t;

  // A recent-flow event after window arbitration: the position is replaced
  // by the window tag (carried next to this struct), the rest is kept.
  typedef struct packed {
    logic [T_W-1:0]        t;
    logic signed [V_W-1:0] vx;
    logic signed [V_W-1:0] vy;
    logic [V_W-1:0]        mag;
  } flow_val_t;

  // True-flow result of one event, Q24.8 fixed point per component.
  typedef struct packed {
    logic signed [OUT_W-1:0] vx;
    logic signed [OUT_W-1:0] vy;
  } true_flow_t;

endpackage
