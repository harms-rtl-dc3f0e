// harms_accelerator: one hARMS accelerator core.
//
// Computes the true flow of one event (ev_x, ev_y, ev_t) from the recent
// flow buffer stream that all cores see at the same time. The window
// arbiter measures each buffered event's distance to the core's event, the
// tag LUT turns the distance into a window tag, and the ARMS compute core
// filters by time, averages vx, vy and magnitude per window and picks the
// window of largest average magnitude.
//
// Timing: one stream element per cycle. With the last element sampled at
// edge L, res_valid pulses one cycle after edge
// L + 2 + 1 + ceil(ETA/NDIV)*(DIV_W + 2) + 1. The event inputs must be
// stable for the whole stream.
//
// From the paper: the composition (window arbiter, tag LUT, ARMS compute with
// three stream averagers) and one core per event of the call.
module harms_accelerator
  import harms_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned ETA  = ETA_DEF,
  parameter int unsigned WM   = WM_DEF,
  parameter int unsigned TAU  = TAU_DEF,
  parameter int unsigned NDIV = NDIV_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [XY_W-1:0] ev_x,
  input  logic [XY_W-1:0] ev_y,
  input  logic [T_W-1:0]  ev_t,
  input  logic            in_valid,
  input  logic            in_last,
  input  logic            in_occ,
  input  flow_event_t     in_ev,
  output logic            res_valid,
  output true_flow_t      res
);

  localparam int unsigned TAG_W = $clog2(ETA + 1);

  logic [XY_W-1:0]  dmax;
  logic [TAG_W-1:0] tag;
  logic             a_valid, a_last, a_occ;
  logic [TAG_W-1:0] a_tag;
  flow_val_t        a_val;

  window_arbiter #(.ETA(ETA)) u_arbiter (
    .clk, .rst_n, .ev_x, .ev_y,
    .in_valid, .in_last, .in_occ, .in_ev,
    .dmax, .tag,
    .out_valid(a_valid), .out_last(a_last), .out_occ(a_occ),
    .out_tag(a_tag), .out_val(a_val));

  tag_lut #(.WM(WM), .ETA(ETA)) u_tag_lut (.clk, .dmax, .tag);

  arms_compute #(.N(N), .ETA(ETA), .TAU(TAU), .NDIV(NDIV)) u_compute (
    .clk, .rst_n, .ev_t,
    .in_valid(a_valid), .in_last(a_last), .in_occ(a_occ),
    .in_tag(a_tag), .in_val(a_val),
    .res_valid, .res);

endmodule
