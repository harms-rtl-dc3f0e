// window_arbiter: tags each recent-flow event with the spatial window it
// falls into relative to the event whose true flow a core computes.
//
// Stage 1 takes one event per cycle from the recent flow buffer stream and
// registers dmax = max(|x - ev_x|, |y - ev_y|) together with the rest of the
// event. dmax goes out to the tag LUT (tag_lut), which returns the tag one
// cycle later; stage 2 holds the payload for that cycle so that tag and
// payload leave together. The x/y coordinates are dropped from the output
// stream: from here on the tag carries all position information.
//
// Interface: in_* is a stream without back-pressure (valid, last, occ, data),
// occ marks a buffer slot that holds a written event. out_* is the same
// stream with the tag added. Latency 2 cycles, interval 1.
//
// From the paper: the distance measure, the use of a separate tag LUT and
// the removal of x/y from the stream. This design's choice: the two-stage
// pipeline split and the occupancy bit carried with each event.
module window_arbiter
  import harms_pkg::*;
#(
  parameter int unsigned ETA = ETA_DEF,
  localparam int unsigned TAG_W = $clog2(ETA + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // event whose true flow is computed
  input  logic [XY_W-1:0]  ev_x,
  input  logic [XY_W-1:0]  ev_y,
  // recent-flow event stream
  input  logic             in_valid,
  input  logic             in_last,
  input  logic             in_occ,
  input  flow_event_t      in_ev,
  // tag LUT connection
  output logic [XY_W-1:0]  dmax,
  input  logic [TAG_W-1:0] tag,
  // tagged stream
  output logic             out_valid,
  output logic             out_last,
  output logic             out_occ,
  output logic [TAG_W-1:0] out_tag,
  output flow_val_t        out_val
);

  logic [XY_W-1:0] dx, dy;
  logic            s1_valid, s1_last, s1_occ;
  flow_val_t       s1_val;

  always_comb begin
    dx = (in_ev.x >= ev_x) ? in_ev.x - ev_x : ev_x - in_ev.x;
    dy = (in_ev.y >= ev_y) ? in_ev.y - ev_y : ev_y - in_ev.y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    dmax     <= (dx > dy) ? dx : dy;
    s1_last  <= in_last;
    s1_occ   <= in_occ;
    s1_val   <= '{t: in_ev.t, vx: in_ev.vx, vy: in_ev.vy, mag: in_ev.mag};
    out_last <= s1_last;
    out_occ  <= s1_occ;
    out_val  <= s1_val;
  end

  assign out_tag = tag;

endmodule
