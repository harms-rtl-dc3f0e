// tag_lut: window tag lookup of the hARMS window arbitration.
//
// The maximum component distance dmax = max(|dx|,|dy|) between a recent-flow
// event and the event whose true flow is computed selects one of ETA+1 tags.
// The window edges EDGE[w] = w * (WM/ETA) are elaborated as constants and all
// ETA comparisons are made in parallel: tag j means dmax lies in
// [EDGE[j], EDGE[j+1]), so the event belongs to window j and all larger ones;
// tag ETA means it lies in no window. Because windows are nested, the tag is
// the number of edges EDGE[1..ETA] that dmax reaches.
//
// Timing: the tag is registered, latency one cycle, one lookup per cycle, as
// in the paper. The edge formula and the integer division WM/ETA follow the
// paper's algorithm; the register on the output and the absence of a reset
// (the data path holds no state worth resetting) are this design's choice.
module tag_lut
  import harms_pkg::*;
#(
  parameter int unsigned WM  = WM_DEF,
  parameter int unsigned ETA = ETA_DEF,
  localparam int unsigned TAG_W = $clog2(ETA + 1)
) (
  input  logic             clk,
  input  logic [XY_W-1:0]  dmax,
  output logic [TAG_W-1:0] tag
);

  localparam int unsigned STEP = WM / ETA;

  logic [TAG_W-1:0] tag_d;

  // Count the edges EDGE[1..ETA] that dmax has reached.
  always_comb begin
    tag_d = '0;
    for (int unsigned w = 1; w <= ETA; w++) begin
      if (32'(dmax) >= w * STEP) tag_d = TAG_W'(w);
    end
  end

  always_ff @(posedge clk) tag <= tag_d;

endmodule
