// event_ram: temporary RAM for the P events of one hardware call.
//
// The events of the event accumulation buffer arrive one at a time and are
// written at index wr_idx. Every entry drives its own output, so accelerator
// core k reads entry k continuously while the recent flow buffer streams
// past; the array is kept in registers for that reason. Only position and
// timestamp are needed by the cores and only those are stored. Entries are
// undefined until written; the controller writes all P before a call.
//
// Timing: a write at one clock edge is visible on ev after that edge.
// From the paper: one temporary RAM shared by all cores holding the P
// events. This design's choice: register storage with parallel read.
module event_ram
  import harms_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  localparam int unsigned IDX_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  flow_event_t      wr_ev,
  output logic [XY_W-1:0]  ev_x [P],
  output logic [XY_W-1:0]  ev_y [P],
  output logic [T_W-1:0]   ev_t [P]
);

  always_ff @(posedge clk) begin
    if (wr_en) begin
      ev_x[wr_idx] <= wr_ev.x;
      ev_y[wr_idx] <= wr_ev.y;
      ev_t[wr_idx] <= wr_ev.t;
    end
  end

endmodule
