// harms_top: programmable-logic part of the hARMS true-flow accelerator.
//
// Input: local-flow events (x, y, t, vx, vy, mag) on a valid/ready stream,
// as a DMA engine would deliver them from the processor's event
// accumulation buffer. Output: one true-flow result (vx, vy in Q24.8) per
// input event, in input order, on a valid/ready stream with last on the
// P-th result of each call.
//
// Inside: the controller (harms_ctrl) collects P events into the event RAM
// and appends them to the recent flow buffer (rfb). The buffer is then
// streamed, one entry per cycle, to P accelerator cores
// (harms_accelerator) at once; core k pools the buffer around event k.
// Their results go into the result RAM and are streamed out.
//
// buf_len sets the effective buffer length L of a call: the cores pool the
// L most recent buffer slots. 0 or any value above N means L = N; values
// below P are raised to P so that every event of the call is pooled. It is
// read in the cycle after the call's last event is accepted and must be
// stable from the acceptance of the call's first event until then.
//
// Timing: per call, P cycles to load (at full input rate), then
// L + 8 + ceil(ETA/NDIV)*(DIV_W+2) cycles to the first result, then two
// cycles per result. With the defaults (N=L=1000, P=16, ETA=4, DIV_W=35) a
// call takes 16 + 1045 + 32 = 1093 cycles.
//
// From the paper: the structure of Fig. 2 in the programmable logic (event
// RAM, RFB, P cores of window arbiter, tag LUT, ARMS compute and stream
// averagers, result RAM), the parameters N, ETA, WM, TAU, P and an
// effective buffer length that can change at run time up to N. This
// design's choice: stream handshakes instead of the vendor DMA/BRAM
// interfaces, and the widths given in harms_pkg.
module harms_top
  import harms_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned P    = P_DEF,
  parameter int unsigned ETA  = ETA_DEF,
  parameter int unsigned WM   = WM_DEF,
  parameter int unsigned TAU  = TAU_DEF,
  parameter int unsigned NDIV = NDIV_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // local-flow events in
  input  logic        s_valid,
  output logic        s_ready,
  input  flow_event_t s_ev,
  // true-flow results out
  output logic        m_valid,
  input  logic        m_ready,
  output logic        m_last,
  output true_flow_t  m_data,
  output logic        busy,
  input  logic [$clog2(N + 1)-1:0] buf_len
);

  localparam int unsigned IDX_W = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned LEN_W = $clog2(N + 1);

  logic             ev_wr_en;
  logic [IDX_W-1:0] ev_wr_idx;
  logic             rfb_start;
  logic [P-1:0]     core_done;
  logic [IDX_W-1:0] res_rd_idx;

  logic [XY_W-1:0]  ev_x [P];
  logic [XY_W-1:0]  ev_y [P];
  logic [T_W-1:0]   ev_t [P];

  logic             st_valid, st_last, st_occ;
  flow_event_t      st_ev;
  true_flow_t       core_res [P];
  logic [LEN_W-1:0] rfb_len;

  // a length below P is raised to P (0 keeps its meaning: all N slots)
  always_comb rfb_len = (buf_len != '0 && 32'(buf_len) < P) ? LEN_W'(P) : buf_len;

  harms_ctrl #(.P(P)) u_ctrl (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready),
    .ev_wr_en, .ev_wr_idx, .rfb_start, .core_done,
    .res_rd_idx, .out_valid(m_valid), .out_ready(m_ready), .out_last(m_last),
    .busy);

  event_ram #(.P(P)) u_event_ram (
    .clk, .wr_en(ev_wr_en), .wr_idx(ev_wr_idx), .wr_ev(s_ev),
    .ev_x, .ev_y, .ev_t);

  rfb #(.N(N)) u_rfb (
    .clk, .rst_n, .wr_en(ev_wr_en), .wr_ev(s_ev),
    .rd_start(rfb_start), .rd_len(rfb_len),
    .out_valid(st_valid), .out_last(st_last), .out_occ(st_occ), .out_ev(st_ev));

  for (genvar k = 0; k < P; k++) begin : g_core
    harms_accelerator #(.N(N), .ETA(ETA), .WM(WM), .TAU(TAU), .NDIV(NDIV)) u_core (
      .clk, .rst_n,
      .ev_x(ev_x[k]), .ev_y(ev_y[k]), .ev_t(ev_t[k]),
      .in_valid(st_valid), .in_last(st_last), .in_occ(st_occ), .in_ev(st_ev),
      .res_valid(core_done[k]), .res(core_res[k]));
  end

  result_ram #(.P(P)) u_result_ram (
    .clk, .wr_en(core_done), .wr_data(core_res),
    .rd_idx(res_rd_idx), .rd_data(m_data));

  // input stream rule: data held while valid and not ready
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid && !s_ready) |=> (s_valid && $stable(s_ev)));

endmodule
