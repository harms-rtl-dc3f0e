// harms_top_tb: end-to-end test of the accelerator with a reduced
// configuration (N=64, P=4, ETA=6 windows of 10 pixels, TAU=300 us, four
// dividers per averager so they are used in two rounds). A synthetic event
// stream with rising timestamps and positions spread over a 200x200 pixel
// patch runs through 40 hardware calls, with random input gaps, output
// back-pressure and a random effective buffer length per call. Every
// true-flow result is compared with the reference fARMS model running on
// its own copy of the recent flow buffer, and the cycle count of each call
// is checked. Counted mechanisms, each required at least
// once: buffer slots still empty, buffer wrap-around, events removed by the
// time filter, events outside every window, input stall, output stall,
// divider reuse and a shortened buffer.
module harms_top_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int N = 64, P = 4, ETA = 6, WM = 60, TAU = 300, NDIV = 4, NCALL = 40;
  localparam bit STANDALONE = 1'b1;
  localparam bit SHORTEN = 1'b1;
  localparam int DIVW = 16 + 1 + $clog2(N + 1) + 8;
  localparam int CALL_LAT = N + 8 + ((ETA + NDIV - 1) / NDIV) * (DIVW + 2);

  logic clk = 1'b0;
  logic bench_done = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic        s_valid, s_ready, m_valid, m_ready, m_last, busy;
  flow_event_t s_ev;
  true_flow_t  m_data;
  logic [$clog2(N + 1)-1:0] buf_len;

  harms_top #(.N(N), .P(P), .ETA(ETA), .WM(WM), .TAU(TAU), .NDIV(NDIV)) dut (.*);

  `include "harms_top_bench.svh"

endmodule
