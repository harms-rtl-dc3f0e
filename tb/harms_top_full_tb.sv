// harms_top_full_tb: end-to-end test of the accelerator in its default
// configuration (N=1000, P=16, ETA=4, WM=320, TAU=5000 us, four dividers).
// 66 hardware calls of 16 events (1056 events, so the recent flow buffer
// fills and wraps) with random input gaps and output back-pressure; every
// result is compared with the reference fARMS model and each call's cycle
// count is checked (L + 45 cycles from the last input to the first result,
// 1045 at the full length L = N). Most calls use a random effective buffer
// length. The same mechanisms as in harms_top_tb are counted; divider reuse cannot
// occur with four windows and four dividers.
module harms_top_full_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int N = N_DEF, P = P_DEF, ETA = ETA_DEF, WM = WM_DEF, TAU = TAU_DEF,
                 NDIV = NDIV_DEF, NCALL = 66;
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

  harms_top dut (.*);

  `include "harms_top_bench.svh"

endmodule
