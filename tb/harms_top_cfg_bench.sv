// harms_top_cfg_bench: the end-to-end bench of harms_top for one
// configuration given by parameters, for testbenches that run several
// configurations. It makes its own clock and reset, runs NCALL calls
// against the reference model and raises done with its check counts.
module harms_top_cfg_bench
  import harms_pkg::*;
  import harms_ref_pkg::*;
#(
  parameter int N = 64, P = 4, ETA = 4, WM = 60, TAU = 300, NDIV = 4,
  parameter int NCALL = 4
) (
  output logic done,
  output int   n_checks,
  output int   n_failures
);

  localparam bit STANDALONE = 1'b0;
  localparam bit SHORTEN = 1'b0;
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

  assign done       = bench_done;
  assign n_checks   = checks;
  assign n_failures = failures;

endmodule
