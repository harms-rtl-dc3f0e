// harms_workloads_tb: runs the accelerator end to end in the configurations
// used for the real-world recordings, on synthetic event streams (the
// recordings themselves are not available to a simulation):
//   rotation/MVSEC   WM=100, ETA=10, TAU=5 ms, P=16, N=1500
//   pendulum (VGA)   WM=50,  ETA=5,  TAU=5 ms, P=16, N=2000
//   embedded table   WM=160, ETA=4,  TAU=5 ms, P=16, N=3286 (largest
//                    buffer length of the embedded benchmark)
// Each configuration runs enough calls to fill and wrap its buffer; all
// results are checked against the reference model.
module harms_workloads_tb;
  import harms_pkg::*;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;

  harms_top_cfg_bench #(.N(1500), .P(16), .ETA(10), .WM(100), .TAU(5000), .NCALL(96))
    u_rotation (.done(d0), .n_checks(c0), .n_failures(f0));
  harms_top_cfg_bench #(.N(2000), .P(16), .ETA(5), .WM(50), .TAU(5000), .NCALL(127))
    u_pendulum (.done(d1), .n_checks(c1), .n_failures(f1));
  harms_top_cfg_bench #(.N(3286), .P(16), .ETA(4), .WM(160), .TAU(5000), .NCALL(208))
    u_embedded (.done(d2), .n_checks(c2), .n_failures(f2));

  int checks = 0, failures = 0;

  initial begin
    // 2,000,000 cycles of the benches' 10 ns clock
    #20ms;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2);
    $display("rotation: %0d checks, %0d failures", c0, f0);
    $display("pendulum: %0d checks, %0d failures", c1, f1);
    $display("embedded: %0d checks, %0d failures", c2, f2);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
