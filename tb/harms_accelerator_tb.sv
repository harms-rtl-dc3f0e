// harms_accelerator_tb: one accelerator core with five windows of 10 pixels
// (WM=50) and TAU=200. Random buffers of N events scattered around the
// core's event are streamed through; each result is checked against the
// reference fARMS model and the cycle count from the last element to the
// result is checked.
module harms_accelerator_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int N = 80, ETA = 5, WM = 50, TAU = 200, NRUN = 15;
  localparam int DIVW = 16 + 1 + $clog2(N + 1) + 8;
  localparam int LAT = 2 + 1 + ((ETA + 3) / 4) * (DIVW + 2) + 1 + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [XY_W-1:0] ev_x, ev_y;
  logic [T_W-1:0]  ev_t;
  logic            in_valid, in_last, in_occ;
  flow_event_t     in_ev;
  logic            res_valid;
  true_flow_t      res;

  harms_accelerator #(.N(N), .ETA(ETA), .WM(WM), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, tot_out = 0, tot_filt = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_ev_t buf_q[$];
    ref_ev_t e;
    rst_n = 1'b0; in_valid = 1'b0; in_last = 1'b0; in_occ = 1'b0; in_ev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NRUN; r++) begin
      longint exp_vx, exp_vy;
      int nf, no, last_cyc, lat;
      e.x = $urandom_range(60, 600); e.y = $urandom_range(60, 400); e.t = 5000 + r * 1000;
      e.occ = 1'b1;
      ev_x = XY_W'(e.x); ev_y = XY_W'(e.y); ev_t = T_W'(e.t);
      buf_q.delete();
      for (int i = 0; i < N; i++) begin
        ref_ev_t b;
        b.x = e.x + $urandom_range(0, 120) - 60;
        b.y = e.y + $urandom_range(0, 120) - 60;
        b.t = e.t + $urandom_range(0, 500) - 250;
        b.vx = $urandom_range(0, 600) - 300 + (r % 3) * 100;
        b.vy = $urandom_range(0, 600) - 300;
        b.mag = $urandom_range(0, 400) + ((iabs(b.x - e.x) < 25) ? 200 : 0);
        b.occ = (r == 0) ? (i < 30) : 1'b1;
        if (i == 7) begin b.x = e.x; b.y = e.y; b.t = e.t; b.occ = 1'b1; end
        buf_q.push_back(b);
      end
      ref_true_flow(buf_q, e, WM, ETA, TAU, exp_vx, exp_vy, nf, no);
      tot_out += no; tot_filt += nf;
      foreach (buf_q[i]) begin
        @(negedge clk);
        in_valid = 1'b1; in_last = (i == N - 1); in_occ = buf_q[i].occ;
        in_ev = '{x: XY_W'(buf_q[i].x), y: XY_W'(buf_q[i].y), t: T_W'(buf_q[i].t),
                  vx: V_W'(buf_q[i].vx), vy: V_W'(buf_q[i].vy), mag: V_W'(buf_q[i].mag)};
        last_cyc = cyc;
      end
      @(negedge clk); in_valid = 1'b0; in_last = 1'b0;
      lat = -1;
      while (lat < 0 && cyc - last_cyc < 300) begin
        @(posedge clk);
        if (res_valid) lat = cyc - last_cyc;
      end
      #1;
      checks += 2;
      if (longint'(res.vx) != exp_vx || longint'(res.vy) != exp_vy) begin
        failures++;
        $display("run %0d: got (%0d,%0d) exp (%0d,%0d)", r, res.vx, res.vy, exp_vx, exp_vy);
      end
      if (lat != LAT) begin failures++; $display("latency %0d exp %0d", lat, LAT); end
    end
    checks++;
    if (tot_out == 0 || tot_filt == 0) begin
      failures++; $display("outside-window %0d filtered %0d", tot_out, tot_filt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
