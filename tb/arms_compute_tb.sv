// arms_compute_tb: streams random tagged recent-flow events (some outside
// the TAU time window, some in empty slots, some in no spatial window) into
// the ARMS compute core and checks the true flow against a testbench model:
// time filter, per-window averages, argmax of the magnitude average. Also
// checks the cycle count from the last element to the result.
module arms_compute_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int N = 50, ETA = 4, TAU = 100, NRUN = 20;
  localparam int DIVW = 16 + 1 + $clog2(N + 1) + 8;
  // filter stage + averager + selection register, seen one edge later
  localparam int LAT = 1 + ((ETA + 3) / 4) * (DIVW + 2) + 1 + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [T_W-1:0] ev_t;
  logic           in_valid, in_last, in_occ;
  logic [2:0]     in_tag;
  flow_val_t      in_val;
  logic           res_valid;
  true_flow_t     res;

  arms_compute #(.N(N), .ETA(ETA), .TAU(TAU)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_filtered = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_last = 1'b0; in_occ = 1'b0; in_tag = '0; in_val = '0;
    ev_t = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NRUN; r++) begin
      longint sx [ETA], sy [ETA], sm [ETA], cn [ETA];
      longint best, exp_vx, exp_vy;
      int wmax, last_cyc, lat;
      foreach (sx[w]) begin sx[w] = 0; sy[w] = 0; sm[w] = 0; cn[w] = 0; end
      ev_t = 32'(1000 + r * 37);
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_last  = (i == N - 1);
        in_occ   = (i == 0) ? 1'b1 : ($urandom_range(0, 9) != 0);
        in_tag   = (i == 0) ? 3'd0 : 3'($urandom_range(0, ETA));
        in_val.t = (i == 0) ? ev_t : ev_t + 32'($urandom_range(0, 300)) - 32'd150;
        in_val.vx  = V_W'($urandom_range(0, 2000)) - 16'd1000;
        in_val.vy  = V_W'($urandom_range(0, 2000)) - 16'd1000;
        in_val.mag = V_W'($urandom_range(0, 1500));
        if (in_occ && iabs(int'(in_val.t) - int'(ev_t)) <= TAU) begin
          for (int w = 0; w < ETA; w++) if (int'(in_tag) <= w) begin
            sx[w] += in_val.vx; sy[w] += in_val.vy; sm[w] += in_val.mag; cn[w]++;
          end
        end else if (in_occ) n_filtered++;
        last_cyc = cyc;
      end
      @(negedge clk); in_valid = 1'b0; in_last = 1'b0;
      wmax = 0; best = ref_avg(sm[0], cn[0]);
      for (int w = 1; w < ETA; w++) if (ref_avg(sm[w], cn[w]) > best) begin
        best = ref_avg(sm[w], cn[w]); wmax = w;
      end
      exp_vx = ref_avg(sx[wmax], cn[wmax]);
      exp_vy = ref_avg(sy[wmax], cn[wmax]);
      lat = -1;
      while (lat < 0 && cyc - last_cyc < 200) begin
        @(posedge clk);
        if (res_valid) lat = cyc - last_cyc;
      end
      #1;
      checks += 2;
      if (longint'(res.vx) != exp_vx || longint'(res.vy) != exp_vy) begin
        failures++;
        $display("run %0d: got (%0d,%0d) exp (%0d,%0d) w=%0d", r, res.vx, res.vy, exp_vx, exp_vy, wmax);
      end
      if (lat != LAT) begin failures++; $display("latency %0d exp %0d", lat, LAT); end
    end
    checks++;
    if (n_filtered == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
