// window_arbiter_tb: streams random events past a fixed reference event,
// answers the arbiter's distance output with a behavioural tag table, and
// checks that every output element has the expected tag and payload, that
// valid/last/occupancy travel with it and that the latency is 2 cycles.
module window_arbiter_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int ETA = 4, WM = 320, NEV = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [XY_W-1:0] ev_x, ev_y, dmax;
  logic            in_valid, in_last, in_occ;
  flow_event_t     in_ev;
  logic [2:0]      tag;
  logic            out_valid, out_last, out_occ;
  logic [2:0]      out_tag;
  flow_val_t       out_val;

  window_arbiter #(.ETA(ETA)) dut (.*);

  // behavioural tag table, one cycle like the real one
  always_ff @(posedge clk) tag <= 3'(ref_tag(int'(dmax), WM, ETA));

  int checks = 0, failures = 0;
  flow_event_t sent [NEV];
  bit          sent_last [NEV], sent_occ [NEV];
  int          sent_cyc [NEV];
  int          cyc = 0, n_out = 0, n_in = 0;

  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int dx, dy, d, et;
    dx = iabs(int'(sent[n_out].x) - int'(ev_x));
    dy = iabs(int'(sent[n_out].y) - int'(ev_y));
    d  = dx > dy ? dx : dy;
    et = ref_tag(d, WM, ETA);
    checks++;
    if (int'(out_tag) != et || out_val.t != sent[n_out].t || out_val.vx != sent[n_out].vx ||
        out_val.vy != sent[n_out].vy || out_val.mag != sent[n_out].mag ||
        out_last != sent_last[n_out] || out_occ != sent_occ[n_out] ||
        cyc - sent_cyc[n_out] != 2) begin
      failures++;
      if (failures < 10) $display("element %0d: tag %0d exp %0d, latency %0d", n_out, out_tag, et,
               cyc - sent_cyc[n_out]);
    end
    n_out++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_last = 1'b0; in_occ = 1'b0; in_ev = '0;
    ev_x = 11'd300; ev_y = 11'd200;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NEV; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_ev.x   = XY_W'($urandom_range(0, 700));
      in_ev.y   = XY_W'($urandom_range(0, 500));
      in_ev.t   = $urandom;
      in_ev.vx  = V_W'($urandom);
      in_ev.vy  = V_W'($urandom);
      in_ev.mag = V_W'($urandom);
      in_occ    = $urandom_range(0, 1) == 1;
      in_last   = (i == NEV - 1);
      if (i == NEV - 1) in_valid = 1'b1;
      if (in_valid) begin
        automatic int k = 0;
        // record in order of acceptance
        for (k = 0; k < NEV; k++) if (sent_cyc[k] == -1) break;
        sent[k] = in_ev; sent_last[k] = in_last; sent_occ[k] = in_occ; sent_cyc[k] = cyc; n_in++;
      end
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_out == 0 || n_out != n_in) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial foreach (sent_cyc[i]) sent_cyc[i] = -1;
endmodule
