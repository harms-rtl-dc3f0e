// event_ram_tb: writes the 16 entries of the event RAM in random order,
// overwrites some, and checks that every parallel output shows the position
// and timestamp last written to its index while the others keep theirs.
module event_ram_tb;
  import harms_pkg::*;

  localparam int P = P_DEF;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic            wr_en;
  logic [3:0]      wr_idx;
  flow_event_t     wr_ev;
  logic [XY_W-1:0] ev_x [P];
  logic [XY_W-1:0] ev_y [P];
  logic [T_W-1:0]  ev_t [P];

  event_ram dut (.*);

  int checks = 0, failures = 0;
  flow_event_t model [P];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 1'b0; wr_idx = '0; wr_ev = '0;
    for (int i = 0; i < P; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_idx = 4'(P - 1 - i);
      wr_ev = flow_event_t'({$urandom, $urandom, $urandom, $urandom});
      model[P - 1 - i] = wr_ev;
    end
    for (int r = 0; r < 40; r++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) == 1); wr_idx = 4'($urandom_range(0, P - 1));
      wr_ev = flow_event_t'({$urandom, $urandom, $urandom, $urandom});
      if (wr_en) model[wr_idx] = wr_ev;
      @(posedge clk); #1;
      for (int k = 0; k < P; k++) begin
        checks++;
        if (ev_x[k] != model[k].x || ev_y[k] != model[k].y || ev_t[k] != model[k].t) begin
          failures++; $display("entry %0d differs", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
