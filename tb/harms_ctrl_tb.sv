// harms_ctrl_tb: runs the call sequencer for P=4 against behavioural cores
// that answer a random number of cycles after the buffer stream starts, and
// at different cycles each. Input gaps and output back-pressure are random.
// Checks per call: P events accepted with write indices 0..P-1, one stream
// start right after the last one, no input accepted and no output offered
// before all cores answered, results offered in index order with last on
// the final one, held while not accepted, and the first result offered two
// cycles after the cycle in which the last core's result pulse is present.
module harms_ctrl_tb;
  localparam int P = 4, NCALL = 12;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic         in_valid, in_ready, ev_wr_en, rfb_start, out_valid, out_ready, out_last, busy;
  logic [1:0]   ev_wr_idx, res_rd_idx;
  logic [P-1:0] core_done;

  harms_ctrl #(.P(P)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_acc = 0, n_start = 0, n_out = 0, n_stall = 0, last_done_cyc = -1;
  int start_cyc = -1, acc_last_cyc = -1;
  bit all_done = 1'b0, first_seen = 1'b0;
  int  delay [P];
  bit [P-1:0] answered;

  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural cores
  always @(posedge clk) begin
    core_done <= '0;
    if (rst_n && start_cyc >= 0) begin
      for (int k = 0; k < P; k++) begin
        if (!answered[k] && cyc - start_cyc == delay[k]) begin
          core_done[k] <= 1'b1; answered[k] = 1'b1; last_done_cyc = cyc;
        end
      end
      if (&answered) begin all_done = 1'b1; start_cyc = -1; end
    end
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (ev_wr_en) begin
      checks++;
      if (int'(ev_wr_idx) != n_acc % P) begin failures++; $display("write index %0d", ev_wr_idx); end
      if (n_acc / P > n_out / P) begin failures++; $display("input accepted before results were sent"); end
      n_acc++;
      if (n_acc % P == 0) acc_last_cyc = cyc;
    end
    if (rfb_start) begin
      checks++;
      if (cyc != acc_last_cyc + 1) begin failures++; $display("start not right after load"); end
      n_start++;
      start_cyc = cyc;
      all_done = 1'b0; first_seen = 1'b0;
      foreach (delay[k]) delay[k] = $urandom_range(3, 40);
      answered = '0;
    end
    if (out_valid) begin
      if (!first_seen) begin
        first_seen = 1'b1;
        checks++;
        if (!all_done || cyc != last_done_cyc + 3) begin
          failures++; $display("first result at %0d, last core at %0d", cyc, last_done_cyc);
        end
      end
      checks++;
      if (int'(res_rd_idx) != n_out % P || out_last != (n_out % P == P - 1)) begin
        failures++; $display("result %0d: idx %0d last %0d", n_out, res_rd_idx, out_last);
      end
      if (out_ready) n_out++;
      else n_stall++;
    end
  end

  // a result offered and not taken must still be offered next cycle
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(res_rd_idx)));

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_out < NCALL * P) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    checks += 3;
    if (n_acc != NCALL * P) failures++;
    if (n_start != NCALL) failures++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
