// rfb_tb: writes batches of events into an 8-slot recent flow buffer and
// streams it after each batch, at the full length and at shortened
// effective lengths. Checks that the stream has L elements on consecutive
// cycles, last on the final one, that they are the L most recent events
// oldest first (ring order, overwriting the oldest) and that only slots
// written since reset are marked occupied. Runs past two wrap-arounds.
module rfb_tb;
  import harms_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic        wr_en, rd_start, out_valid, out_last, out_occ;
  logic [3:0]  rd_len;
  flow_event_t wr_ev, out_ev;

  rfb #(.N(N)) dut (.*);

  int checks = 0, failures = 0, wraps = 0;
  flow_event_t model [N];
  bit          model_occ [N];
  int          widx = 0, n_written = 0, n_short = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_batch(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_ev = flow_event_t'({$urandom, $urandom, $urandom, $urandom});
      model[widx] = wr_ev; model_occ[widx] = 1'b1; n_written++;
      widx = (widx + 1) % N;
      if (widx == 0) wraps++;
    end
    @(negedge clk); wr_en = 1'b0;
  endtask

  task automatic stream_and_check(int len);
    int k = 0, gaps = 0, l;
    l = (len == 0 || len > N) ? N : len;
    if (l < N) n_short++;
    @(negedge clk); rd_start = 1'b1; rd_len = 4'(len);
    @(negedge clk); rd_start = 1'b0; rd_len = 4'($urandom);
    while (k < l && gaps < 4) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int age, slot;
        bit occ;
        age  = l - 1 - k;
        slot = ((widx - 1 - age) % N + N) % N;
        occ  = age < n_written;
        checks++;
        if (out_occ != occ || (occ && out_ev != model[slot]) || out_last != (k == l - 1)) begin
          failures++;
          $display("len %0d element %0d: occ %0d exp %0d last %0d", l, k, out_occ, occ, out_last);
        end
        k++;
      end else if (k > 0) begin
        failures++; $display("gap in stream at %0d", k); gaps++;
      end else gaps++;
    end
    checks++;
    if (k != l) failures++;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("stream longer than %0d", l); end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_start = 1'b0; wr_ev = '0; rd_len = '0;
    foreach (model_occ[i]) model_occ[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    stream_and_check(0);
    write_batch(3);  stream_and_check(8); stream_and_check(5);
    write_batch(4);  stream_and_check(0); stream_and_check(2);
    write_batch(5);  stream_and_check(8); stream_and_check(6);
    write_batch(9);  stream_and_check(15); stream_and_check(1);
    write_batch(2);  stream_and_check(0); stream_and_check(7);
    checks += 2;
    if (wraps < 2) failures++;
    if (n_short == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
