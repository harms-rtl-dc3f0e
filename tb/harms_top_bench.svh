// harms_top_bench.svh: stimulus, reference and checks shared by the
// end-to-end testbenches of harms_top. The including module declares N, P,
// ETA, WM, TAU, NDIV, NCALL, CALL_LAT (the call latency at full buffer
// length), STANDALONE, SHORTEN, the clock, the reset and the ports of the
// instance. With SHORTEN set, most calls use a random effective buffer
// length; otherwise every call uses the full buffer. A STANDALONE bench
// prints the result line and ends the simulation; otherwise it raises
// bench_done and leaves checks and failures to the module that instantiates
// it.

  // events are spread over a square patch reaching past the largest window
  localparam int SPREAD = (2 * WM > 200) ? 2 * WM : 200;

  int checks = 0, failures = 0, cyc = 0;
  int cnt_empty = 0, cnt_wrap = 0, cnt_filtered = 0, cnt_outside = 0;
  int cnt_in_stall = 0, cnt_out_stall = 0, cnt_div_reuse = 0, cnt_short = 0;

  ref_ev_t ring [N];
  int      ring_idx = 0, n_written = 0;
  longint  exp_vx [$], exp_vy [$];
  int      n_res = 0, last_acc_cyc = -1, first_out_seen = 0, cur_len = N;

  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic finish_bench();
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    bench_done = 1'b1;
  endtask

  initial begin
    repeat (NCALL * (CALL_LAT + 6 * P + 40) + 1000) @(posedge clk);
    if (!bench_done) begin
      failures++;
      $display("watchdog: %0d results", n_res);
      finish_bench();
    end
  end

  // output monitor: compare results in order, check call latency
  always @(posedge clk) if (rst_n) begin
    if (s_valid && !s_ready) cnt_in_stall++;
    if (m_valid && !m_ready) cnt_out_stall++;
    if (m_valid && !first_out_seen) begin
      first_out_seen = 1;
      checks++;
      if (cyc - last_acc_cyc != CALL_LAT - N + cur_len + 1) begin
        failures++;
        $display("call latency %0d exp %0d", cyc - last_acc_cyc, CALL_LAT - N + cur_len + 1);
      end
    end
    if (m_valid && m_ready) begin
      longint evx, evy;
      evx = exp_vx.pop_front(); evy = exp_vy.pop_front();
      checks += 2;
      if (longint'(m_data.vx) != evx || longint'(m_data.vy) != evy) begin
        failures++;
        if (failures < 10) $display("result %0d: got (%0d,%0d) exp (%0d,%0d)", n_res,
                                    m_data.vx, m_data.vy, evx, evy);
      end
      checks++;
      if (m_last != (n_res % P == P - 1)) failures++;
      n_res++;
    end
  end

  initial begin
    int t_now = 1000;
    rst_n = 1'b0; s_valid = 1'b0; s_ev = '0; m_ready = 1'b0; buf_len = '0;
    foreach (ring[i]) ring[i].occ = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    fork
      // output side: random back-pressure
      forever begin
        @(negedge clk);
        m_ready = ($urandom_range(0, 3) != 0);
      end
    join_none
    for (int c = 0; c < NCALL; c++) begin
      ref_ev_t batch [P];
      ref_ev_t q[$];
      int      len_req, len;
      // effective buffer length of this call: 0 (full), N, or a random
      // length, sometimes below P
      len_req = 0;
      if (SHORTEN) begin
        case ($urandom_range(0, 5))
          0:       len_req = 0;
          1:       len_req = N;
          2:       len_req = $urandom_range(1, P);
          default: len_req = $urandom_range(P, N);
        endcase
      end
      len = (len_req == 0) ? N : (len_req < P) ? P : len_req;
      // one call worth of events
      for (int k = 0; k < P; k++) begin
        t_now += $urandom_range(0, 40);
        batch[k].x   = 100 + $urandom_range(0, SPREAD);
        batch[k].y   = 80 + $urandom_range(0, SPREAD);
        batch[k].t   = t_now;
        batch[k].vx  = $urandom_range(0, 1000) - 300;
        batch[k].vy  = $urandom_range(0, 1000) - 700;
        batch[k].mag = $urandom_range(0, 900) + ((batch[k].x / 25) % 2) * 500;
        batch[k].occ = 1'b1;
      end
      // send them, with random gaps
      for (int k = 0; k < P; k++) begin
        @(negedge clk);
        // the length is changed once the call's first event is in
        if (k == (P > 1 ? 1 : 0)) buf_len = $bits(buf_len)'(len_req);
        while ($urandom_range(0, 3) == 0) begin s_valid = 1'b0; @(negedge clk); end
        s_valid = 1'b1;
        s_ev = '{x: XY_W'(batch[k].x), y: XY_W'(batch[k].y), t: T_W'(batch[k].t),
                 vx: V_W'(batch[k].vx), vy: V_W'(batch[k].vy), mag: V_W'(batch[k].mag)};
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        last_acc_cyc = cyc;
        // reference buffer update, in acceptance order
        ring[ring_idx] = batch[k];
        ring_idx = (ring_idx + 1) % N;
        n_written++;
        if (n_written == N + 1) cnt_wrap++;
      end
      @(negedge clk); s_valid = 1'b0;
      first_out_seen = 0;
      cur_len = len;
      if (len < N) cnt_short++;
      // reference results of this call
      if (n_written < N) cnt_empty++;
      if (ETA > NDIV) cnt_div_reuse++;
      q.delete();
      for (int i = 0; i < len; i++) q.push_back(ring[(ring_idx - len + i + N) % N]);
      for (int k = 0; k < P; k++) begin
        longint vx, vy;
        int nf, no;
        ref_true_flow(q, batch[k], WM, ETA, TAU, vx, vy, nf, no);
        exp_vx.push_back(vx); exp_vy.push_back(vy);
        cnt_filtered += nf; cnt_outside += no;
      end
      // the next call is offered at once and waits for s_ready
    end
    while (n_res < NCALL * P) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_res != NCALL * P || busy) begin failures++; $display("results %0d", n_res); end
    $display("mechanisms: empty_slots=%0d wrap=%0d time_filtered=%0d outside_windows=%0d in_stall=%0d out_stall=%0d divider_reuse=%0d short_buffer=%0d",
             cnt_empty, cnt_wrap, cnt_filtered, cnt_outside, cnt_in_stall, cnt_out_stall, cnt_div_reuse,
             cnt_short);
    checks += 8;
    if (cnt_empty == 0)     begin failures++; $display("never: empty slots"); end
    if (cnt_wrap == 0)      begin failures++; $display("never: wrap-around"); end
    if (cnt_filtered == 0)  begin failures++; $display("never: time filter"); end
    if (cnt_outside == 0)   begin failures++; $display("never: outside windows"); end
    if (cnt_in_stall == 0)  begin failures++; $display("never: input stall"); end
    if (cnt_out_stall == 0) begin failures++; $display("never: output stall"); end
    if (cnt_div_reuse == 0 && ETA > NDIV) begin failures++; $display("never: divider reuse"); end
    if (cnt_short == 0 && SHORTEN) begin failures++; $display("never: shortened buffer"); end
    finish_bench();
  end
