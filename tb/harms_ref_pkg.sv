// harms_ref_pkg: reference model of the hARMS true-flow computation for the
// testbenches, written directly from the algorithm (bin search over window
// edges, per-window sums and counts, argmax of the magnitude average) with
// plain integer arithmetic, independent of the RTL structure.
package harms_ref_pkg;

  typedef struct {
    int x, y, t, vx, vy, mag;
    bit occ;
  } ref_ev_t;

  // window tag: the bin [EDGE[j], EDGE[j+1]) holding dmax, eta if none
  function automatic int ref_tag(int dmax, int wm, int eta);
    int step = wm / eta;
    for (int j = 0; j < eta; j++) begin
      if (dmax >= j * step && dmax < (j + 1) * step) return j;
    end
    return eta;
  endfunction

  // Q.8 average, truncated toward zero
  function automatic longint ref_avg(longint sum, longint cnt);
    longint q;
    if (cnt == 0) return 0;
    q = ((sum < 0 ? -sum : sum) * 256) / cnt;
    return sum < 0 ? -q : q;
  endfunction

  function automatic int iabs(int a);
    return a < 0 ? -a : a;
  endfunction

  // true flow of event e pooled over buffer buf
  function automatic void ref_true_flow(input ref_ev_t buf_q[$], input ref_ev_t e,
                                        input int wm, input int eta, input int tau,
                                        output longint vx, output longint vy,
                                        output int n_filtered, output int n_outside);
    longint sx[], sy[], sm[], cn[];
    longint best;
    int wmax;
    sx = new[eta]; sy = new[eta]; sm = new[eta]; cn = new[eta];
    foreach (sx[w]) begin sx[w] = 0; sy[w] = 0; sm[w] = 0; cn[w] = 0; end
    n_filtered = 0; n_outside = 0;
    foreach (buf_q[i]) begin
      if (!buf_q[i].occ) continue;
      if (iabs(buf_q[i].t - e.t) > tau) begin n_filtered++; continue; end
      begin
        int d, tg;
        d = iabs(buf_q[i].x - e.x) > iabs(buf_q[i].y - e.y) ? iabs(buf_q[i].x - e.x)
                                                            : iabs(buf_q[i].y - e.y);
        tg = ref_tag(d, wm, eta);
        if (tg == eta) n_outside++;
        for (int w = 0; w < eta; w++) begin
          if (tg <= w) begin
            sx[w] += buf_q[i].vx; sy[w] += buf_q[i].vy; sm[w] += buf_q[i].mag; cn[w]++;
          end
        end
      end
    end
    wmax = 0; best = ref_avg(sm[0], cn[0]);
    for (int w = 1; w < eta; w++) begin
      if (ref_avg(sm[w], cn[w]) > best) begin best = ref_avg(sm[w], cn[w]); wmax = w; end
    end
    vx = ref_avg(sx[wmax], cn[wmax]);
    vy = ref_avg(sy[wmax], cn[wmax]);
  endfunction

endpackage
