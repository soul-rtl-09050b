// tb_ref_pkg: bit-accurate reference model of the SOUL data path for the
// testbenches, written independently of the RTL structure (plain integer
// arithmetic, run-length counters instead of shift registers, logistic values
// computed with $exp). Only the filter coefficients are taken from soul_pkg.
//
//   ref_features : line length and three band powers per channel, 100-sample
//                  sliding windows (window length configurable)
//   ref_classifier : dot product, 10-row logistic table, bootstrap label,
//                  HC run counters, SGD update with eta = 1/64
package tb_ref_pkg;
  import soul_pkg::*;

  function automatic longint sat(longint v, longint lo, longint hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // logistic table value of row r (0..9): 256 * sigma(r - 4.5), rounded
  function automatic int lut_value(int r);
    real m;
    m = real'(r) - 4.5;
    return int'($floor(256.0 / (1.0 + $exp(-m)) + 0.5));
  endfunction

  function automatic int prob_of(longint dot);
    longint zi;
    int r;
    zi = dot >>> 20;
    r = (zi < -4) ? 0 : (zi > 3) ? 9 : int'(zi) + 5;
    return lut_value(r);
  endfunction

  // one band filter: three DF-I sections, per-channel state
  class ref_iir;
    int coef [3][5];
    longint st [N_CH][3][4];   // x1 x2 y1 y2
    function new(band_coef_t c);
      for (int s = 0; s < 3; s++) for (int i = 0; i < 5; i++) coef[s][i] = int'(c[s][i]);
      for (int ch = 0; ch < N_CH; ch++) for (int s = 0; s < 3; s++) for (int i = 0; i < 4; i++) st[ch][s][i] = 0;
    endfunction
    function longint step(int ch, longint x);
      longint v, acc, y;
      v = x;
      for (int s = 0; s < 3; s++) begin
        acc = coef[s][0] * v + coef[s][1] * st[ch][s][0] + coef[s][2] * st[ch][s][1]
            - coef[s][3] * st[ch][s][2] - coef[s][4] * st[ch][s][3] + 8192;
        y = sat(acc >>> 14, -32768, 32767);
        st[ch][s][1] = st[ch][s][0]; st[ch][s][0] = v;
        st[ch][s][3] = st[ch][s][2]; st[ch][s][2] = y;
        v = y;
      end
      return v;
    endfunction
  endclass

  // sliding-window sum, per channel
  class ref_window;
    int w;
    longint q [N_CH][$];
    function new(int win);
      w = win;
    endfunction
    function longint push(int ch, longint v);
      longint s;
      q[ch].push_back(v);
      if (q[ch].size() > w) void'(q[ch].pop_front());
      s = 0;
      foreach (q[ch][i]) s += q[ch][i];
      return sat(s, 0, 32767);
    endfunction
  endclass

  class ref_features;
    ref_iir    filt [3];
    ref_window win  [4];
    longint    prev [N_CH];
    function new(int win_len);
      filt[0] = new(COEF_ALPHA); filt[1] = new(COEF_BETA); filt[2] = new(COEF_GAMMA);
      for (int i = 0; i < 4; i++) win[i] = new(win_len);
      for (int c = 0; c < N_CH; c++) prev[c] = 0;
    endfunction
    // features of channel ch for a new sample x: [LL, alpha, beta, gamma]
    function void step(int ch, longint x, output longint f [4]);
      longint d, y;
      d = x - prev[ch]; if (d < 0) d = -d;
      prev[ch] = x;
      f[0] = win[0].push(ch, d);
      for (int b = 0; b < 3; b++) begin
        y = filt[b].step(ch, x);
        f[b + 1] = win[b + 1].push(ch, (y * y) >>> 10);
      end
    endfunction
  endclass

  class ref_classifier;
    longint w [32];
    longint xbuf [32];
    int     p_last;
    int     sz_run, ns_run;
    int     ct, hc;
    bit     pending, pending_sz, pending_ns;
    int     n_retrain_sz, n_retrain_ns, n_dropped;

    function new();
      foreach (w[i]) w[i] = 0;
      foreach (xbuf[i]) xbuf[i] = 0;
      p_last = 0; sz_run = 0; ns_run = 0; ct = 179; hc = 7;
      pending = 0; pending_sz = 0; pending_ns = 0;
      n_retrain_sz = 0; n_retrain_ns = 0; n_dropped = 0;
    endfunction

    function void update();
      longint err, d;
      err = ((p_last >= 128) ? 256 : 0) - longint'(p_last);
      foreach (w[i]) begin
        d = (err * (xbuf[i] >>> 6)) >>> 8;
        w[i] = sat(w[i] + d, -32768, 32767);
      end
    endfunction

    // End of input: a retraining requested by the last result still runs.
    function void flush();
      if (pending) begin
        update();
        if (pending_sz) n_retrain_sz++;
        if (pending_ns) n_retrain_ns++;
        pending = 0; sz_run = 0; ns_run = 0;
      end
    endfunction

    // One sample with features x[32] (index 4*ch + k). 'back_to_back' says
    // the sample follows the previous one 8 cycles later, so a pending
    // retraining drops it. Returns 1 if the sample was classified.
    function bit sample(longint x [32], bit back_to_back,
                        output int p, output bit label, output bit did_sz, output bit did_ns);
      longint dot;
      did_sz = 0; did_ns = 0; p = 0; label = 0;
      if (pending) begin
        update();
        did_sz = pending_sz; did_ns = pending_ns;
        if (pending_sz) n_retrain_sz++;
        if (pending_ns) n_retrain_ns++;
        pending = 0; sz_run = 0; ns_run = 0;
        if (back_to_back) begin
          n_dropped++;
          return 0;
        end
      end
      dot = 0;
      foreach (x[i]) dot += x[i] * w[i];
      p = prob_of(dot);
      label = (p >= 128);
      p_last = p;
      xbuf = x;
      sz_run = (p > ct) ? ((sz_run < 16) ? sz_run + 1 : 16) : 0;
      ns_run = (p < 256 - ct) ? ((ns_run < 160) ? ns_run + 1 : 160) : 0;
      pending_sz = (hc != 0) && (sz_run >= hc);
      pending_ns = (hc != 0) && (ns_run >= 10 * hc);
      pending = pending_sz || pending_ns;
      return 1;
    endfunction
  endclass

endpackage
