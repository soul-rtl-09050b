// tb_soul_top: end-to-end run of the whole detector at its default size
// (8 channels, 100-sample windows, 32 weights, 10-row LUT, 16/160-stage HC
// counters).
//
// Synthetic EEG: every channel carries low-amplitude noise; during "seizure"
// episodes channels carry a large 20 Hz oscillation plus noise. Weights that
// favour beta-band power and penalise line length are loaded through the
// configuration port, CT = 0.7 and HC = 4 are set, and samples arrive back to
// back at one frame per 8 cycles, as with the 8 kHz system clock. Every result
// (probability and seizure label) is compared with a bit-accurate reference of
// feature extraction, classification and unsupervised SGD; at the end all 32
// weights are read back and compared. The last part switches to the scan chain:
// frames are shifted in serially and the previous result is shifted out and
// checked. The run counts seizure detections, seizure and non-seizure
// retraining, dropped samples, scan frames and a deliberate frame overrun, and
// counts a failure for any of them that never happened. It also checks the
// result latency (11 cycles from adc_valid to res_valid) and that every
// retraining burst lasts eight cycles.
module tb_soul_top;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  sample_t adc_samples [N_CH];
  logic scan_mode = 0, scan_en = 0, scan_in = 0, scan_load = 0, scan_out;
  logic cfg_we = 0;
  logic [5:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0, cfg_rdata;
  logic res_valid, seizure_detected, retraining, retrain_sz, retrain_ns, dropped, overrun;
  prob_t probability;

  localparam int RES_LATENCY = 11;  // cycles from adc_valid to res_valid
  int checks = 0, failures = 0;
  int n_res = 0, n_seiz = 0, n_sz = 0, n_ns = 0, n_drop = 0, n_over = 0, n_scan = 0;
  int expp [$];
  logic [15:0] last_word;

  soul_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      int e;
      n_res++;
      e = (expp.size() > 0) ? expp.pop_front() : -1;
      check(int'(probability) == e && seizure_detected == (e >= 128),
            $sformatf("result %0d: p=%0d exp %0d", n_res, probability, e));
      n_seiz += int'(seizure_detected);
    end
    n_sz   += int'(retrain_sz);
    n_ns   += int'(retrain_ns);
    n_drop += int'(dropped);
    n_over += int'(overrun);
  end

  // timing: cycles from the first frame strobe to its result, and the length
  // of every retraining burst (eight cycles, one channel group per cycle)
  longint cyc = 0, t_adc = -1;
  int lat = -1, rt_len = 0, n_rt_bad = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (adc_valid && t_adc < 0) t_adc = cyc;
    if (res_valid && lat < 0 && t_adc >= 0) lat = int'(cyc - t_adc);
    if (retraining) rt_len++;
    else if (rt_len != 0) begin
      if (rt_len != 8) n_rt_bad++;
      rt_len = 0;
    end
  end

  ref_features   rf;
  ref_classifier rc;
  bit back = 0;

  // reference for one sample frame
  task automatic model(longint x [N_CH]);
    longint f [4];
    longint feats [32];
    int p; bit label, dsz, dns;
    for (int c = 0; c < N_CH; c++) begin
      rf.step(c, x[c], f);
      for (int k = 0; k < 4; k++) feats[4 * c + k] = f[k];
    end
    if (rc.sample(feats, back, p, label, dsz, dns)) expp.push_back(p);
  endtask

  function automatic longint eeg(int n, int c, bit seiz);
    longint v;
    v = longint'($urandom_range(0, 40)) - 20;
    if (seiz) v += longint'($rtoi(300.0 * $sin(2.0 * 3.14159265358979 * 20.0 * real'(n) / 1000.0 + real'(c))));
    return v;
  endfunction

  // (cfg_we is lowered by the caller after a burst of writes)
  task automatic cfg_write(int a, int d);
    cfg_we <= 1; cfg_addr <= 6'(a); cfg_wdata <= 16'(d);
    @(posedge clk);
  endtask

  int w_init [4] = '{-512, 0, 1536, 256};

  initial begin
    longint x [N_CH];
    int n;
    n = 0;
    rf = new(WIN);
    rc = new();
    foreach (adc_samples[c]) adc_samples[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // configuration
    for (int i = 0; i < 32; i++) begin
      cfg_write(i, w_init[i % 4]);
      rc.w[i] = longint'(w_init[i % 4]);
    end
    cfg_write(32, 179);  rc.ct = 179;
    cfg_write(33, 4);    rc.hc = 4;
    cfg_we <= 0;
    cfg_addr <= 6'd33; @(posedge clk); #1;
    check(cfg_rdata == 16'd4, "HC read back");
    repeat (5) @(posedge clk);

    // ADC mode: background, seizure, background, seizure, background
    for (int seg = 0; seg < 5; seg++) begin
      int len;
      len = (seg % 2 != 0) ? 150 : 260;
      for (int i = 0; i < len; i++) begin
        for (int c = 0; c < N_CH; c++) begin
          x[c] = eeg(n, c, seg % 2 == 1);
          adc_samples[c] <= sample_t'(x[c]);
        end
        adc_valid <= 1;
        model(x);
        back = 1;
        @(posedge clk);
        adc_valid <= 0;
        if (seg == 4 && i == 100) begin       // an extra strobe inside a frame
          repeat (3) @(posedge clk);
          adc_valid <= 1;
          @(posedge clk);
          adc_valid <= 0;
          repeat (3) @(posedge clk);
        end else begin
          repeat (7) @(posedge clk);
        end
        n++;
      end
    end
    repeat (20) @(posedge clk);

    // scan mode: frames shifted in serially, results shifted out
    scan_mode <= 1;
    back = 0;
    for (int i = 0; i < 12; i++) begin
      logic [15:0] got;
      logic [15:0] expw;
      expw = {seizure_detected, 3'b0, 4'b0, probability};
      for (int c = 0; c < N_CH; c++) x[c] = eeg(n, c, i >= 6);
      for (int c = 0; c < N_CH; c++)
        for (int b = 15; b >= 0; b--) begin
          int k;
          k = c * 16 + (15 - b);
          if (k < 16) begin #1 got[15 - k] = scan_out; end
          scan_en <= 1; scan_in <= x[c][b];
          @(posedge clk);
        end
      scan_en <= 0;
      if (i > 0) begin
        // flags may be set by retraining in ADC mode; compare seizure and p
        check(got[15] == expw[15] && got[7:0] == expw[7:0],
              $sformatf("scan result %h exp %h", got, expw));
        n_scan++;
      end
      scan_load <= 1;
      model(x);
      @(posedge clk);
      scan_load <= 0;
      repeat (30) @(posedge clk);
      n++;
    end
    repeat (20) @(posedge clk);

    check(expp.size() == 0, $sformatf("%0d results missing", expp.size()));
    check(n_sz == rc.n_retrain_sz && n_ns == rc.n_retrain_ns,
          $sformatf("retraining sz %0d/%0d ns %0d/%0d", n_sz, rc.n_retrain_sz, n_ns, rc.n_retrain_ns));
    check(n_drop == rc.n_dropped, $sformatf("dropped %0d exp %0d", n_drop, rc.n_dropped));
    for (int i = 0; i < 32; i++) begin
      cfg_addr <= 6'(i);
      @(posedge clk); #1;
      check(longint'($signed(cfg_rdata)) == rc.w[i], $sformatf("w[%0d] %0d exp %0d", i, $signed(cfg_rdata), rc.w[i]));
    end
    $display("mechanisms: results %0d seizure-detected %0d retrain-seizure %0d retrain-nonseizure %0d dropped %0d overrun %0d scan-frames %0d",
             n_res, n_seiz, n_sz, n_ns, n_drop, n_over, n_scan);
    $display("latency %0d cycles", lat);
    check(lat == RES_LATENCY, $sformatf("result latency %0d exp %0d", lat, RES_LATENCY));
    check(n_rt_bad == 0, $sformatf("%0d retraining bursts not 8 cycles long", n_rt_bad));
    check(n_seiz > 0, "seizure detected");
    check(n_sz > 0, "seizure retraining");
    check(n_ns > 0, "non-seizure retraining");
    check(n_drop > 0, "dropped sample");
    check(n_over == 1, "overrun");
    check(n_scan > 0, "scan-chain frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
