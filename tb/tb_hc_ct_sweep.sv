// tb_hc_ct_sweep: the whole detector run over a grid of the two online-learning
// settings, the confidence threshold CT and the high-confidence count HC.
//
// The tuning study of the design sweeps HC over 1..15 samples and CT over
// 0.6..0.9 per patient; this bench takes the corners and the middle of that
// grid (HC = 1, 8, 15; CT = 0.6, 0.8, 0.9, i.e. 154, 205, 230 in Q0.8). For
// every setting the chip is reset, loaded with the same starting weights and
// settings through the configuration port, and fed the same synthetic EEG
// (background noise, a 20 Hz "seizure" episode, background again) at one frame
// per eight cycles. Every probability and label, the number of retraining
// events of each kind and of dropped samples, and the final 32 weights are
// compared with the bit-accurate reference model. Across the grid, both kinds
// of retraining must occur somewhere, and retraining must become rarer from
// the most permissive corner (HC 1, CT 0.6) to the strictest (HC 15, CT 0.9).
// The input data and the grid points are this bench's choice.
module tb_hc_ct_sweep;
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

  int checks = 0, failures = 0;
  int n_sz, n_ns, n_drop;
  int grid_sz = 0, grid_ns = 0;   // over the whole grid
  int expp [$];

  soul_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
      e = (expp.size() > 0) ? expp.pop_front() : -1;
      check(int'(probability) == e && seizure_detected == (e >= 128),
            $sformatf("p=%0d exp %0d", probability, e));
    end
    n_sz   += int'(retrain_sz);
    n_ns   += int'(retrain_ns);
    n_drop += int'(dropped);
    grid_sz += int'(retrain_sz);
    grid_ns += int'(retrain_ns);
  end

  ref_features   rf;
  ref_classifier rc;

  task automatic model(longint x [N_CH], bit back);
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

  task automatic cfg_write(int a, int d);
    cfg_we <= 1; cfg_addr <= 6'(a); cfg_wdata <= 16'(d);
    @(posedge clk);
  endtask

  int w_init [4] = '{-512, 0, 1536, 256};
  int ct_set [3] = '{154, 205, 230};
  int hc_set [3] = '{1, 8, 15};
  int total [3][3];

  initial begin
    longint x [N_CH];
    int n;
    foreach (adc_samples[c]) adc_samples[c] = '0;
    for (int ci = 0; ci < 3; ci++)
      for (int hi = 0; hi < 3; hi++) begin
        rst_n <= 0;
        repeat (3) @(posedge clk);
        rst_n <= 1;
        @(posedge clk);
        rf = new(WIN);
        rc = new();
        n_sz = 0; n_ns = 0; n_drop = 0; n = 0;
        for (int i = 0; i < 32; i++) begin
          cfg_write(i, w_init[i % 4]);
          rc.w[i] = longint'(w_init[i % 4]);
        end
        cfg_write(32, ct_set[ci]);  rc.ct = ct_set[ci];
        cfg_write(33, hc_set[hi]);  rc.hc = hc_set[hi];
        cfg_we <= 0;
        repeat (5) @(posedge clk);
        for (int seg = 0; seg < 3; seg++) begin
          int len;
          len = (seg == 1) ? 150 : 300;
          for (int i = 0; i < len; i++) begin
            for (int c = 0; c < N_CH; c++) begin
              x[c] = eeg(n, c, seg == 1);
              adc_samples[c] <= sample_t'(x[c]);
            end
            adc_valid <= 1;
            model(x, n > 0);
            @(posedge clk);
            adc_valid <= 0;
            repeat (7) @(posedge clk);
            n++;
          end
        end
        repeat (20) @(posedge clk);
        rc.flush();
        check(expp.size() == 0, $sformatf("CT %0d HC %0d: %0d results missing", ct_set[ci], hc_set[hi], expp.size()));
        expp.delete();
        check(n_sz == rc.n_retrain_sz && n_ns == rc.n_retrain_ns && n_drop == rc.n_dropped,
              $sformatf("CT %0d HC %0d: sz %0d/%0d ns %0d/%0d drop %0d/%0d", ct_set[ci], hc_set[hi],
                        n_sz, rc.n_retrain_sz, n_ns, rc.n_retrain_ns, n_drop, rc.n_dropped));
        for (int i = 0; i < 32; i++) begin
          cfg_addr <= 6'(i);
          @(posedge clk); #1;
          check(longint'($signed(cfg_rdata)) == rc.w[i],
                $sformatf("CT %0d HC %0d: w[%0d] %0d exp %0d", ct_set[ci], hc_set[hi], i, $signed(cfg_rdata), rc.w[i]));
        end
        $display("CT %0d HC %2d: retrain seizure %0d non-seizure %0d dropped %0d",
                 ct_set[ci], hc_set[hi], n_sz, n_ns, n_drop);
        total[ci][hi] = n_sz + n_ns;
      end
    $display("grid totals: seizure %0d non-seizure %0d", grid_sz, grid_ns);
    check(grid_sz > 0, "seizure retraining somewhere in the grid");
    check(grid_ns > 0, "non-seizure retraining somewhere in the grid");
    check(total[2][2] < total[0][0], $sformatf("strict corner %0d not below permissive %0d", total[2][2], total[0][0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
