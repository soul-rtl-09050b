// tb_soul_classifier: loads random weights, then feeds samples of 32 features
// (one channel of four features per cycle) in seizure-like, non-seizure-like
// and uncertain regimes, some back to back (8 cycles apart) and some with gaps.
// Each result (p, label) is compared with the reference classifier, which also
// predicts which samples retraining drops and what the weights become. Checks
// that retraining lasts exactly 8 cycles, that seizure and non-seizure
// retraining and a dropped sample each happen, and reads every weight back at
// the end.
module tb_soul_classifier;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic feat_valid = 0;
  logic [2:0] feat_ch = 0;
  feature_t feat [N_FEAT];
  prob_t ct = 179;
  logic [4:0] hc = 3;
  logic w_we = 0;
  logic [4:0] w_addr = 0;
  weight_t w_wdata = 0, w_rdata;
  logic res_valid, seizure, retraining, retrain_sz, retrain_ns, dropped;
  prob_t prob;
  int checks = 0, failures = 0;
  int n_res = 0, n_sz = 0, n_ns = 0, n_drop = 0, n_retrain_cycles = 0;
  int expp [$];
  int cyc = 0;

  soul_classifier dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
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
      e = expp.pop_front();
      check(int'(prob) == e && seizure == (e >= 128), $sformatf("result %0d: p=%0d exp %0d", n_res, prob, e));
    end
    n_sz  += int'(retrain_sz);
    n_ns  += int'(retrain_ns);
    n_drop += int'(dropped);
    n_retrain_cycles += int'(retraining);
  end

  initial begin
    ref_classifier m;
    longint x [32];
    longint wi [32];
    int p; bit label, dsz, dns;
    bit back;
    int prev_gap = 0;
    m = new();
    m.ct = 179; m.hc = 3;
    foreach (feat[k]) feat[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 32; i++) begin
      wi[i] = longint'($urandom_range(0, 600)) - 300;
      m.w[i] = wi[i];
      w_we <= 1; w_addr <= 5'(i); w_wdata <= weight_t'(wi[i]);
      @(posedge clk);
    end
    w_we <= 0;
    repeat (20) @(posedge clk);
    for (int f = 0; f < 800; f++) begin
      int regime, gap;
      regime = (f / 40) % 4;   // 0 seizure, 1 non-seizure, 2 uncertain, 3 non-seizure
      for (int i = 0; i < 32; i++) begin
        case (regime)
          0:       x[i] = (m.w[i] > 0) ? $urandom_range(1500, 2500) : $urandom_range(0, 200);
          2:       x[i] = $urandom_range(0, 120);
          default: x[i] = (m.w[i] < 0) ? $urandom_range(1500, 2500) : $urandom_range(0, 200);
        endcase
      end
      gap = (f % 7 == 3) ? 12 : 0;      // mostly back to back
      back = (8 + prev_gap < 16);       // spacing since the previous sample
      prev_gap = gap;
      if (m.sample(x, back, p, label, dsz, dns)) expp.push_back(p);
      for (int c = 0; c < N_CH; c++) begin
        feat_valid <= 1; feat_ch <= 3'(c);
        for (int k = 0; k < 4; k++) feat[k] <= feature_t'(x[4 * c + k]);
        @(posedge clk);
      end
      if (gap > 0) begin
        feat_valid <= 0;
        repeat (gap) @(posedge clk);
      end
    end
    feat_valid <= 0;
    repeat (20) @(posedge clk);
    check(expp.size() == 0, $sformatf("%0d results missing", expp.size()));
    check(n_sz == m.n_retrain_sz && n_ns == m.n_retrain_ns,
          $sformatf("retrain events sz %0d/%0d ns %0d/%0d", n_sz, m.n_retrain_sz, n_ns, m.n_retrain_ns));
    check(n_drop == m.n_dropped, $sformatf("dropped %0d exp %0d", n_drop, m.n_dropped));
    check(n_retrain_cycles == 8 * (n_sz + n_ns), $sformatf("retraining cycles %0d", n_retrain_cycles));
    check(n_sz > 0 && n_ns > 0 && n_drop > 0 && n_drop < n_sz + n_ns, "all mechanisms exercised");
    for (int i = 0; i < 32; i++) begin
      w_addr <= 5'(i);
      @(posedge clk); #1;
      check(longint'(w_rdata) == m.w[i], $sformatf("w[%0d] = %0d exp %0d", i, w_rdata, m.w[i]));
    end
    $display("results %0d, retrain seizure %0d non-seizure %0d, dropped %0d", n_res, n_sz, n_ns, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
