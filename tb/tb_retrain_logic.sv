// tb_retrain_logic: streams of probabilities (runs of confident seizure, runs
// of confident non-seizure, uncertain values) for several CT and HC settings,
// compared with run-length counters: seizure retrain after HC consecutive
// p > CT, non-seizure retrain after 10*HC consecutive p < 1-CT, flag the cycle
// after the completing result, series broken by any other value, cleared by
// 'clear'. Counts how often each kind fired.
module tb_retrain_logic;
  import soul_pkg::*;
  logic clk = 0, rst_n = 0;
  logic p_valid = 0;
  prob_t p = 0, ct = 179;
  logic [4:0] hc = 7;
  logic clear = 0;
  logic retrain_sz, retrain_ns, retrain_en;
  int checks = 0, failures = 0;
  int n_sz = 0, n_ns = 0;

  retrain_logic dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sz_run, ns_run;
    bit e_sz, e_ns;
    int cts [4] = '{179, 205, 153, 230};
    int hcs [4] = '{7, 10, 1, 16};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int cfg = 0; cfg < 4; cfg++) begin
      ct <= prob_t'(cts[cfg]); hc <= 5'(hcs[cfg]);
      clear <= 1; @(posedge clk); clear <= 0;
      sz_run = 0; ns_run = 0;
      for (int n = 0; n < 3000; n++) begin
        int kind;
        // long runs: choose a regime every 40 results
        kind = (n / 40) % 5;
        case (kind)
          0, 3: p <= prob_t'($urandom_range(cts[cfg] + 1, 255));                 // confident seizure
          1:    p <= prob_t'($urandom_range(0, 255 - cts[cfg]));                  // confident non-seizure
          2:    p <= prob_t'($urandom_range(256 - cts[cfg], cts[cfg]));           // uncertain
          default: p <= prob_t'((n % 23 == 0) ? 128 : $urandom_range(0, 255 - cts[cfg]));
        endcase
        p_valid <= 1;
        @(posedge clk);
        p_valid <= 0;
        sz_run = (p > prob_t'(cts[cfg])) ? sz_run + 1 : 0;
        ns_run = (int'(p) < 256 - cts[cfg]) ? ns_run + 1 : 0;
        e_sz = sz_run >= hcs[cfg];
        e_ns = ns_run >= 10 * hcs[cfg];
        #1;
        checks++;
        if (retrain_sz != e_sz || retrain_ns != e_ns || retrain_en != (e_sz || e_ns)) begin
          failures++;
          if (failures < 10) $display("FAIL cfg %0d n %0d sz %0b/%0b ns %0b/%0b", cfg, n, retrain_sz, e_sz, retrain_ns, e_ns);
        end
        if (e_sz || e_ns) begin
          n_sz += int'(e_sz); n_ns += int'(e_ns);
          // retraining starts: clear, and the next result is a dropped sample
          clear <= 1; @(posedge clk); clear <= 0;
          #1 checks++;
          if (retrain_en) begin failures++; $display("FAIL not cleared"); end
          sz_run = 0; ns_run = 0;
        end
        if (n % 5 == 0) @(posedge clk);   // idle cycles keep state
      end
    end
    checks++;
    if (n_sz == 0 || n_ns == 0) begin failures++; $display("FAIL sz=%0d ns=%0d", n_sz, n_ns); end
    $display("retrain events: seizure %0d non-seizure %0d", n_sz, n_ns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
