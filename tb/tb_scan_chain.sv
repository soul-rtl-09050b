// tb_scan_chain: shifts random 128-bit frames in (channel 0 first, MSB first),
// checks the parallel frame and the one-cycle frame_valid after scan_load, and
// checks that a captured result word streams out MSB first on scan_out,
// including retrain/drop flags that arrived before the result.
module tb_scan_chain;
  import soul_pkg::*;
  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_load = 0, scan_out;
  logic frame_valid;
  sample_t frame [N_CH];
  logic cap_valid = 0, cap_seizure = 0, cap_retrain_sz = 0, cap_retrain_ns = 0, cap_dropped = 0;
  prob_t cap_prob = 0;
  int checks = 0, failures = 0;

  scan_chain dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    sample_t s [N_CH];
    logic [15:0] word, got;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 50; n++) begin
      bit sz, ns, dr, se;
      prob_t pr;
      foreach (s[c]) s[c] = sample_t'($urandom);
      // a result arrives, with an earlier retrain / drop event
      sz = 1'($urandom); ns = !sz && 1'($urandom); dr = 1'($urandom); se = 1'($urandom); pr = prob_t'($urandom);
      cap_retrain_sz <= sz; cap_retrain_ns <= ns; cap_dropped <= dr;
      @(posedge clk);
      cap_retrain_sz <= 0; cap_retrain_ns <= 0; cap_dropped <= 0;
      repeat (2) @(posedge clk);
      cap_valid <= 1; cap_seizure <= se; cap_prob <= pr;
      @(posedge clk);
      cap_valid <= 0;
      word = {se, sz, ns, dr, 4'b0, pr};
      got = '0;
      for (int c = 0; c < N_CH; c++)
        for (int b = 15; b >= 0; b--) begin
          int i;
          i = c * 16 + (15 - b);
          if (i < 16) begin #1 got[15 - i] = scan_out; end
          scan_en <= 1; scan_in <= s[c][b];
          @(posedge clk);
        end
      scan_en <= 0;
      check(got == word, $sformatf("scan out %h exp %h", got, word));
      scan_load <= 1;
      @(posedge clk);
      scan_load <= 0;
      #1;
      check(frame_valid, "frame_valid");
      foreach (s[c]) check(frame[c] == s[c], $sformatf("frame ch %0d %h exp %h", c, frame[c], s[c]));
      @(posedge clk); #1;
      check(!frame_valid, "frame_valid one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
