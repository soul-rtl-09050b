// tb_channel_mux: sends random 8-channel frames back to back (every 8 cycles)
// and with gaps, and checks that each frame comes out one channel per cycle in
// order 0..7 starting the cycle after sample_valid, and that a sample_valid
// during a frame is ignored and flagged as overrun.
module tb_channel_mux;
  import soul_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sample_valid = 0;
  sample_t samples [N_CH];
  logic ch_valid, overrun;
  logic [2:0] ch_id;
  sample_t ch_sample;
  int checks = 0, failures = 0;

  channel_mux dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    sample_t exp [N_CH];
    int n_overrun = 0;
    foreach (samples[c]) samples[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < 20; f++) begin
      foreach (samples[c]) begin samples[c] = sample_t'($urandom); exp[c] = samples[c]; end
      sample_valid <= 1;
      @(posedge clk);
      sample_valid <= 0;
      foreach (samples[c]) samples[c] <= sample_t'($urandom);  // must not matter
      for (int c = 0; c < N_CH; c++) begin
        #1;
        check(ch_valid && ch_id == 3'(c) && ch_sample == exp[c],
              $sformatf("frame %0d ch %0d: v=%0b id=%0d s=%0h exp %0h", f, c, ch_valid, ch_id, ch_sample, exp[c]));
        if (f == 5 && c == 3) sample_valid <= 1;              // overrun attempt
        @(posedge clk);
        sample_valid <= 0;
        #1;
        if (f == 5 && c == 3) begin check(overrun, "overrun flagged"); n_overrun++; end
        else check(!overrun, "no overrun");
      end
      if (f % 3 == 2) begin
        #1 check(!ch_valid, "idle after frame");
        repeat (4) @(posedge clk);
      end
    end
    check(n_overrun == 1, "overrun exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
