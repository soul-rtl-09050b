// tb_band_power: beta-band power unit with noise plus in-band and out-of-band
// tones on the eight channels, every output compared with the reference
// (filter, square >> 10, 100-sample sum, saturation); latency two cycles. It
// also checks that a 24 Hz tone gives a clearly larger feature than a 4 Hz tone
// of the same amplitude.
module tb_band_power;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [2:0] in_ch = 0;
  sample_t in_sample = 0;
  logic out_valid;
  logic [2:0] out_ch;
  feature_t out_feature;
  int checks = 0, failures = 0;
  longint expq [$];
  feature_t last [N_CH];

  band_power #(.COEF(COEF_BETA)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    checks++;
    e = expq.pop_front();
    last[out_ch] <= out_feature;
    if (longint'(out_feature) != e) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d got %0d exp %0d", out_ch, out_feature, e);
    end
  end

  real freq [N_CH] = '{24.0, 4.0, 24.0, 150.0, 0.0, 20.0, 30.0, 8.0};
  real amp  [N_CH] = '{1024.0, 1024.0, 20000.0, 4000.0, 0.0, 500.0, 500.0, 500.0};

  initial begin
    ref_window rw;
    ref_iir rf;
    longint x, y;
    rw = new(100); rf = new(COEF_BETA);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 1200; n++)
      for (int c = 0; c < N_CH; c++) begin
        x = longint'($rtoi(amp[c] * $sin(2.0 * 3.14159265358979 * freq[c] * real'(n) / 1000.0)));
        if (c == 4) x = longint'($signed($urandom_range(0, 4000))) - 2000;
        in_valid  <= 1;
        in_ch     <= 3'(c);
        in_sample <= sample_t'(x);
        y = rf.step(c, x);
        expq.push_back(rw.push(c, (y * y) >>> 10));
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (!(last[0] > 10 * last[1])) begin
      failures++; $display("FAIL selectivity: 24 Hz %0d vs 4 Hz %0d", last[0], last[1]);
    end
    checks++;
    if (last[2] != 16'sh7fff) begin failures++; $display("FAIL no saturation: %0d", last[2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
