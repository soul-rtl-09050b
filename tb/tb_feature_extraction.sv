// tb_feature_extraction: random-walk EEG-like signals with occasional bursts
// on 8 channels; all four features of every channel and sample compared with
// the reference, two cycles after the input, channel ID carried along.
module tb_feature_extraction;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [2:0] in_ch = 0;
  sample_t in_sample = 0;
  logic feat_valid;
  logic [2:0] feat_ch;
  feature_t feat [N_FEAT];
  int checks = 0, failures = 0;
  longint expq [$];
  int chq [$];

  feature_extraction dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && feat_valid) begin
    int c;
    c = chq.pop_front();
    checks++;
    if (feat_ch != 3'(c)) begin failures++; $display("FAIL channel %0d exp %0d", feat_ch, c); end
    for (int k = 0; k < 4; k++) begin
      longint e;
      e = expq.pop_front();
      checks++;
      if (longint'(feat[k]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL ch %0d feature %0d got %0d exp %0d", c, k, feat[k], e);
      end
    end
  end

  initial begin
    ref_features rf;
    longint x [N_CH];
    longint f [4];
    rf = new(100);
    foreach (x[c]) x[c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 600; n++)
      for (int c = 0; c < N_CH; c++) begin
        x[c] = sat(x[c] - (x[c] >>> 4) + $signed($urandom_range(0, 600)) - 300, -32768, 32767);
        if (n > 300 && n < 400 && c < 3)
          x[c] = longint'($rtoi(3000.0 * $sin(2.0 * 3.14159265358979 * 20.0 * real'(n) / 1000.0)));
        in_valid  <= 1;
        in_ch     <= 3'(c);
        in_sample <= sample_t'(x[c]);
        rf.step(c, x[c], f);
        for (int k = 0; k < 4; k++) expq.push_back(f[k]);
        chq.push_back(c);
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (chq.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
