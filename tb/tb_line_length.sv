// tb_line_length: a random-walk signal on 8 channels (with full-scale jumps to
// reach saturation), checked sample by sample against the sum of |x[i]-x[i-1]|
// over the last 100 samples of each channel; latency must be two cycles.
module tb_line_length;
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
  int chq [$];
  time lat [$];
  
  line_length dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; time t; int c;
    checks++;
    e = expq.pop_front(); t = lat.pop_front(); c = chq.pop_front();
    if (longint'(out_feature) != e || $time - t != 20 || out_ch != 3'(c)) begin
      failures++;
      if (failures < 10) $display("FAIL got %0d exp %0d latency %0t", out_feature, e, $time - t);
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
    for (int n = 0; n < 300; n++)
      for (int c = 0; c < N_CH; c++) begin
        if (n >= 200 && n < 230) x[c] = (n % 2) ? 32000 : -32000;
        else x[c] = sat(x[c] + $signed($urandom_range(0, 800)) - 400, -32768, 32767);
        in_valid  <= 1;
        in_ch     <= 3'(c);
        in_sample <= sample_t'(x[c]);
        rf.step(c, x[c], f);
        expq.push_back(f[0]);
        chq.push_back(c);
        @(posedge clk);
        lat.push_back($time);   // edge that samples the input
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
