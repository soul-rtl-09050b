// tb_iir_bandpass: the three band filters, each driven with white noise on
// channels 0-3 and sines on channels 4-7, compared sample by sample with the
// fixed-point reference (one cycle latency). It also checks the response: a
// sine at the band centre must pass with much more power than a sine two
// octaves away (the paper asks for at least 20 dB stopband).
module tb_iir_bandpass;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [2:0] in_ch = 0;
  sample_t in_sample = 0;
  logic ov [3];
  logic [2:0] oc [3];
  sample_t os [3];
  int checks = 0, failures = 0;
  longint expq [3][$];
  real pw [3][N_CH];

  iir_bandpass #(.COEF(COEF_ALPHA)) dut_a (.clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (ov[0]), .out_ch (oc[0]), .out_sample (os[0]));
  iir_bandpass #(.COEF(COEF_BETA))  dut_b (.clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (ov[1]), .out_ch (oc[1]), .out_sample (os[1]));
  iir_bandpass #(.COEF(COEF_GAMMA)) dut_g (.clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (ov[2]), .out_ch (oc[2]), .out_sample (os[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nout = 0;
  always @(posedge clk) if (rst_n && ov[0]) begin
    for (int b = 0; b < 3; b++) begin
      longint e;
      checks++;
      e = expq[b].pop_front();
      if (!ov[b] || longint'(os[b]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL band %0d ch %0d got %0d exp %0d", b, oc[b], os[b], e);
      end
      if (nout >= 8 * 500) pw[b][oc[b]] += real'(os[b]) * real'(os[b]);
    end
    nout++;
  end

  // test tones: band b centre on channel 4+b, far tone on channel 7
  real freq [N_CH] = '{0.0, 0.0, 0.0, 0.0, 12.0, 24.0, 64.0, 250.0};

  initial begin
    ref_iir rf [3];
    longint x;
    rf[0] = new(COEF_ALPHA); rf[1] = new(COEF_BETA); rf[2] = new(COEF_GAMMA);
    foreach (pw[b, c]) pw[b][c] = 0.0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++)
      for (int c = 0; c < N_CH; c++) begin
        if (c < 4) x = longint'($signed($urandom_range(0, 8000))) - 4000;
        else       x = longint'($rtoi(4000.0 * $sin(2.0 * 3.14159265358979 * freq[c] * real'(n) / 1000.0)));
        in_valid  <= 1;
        in_ch     <= 3'(c);
        in_sample <= sample_t'(x);
        for (int b = 0; b < 3; b++) expq[b].push_back(rf[b].step(c, x));
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    // pass band vs. 250 Hz tone, per band: at least 20 dB (x100 in power)
    for (int b = 0; b < 3; b++) begin
      checks++;
      if (!(pw[b][4 + b] > 100.0 * pw[b][7])) begin
        failures++;
        $display("FAIL band %0d in-band power %g vs 250 Hz %g", b, pw[b][4 + b], pw[b][7]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
