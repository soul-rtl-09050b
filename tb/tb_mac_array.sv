// tb_mac_array: random features, weights and error terms; classification mode
// must give the exact sum of the four products, retraining mode
// w + floor(err * (x >> 6) / 256), saturated to 16 bits.
module tb_mac_array;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  mode_e mode;
  feature_t x [N_FEAT];
  weight_t w [N_FEAT];
  logic signed [9:0] err;
  dot_t psum;
  weight_t w_next [N_FEAT];
  int checks = 0, failures = 0;

  mac_array dut (.*);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint s, e;
      for (int k = 0; k < 4; k++) begin
        x[k] = feature_t'($urandom_range(0, 32767));
        w[k] = (n % 10 == 0) ? ((k % 2) ? 16'sh7ff0 : 16'sh8010) : weight_t'($urandom);
      end
      err  = 10'($signed($urandom_range(0, 512)) - 256);
      mode = MODE_CLASSIFY;
      #1;
      s = 0;
      for (int k = 0; k < 4; k++) s += longint'(x[k]) * longint'(w[k]);
      checks++;
      if (longint'(psum) != s) begin failures++; if (failures < 10) $display("FAIL psum %0d exp %0d", psum, s); end
      mode = MODE_RETRAIN;
      #1;
      for (int k = 0; k < 4; k++) begin
        e = sat(longint'(w[k]) + ((longint'(err) * (longint'(x[k]) >>> 6)) >>> 8), -32768, 32767);
        checks++;
        if (longint'(w_next[k]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL w_next[%0d] %0d exp %0d", k, w_next[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
