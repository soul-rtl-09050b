// tb_bootstrap_logic: all 256 probabilities; label = (p >= 0.5) and
// err = label - p exactly.
module tb_bootstrap_logic;
  import soul_pkg::*;
  prob_t p;
  logic label;
  logic signed [9:0] err;
  int checks = 0, failures = 0;

  bootstrap_logic dut (.*);

  initial begin
    for (int i = 0; i < 256; i++) begin
      int y;
      p = prob_t'(i);
      #1;
      y = (i >= 128) ? 1 : 0;
      checks++;
      if (label !== 1'(y) || int'(err) != y * 256 - i) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d label=%0b err=%0d", i, label, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
