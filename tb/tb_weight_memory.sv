// tb_weight_memory: random word writes, group writes and reads against a
// shadow array; a word write takes priority over a group write in the same
// cycle; reset clears all weights.
module tb_weight_memory;
  import soul_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] grp = 0;
  weight_t grp_rdata [N_FEAT];
  logic grp_we = 0;
  weight_t grp_wdata [N_FEAT];
  logic word_we = 0;
  logic [4:0] word_addr = 0;
  weight_t word_wdata = 0;
  weight_t word_rdata;
  int checks = 0, failures = 0;
  weight_t shadow [32];

  weight_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (shadow[i]) shadow[i] = '0;
    foreach (grp_wdata[k]) grp_wdata[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 32; i++) begin
      word_addr = 5'(i); #1;
      check(word_rdata == 0, "reset value");
    end
    for (int n = 0; n < 2000; n++) begin
      word_we    = ($urandom_range(0, 2) == 0);
      grp_we     = ($urandom_range(0, 1) == 0);
      word_addr  = 5'($urandom);
      word_wdata = weight_t'($urandom);
      grp        = 3'($urandom);
      foreach (grp_wdata[k]) grp_wdata[k] = weight_t'($urandom);
      #1;
      for (int k = 0; k < 4; k++) check(grp_rdata[k] == shadow[grp * 4 + k], "group read");
      check(word_rdata == shadow[word_addr], "word read");
      @(posedge clk);
      if (word_we) shadow[word_addr] = word_wdata;
      else if (grp_we) for (int k = 0; k < 4; k++) shadow[grp * 4 + k] = grp_wdata[k];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
