// tb_window_accumulator: random values for 8 channels in round-robin order
// through a 7-sample window (and, in a second instance, the default 100-sample
// window); every output is compared with the sum of the last W inputs of that
// channel, saturated to 16 bits, including while the window is still filling
// and in saturation. Output must follow the input by one cycle.
module tb_window_accumulator;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  localparam int W_SMALL = 7;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [2:0] in_ch = 0;
  logic [20:0] in_value = 0;
  logic ov_s, ov_b;
  logic [2:0] oc_s, oc_b;
  logic signed [15:0] o_s, o_b;
  int checks = 0, failures = 0;

  window_accumulator #(.W(W_SMALL)) dut_s (.clk, .rst_n, .in_valid, .in_ch, .in_value,
    .out_valid (ov_s), .out_ch (oc_s), .out_value (o_s));
  window_accumulator dut_b (.clk, .rst_n, .in_valid, .in_ch, .in_value,
    .out_valid (ov_b), .out_ch (oc_b), .out_value (o_b));

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
    ref_window rs, rb;
    longint es, eb;
    rs = new(W_SMALL); rb = new(100);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 250; n++) begin
      for (int c = 0; c < N_CH; c++) begin
        // small values mostly; large ones in a burst to reach saturation
        in_value <= (n >= 120 && n < 140) ? 21'($urandom_range(2000, 9000)) : 21'($urandom_range(0, 400));
        in_ch    <= 3'(c);
        in_valid <= 1;
        @(posedge clk);
        es = rs.push(c, longint'(in_value));
        eb = rb.push(c, longint'(in_value));
        #1;
        check(ov_s && oc_s == 3'(c) && longint'(o_s) == es, $sformatf("W=7 n=%0d c=%0d got %0d exp %0d", n, c, o_s, es));
        check(ov_b && oc_b == 3'(c) && longint'(o_b) == eb, $sformatf("W=100 n=%0d c=%0d got %0d exp %0d", n, c, o_b, eb));
        if (n % 17 == 3 && c == 4) begin   // a bubble must not advance anything
          in_valid <= 0;
          @(posedge clk);
          #1 check(!ov_s && !ov_b, "bubble");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
