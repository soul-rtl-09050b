// tb_sigmoid_lut: random and boundary dot products; p must equal the table row
// computed from floor(z) with $exp, and round(p) must agree with sign(z).
module tb_sigmoid_lut;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  dot_t z;
  prob_t p;
  int checks = 0, failures = 0;

  sigmoid_lut dut (.*);

  task automatic try(longint zz);
    z = dot_t'(zz);
    #1;
    checks++;
    if (int'(p) != prob_of(zz) || ((p >= 128) != (zz >= 0))) begin
      failures++;
      if (failures < 10) $display("FAIL z=%0d p=%0d exp %0d", zz, p, prob_of(zz));
    end
  endtask

  initial begin
    for (longint i = -8; i <= 8; i++) begin
      try(i <<< 20); try((i <<< 20) - 1); try((i <<< 20) + 1);
    end
    try(-(longint'(1) <<< 36)); try((longint'(1) <<< 36) - 1);
    for (int n = 0; n < 2000; n++) try(longint'($signed($urandom)) >>> $urandom_range(0, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
