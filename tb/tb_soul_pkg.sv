// tb_soul_pkg: checks the shared package: the ten logistic-table rows against
// 256 * sigma(mid-point) computed with $exp, the row selection of sigmoid_row at
// and around every row boundary, and the 16-bit saturation helper.
module tb_soul_pkg;
  import soul_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    dot_t z;
    for (int r = 0; r < LUT_ROWS; r++)
      check(int'(SIGMOID_ROWS[r]) == lut_value(r), $sformatf("row %0d = %0d, expected %0d", r, SIGMOID_ROWS[r], lut_value(r)));
    for (int zi = -7; zi <= 7; zi++) begin
      int exp_row;
      exp_row = (zi < -4) ? 0 : (zi > 3) ? 9 : zi + 5;
      z = dot_t'(zi) <<< DOT_FRAC;                         // exactly zi
      check(sigmoid_row(z) == exp_row, $sformatf("row(%0d)", zi));
      z = (dot_t'(zi) <<< DOT_FRAC) - 1;                   // just below zi
      exp_row = (zi - 1 < -4) ? 0 : (zi - 1 > 3) ? 9 : zi - 1 + 5;
      check(sigmoid_row(z) == exp_row, $sformatf("row(%0d - eps)", zi));
    end
    check(sat16(48'sd40000) == 16'sh7fff, "sat high");
    check(sat16(-48'sd40000) == 16'sh8000, "sat low");
    check(sat16(-48'sd5) == -16'sd5, "sat pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
