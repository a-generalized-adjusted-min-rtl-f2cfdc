// tb_boxplus_lut -- exhaustive test of the box-plus LUT: all 256 input
// pairs against the table formula evaluated here in floating point,
// plus spot values of the published curve shape (LUT(a,b) = min(a,b) when
// the magnitudes are far apart, symmetric in a and b).
module tb_boxplus_lut;
  logic [3:0] a, b, y;
  int checks = 0, failures = 0;

  boxplus_lut dut (.a, .b, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_lut(int i, int j);
    real x, z, dd; int corr, mn;
    x = 0.5 * i; z = 0.5 * j;
    dd = $ln(1.0 + $exp(-(x + z))) - $ln(1.0 + $exp(-((x > z) ? x - z : z - x)));
    if (dd < 0) dd = -dd;
    corr = int'($floor(dd / 0.5 + 0.25 + 0.5));
    mn = (i < j) ? i : j;
    return (mn > corr) ? mn - corr : 0;
  endfunction

  initial begin
    int ysym;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
      a = 4'(i); b = 4'(j); #1;
      checks++;
      if (int'(y) != ref_lut(i, j)) begin
        failures++;
        $display("FAIL: LUT(%0d,%0d) = %0d, expected %0d", i, j, y, ref_lut(i, j));
      end
      ysym = int'(y);
      a = 4'(j); b = 4'(i); #1;
      checks++;
      if (int'(y) != ysym) failures++;
    end
    a = 4'd2; b = 4'd15; #1; checks++; if (y != 4'd2) failures++;
    a = 4'd15; b = 4'd15; #1; checks++; if (y != 4'd13) failures++;
    a = 4'd1; b = 4'd1; #1; checks++; if (y != 4'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
