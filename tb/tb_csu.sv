// tb_csu -- cyclic shifter at full width (384 lanes): random vectors,
// random lifting sizes from the 5G set (a * 2^j, a in {2,3,5,7,9,11,13,15})
// and random shifts, against dout[k] = din[(k+shift) mod Z], 0 above Z.
module tb_csu;
  logic [383:0][6:0] din, dout;
  logic [8:0]        z, shift;
  int checks = 0, failures = 0;
  localparam int ASET[8] = '{2, 3, 5, 7, 9, 11, 13, 15};

  csu dut (.din, .z, .shift, .dout);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      int zz, bad;
      do begin
        zz = ASET[$urandom_range(7)] << $urandom_range(7);
      end while (zz > 384);
      if (n == 0) zz = 384;
      if (n == 1) zz = 2;
      z = 9'(zz);
      shift = 9'($urandom_range(zz - 1));
      if (n == 2) begin z = 9'd384; shift = 9'd383; end
      for (int k = 0; k < 384; k++) din[k] = 7'($urandom);
      #1;
      bad = 0;
      for (int k = 0; k < 384; k++) begin
        logic [6:0] e;
        e = (k < int'(z)) ? din[(k + int'(shift)) % int'(z)] : 7'd0;
        if (dout[k] !== e) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL: Z=%0d shift=%0d: %0d lanes wrong", z, shift, bad);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
