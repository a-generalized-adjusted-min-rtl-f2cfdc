// tb_sel_unit -- SEL phase of one lane. A random layer bundle (partial LUT
// results, completing member, new-minimum flag, first-minimum index, sign
// parity) is held while the layer's T-messages are read back in a shuffled
// order. Each cycle the R sign, the chosen magnitude and q = t + r with
// saturation are checked against a reference that completes the
// magnitudes with the reference LUT, and on the last block the partial
// parity check (XOR of the hard decisions of all updated Q-messages).
// Clears and a disabled enable are exercised on the PPC accumulator.
module tb_sel_unit;
  import gams_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, clr = 0, valid = 0, last = 0;
  logic [SLOT_W-1:0] slot = '0;
  layer_t lay = '0;
  logic signed [BVN-1:0] t = '0, q_new;
  logic r_sign, par;
  logic [MW-1:0] crit, ncrit;
  int checks = 0, failures = 0;

  `include "gams_ref.svh"

  always #5 clk = ~clk;

  sel_unit dut (.clk, .rst_n, .en, .clr, .valid, .last, .slot, .lay, .t, .q_new,
                .r_sign, .crit, .ncrit, .par);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int d, nc, cr, p;
      d = 2 + $urandom_range(17);
      @(negedge clk);
      lay.pre = MW'($urandom); lay.cpre = MW'($urandom); lay.x = MW'($urandom);
      lay.newmin = 1'($urandom); lay.vmin = SLOT_W'($urandom_range(d - 1)); lay.s = 1'($urandom);
      nc = ref_lut(int'(lay.pre), int'(lay.x));
      cr = lay.newmin ? int'(lay.pre) : ref_lut(int'(lay.cpre), int'(lay.x));
      p = 0;
      for (int i = 0; i < d; i++) begin
        int ti, sg, mg, qe;
        ti = $urandom_range(126) - 63;
        if (i > 0) @(negedge clk);
        t = BVN'(ti); slot = SLOT_W'((i * 7 + n) % d); valid = 1; last = (i == d - 1);
        if (n % 7 == 3 && i == 1) begin
          // one gated cycle: the PPC accumulator must hold
          en = 0; t = -7'sd5;
          @(negedge clk); en = 1; t = BVN'(ti);
        end
        #1;
        sg = int'(lay.s) ^ int'(ti < 0);
        mg = (int'(slot) == int'(lay.vmin)) ? cr : nc;
        qe = ref_sat((sg != 0) ? ti - mg : ti + mg, BVN);
        p ^= int'(qe < 0);
        checks++;
        if (int'(r_sign) != sg || int'(q_new) != qe || int'(crit) != cr || int'(ncrit) != nc) begin
          failures++;
          $display("FAIL: n=%0d i=%0d q=%0d/%0d sign=%0d/%0d", n, i, q_new, qe, r_sign, sg);
        end
        if (last) begin
          checks++;
          if (int'(par) != p) begin failures++; $display("FAIL: n=%0d parity", n); end
        end
      end
      @(negedge clk); valid = 0; last = 0;
    end
    // a clear drops a half-accumulated parity
    @(negedge clk); lay = '0; t = -7'sd20; slot = 5'd1; valid = 1; last = 0;
    @(negedge clk); valid = 0; clr = 1;
    @(negedge clk); clr = 0; t = 7'sd20; valid = 1; last = 1; #1;
    checks++; if (par !== 1'b0) failures++;
    @(negedge clk); valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
