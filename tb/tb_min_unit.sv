// tb_min_unit -- MIN phase of one lane. Random layers of degree 2..19 with
// random Q and R messages (including saturating values) are fed one block
// per cycle; every T-message is checked against q - r with saturation, and
// on the last block the bundle for the SEL phase is checked by completing
// the magnitudes with the reference LUT (non-critical, critical), and
// against the reference index of the first minimum and sign parity. A
// clear in the middle of a layer must restart the state, and a disabled
// clock enable must freeze it.
module tb_min_unit;
  import gams_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, clr = 0, valid = 0, last = 0;
  logic [SLOT_W-1:0] slot = '0;
  logic signed [BVN-1:0] q = '0, t;
  logic signed [BCN-1:0] r = '0;
  layer_t lay;
  int checks = 0, failures = 0;

  `include "gams_ref.svh"

  always #5 clk = ~clk;

  min_unit dut (.clk, .rst_n, .en, .clr, .valid, .last, .slot, .q, .r, .t, .lay);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int d, bit gate_mid, bit clr_mid);
    int tv[], sl[], nc, cr, vm, s;
    tv = new[d]; sl = new[d];
    for (int i = 0; i < d; i++) begin
      int qi, ri;
      qi = $urandom_range(126) - 63; ri = $urandom_range(30) - 15;
      if ($urandom_range(9) == 0) qi = ($urandom_range(1) != 0) ? 63 : -63;
      sl[i] = (i + 3) % 20;
      @(negedge clk);
      q = BVN'(qi); r = BCN'(ri); slot = SLOT_W'(sl[i]);
      valid = 1; last = (i == d - 1);
      #1;
      tv[i] = ref_sat(qi - ri, BVN);
      checks++;
      if (int'(t) != tv[i]) begin failures++; $display("FAIL: t=%0d expected %0d", t, tv[i]); end
      if (gate_mid && i == d / 2 && i < d - 1) begin
        // a gated cycle with a bogus block must not change the state
        @(negedge clk); en = 0; q = 7'sd1; r = '0; last = 0;
        @(posedge clk); #1 en = 1;
      end
    end
    #1;
    ref_check(tv, sl, nc, cr, vm, s);
    checks++;
    if (ref_lut(int'(lay.pre), int'(lay.x)) != nc) begin
      failures++; $display("FAIL: d=%0d non-critical %0d expected %0d", d, ref_lut(int'(lay.pre), int'(lay.x)), nc);
    end
    checks++;
    if ((lay.newmin ? int'(lay.pre) : ref_lut(int'(lay.cpre), int'(lay.x))) != cr) begin
      failures++; $display("FAIL: d=%0d critical mismatch", d);
    end
    checks++;
    if (int'(lay.vmin) != vm || int'(lay.s) != s) begin
      failures++; $display("FAIL: d=%0d vmin %0d/%0d s %0d/%0d", d, lay.vmin, vm, lay.s, s);
    end
    @(negedge clk); valid = 0; last = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) run_layer(2 + $urandom_range(17), n % 5 == 1, 0);
    // clear in the middle of a partial layer, then a fresh layer
    @(negedge clk); valid = 1; q = 7'sd1; r = '0; slot = '0; last = 0;
    @(negedge clk); valid = 0; clr = 1;
    @(negedge clk); clr = 0;
    run_layer(5, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
