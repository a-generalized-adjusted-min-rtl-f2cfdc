// tb_ncu -- one node computation unit running layers back to back, as in
// the decoder: the SEL phase of layer L overlaps the MIN phase of layer
// L+1 (the pipeline register decouples them). Q- and R-messages are random;
// the T-messages produced by MIN are fed back as SEL inputs. Every updated
// Q-message, R sign, the stored magnitudes and first-minimum index, and the
// layer parity are checked against the reference check-node update.
module tb_ncu;
  import gams_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, clr = 0;
  logic min_valid = 0, min_last = 0, sel_valid = 0, sel_last = 0;
  logic [SLOT_W-1:0] min_slot = '0, sel_slot = '0, vmin;
  logic signed [BVN-1:0] q = '0, t_out, t_in = '0, q_new;
  logic signed [BCN-1:0] r = '0;
  logic r_sign, par;
  logic [MW-1:0] crit, ncrit;
  int checks = 0, failures = 0;

  `include "gams_ref.svh"

  always #5 clk = ~clk;

  ncu dut (.clk, .rst_n, .en, .clr, .min_valid, .min_last, .min_slot, .q, .r, .t_out,
           .sel_valid, .sel_last, .sel_slot, .t_in, .q_new, .r_sign, .crit, .ncrit,
           .vmin, .par);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pt[], ps[];          // T-messages and slots of the layer awaiting SEL
    int pnc, pcr, pvm, pss;
    repeat (2) @(negedge clk);
    rst_n = 1;
    pt = new[0];
    for (int n = 0; n < 300; n++) begin
      int d, w, ct[], cs[], p;
      d = (n == 299) ? 0 : 2 + $urandom_range(17);   // last window only drains
      w = (d > pt.size()) ? d : pt.size();
      ct = new[d]; cs = new[d];
      p = 0;
      for (int c = 0; c < w; c++) begin
        int mi, si;
        @(negedge clk);
        mi = c - (w - d);             // MIN ops at the end of the window
        si = c;                       // SEL ops at the start
        min_valid = (mi >= 0); sel_valid = (si < pt.size());
        min_last = (mi == d - 1); sel_last = (si == pt.size() - 1);
        if (min_valid) begin
          int qi, ri;
          qi = $urandom_range(126) - 63; ri = $urandom_range(30) - 15;
          q = BVN'(qi); r = BCN'(ri); min_slot = SLOT_W'(mi);
          cs[mi] = mi; ct[mi] = ref_sat(qi - ri, BVN);
        end
        if (sel_valid) begin
          t_in = BVN'(pt[si]); sel_slot = SLOT_W'(ps[si]);
        end
        #1;
        if (min_valid) begin
          checks++;
          if (int'(t_out) != ct[mi]) failures++;
        end
        if (sel_valid) begin
          int sg, mg, qe;
          sg = pss ^ int'(pt[si] < 0);
          mg = (ps[si] == pvm) ? pcr : pnc;
          qe = ref_sat((sg != 0) ? pt[si] - mg : pt[si] + mg, BVN);
          p ^= int'(qe < 0);
          checks++;
          if (int'(q_new) != qe || int'(r_sign) != sg) begin
            failures++; $display("FAIL: layer %0d edge %0d q=%0d/%0d", n - 1, si, q_new, qe);
          end
          if (sel_last) begin
            checks++;
            if (int'(par) != p || int'(crit) != pcr || int'(ncrit) != pnc || int'(vmin) != pvm) begin
              failures++; $display("FAIL: layer %0d summary", n - 1);
            end
          end
        end
      end
      if (d > 0) ref_check(ct, cs, pnc, pcr, pvm, pss);
      pt = ct; ps = cs;
    end
    @(negedge clk); min_valid = 0; sel_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
