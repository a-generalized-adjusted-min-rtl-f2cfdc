// tb_controller -- sequencing of the decoder with a small hand-made program
// (3 layers of degrees 3, 2 and 4 over 5 columns, 11 words, the SEL ops of
// the last layer wrapping into the first two words of the next pass). The
// testbench plays the datapath: it answers each SEL op with 'layer done' two
// cycles later and a parity failure chosen per iteration. Checked:
// LLR loading with gaps (ready, columns in order, io shifts), the NCU clear
// during the load wait, the issued MIN and SEL streams against the program
// replayed per pass (wrapped SEL ops masked in the first pass, MIN ops
// masked in the drain pass, zero R only in the first pass, layer numbers),
// termination by Imax and by early termination (iterations, PPC flag),
// that nothing is issued later than two cycles after the final SEL op and
// SEL ops are killed from then on, the output columns with inverse shifts,
// and the done pulse.
module tb_controller;
  import gams_pkg::*;
  localparam int SEQ_D = 20, PCW = 5;
  localparam int P = 11, MPL = 3, NPL = 5, ZZ = 52;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_io = 0, start = 0, cfg_et_en = 0, llr_valid = 0;
  logic [PCW-1:0] cfg_addr = '0, cfg_prog_len = PCW'(P);
  logic [INSTR_W-1:0] cfg_wdata = '0;
  logic [ZW-1:0] cfg_z = ZW'(ZZ), z;
  logic [LAYER_W-1:0] cfg_mp = LAYER_W'(MPL);
  logic [COL_W-1:0] cfg_np = COL_W'(NPL);
  logic [ITER_W-1:0] cfg_imax = '0, iters;
  logic llr_ready, ld_v, min_v, min_last, min_zero, sel_v, sel_last, sel_kill, ncu_clr;
  logic [COL_W-1:0] ld_col, min_col, sel_col, out_col;
  logic [SHIFT_W-1:0] ld_shift, min_shift, out_shift;
  logic [EDGE_W-1:0] min_edge, sel_edge;
  logic [SLOT_W-1:0] min_slot, sel_slot;
  logic [LAYER_W-1:0] min_layer, sel_layer, lay_done_idx;
  logic lay_done, lay_fail, out_v, busy, done, ppc_ok;
  int checks = 0, failures = 0;

  instr_t prog [P];
  int ios [NPL] = '{0, 7, 51, 13, 26};

  always #5 clk = ~clk;

  controller #(.SEQ_D(SEQ_D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // program: MIN ops of layer 0 (cols 0,1,2), layer 1 (cols 1,3), layer 2 (cols 0,2,3,4)
  // at words 0..8; SEL ops of layer 0 at 4..6, layer 1 at 7..8, layer 2 at 9,10,0,1
  function automatic void build();
    int mc[9] = '{0, 1, 2, 1, 3, 0, 2, 3, 4};
    int ml[9] = '{0, 0, 1, 0, 1, 0, 0, 0, 1};
    int sw[9] = '{4, 5, 6, 7, 8, 9, 10, 0, 1};
    for (int w = 0; w < P; w++) prog[w] = '0;
    for (int i = 0; i < 9; i++) begin
      prog[i].min_en = 1; prog[i].min_col = COL_W'(mc[i]); prog[i].min_shift = SHIFT_W'(i * 5);
      prog[i].min_edge = EDGE_W'(i); prog[i].min_slot = SLOT_W'(i % 4); prog[i].min_last = ml[i][0];
      prog[sw[i]].sel_en = 1; prog[sw[i]].sel_col = COL_W'(mc[i]); prog[sw[i]].sel_edge = EDGE_W'(i);
      prog[sw[i]].sel_slot = SLOT_W'(i % 4); prog[sw[i]].sel_last = ml[i][0];
      prog[sw[i]].sel_prev = (i >= 7);
    end
  endfunction

  // behavioural datapath: SEL results two cycles after issue
  logic [1:0] sv, sl;
  logic [1:0][LAYER_W-1:0] sly;
  int it_seen, fail_iters;
  always_ff @(posedge clk) begin
    sv  <= {sv[0], sel_v && !sel_kill};
    sl  <= {sl[0], sel_last};
    sly <= {sly[0], sel_layer};
    if (lay_done && lay_done_idx == LAYER_W'(MPL - 1) && !sel_kill) it_seen <= it_seen + 1;
  end
  always_comb begin
    lay_done     = sv[1] && sl[1] && !sel_kill;
    lay_done_idx = sly[1];
    lay_fail     = lay_done && (it_seen < fail_iters) && (lay_done_idx == 1);
  end

  task automatic decode(int imax, bit et, int nfail, int exp_iters, bit exp_ok);
    int cyc, minw, selw, mpass, spass, last_sel_cyc, ldc, outc, clr_n, ml_exp, sl_exp;
    bit halted_seen;
    fail_iters = nfail; it_seen = 0;
    @(negedge clk);
    cfg_imax = ITER_W'(imax); cfg_et_en = et; start = 1;
    @(negedge clk); start = 0;
    ldc = 0; minw = 0; selw = 0; mpass = 0; spass = 0; outc = 0; clr_n = 0;
    ml_exp = 0; sl_exp = 0; last_sel_cyc = -100; halted_seen = 0;
    for (cyc = 0; cyc < 2000 && !done; cyc++) begin
      llr_valid = (ldc < NPL) && ($urandom_range(2) != 0);
      #1;
      if (ld_v) begin
        chk(llr_ready && int'(ld_col) == ldc && int'(ld_shift) == ios[ldc], "load column/shift");
        ldc++;
      end
      if (ncu_clr) clr_n++;
      if (min_v) begin
        instr_t w;
        // advance to the next program word that has a MIN op
        while (!prog[minw].min_en) begin minw++; if (minw == P) begin minw = 0; mpass++; end end
        w = prog[minw];
        chk(!halted_seen && min_col == w.min_col && min_shift == w.min_shift && min_edge == w.min_edge &&
            min_slot == w.min_slot && min_last == w.min_last && int'(min_layer) == ml_exp &&
            min_zero == (mpass == 0) && mpass < imax, $sformatf("MIN op word %0d pass %0d", minw, mpass));
        if (w.min_last) ml_exp = (ml_exp + 1) % MPL;
        minw++; if (minw == P) begin minw = 0; mpass++; end
      end
      if (sel_v && !sel_kill) begin
        instr_t w;
        forever begin
          if (prog[selw].sel_en && !(prog[selw].sel_prev && spass == 0)) break;
          selw++; if (selw == P) begin selw = 0; spass++; end
        end
        w = prog[selw];
        chk(!halted_seen && sel_col == w.sel_col && sel_edge == w.sel_edge && sel_slot == w.sel_slot &&
            sel_last == w.sel_last && int'(sel_layer) == sl_exp,
            $sformatf("SEL op word %0d pass %0d", selw, spass));
        if (w.sel_last) begin sl_exp = (sl_exp + 1) % MPL; last_sel_cyc = cyc; end
        selw++; if (selw == P) begin selw = 0; spass++; end
      end
      if (sel_kill && !halted_seen) begin
        halted_seen = 1;
        chk(cyc == last_sel_cyc + 3, $sformatf("halt %0d cycles after the final SEL op", cyc - last_sel_cyc));
      end
      if (out_v) begin
        chk(int'(out_col) == outc && int'(out_shift) == ((ZZ - ios[outc]) % ZZ), "output column/shift");
        outc++;
      end
      @(negedge clk);
    end
    chk(done && !busy, "done pulse");
    chk(ldc == NPL && outc == NPL && clr_n == 4, $sformatf("load %0d out %0d clr %0d", ldc, outc, clr_n));
    chk(int'(iters) == exp_iters && ppc_ok == exp_ok,
        $sformatf("iterations %0d (expected %0d), ppc_ok %0d", iters, exp_iters, ppc_ok));
    llr_valid = 0;
  endtask

  initial begin
    build();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < P; w++) begin
      @(negedge clk); cfg_we = 1; cfg_io = 0; cfg_addr = PCW'(w); cfg_wdata = INSTR_W'(prog[w]);
    end
    for (int c = 0; c < NPL; c++) begin
      @(negedge clk); cfg_we = 1; cfg_io = 1; cfg_addr = PCW'(c); cfg_wdata = INSTR_W'(ios[c]);
    end
    @(negedge clk); cfg_we = 0;
    decode(4, 0, 100, 4, 0);   // never converges, runs Imax = 4
    decode(4, 0, 0, 4, 1);     // converges but ET off: still 4
    decode(8, 1, 2, 3, 1);     // ET after the third iteration
    decode(2, 1, 100, 2, 0);   // ET on, never converges
    decode(1, 1, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
