// tb_ncu_pool -- the array of node units, here 48 lanes in two groups of
// 24. Each lane gets its own random messages. Layer A runs MIN with both
// groups enabled, layer B runs MIN with group 1 disabled (its clock gated),
// then one SEL pass runs with both groups enabled: group 0 lanes must
// produce layer B's results and group 1 lanes layer A's, showing that a
// disabled group keeps its state. Every lane's updated Q-messages, R signs
// and parity are checked against the reference check-node update.
module tb_ncu_pool;
  import gams_pkg::*;
  localparam int Z = 48, G = 24, D = 6;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [1:0] grp_en = 2'b11;
  logic min_valid = 0, min_last = 0, sel_valid = 0, sel_last = 0;
  logic [SLOT_W-1:0] min_slot = '0, sel_slot = '0;
  logic [Z-1:0][BVN-1:0] q = '0, t_out, t_in = '0, q_new;
  logic [Z-1:0][BCN-1:0] r = '0;
  logic [Z-1:0] r_sign, par;
  logic [Z-1:0][MW-1:0] crit, ncrit;
  logic [Z-1:0][SLOT_W-1:0] vmin;
  int checks = 0, failures = 0;
  int tv[2][Z][D];   // T-messages of layers A and B per lane

  `include "gams_ref.svh"

  always #5 clk = ~clk;

  ncu_pool #(.Z_P(Z), .G_P(G)) dut (
    .clk, .rst_n, .grp_en, .clr, .min_valid, .min_last, .min_slot, .q, .r, .t_out,
    .sel_valid, .sel_last, .sel_slot, .t_in, .q_new, .r_sign, .crit, .ncrit, .vmin, .par);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic min_layer(int id);
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      min_valid = 1; min_last = (i == D - 1); min_slot = SLOT_W'(i);
      for (int k = 0; k < Z; k++) begin
        int qi, ri;
        qi = $urandom_range(126) - 63; ri = $urandom_range(30) - 15;
        q[k] = BVN'(qi); r[k] = BCN'(ri);
        tv[id][k][i] = ref_sat(qi - ri, BVN);
      end
      #1;
      for (int k = 0; k < Z; k++) begin
        checks++;
        if (int'(signed'(t_out[k])) != tv[id][k][i]) failures++;
      end
    end
    @(negedge clk); min_valid = 0; min_last = 0;
  endtask

  initial begin
    int p[Z];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      grp_en = 2'b11; min_layer(0);
      grp_en = 2'b01; min_layer(1);
      grp_en = 2'b11;
      for (int k = 0; k < Z; k++) p[k] = 0;
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        sel_valid = 1; sel_last = (i == D - 1); sel_slot = SLOT_W'(D - 1 - i);
        for (int k = 0; k < Z; k++) t_in[k] = BVN'(tv[(k < G) ? 1 : 0][k][D - 1 - i]);
        #1;
        for (int k = 0; k < Z; k++) begin
          int id, sl[], tl[], nc, cr, vm, s, sg, mg, qe, ti;
          id = (k < G) ? 1 : 0;
          tl = new[D]; sl = new[D];
          for (int j = 0; j < D; j++) begin tl[j] = tv[id][k][j]; sl[j] = j; end
          ref_check(tl, sl, nc, cr, vm, s);
          ti = tv[id][k][D - 1 - i];
          sg = s ^ int'(ti < 0);
          mg = (D - 1 - i == vm) ? cr : nc;
          qe = ref_sat((sg != 0) ? ti - mg : ti + mg, BVN);
          p[k] ^= int'(qe < 0);
          checks++;
          if (int'(signed'(q_new[k])) != qe || int'(r_sign[k]) != sg) begin
            failures++;
            if (failures < 10) $display("FAIL: rep %0d lane %0d edge %0d q=%0d/%0d", rep, k, i, signed'(q_new[k]), qe);
          end
          if (sel_last) begin
            checks++;
            if (int'(par[k]) != p[k]) failures++;
          end
        end
      end
      @(negedge clk); sel_valid = 0; sel_last = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
