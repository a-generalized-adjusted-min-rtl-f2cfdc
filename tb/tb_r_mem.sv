// tb_r_mem -- compressed R-memory with 48 lanes in two groups, 316 edge
// words and 46 layer words. All sign words and magnitude words are written
// with random contents, then a stream of back-to-back reads with random
// edge, layer, reading index and zero flag is issued; each R-message
// vector must appear two cycles after its read (registered expansion):
// zero when the zero flag was set, else the stored sign with the critical
// magnitude when the reading index equals the stored first-minimum index
// and the non-critical magnitude otherwise. Reading indices are biased so
// that the critical case is frequent.
module tb_r_mem;
  import gams_pkg::*;
  localparam int Z = 48, G = 24, NE = 316, NL = 46;
  logic clk = 0, rst_n = 0;
  logic [1:0] grp_en = 2'b11;
  logic sign_we = 0, mag_we = 0, re = 0, zero = 0;
  logic [8:0] sign_waddr = '0, sign_raddr = '0;
  logic [5:0] mag_waddr = '0, mag_raddr = '0;
  logic [Z-1:0] sign_wdata = '0;
  logic [Z-1:0][MW-1:0] crit = '0, ncrit = '0;
  logic [Z-1:0][SLOT_W-1:0] vmin = '0;
  logic [SLOT_W-1:0] slot = '0;
  logic [Z-1:0][BCN-1:0] r;
  logic [Z-1:0] msign [NE];
  logic [Z-1:0][MW-1:0] mcrit [NL], mncrit [NL];
  logic [Z-1:0][SLOT_W-1:0] mvmin [NL];
  int checks = 0, failures = 0, n_crit = 0;

  always #5 clk = ~clk;

  r_mem #(.Z_P(Z), .G_P(G), .NE(NE), .NL(NL)) dut (
    .clk, .rst_n, .grp_en, .sign_we, .sign_waddr, .sign_wdata, .mag_we, .mag_waddr,
    .crit, .ncrit, .vmin, .re, .sign_raddr, .mag_raddr, .slot, .zero, .r);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int qe[$], qm[$], qs[$], qz[$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NE; a++) begin
      @(negedge clk);
      sign_we = 1; sign_waddr = 9'(a);
      for (int k = 0; k < Z; k++) sign_wdata[k] = 1'($urandom);
      msign[a] = sign_wdata;
      mag_we = (a < NL); mag_waddr = 6'(a);
      for (int k = 0; k < Z; k++) begin
        crit[k] = MW'($urandom); ncrit[k] = MW'($urandom); vmin[k] = SLOT_W'($urandom_range(3));
      end
      if (a < NL) begin mcrit[a] = crit; mncrit[a] = ncrit; mvmin[a] = vmin; end
    end
    @(negedge clk); sign_we = 0; mag_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      re = ($urandom_range(4) != 0);
      sign_raddr = 9'($urandom_range(NE - 1)); mag_raddr = 6'($urandom_range(NL - 1));
      slot = SLOT_W'($urandom_range(3)); zero = ($urandom_range(9) == 0);
      #1;
      // the read issued two cycles ago is visible now
      if (qe.size() == 2) begin
        int e, m, s, zz;
        e = qe.pop_front(); m = qm.pop_front(); s = qs.pop_front(); zz = qz.pop_front();
        if (e >= 0) begin
          int bad; bad = 0;
          for (int k = 0; k < Z; k++) begin
            int mg, ex;
            mg = (s == int'(mvmin[m][k])) ? int'(mcrit[m][k]) : int'(mncrit[m][k]);
            if (s == int'(mvmin[m][k])) n_crit++;
            ex = (zz != 0) ? 0 : (msign[e][k] ? -mg : mg);
            if (int'(signed'(r[k])) != ex) bad++;
          end
          checks++;
          if (bad != 0) begin failures++; if (failures < 10) $display("FAIL: read %0d: %0d lanes wrong", n, bad); end
        end
      end
      qe.push_back(re ? int'(sign_raddr) : -1); qm.push_back(int'(mag_raddr));
      qs.push_back(int'(slot)); qz.push_back(int'(zero));
      // keep the reads of this cycle and the one before
      if (qe.size() > 2) begin void'(qe.pop_front()); void'(qm.pop_front()); void'(qs.pop_front()); void'(qz.pop_front()); end
    end
    checks++;
    if (n_crit == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
