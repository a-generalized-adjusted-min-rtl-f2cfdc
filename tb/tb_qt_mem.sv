// tb_qt_mem -- Q/T memory wrapper with 48 lanes in two groups of 24 and
// 68 words. Random reads and writes (often to the column just read or
// about to be read) are compared with an array model in which a read
// returns, one cycle later, the column's newest value including a write in
// the read cycle and a write in the cycle the data comes out. Both
// forwarding paths are counted and must be used. A phase with group 1
// disabled checks that its SRAM is not written.
module tb_qt_mem;
  import gams_pkg::*;
  localparam int Z = 48, G = 24, W = 7, DEPTH = 68;
  logic clk = 0, rst_n = 0;
  logic [1:0] grp_en = 2'b11;
  logic we = 0, re = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [Z-1:0][W-1:0] wdata = '0, rdata;
  logic [Z-1:0][W-1:0] model [DEPTH];
  int checks = 0, failures = 0, n_direct = 0, n_reg = 0;

  always #5 clk = ~clk;

  qt_mem #(.Z_P(Z), .G_P(G), .W(W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .grp_en, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [Z-1:0][W-1:0] rnd_vec();
    logic [Z-1:0][W-1:0] v;
    for (int k = 0; k < Z; k++) v[k] = W'($urandom);
    return v;
  endfunction

  initial begin
    logic [6:0] pra, pwa;
    bit pre, pwe;
    logic [Z-1:0] mask, pmask;
    pmask = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = rnd_vec(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    @(negedge clk);
    pre = 0; pwe = 0; pra = '0; pwa = '0;
    for (int n = 0; n < 4000; n++) begin
      logic [Z-1:0][W-1:0] e;
      bit gated;
      gated = (n >= 3000 && n < 3500);
      mask = gated ? {{G{1'b0}}, {G{1'b1}}} : '1;
      @(negedge clk);
      grp_en = gated ? 2'b01 : 2'b11;
      // inputs of this cycle
      re = $urandom_range(3) != 0;
      raddr = 7'($urandom_range(7));        // small range: frequent collisions
      we = 1'($urandom_range(1));
      waddr = ($urandom_range(2) == 0) ? pra : 7'($urandom_range(7));
      wdata = rnd_vec();
      #1;
      if (pre) begin
        // expected: model after the previous cycle's write, overridden by this cycle's write
        e = model[pra];
        if (we && waddr == pra) begin e = wdata; n_direct++; end
        else if (pwe && pwa == pra) n_reg++;
        checks++;
        if (((rdata ^ e) & {Z{7'h7f}} & expand(mask & pmask)) != '0) begin
          failures++; if (failures < 10) $display("FAIL: cycle %0d addr %0d", n, pra);
        end
      end
      // commit this cycle
      if (we) for (int k = 0; k < Z; k++) if (mask[k]) model[waddr][k] = wdata[k];
      pre = re; pra = raddr; pwe = we; pwa = waddr; pmask = mask;
      if (!re) pre = 0;
    end
    @(negedge clk); we = 0; re = 0;
    checks++;
    if (n_direct == 0 || n_reg == 0) begin failures++; $display("FAIL: forwarding paths not exercised"); end
    // read back everything with both groups enabled: group 1 must be untouched by the gated phase
    for (int a = 0; a < 8; a++) begin
      @(negedge clk); re = 1; raddr = 7'(a);
      @(negedge clk); re = 0; #1;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL: final readback addr %0d", a); end
    end
    $display("forwarding: direct=%0d registered=%0d", n_direct, n_reg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [Z-1:0][W-1:0] expand(logic [Z-1:0] m);
    logic [Z-1:0][W-1:0] v;
    for (int k = 0; k < Z; k++) v[k] = {W{m[k]}};
    return v;
  endfunction
endmodule
