// dec_tb_common.svh -- shared body of the end-to-end decoder testbenches.
//
// Included inside a testbench module that has declared localparam ZP
// (lanes of the decoder), GP (lanes per group), SEQ_D/NPM/NLM/NEM (memory
// sizes) and instantiated ldpc_decoder as 'dut' on the signals below.
//
// It builds a random quasi-cyclic prototype matrix in the 5G style (a few
// dense core rows, then extension rows that each add one degree-one parity
// column), compiles the layered schedule into an instruction program with
// the decoder's pipeline hazards (stalls for data dependencies and for row
// synchronisation), loads noisy LLRs of the all-zero codeword (a codeword of
// every linear code), decodes, and compares hard decisions, iteration count
// and PPC flag with a bit-accurate layered GA-MS model written here from the
// algorithm: t = q - r, three minima, box-plus LUT from its formula,
// r = s*sgn(t)*m, q = t + r, partial parity checks per layer.

import gams_pkg::*;

localparam int PCW = $clog2(SEQ_D + 1);

logic clk = 1'b0;
logic rst_n = 1'b0;
always #5 clk = ~clk;

logic                    cfg_we = 1'b0, cfg_io = 1'b0;
logic [PCW-1:0]          cfg_addr = '0;
logic [INSTR_W-1:0]      cfg_wdata = '0;
logic                    start = 1'b0;
logic [ZW-1:0]           cfg_z = '0;
logic [LAYER_W-1:0]      cfg_mp = '0;
logic [COL_W-1:0]        cfg_np = '0;
logic [ITER_W-1:0]       cfg_imax = '0;
logic [PCW-1:0]          cfg_prog_len = '0;
logic                    cfg_et_en = 1'b0;
logic                    llr_valid = 1'b0, llr_ready;
logic [ZP-1:0][BVN-1:0]  llr_data = '0;
logic                    out_valid;
logic [COL_W-1:0]        out_col;
logic [ZP-1:0]           out_hd;
logic                    busy, done, ppc_ok;
logic [ITER_W-1:0]       iters;

int checks = 0, failures = 0;
longint cyc = 0;
always @(posedge clk) cyc <= cyc + 1;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL: %s", what);
  end
endtask

// ------------------------------------------------------------------
// prototype matrix and program
// ------------------------------------------------------------------
int MP, NPC, Z;
int H    [NLM][NPM];        // shift, -1 = no block
int deg  [NLM];
int cols [NLM][20];         // columns of a row, ascending
int edge_id [NLM][NPM];
int slot_of [NLM][NPM];
int min_ord [NLM][20];
int sel_ord [NLM][20];
instr_t prog [SEQ_D];
int P;
int io_sh [NPM];
int rel_sh [NLM][NPM];
int jlast_final;             // issue cycle of the last SEL op of the last layer
int n_dep_stall, n_sync_stall, n_prev_ops;

function automatic bit in_row(int c, int v);
  return H[c][v] >= 0;
endfunction

// Random 5G-like graph: R0 core rows of degree dcore over the CC core
// columns; each further row: its own parity column plus random core columns.
task automatic make_graph(int mp, int np, int r0, int dcore, int dmin, int dmax, int etarget, int z);
  int cc, sum, d, k, v;
  bit used[NPM];
  MP = mp; NPC = np; Z = z;
  cc = np - (mp - r0);
  for (int c = 0; c < mp; c++) for (int j = 0; j < np; j++) H[c][j] = -1;
  sum = 0;
  for (int c = 0; c < mp; c++) begin
    deg[c] = (c < r0) ? dcore : dmin + int'($urandom_range(dmax - dmin));
    sum += deg[c];
  end
  if (etarget > 0) begin
    while (sum < etarget) begin
      k = r0 + int'($urandom_range(mp - r0 - 1));
      if (deg[k] < dmax) begin deg[k]++; sum++; end
    end
    while (sum > etarget) begin
      k = r0 + int'($urandom_range(mp - r0 - 1));
      if (deg[k] > dmin) begin deg[k]--; sum--; end
    end
  end
  for (int c = 0; c < mp; c++) begin
    for (int j = 0; j < np; j++) used[j] = 0;
    d = deg[c];
    if (c >= r0) begin
      used[cc + c - r0] = 1; d--;
    end
    while (d > 0) begin
      v = int'($urandom_range(cc - 1));
      if (!used[v]) begin used[v] = 1; d--; end
    end
    k = 0;
    for (int j = 0; j < np; j++) if (used[j]) begin
      H[c][j] = int'($urandom_range(z - 1));
      cols[c][k] = j; k++;
    end
  end
endtask

// Move the first n rows to the end (dense rows processed last).
task automatic rotate_rows(int n);
  int h2[NLM][NPM], d2[NLM], c2[NLM][20];
  for (int c = 0; c < MP; c++) begin
    int src; src = (c + n) % MP;
    d2[c] = deg[src];
    for (int j = 0; j < NPC; j++) h2[c][j] = H[src][j];
    for (int k = 0; k < 20; k++) c2[c][k] = cols[src][k];
  end
  for (int c = 0; c < MP; c++) begin
    deg[c] = d2[c];
    for (int j = 0; j < NPC; j++) H[c][j] = h2[c][j];
    for (int k = 0; k < 20; k++) cols[c][k] = c2[c][k];
  end
endtask

// Order rows r0..MP-1 by descending degree, keeping rows 0..r0-1 first:
// with the dense rows at the start this gives the row-degree profile a
// single peak, so row-synchronisation stalls add up to dmax - dmin.
task automatic sort_rows(int r0);
  for (int a = r0; a < MP; a++) for (int b = a + 1; b < MP; b++) if (deg[b] > deg[a]) begin
    int td, th, tc;
    td = deg[a]; deg[a] = deg[b]; deg[b] = td;
    for (int j = 0; j < NPC; j++) begin th = H[a][j]; H[a][j] = H[b][j]; H[b][j] = th; end
    for (int k = 0; k < 20; k++) begin tc = cols[a][k]; cols[a][k] = cols[b][k]; cols[b][k] = tc; end
  end
endtask

// Compile the layered schedule into a program (see the top's hazard rules).
task automatic make_program();
  int e, lastsel[NPM], inext, jnext, ilast[NLM], jlast[NLM], i, j, ns, k, d0, p;
  int cyc_min[NLM][20], cyc_sel[NLM][20], nxt, prv, cnt;
  e = 0;
  for (int c = 0; c < MP; c++)
    for (int k2 = 0; k2 < deg[c]; k2++) begin
      edge_id[c][cols[c][k2]] = e; slot_of[c][cols[c][k2]] = k2; e++;
    end
  // visiting orders: MIN takes the columns shared with the previous layer
  // last, SEL takes the columns shared with the next layer first
  for (int c = 0; c < MP; c++) begin
    prv = (c + MP - 1) % MP; nxt = (c + 1) % MP;
    cnt = 0;
    for (int k2 = 0; k2 < deg[c]; k2++) if (!in_row(prv, cols[c][k2])) begin min_ord[c][cnt] = cols[c][k2]; cnt++; end
    for (int k2 = 0; k2 < deg[c]; k2++) if ( in_row(prv, cols[c][k2])) begin min_ord[c][cnt] = cols[c][k2]; cnt++; end
    cnt = 0;
    for (int k2 = 0; k2 < deg[c]; k2++) if ( in_row(nxt, cols[c][k2])) begin sel_ord[c][cnt] = cols[c][k2]; cnt++; end
    for (int k2 = 0; k2 < deg[c]; k2++) if (!in_row(nxt, cols[c][k2])) begin sel_ord[c][cnt] = cols[c][k2]; cnt++; end
  end
  // rotations
  for (int v = 0; v < NPC; v++) begin
    io_sh[v] = 0;
    for (int c = 0; c < MP; c++) if (in_row(c, v)) io_sh[v] = H[c][v];
  end
  for (int c = 0; c < MP; c++) for (int v = 0; v < NPC; v++) if (in_row(c, v)) begin
    prv = c;
    for (int s = 1; s <= MP; s++) if (in_row((c + MP - s) % MP, v)) begin prv = (c + MP - s) % MP; break; end
    rel_sh[c][v] = (Z + H[c][v] - H[prv][v]) % Z;
  end
  // schedule
  for (int v = 0; v < NPM; v++) lastsel[v] = -100;
  n_dep_stall = 0; n_sync_stall = 0;
  for (int k2 = 0; k2 < deg[0]; k2++) cyc_min[0][k2] = k2;
  ilast[0] = deg[0] - 1; inext = deg[0]; jnext = 0;
  d0 = deg[0];
  for (int l = 1; l <= MP; l++) begin
    ns = jnext > ilast[l-1] + 2 ? jnext : ilast[l-1] + 2;
    for (int k2 = 0; k2 < deg[l-1]; k2++) begin
      cyc_sel[l-1][k2] = ns + k2; lastsel[sel_ord[l-1][k2]] = ns + k2;
    end
    jlast[l-1] = ns + deg[l-1] - 1; jnext = jlast[l-1] + 1;
    if (l < MP) begin
      for (int k2 = 0; k2 < deg[l]; k2++) begin
        i = inext;
        if (lastsel[min_ord[l][k2]] + 1 > i) begin
          n_dep_stall += lastsel[min_ord[l][k2]] + 1 - i;
          i = lastsel[min_ord[l][k2]] + 1;
        end
        cyc_min[l][k2] = i; inext = i + 1;
      end
      ilast[l] = inext - 1;
      if (ilast[l] < jlast[l-1] - 1) begin
        n_sync_stall += jlast[l-1] - 1 - ilast[l];
        ilast[l] = jlast[l-1] - 1; cyc_min[l][deg[l]-1] = ilast[l]; inext = ilast[l] + 1;
      end
    end
  end
  p = inext;
  for (int k2 = 0; k2 < d0; k2++) if (lastsel[min_ord[0][k2]] + 1 - k2 > p) p = lastsel[min_ord[0][k2]] + 1 - k2;
  if (jlast[MP-1] - 1 - (d0 - 1) > p) p = jlast[MP-1] - 1 - (d0 - 1);
  P = p;
  jlast_final = jlast[MP-1];
  if (P > SEQ_D) return;
  for (int w = 0; w < SEQ_D; w++) prog[w] = '0;
  for (int c = 0; c < MP; c++) for (int k2 = 0; k2 < deg[c]; k2++) begin
    int v;
    v = min_ord[c][k2]; i = cyc_min[c][k2];
    prog[i].min_en = 1; prog[i].min_col = COL_W'(v); prog[i].min_shift = SHIFT_W'(rel_sh[c][v]);
    prog[i].min_edge = EDGE_W'(edge_id[c][v]); prog[i].min_slot = SLOT_W'(slot_of[c][v]);
    prog[i].min_last = (k2 == deg[c] - 1);
    v = sel_ord[c][k2]; j = cyc_sel[c][k2];
    if (j >= P) begin j -= P; if (prog[j].sel_en) $fatal(1, "SEL slot collision"); prog[j].sel_prev = 1; end
    prog[j].sel_en = 1; prog[j].sel_col = COL_W'(v);
    prog[j].sel_edge = EDGE_W'(edge_id[c][v]); prog[j].sel_slot = SLOT_W'(slot_of[c][v]);
    prog[j].sel_last = (k2 == deg[c] - 1);
  end
  n_prev_ops = 0;
  for (int w = 0; w < P; w++) if (prog[w].sel_prev) n_prev_ops++;
endtask

// ------------------------------------------------------------------
// reference model
// ------------------------------------------------------------------
localparam real BETA_M = 0.25;
int LUTM [16][16];
task automatic build_lut();
  for (int a = 0; a < 16; a++) for (int b = 0; b < 16; b++) begin
    real x, y, dd; int corr, mn;
    x = 0.5 * a; y = 0.5 * b;
    dd = $ln(1.0 + $exp(-(x + y))) - $ln(1.0 + $exp(-((x > y) ? x - y : y - x)));
    if (dd < 0) dd = -dd;
    corr = int'($floor(dd / 0.5 + BETA_M + 0.5));
    mn = a < b ? a : b;
    LUTM[a][b] = mn > corr ? mn - corr : 0;
  end
endtask

function automatic int sat(int x);
  return x > 63 ? 63 : (x < -63 ? -63 : x);
endfunction

int qm [NPM][ZP];
int rm [NLM][NPM][ZP];
int llr [NPM][ZP];
int m_iters; bit m_ok;

task automatic model_decode(int imax, bit et);
  int tv[NPM][ZP];
  for (int v = 0; v < NPC; v++) for (int k = 0; k < Z; k++) qm[v][k] = llr[v][k];
  for (int c = 0; c < MP; c++) for (int v = 0; v < NPC; v++) for (int k = 0; k < Z; k++) rm[c][v][k] = 0;
  m_iters = 0; m_ok = 0;
  for (int it = 0; it < imax; it++) begin
    bit fail; fail = 0;
    for (int c = 0; c < MP; c++) begin
      for (int k = 0; k < Z; k++) begin
        int m[3], vmin, s, pre, cpre, x, newmin, vm, a, ncm, crm, par;
        m = '{15, 15, 15}; vmin = 0; s = 0;
        pre = 0; cpre = 0; x = 0; newmin = 0;
        for (int o = 0; o < deg[c]; o++) begin
          int v, t;
          v = min_ord[c][o];
          t = sat(qm[v][(k + H[c][v]) % Z] - rm[c][v][k]);
          tv[v][k] = t;
          a = t < 0 ? -t : t; if (a > 15) a = 15;
          s ^= int'(t < 0);
          if (o == deg[c] - 1) begin
            pre = LUTM[m[0]][m[1]]; cpre = m[1];
            x = a < m[2] ? a : m[2]; newmin = int'(a < m[0]);
            if (newmin != 0) vmin = slot_of[c][v];
          end else begin
            if (a < m[0]) begin m[2] = m[1]; m[1] = m[0]; m[0] = a; vmin = slot_of[c][v]; end
            else if (a < m[1]) begin m[2] = m[1]; m[1] = a; end
            else if (a < m[2]) m[2] = a;
          end
        end
        ncm = LUTM[pre][x];
        crm = (newmin != 0) ? pre : LUTM[cpre][x];
        par = 0;
        for (int o = 0; o < deg[c]; o++) begin
          int v, t, mg, r, qn;
          v = sel_ord[c][o]; t = tv[v][k];
          mg = (slot_of[c][v] == vmin) ? crm : ncm;
          r = ((s ^ int'(t < 0)) != 0) ? -mg : mg;
          qn = sat(t + r);
          rm[c][v][k] = r;
          qm[v][(k + H[c][v]) % Z] = qn;
          par ^= int'(qn < 0);
        end
        if (par != 0) fail = 1;
      end
    end
    m_iters = it + 1; m_ok = !fail;
    if (et && !fail) break;
  end
endtask

// ------------------------------------------------------------------
// DUT driving
// ------------------------------------------------------------------
task automatic gen_llr(real mu, real sigma);
  for (int v = 0; v < NPC; v++) for (int k = 0; k < ZP; k++) begin
    real u1, u2, n, y; int qv;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000000.0;
    n = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
    y = (mu + sigma * n) / 0.5;
    qv = int'($floor(y + 0.5));
    llr[v][k] = (k < Z) ? sat(qv) : 0;
  end
endtask

task automatic configure();
  @(negedge clk);
  for (int w = 0; w < P; w++) begin
    cfg_we = 1; cfg_io = 0; cfg_addr = PCW'(w); cfg_wdata = prog[w];
    @(negedge clk);
  end
  for (int v = 0; v < NPC; v++) begin
    cfg_we = 1; cfg_io = 1; cfg_addr = PCW'(v); cfg_wdata = INSTR_W'(io_sh[v]);
    @(negedge clk);
  end
  cfg_we = 0;
endtask

int hd_err, run_cycles, n_et, n_full, n_kill, n_fwd_q_dir, n_fwd_q_reg, n_fwd_t, n_gate, n_newmin_last;
longint t_run0;
bit seen_halt;

always @(posedge clk) begin
  if (rst_n) begin
    if (!seen_halt && dut.u_ctrl.halt) begin
      seen_halt <= 1; run_cycles <= int'(cyc - t_run0);
    end
    if (dut.u_qmem.we && dut.u_qmem.waddr == dut.u_qmem.raddr_q && dut.q1.v && dut.q1.kind == 0) n_fwd_q_dir++;
    if (dut.u_qmem.we_q && dut.u_qmem.waddr_q == dut.u_qmem.raddr_q && !(dut.u_qmem.we && dut.u_qmem.waddr == dut.u_qmem.raddr_q) && dut.q1.v && dut.q1.kind == 0) n_fwd_q_reg++;
    if (dut.s1.v && ((dut.u_tmem.we && dut.u_tmem.waddr == dut.u_tmem.raddr_q) || (dut.u_tmem.we_q && dut.u_tmem.waddr_q == dut.u_tmem.raddr_q))) n_fwd_t++;
    if (dut.s2.v && dut.sel_kill) n_kill++;
    if (dut.q3.v && dut.q3.kind == 0 && dut.q3.last && dut.u_pool.g_lane[0].u_ncu.lay_d.newmin) n_newmin_last++;
  end
end

task automatic decode_once(int imax, bit et, string tag);
  int exp_cycles;
  model_decode(imax, et);
  cfg_z = ZW'(Z); cfg_mp = LAYER_W'(MP); cfg_np = COL_W'(NPC); cfg_imax = ITER_W'(imax);
  cfg_prog_len = PCW'(P); cfg_et_en = et;
  start = 1; @(negedge clk); start = 0;
  for (int v = 0; v < NPC; v++) begin
    llr_valid = 1;
    for (int k = 0; k < ZP; k++) llr_data[k] = BVN'(llr[v][k]);
    do @(posedge clk); while (!llr_ready);
    @(negedge clk);
  end
  llr_valid = 0;
  wait (dut.u_ctrl.st == 3'd3);
  @(posedge clk); t_run0 = cyc; seen_halt = 0;
  hd_err = 0;
  fork
    begin
      int got; got = 0;
      while (!done) begin
        @(posedge clk);
        if (out_valid) begin
          for (int k = 0; k < ZP; k++) begin
            bit e; e = (k < Z) ? (qm[out_col][k] < 0) : 0;
            if (out_hd[k] !== e) hd_err++;
          end
          got++;
        end
      end
      check(got == NPC, $sformatf("%s: %0d output columns", tag, got));
    end
  join
  check(hd_err == 0, $sformatf("%s: %0d hard-decision mismatches", tag, hd_err));
  check(int'(iters) == m_iters, $sformatf("%s: iterations %0d, model %0d", tag, iters, m_iters));
  check(ppc_ok == m_ok, $sformatf("%s: ppc_ok %0d, model %0d", tag, ppc_ok, m_ok));
  // the run ends when the last layer's last SEL op of the final iteration is
  // written back: issue cycle (iters-1)*P + jlast, plus two pipeline stages
  exp_cycles = (m_iters - 1) * P + jlast_final + 3;
  check(run_cycles == exp_cycles, $sformatf("%s: run took %0d cycles, expected %0d", tag, run_cycles, exp_cycles));
  if (et && m_iters < imax) n_et++;
  if (m_iters == imax) n_full++;
  if (Z <= ZP - GP) n_gate++;
  $display("%s: Z=%0d Mp=%0d Np=%0d edges=%0d P=%0d (bound %0d, dep stalls %0d, sync stalls %0d) iters=%0d ppc_ok=%0d zero-codeword bit errors=%0d",
           tag, Z, MP, NPC, edge_count(), P, edge_count(), n_dep_stall, n_sync_stall, m_iters, m_ok, count_ones());
  @(negedge clk);
endtask

function automatic int edge_count();
  int s; s = 0;
  for (int c = 0; c < MP; c++) s += deg[c];
  return s;
endfunction

function automatic int count_ones();
  int s; s = 0;
  for (int v = 0; v < NPC; v++) for (int k = 0; k < Z; k++) if (qm[v][k] < 0) s++;
  return s;
endfunction

task automatic reset_dut();
  rst_n = 0;
  repeat (3) @(negedge clk);
  rst_n = 1;
  @(negedge clk);
endtask
