// ldpc_decoder -- block-parallel layered LDPC decoder for all 5G NR codes,
// using generalized adjusted min-sum decoding with gamma = 3 minima.
//
// One base-graph block (Z messages) is processed per cycle by ZMAX node
// computation units. Datapath, one instruction word per cycle:
//
//   MIN op  c0: Q-memory read (column)
//           c1: read data, with forwarding  -> Pipe Reg
//               R-memory read (edge sign word, layer magnitude word)
//           c2: cyclic shifter (relative shift of the instruction)
//                                           -> Pipe Reg; R expanded -> reg
//           c3: NCU MIN: t = q - r, minima, signs; t -> T-memory
//   SEL op  c0: T-memory read (column)
//           c1: read data, with forwarding  -> reg
//           c2: NCU SEL: r, q = t + r; q -> Q-memory (column),
//               r signs -> R-sign (edge), on the last block of the layer
//               magnitudes -> R-mag (layer); PPC result -> controller
//
// Q-messages are never rotated back: each column stays rotated by the shift
// of the last layer that used it, and the instruction's shift is relative to
// that (mod(Z + H[c][v] - H[previous layer][v], Z)). LLRs are rotated on the
// way in and hard decisions back on the way out by the per-column io shift.
// Groups of 24 lanes above the lifting size are disabled.
//
// Interface: configuration (cfg_*), one LLR column per accepted cycle
// (llr_valid/llr_ready, columns 0..Np-1 in order, lane k = LLR of bit
// column*Z + k), then after decoding Np hard-decision columns on out_valid
// (out_hd[k] = bit column*Z + k), 'done', the number of iterations run and
// whether the PPCs of the last iteration all held. The pipeline depths are
// this design's; the structure (Q-memory, pipe register, shifter, pipe
// register, NCU; MIN and SEL on consecutive layers) follows the published
// architecture. The program must respect the hazards of this pipeline:
// a SEL op of column v must be issued at least one cycle before the next
// MIN op of v, and the SEL ops of a layer start two cycles after its last
// MIN op and end at most one cycle after the last MIN op of the next layer.
module ldpc_decoder
  import gams_pkg::*;
#(
  parameter int  Z_P     = ZMAX,
  parameter int  G_P     = GRP_LANES,
  parameter int  GAMMA_P = GAMMA,
  parameter real BETA    = 0.25,
  parameter int  SEQ_D   = SEQ_DEPTH,
  parameter int  NP      = NP_MAX,
  parameter int  NL      = MP_MAX,
  parameter int  NE      = E_MAX,
  localparam int PCW     = $clog2(SEQ_D + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  logic                   cfg_io,
  input  logic [PCW-1:0]         cfg_addr,
  input  logic [INSTR_W-1:0]     cfg_wdata,
  input  logic                   start,
  input  logic [ZW-1:0]          cfg_z,
  input  logic [LAYER_W-1:0]     cfg_mp,
  input  logic [COL_W-1:0]       cfg_np,
  input  logic [ITER_W-1:0]      cfg_imax,
  input  logic [PCW-1:0]         cfg_prog_len,
  input  logic                   cfg_et_en,
  input  logic                   llr_valid,
  output logic                   llr_ready,
  input  logic [Z_P-1:0][BVN-1:0] llr_data,
  output logic                   out_valid,
  output logic [COL_W-1:0]       out_col,
  output logic [Z_P-1:0]         out_hd,
  output logic                   busy,
  output logic                   done,
  output logic [ITER_W-1:0]      iters,
  output logic                   ppc_ok
);
  localparam int NG  = Z_P / G_P;
  localparam int QAW = $clog2(NP);
  localparam int EAW = $clog2(NE);
  localparam int LAW = $clog2(NL);

  typedef enum logic [1:0] {K_MIN, K_LD, K_OUT} kind_t;

  typedef struct packed {
    logic               v;
    kind_t              kind;
    logic [COL_W-1:0]   col;
    logic [SHIFT_W-1:0] shift;
    logic [EDGE_W-1:0]  edge_a;
    logic [SLOT_W-1:0]  slot;
    logic               last;
    logic [LAYER_W-1:0] layer;
    logic               zero;
  } qop_t;

  // the shifter stage drops the R-memory addresses
  typedef struct packed {
    logic               v;
    kind_t              kind;
    logic [COL_W-1:0]   col;
    logic [SHIFT_W-1:0] shift;
    logic [SLOT_W-1:0]  slot;
    logic               last;
  } q2_t;

  // last stage keeps only what the NCU, Q/T write and output need
  typedef struct packed {
    logic               v;
    kind_t              kind;
    logic [COL_W-1:0]   col;
    logic [SLOT_W-1:0]  slot;
    logic               last;
  } q3_t;

  typedef struct packed {
    logic               v;
    logic [COL_W-1:0]   col;
    logic [EDGE_W-1:0]  edge_a;
    logic [SLOT_W-1:0]  slot;
    logic               last;
    logic [LAYER_W-1:0] layer;
  } sop_t;

  // controller outputs
  logic [ZW-1:0]       z;
  logic                ld_v, min_v, min_last, min_zero, sel_v, sel_last, sel_kill, ncu_clr, out_v;
  logic [COL_W-1:0]    ld_col, min_col, sel_col, out_col_i;
  logic [SHIFT_W-1:0]  ld_shift, min_shift, out_shift;
  logic [EDGE_W-1:0]   min_edge, sel_edge;
  logic [SLOT_W-1:0]   min_slot, sel_slot;
  logic [LAYER_W-1:0]  min_layer, sel_layer;
  logic                lay_done, lay_fail;
  logic [LAYER_W-1:0]  lay_done_idx;

  logic [NG-1:0]       grp_en;
  logic [Z_P-1:0]      lane_en;

  qop_t q0, q1;
  q2_t  q2;
  q3_t  q3;
  sop_t s0, s1, s2;

  logic [Z_P-1:0][BVN-1:0] q_rdata, ld_reg, qp1, csu_out, qp2;
  logic [Z_P-1:0][BVN-1:0] t_rdata, tp, t_out, q_new;
  logic [Z_P-1:0][BCN-1:0] r_out;
  logic [Z_P-1:0]          r_sign, par;
  logic [Z_P-1:0][MW-1:0]  crit, ncrit;
  logic [Z_P-1:0][SLOT_W-1:0] vmin;
  logic                    sel_exec;

  controller #(.SEQ_D(SEQ_D), .NP(NP)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_io, .cfg_addr, .cfg_wdata, .start,
    .cfg_z, .cfg_mp, .cfg_np, .cfg_imax, .cfg_prog_len, .cfg_et_en, .z,
    .llr_valid, .llr_ready, .ld_v, .ld_col, .ld_shift,
    .min_v, .min_col, .min_shift, .min_edge, .min_slot, .min_last, .min_layer, .min_zero,
    .sel_v, .sel_col, .sel_edge, .sel_slot, .sel_last, .sel_layer, .sel_kill, .ncu_clr,
    .lay_done, .lay_done_idx, .lay_fail,
    .out_v, .out_col(out_col_i), .out_shift,
    .busy, .done, .iters, .ppc_ok
  );

  always_comb begin
    for (int g = 0; g < NG; g++) grp_en[g] = (z > ZW'(g * G_P));
    for (int k = 0; k < Z_P; k++) lane_en[k] = (ZW'(k) < z);
  end

  // ---- Q path operation (MIN, load or output), issue stage ----
  always_comb begin
    q0 = '0;
    if (min_v) begin
      q0 = '{v: 1'b1, kind: K_MIN, col: min_col, shift: min_shift, edge_a: min_edge,
             slot: min_slot, last: min_last, layer: min_layer, zero: min_zero};
    end else if (ld_v) begin
      q0.v = 1'b1; q0.kind = K_LD;  q0.col = ld_col;    q0.shift = ld_shift;
    end else if (out_v) begin
      q0.v = 1'b1; q0.kind = K_OUT; q0.col = out_col_i; q0.shift = out_shift;
    end
    s0 = '{v: sel_v, col: sel_col, edge_a: sel_edge, slot: sel_slot, last: sel_last, layer: sel_layer};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1 <= '0; q2 <= '0; q3 <= '0; s1 <= '0; s2 <= '0;
    end else begin
      q1 <= q0;
      q2 <= '{v: q1.v, kind: q1.kind, col: q1.col, shift: q1.shift, slot: q1.slot, last: q1.last};
      q3 <= '{v: q2.v, kind: q2.kind, col: q2.col, slot: q2.slot, last: q2.last};
      s1 <= s0;
      s2 <= s1;
    end
  end

  always_ff @(posedge clk) begin
    if (ld_v) ld_reg <= llr_data;
    qp1 <= (q1.kind == K_LD) ? ld_reg : q_rdata;   // Pipe Reg before the CSU
    qp2 <= csu_out;                                // Pipe Reg after the CSU
    tp  <= t_rdata;
  end

  // ---- Q-memory: read by MIN/output, written by SEL or by loading ----
  logic                    q_we;
  logic [QAW-1:0]          q_waddr;
  logic [Z_P-1:0][BVN-1:0] q_wdata;

  assign sel_exec = s2.v && !sel_kill;

  always_comb begin
    if (q3.v && q3.kind == K_LD) begin
      q_we = 1'b1; q_waddr = QAW'(q3.col); q_wdata = qp2;
    end else begin
      q_we = sel_exec; q_waddr = QAW'(s2.col); q_wdata = q_new;
    end
  end

  qt_mem #(.Z_P(Z_P), .G_P(G_P), .W(BVN), .DEPTH(NP)) u_qmem (
    .clk, .rst_n, .grp_en,
    .we(q_we), .waddr(q_waddr), .wdata(q_wdata),
    .re(q0.v && q0.kind != K_LD), .raddr(QAW'(q0.col)), .rdata(q_rdata)
  );

  csu #(.Z_P(Z_P), .W(BVN)) u_csu (
    .din(qp1), .z, .shift(q2.shift), .dout(csu_out)
  );

  // ---- T-memory: written by MIN, read by SEL ----
  qt_mem #(.Z_P(Z_P), .G_P(G_P), .W(BVN), .DEPTH(NP)) u_tmem (
    .clk, .rst_n, .grp_en,
    .we(q3.v && q3.kind == K_MIN), .waddr(QAW'(q3.col)), .wdata(t_out),
    .re(s0.v), .raddr(QAW'(s0.col)), .rdata(t_rdata)
  );

  // ---- R-memory ----
  r_mem #(.Z_P(Z_P), .G_P(G_P), .NE(NE), .NL(NL)) u_rmem (
    .clk, .rst_n, .grp_en,
    .sign_we(sel_exec), .sign_waddr(EAW'(s2.edge_a)), .sign_wdata(r_sign),
    .mag_we(sel_exec && s2.last), .mag_waddr(LAW'(s2.layer)),
    .crit, .ncrit, .vmin,
    .re(q1.v && q1.kind == K_MIN), .sign_raddr(EAW'(q1.edge_a)), .mag_raddr(LAW'(q1.layer)),
    .slot(q1.slot), .zero(q1.zero), .r(r_out)
  );

  // ---- NCU pool ----
  ncu_pool #(.Z_P(Z_P), .G_P(G_P), .GAMMA_P(GAMMA_P), .BETA(BETA)) u_pool (
    .clk, .rst_n, .grp_en, .clr(ncu_clr),
    .min_valid(q3.v && q3.kind == K_MIN), .min_last(q3.last), .min_slot(q3.slot),
    .q(qp2), .r(r_out), .t_out,
    .sel_valid(sel_exec), .sel_last(s2.last), .sel_slot(s2.slot),
    .t_in(tp), .q_new, .r_sign, .crit, .ncrit, .vmin, .par
  );

  assign lay_done     = sel_exec && s2.last;
  assign lay_done_idx = s2.layer;
  assign lay_fail     = |(par & lane_en);

  // ---- hard-decision output ----
  always_comb begin
    out_valid = q3.v && q3.kind == K_OUT;
    out_col   = q3.col;
    for (int k = 0; k < Z_P; k++) out_hd[k] = qp2[k][BVN-1] & lane_en[k];
  end
endmodule
