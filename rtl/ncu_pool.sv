// ncu_pool -- the ZMAX node computation units of the decoder.
//
// Lane k processes row c*Z+k of every layer. The lanes form 16 (ZMAX/GRP_LANES) groups of
// GRP_LANES; group g runs only when its enable grp_en[g] is set, which the
// top derives from the lifting size (group g is needed when Z > g*24), so a
// group is only active if all lower groups are. The published chip gates
// the clocks of the groups; here the same effect is a clock enable on every
// register of the group. Control inputs are shared by all lanes; data are
// one element per lane. Timing is that of ncu.
module ncu_pool
  import gams_pkg::*;
#(
  parameter int  Z_P     = ZMAX,
  parameter int  G_P     = GRP_LANES,
  parameter int  GAMMA_P = GAMMA,
  parameter real BETA    = 0.25
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [Z_P/G_P-1:0]               grp_en,
  input  logic                             clr,
  input  logic                             min_valid,
  input  logic                             min_last,
  input  logic [SLOT_W-1:0]                min_slot,
  input  logic [Z_P-1:0][BVN-1:0]          q,
  input  logic [Z_P-1:0][BCN-1:0]          r,
  output logic [Z_P-1:0][BVN-1:0]          t_out,
  input  logic                             sel_valid,
  input  logic                             sel_last,
  input  logic [SLOT_W-1:0]                sel_slot,
  input  logic [Z_P-1:0][BVN-1:0]          t_in,
  output logic [Z_P-1:0][BVN-1:0]          q_new,
  output logic [Z_P-1:0]                   r_sign,
  output logic [Z_P-1:0][MW-1:0]           crit,
  output logic [Z_P-1:0][MW-1:0]           ncrit,
  output logic [Z_P-1:0][SLOT_W-1:0]       vmin,
  output logic [Z_P-1:0]                   par
);
  for (genvar k = 0; k < Z_P; k++) begin : g_lane
    ncu #(.GAMMA_P(GAMMA_P), .BETA(BETA)) u_ncu (
      .clk, .rst_n, .en(grp_en[k / G_P]), .clr,
      .min_valid, .min_last, .min_slot,
      .q(signed'(q[k])), .r(signed'(r[k])), .t_out(t_out[k]),
      .sel_valid, .sel_last, .sel_slot,
      .t_in(signed'(t_in[k])), .q_new(q_new[k]), .r_sign(r_sign[k]),
      .crit(crit[k]), .ncrit(ncrit[k]), .vmin(vmin[k]), .par(par[k])
    );
  end
endmodule
