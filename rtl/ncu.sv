// ncu -- node computation unit for lane k of the decoder.
//
// MIN unit and SEL unit separated by a pipeline register: while the MIN unit
// gathers layer c+1 (rows (c+1)*Z+k), the SEL unit writes back layer c
// (rows c*Z+k) from the minima bundle captured when the MIN unit finished
// layer c. The register loads on the MIN operation flagged as the last block
// of its layer. All state is frozen while en (the group's clock enable) is
// low. MIN and SEL operations may occur in the same cycle.
module ncu
  import gams_pkg::*;
#(
  parameter int  GAMMA_P = GAMMA,
  parameter real BETA    = 0.25
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,   // restart MIN and PPC state before a codeword
  // MIN side
  input  logic                  min_valid,
  input  logic                  min_last,
  input  logic [SLOT_W-1:0]     min_slot,
  input  logic signed [BVN-1:0] q,
  input  logic signed [BCN-1:0] r,
  output logic signed [BVN-1:0] t_out,
  // SEL side
  input  logic                  sel_valid,
  input  logic                  sel_last,
  input  logic [SLOT_W-1:0]     sel_slot,
  input  logic signed [BVN-1:0] t_in,
  output logic signed [BVN-1:0] q_new,
  output logic                  r_sign,
  output logic [MW-1:0]         crit,
  output logic [MW-1:0]         ncrit,
  output logic [SLOT_W-1:0]     vmin,
  output logic                  par
);
  layer_t lay_d, lay_q;

  min_unit #(.GAMMA_P(GAMMA_P), .BETA(BETA)) u_min (
    .clk, .rst_n, .en, .clr, .valid(min_valid), .last(min_last), .slot(min_slot),
    .q, .r, .t(t_out), .lay(lay_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              lay_q <= '0;
    else if (en && min_valid && min_last)    lay_q <= lay_d;
  end

  sel_unit #(.BETA(BETA)) u_sel (
    .clk, .rst_n, .en, .clr, .valid(sel_valid), .last(sel_last), .slot(sel_slot),
    .lay(lay_q), .t(t_in), .q_new, .r_sign, .crit, .ncrit, .par
  );

  assign vmin = lay_q.vmin;
endmodule
