// sel_unit -- SEL phase of one node computation unit (one lane k).
//
// Works on the layer whose MIN phase has finished, using the bundle held in
// the NCU pipeline register. One LUT level completes the magnitudes:
// non-critical = LUT(pre, x) and critical = pre when the last block was the
// new minimum, else LUT(cpre, x). For every block read back from the
// T-memory it selects the critical magnitude when the block's compressed
// index equals the stored index of the first minimum, gives it the sign
// s XOR sign(t) (s holds the XOR of all signs, so this leaves out the
// block's own sign), and updates q = t + r with saturation.
// It also accumulates the partial parity check (PPC) of the lane: the XOR
// of the hard decisions of all updated Q-messages of the layer; par is this
// parity including the current block and is meaningful on the last block,
// after which the accumulator clears. Outputs are combinational in the
// cycle of the operation; the PPC register updates when en & valid.
// Zero is treated as a positive sign (hard decision of 0 is 0).
module sel_unit
  import gams_pkg::*;
#(
  parameter real BETA = 0.25
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,     // synchronous clear of the PPC accumulator
  input  logic                  valid,
  input  logic                  last,
  input  logic [SLOT_W-1:0]     slot,
  input  layer_t                lay,     // from the pipeline register
  input  logic signed [BVN-1:0] t,       // from the T-memory
  output logic signed [BVN-1:0] q_new,
  output logic                  r_sign,
  output logic [MW-1:0]         crit,    // critical magnitude of the layer
  output logic [MW-1:0]         ncrit,   // non-critical magnitude of the layer
  output logic                  par
);
  logic [MW-1:0]          nc_l, cr_l, mag;
  logic signed [BVN:0]    sum;
  logic                   ppc_q;

  boxplus_lut #(.MW(MW), .BETA(BETA)) u_lut_nc (.a(lay.pre),  .b(lay.x), .y(nc_l));
  boxplus_lut #(.MW(MW), .BETA(BETA)) u_lut_cr (.a(lay.cpre), .b(lay.x), .y(cr_l));

  assign ncrit  = nc_l;
  assign crit   = lay.newmin ? lay.pre : cr_l;
  assign mag    = (slot == lay.vmin) ? crit : ncrit;
  assign r_sign = lay.s ^ t[BVN-1];
  assign sum    = r_sign ? ((BVN+1)'(t) - (BVN+1)'(mag)) : ((BVN+1)'(t) + (BVN+1)'(mag));
  assign q_new  = sat_vn(sum);
  assign par    = ppc_q ^ q_new[BVN-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             ppc_q <= 1'b0;
    else if (en && clr)     ppc_q <= 1'b0;
    else if (en && valid)   ppc_q <= last ? 1'b0 : par;
  end
endmodule
