// min_unit -- MIN phase of one node computation unit (one lane k).
//
// For every block of the layer being gathered it forms the T-message
// t = q - r (saturated to B_VN bits), sends t to the T-memory, XORs its sign
// into the running check-node sign s and inserts min(|t|, 2^MW-1) into the
// ascending list of GAMMA minima (M registers) with the pruned sorter,
// recording the compressed index of the first minimum.
//
// The LUTs that only depend on the first GAMMA-1 minima are evaluated here
// on the stored list (GAMMA-2 LUTs): whatever the last block of the row
// brings, the first GAMMA-1 stored minima stay in the final GAMMA-set, which
// is completed by x = min(m[GAMMA-1], |t_last|). On the last block (last=1)
// the output bundle 'lay' holds everything the SEL phase needs and the M
// and s registers restart (minima at the largest magnitude, standing for
// infinity). The split of the LUT chain follows the published NCU; the
// exact way the critical message is prepared is this design's reading of
// "processed similarly". t and lay are combinational in the cycle of the
// operation; state changes at the clock edge when en & valid.
module min_unit
  import gams_pkg::*;
#(
  parameter int  GAMMA_P = GAMMA,
  parameter real BETA    = 0.25
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,     // group clock enable
  input  logic                     clr,    // synchronous restart of the layer state
  input  logic                     valid,  // MIN operation this cycle
  input  logic                     last,   // last block of the layer
  input  logic [SLOT_W-1:0]        slot,   // compressed column index
  input  logic signed [BVN-1:0]    q,      // rotated Q-message
  input  logic signed [BCN-1:0]    r,      // R-message of the previous iteration
  output logic signed [BVN-1:0]    t,      // T-message
  output layer_t                   lay     // layer result, meaningful when last
);
  if (GAMMA_P < 3) begin : g_chk
    $error("min_unit supports GAMMA >= 3");
  end

  logic [GAMMA_P-1:0][MW-1:0] m_q, m_new;
  logic [SLOT_W-1:0]          vmin_q;
  logic                       s_q;
  logic [MW-1:0]              a;
  logic [BVN-1:0]             abs_t;
  logic                       new_min;
  logic [MW-1:0]              chain [GAMMA_P-1];  // LUT chain over m[0..GAMMA-2]
  logic [MW-1:0]              cchain[GAMMA_P-1];  // LUT chain over m[1..GAMMA-2]

  logic signed [BVN:0] diff;

  assign diff  = (BVN+1)'(q) - (BVN+1)'(r);
  assign t     = sat_vn(diff);
  assign abs_t = t[BVN-1] ? BVN'(-t) : BVN'(t);
  assign a     = (abs_t > BVN'((1 << MW) - 1)) ? MW'((1 << MW) - 1) : abs_t[MW-1:0];

  sorter #(.GAMMA(GAMMA_P), .MW(MW)) u_sort (
    .m_in(m_q), .a(a), .m_out(m_new), .new_min(new_min)
  );

  // LUTs moved ahead of the pipeline register (GAMMA-2 of them).
  assign chain[0]  = m_q[0];
  assign cchain[0] = m_q[0];  // unused entry, keeps the array fully driven
  assign cchain[1] = m_q[1];
  for (genvar i = 1; i < GAMMA_P - 1; i++) begin : g_chain
    boxplus_lut #(.MW(MW), .BETA(BETA)) u_lut (.a(chain[i-1]), .b(m_q[i]), .y(chain[i]));
  end
  for (genvar i = 2; i < GAMMA_P - 1; i++) begin : g_cchain
    boxplus_lut #(.MW(MW), .BETA(BETA)) u_clut (.a(cchain[i-1]), .b(m_q[i]), .y(cchain[i]));
  end

  always_comb begin
    lay.pre    = chain[GAMMA_P-2];
    lay.cpre   = cchain[GAMMA_P-2];
    lay.x      = (a < m_q[GAMMA_P-1]) ? a : m_q[GAMMA_P-1];
    lay.newmin = new_min;
    lay.vmin   = new_min ? slot : vmin_q;
    lay.s      = s_q ^ t[BVN-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q    <= '1;
      vmin_q <= '0;
      s_q    <= 1'b0;
    end else if (en && (clr || valid)) begin
      if (clr || last) begin
        m_q    <= '1;
        vmin_q <= '0;
        s_q    <= 1'b0;
      end else begin
        m_q    <= m_new;
        vmin_q <= lay.vmin;
        s_q    <= lay.s;
      end
    end
  end
endmodule
