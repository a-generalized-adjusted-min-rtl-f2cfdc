// r_mem -- R-memory holding the check-to-variable messages in compressed
// form.
//
// Within one layer every R-message has one of two magnitudes (critical for
// the edge that carried the smallest input, non-critical for the others),
// so only the signs are stored per edge:
//   R-sign: 16 SRAMs of E_MAX words x GRP_LANES bits, addressed by edge.
//   R-mag : 16 SRAMs of MP_MAX words x GRP_LANES*(2*MW+SLOT_W) bits,
//           addressed by layer; per lane {critical, non-critical, index of
//           the critical column}.
// The index is the column's 5-bit position within its row (row degrees are
// at most 19), carried by the instructions.
//
// Read: in cycle R1 (re) the edge and layer addresses, the reading block's
// index and 'zero' (first iteration, when all R-messages are 0) are given.
// In R2 the SRAM words come out and are expanded into signed BCN-bit
// R-messages, which are registered: r is valid in R3.
// Write: sign_we writes one edge's sign vector; mag_we writes one layer's
// magnitude word. Groups with grp_en low are not accessed.
module r_mem
  import gams_pkg::*;
#(
  parameter int Z_P = ZMAX,
  parameter int G_P = GRP_LANES,
  parameter int NE  = E_MAX,
  parameter int NL  = MP_MAX,
  localparam int EAW = $clog2(NE),
  localparam int LAW = $clog2(NL)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [Z_P/G_P-1:0]          grp_en,
  // write side
  input  logic                        sign_we,
  input  logic [EAW-1:0]              sign_waddr,
  input  logic [Z_P-1:0]              sign_wdata,
  input  logic                        mag_we,
  input  logic [LAW-1:0]              mag_waddr,
  input  logic [Z_P-1:0][MW-1:0]      crit,
  input  logic [Z_P-1:0][MW-1:0]      ncrit,
  input  logic [Z_P-1:0][SLOT_W-1:0]  vmin,
  // read side
  input  logic                        re,
  input  logic [EAW-1:0]              sign_raddr,
  input  logic [LAW-1:0]              mag_raddr,
  input  logic [SLOT_W-1:0]           slot,
  input  logic                        zero,
  output logic [Z_P-1:0][BCN-1:0]     r
);
  localparam int NG  = Z_P / G_P;
  localparam int MGW = 2*MW + SLOT_W;

  typedef struct packed {
    logic [MW-1:0]     crit;
    logic [MW-1:0]     ncrit;
    logic [SLOT_W-1:0] vmin;
  } rmag_t;

  logic  [Z_P-1:0]  sign_q;
  rmag_t [Z_P-1:0]  mag_q, mag_w;
  logic [SLOT_W-1:0] slot_q;
  logic              zero_q;

  logic [Z_P-1:0][MW-1:0] mag_sel;

  always_comb begin
    for (int k = 0; k < Z_P; k++) begin
      mag_w[k]   = '{crit: crit[k], ncrit: ncrit[k], vmin: vmin[k]};
      mag_sel[k] = (slot_q == mag_q[k].vmin) ? mag_q[k].crit : mag_q[k].ncrit;
    end
  end

  for (genvar g = 0; g < NG; g++) begin : g_bank
    dp_sram #(.DEPTH(NE), .WIDTH(G_P)) u_sign (
      .clk,
      .we(sign_we && grp_en[g]), .waddr(sign_waddr), .wdata(sign_wdata[g*G_P +: G_P]),
      .re(re && grp_en[g]), .raddr(sign_raddr), .rdata(sign_q[g*G_P +: G_P])
    );
    dp_sram #(.DEPTH(NL), .WIDTH(G_P*MGW)) u_mag (
      .clk,
      .we(mag_we && grp_en[g]), .waddr(mag_waddr), .wdata(mag_w[g*G_P +: G_P]),
      .re(re && grp_en[g]), .raddr(mag_raddr), .rdata(mag_q[g*G_P +: G_P])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= '0;
      zero_q <= 1'b1;
      r      <= '0;
    end else begin
      if (re) begin
        slot_q <= slot;
        zero_q <= zero;
      end
      for (int k = 0; k < Z_P; k++) begin
        if (zero_q)         r[k] <= '0;
        else if (sign_q[k]) r[k] <= BCN'(-{1'b0, mag_sel[k]});
        else                r[k] <= BCN'({1'b0, mag_sel[k]});
      end
    end
  end
endmodule
