// qt_mem -- memory wrapper of the Q-memory (and, with the same structure,
// the T-memory).
//
// 16 (ZMAX/GRP_LANES) dual-port SRAMs of DEPTH words; each word holds the messages of the
// GRP_LANES lanes of one group for one base-graph column, so a full
// ZMAX-message vector is read or written at once with one shared address.
// Group g is written and read only when grp_en[g] is set (unused groups stay
// idle for small lifting sizes).
//
// The SRAM returns read data one cycle after the read address. Two
// forwarding paths keep that data current when the same column is being
// written: a write in the cycle the data comes out is passed straight
// through, and a write in the cycle of the read (which the SRAM does not yet
// see) is passed from a pipeline register holding the last write. rdata is
// valid in the cycle after a read request (re).
module qt_mem
  import gams_pkg::*;
#(
  parameter int Z_P   = ZMAX,
  parameter int G_P   = GRP_LANES,
  parameter int W     = BVN,
  parameter int DEPTH = NP_MAX,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [Z_P/G_P-1:0]    grp_en,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [Z_P-1:0][W-1:0] wdata,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [Z_P-1:0][W-1:0] rdata
);
  localparam int NG = Z_P / G_P;

  logic [Z_P-1:0][W-1:0] sram_q, wdata_q;
  logic [AW-1:0]         raddr_q, waddr_q;
  logic                  we_q;

  for (genvar g = 0; g < NG; g++) begin : g_bank
    dp_sram #(.DEPTH(DEPTH), .WIDTH(G_P*W)) u_sram (
      .clk,
      .we(we && grp_en[g]), .waddr, .wdata(wdata[g*G_P +: G_P]),
      .re(re && grp_en[g]), .raddr, .rdata(sram_q[g*G_P +: G_P])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raddr_q <= '0;
      waddr_q <= '0;
      we_q    <= 1'b0;
      wdata_q <= '0;
    end else begin
      if (re) raddr_q <= raddr;
      we_q    <= we;
      waddr_q <= waddr;
      wdata_q <= wdata;
    end
  end

  always_comb begin
    if (we && waddr == raddr_q)            rdata = wdata;    // direct path
    else if (we_q && waddr_q == raddr_q)   rdata = wdata_q;  // registered path
    else                                   rdata = sram_q;
  end
endmodule
