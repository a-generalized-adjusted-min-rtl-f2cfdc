// dp_sram -- dual-port SRAM: one write port and one synchronous read port.
//
// Stands in for the foundry dual-port SRAM macros that hold the Q-, T- and
// R-memories. A write stores wdata at waddr on the clock edge when we is
// set. A read with re set returns mem[raddr] on rdata after the clock edge
// and holds it until the next read; reading the address being written in
// the same cycle returns the old word. Contents are not reset.
module dp_sram #(
  parameter int DEPTH = 68,
  parameter int WIDTH = 168,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
