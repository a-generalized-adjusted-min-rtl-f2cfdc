// csu -- cyclic shifter unit.
//
// Rotates the first Z lanes of a ZMAX-lane vector left by 'shift'
// (0 <= shift < Z): dout[k] = din[(k + shift) mod Z] for k < Z, and 0 for the
// unused lanes k >= Z. Z is a run-time value (any 5G lifting size up to
// ZMAX). Two full-width logarithmic rotators are used: one by shift, which
// is right for lanes with k + shift < Z, and one by shift + ZMAX - Z, which
// is right for the lanes that wrap around inside the Z-lane window; each
// lane selects one. The paper gives the function of the CSU but not its
// structure; this double rotator is this design's choice. Combinational;
// the datapath registers its input and output (see the top).
module csu
  import gams_pkg::*;
#(
  parameter int Z_P = ZMAX,
  parameter int W   = BVN
) (
  input  logic [Z_P-1:0][W-1:0] din,
  input  logic [ZW-1:0]         z,
  input  logic [ZW-1:0]         shift,
  output logic [Z_P-1:0][W-1:0] dout
);
  localparam int SW = $clog2(Z_P) + 1;

  // Left rotation by amt (mod Z_P), one stage per bit of amt.
  function automatic logic [Z_P-1:0][W-1:0] rotl(input logic [Z_P-1:0][W-1:0] v,
                                                 input logic [SW-1:0] amt);
    logic [Z_P-1:0][W-1:0] cur, nxt;
    cur = v;
    for (int b = 0; b < SW; b++) begin
      for (int k = 0; k < Z_P; k++) nxt[k] = cur[(k + (1 << b)) % Z_P];
      if (amt[b]) cur = nxt;
    end
    return cur;
  endfunction

  logic [SW-1:0]         amt1, amt2;
  logic [Z_P-1:0][W-1:0] rot1, rot2;

  assign amt1 = SW'(shift);
  assign amt2 = SW'((SW+1)'(shift) + (SW+1)'(Z_P) - (SW+1)'(z));
  assign rot1 = rotl(din, amt1);
  assign rot2 = rotl(din, amt2);

  always_comb begin
    for (int k = 0; k < Z_P; k++) begin
      if (ZW'(k) >= z)                         dout[k] = '0;
      else if ((ZW+1)'(k) + (ZW+1)'(shift) < (ZW+1)'(z)) dout[k] = rot1[k];
      else                                     dout[k] = rot2[k];
    end
  end
endmodule
