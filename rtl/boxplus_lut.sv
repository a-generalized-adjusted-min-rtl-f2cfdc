// boxplus_lut -- 16x16 look-up table approximating the box-plus of two
// message magnitudes.
//
// y = max(min(a,b) - floor(|D(a,b)|/delta + beta + 0.5), 0), with
// D(a,b) = ln(1+exp(-(A+B))) - ln(1+exp(-|A-B|)), A = a*delta, B = b*delta.
// The correction term is the non-linear part of the exact box-plus; beta is
// an extra offset (in LSBs, as the formula adds it after the division) that
// compensates for truncating a check node to gamma inputs. The 256 entries
// are computed at elaboration from this formula, so the table follows the
// parameters. delta = 1/2 (one fractional bit) and beta = 0.25 (base graph 1,
// GA-MS-3) are the published values; 4-bit inputs and outputs give the
// published 16x16 x 4-bit table. Purely combinational.
module boxplus_lut #(
  parameter int  MW    = 4,
  parameter real DELTA = 0.5,
  parameter real BETA  = 0.25
) (
  input  logic [MW-1:0] a,
  input  logic [MW-1:0] b,
  output logic [MW-1:0] y
);
  localparam int N = 1 << MW;
  typedef logic [MW-1:0] tab_t [N*N];

  function automatic tab_t build();
    tab_t tab;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        real ta, tb, dd, diff;
        int  corr, mn;
        ta   = i * DELTA;
        tb   = j * DELTA;
        diff = (ta > tb) ? ta - tb : tb - ta;
        dd   = $ln(1.0 + $exp(-(ta + tb))) - $ln(1.0 + $exp(-diff));
        if (dd < 0.0) dd = -dd;
        corr = $rtoi($floor(dd / DELTA + BETA + 0.5));
        mn   = (i < j) ? i : j;
        tab[i*N+j] = (mn > corr) ? MW'(mn - corr) : '0;
      end
    end
    return tab;
  endfunction

  localparam tab_t TAB = build();

  assign y = TAB[{a, b}];
endmodule
