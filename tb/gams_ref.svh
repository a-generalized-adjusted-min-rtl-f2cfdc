// gams_ref.svh -- reference arithmetic for the node-level testbenches,
// written from the algorithm rather than from the datapath structure:
// the box-plus table from its defining formula, symmetric saturation, and
// one check-node update of GA-MS-3 in arrival order (minima of all edges
// but the last, completed by the last edge).

function automatic int ref_lut(int i, int j);
  real x, z, dd; int corr, mn;
  x = 0.5 * i; z = 0.5 * j;
  dd = $ln(1.0 + $exp(-(x + z))) - $ln(1.0 + $exp(-((x > z) ? x - z : z - x)));
  if (dd < 0) dd = -dd;
  corr = int'($floor(dd / 0.5 + 0.25 + 0.5));
  mn = (i < j) ? i : j;
  return (mn > corr) ? mn - corr : 0;
endfunction

function automatic int ref_sat(int v, int bits);
  int mx; mx = (1 << (bits - 1)) - 1;
  return (v > mx) ? mx : (v < -mx) ? -mx : v;
endfunction

function automatic int ref_mag(int t);
  int a; a = (t < 0) ? -t : t;
  return (a > 15) ? 15 : a;
endfunction

// Check-node result of one layer. tv: T-messages in MIN order, slots: their
// compressed indices. Outputs the non-critical and critical magnitudes,
// the slot of the first (strict, earliest) minimum and the sign parity s.
task automatic ref_check(input int tv[], input int slots[],
                         output int nc, output int cr, output int vm, output int s);
  int o[3]; int d, al, x, pre, cur;
  d = tv.size();
  o = '{15, 15, 15};
  vm = 0; s = 0; cur = 15;
  for (int i = 0; i < d; i++) begin
    int a; a = ref_mag(tv[i]);
    if (tv[i] < 0) s ^= 1;
    if (a < cur) begin cur = a; vm = slots[i]; end   // registers start at 15
    if (i < d - 1) begin
      if (a < o[0]) begin o[2] = o[1]; o[1] = o[0]; o[0] = a; end
      else if (a < o[1]) begin o[2] = o[1]; o[1] = a; end
      else if (a < o[2]) o[2] = a;
    end
  end
  al  = ref_mag(tv[d-1]);
  x   = (al < o[2]) ? al : o[2];
  pre = ref_lut(o[0], o[1]);
  nc  = ref_lut(pre, x);
  cr  = (al < o[0]) ? pre : ref_lut(o[1], x);
endtask
