// gams_pkg -- shared constants and types of the GA-MS LDPC decoder.
//
// The decoder processes one base-graph block per cycle with Z_max = 384
// node computation units (NCUs), split into 16 groups of 24. Messages follow
// the (B_VN, B_CN, B_f) = (7,5,1) quantization: Q- and T-messages are 7-bit
// signed, R-messages are a sign plus a 4-bit magnitude. gamma = 3 minima are
// kept per check node (GA-MS-3). These numbers, and the memory depths
// (68 columns, 46 layers, 316 edges, 332 instruction words), are the
// published configuration for 5G NR base graph 1.
//
// The instruction word of the SEQ memory is this design's own layout: the
// published word is 59 bits wide but its fields are not documented. One word
// is executed per clock cycle and carries one MIN operation (the layer being
// gathered) and one SEL operation (the layer being written back).
//
// Not every module uses every constant, so a lint of a single module on its
// own reports the package constants that module leaves unused; that is
// expected and harmless.
package gams_pkg;

  localparam int ZMAX      = 384;  // NCUs, maximum lifting size
  localparam int GRP_LANES = 24;   // NCUs per clock-gated group
  localparam int BVN       = 7;    // bits of Q- and T-messages
  localparam int BCN       = 5;    // bits of R-messages
  localparam int MW        = BCN - 1; // magnitude bits of R-messages and minima
  localparam int GAMMA     = 3;    // number of minima (GA-MS-3)
  localparam int NP_MAX    = 68;   // columns of BG1
  localparam int MP_MAX    = 46;   // rows (layers) of BG1
  localparam int E_MAX     = 316;  // non-zero entries of BG1
  localparam int SEQ_DEPTH = 332;  // instruction words
  localparam int SLOT_W    = 5;    // compressed column index (d_c max = 19)
  localparam int COL_W     = 7;
  localparam int SHIFT_W   = 9;
  localparam int EDGE_W    = 9;
  localparam int LAYER_W   = 6;
  localparam int ITER_W    = 5;
  localparam int ZW        = 9;    // width of Z (up to 384)

  typedef struct packed {
    logic               min_en;    // MIN operation valid
    logic [COL_W-1:0]   min_col;   // base-graph column (Q/T address)
    logic [SHIFT_W-1:0] min_shift; // relative rotation, eq. (rerotation)
    logic [EDGE_W-1:0]  min_edge;  // R-sign address of this edge
    logic [SLOT_W-1:0]  min_slot;  // compressed column index
    logic               min_last;  // last block of the layer
    logic               sel_en;    // SEL operation valid
    logic [COL_W-1:0]   sel_col;
    logic [EDGE_W-1:0]  sel_edge;
    logic [SLOT_W-1:0]  sel_slot;
    logic               sel_last;
    logic               sel_prev;  // SEL op of the previous pass (wrap-around)
  } instr_t;

  localparam int INSTR_W = $bits(instr_t);

  // Per-lane result of a finished MIN phase, held in the NCU pipeline
  // register and consumed by the SEL phase of the same layer.
  typedef struct packed {
    logic [MW-1:0]     pre;     // LUT chain over the first gamma-1 minima before the last block
    logic [MW-1:0]     cpre;    // LUT chain over minima 2..gamma-1 before the last block
    logic [MW-1:0]     x;       // member completing the final gamma-set
    logic              newmin;  // last block was the new first minimum
    logic [SLOT_W-1:0] vmin;    // compressed index of the first minimum
    logic              s;       // XOR of all sign bits of the layer
  } layer_t;

  // Symmetric saturation of a (BVN+1)-bit sum to BVN bits.
  function automatic logic signed [BVN-1:0] sat_vn(input logic signed [BVN:0] x);
    localparam logic signed [BVN:0] MAXV = (1 <<< (BVN-1)) - 1;
    if (x > MAXV)       return BVN'(MAXV);
    else if (x < -MAXV) return BVN'(-MAXV);
    else                return BVN'(x);
  endfunction

endpackage
