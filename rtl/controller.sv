// controller -- sequencer of the decoder.
//
// Holds the SEQ memory (a list of instruction words, one executed per clock
// cycle, stall cycles included) and a table with the rotation each base-graph
// column has at iteration boundaries (io shift). Both are written through
// the cfg port while the decoder is idle, together with the lifting size Z,
// the number of layers Mp and columns Np, the iteration limit Imax and the
// program length, which are taken at 'start'. This is what makes the
// decoder configurable to any base graph, lifting size and iteration count.
//
// A decoding runs through these phases:
//   LOAD  Np channel-LLR columns are accepted (llr_valid/llr_ready) and sent
//         through the cyclic shifter into the Q-memory, pre-rotated by the
//         column's io shift;
//   RUN   the program is replayed once per iteration. Each word carries one
//         MIN and one SEL operation. SEL operations marked 'prev' belong to
//         the last layer of the previous pass: they are dropped in the first
//         pass; in the pass after the last iteration only they run (drain).
//         The MIN phase reads zero R-messages in the first pass.
//         The SEL stage reports every finished layer with its PPC result;
//         when the last layer of an iteration finishes, decoding stops if
//         all PPCs of the iteration held (early termination, if enabled) or
//         Imax iterations are done. SEL operations still in flight are then
//         killed (sel_kill) so the Q-memory keeps the final iteration.
//   OUT   Np columns are read back through the shifter, undoing the io
//         shift, and leave as hard decisions.
// Layer numbers for the R-mag memory are counted here. The program itself,
// stalls included, is computed offline; the controller checks no hazards.
// Timing: issue outputs are combinational from the state and valid in the
// cycle they are issued; done pulses for one cycle after the last output.
module controller
  import gams_pkg::*;
#(
  parameter int SEQ_D = SEQ_DEPTH,
  parameter int NP    = NP_MAX,
  localparam int PCW  = $clog2(SEQ_D + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic                cfg_io,      // 0: SEQ word, 1: io shift entry
  input  logic [PCW-1:0]      cfg_addr,
  input  logic [INSTR_W-1:0]  cfg_wdata,
  input  logic                start,
  input  logic [ZW-1:0]       cfg_z,
  input  logic [LAYER_W-1:0]  cfg_mp,
  input  logic [COL_W-1:0]    cfg_np,
  input  logic [ITER_W-1:0]   cfg_imax,
  input  logic [PCW-1:0]      cfg_prog_len,
  input  logic                cfg_et_en,
  output logic [ZW-1:0]       z,
  // LLR loading
  input  logic                llr_valid,
  output logic                llr_ready,
  output logic                ld_v,
  output logic [COL_W-1:0]    ld_col,
  output logic [SHIFT_W-1:0]  ld_shift,
  // MIN issue
  output logic                min_v,
  output logic [COL_W-1:0]    min_col,
  output logic [SHIFT_W-1:0]  min_shift,
  output logic [EDGE_W-1:0]   min_edge,
  output logic [SLOT_W-1:0]   min_slot,
  output logic                min_last,
  output logic [LAYER_W-1:0]  min_layer,
  output logic                min_zero,
  // SEL issue
  output logic                sel_v,
  output logic [COL_W-1:0]    sel_col,
  output logic [EDGE_W-1:0]   sel_edge,
  output logic [SLOT_W-1:0]   sel_slot,
  output logic                sel_last,
  output logic [LAYER_W-1:0]  sel_layer,
  output logic                sel_kill,
  output logic                ncu_clr,
  // SEL stage feedback
  input  logic                lay_done,    // a SEL layer finished (its last block)
  input  logic [LAYER_W-1:0]  lay_done_idx,
  input  logic                lay_fail,    // its PPC failed in some lane
  // hard-decision output
  output logic                out_v,
  output logic [COL_W-1:0]    out_col,
  output logic [SHIFT_W-1:0]  out_shift,
  // status
  output logic                busy,
  output logic                done,
  output logic [ITER_W-1:0]   iters,
  output logic                ppc_ok
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LWAIT, S_RUN, S_FLUSH, S_OUT, S_OWAIT} state_t;

  state_t               st;
  instr_t               seq [SEQ_D];
  logic [SHIFT_W-1:0]   ios [NP];
  instr_t               ins;
  logic [PCW-1:0]       pc, prog_len;
  logic [ITER_W:0]      iter;           // pass number (one more than Imax in the drain pass)
  logic [ITER_W-1:0]    imax;
  logic [LAYER_W-1:0]   mp, ml, sl;
  logic [COL_W-1:0]     np, col;
  logic [2:0]           wcnt;
  logic                 et_en, halt, fail_acc, fail_now, it_done;
  logic [ITER_W-1:0]    done_iters;

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_io && st == S_IDLE) seq[cfg_addr] <= instr_t'(cfg_wdata);
    if (cfg_we &&  cfg_io && st == S_IDLE) ios[COL_W'(cfg_addr)] <= SHIFT_W'(cfg_wdata);
  end

  assign ins = seq[pc];

  wire run = (st == S_RUN) && !halt;

  // MIN and SEL issue
  always_comb begin
    min_v     = run && ins.min_en && (iter < (ITER_W+1)'(imax));
    min_col   = ins.min_col;
    min_shift = ins.min_shift;
    min_edge  = ins.min_edge;
    min_slot  = ins.min_slot;
    min_last  = ins.min_last;
    min_layer = ml;
    min_zero  = (iter == '0);
    sel_v     = run && ins.sel_en &&
                (ins.sel_prev ? (iter != '0) : (iter < (ITER_W+1)'(imax)));
    sel_col   = ins.sel_col;
    sel_edge  = ins.sel_edge;
    sel_slot  = ins.sel_slot;
    sel_last  = ins.sel_last;
    sel_layer = sl;
  end

  assign llr_ready = (st == S_LOAD);
  assign ld_v      = llr_ready && llr_valid;
  assign ld_col    = col;
  assign ld_shift  = ios[col];
  assign out_v     = (st == S_OUT);
  assign out_col   = col;
  assign out_shift = (ios[col] == '0) ? '0 : SHIFT_W'(z - ZW'(ios[col]));
  assign sel_kill  = halt;
  assign ncu_clr   = (st == S_LWAIT);
  assign busy      = (st != S_IDLE);

  assign fail_now  = fail_acc | lay_fail;
  assign it_done   = lay_done && (lay_done_idx == mp - 1'b1) && !halt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; prog_len <= '0; iter <= '0; imax <= '0;
      mp <= '0; ml <= '0; sl <= '0; np <= '0; col <= '0; wcnt <= '0; z <= '0;
      et_en <= 1'b0; halt <= 1'b0; fail_acc <= 1'b0; done_iters <= '0;
      done <= 1'b0; iters <= '0; ppc_ok <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          z <= cfg_z; mp <= cfg_mp; np <= cfg_np; imax <= cfg_imax;
          prog_len <= cfg_prog_len; et_en <= cfg_et_en;
          col <= '0; halt <= 1'b0;
          st <= S_LOAD;
        end
        S_LOAD: if (llr_valid) begin
          col <= col + 1'b1;
          if (col == np - 1'b1) begin
            st <= S_LWAIT; wcnt <= 3'd3;
          end
        end
        S_LWAIT: begin
          wcnt <= wcnt - 1'b1;
          if (wcnt == '0) begin
            st <= S_RUN; pc <= '0; iter <= '0; ml <= '0; sl <= '0;
            fail_acc <= 1'b0; done_iters <= '0;
          end
        end
        S_RUN: begin
          if (run) begin
            if (pc == prog_len - 1'b1) begin
              pc <= '0;
              iter <= iter + 1'b1;
            end else begin
              pc <= pc + 1'b1;
            end
            if (min_v && min_last) ml <= (ml == mp - 1'b1) ? '0 : ml + 1'b1;
            if (sel_v && sel_last) sl <= (sl == mp - 1'b1) ? '0 : sl + 1'b1;
            // a program that never finishes an iteration is stopped
            if (iter > (ITER_W+1)'(imax) + 1'b1) begin
              halt <= 1'b1; st <= S_FLUSH; wcnt <= 3'd4;
            end
          end
          if (lay_done && !halt) fail_acc <= fail_now;
          if (it_done) begin
            fail_acc   <= 1'b0;
            done_iters <= done_iters + 1'b1;
            if ((et_en && !fail_now) || (done_iters + 1'b1 >= imax)) begin
              halt   <= 1'b1;
              iters  <= done_iters + 1'b1;
              ppc_ok <= !fail_now;
              st     <= S_FLUSH;
              wcnt   <= 3'd4;
            end
          end
        end
        S_FLUSH: begin
          wcnt <= wcnt - 1'b1;
          if (wcnt == '0) begin
            st <= S_OUT; col <= '0;
          end
        end
        S_OUT: begin
          col <= col + 1'b1;
          if (col == np - 1'b1) begin
            st <= S_OWAIT; wcnt <= 3'd3;
          end
        end
        S_OWAIT: begin
          wcnt <= wcnt - 1'b1;
          if (wcnt == '0) begin
            st <= S_IDLE; done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
