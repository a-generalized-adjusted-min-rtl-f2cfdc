// tb_ldpc_decoder -- end-to-end test of the decoder at reduced width.
//
// A 72-lane decoder (three groups of 24) decodes random 5G-style QC-LDPC
// codes: lifting sizes that leave one or two groups switched off and one
// that uses all lanes, with and without early termination. Every run is
// compared bit by bit with the layered GA-MS model of dec_tb_common.svh,
// including iterations, PPC flag and the exact number of decoding cycles.
// It also counts that each mechanism of the design occurred: stalls for
// data dependencies and for row synchronisation, Q- and T-memory
// forwarding, early termination, runs to the iteration limit, the drain
// pass with wrapped SEL operations, killing of SEL operations in flight,
// group disabling and a last block that becomes the first minimum.
module tb_ldpc_decoder;
  localparam int ZP    = 72;
  localparam int GP    = 24;
  localparam int SEQ_D = 332;
  localparam int NPM   = 68;
  localparam int NLM   = 46;
  localparam int NEM   = 316;

  `include "dec_tb_common.svh"

  ldpc_decoder #(.Z_P(ZP), .G_P(GP)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot_dep, tot_sync, tot_prev;
    tot_dep = 0; tot_sync = 0; tot_prev = 0;
    n_et = 0; n_full = 0; n_kill = 0; n_fwd_q_dir = 0; n_fwd_q_reg = 0; n_fwd_t = 0;
    n_gate = 0; n_newmin_last = 0;
    build_lut();
    reset_dut();
    // small graph, Z = 30 (group 2 off), early termination
    make_graph(6, 14, 2, 8, 3, 6, 0, 30);
    make_program();
    tot_dep += n_dep_stall; tot_sync += n_sync_stall; tot_prev += n_prev_ops;
    configure();
    gen_llr(2.5, 1.2);
    decode_once(8, 1, "A");
    // same code, no early termination, 3 iterations
    gen_llr(2.5, 1.2);
    decode_once(3, 0, "B");
    // larger graph, Z = 20 (groups 1 and 2 off)
    make_graph(12, 24, 3, 12, 3, 8, 0, 20);
    make_program();
    tot_dep += n_dep_stall; tot_sync += n_sync_stall; tot_prev += n_prev_ops;
    configure();
    gen_llr(2.5, 1.3);
    decode_once(10, 1, "C");
    // all lanes used, Z = 72, noisy channel
    make_graph(8, 18, 2, 10, 3, 7, 0, 72);
    make_program();
    tot_dep += n_dep_stall; tot_sync += n_sync_stall; tot_prev += n_prev_ops;
    configure();
    gen_llr(2.5, 1.3);
    decode_once(6, 1, "D");
    gen_llr(0.6, 1.1);
    decode_once(4, 1, "E");
    // dense rows last: the SEL ops of the next pass follow the last layer
    // immediately, so early termination has to kill them in flight
    make_graph(8, 18, 2, 10, 3, 4, 0, 48);
    rotate_rows(2);
    make_program();
    tot_dep += n_dep_stall; tot_sync += n_sync_stall; tot_prev += n_prev_ops;
    configure();
    gen_llr(2.5, 1.0);
    decode_once(6, 1, "F");

    $display("mechanisms: dep_stall=%0d sync_stall=%0d wrapped_sel=%0d fwd_q_direct=%0d fwd_q_reg=%0d fwd_t=%0d et=%0d full=%0d kill=%0d gated=%0d newmin_last=%0d",
             tot_dep, tot_sync, tot_prev, n_fwd_q_dir, n_fwd_q_reg, n_fwd_t, n_et, n_full, n_kill, n_gate, n_newmin_last);
    check(tot_dep > 0, "no data-dependency stall");
    check(tot_sync > 0, "no row-synchronisation stall");
    check(tot_prev > 0, "no wrapped SEL op");
    check(n_fwd_q_dir > 0, "no direct Q forwarding");
    check(n_fwd_q_reg > 0, "no registered Q forwarding");
    check(n_fwd_t > 0, "no T forwarding");
    check(n_et > 0, "no early termination");
    check(n_full > 0, "no run to the iteration limit");
    check(n_kill > 0, "no SEL op killed");
    check(n_gate > 0, "no disabled group");
    check(n_newmin_last > 0, "no last block as new minimum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
