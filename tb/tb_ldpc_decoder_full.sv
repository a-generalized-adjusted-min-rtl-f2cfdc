// tb_ldpc_decoder_full -- the decoder at its default size: 384 lanes in 16
// groups, memories for 68 columns, 46 layers, 316 edges and 332 instruction
// words. It decodes a random QC-LDPC code with the dimensions of 5G base
// graph 1 (46 x 68 blocks, 316 non-zero blocks, four dense rows of degree
// 19 that use the 26 core columns, lifting size 384), rows ordered by
// descending degree, once with early termination and once for a fixed
// 4 iterations, and compares the result with the reference model.
// The shifts and positions are random, not the 5G tables.
module tb_ldpc_decoder_full;
  localparam int ZP    = 384;
  localparam int GP    = 24;
  localparam int SEQ_D = 332;
  localparam int NPM   = 68;
  localparam int NLM   = 46;
  localparam int NEM   = 316;

  `include "dec_tb_common.svh"

  ldpc_decoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tries;
    build_lut();
    reset_dut();
    tries = 0;
    do begin
      make_graph(46, 68, 4, 19, 3, 10, 316, 384);
      sort_rows(4);
      make_program();
      tries++;
    end while (P > SEQ_D && tries < 200);
    check(P <= SEQ_D, $sformatf("program of %0d words fits %0d", P, SEQ_D));
    check(edge_count() == 316, "316 edges");
    configure();
    gen_llr(2.5, 1.3);
    decode_once(15, 1, "BG1-size ET");
    gen_llr(2.5, 1.3);
    decode_once(4, 0, "BG1-size 4 iterations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
