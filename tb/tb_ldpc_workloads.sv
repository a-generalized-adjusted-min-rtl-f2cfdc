// tb_ldpc_workloads -- the decoder at its default size running codes with
// the shapes of the published peak-throughput configurations, all at
// Z = 384 and a fixed 4 iterations without early termination:
//   BG1 R=8/9 : 5 layers x 27 columns, four core rows of degree 19 and one
//               row of degree 3 (79 blocks)
//   BG2 R=1/5 : 42 x 52, four core rows of degree 10, 197 blocks
//   BG2 R=2/3 : 7 x 17, four core rows of degree 10
// Shifts and block positions are random (the 5G tables are not used), the
// rows are ordered with the dense rows first and then by descending degree.
// For each code the testbench checks the decoded bits, iteration count and
// parity flag against the reference model, the exact run length, and that
// the program length per iteration equals the number of blocks plus the
// degree spread, sum(d_c) + (d_max - d_min), the single-peak latency of the
// layered schedule; it prints the resulting decoding throughput at 895 MHz
// (Np*Z bits per 4 iterations).
module tb_ldpc_workloads;
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

  task automatic run_code(string name, int mp, int np, int dcore, int dmin, int dmax, int etarget);
    int dhi, dlo;
    make_graph(mp, np, 4, dcore, dmin, dmax, etarget, 384);
    sort_rows(4);
    make_program();
    dhi = 0; dlo = 100;
    for (int c = 0; c < MP; c++) begin
      if (deg[c] > dhi) dhi = deg[c];
      if (deg[c] < dlo) dlo = deg[c];
    end
    check(P == edge_count() + dhi - dlo,
          $sformatf("%s: %0d cycles per iteration, sum(d)+dmax-dmin = %0d", name, P, edge_count() + dhi - dlo));
    configure();
    gen_llr(2.5, 1.3);
    decode_once(4, 0, name);
    $display("%s: %0d cycles per iteration, %0.2f Gbps at 895 MHz for 4 iterations",
             name, P, real'(np * 384) * 0.895 / real'(4 * P));
  endtask

  initial begin
    build_lut();
    reset_dut();
    run_code("BG1 R=8/9", 5, 27, 19, 3, 3, 0);
    run_code("BG2 R=1/5", 42, 52, 10, 2, 6, 197);
    run_code("BG2 R=2/3", 7, 17, 10, 3, 5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
