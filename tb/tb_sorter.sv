// tb_sorter -- random insertion sequences into the 3-minima sorter,
// compared with a reference that sorts the full input history; also checks
// the new-minimum flag and that ties keep the older entry first.
module tb_sorter;
  logic [2:0][3:0] m_in, m_out;
  logic [3:0]      a;
  logic            new_min;
  int checks = 0, failures = 0;

  sorter #(.GAMMA(3), .MW(4)) dut (.m_in, .a, .m_out, .new_min);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist[$];
    for (int seq = 0; seq < 300; seq++) begin
      m_in = {4'hf, 4'hf, 4'hf};
      hist.delete();
      for (int n = 0; n < 1 + $urandom_range(18); n++) begin
        int s[$], mn;
        a = 4'($urandom_range(15));
        #1;
        mn = 15;
        foreach (hist[i]) if (hist[i] < mn) mn = hist[i];
        checks++;
        if (new_min !== (int'(a) < mn)) failures++;
        hist.push_back(int'(a));
        s = hist;
        s.sort();
        for (int i = 0; i < 3; i++) begin
          int e; e = (i < s.size()) ? s[i] : 15;
          checks++;
          if (int'(m_out[i]) != e) begin
            failures++;
            $display("FAIL: seq %0d m[%0d]=%0d expected %0d", seq, i, m_out[i], e);
          end
        end
        m_in = m_out;
      end
    end
    // tie: equal value is not a new minimum
    m_in = {4'd9, 4'd5, 4'd3}; a = 4'd3; #1;
    checks++; if (new_min || m_out != {4'd5, 4'd3, 4'd3}) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
