// tb_dp_sram -- dual-port SRAM: random writes and reads against an array
// model, one-cycle read latency, read data held without a read, and the
// old word returned when the read address is written in the same cycle.
module tb_dp_sram;
  logic         clk = 0;
  logic         we = 0, re = 0;
  logic [6:0]   waddr = '0, raddr = '0;
  logic [167:0] wdata = '0, rdata;
  logic [167:0] model [68];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dp_sram #(.DEPTH(68), .WIDTH(168)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [167:0] exp_d;
    bit pend;
    for (int i = 0; i < 68; i++) begin
      @(negedge clk);
      we = 1; waddr = 7'(i); wdata = {6{28'($urandom)}}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    pend = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp_d) begin failures++; $display("FAIL: read mismatch at %0d", n); end
      end else if (n > 0) begin
        checks++;
        if (rdata !== exp_d) failures++;   // held
      end
      we = 1'($urandom_range(1)); waddr = 7'($urandom_range(67));
      wdata = {6{28'($urandom)}};
      re = 1'($urandom_range(1)); raddr = (n % 7 == 0) ? waddr : 7'($urandom_range(67));
      if (re) begin exp_d = model[raddr]; pend = 1; end else pend = 0;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
