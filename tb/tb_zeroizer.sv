// tb_zeroizer: checks that the zeroizer writes exactly `count` consecutive
// addresses from `addr`, one per cycle starting the cycle after start, keeps
// busy high meanwhile, and pulses done once, right after the last write
// (latency count+1 cycles from start).  A zero count completes at once.
module tb_zeroizer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, wr_en;
  logic [15:0] addr = '0, wr_addr;
  logic [16:0] count = '0;
  int checks = 0, failures = 0;
  zeroizer dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic run(input int a, input int n);
    int writes = 0, bad = 0, cyc = 0, dones = 0;
    start = 1; addr = 16'(a); count = 17'(n);
    @(negedge clk); start = 0;
    while (!done) begin
      cyc++;
      if (wr_en) begin if (wr_addr != 16'(a + writes)) bad++; writes++; end
      if (!busy && writes < n) bad++;
      @(negedge clk);
    end
    check(writes == n && bad == 0, $sformatf("%0d writes from %0d (got %0d, bad %0d)", n, a, writes, bad));
    check(cyc == n, $sformatf("done after %0d cycles (expected %0d)", cyc + 1, n + 1));
    @(negedge clk);
    check(!done && !busy, "done is a single pulse");
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run(100, 1);
    run(2048, 2048);
    run(16384 - 7, 7);
    run(0, 65536);
    start = 1; count = 0; @(negedge clk); start = 0;
    check(done && !busy, "zero count completes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
