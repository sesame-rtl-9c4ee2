// tb_burst_splitter: checks that a request for N bursts leaves as N fixed-size
// descriptors at consecutive 128-byte addresses, one per accepted cycle, with the
// shaped/encrypted flags copied; that back-pressure holds the current burst; and
// that a zero-burst request is ignored.  Timing checked: in_ready is low for
// exactly N cycles when out_ready is held high.
module tb_burst_splitter;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_shaped = 0, in_enc = 0, out_valid, out_ready = 1;
  logic [MEM_AW-1:0] in_addr = '0;
  logic [15:0] in_nbursts = '0;
  burst_t out_burst;
  int checks = 0, failures = 0;
  burst_splitter dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int n, busy_cyc;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // 5 bursts, free-flowing
    in_valid = 1; in_addr = 32'h1000; in_nbursts = 5; in_shaped = 1; in_enc = 0;
    @(negedge clk); in_valid = 0;
    n = 0; busy_cyc = 0;
    while (out_valid) begin
      check(out_burst.addr == 32'h1000 + 32'(n * BURST_BYTES) && out_burst.shaped && !out_burst.enc,
            $sformatf("burst %0d address/flags", n));
      check(!in_ready, "busy while splitting");
      n++; busy_cyc++; @(negedge clk);
    end
    check(n == 5, $sformatf("5 bursts out (got %0d)", n));
    check(busy_cyc == 5, "one burst per cycle");
    check(in_ready, "ready again");
    // back-pressure: out_ready low holds the burst
    in_valid = 1; in_addr = 32'h8000; in_nbursts = 2; in_shaped = 0; in_enc = 1;
    @(negedge clk); in_valid = 0; out_ready = 0;
    repeat (4) begin
      check(out_valid && out_burst.addr == 32'h8000 && out_burst.enc, "held under back-pressure"); @(negedge clk);
    end
    out_ready = 1; @(negedge clk);
    check(out_valid && out_burst.addr == 32'h8080, "second burst after release");
    @(negedge clk);
    check(!out_valid, "done after 2");
    // zero bursts: nothing happens
    in_valid = 1; in_nbursts = 0; @(negedge clk); in_valid = 0; @(negedge clk);
    check(!out_valid && in_ready, "zero-burst request ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
