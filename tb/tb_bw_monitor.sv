// tb_bw_monitor: drives a known pattern of read and write beats and checks that
// every WINDOW cycles `sample` pulses once with the bytes moved in that window
// (8 bytes per 64-bit beat), and that the running totals add up.
module tb_bw_monitor;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic r_beat = 0, w_beat = 0, sample;
  logic [31:0] rd_bytes, wr_bytes;
  logic [63:0] rd_total, wr_total;
  int checks = 0, failures = 0;
  bw_monitor dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int cyc = 0, samples = 0, last = -1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      for (int c = 0; c < 1000; c++) begin
        r_beat = (c % 4 == 0);            // 250 beats per window
        w_beat = (c < 10 * (w + 1));      // 10, 20, 30 beats
        @(negedge clk);
        if (sample) begin
          check(last < 0 || cyc - last == 1000, "one sample per 1000 cycles");
          last = cyc; samples++;
        end
        cyc++;
      end
    end
    r_beat = 0; w_beat = 0;
    repeat (2) @(negedge clk);
    check(samples == 3, $sformatf("3 samples (%0d)", samples));
    check(rd_bytes == 250 * 8, $sformatf("read bytes per window %0d", rd_bytes));
    check(wr_bytes == 30 * 8, $sformatf("write bytes last window %0d", wr_bytes));
    check(rd_total == 750 * 8 && wr_total == 60 * 8, "running totals");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
