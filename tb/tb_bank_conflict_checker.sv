// tb_bank_conflict_checker: drives read and write issue/done events and checks
// the per-bank pending state (free_banks), the conflict counter (a real burst
// issued to a bank that already has a pending burst), that fake bursts occupy a
// bank but are not counted as conflicts, in-order retirement, and the full flag
// at MAXPEND outstanding bursts per channel.
module tb_bank_conflict_checker;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_issue = 0, rd_issue_fake = 0, rd_done = 0, wr_issue = 0, wr_issue_fake = 0, wr_done = 0;
  logic [MEM_AW-1:0] rd_addr = '0, wr_addr = '0;
  logic rd_full, wr_full;
  logic [DRAM_BANKS-1:0] free_banks;
  logic [31:0] conflicts;
  int checks = 0, failures = 0;
  bank_conflict_checker dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic logic [31:0] ba(int b); return 32'(b) << DRAM_BANK_LSB; endfunction
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(free_banks == '1 && conflicts == 0, "reset state");
    rd_issue = 1; rd_addr = ba(2); @(negedge clk); rd_issue = 0;
    check(free_banks == 8'b1111_1011, "bank 2 busy after read issue");
    wr_issue = 1; wr_addr = ba(2) + 32'h40; @(negedge clk); wr_issue = 0;
    check(conflicts == 1, "real write to busy bank is a conflict");
    rd_issue = 1; rd_issue_fake = 1; rd_addr = ba(2); @(negedge clk); rd_issue = 0; rd_issue_fake = 0;
    check(conflicts == 1, "fake burst not counted");
    rd_issue = 1; rd_addr = ba(5); @(negedge clk); rd_issue = 0;
    check(conflicts == 1 && free_banks == 8'b1101_1011, "bank 5 busy, no conflict");
    // retire reads in order: bank 2, bank 2 (fake), bank 5
    rd_done = 1; @(negedge clk); rd_done = 0;
    check(!free_banks[2], "bank 2 still has the write and one read");
    wr_done = 1; @(negedge clk); wr_done = 0;
    rd_done = 1; @(negedge clk); rd_done = 0;
    check(free_banks[2] && !free_banks[5], "bank 2 free, bank 5 pending");
    rd_done = 1; @(negedge clk); rd_done = 0;
    check(free_banks == '1, "all free");
    // fill the read list
    for (int i = 0; i < 8; i++) begin rd_issue = 1; rd_addr = ba(i); @(negedge clk); end
    rd_issue = 0;
    check(rd_full && !wr_full, "read list full at MAXPEND");
    check(free_banks == '0, "every bank pending");
    rd_issue = 1; rd_addr = ba(1); @(negedge clk); rd_issue = 0;
    check(conflicts == 1, "issue while full is ignored");
    repeat (8) begin rd_done = 1; @(negedge clk); end
    rd_done = 0;
    check(free_banks == '1 && !rd_full, "drained");
    // simultaneous read and write to the same free bank: neither is a conflict (same cycle)
    rd_issue = 1; wr_issue = 1; rd_addr = ba(7); wr_addr = ba(7); @(negedge clk); rd_issue = 0; wr_issue = 0;
    check(conflicts == 1, "same-cycle issues see the old pending state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
