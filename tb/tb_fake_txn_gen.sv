// tb_fake_txn_gen: checks that fake burst addresses stay inside the tenant's
// configured range and are burst aligned, that they change on `next` (LFSR), and
// that they are steered to a DRAM bank the conflict checker reports as free
// whenever the range spans that bank.  With no free bank, the raw address is kept.
module tb_fake_txn_gen;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [MEM_AW-1:0] addr_base = 32'h0080_0000, addr;
  logic [4:0] addr_log2 = 5'd16;
  logic [DRAM_BANKS-1:0] free_banks = '1;
  logic next = 0;
  int checks = 0, failures = 0;
  fake_txn_gen dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [MEM_AW-1:0] prev;
    int changes = 0, in_range = 0, aligned = 0, on_free = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      free_banks = 8'(1 << (i % 8)) | 8'(1 << ((i * 3 + 1) % 8));
      #1;
      if (addr >= addr_base && addr < addr_base + (32'd1 << addr_log2)) in_range++;
      if (addr[$clog2(BURST_BYTES)-1:0] == 0) aligned++;
      if (free_banks[addr[DRAM_BANK_LSB +: 3]]) on_free++;
      prev = addr;
      next = 1; @(negedge clk); next = 0; #1;
      if (addr != prev) changes++;
    end
    check(in_range == 200, $sformatf("addresses in range (%0d/200)", in_range));
    check(aligned == 200, "addresses burst aligned");
    check(on_free == 200, $sformatf("steered to a free bank (%0d/200)", on_free));
    check(changes >= 195, $sformatf("address changes on next (%0d/200)", changes));
    // small range (4 kB) inside one bank: never leaves the range
    addr_log2 = 5'd12; free_banks = 8'b0000_0010;
    for (int i = 0; i < 50; i++) begin
      #1; check(addr >= addr_base && addr < addr_base + 32'h1000, "small range respected");
      next = 1; @(negedge clk); next = 0;
    end
    // no free bank: address unchanged by steering
    addr_log2 = 5'd16; free_banks = '0; #1;
    check(addr >= addr_base && addr < addr_base + 32'h1_0000, "no free bank: raw address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
