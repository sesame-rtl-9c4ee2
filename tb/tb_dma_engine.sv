// tb_dma_engine: checks the DMA engine that puts bursts on the memory port.
//  * Cipher latency (cycle counts): a plain burst reaches the AR channel one
//    cycle after it is accepted; a QARMA-encrypted burst 1 + 8 cycles (eight
//    128-bit blocks per 128-byte burst, 10 ns each at a 10 ns clock); an
//    AES-encrypted burst 1 + 16 cycles (20 ns per block).
//  * Writes: AW, then the 16 beats of the burst in order with w_last on the 16th.
//  * The ids carry {fake, tenant}; a real read to a bank with a pending burst is
//    a bank conflict; with 8 reads pending rd_ready drops until one retires.
module tb_dma_engine;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_valid = 0, rd_ready, rd_fake = 0, rd_enc = 0, rd_aes = 0;
  logic wr_valid = 0, wr_ready, wr_fake = 0, wr_enc = 0, wr_aes = 0;
  logic [MEM_AW-1:0] rd_addr = '0, wr_addr = '0, ar_addr, aw_addr;
  logic [TW-1:0] rd_tenant = '0, wr_tenant = '0;
  logic [BURST_DW-1:0] wr_data = '0;
  logic ar_valid, ar_ready = 1, r_valid = 0, r_last = 0, aw_valid, aw_ready = 1, w_valid, w_ready = 1, w_last, b_valid = 0;
  logic [TW:0] ar_id, aw_id;
  logic [MEM_DW-1:0] w_data;
  logic [DRAM_BANKS-1:0] free_banks;
  logic [31:0] conflicts, enc_stall_cycles;
  int checks = 0, failures = 0;
  dma_engine dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // returns cycles from acceptance to the AR handshake
  task automatic rd(input int a, input int t, input logic fake, input logic enc, input logic aes, output int lat);
    lat = 0;
    while (!rd_ready) @(negedge clk);
    rd_valid = 1; rd_addr = 32'(a); rd_tenant = TW'(t); rd_fake = fake; rd_enc = enc; rd_aes = aes;
    @(negedge clk); rd_valid = 0;
    while (!(ar_valid && ar_ready)) begin lat++; @(negedge clk); end
    lat++;
    check(ar_addr == 32'(a) && ar_id == {fake, TW'(t)}, "AR address and id");
    @(negedge clk);
  endtask
  task automatic retire_rd();
    r_valid = 1; r_last = 1; @(negedge clk); r_valid = 0; r_last = 0;
  endtask

  initial begin
    int lat, e0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    rd(32'h0000_0000, 1, 0, 0, 0, lat); check(lat == 1, $sformatf("plain read latency %0d", lat));
    e0 = enc_stall_cycles;
    rd(32'h0000_2000, 2, 0, 1, 0, lat); check(lat == 9, $sformatf("QARMA read latency %0d (expect 9)", lat));
    check(enc_stall_cycles - e0 == 8, "8 QARMA stall cycles counted");
    rd(32'h0000_4000, 3, 0, 1, 1, lat); check(lat == 17, $sformatf("AES read latency %0d (expect 17)", lat));
    rd(32'h0000_6000, 0, 1, 1, 0, lat); check(lat == 9, "fake burst flags honoured");
    check(conflicts == 0, "four reads to four banks: no conflict");
    rd(32'h0000_0080, 1, 0, 0, 0, lat);
    check(conflicts == 1, "second real read to bank 0 is a conflict");
    rd(32'h0000_6080, 1, 1, 0, 0, lat);
    check(conflicts == 1, "fake read to a busy bank not counted");
    rd(32'h0000_8000, 1, 0, 0, 0, lat);
    rd(32'h0000_A000, 1, 0, 0, 0, lat);
    check(!rd_ready, "8 pending reads: no more accepted");
    check(free_banks == 8'b1111_0000 || free_banks == 8'b1100_0000 || free_banks == 8'b1101_0000 ||
          free_banks[1:0] == 2'b00, "banks 0..3 busy");
    repeat (8) retire_rd();
    check(rd_ready && free_banks == '1, "retired");
    // write burst: data order, w_last, cipher delay
    for (int b = 0; b < BURST_BEATS; b++) wr_data[MEM_DW*b +: MEM_DW] = {32'hCAFE_0000 + 32'(b), 32'(b * 3)};
    begin
      int got = 0, bad = 0, wait_aw = 0;
      wr_valid = 1; wr_addr = 32'h1000; wr_tenant = 2; wr_enc = 1; wr_aes = 1;
      @(negedge clk); wr_valid = 0;
      while (!aw_valid) begin wait_aw++; @(negedge clk); end
      check(wait_aw == 16, $sformatf("AES write delay %0d (expect 16)", wait_aw));
      check(aw_addr == 32'h1000 && aw_id == {1'b0, 2'd2}, "AW address and id");
      @(negedge clk);
      w_ready = 0; @(negedge clk); w_ready = 1;   // one stall cycle
      while (got < BURST_BEATS) begin
        if (w_valid && w_ready) begin
          if (w_data != wr_data[MEM_DW*got +: MEM_DW]) bad++;
          if (w_last != (got == BURST_BEATS - 1)) bad++;
          got++;
        end
        @(negedge clk);
      end
      check(bad == 0, "16 beats in order with w_last");
      check(!w_valid && wr_ready, "write channel idle after the burst");
      b_valid = 1; @(negedge clk); b_valid = 0;
      check(free_banks == '1, "write retired by B");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
