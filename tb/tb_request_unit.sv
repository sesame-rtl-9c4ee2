// tb_request_unit: the memory-request path (split load/store queues, two
// traffic shapers, DMA engine) against the behavioural DRAM.
//  * Tenant 1 (unshaped) reads 12 bursts: every beat reaches only tenant 1, in
//    order, with the DRAM contents; its 4-entry queue window fills (rq_stall).
//  * Tenant 0 (shaped, one burst per 40 cycles) reads 2 shaped encrypted bursts:
//    data correct, fake read and write bursts appear on the bus while it is
//    otherwise idle, fake data never reaches a tenant, cipher stall cycles count.
//  * Tenant 2 writes one burst: the 16 beats land in DRAM and wr_done pulses.
module tb_request_unit;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  shaper_cfg_t cfg [NT];
  logic temporal = 0;
  logic [NT-1:0] flush = '0, rq_valid = '0, rq_ready, rq_shaped = '0, rq_enc = '0, rdat_valid;
  logic [MEM_AW-1:0] rq_addr [NT];
  logic [15:0] rq_nbursts [NT];
  logic [MEM_DW-1:0] rdat;
  logic [NT-1:0] wq_valid = '0, wq_ready, wr_done, rq_stall;
  burst_t wq_burst [NT];
  logic [BURST_DW-1:0] wq_data [NT];
  logic ar_valid, ar_ready, r_valid, r_last, aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid;
  logic [MEM_AW-1:0] ar_addr, aw_addr;
  logic [TW:0] ar_id, r_id, aw_id, b_id;
  logic [MEM_DW-1:0] r_data, w_data;
  logic [31:0] bank_conflicts, rd_fakes, wr_fakes, bypasses, enc_stall_cycles;
  int checks = 0, failures = 0;
  request_unit dut (.*);
  dram_model #(.LAT(8)) u_dram (.clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_data, .r_id, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_id, .w_valid, .w_ready, .w_data, .w_last, .b_valid, .b_id);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // collect the beats each tenant receives
  logic [MEM_DW-1:0] got [NT][$];
  int stall_seen = 0, wdone [NT];
  always @(posedge clk) begin
    for (int k = 0; k < NT; k++) begin
      if (rdat_valid[k]) got[k].push_back(rdat);
      if (wr_done[k]) wdone[k]++;
    end
    if (rq_stall[1]) stall_seen++;
  end

  task automatic request(input int k, input int a, input int n, input logic shaped, input logic enc);
    @(negedge clk);
    rq_addr[k] = 32'(a); rq_nbursts[k] = 16'(n); rq_shaped[k] = shaped; rq_enc[k] = enc; rq_valid[k] = 1;
    #1; while (!rq_ready[k]) begin @(negedge clk); #1; end
    @(negedge clk); rq_valid[k] = 0;
  endtask

  initial begin
    for (int k = 0; k < NT; k++) begin
      cfg[k] = '0; rq_addr[k] = '0; rq_nbursts[k] = '0; wq_burst[k] = '0; wq_data[k] = '0; wdone[k] = 0;
    end
    cfg[0] = '{shaper_en: 1'b1, bandwidth: 16'd40, addr_base: 32'h0090_0000, addr_log2: 5'd16, cipher_aes: 1'b0};
    for (int a = 0; a < 12 * 16; a++) u_dram.poke(32'h0010_0000 + 32'(8 * a), {32'h1111_0000, 32'(a)});
    for (int a = 0; a < 2 * 16; a++)  u_dram.poke(32'h0020_0000 + 32'(8 * a), {32'h2222_0000, 32'(a)});
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    fork
      request(1, 32'h0010_0000, 12, 0, 0);
      request(0, 32'h0020_0000, 2, 1, 1);
      begin
        @(negedge clk);
        wq_burst[2] = '{addr: 32'h0030_0000, shaped: 1'b0, enc: 1'b0};
        for (int b = 0; b < BURST_BEATS; b++) wq_data[2][MEM_DW*b +: MEM_DW] = {32'h3333_0000, 32'(b)};
        wq_valid[2] = 1; #1;
        while (!wq_ready[2]) begin @(negedge clk); #1; end
        @(negedge clk); wq_valid[2] = 0;
      end
    join
    repeat (600) @(negedge clk);
    begin
      automatic int bad = 0;
      check(got[1].size() == 12 * 16, $sformatf("tenant 1 got %0d beats", got[1].size()));
      for (int a = 0; a < got[1].size(); a++) if (got[1][a] != {32'h1111_0000, 32'(a)}) bad++;
      check(bad == 0, "tenant 1 data in order");
      bad = 0;
      check(got[0].size() == 2 * 16, $sformatf("tenant 0 got %0d beats", got[0].size()));
      for (int a = 0; a < got[0].size(); a++) if (got[0][a] != {32'h2222_0000, 32'(a)}) bad++;
      check(bad == 0, "tenant 0 data in order");
      check(got[2].size() == 0 && got[3].size() == 0, "no data to other tenants (fakes dropped)");
      bad = 0;
      for (int b = 0; b < BURST_BEATS; b++) if (u_dram.peek(32'h0030_0000 + 32'(8 * b)) != {32'h3333_0000, 32'(b)}) bad++;
      check(bad == 0 && wdone[2] == 1, "write burst landed, wr_done once");
    end
    check(stall_seen > 0, "tenant 1's queue window filled (rq_stall)");
    check(rd_fakes > 5 && wr_fakes > 5, $sformatf("fake traffic rd=%0d wr=%0d", rd_fakes, wr_fakes));
    check(enc_stall_cycles == 2 * 8, $sformatf("cipher stalls %0d (expect 16)", enc_stall_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
