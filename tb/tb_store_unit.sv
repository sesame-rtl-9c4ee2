// tb_store_unit: the store stage with a behavioural output bank and a stand-in
// for the request unit.
//  * Tenant 0 STOREs 20 output words from bank 0: two bursts at consecutive
//    128-byte DRAM addresses carrying the words in beat order, zero padding
//    past `count`, shaped/encrypted flags from the opcode; the store->compute
//    token is pushed only after both write responses (wr_done) came back.
//  * pop_prev holds the STORE until the compute->store token is there.
//  * Tenant 1 STOREs from tenant 0's region: the data leaving is all zero and
//    viol pulses for every word.
//  * ZEROIZE of ACC clears `count` words; teardown sweeps the whole accumulator
//    and output ranges and pulses td_done.
module tb_store_unit;
  import sesame_pkg::*;
  localparam int ABW = ACC_WORDS / NTILE, OBW = OUT_WORDS / NTILE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NT-1:0] cmd_valid = '0, cmd_pop, tok_avail = '0, tok_pop, tok_full = '0, tok_push, td_req = '0, td_done;
  insn_t cmd [NT];
  rrange_t td_acc [NT], td_out [NT];
  logic [NT-1:0] wq_valid, wq_ready = '1, wr_done = '0, viol, busy;
  burst_t wq_burst [NT];
  logic [BURST_DW-1:0] wq_data [NT];
  own_t acc_own [ACC_NREG], out_own [OUT_NREG];
  logic [NTILE-1:0] out_rd_en, acc_zw_en, out_zw_en;
  logic [$clog2(OBW)-1:0] out_rd_addr [NTILE], out_zw_addr [NTILE];
  logic [$clog2(ABW)-1:0] acc_zw_addr [NTILE];
  logic [OUT_W-1:0] out_rd_data [NTILE];
  int checks = 0, failures = 0;
  store_unit dut (.*);

  logic [OUT_W-1:0] m_out [NTILE][int];
  logic [ACC_W-1:0] m_acc [NTILE][int];
  int n_viol [NT];
  always_ff @(posedge clk) begin
    for (int t = 0; t < NTILE; t++) begin
      if (out_rd_en[t]) out_rd_data[t] <= m_out[t].exists(int'(out_rd_addr[t])) ? m_out[t][int'(out_rd_addr[t])] : '0;
      if (acc_zw_en[t]) m_acc[t][int'(acc_zw_addr[t])] <= '0;
      if (out_zw_en[t]) m_out[t][int'(out_zw_addr[t])] <= '0;
    end
    for (int k = 0; k < NT; k++) if (viol[k]) n_viol[k] <= n_viol[k] + 1;
  end

  // request-unit stand-in: takes bursts, answers each with wr_done after 20 cycles
  burst_t bursts [NT][$];
  logic [BURST_DW-1:0] bdata [NT][$];
  int pend [NT];
  always @(negedge clk) begin
    for (int k = 0; k < NT; k++) if (wq_valid[k] && wq_ready[k]) begin
      bursts[k].push_back(wq_burst[k]); bdata[k].push_back(wq_data[k]);
      fork
        automatic int kk = k;
        begin repeat (20) @(negedge clk); wr_done[kk] = 1; @(negedge clk); wr_done[kk] = 0; end
      join_none
    end
  end

  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic issue(input int k, input insn_t i);
    @(negedge clk); cmd[k] = i; cmd_valid[k] = 1;
    #1; while (!cmd_pop[k]) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid[k] = 0;
  endtask
  function automatic insn_t st(opcode_e op, buf_e b, int s, int n);
    insn_t i = '0; i.op = op; i.buf_id = b; i.sram_addr = 16'(s); i.count = 16'(n); i.dram_addr = 32'h4000;
    return i;
  endfunction
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < NT; k++) begin cmd[k] = '0; td_acc[k] = '0; td_out[k] = '0; n_viol[k] = 0; end
    for (int r = 0; r < ACC_NREG; r++) acc_own[r] = '{1'b1, TW'(r / (ACC_NREG / NTILE))};
    for (int r = 0; r < OUT_NREG; r++) out_own[r] = '{1'b1, TW'(r / (OUT_NREG / NTILE))};
    for (int t = 0; t < NTILE; t++) for (int a = 0; a < 64; a++) begin
      m_out[t][a] = {32'(t), 32'(a + 1)}; m_acc[t][a] = '1;
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // STORE_SE 20 words with pop_prev and push_prev
    begin
      automatic insn_t i = st(OP_STORE_SE, BUF_OUT, 10, 20);
      automatic int pushed_at = -1, cyc = 0, last_done = -1, bad = 0;
      i.pop_prev = 1; i.push_prev = 1;
      fork issue(0, i); join_none
      repeat (10) @(negedge clk);
      check(bursts[0].size() == 0, "waits for the compute->store token");
      tok_avail[0] = 1; #1; while (!tok_pop[0]) begin @(negedge clk); #1; end
      @(negedge clk); tok_avail[0] = 0;
      while (busy[0]) begin
        @(posedge clk); #1;
        if (wr_done[0]) last_done = cyc;
        if (tok_push[0]) pushed_at = cyc;
        @(negedge clk); cyc++;
      end
      check(bursts[0].size() == 2, $sformatf("2 bursts (%0d)", bursts[0].size()));
      check(bursts[0][0].addr == 32'h4000 && bursts[0][1].addr == 32'h4080, "burst addresses");
      check(bursts[0][0].shaped && bursts[0][0].enc, "opcode flags");
      for (int w = 0; w < 32; w++) begin
        automatic logic [63:0] e = (w < 20) ? {32'd0, 32'(10 + w + 1)} : 64'd0;
        if (bdata[0][w / 16][64 * (w % 16) +: 64] != e) bad++;
      end
      check(bad == 0, $sformatf("burst data in beat order with zero padding (%0d bad)", bad));
      check(pushed_at >= last_done && last_done >= 0, "token pushed after the last write response");
    end
    // tenant 1 stores from tenant 0's region (bank 0)
    begin
      automatic int bad = 0;
      issue(1, st(OP_STORE, BUF_OUT, 0, 16));
      @(negedge clk); while (busy[1]) @(negedge clk);
      for (int b = 0; b < BURST_BEATS; b++) if (bdata[1][0][64*b +: 64] != 0) bad++;
      check(bursts[1].size() == 1 && bad == 0, "foreign data reads as zero");
      check(n_viol[1] == 16, $sformatf("16 violations (%0d)", n_viol[1]));
    end
    // ZEROIZE ACC 5 words at 3
    begin
      automatic int bad = 0;
      issue(0, st(OP_ZEROIZE, BUF_ACC, 3, 5));
      @(negedge clk); while (busy[0]) @(negedge clk);
      for (int a = 0; a < 12; a++) if ((m_acc[0][a] == 0) != (a >= 3 && a < 8)) bad++;
      check(bad == 0, "ZEROIZE ACC cleared exactly 5 words");
    end
    // teardown of tenant 2 (bank 2): acc region 16 (512 words), out region 8 (2048 words)
    begin
      automatic int cyc = 0, bad = 0;
      td_acc[2] = '{8'd16, 8'd1}; td_out[2] = '{8'd8, 8'd1};
      td_req[2] = 1;
      while (!td_done[2]) begin @(negedge clk); cyc++; end
      td_req[2] = 0;
      repeat (2) @(negedge clk);
      for (int a = 0; a < 64; a++) if (m_acc[2][a] != 0 || m_out[2][a] != 0) bad++;
      check(bad == 0 && n_viol[2] == 0, "teardown cleared tenant 2's regions without violations");
      check(cyc >= 512 + 2048 && cyc <= 512 + 2048 + 8, $sformatf("one word per cycle (%0d)", cyc));
      check(m_out[1][5] == {32'd1, 32'd6}, "other banks untouched");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
