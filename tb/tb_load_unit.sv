// tb_load_unit: the load stage with a stand-in for the request unit.
//  * Tenant 0 LOADs 20 input words (2 bursts, one word per 64-bit beat) and 2
//    weight words (1 burst, 8 beats per 512-bit word) into its bank-0 regions;
//    the bank writes carry the right data at the right bank-local addresses, and
//    the request asks for ceil(words*beats/16) bursts with the shaped/encrypted
//    flags of the opcode.
//  * pop_next holds a LOAD until the compute->load token is there; push_next
//    pushes a load->compute token at the end.
//  * Tenant 1 LOADs into tenant 0's region: no write, viol pulses per word.
//  * ZEROIZE clears `count` words; teardown clears the whole region ranges of
//    both buffers (one word per cycle) and pulses td_done.
module tb_load_unit;
  import sesame_pkg::*;
  localparam int IBW = INP_WORDS / NTILE, WBW = WGT_WORDS / NTILE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NT-1:0] cmd_valid = '0, cmd_pop, tok_avail = '0, tok_pop, tok_full = '0, tok_push, td_req = '0, td_done;
  insn_t cmd [NT];
  rrange_t td_inp [NT], td_wgt [NT];
  logic [NT-1:0] rq_valid, rq_ready = '1, rq_shaped, rq_enc, rdat_valid = '0, viol, busy;
  logic [MEM_AW-1:0] rq_addr [NT];
  logic [15:0] rq_nbursts [NT];
  logic [MEM_DW-1:0] rdat = '0;
  own_t inp_own [INP_NREG], wgt_own [WGT_NREG];
  logic [NTILE-1:0] inp_wr_en, wgt_wr_en;
  logic [$clog2(IBW)-1:0] inp_wr_addr [NTILE];
  logic [$clog2(WBW)-1:0] wgt_wr_addr [NTILE];
  logic [INP_W-1:0] inp_wr_data [NTILE];
  logic [WGT_W-1:0] wgt_wr_data [NTILE];
  int checks = 0, failures = 0;
  load_unit dut (.*);

  logic [INP_W-1:0] m_inp [NTILE][int];
  logic [WGT_W-1:0] m_wgt [NTILE][int];
  int n_iw = 0, n_ww = 0, n_viol [NT];
  always_ff @(posedge clk) begin
    for (int t = 0; t < NTILE; t++) begin
      if (inp_wr_en[t]) begin m_inp[t][int'(inp_wr_addr[t])] <= inp_wr_data[t]; n_iw <= n_iw + 1; end
      if (wgt_wr_en[t]) begin m_wgt[t][int'(wgt_wr_addr[t])] <= wgt_wr_data[t]; n_ww <= n_ww + 1; end
    end
    for (int k = 0; k < NT; k++) if (viol[k]) n_viol[k] <= n_viol[k] + 1;
  end

  // request-unit stand-in: records the request, then streams beats value base+i
  int req_n [NT], req_bursts [NT];
  logic req_sh [NT], req_en [NT];
  task automatic serve(input int k, input logic [63:0] base);
    int n;
    while (!rq_valid[k]) @(negedge clk);
    n = rq_nbursts[k] * BURST_BEATS;
    req_n[k]++; req_bursts[k] = rq_nbursts[k]; req_sh[k] = rq_shaped[k]; req_en[k] = rq_enc[k];
    @(negedge clk);
    for (int i = 0; i < n; i++) begin rdat_valid[k] = 1; rdat = base + 64'(i); @(negedge clk); end
    rdat_valid[k] = 0;
  endtask
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic issue(input int k, input insn_t i);
    @(negedge clk); cmd[k] = i; cmd_valid[k] = 1;
    #1; while (!cmd_pop[k]) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid[k] = 0;
  endtask
  task automatic idle(input int k);
    @(negedge clk); while (busy[k]) @(negedge clk);
  endtask
  function automatic insn_t ld(opcode_e op, buf_e b, int s, int n);
    insn_t i = '0; i.op = op; i.buf_id = b; i.sram_addr = 16'(s); i.count = 16'(n); i.dram_addr = 32'h1000;
    return i;
  endfunction
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < NT; k++) begin cmd[k] = '0; td_inp[k] = '0; td_wgt[k] = '0; n_viol[k] = 0; req_n[k] = 0; end
    for (int r = 0; r < INP_NREG; r++) inp_own[r] = '{1'b1, TW'(r / (INP_NREG / NTILE))};
    for (int r = 0; r < WGT_NREG; r++) wgt_own[r] = '{1'b1, TW'(r / (WGT_NREG / NTILE))};
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // input load, 20 words -> 2 bursts, shaped + encrypted
    fork issue(0, ld(OP_LOAD_SE, BUF_INP, 100, 20)); serve(0, 64'hA000); join
    idle(0);
    check(req_bursts[0] == 2 && req_sh[0] && req_en[0], "2 shaped encrypted bursts requested");
    begin
      automatic int bad = 0;
      for (int w = 0; w < 20; w++) if (m_inp[0][100 + w] != 64'hA000 + 64'(w)) bad++;
      check(bad == 0 && n_iw == 20, $sformatf("20 input words written (%0d writes, %0d bad)", n_iw, bad));
    end
    // weight load: 2 words -> 16 beats -> 1 burst, 8 beats per word
    fork issue(0, ld(OP_LOAD, BUF_WGT, 7, 2)); serve(0, 64'hB000); join
    idle(0);
    check(req_bursts[0] == 1 && !req_sh[0] && !req_en[0], "1 plain weight burst");
    begin
      automatic int bad = 0;
      for (int w = 0; w < 2; w++) for (int b = 0; b < 8; b++)
        if (m_wgt[0][7 + w][64*b +: 64] != 64'hB000 + 64'(8*w + b)) bad++;
      check(bad == 0 && n_ww == 2, "weight words assembled from 8 beats");
    end
    // dependency: pop_next waits for a token, push_next pushes one
    begin
      automatic insn_t i = ld(OP_LOAD, BUF_INP, 0, 16);
      automatic int pushes = 0;
      i.pop_next = 1; i.push_next = 1;
      fork issue(0, i); join_none
      repeat (10) @(negedge clk);
      check(!rq_valid[0], "waits for the compute->load token");
      tok_avail[0] = 1; #1; while (!tok_pop[0]) begin @(negedge clk); #1; end
      @(negedge clk); tok_avail[0] = 0;
      fork serve(0, 64'hC000); begin while (busy[0]) begin @(posedge clk); if (tok_push[0]) pushes++; @(negedge clk); end end join
      check(pushes == 1, "load->compute token pushed once");
    end
    // tenant 1 writes into tenant 0's region
    begin
      automatic int w0 = n_iw;
      fork issue(1, ld(OP_LOAD, BUF_INP, 5, 16)); serve(1, 64'hD000); join
      idle(1);
      check(n_iw == w0 && n_viol[1] == 16 && m_inp[0][100] == 64'hA000, "foreign region blocked, 16 violations");
    end
    // ZEROIZE 10 words of the input region
    begin
      automatic int bad = 0;
      automatic int t0 = 0;
      issue(0, ld(OP_ZEROIZE, BUF_INP, 100, 10));
      idle(0);
      for (int w = 0; w < 20; w++) if ((m_inp[0][100 + w] == 0) != (w < 10)) bad++;
      check(bad == 0, "ZEROIZE cleared exactly 10 words");
    end
    // teardown: input region 0 (2048 words) and weight regions 0..1 (2 x 256 words)
    begin
      automatic int cyc = 0, bad = 0;
      td_inp[0] = '{8'd0, 8'd1}; td_wgt[0] = '{8'd0, 8'd2};
      td_req[0] = 1;
      while (!td_done[0]) begin @(negedge clk); cyc++; end
      td_req[0] = 0;
      repeat (2) @(negedge clk);
      foreach (m_inp[0][a]) if (a < 2048 && m_inp[0][a] != 0) bad++;
      foreach (m_wgt[0][a]) if (a < 512 && m_wgt[0][a] != 0) bad++;
      check(bad == 0, "teardown cleared the regions");
      check(cyc >= 2048 + 512 && cyc <= 2048 + 512 + 8, $sformatf("one word per cycle (%0d cycles)", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
