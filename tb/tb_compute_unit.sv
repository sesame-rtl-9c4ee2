// tb_compute_unit: runs the compute stage against behavioural scratchpad banks
// (one-cycle synchronous reads, like the real banks).
//  * Tenant 0 owns tile 0 (spatial): GEMM with reset, a second accumulating
//    GEMM, then ALU MAX 0 (ReLU); the accumulator and output banks are compared
//    with a reference.  Cycle count: each instruction takes exactly 2 cycles per
//    iteration plus a fixed overhead, whatever the data (checked with 4 and 16
//    iterations and with two different data sets).
//  * Dependency tokens: a GEMM with pop_prev waits for l2c_avail; push_next
//    pulses c2s_push at the end; FINISH pulses finish.
//  * Tenant 1 owns tile 1 but points its destination at a region it does not
//    own: the write is dropped and viol pulses.
//  * Tenant 2 owns tiles 2 and 3 (temporal-style): one instruction runs on both.
module tb_compute_unit;
  import sesame_pkg::*;
  localparam int IBW = INP_WORDS / NTILE, WBW = WGT_WORDS / NTILE, ABW = ACC_WORDS / NTILE, OBW = OUT_WORDS / NTILE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NT-1:0] cmd_valid = '0, cmd_pop, l2c_avail = '0, l2c_pop, s2c_avail = '0, s2c_pop;
  logic [NT-1:0] c2l_full = '0, c2l_push, c2s_full = '0, c2s_push, finish, viol, busy;
  insn_t cmd [NT];
  own_t tile_own [NTILE], inp_own [INP_NREG], wgt_own [WGT_NREG], acc_own [ACC_NREG], out_own [OUT_NREG];
  logic [NTILE-1:0] inp_rd_en, wgt_rd_en, acc_wr_en, out_wr_en;
  logic [$clog2(IBW)-1:0] inp_rd_addr [NTILE];
  logic [$clog2(WBW)-1:0] wgt_rd_addr [NTILE];
  logic [$clog2(ABW)-1:0] acc_rd_addr [NTILE][2], acc_wr_addr [NTILE];
  logic [$clog2(OBW)-1:0] out_wr_addr [NTILE];
  logic [INP_W-1:0] inp_rd_data [NTILE];
  logic [WGT_W-1:0] wgt_rd_data [NTILE];
  logic [ACC_W-1:0] acc_rd_data [NTILE][2], acc_wr_data [NTILE];
  logic [OUT_W-1:0] out_wr_data [NTILE];
  logic [1:0] acc_rd_en [NTILE];
  logic [31:0] tile_iters [NTILE];
  int checks = 0, failures = 0;
  compute_unit dut (.*);

  // behavioural banks (sparse)
  logic [INP_W-1:0] m_inp [NTILE][int];
  logic [WGT_W-1:0] m_wgt [NTILE][int];
  logic [ACC_W-1:0] m_acc [NTILE][int];
  logic [OUT_W-1:0] m_out [NTILE][int];
  function automatic logic [ACC_W-1:0] acc_at(int t, int a); return m_acc[t].exists(a) ? m_acc[t][a] : '0; endfunction
  always_ff @(posedge clk) begin
    for (int t = 0; t < NTILE; t++) begin
      if (inp_rd_en[t]) inp_rd_data[t] <= m_inp[t].exists(int'(inp_rd_addr[t])) ? m_inp[t][int'(inp_rd_addr[t])] : '0;
      if (wgt_rd_en[t]) wgt_rd_data[t] <= m_wgt[t].exists(int'(wgt_rd_addr[t])) ? m_wgt[t][int'(wgt_rd_addr[t])] : '0;
      for (int p = 0; p < 2; p++) if (acc_rd_en[t][p]) acc_rd_data[t][p] <= acc_at(t, int'(acc_rd_addr[t][p]));
      if (acc_wr_en[t]) m_acc[t][int'(acc_wr_addr[t])] <= acc_wr_data[t];
      if (out_wr_en[t]) m_out[t][int'(out_wr_addr[t])] <= out_wr_data[t];
    end
  end

  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // issue one instruction to tenant k and return cycles until the lane is idle again
  task automatic run(input int k, input insn_t i, output int cyc);
    cyc = 0;
    @(negedge clk);
    cmd[k] = i; cmd_valid[k] = 1;
    @(negedge clk); cmd_valid[k] = 0;
    while (busy[k]) begin cyc++; @(negedge clk); end
  endtask
  function automatic insn_t gemm(int dst, int s0, int s1, int n, logic clr);
    insn_t i = '0;
    i.op = OP_GEMM; i.sram_addr = 16'(dst); i.src0 = 16'(s0); i.src1 = 16'(s1); i.count = 16'(n);
    i.reset_acc = clr; i.dst_inc = 1; i.src0_inc = 1;
    return i;
  endfunction
  function automatic int ref_dot(int t, int v, int w, int j);
    int s = 0;
    for (int c = 0; c < VL; c++) s += int'(signed'(m_inp[t][v][8*c +: 8])) * int'(signed'(m_wgt[t][w][64*j + 8*c +: 8]));
    return s;
  endfunction

  initial begin
    int c4, c16, c16b, bad, nviol;
    for (int k = 0; k < NT; k++) cmd[k] = '0;
    for (int t = 0; t < NTILE; t++) tile_own[t] = '0;
    for (int r = 0; r < INP_NREG; r++) inp_own[r] = '{1'b1, TW'(r / (INP_NREG / NTILE))};
    for (int r = 0; r < WGT_NREG; r++) wgt_own[r] = '{1'b1, TW'(r / (WGT_NREG / NTILE))};
    for (int r = 0; r < ACC_NREG; r++) acc_own[r] = '{1'b1, TW'(r / (ACC_NREG / NTILE))};
    for (int r = 0; r < OUT_NREG; r++) out_own[r] = '{1'b1, TW'(r / (OUT_NREG / NTILE))};
    // banks 2 and 3 both to tenant 2
    for (int r = 3 * ACC_NREG / 4; r < ACC_NREG; r++) acc_own[r].id = 2;
    for (int r = 3 * INP_NREG / 4; r < INP_NREG; r++) inp_own[r].id = 2;
    for (int r = 3 * WGT_NREG / 4; r < WGT_NREG; r++) wgt_own[r].id = 2;
    for (int r = 3 * OUT_NREG / 4; r < OUT_NREG; r++) out_own[r].id = 2;
    tile_own[0] = '{1'b1, 2'd0}; tile_own[1] = '{1'b1, 2'd1}; tile_own[2] = '{1'b1, 2'd2}; tile_own[3] = '{1'b1, 2'd2};
    for (int t = 0; t < NTILE; t++) begin
      for (int v = 0; v < 16; v++) m_inp[t][v] = {$urandom, $urandom};
      for (int w = 0; w < 2; w++) for (int q = 0; q < 16; q++) m_wgt[t][w][32*q +: 32] = $urandom;
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---- tenant 0, tile 0: timing
    run(0, gemm(0, 0, 0, 4, 1), c4);
    run(0, gemm(0, 0, 0, 16, 1), c16);
    for (int v = 0; v < 16; v++) m_inp[0][v] = ~m_inp[0][v];
    run(0, gemm(0, 0, 0, 16, 1), c16b);
    check(c16 - c4 == 24, $sformatf("2 cycles per iteration (4 it: %0d, 16 it: %0d)", c4, c16));
    check(c16b == c16, "cycle count independent of data");
    // accumulate W1, check acc = (W0+W1) x inp, then ReLU and output bytes
    run(0, gemm(0, 0, 1, 16, 0), c4);
    bad = 0;
    for (int v = 0; v < 16; v++)
      for (int j = 0; j < VL; j++)
        if (acc_at(0, v)[32*j +: 32] != 32'(ref_dot(0, v, 0, j) + ref_dot(0, v, 1, j))) bad++;
    check(bad == 0, $sformatf("GEMM results (%0d wrong lanes)", bad));
    begin
      automatic insn_t i = '0;
      i.op = OP_ALU_C; i.alu_op = ALU_MAX; i.use_imm = 1; i.imm = 0; i.count = 16; i.dst_inc = 1; i.push_next = 1;
      fork run(0, i, c4); begin @(posedge c2s_push[0]); end join
    end
    bad = 0;
    for (int v = 0; v < 16; v++)
      for (int j = 0; j < VL; j++) begin
        automatic int s = ref_dot(0, v, 0, j) + ref_dot(0, v, 1, j);
        if (s < 0) s = 0;
        if (m_out[0][v][8*j +: 8] != 8'(s)) bad++;
      end
    check(bad == 0, $sformatf("ReLU output bytes (%0d wrong)", bad));
    check(tile_iters[0] == 4 + 16 + 16 + 16 + 16 && tile_iters[1] == 0, "only tile 0 worked for tenant 0");

    // ---- dependency wait: pop_prev holds the instruction until l2c_avail
    begin
      automatic insn_t i = gemm(32, 0, 0, 2, 1);
      automatic int waited = 0;
      i.pop_prev = 1;
      @(negedge clk); cmd[0] = i; cmd_valid[0] = 1; @(negedge clk); cmd_valid[0] = 0;
      repeat (10) begin if (acc_wr_en[0]) waited = -100; @(negedge clk); end
      check(waited == 0 && busy[0], "waits for the load->compute token");
      l2c_avail[0] = 1; #1;
      while (!l2c_pop[0]) begin @(negedge clk); #1; end
      @(negedge clk); l2c_avail[0] = 0;
      while (busy[0]) @(negedge clk);
      check(acc_at(0, 32) != 0 || acc_at(0, 33) != 0, "runs after the token");
    end

    // ---- tenant 1: destination in tenant 0's region (bank-local address past its own)
    begin
      automatic insn_t i = gemm(0, 0, 0, 4, 1);
      automatic int before1 = tile_iters[1];
      automatic logic [ACC_W-1:0] keep = acc_at(1, 0);
      nviol = 0;
      fork
        run(1, i, c4);
        repeat (20) begin @(posedge clk); if (viol[1]) nviol++; end
      join
      check(nviol == 0 && acc_at(1, 0) != keep, "own region written");
      i = gemm(ABW + 5, 0, 0, 2, 1);   // out of the bank
      nviol = 0;
      fork
        run(1, i, c4);
        repeat (20) begin @(posedge clk); if (viol[1]) nviol++; end
      join
      check(nviol == 2, $sformatf("out-of-bounds destination flagged (%0d)", nviol));
      check(acc_at(1, 5) == '0 && acc_at(1, 6) == '0, "out-of-bounds write dropped");
      check(tile_iters[1] == before1 + 6, "tile 1 iterations");
    end
    // tenant 1 cannot read tenant 0's inputs: revoke its input region, result is acc of zeros
    begin
      automatic insn_t i = gemm(0, 0, 0, 1, 1);
      for (int r = INP_NREG / 4; r < INP_NREG / 2; r++) inp_own[r].id = 0;
      nviol = 0;
      fork
        run(1, i, c4);
        repeat (12) begin @(posedge clk); if (viol[1]) nviol++; end
      join
      check(nviol == 1 && acc_at(1, 0) == '0, "blocked operand reads as zero and is flagged");
      for (int r = INP_NREG / 4; r < INP_NREG / 2; r++) inp_own[r].id = 1;
    end

    // ---- tenant 2 owns tiles 2 and 3: one instruction, both tiles
    begin
      automatic int b2 = tile_iters[2], b3 = tile_iters[3];
      automatic insn_t i = gemm(0, 0, 0, 8, 1);
      run(2, i, c4);
      check(tile_iters[2] == b2 + 8 && tile_iters[3] == b3 + 8, "both tiles run the instruction");
      bad = 0;
      for (int t = 2; t < 4; t++) for (int v = 0; v < 8; v++) for (int j = 0; j < VL; j++)
        if (acc_at(t, v)[32*j +: 32] != 32'(ref_dot(t, v, 0, j))) bad++;
      check(bad == 0, "per-tile results on tiles 2 and 3");
      check(c4 == c16 - 16, "same cycle count as on one tile");
    end
    // ---- FINISH
    begin
      automatic insn_t i = '0;
      automatic int seen = 0;
      i.op = OP_FINISH;
      fork
        run(3, i, c4);
        repeat (6) begin @(posedge clk); if (finish[3]) seen++; end
      join
      check(seen == 1, "FINISH pulses finish once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
