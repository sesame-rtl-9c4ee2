// tb_sesame_top: end-to-end test of the whole accelerator at its default sizes.
//
// Phase 1 (spatial sharing): tenants 0, 1 and 2 each get one execution tile and
// one 16 kB region of every scratchpad.  Each runs the same small layer,
// out = low byte of ReLU((W0 + W1) x inp) for 16 input vectors, with a different
// threat model: tenant 0 private model and input (LOAD_SE / GEMM_C / ALU_C /
// STORE_SE, traffic shaper on), tenant 1 public (plain instructions, plus one
// LOAD aimed at tenant 0's region that must be blocked), tenant 2 private input
// (LOAD_E / STORE_E with AES latency).  Tenant 3 asks for an already taken tile
// and must be refused.
// Phase 2 (teardown): all three are torn down; tenant 0 is relaunched on the
// same regions and stores its output region to memory, which must read back as
// zeros (the zeroizer cleared it).
// Phase 3 (temporal sharing): tenant 3 takes the whole accelerator (all four
// tiles, every region) while a spatial launch is refused; one GEMM instruction
// runs on all four tiles at once.  A long shaped load fills its read queue.
// Results are compared with values computed here from the random operands.
// The test counts each mechanism (fake reads and writes, cipher stalls, blocked
// access, refused launches, temporal four-tile execution, queue-full stall, bank
// conflicts, bandwidth samples, teardown zeroization, shaper bypass) and fails
// if one never happened.
module tb_sesame_top;
  import sesame_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cfg_we = 1'b0;
  logic [TW-1:0]     cfg_tenant = '0;
  logic [3:0]        cfg_addr = '0;
  logic [31:0]       cfg_wdata = '0;
  logic              ins_valid = 1'b0;
  logic [TW-1:0]     ins_tenant = '0;
  insn_t             ins_data = '0;
  logic [NT-1:0]     ins_full, active, done, launch_err, violation, rq_stall;
  logic              td_busy, bw_sample;
  logic [NTILE-1:0]  tiles_free;
  logic ar_valid, ar_ready, r_valid, r_last, aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid;
  logic [MEM_AW-1:0] ar_addr, aw_addr;
  logic [TW:0]       ar_id, r_id, aw_id, b_id;
  logic [MEM_DW-1:0] r_data, w_data;
  logic [31:0] bank_conflicts, rd_fakes, wr_fakes, bypasses, enc_stall_cycles, bw_rd_bytes, bw_wr_bytes;
  logic [31:0] tile_iters [NTILE];

  sesame_top dut (.*);

  dram_model #(.LAT(8)) u_dram (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_data, .r_id, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_id, .w_valid, .w_ready, .w_data, .w_last, .b_valid, .b_id);

  int checks = 0, failures = 0;
  int n_stall = 0, n_bw = 0;
  always_ff @(posedge clk) begin
    if (rst_n && rq_stall != '0) n_stall <= n_stall + 1;
    if (rst_n && bw_sample && bw_rd_bytes != 0) n_bw <= n_bw + 1;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- host tasks
  task automatic cfg(input int t, input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_tenant = TW'(t); cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
    repeat (4) @(negedge clk);
  endtask

  // the instruction port is shared: concurrent tenant programs take turns
  semaphore bus = new(1);
  task automatic push(input int t, input insn_t i);
    bus.get(1);
    @(negedge clk);
    while (ins_full[t]) @(negedge clk);
    ins_valid = 1'b1; ins_tenant = TW'(t); ins_data = i;
    @(negedge clk);
    ins_valid = 1'b0;
    bus.put(1);
  endtask

  function automatic insn_t mk(opcode_e op, buf_e b, int sram, int dram, int cnt);
    insn_t i = '0;
    i.op = op; i.buf_id = b; i.sram_addr = 16'(sram); i.dram_addr = 32'(dram); i.count = 16'(cnt);
    return i;
  endfunction

  // ---------------------------------------------------------------- reference data
  // inp[bank-set][16 vectors][8 lanes], w[set][2 words][8 rows][8 cols]
  logic signed [7:0] ref_inp [8][16][8];
  logic signed [7:0] ref_w   [8][2][8][8];

  task automatic put_data(input int set, input int inp_a, input int wgt_a);
    for (int v = 0; v < 16; v++) begin
      logic [63:0] d;
      for (int c = 0; c < 8; c++) begin ref_inp[set][v][c] = 8'($urandom); d[8*c +: 8] = ref_inp[set][v][c]; end
      u_dram.poke(32'(inp_a + 8*v), d);
    end
    for (int w = 0; w < 2; w++)
      for (int j = 0; j < 8; j++) begin
        logic [63:0] d;
        for (int c = 0; c < 8; c++) begin ref_w[set][w][j][c] = 8'($urandom); d[8*c +: 8] = ref_w[set][w][j][c]; end
        u_dram.poke(32'(wgt_a + 64*w + 8*j), d);
      end
  endtask

  task automatic check_out(input int set, input int out_a, input string who);
    int bad = 0;
    for (int v = 0; v < 16; v++) begin
      logic [63:0] got = u_dram.peek(32'(out_a + 8*v));
      for (int j = 0; j < 8; j++) begin
        int s = 0;
        for (int c = 0; c < 8; c++) s += (int'(ref_w[set][0][j][c]) + int'(ref_w[set][1][j][c])) * int'(ref_inp[set][v][c]);
        if (s < 0) s = 0;
        if (got[8*j +: 8] != 8'(s)) bad++;
      end
    end
    check(bad == 0, $sformatf("%s output (%0d wrong bytes)", who, bad));
  endtask

  // one tenant's layer program; sram addresses are the tenant's bank bases
  task automatic layer(input int t, input int inp_s, input int wgt_s, input int acc_s, input int out_s,
                       input int dram, input opcode_e ld_i, input opcode_e ld_w, input opcode_e st,
                       input logic ct);
    insn_t i;
    push(t, mk(ld_i, BUF_INP, inp_s, dram, 16));
    i = mk(ld_w, BUF_WGT, wgt_s, dram + 'h1000, 2); i.push_next = 1'b1; push(t, i);
    i = mk(ct ? OP_GEMM_C : OP_GEMM, BUF_ACC, 0, 0, 16);
    i.pop_prev = 1'b1; i.src0 = 0; i.src1 = 0; i.dst_inc = 1; i.src0_inc = 1; i.reset_acc = 1; push(t, i);
    i = mk(ct ? OP_GEMM_C : OP_GEMM, BUF_ACC, 0, 0, 16);
    i.src0 = 0; i.src1 = 1; i.dst_inc = 1; i.src0_inc = 1; push(t, i);
    i = mk(ct ? OP_ALU_C : OP_ALU, BUF_ACC, 0, 0, 16);
    i.alu_op = ALU_MAX; i.use_imm = 1; i.imm = 0; i.dst_inc = 1; i.push_next = 1; i.push_prev = 1; push(t, i);
    i = mk(st, BUF_OUT, out_s, dram + 'h2000, 16); i.pop_prev = 1; i.push_prev = 1; push(t, i);
    push(t, mk(OP_ZEROIZE, BUF_ACC, acc_s, 0, 16));
    i = mk(OP_ZEROIZE, BUF_INP, inp_s, 0, 16); i.pop_next = 1; push(t, i);
    i = mk(OP_FINISH, BUF_INP, 0, 0, 0); i.pop_next = 1; push(t, i);
  endtask

  task automatic setup(input int t, input logic temporal, input int tiles,
                       input int ri, input int ni, input int rw, input int nw,
                       input int ra, input int na, input int ro, input int no,
                       input logic shaper, input logic aes, input int bw);
    cfg(t, 0, 32'(temporal));
    cfg(t, 1, 32'(tiles));
    cfg(t, 2, 32'd16);
    cfg(t, 3, 32'((ri << 8) | ni));
    cfg(t, 4, 32'((rw << 8) | nw));
    cfg(t, 5, 32'((ra << 8) | na));
    cfg(t, 6, 32'((ro << 8) | no));
    cfg(t, 7, {30'd0, aes, shaper});
    cfg(t, 8, 32'(bw));
    cfg(t, 9, 32'h0080_0000 + 32'(t) * 32'h1_0000);
    cfg(t, 10, 32'd16);
    cfg(t, 15, 32'd1);
    repeat (4) @(negedge clk);
  endtask

  task automatic teardown(input int t);
    cfg(t, 15, 32'd2);
    while (td_busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic wait_done(input logic [NT-1:0] m);
    while ((done & m) != m) @(negedge clk);
  endtask

  int refused = 0;
  int it_before [NTILE];

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    // ============================================================ phase 1: spatial
    for (int t = 0; t < 3; t++) put_data(t, 'h10_0000 * (t + 1), 'h10_0000 * (t + 1) + 'h1000);
    setup(0, 1'b0, 4'b0001, 0, 1, 0, 1, 0, 1, 0, 1, 1'b1, 1'b0, 64);
    setup(1, 1'b0, 4'b0010, 4, 1, 32, 1, 8, 1, 4, 1, 1'b0, 1'b0, 0);
    setup(2, 1'b0, 4'b0100, 8, 1, 64, 1, 16, 1, 8, 1, 1'b0, 1'b1, 0);
    check(active == 4'b0111 && launch_err == '0, "three spatial tenants launched");
    // tenant 3 asks for tile 0, owned by tenant 0: refused
    setup(3, 1'b0, 4'b0001, 0, 0, 96, 1, 24, 1, 12, 1, 1'b0, 1'b0, 0);
    check(launch_err[3] && !active[3], "over-subscription refused");
    if (launch_err[3]) refused++;

    // tenant 1 first tries to load into tenant 0's input region
    push(1, mk(OP_LOAD, BUF_INP, 0, 'h20_0000, 16));
    fork
      layer(0, 0,      0,      0,     0,      'h10_0000, OP_LOAD_SE, OP_LOAD_SE, OP_STORE_SE, 1'b1);
      layer(1, 8192,   8192,   4096,  8192,   'h20_0000, OP_LOAD,    OP_LOAD,    OP_STORE,    1'b0);
      layer(2, 16384,  16384,  8192,  16384,  'h30_0000, OP_LOAD_E,  OP_LOAD,    OP_STORE_E,  1'b1);
    join
    wait_done(4'b0111);
    repeat (20) @(negedge clk);
    check_out(0, 'h10_2000, "tenant 0 (private model+input, shaped)");
    check_out(1, 'h20_2000, "tenant 1 (public)");
    check_out(2, 'h30_2000, "tenant 2 (private input, AES)");
    check(violation == 4'b0010, "only tenant 1's stray load was flagged");
    check(rd_fakes > 0, "fake read bursts generated by the shaper");
    check(wr_fakes > 0, "fake write bursts generated by the shaper");
    // encrypted bursts: tenant 0 reads 2 + writes 1 (QARMA, 8 cycles each),
    // tenant 2 reads 1 + writes 1 (AES, 16 cycles each)
    check(enc_stall_cycles == 3 * 8 + 2 * 16,
          $sformatf("cipher latency: %0d stall cycles, expected 56", enc_stall_cycles));
    check(tile_iters[0] == 48 && tile_iters[1] == 48 && tile_iters[2] == 48 && tile_iters[3] == 0,
          "spatial mode: each tenant on its own tile");

    // ============================================================ phase 2: teardown
    for (int t = 0; t < 3; t++) teardown(t);
    check(active == '0 && tiles_free == '1, "teardown released every tile");
    for (int v = 0; v < 16; v++) u_dram.poke(32'h10_3000 + 32'(8*v), 64'hFFFF_FFFF_FFFF_FFFF);
    // stale-data attack: relaunch on the same regions, store without loading
    setup(0, 1'b0, 4'b0001, 0, 1, 0, 1, 0, 1, 0, 1, 1'b0, 1'b0, 0);
    begin
      insn_t i;
      i = mk(OP_STORE, BUF_OUT, 0, 'h10_3000, 16); i.push_prev = 1; push(0, i);
      i = mk(OP_FINISH, BUF_INP, 0, 0, 0); i.pop_next = 1; push(0, i);
    end
    wait_done(4'b0001);
    begin
      int nz = 0;
      for (int v = 0; v < 16; v++) if (u_dram.peek(32'h10_3000 + 32'(8*v)) != 0) nz++;
      check(nz == 0, "scratchpad reads zero after teardown");
    end
    teardown(0);
    check(!violation[0], "teardown zeroization stays inside the tenant's regions");

    // ============================================================ phase 3: temporal
    for (int b = 0; b < 4; b++) put_data(4 + b, 'h50_0000 + b * 'h200, 'h50_1000 + b * 'h200);
    setup(3, 1'b1, 4'b1111, 0, 16, 0, 128, 0, 32, 0, 16, 1'b1, 1'b0, 24);
    check(active == 4'b1000 && tiles_free == '0, "temporal tenant owns the whole accelerator");
    setup(1, 1'b0, 4'b0000, 0, 0, 0, 0, 0, 0, 0, 0, 1'b0, 1'b0, 0);
    check(launch_err[1] && !active[1], "spatial launch refused during temporal mode");
    if (launch_err[1]) refused++;
    for (int t = 0; t < NTILE; t++) it_before[t] = tile_iters[t];
    begin
      insn_t i;
      // weights use plain LOAD: those bursts bypass the shaper timer
      // a long shaped load (20 bursts) to the first bank: overflows the queue window
      push(3, mk(OP_LOAD_S, BUF_INP, 0, 'h60_0000, 320));
      for (int b = 0; b < 4; b++) begin
        push(3, mk(OP_LOAD_S, BUF_INP, b * 8192, 'h50_0000 + b * 'h200, 16));
        i = mk(OP_LOAD, BUF_WGT, b * 8192, 'h50_1000 + b * 'h200, 2); i.push_next = (b == 3); push(3, i);
      end
      i = mk(OP_GEMM, BUF_ACC, 0, 0, 16);
      i.pop_prev = 1; i.dst_inc = 1; i.src0_inc = 1; i.reset_acc = 1; push(3, i);
      i = mk(OP_GEMM, BUF_ACC, 0, 0, 16); i.src1 = 1; i.dst_inc = 1; i.src0_inc = 1; push(3, i);
      i = mk(OP_ALU, BUF_ACC, 0, 0, 16); i.alu_op = ALU_MAX; i.use_imm = 1; i.dst_inc = 1; i.push_next = 1; push(3, i);
      for (int b = 0; b < 4; b++) begin
        i = mk(OP_STORE_S, BUF_OUT, b * 8192, 'h50_2000 + b * 'h200, 16);
        i.pop_prev = (b == 0); i.push_prev = (b == 3); push(3, i);
      end
      i = mk(OP_FINISH, BUF_INP, 0, 0, 0); i.pop_next = 1; push(3, i);
    end
    wait_done(4'b1000);
    repeat (20) @(negedge clk);
    for (int b = 0; b < 4; b++) check_out(4 + b, 'h50_2000 + b * 'h200, $sformatf("temporal bank %0d", b));
    begin
      logic all4 = 1'b1;
      for (int t = 0; t < NTILE; t++) if (tile_iters[t] - it_before[t] != 48) all4 = 1'b0;
      check(all4, "temporal mode: one instruction drives all four tiles");
    end
    teardown(3);
    check(active == '0, "temporal tenant torn down");

    // ============================================================ mechanism coverage
    $display("mechanisms: fake_rd=%0d fake_wr=%0d enc_stall=%0d refused=%0d stall_cycles=%0d bypasses=%0d bank_conflicts=%0d bw_samples=%0d",
             rd_fakes, wr_fakes, enc_stall_cycles, refused, n_stall, bypasses, bank_conflicts, n_bw);
    check(refused == 2, "both refusal cases seen");
    check(bypasses == 4, $sformatf("unshaped bursts of a shaped tenant bypassed the timer (%0d, expected 4)", bypasses));
    check(n_stall > 0, "read queue full stalled a load engine");
    check(bank_conflicts > 0, "bank conflicts were counted");
    check(n_bw > 0, "bandwidth monitor sampled traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
