// tb_workload_conv: one tile of a convolution layer, as the evaluated CNNs
// (VGG, ResNet, AlexNet, 8-bit) are run, on the whole accelerator at its
// default sizes.
//
// The layer slice is a 1x1 convolution (or, after im2col, one tap of a 3x3 one):
// 64 output pixels, 64 input channels and 32 output channels.  The 32 output
// channels are split over the four 8x8 tiles, eight each.  The 64 input
// channels are reduced in eight blocks of eight: eight GEMM instructions
// accumulate into the same accumulator words, the first from zero.  Two ALU
// instructions then requantize (arithmetic shift right by 6) and apply ReLU
// (MAX with 0).  The low byte of each result is stored.  One temporal tenant
// owns all four tiles, so each instruction runs on every tile at once.  Each
// tile reads its own input bank, so the input tile is loaded into all four
// banks.  Each tile's weights are its own eight output channels.
//
// All loads and stores use the shaped channel (LOAD_S / STORE_S) with a
// bandwidth period of 32 cycles, which is 400 MB/s at 100 MHz.  The test checks:
//   * every output byte against a reference computed here;
//   * 8 x 64 + 2 x 64 two-cycle iterations on every tile;
//   * real read bursts leave exactly one per 32 cycles: the time from the first
//     to the last of the 144 real read bursts is 143 periods, within one period;
//   * the read bandwidth seen on the memory port is flat while the tenant is
//     live, busy or idle: every 1000-cycle window but the partial first one
//     holds 30 to 33 bursts, real or fake.
// The data sizes are far below a full layer, but the instruction sequence and
// the rates are those of a full layer's inner loop.
module tb_workload_conv;
  import sesame_pkg::*;

  localparam int NPIX = 64;     // output pixels (accumulator words per tile)
  localparam int KB   = 8;      // input-channel blocks of 8
  localparam int PER  = 32;     // shaper period, cycles per 128-byte burst
  localparam int SHR  = 6;      // requantization shift
  localparam logic [31:0] IN_A  = 32'h0010_0000;
  localparam logic [31:0] WGT_A = 32'h0020_0000;
  localparam logic [31:0] OUT_A = 32'h0030_0000;

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
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // watchdog
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- monitors
  longint cyc = 0;
  longint first_rd = -1, last_rd = -1;
  int     n_real_rd = 0;
  logic   live = 1'b0;          // set by the stimulus while the tenant is running
  int     n_win = 0, bad_win = 0, min_b = 1 << 30, max_b = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ar_valid && ar_ready && !ar_id[TW]) begin
      if (first_rd < 0) first_rd <= cyc;
      last_rd   <= cyc;
      n_real_rd <= n_real_rd + 1;
    end
    if (rst_n && bw_sample && live) begin
      n_win <= n_win + 1;
      if (int'(bw_rd_bytes) < min_b) min_b <= int'(bw_rd_bytes);
      if (int'(bw_rd_bytes) > max_b) max_b <= int'(bw_rd_bytes);
      if (bw_rd_bytes < 32'(30 * BURST_BYTES) || bw_rd_bytes > 32'(33 * BURST_BYTES)) bad_win <= bad_win + 1;
    end
  end

  // ---------------------------------------------------------------- host tasks
  task automatic cfg(input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_tenant = '0; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  task automatic push(input insn_t i);
    @(negedge clk);
    while (ins_full[0]) @(negedge clk);
    ins_valid = 1'b1; ins_tenant = '0; ins_data = i;
    @(negedge clk);
    ins_valid = 1'b0;
  endtask

  function automatic insn_t mk(opcode_e op, buf_e b, int sram, int dram, int cnt);
    insn_t i = '0;
    i.op = op; i.buf_id = b; i.sram_addr = 16'(sram); i.dram_addr = 32'(dram); i.count = 16'(cnt);
    return i;
  endfunction

  // ---------------------------------------------------------------- data
  // input [kb][pixel][channel], weights [tile][kb][out channel][in channel]
  logic signed [7:0] x [KB][NPIX][8];
  logic signed [7:0] w [NTILE][KB][8][8];

  initial begin
    int t0, t1, it0 [NTILE];
    insn_t i;
    for (int kb = 0; kb < KB; kb++)
      for (int p = 0; p < NPIX; p++) begin
        logic [63:0] d;
        for (int c = 0; c < 8; c++) begin x[kb][p][c] = 8'($urandom); d[8*c +: 8] = x[kb][p][c]; end
        u_dram.poke(IN_A + 32'(8 * (kb * NPIX + p)), d);
      end
    for (int t = 0; t < NTILE; t++)
      for (int kb = 0; kb < KB; kb++)
        for (int j = 0; j < 8; j++) begin
          logic [63:0] d;
          for (int c = 0; c < 8; c++) begin w[t][kb][j][c] = 8'($urandom); d[8*c +: 8] = w[t][kb][j][c]; end
          u_dram.poke(WGT_A + 32'(t * 512 + kb * 64 + 8 * j), d);
        end

    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    // one temporal tenant with the whole accelerator, shaped at 400 MB/s
    cfg(0, 32'd1);
    cfg(1, 32'hF);
    cfg(2, 32'd16);
    cfg(3, 32'((0 << 8) | 16));
    cfg(4, 32'((0 << 8) | 128));
    cfg(5, 32'((0 << 8) | 32));
    cfg(6, 32'((0 << 8) | 16));
    cfg(7, 32'd1);
    cfg(8, 32'(PER));
    cfg(9, 32'h0080_0000);
    cfg(10, 32'd16);
    cfg(15, 32'd1);
    repeat (4) @(negedge clk);
    check(active == 4'b0001 && tiles_free == '0, "temporal tenant owns all four tiles");
    live = 1'b1;
    for (int t = 0; t < NTILE; t++) it0[t] = int'(tile_iters[t]);

    // loads: input tile into every bank, each tile's weights into its bank
    for (int t = 0; t < NTILE; t++) begin
      push(mk(OP_LOAD_S, BUF_INP, t * 8192, int'(IN_A), KB * NPIX));
      i = mk(OP_LOAD_S, BUF_WGT, t * 8192, int'(WGT_A) + t * 512, KB);
      i.push_next = (t == NTILE - 1);
      push(i);
    end
    // K reduction
    for (int kb = 0; kb < KB; kb++) begin
      i = mk(OP_GEMM, BUF_ACC, 0, 0, NPIX);
      i.src0 = 16'(kb * NPIX); i.src1 = 16'(kb);
      i.dst_inc = 1; i.src0_inc = 1; i.reset_acc = (kb == 0); i.pop_prev = (kb == 0);
      push(i);
    end
    // requantize and ReLU
    i = mk(OP_ALU, BUF_ACC, 0, 0, NPIX); i.alu_op = ALU_SHR; i.use_imm = 1; i.imm = 16'(SHR); i.dst_inc = 1; push(i);
    i = mk(OP_ALU, BUF_ACC, 0, 0, NPIX); i.alu_op = ALU_MAX; i.use_imm = 1; i.imm = 0; i.dst_inc = 1; i.push_next = 1; push(i);
    for (int t = 0; t < NTILE; t++) begin
      i = mk(OP_STORE_S, BUF_OUT, t * 8192, int'(OUT_A) + t * 1024, NPIX);
      i.pop_prev = (t == 0); i.push_prev = (t == NTILE - 1);
      push(i);
    end
    i = mk(OP_FINISH, BUF_INP, 0, 0, 0); i.pop_next = 1; push(i);

    t0 = int'(cyc);
    while (!done[0]) @(negedge clk);
    t1 = int'(cyc);
    repeat (20) @(negedge clk);
    $display("layer slice took %0d cycles; real read bursts %0d from cycle %0d to %0d",
             t1 - t0, n_real_rd, first_rd, last_rd);

    // results
    begin
      int bad = 0;
      for (int t = 0; t < NTILE; t++)
        for (int p = 0; p < NPIX; p++) begin
          automatic logic [63:0] got = u_dram.peek(OUT_A + 32'(t * 1024 + 8 * p));
          for (int j = 0; j < 8; j++) begin
            automatic int s = 0;
            for (int kb = 0; kb < KB; kb++)
              for (int c = 0; c < 8; c++) s += int'(w[t][kb][j][c]) * int'(x[kb][p][c]);
            s = s >>> SHR;
            if (s < 0) s = 0;
            if (got[8*j +: 8] != 8'(s)) begin bad++; if (bad < 12) $display("t%0d p%0d j%0d got %0d exp %0d", t, p, j, got[8*j +: 8], 8'(s)); end
          end
        end
      check(bad == 0, $sformatf("layer output (%0d wrong bytes of %0d)", bad, NTILE * NPIX * 8));
    end
    begin
      logic ok = 1'b1;
      for (int t = 0; t < NTILE; t++) if (int'(tile_iters[t]) - it0[t] != KB * NPIX + 2 * NPIX) ok = 1'b0;
      check(ok, "every tile ran 8 GEMM and 2 ALU instructions of 64 iterations");
    end
    check(violation == '0, "no access outside the tenant's regions");
    // 4 x (512 input words = 32 bursts) + 4 x (8 weight words = 4 bursts)
    check(n_real_rd == 144, $sformatf("144 real read bursts (%0d)", n_real_rd));
    check(last_rd - first_rd >= longint'(143 * PER) && last_rd - first_rd <= longint'(144 * PER),
          $sformatf("shaped reads at one burst per %0d cycles: %0d cycles for 143 gaps", PER, last_rd - first_rd));

    // keep the tenant idle for a while: the bus must look the same
    repeat (5000) @(negedge clk);
    live = 1'b0;
    $display("bandwidth windows: %0d, read bytes per window %0d..%0d, fakes %0d", n_win, min_b, max_b, rd_fakes);
    check(n_win >= 10, "bandwidth monitor sampled the run");
    check(bad_win <= 1, $sformatf("flat read bandwidth while live (%0d windows off)", bad_win));
    check(rd_fakes > 0, "idle periods filled with fake reads");

    cfg(15, 32'd2);
    while (td_busy) @(negedge clk);
    repeat (4) @(negedge clk);
    check(active == '0 && tiles_free == '1, "teardown released the accelerator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
