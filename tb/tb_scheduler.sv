// tb_scheduler: the tenant-facing control block.
//  * Configuration registers and launch: a valid launch sets `active` and the
//    ownership tables within 4 cycles; an over-subscribing launch (tile taken),
//    a temporal launch while others run, and a spatial launch during temporal
//    mode all set launch_err and change nothing.
//  * Instruction dispatch: each tenant's instructions leave its private queue
//    in order to the load, compute or store command queue by opcode (ZEROIZE of
//    INP/WGT to load, of ACC/OUT to store); instructions of an inactive tenant
//    are ignored.
//  * finish sets done, viol sets the sticky violation flag.
//  * Teardown: the load and store lanes are asked (td_ld_req / td_st_req) until
//    each answers, then the tiles and regions are released and `active` drops.
module tb_scheduler;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0, ins_valid = 0, td_busy, temporal;
  logic [TW-1:0] cfg_tenant = '0, ins_tenant = '0;
  logic [3:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  insn_t ins_data = '0;
  logic [NT-1:0] ins_full, active, done, launch_err, violation, flush;
  logic [NTILE-1:0] tiles_free;
  logic [7:0] qdepth [NT];
  shaper_cfg_t shaper_cfg [NT];
  rrange_t rng_inp [NT], rng_wgt [NT], rng_acc [NT], rng_out [NT];
  logic [NT-1:0] ld_valid, ld_pop = '0, cp_valid, cp_pop = '0, st_valid, st_pop = '0;
  insn_t ld_cmd [NT], cp_cmd [NT], st_cmd [NT];
  logic [NT-1:0] finish = '0, viol = '0, td_ld_req, td_st_req, td_ld_done = '0, td_st_done = '0;
  own_t tile_own [NTILE], inp_own [INP_NREG], wgt_own [WGT_NREG], acc_own [ACC_NREG], out_own [OUT_NREG];
  int checks = 0, failures = 0;
  scheduler dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic cfg(input int t, input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_tenant = TW'(t); cfg_addr = 4'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic launch(input int t, input int temp, input int tiles, input int ri, input int rw, input int ra, input int ro, output int lat);
    cfg(t, 0, temp); cfg(t, 1, tiles); cfg(t, 2, 16);
    cfg(t, 3, ri); cfg(t, 4, rw); cfg(t, 5, ra); cfg(t, 6, ro);
    cfg(t, 7, 1); cfg(t, 8, 50);
    cfg(t, 15, 1);
    lat = 0;
    while (!active[t] && lat < 8) begin lat++; @(negedge clk); end
  endtask
  task automatic push(input int t, input insn_t i);
    @(negedge clk); ins_valid = 1; ins_tenant = TW'(t); ins_data = i; @(negedge clk); ins_valid = 0;
  endtask
  function automatic insn_t mk(opcode_e op, buf_e b, int tag);
    insn_t i = '0; i.op = op; i.buf_id = b; i.count = 16'(tag); return i;
  endfunction
  initial begin
    int lat;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(shaper_cfg[0].shaper_en == 0, "shaper off while inactive");
    launch(0, 0, 4'b0001, 'h0001, 'h0002, 'h0001, 'h0001, lat);
    check(active == 4'b0001 && !launch_err[0], "tenant 0 launched");
    check(lat <= 4, $sformatf("launch latency %0d cycles", lat));
    check(tile_own[0] == '{1'b1, 2'd0} && inp_own[0].v && wgt_own[1].v && !wgt_own[2].v && tiles_free == 4'b1110, "tables written");
    check(shaper_cfg[0].shaper_en && shaper_cfg[0].bandwidth == 50, "shaper config live");
    launch(1, 0, 4'b0001, 'h0401, 'h2001, 'h0801, 'h0401, lat);
    check(launch_err[1] && !active[1], "tile over-subscription refused");
    launch(1, 0, 4'b0010, 'h0101, 'h2001, 'h0801, 'h0401, lat);
    check(launch_err[1] && !active[1], "region in another tile's bank refused");
    launch(1, 0, 4'b0010, 'h0401, 'h2001, 'h0801, 'h0401, lat);
    check(active == 4'b0011 && !launch_err[1], "tenant 1 launched");
    launch(2, 1, 4'b1100, 'h0801, 'h4001, 'h1001, 'h0801, lat);
    check(launch_err[2] && !active[2], "temporal launch refused while others run");
    // dispatch
    push(0, mk(OP_LOAD, BUF_INP, 1)); push(0, mk(OP_GEMM, BUF_ACC, 2)); push(0, mk(OP_STORE, BUF_OUT, 3));
    push(0, mk(OP_ZEROIZE, BUF_WGT, 4)); push(0, mk(OP_ZEROIZE, BUF_OUT, 5)); push(0, mk(OP_FINISH, BUF_INP, 6));
    push(1, mk(OP_LOAD_SE, BUF_WGT, 7));
    push(3, mk(OP_LOAD, BUF_INP, 8));   // inactive tenant: dropped
    repeat (6) @(negedge clk);
    check(ld_valid == 4'b0011 && cp_valid == 4'b0001 && st_valid == 4'b0001, "dispatched by opcode");
    check(ld_cmd[0].count == 1 && cp_cmd[0].count == 2 && st_cmd[0].count == 3 && ld_cmd[1].count == 7, "queue heads");
    ld_pop = 4'b0001; cp_pop = 4'b0001; st_pop = 4'b0001; @(negedge clk); ld_pop = '0; cp_pop = '0; st_pop = '0;
    check(ld_cmd[0].op == OP_ZEROIZE && ld_cmd[0].count == 4, "ZEROIZE WGT to load");
    check(st_cmd[0].op == OP_ZEROIZE && st_cmd[0].count == 5, "ZEROIZE OUT to store");
    check(cp_cmd[0].op == OP_FINISH, "FINISH to compute, in order");
    finish[0] = 1; viol[1] = 1; @(negedge clk); finish[0] = 0; viol[1] = 0;
    check(done == 4'b0001 && violation == 4'b0010, "done and sticky violation");
    // teardown of tenant 0 with the store lane answering late
    begin
      automatic int n_ld = 0, n_st = 0;
      cfg(0, 15, 2);
      repeat (5) begin if (td_ld_req[0]) n_ld++; if (td_st_req[0]) n_st++; @(negedge clk); end
      check(n_ld == 5 && n_st == 5 && td_busy, "both lanes asked");
      td_ld_done[0] = 1; @(negedge clk); td_ld_done[0] = 0;
      repeat (3) begin if (td_ld_req[0]) n_ld = 100; @(negedge clk); end
      check(n_ld != 100 && td_st_req[0] && active[0], "load lane no longer asked, store lane still");
      td_st_done[0] = 1; @(negedge clk); td_st_done[0] = 0;
      repeat (3) @(negedge clk);
      check(!active[0] && !td_busy && tiles_free == 4'b1101 && !inp_own[0].v && !wgt_own[1].v, "released");
      check(ld_valid[0] == 0 && st_valid[0] == 0, "tenant 0 queues flushed");
      check(ld_valid[1], "tenant 1 untouched");
    end
    // temporal: tenant 1 torn down, tenant 2 takes everything, tenant 3 refused
    cfg(1, 15, 2);
    repeat (2) @(negedge clk); td_ld_done[1] = 1; td_st_done[1] = 1; @(negedge clk); td_ld_done[1] = 0; td_st_done[1] = 0;
    repeat (3) @(negedge clk);
    launch(2, 1, 4'b1111, 'h0010, 'h0080, 'h0020, 'h0010, lat);
    check(active == 4'b0100 && temporal && tiles_free == 0, "temporal launch takes the whole accelerator");
    launch(3, 0, 4'b0000, 0, 0, 0, 0, lat);
    check(launch_err[3] && !active[3], "spatial launch refused in temporal mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
