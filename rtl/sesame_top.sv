// sesame_top: the multi-tenant DAE inference accelerator.
//
// Blocks and how they connect:
//   scheduler     host registers, tenant launch/teardown, tile map and
//                 scratchmap, instruction queue, per-unit command queues
//   load_unit     per-tenant load engines -> input and weight scratchpads
//   compute_unit  per-tenant decoders driving four 8x8 GEMM/ALU tiles
//   store_unit    per-tenant store engines <- output scratchpad
//   4 dependency queues (load->compute, compute->load, compute->store,
//                 store->compute), each a private_queue partitioned by tenant
//   4 scratchpads (input, weight, accumulator, output) of 4 banks, bank t
//                 private to tile t
//   request_unit  split load/store queues, read/write traffic shapers, DMA
//                 engine with bank-conflict checker and cipher-latency model
//   bw_monitor    read/write bandwidth counters on the memory port
// The memory port is AXI-like: AR/R, AW/W/B channels with a {fake, tenant}
// transaction id and fixed 16-beat bursts of 64 bits.  It goes to the system
// MMU and DRAM, which are outside this design.  The host (driver) side is the
// scheduler's register, instruction and status ports.
//
// Clock: one clock, active-low asynchronous reset.  The paper's prototype
// runs at 100 MHz; the cipher-latency model in the DMA engine assumes 10 ns.
module sesame_top
  import sesame_pkg::*;
#(
  parameter int unsigned DQ_TOTAL = 16,
  parameter int unsigned BW_WINDOW = 1000
) (
  input  logic              clk,
  input  logic              rst_n,
  // host
  input  logic              cfg_we,
  input  logic [TW-1:0]     cfg_tenant,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  input  logic              ins_valid,
  input  logic [TW-1:0]     ins_tenant,
  input  insn_t             ins_data,
  output logic [NT-1:0]     ins_full,
  output logic [NT-1:0]     active,
  output logic [NT-1:0]     done,
  output logic [NT-1:0]     launch_err,
  output logic [NT-1:0]     violation,
  output logic              td_busy,
  output logic [NTILE-1:0]  tiles_free,
  // memory
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [MEM_AW-1:0] ar_addr,
  output logic [TW:0]       ar_id,
  input  logic              r_valid,
  input  logic [MEM_DW-1:0] r_data,
  input  logic [TW:0]       r_id,
  input  logic              r_last,
  output logic              aw_valid,
  input  logic              aw_ready,
  output logic [MEM_AW-1:0] aw_addr,
  output logic [TW:0]       aw_id,
  output logic              w_valid,
  input  logic              w_ready,
  output logic [MEM_DW-1:0] w_data,
  output logic              w_last,
  input  logic              b_valid,
  input  logic [TW:0]       b_id,
  // observation / statistics
  output logic [31:0]       bank_conflicts,
  output logic [31:0]       rd_fakes,
  output logic [31:0]       wr_fakes,
  output logic [31:0]       bypasses,
  output logic [31:0]       enc_stall_cycles,
  output logic [31:0]       bw_rd_bytes,
  output logic [31:0]       bw_wr_bytes,
  output logic              bw_sample,
  output logic [31:0]       tile_iters [NTILE],
  output logic [NT-1:0]     rq_stall
);
  localparam int IB = $clog2(INP_WORDS / NTILE), WB = $clog2(WGT_WORDS / NTILE);
  localparam int AB = $clog2(ACC_WORDS / NTILE), OB = $clog2(OUT_WORDS / NTILE);

  // ---------------------------------------------------------------- scheduler
  logic temporal;
  logic [7:0] qdepth [NT];
  logic [NT-1:0] flush, ld_valid, cp_valid, st_valid, ld_pop, cp_pop, st_pop, finish;
  logic [NT-1:0] td_ld_req, td_st_req, td_ld_done, td_st_done, l_viol, c_viol, s_viol;
  insn_t ld_cmd [NT], cp_cmd [NT], st_cmd [NT];
  shaper_cfg_t shaper_cfg [NT];
  rrange_t rng_inp [NT], rng_wgt [NT], rng_acc [NT], rng_out [NT];
  own_t tile_own [NTILE], inp_own [INP_NREG], wgt_own [WGT_NREG], acc_own [ACC_NREG], out_own [OUT_NREG];

  scheduler u_sched (
    .clk, .rst_n, .cfg_we, .cfg_tenant, .cfg_addr, .cfg_wdata, .ins_valid, .ins_tenant, .ins_data,
    .ins_full, .active, .done, .launch_err, .violation, .td_busy, .tiles_free,
    .temporal, .qdepth, .flush, .shaper_cfg, .rng_inp, .rng_wgt, .rng_acc, .rng_out,
    .ld_valid, .ld_cmd, .ld_pop, .cp_valid, .cp_cmd, .cp_pop, .st_valid, .st_cmd, .st_pop,
    .finish, .viol(l_viol | c_viol | s_viol), .td_ld_req, .td_st_req, .td_ld_done, .td_st_done,
    .tile_own, .inp_own, .wgt_own, .acc_own, .out_own);

  // ---------------------------------------------------------------- dependency queues
  logic [$clog2(DQ_TOTAL):0] dq_depth [NT];
  logic [0:0] one [NT];
  logic [0:0] dq_head [4][NT];
  logic [NT-1:0] dq_push [4], dq_pop [4], dq_full [4], dq_empty [4], dq_ovf [4];
  localparam int L2C = 0, C2L = 1, C2S = 2, S2C = 3;
  for (genvar k = 0; k < NT; k++) begin : g_dq_cfg
    assign dq_depth[k] = ($clog2(DQ_TOTAL)+1)'(qdepth[k]);
    assign one[k] = 1'b1;
  end
  for (genvar q = 0; q < 4; q++) begin : g_dq
    private_queue #(.NT(NT), .WIDTH(1), .TOTAL(DQ_TOTAL)) u_dep_q (
      .clk, .rst_n, .temporal, .req_depth(dq_depth), .flush, .push(dq_push[q]), .push_data(one),
      .pop(dq_pop[q]), .head(dq_head[q]), .full(dq_full[q]), .empty(dq_empty[q]), .overflow(dq_ovf[q]));
  end

  // ---------------------------------------------------------------- request unit
  logic [NT-1:0] rq_valid, rq_ready, rq_shaped, rq_enc, rdat_valid, wq_valid, wq_ready, wr_done;
  logic [MEM_AW-1:0] rq_addr [NT];
  logic [15:0] rq_nbursts [NT];
  logic [MEM_DW-1:0] rdat;
  burst_t wq_burst [NT];
  logic [BURST_DW-1:0] wq_data [NT];

  request_unit u_req (
    .clk, .rst_n, .cfg(shaper_cfg), .temporal, .flush,
    .rq_valid, .rq_ready, .rq_addr, .rq_nbursts, .rq_shaped, .rq_enc, .rdat_valid, .rdat,
    .wq_valid, .wq_ready, .wq_burst, .wq_data, .wr_done,
    .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_data, .r_id, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_id, .w_valid, .w_ready, .w_data, .w_last, .b_valid, .b_id,
    .bank_conflicts, .rd_fakes, .wr_fakes, .bypasses, .enc_stall_cycles, .rq_stall);

  bw_monitor #(.WINDOW(BW_WINDOW)) u_bw (
    .clk, .rst_n, .r_beat(r_valid), .w_beat(w_valid && w_ready),
    .rd_bytes(bw_rd_bytes), .wr_bytes(bw_wr_bytes), .sample(bw_sample), .rd_total(), .wr_total());

  // ---------------------------------------------------------------- scratchpad ports
  logic [NTILE-1:0] inp_we, wgt_we, inp_re, wgt_re;
  logic [IB-1:0] inp_wa [NTILE], inp_ra [NTILE];
  logic [WB-1:0] wgt_wa [NTILE], wgt_ra [NTILE];
  logic [INP_W-1:0] inp_wd [NTILE], inp_rd [NTILE];
  logic [WGT_W-1:0] wgt_wd [NTILE], wgt_rd [NTILE];
  logic [1:0] acc_re [NTILE];
  logic [AB-1:0] acc_ra [NTILE][2], c_acc_wa [NTILE], s_acc_za [NTILE];
  logic [ACC_W-1:0] acc_rd [NTILE][2], c_acc_wd [NTILE];
  logic [NTILE-1:0] c_acc_we, s_acc_ze, c_out_we, s_out_ze, s_out_re;
  logic [OB-1:0] c_out_wa [NTILE], s_out_za [NTILE], s_out_ra [NTILE];
  logic [OUT_W-1:0] c_out_wd [NTILE], out_rd [NTILE];

  // ---------------------------------------------------------------- units
  load_unit u_load (
    .clk, .rst_n, .cmd_valid(ld_valid), .cmd(ld_cmd), .cmd_pop(ld_pop),
    .tok_avail(~dq_empty[C2L]), .tok_pop(dq_pop[C2L]), .tok_full(dq_full[L2C]), .tok_push(dq_push[L2C]),
    .td_req(td_ld_req), .td_inp(rng_inp), .td_wgt(rng_wgt), .td_done(td_ld_done),
    .rq_valid, .rq_ready, .rq_addr, .rq_nbursts, .rq_shaped, .rq_enc, .rdat_valid, .rdat,
    .inp_own, .wgt_own, .inp_wr_en(inp_we), .inp_wr_addr(inp_wa), .inp_wr_data(inp_wd),
    .wgt_wr_en(wgt_we), .wgt_wr_addr(wgt_wa), .wgt_wr_data(wgt_wd), .viol(l_viol), .busy());

  compute_unit u_comp (
    .clk, .rst_n, .cmd_valid(cp_valid), .cmd(cp_cmd), .cmd_pop(cp_pop),
    .l2c_avail(~dq_empty[L2C]), .l2c_pop(dq_pop[L2C]), .s2c_avail(~dq_empty[S2C]), .s2c_pop(dq_pop[S2C]),
    .c2l_full(dq_full[C2L]), .c2l_push(dq_push[C2L]), .c2s_full(dq_full[C2S]), .c2s_push(dq_push[C2S]),
    .finish, .tile_own, .inp_own, .wgt_own, .acc_own, .out_own,
    .inp_rd_en(inp_re), .inp_rd_addr(inp_ra), .inp_rd_data(inp_rd),
    .wgt_rd_en(wgt_re), .wgt_rd_addr(wgt_ra), .wgt_rd_data(wgt_rd),
    .acc_rd_en(acc_re), .acc_rd_addr(acc_ra), .acc_rd_data(acc_rd),
    .acc_wr_en(c_acc_we), .acc_wr_addr(c_acc_wa), .acc_wr_data(c_acc_wd),
    .out_wr_en(c_out_we), .out_wr_addr(c_out_wa), .out_wr_data(c_out_wd),
    .viol(c_viol), .busy(), .tile_iters);

  store_unit u_store (
    .clk, .rst_n, .cmd_valid(st_valid), .cmd(st_cmd), .cmd_pop(st_pop),
    .tok_avail(~dq_empty[C2S]), .tok_pop(dq_pop[C2S]), .tok_full(dq_full[S2C]), .tok_push(dq_push[S2C]),
    .td_req(td_st_req), .td_acc(rng_acc), .td_out(rng_out), .td_done(td_st_done),
    .wq_valid, .wq_ready, .wq_burst, .wq_data, .wr_done, .acc_own, .out_own,
    .out_rd_en(s_out_re), .out_rd_addr(s_out_ra), .out_rd_data(out_rd),
    .acc_zw_en(s_acc_ze), .acc_zw_addr(s_acc_za), .out_zw_en(s_out_ze), .out_zw_addr(s_out_za),
    .viol(s_viol), .busy());

  // ---------------------------------------------------------------- scratchpads
  logic [0:0] inp_re1 [NTILE], wgt_re1 [NTILE], out_re1 [NTILE];
  logic [IB-1:0] inp_ra1 [NTILE][1];
  logic [WB-1:0] wgt_ra1 [NTILE][1];
  logic [OB-1:0] out_ra1 [NTILE][1];
  logic [INP_W-1:0] inp_rd1 [NTILE][1];
  logic [WGT_W-1:0] wgt_rd1 [NTILE][1];
  logic [OUT_W-1:0] out_rd1 [NTILE][1];
  logic [NTILE-1:0] acc_we, out_we;
  logic [AB-1:0] acc_wa [NTILE];
  logic [OB-1:0] out_wa [NTILE];
  logic [ACC_W-1:0] acc_wd [NTILE];
  logic [OUT_W-1:0] out_wd [NTILE];

  for (genvar t = 0; t < NTILE; t++) begin : g_port
    assign inp_re1[t] = inp_re[t];  assign inp_ra1[t][0] = inp_ra[t];  assign inp_rd[t] = inp_rd1[t][0];
    assign wgt_re1[t] = wgt_re[t];  assign wgt_ra1[t][0] = wgt_ra[t];  assign wgt_rd[t] = wgt_rd1[t][0];
    assign out_re1[t] = s_out_re[t]; assign out_ra1[t][0] = s_out_ra[t]; assign out_rd[t] = out_rd1[t][0];
    // zero writes (ZEROIZE, teardown) take the port over compute writes
    assign acc_we[t] = s_acc_ze[t] || c_acc_we[t];
    assign acc_wa[t] = s_acc_ze[t] ? s_acc_za[t] : c_acc_wa[t];
    assign acc_wd[t] = s_acc_ze[t] ? '0 : c_acc_wd[t];
    assign out_we[t] = s_out_ze[t] || c_out_we[t];
    assign out_wa[t] = s_out_ze[t] ? s_out_za[t] : c_out_wa[t];
    assign out_wd[t] = s_out_ze[t] ? '0 : c_out_wd[t];
  end

  scratchpad #(.W(INP_W), .WORDS(INP_WORDS), .NBANK(NTILE), .NRD(1)) u_inp_spad (
    .clk, .wr_en(inp_we), .wr_addr(inp_wa), .wr_data(inp_wd), .rd_en(inp_re1), .rd_addr(inp_ra1), .rd_data(inp_rd1));
  scratchpad #(.W(WGT_W), .WORDS(WGT_WORDS), .NBANK(NTILE), .NRD(1)) u_wgt_spad (
    .clk, .wr_en(wgt_we), .wr_addr(wgt_wa), .wr_data(wgt_wd), .rd_en(wgt_re1), .rd_addr(wgt_ra1), .rd_data(wgt_rd1));
  scratchpad #(.W(ACC_W), .WORDS(ACC_WORDS), .NBANK(NTILE), .NRD(2)) u_acc_spad (
    .clk, .wr_en(acc_we), .wr_addr(acc_wa), .wr_data(acc_wd), .rd_en(acc_re), .rd_addr(acc_ra), .rd_data(acc_rd));
  scratchpad #(.W(OUT_W), .WORDS(OUT_WORDS), .NBANK(NTILE), .NRD(1)) u_out_spad (
    .clk, .wr_en(out_we), .wr_addr(out_wa), .wr_data(out_wd), .rd_en(out_re1), .rd_addr(out_ra1), .rd_data(out_rd1));
endmodule
