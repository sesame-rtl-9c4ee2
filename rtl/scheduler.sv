// scheduler: tenant management, configuration registers, instruction queue.
//
// The host driver talks to the accelerator only through this block:
//  * cfg_we/cfg_tenant/cfg_addr/cfg_wdata write a tenant-private configuration
//    register (one set per tenant, "metadata/config"):
//      0 EXEC_MODE  bit0 = 1 temporal (whole accelerator), 0 spatial
//      1 TILE_MASK  execution tiles wanted
//      2 QDEPTH     depth of the tenant's instruction and dependency queues
//      3..6 SPAD_INP/WGT/ACC/OUT  {base region[15:8], region count[7:0]}
//      7 SHAPER     bit0 shaper_en, bit1 cipher is AES (else QARMA)
//      8 BANDWIDTH  shaper period in cycles per burst
//      9 ADDR_BASE  fake-traffic address range base (bytes)
//     10 ADDR_LOG2  fake-traffic address range size, log2 bytes
//     15 CMD        1 = launch, 2 = teardown
//  * launch: refused (launch_err) when the tenant is active, when a temporal
//    tenant would share the accelerator, or when any requested tile or region
//    is taken (tenant_spad_map claim).  Otherwise the tenant's queues are
//    flushed and it becomes active.  This is the resource-availability check
//    that prevents over-subscription.
//  * ins_valid/ins_tenant/ins_data push an instruction into the tenant's
//    partition of the instruction queue (a private_queue); ins_full[k] tells
//    the driver that partition is full.
//  * dispatch: for every active tenant, in parallel, the head instruction moves
//    to the tenant's load, compute or store command queue (private queues);
//    ZEROIZE goes to load for INP/WGT and to store for ACC/OUT.
//  * done[k] is set when the tenant's FINISH retires (the driver polls it).
//  * teardown: the tenant's load and store lanes zeroize all of its scratchpad
//    regions, then its regions and tiles are released, its queues flushed and
//    it becomes inactive.
// The tile map and scratchmap (tenant_spad_map) live here.  Register numbering,
// the command encoding and the queue sizes are this design's choices.
module scheduler
  import sesame_pkg::*;
#(
  parameter int unsigned IQ_TOTAL = 64,
  parameter int unsigned CQ_TOTAL = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register interface
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
  // configuration to the datapath
  output logic              temporal,
  output logic [7:0]        qdepth [NT],
  output logic [NT-1:0]     flush,
  output shaper_cfg_t       shaper_cfg [NT],
  output rrange_t           rng_inp [NT],
  output rrange_t           rng_wgt [NT],
  output rrange_t           rng_acc [NT],
  output rrange_t           rng_out [NT],
  // command queue heads
  output logic [NT-1:0]     ld_valid,
  output insn_t             ld_cmd [NT],
  input  logic [NT-1:0]     ld_pop,
  output logic [NT-1:0]     cp_valid,
  output insn_t             cp_cmd [NT],
  input  logic [NT-1:0]     cp_pop,
  output logic [NT-1:0]     st_valid,
  output insn_t             st_cmd [NT],
  input  logic [NT-1:0]     st_pop,
  // events from the units
  input  logic [NT-1:0]     finish,
  input  logic [NT-1:0]     viol,
  output logic [NT-1:0]     td_ld_req,
  output logic [NT-1:0]     td_st_req,
  input  logic [NT-1:0]     td_ld_done,
  input  logic [NT-1:0]     td_st_done,
  // tables
  output own_t              tile_own [NTILE],
  output own_t              inp_own  [INP_NREG],
  output own_t              wgt_own  [WGT_NREG],
  output own_t              acc_own  [ACC_NREG],
  output own_t              out_own  [OUT_NREG]
);
  // ---------------- configuration registers
  logic [NT-1:0]    r_temporal;
  logic [NTILE-1:0] r_tiles [NT];
  rrange_t          r_rng [NT][4];
  shaper_cfg_t      r_shp [NT];
  logic             temporal_q;

  assign temporal = temporal_q;
  for (genvar k = 0; k < NT; k++) begin : g_cfgout
    assign rng_inp[k] = r_rng[k][BUF_INP];
    assign rng_wgt[k] = r_rng[k][BUF_WGT];
    assign rng_acc[k] = r_rng[k][BUF_ACC];
    assign rng_out[k] = r_rng[k][BUF_OUT];
    always_comb begin
      shaper_cfg[k] = r_shp[k];
      shaper_cfg[k].shaper_en = r_shp[k].shaper_en && active[k];
    end
  end

  // ---------------- launch / teardown control
  typedef enum logic [2:0] {M_IDLE, M_CLAIM, M_WAIT, M_TD, M_REL} mst_e;
  mst_e ms;
  logic [TW-1:0] mk;
  logic claim, claim_done, claim_ok, rel;
  logic ld_d, st_d;

  wire logic cmd_launch   = cfg_we && cfg_addr == 4'd15 && cfg_wdata[1:0] == 2'd1;
  wire logic cmd_teardown = cfg_we && cfg_addr == 4'd15 && cfg_wdata[1:0] == 2'd2;

  assign claim   = (ms == M_CLAIM);
  assign rel     = (ms == M_REL);
  assign td_busy = (ms == M_TD) || (ms == M_REL);
  always_comb begin
    // each lane is asked until it answers; td_done and the request never overlap
    td_ld_req = '0;
    td_st_req = '0;
    if (ms == M_TD && !ld_d && !td_ld_done[mk]) td_ld_req[mk] = 1'b1;
    if (ms == M_TD && !st_d && !td_st_done[mk]) td_st_req[mk] = 1'b1;
  end

  tenant_spad_map u_map (
    .clk, .rst_n, .claim, .claim_tenant(mk), .claim_tiles(r_tiles[mk]), .claim_rng(r_rng[mk]),
    .claim_done, .claim_ok, .release_req(rel), .release_tenant(mk),
    .tile_own, .inp_own, .wgt_own, .acc_own, .out_own);

  always_comb
    for (int t = 0; t < NTILE; t++) tiles_free[t] = !tile_own[t].v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_temporal <= '0; temporal_q <= 1'b0; ms <= M_IDLE; mk <= '0;
      active <= '0; done <= '0; launch_err <= '0; violation <= '0; flush <= '0;
      ld_d <= 1'b0; st_d <= 1'b0;
      for (int k = 0; k < NT; k++) begin
        r_tiles[k] <= '0; r_shp[k] <= '0; qdepth[k] <= '0;
        for (int s = 0; s < 4; s++) r_rng[k][s] <= '0;
      end
    end else begin
      flush     <= '0;
      violation <= violation | viol;
      done      <= done | finish;
      if (cfg_we && !(ms != M_IDLE && cfg_tenant == mk)) begin
        unique case (cfg_addr)
          4'd0:  r_temporal[cfg_tenant] <= cfg_wdata[0];
          4'd1:  r_tiles[cfg_tenant]    <= cfg_wdata[NTILE-1:0];
          4'd2:  qdepth[cfg_tenant]     <= cfg_wdata[7:0];
          4'd3, 4'd4, 4'd5, 4'd6:
                 r_rng[cfg_tenant][2'(cfg_addr - 4'd3)] <= cfg_wdata[15:0];
          4'd7:  begin r_shp[cfg_tenant].shaper_en <= cfg_wdata[0]; r_shp[cfg_tenant].cipher_aes <= cfg_wdata[1]; end
          4'd8:  r_shp[cfg_tenant].bandwidth <= cfg_wdata[15:0];
          4'd9:  r_shp[cfg_tenant].addr_base <= cfg_wdata;
          4'd10: r_shp[cfg_tenant].addr_log2 <= cfg_wdata[4:0];
          default: ;
        endcase
      end
      unique case (ms)
        M_IDLE: if (cmd_launch) begin
                  mk <= cfg_tenant;
                  if (active[cfg_tenant] || (r_temporal[cfg_tenant] && active != '0) ||
                      (!r_temporal[cfg_tenant] && active != '0 && temporal_q))
                    launch_err[cfg_tenant] <= 1'b1;
                  else ms <= M_CLAIM;
                end else if (cmd_teardown && active[cfg_tenant]) begin
                  mk <= cfg_tenant; ms <= M_TD; ld_d <= 1'b0; st_d <= 1'b0;
                end
        M_CLAIM: ms <= M_WAIT;
        M_WAIT: if (claim_done) begin
                  if (claim_ok) begin
                    active[mk] <= 1'b1; done[mk] <= 1'b0; launch_err[mk] <= 1'b0;
                    violation[mk] <= 1'b0; flush[mk] <= 1'b1;
                    temporal_q <= r_temporal[mk];
                  end else launch_err[mk] <= 1'b1;
                  ms <= M_IDLE;
                end
        M_TD:   begin
                  if (td_ld_done[mk]) ld_d <= 1'b1;
                  if (td_st_done[mk]) st_d <= 1'b1;
                  if ((ld_d || td_ld_done[mk]) && (st_d || td_st_done[mk])) ms <= M_REL;
                end
        default: begin      // M_REL
                  active[mk] <= 1'b0; done[mk] <= 1'b0; flush[mk] <= 1'b1;
                  if (active == (NT'(1) << mk)) temporal_q <= 1'b0;
                  ms <= M_IDLE;
                end
      endcase
    end
  end

  // ---------------- instruction queue and dispatch
  logic [INSN_W-1:0] iq_head [NT], iq_in [NT];
  logic [NT-1:0] iq_push, iq_pop, iq_empty, iq_ovf;
  logic [$clog2(IQ_TOTAL):0] iq_depth [NT];
  logic [$clog2(CQ_TOTAL):0] cq_depth [NT];
  logic [NT-1:0] to_ld, to_cp, to_st, ld_full, cp_full, st_full, ld_empty, cp_empty, st_empty, cq_ovf [3];
  logic [INSN_W-1:0] ldh [NT], cph [NT], sth [NT];

  always_comb begin
    for (int k = 0; k < NT; k++) begin
      automatic insn_t h = insn_t'(iq_head[k]);
      iq_in[k]    = ins_data;
      iq_push[k]  = ins_valid && ins_tenant == TW'(k) && active[k];
      iq_depth[k] = ($clog2(IQ_TOTAL)+1)'(qdepth[k]);
      cq_depth[k] = ($clog2(CQ_TOTAL)+1)'(CQ_TOTAL);
      to_ld[k] = is_load(h.op) || (h.op == OP_ZEROIZE && (h.buf_id == BUF_INP || h.buf_id == BUF_WGT));
      to_st[k] = is_store(h.op) || (h.op == OP_ZEROIZE && (h.buf_id == BUF_ACC || h.buf_id == BUF_OUT));
      to_cp[k] = !to_ld[k] && !to_st[k];
      iq_pop[k] = active[k] && !iq_empty[k] &&
                  ((to_ld[k] && !ld_full[k]) || (to_cp[k] && !cp_full[k]) || (to_st[k] && !st_full[k]));
      ld_cmd[k] = insn_t'(ldh[k]);
      cp_cmd[k] = insn_t'(cph[k]);
      st_cmd[k] = insn_t'(sth[k]);
    end
  end

  private_queue #(.NT(NT), .WIDTH(INSN_W), .TOTAL(IQ_TOTAL)) u_inst_q (
    .clk, .rst_n, .temporal(temporal_q), .req_depth(iq_depth), .flush, .push(iq_push), .push_data(iq_in),
    .pop(iq_pop), .head(iq_head), .full(ins_full), .empty(iq_empty), .overflow(iq_ovf));

  private_queue #(.NT(NT), .WIDTH(INSN_W), .TOTAL(CQ_TOTAL)) u_ld_q (
    .clk, .rst_n, .temporal(temporal_q), .req_depth(cq_depth), .flush, .push(iq_pop & to_ld), .push_data(iq_head),
    .pop(ld_pop), .head(ldh), .full(ld_full), .empty(ld_empty), .overflow(cq_ovf[0]));
  private_queue #(.NT(NT), .WIDTH(INSN_W), .TOTAL(CQ_TOTAL)) u_cp_q (
    .clk, .rst_n, .temporal(temporal_q), .req_depth(cq_depth), .flush, .push(iq_pop & to_cp), .push_data(iq_head),
    .pop(cp_pop), .head(cph), .full(cp_full), .empty(cp_empty), .overflow(cq_ovf[1]));
  private_queue #(.NT(NT), .WIDTH(INSN_W), .TOTAL(CQ_TOTAL)) u_st_q (
    .clk, .rst_n, .temporal(temporal_q), .req_depth(cq_depth), .flush, .push(iq_pop & to_st), .push_data(iq_head),
    .pop(st_pop), .head(sth), .full(st_full), .empty(st_empty), .overflow(cq_ovf[2]));

  assign ld_valid = ~ld_empty;
  assign cp_valid = ~cp_empty;
  assign st_valid = ~st_empty;
endmodule
