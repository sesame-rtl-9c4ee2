// request_unit: the accelerator's only path to memory.
//
// Read side: each tenant's load engine hands a request (DRAM address, number of
// bursts, shaped / encrypted flags) to its own burst_splitter, which fills the
// tenant's partition of the split load queue (a private_queue of burst
// descriptors).  The read traffic_shaper picks one burst at a time from the
// queue heads (or a fake burst on a shaped tenant's idle slot) and the
// dma_engine issues it on the AR channel.  Returning beats are steered by the
// transaction id to the owning tenant's load engine (rdat_valid[k]); beats of
// fake bursts are dropped.
// Write side: each tenant's store engine pushes complete bursts (descriptor
// plus BURST_BEATS beats of data) into its partition of the split store queue;
// the write shaper and the DMA engine send them; each write response pulses the
// tenant's wr_done.
//
// A full partition stalls only its own tenant (rq_ready / wq_ready low).
// Queue sizes (16 read and 8 write bursts in all) are this design's choice.
module request_unit
  import sesame_pkg::*;
#(
  parameter int unsigned RQ_TOTAL = 16,
  parameter int unsigned WQ_TOTAL = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  shaper_cfg_t           cfg [NT],
  input  logic                  temporal,
  input  logic [NT-1:0]         flush,
  // load engines
  input  logic [NT-1:0]         rq_valid,
  output logic [NT-1:0]         rq_ready,
  input  logic [MEM_AW-1:0]     rq_addr [NT],
  input  logic [15:0]           rq_nbursts [NT],
  input  logic [NT-1:0]         rq_shaped,
  input  logic [NT-1:0]         rq_enc,
  output logic [NT-1:0]         rdat_valid,
  output logic [MEM_DW-1:0]     rdat,
  // store engines
  input  logic [NT-1:0]         wq_valid,
  output logic [NT-1:0]         wq_ready,
  input  burst_t                wq_burst [NT],
  input  logic [BURST_DW-1:0]   wq_data [NT],
  output logic [NT-1:0]         wr_done,
  // memory
  output logic                  ar_valid,
  input  logic                  ar_ready,
  output logic [MEM_AW-1:0]     ar_addr,
  output logic [TW:0]           ar_id,
  input  logic                  r_valid,
  input  logic [MEM_DW-1:0]     r_data,
  input  logic [TW:0]           r_id,
  input  logic                  r_last,
  output logic                  aw_valid,
  input  logic                  aw_ready,
  output logic [MEM_AW-1:0]     aw_addr,
  output logic [TW:0]           aw_id,
  output logic                  w_valid,
  input  logic                  w_ready,
  output logic [MEM_DW-1:0]     w_data,
  output logic                  w_last,
  input  logic                  b_valid,
  input  logic [TW:0]           b_id,
  // status
  output logic [31:0]           bank_conflicts,
  output logic [31:0]           rd_fakes,
  output logic [31:0]           wr_fakes,
  output logic [31:0]           bypasses,
  output logic [31:0]           enc_stall_cycles,
  output logic [NT-1:0]         rq_stall          // tenant's read queue is full
);
  localparam int BW_ = $bits(burst_t);

  // ---------------- read: splitters -> split load queue
  logic [NT-1:0]   sp_valid, rq_full, rq_empty, rq_pop, rq_ovf;
  burst_t          sp_burst [NT];
  logic [BW_-1:0]  sp_bits [NT], rq_head_bits [NT];
  burst_t          rq_head [NT];
  logic [0:0]      rq_nodata [NT];
  logic [$clog2(RQ_TOTAL):0] rq_depth [NT];

  for (genvar k = 0; k < NT; k++) begin : g_rs
    burst_splitter u_split (
      .clk, .rst_n, .in_valid(rq_valid[k]), .in_ready(rq_ready[k]), .in_addr(rq_addr[k]),
      .in_nbursts(rq_nbursts[k]), .in_shaped(rq_shaped[k]), .in_enc(rq_enc[k]),
      .out_valid(sp_valid[k]), .out_burst(sp_burst[k]), .out_ready(!rq_full[k]));
    assign sp_bits[k]   = sp_burst[k];
    assign rq_head[k]   = burst_t'(rq_head_bits[k]);
    assign rq_nodata[k] = '0;
    assign rq_depth[k]  = ($clog2(RQ_TOTAL)+1)'(RQ_TOTAL);
  end
  assign rq_stall = rq_full;

  private_queue #(.NT(NT), .WIDTH(BW_), .TOTAL(RQ_TOTAL)) u_split_load_q (
    .clk, .rst_n, .temporal, .req_depth(rq_depth), .flush,
    .push(sp_valid & ~rq_full), .push_data(sp_bits), .pop(rq_pop),
    .head(rq_head_bits), .full(rq_full), .empty(rq_empty), .overflow(rq_ovf));

  // ---------------- write: split store queue
  localparam int WE = BW_ + BURST_DW;
  logic [WE-1:0] wq_bits [NT], wq_head_bits [NT];
  logic [NT-1:0] wq_full, wq_empty, wq_pop, wq_ovf;
  burst_t        wq_head [NT];
  logic [BURST_DW-1:0] wq_hdata [NT];
  logic [$clog2(WQ_TOTAL):0] wq_depth [NT];
  for (genvar k = 0; k < NT; k++) begin : g_ws
    assign wq_bits[k]  = {wq_burst[k], wq_data[k]};
    assign wq_head[k]  = burst_t'(wq_head_bits[k][WE-1 -: BW_]);
    assign wq_hdata[k] = wq_head_bits[k][BURST_DW-1:0];
    assign wq_depth[k] = ($clog2(WQ_TOTAL)+1)'(WQ_TOTAL);
  end
  assign wq_ready = ~wq_full;

  private_queue #(.NT(NT), .WIDTH(WE), .TOTAL(WQ_TOTAL)) u_split_store_q (
    .clk, .rst_n, .temporal, .req_depth(wq_depth), .flush,
    .push(wq_valid & ~wq_full), .push_data(wq_bits), .pop(wq_pop),
    .head(wq_head_bits), .full(wq_full), .empty(wq_empty), .overflow(wq_ovf));

  // ---------------- shapers
  logic [DRAM_BANKS-1:0] free_banks;
  logic rs_valid, rs_ready, rs_fake, rs_enc, rs_aes;
  logic [MEM_AW-1:0] rs_addr;
  logic [TW-1:0] rs_tenant;
  logic [0:0] rs_data;
  logic [NT-1:0] rs_slot, ws_slot;
  logic [31:0]   rd_byp, wr_byp;
  logic ws_valid, ws_ready, ws_fake, ws_enc, ws_aes;
  logic [MEM_AW-1:0] ws_addr;
  logic [TW-1:0] ws_tenant;
  logic [BURST_DW-1:0] ws_data;

  traffic_shaper #(.DATA_W(1)) u_rd_shaper (
    .clk, .rst_n, .cfg, .q_valid(~rq_empty), .q_head(rq_head), .q_data(rq_nodata), .q_pop(rq_pop),
    .free_banks, .issue_valid(rs_valid), .issue_ready(rs_ready), .issue_addr(rs_addr),
    .issue_tenant(rs_tenant), .issue_fake(rs_fake), .issue_enc(rs_enc), .issue_aes(rs_aes),
    .issue_data(rs_data), .slot_dbg(rs_slot), .fake_count(rd_fakes), .bypass_count(rd_byp));

  traffic_shaper #(.DATA_W(BURST_DW)) u_wr_shaper (
    .clk, .rst_n, .cfg, .q_valid(~wq_empty), .q_head(wq_head), .q_data(wq_hdata), .q_pop(wq_pop),
    .free_banks, .issue_valid(ws_valid), .issue_ready(ws_ready), .issue_addr(ws_addr),
    .issue_tenant(ws_tenant), .issue_fake(ws_fake), .issue_enc(ws_enc), .issue_aes(ws_aes),
    .issue_data(ws_data), .slot_dbg(ws_slot), .fake_count(wr_fakes), .bypass_count(wr_byp));
  assign bypasses = rd_byp + wr_byp;

  dma_engine u_dma (
    .clk, .rst_n,
    .rd_valid(rs_valid), .rd_ready(rs_ready), .rd_addr(rs_addr), .rd_tenant(rs_tenant),
    .rd_fake(rs_fake), .rd_enc(rs_enc), .rd_aes(rs_aes),
    .wr_valid(ws_valid), .wr_ready(ws_ready), .wr_addr(ws_addr), .wr_tenant(ws_tenant),
    .wr_fake(ws_fake), .wr_enc(ws_enc), .wr_aes(ws_aes), .wr_data(ws_data),
    .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_id, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .free_banks, .conflicts(bank_conflicts), .enc_stall_cycles);

  // ---------------- response steering
  assign rdat = r_data;
  always_comb begin
    rdat_valid = '0;
    wr_done    = '0;
    if (r_valid && !r_id[TW]) rdat_valid[r_id[TW-1:0]] = 1'b1;
    if (b_valid && !b_id[TW]) wr_done[b_id[TW-1:0]]    = 1'b1;
  end
endmodule
