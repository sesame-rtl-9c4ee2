// traffic_shaper: shapes the traffic of one memory channel (read or write).
//
// Each tenant has a real-transaction queue (its partition of the split load or
// store queue, outside this module; here only its head is seen) and a set of
// tenant-private configuration registers (shaper_cfg_t: shaper_en, bandwidth,
// addr_range; tenant_id is the index).  Per tenant:
//   * shaper_en = 0: the head burst is a candidate whenever the queue is not
//     empty (plain, unshaped traffic).
//   * shaper_en = 1: a timer expires every `bandwidth` cycles.  At an expiry
//     the tenant sends exactly one burst: its real head burst if there is one,
//     otherwise a fake burst to an address from its fake_txn_gen.  The bus thus
//     carries one constant-size burst per period whatever the program does.
//     A head burst not marked shaped (a plain LOAD / LOAD_E from a tenant that
//     also has shaped traffic) bypasses the timer.
// A round-robin arbiter picks one candidate tenant per issue; the chosen burst
// is presented on issue_* and leaves when issue_ready is high (the DMA engine
// accepts it), popping the tenant's queue unless it was fake.  Write fakes carry
// zero data into the tenant's own addr_range, which the driver reserves for
// that purpose.
//
// The structure (timer, real queue, fake generator fed by the bank-conflict
// checker, multiplexer into the DMA engine, registers shaper_en / tenant_id /
// bandwidth / addr_range) follows the paper's shaper figure; the bypass of
// unshaped bursts and the round-robin arbiter are this design's choices.
module traffic_shaper
  import sesame_pkg::*;
#(
  parameter int unsigned DATA_W = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  shaper_cfg_t           cfg [NT],
  input  logic [NT-1:0]         q_valid,
  input  burst_t                q_head [NT],
  input  logic [DATA_W-1:0]     q_data [NT],
  output logic [NT-1:0]         q_pop,
  input  logic [DRAM_BANKS-1:0] free_banks,
  output logic                  issue_valid,
  input  logic                  issue_ready,
  output logic [MEM_AW-1:0]     issue_addr,
  output logic [TW-1:0]         issue_tenant,
  output logic                  issue_fake,
  output logic                  issue_enc,
  output logic                  issue_aes,
  output logic [DATA_W-1:0]     issue_data,
  output logic [NT-1:0]         slot_dbg,
  output logic [31:0]           fake_count,
  output logic [31:0]           bypass_count
);
  logic [NT-1:0]     slot, consume, cand, cand_fake, fake_next;
  logic [MEM_AW-1:0] fake_addr [NT];
  logic [TW-1:0]     rr, win;
  logic              any;

  for (genvar k = 0; k < NT; k++) begin : g_t
    shaper_timer u_timer (.clk, .rst_n, .en(cfg[k].shaper_en), .period(cfg[k].bandwidth),
                          .consume(consume[k]), .slot(slot[k]));
    fake_txn_gen #(.SEED(16'hACE1 + 16'(k) * 16'h1F3)) u_fake (
      .clk, .rst_n, .addr_base(cfg[k].addr_base), .addr_log2(cfg[k].addr_log2),
      .free_banks, .next(fake_next[k]), .addr(fake_addr[k]));
  end
  assign slot_dbg = slot;

  always_comb begin
    for (int k = 0; k < NT; k++) begin
      cand[k] = 1'b0; cand_fake[k] = 1'b0;
      if (!cfg[k].shaper_en)                    cand[k] = q_valid[k];
      else if (q_valid[k] && !q_head[k].shaped) cand[k] = 1'b1;            // bypass
      else if (slot[k]) begin cand[k] = 1'b1; cand_fake[k] = !q_valid[k]; end
    end
    any = 1'b0; win = rr;
    for (int d = 0; d < NT; d++) begin
      automatic logic [TW-1:0] k = rr + TW'(d);
      if (!any && cand[k]) begin any = 1'b1; win = k; end
    end
    issue_valid  = any;
    issue_tenant = win;
    issue_fake   = cand_fake[win];
    issue_addr   = cand_fake[win] ? fake_addr[win] : q_head[win].addr;
    issue_enc    = !cand_fake[win] && q_head[win].enc;
    issue_aes    = cfg[win].cipher_aes;
    issue_data   = cand_fake[win] ? '0 : q_data[win];
    q_pop = '0; consume = '0; fake_next = '0;
    if (any && issue_ready) begin
      q_pop[win]     = !cand_fake[win];
      consume[win]   = cfg[win].shaper_en && (cand_fake[win] || q_head[win].shaped);
      fake_next[win] = cand_fake[win];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; fake_count <= '0; bypass_count <= '0;
    end else if (any && issue_ready) begin
      rr <= win + 1'b1;
      if (cand_fake[win]) fake_count <= fake_count + 32'd1;
      if (cfg[win].shaper_en && !cand_fake[win] && !q_head[win].shaped) bypass_count <= bypass_count + 32'd1;
    end
  end
endmodule
