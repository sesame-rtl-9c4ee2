// tenant_spad_map: the scheduler's "scratchmap" and execution-tile map.
//
// It records, for each 16 kB region of the four scratchpads and for each of the
// NTILE execution tiles, whether it is owned and by which tenant.  Bank b of every
// scratchpad belongs to tile b, so a region may only be given to a tenant that
// owns the tile of its bank.
//
// claim: in one cycle the requested tile mask and the four region ranges
//   (base, num per scratchpad) are checked: every tile and region must be free,
//   inside the scratchpad, and every region must lie in a bank of a requested
//   tile.  If all holds they are all given to claim_tenant and claim_ok pulses
//   with claim_done; otherwise nothing changes and claim_ok stays low (this is how
//   the scheduler refuses over-subscription).
// release: frees every tile and region of release_tenant in one cycle (the
//   scheduler issues it after the zeroizers have cleared the regions).
// The tables are outputs, read combinationally by the base/bound checkers.
//
// Region granularity (16 kB) and the existence of the map follow the paper; the
// range-based claim and the tile-per-bank rule are this design's choices.
module tenant_spad_map
  import sesame_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             claim,
  input  logic [TW-1:0]    claim_tenant,
  input  logic [NTILE-1:0] claim_tiles,
  input  rrange_t          claim_rng [4],   // indexed by buf_e
  output logic             claim_done,
  output logic             claim_ok,
  input  logic             release_req,
  input  logic [TW-1:0]    release_tenant,
  output own_t             tile_own [NTILE],
  output own_t             inp_own  [INP_NREG],
  output own_t             wgt_own  [WGT_NREG],
  output own_t             acc_own  [ACC_NREG],
  output own_t             out_own  [OUT_NREG]
);
  localparam int NR [4] = '{INP_NREG, WGT_NREG, ACC_NREG, OUT_NREG};

  own_t tbl [4][NREG_MAX];
  logic ok;

  // is region r of scratchpad s inside the claim request?
  function automatic logic in_rng(rrange_t g, int r);
    return (r >= int'(g.base)) && (r < int'(g.base) + int'(g.num));
  endfunction

  always_comb begin
    ok = 1'b1;
    for (int t = 0; t < NTILE; t++)
      if (claim_tiles[t] && tile_own[t].v) ok = 1'b0;
    for (int s = 0; s < 4; s++) begin
      if (int'(claim_rng[s].base) + int'(claim_rng[s].num) > NR[s]) ok = 1'b0;
      for (int r = 0; r < NREG_MAX; r++)
        if (r < NR[s] && in_rng(claim_rng[s], r)) begin
          if (tbl[s][r].v) ok = 1'b0;
          if (!claim_tiles[r / (NR[s] / NTILE)]) ok = 1'b0;
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 4; s++)
        for (int r = 0; r < NREG_MAX; r++) tbl[s][r] <= '0;
      for (int t = 0; t < NTILE; t++) tile_own[t] <= '0;
      claim_done <= 1'b0;
      claim_ok   <= 1'b0;
    end else begin
      claim_done <= claim;
      claim_ok   <= claim && ok;
      if (claim && ok) begin
        for (int t = 0; t < NTILE; t++)
          if (claim_tiles[t]) tile_own[t] <= '{v: 1'b1, id: claim_tenant};
        for (int s = 0; s < 4; s++)
          for (int r = 0; r < NREG_MAX; r++)
            if (r < NR[s] && in_rng(claim_rng[s], r)) tbl[s][r] <= '{v: 1'b1, id: claim_tenant};
      end else if (release_req) begin
        for (int t = 0; t < NTILE; t++)
          if (tile_own[t].id == release_tenant) tile_own[t] <= '0;
        for (int s = 0; s < 4; s++)
          for (int r = 0; r < NREG_MAX; r++)
            if (tbl[s][r].id == release_tenant) tbl[s][r] <= '0;
      end
    end
  end

  for (genvar r = 0; r < INP_NREG; r++) begin : g_i  assign inp_own[r] = tbl[BUF_INP][r]; end
  for (genvar r = 0; r < WGT_NREG; r++) begin : g_w  assign wgt_own[r] = tbl[BUF_WGT][r]; end
  for (genvar r = 0; r < ACC_NREG; r++) begin : g_a  assign acc_own[r] = tbl[BUF_ACC][r]; end
  for (genvar r = 0; r < OUT_NREG; r++) begin : g_o  assign out_own[r] = tbl[BUF_OUT][r]; end
endmodule
