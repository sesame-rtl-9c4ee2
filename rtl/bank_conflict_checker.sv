// bank_conflict_checker: keeps track of DRAM banks with pending transactions.
//
// Each burst issued on the read or write channel records its DRAM bank
// (address bits DRAM_BANK_LSB and up) in an in-order list of that channel; the
// end of the burst (last read beat, or write response) removes the oldest
// entry.  From the lists it keeps a pending count per bank and drives
//   free_banks : banks with nothing pending (steers the fake generator),
//   conflicts  : number of real bursts issued to a bank that already had one
//                pending (reported so the compiler's tiling can avoid them),
//   rd_full/wr_full : the list is full, no further burst may be issued.
// Memory responses are assumed in order per channel, as AXI gives for a single
// transaction id.
module bank_conflict_checker
  import sesame_pkg::*;
#(
  parameter int unsigned MAXPEND = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_issue,
  input  logic                  rd_issue_fake,
  input  logic [MEM_AW-1:0]     rd_addr,
  input  logic                  rd_done,
  input  logic                  wr_issue,
  input  logic                  wr_issue_fake,
  input  logic [MEM_AW-1:0]     wr_addr,
  input  logic                  wr_done,
  output logic                  rd_full,
  output logic                  wr_full,
  output logic [DRAM_BANKS-1:0] free_banks,
  output logic [31:0]           conflicts
);
  localparam int BK = $clog2(DRAM_BANKS);
  localparam int PW = $clog2(MAXPEND);

  logic [BK-1:0] rq [MAXPEND], wq [MAXPEND];
  logic [PW-1:0] rh, rt, wh, wt;
  logic [PW:0]   rn, wn;
  logic [PW+1:0] pend [DRAM_BANKS];

  logic [BK-1:0] rb, wb;
  assign rb = rd_addr[DRAM_BANK_LSB +: BK];
  assign wb = wr_addr[DRAM_BANK_LSB +: BK];
  assign rd_full = (rn == (PW+1)'(MAXPEND));
  assign wr_full = (wn == (PW+1)'(MAXPEND));

  always_comb
    for (int b = 0; b < DRAM_BANKS; b++) free_banks[b] = (pend[b] == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rh <= '0; rt <= '0; wh <= '0; wt <= '0; rn <= '0; wn <= '0;
      conflicts <= '0;
      for (int b = 0; b < DRAM_BANKS; b++) pend[b] <= '0;
    end else begin
      automatic logic ri = rd_issue && !rd_full;
      automatic logic wi = wr_issue && !wr_full;
      automatic logic rd = rd_done && rn != '0;
      automatic logic wd = wr_done && wn != '0;
      if (ri) begin rq[rt] <= rb; rt <= rt + 1'b1; end
      if (wi) begin wq[wt] <= wb; wt <= wt + 1'b1; end
      if (rd) rh <= rh + 1'b1;
      if (wd) wh <= wh + 1'b1;
      rn <= rn + (PW+1)'(ri) - (PW+1)'(rd);
      wn <= wn + (PW+1)'(wi) - (PW+1)'(wd);
      for (int b = 0; b < DRAM_BANKS; b++)
        pend[b] <= pend[b]
                 + (PW+2)'(ri && rb == BK'(b)) + (PW+2)'(wi && wb == BK'(b))
                 - (PW+2)'(rd && rq[rh] == BK'(b)) - (PW+2)'(wd && wq[wh] == BK'(b));
      conflicts <= conflicts + 32'(ri && !rd_issue_fake && pend[rb] != '0)
                             + 32'(wi && !wr_issue_fake && pend[wb] != '0);
    end
  end
endmodule
