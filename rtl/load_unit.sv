// load_unit: the DAE load stage, one load_lane per tenant.
//
// Each lane runs its tenant's load instructions independently (own command
// queue, own dependency tokens, own request-unit port), so tenants never wait
// for each other here.  This module only routes the lanes' checked scratchpad
// writes to the banks of the input and weight scratchpads: bank b is written by
// the lane of the tenant that owns tile b, which is the only tenant whose
// writes can pass the base/bound check for that bank.
module load_unit
  import sesame_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NT-1:0]     cmd_valid,
  input  insn_t             cmd [NT],
  output logic [NT-1:0]     cmd_pop,
  input  logic [NT-1:0]     tok_avail,
  output logic [NT-1:0]     tok_pop,
  input  logic [NT-1:0]     tok_full,
  output logic [NT-1:0]     tok_push,
  input  logic [NT-1:0]     td_req,
  input  rrange_t           td_inp [NT],
  input  rrange_t           td_wgt [NT],
  output logic [NT-1:0]     td_done,
  output logic [NT-1:0]     rq_valid,
  input  logic [NT-1:0]     rq_ready,
  output logic [MEM_AW-1:0] rq_addr [NT],
  output logic [15:0]       rq_nbursts [NT],
  output logic [NT-1:0]     rq_shaped,
  output logic [NT-1:0]     rq_enc,
  input  logic [NT-1:0]     rdat_valid,
  input  logic [MEM_DW-1:0] rdat,
  input  own_t              inp_own [INP_NREG],
  input  own_t              wgt_own [WGT_NREG],
  output logic [NTILE-1:0]  inp_wr_en,
  output logic [$clog2(INP_WORDS/NTILE)-1:0] inp_wr_addr [NTILE],
  output logic [INP_W-1:0]  inp_wr_data [NTILE],
  output logic [NTILE-1:0]  wgt_wr_en,
  output logic [$clog2(WGT_WORDS/NTILE)-1:0] wgt_wr_addr [NTILE],
  output logic [WGT_W-1:0]  wgt_wr_data [NTILE],
  output logic [NT-1:0]     viol,
  output logic [NT-1:0]     busy
);
  localparam int IB = $clog2(INP_WORDS / NTILE);
  localparam int WB = $clog2(WGT_WORDS / NTILE);

  logic [NT-1:0] l_we;
  buf_e          l_buf  [NT];
  logic [15:0]   l_addr [NT];
  logic [WGT_W-1:0] l_data [NT];

  for (genvar k = 0; k < NT; k++) begin : g_lane
    load_lane #(.TENANT(TW'(k))) u_lane (
      .clk, .rst_n, .cmd_valid(cmd_valid[k]), .cmd(cmd[k]), .cmd_pop(cmd_pop[k]),
      .tok_avail(tok_avail[k]), .tok_pop(tok_pop[k]), .tok_full(tok_full[k]), .tok_push(tok_push[k]),
      .td_req(td_req[k]), .td_inp(td_inp[k]), .td_wgt(td_wgt[k]), .td_done(td_done[k]),
      .rq_valid(rq_valid[k]), .rq_ready(rq_ready[k]), .rq_addr(rq_addr[k]), .rq_nbursts(rq_nbursts[k]),
      .rq_shaped(rq_shaped[k]), .rq_enc(rq_enc[k]), .rdat_valid(rdat_valid[k]), .rdat,
      .inp_own, .wgt_own, .wr_en(l_we[k]), .wr_buf(l_buf[k]), .wr_addr(l_addr[k]), .wr_data(l_data[k]),
      .viol(viol[k]), .busy(busy[k]));
  end

  always_comb begin
    for (int b = 0; b < NTILE; b++) begin
      inp_wr_en[b] = 1'b0; inp_wr_addr[b] = '0; inp_wr_data[b] = '0;
      wgt_wr_en[b] = 1'b0; wgt_wr_addr[b] = '0; wgt_wr_data[b] = '0;
      for (int k = 0; k < NT; k++) begin
        if (l_we[k] && l_buf[k] == BUF_INP && int'(l_addr[k] >> IB) == b) begin
          inp_wr_en[b] = 1'b1; inp_wr_addr[b] = l_addr[k][IB-1:0]; inp_wr_data[b] = l_data[k][INP_W-1:0];
        end
        if (l_we[k] && l_buf[k] == BUF_WGT && int'(l_addr[k] >> WB) == b) begin
          wgt_wr_en[b] = 1'b1; wgt_wr_addr[b] = l_addr[k][WB-1:0]; wgt_wr_data[b] = l_data[k];
        end
      end
    end
  end
endmodule
