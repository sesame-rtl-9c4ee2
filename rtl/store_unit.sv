// store_unit: the DAE store stage, one store_lane per tenant.
//
// Lanes run independently per tenant.  This module routes each lane's checked
// output-scratchpad reads to the bank that holds the address and returns that
// bank's data one cycle later, and routes the lanes' zero writes (ZEROIZE and
// teardown) to the accumulator and output banks.  The top gives these zero
// writes priority over compute-unit writes to the same bank; both come from the
// bank's single owner.
module store_unit
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
  input  rrange_t           td_acc [NT],
  input  rrange_t           td_out [NT],
  output logic [NT-1:0]     td_done,
  output logic [NT-1:0]     wq_valid,
  input  logic [NT-1:0]     wq_ready,
  output burst_t            wq_burst [NT],
  output logic [BURST_DW-1:0] wq_data [NT],
  input  logic [NT-1:0]     wr_done,
  input  own_t              acc_own [ACC_NREG],
  input  own_t              out_own [OUT_NREG],
  output logic [NTILE-1:0]  out_rd_en,
  output logic [$clog2(OUT_WORDS/NTILE)-1:0] out_rd_addr [NTILE],
  input  logic [OUT_W-1:0]  out_rd_data [NTILE],
  output logic [NTILE-1:0]  acc_zw_en,
  output logic [$clog2(ACC_WORDS/NTILE)-1:0] acc_zw_addr [NTILE],
  output logic [NTILE-1:0]  out_zw_en,
  output logic [$clog2(OUT_WORDS/NTILE)-1:0] out_zw_addr [NTILE],
  output logic [NT-1:0]     viol,
  output logic [NT-1:0]     busy
);
  localparam int OB = $clog2(OUT_WORDS / NTILE);
  localparam int AB = $clog2(ACC_WORDS / NTILE);

  logic [NT-1:0] l_rd, l_zw;
  logic [15:0]   l_rdaddr [NT], l_zwaddr [NT];
  buf_e          l_zwbuf [NT];
  logic [OUT_W-1:0] l_rdata [NT];
  logic [$clog2(NTILE)-1:0] rbank_q [NT];

  for (genvar k = 0; k < NT; k++) begin : g_lane
    store_lane #(.TENANT(TW'(k))) u_lane (
      .clk, .rst_n, .cmd_valid(cmd_valid[k]), .cmd(cmd[k]), .cmd_pop(cmd_pop[k]),
      .tok_avail(tok_avail[k]), .tok_pop(tok_pop[k]), .tok_full(tok_full[k]), .tok_push(tok_push[k]),
      .td_req(td_req[k]), .td_acc(td_acc[k]), .td_out(td_out[k]), .td_done(td_done[k]),
      .wq_valid(wq_valid[k]), .wq_ready(wq_ready[k]), .wq_burst(wq_burst[k]), .wq_data(wq_data[k]),
      .wr_done(wr_done[k]), .acc_own, .out_own,
      .rd_en(l_rd[k]), .rd_addr(l_rdaddr[k]), .rd_data(l_rdata[k]),
      .zw_en(l_zw[k]), .zw_buf(l_zwbuf[k]), .zw_addr(l_zwaddr[k]),
      .viol(viol[k]), .busy(busy[k]));
    always_ff @(posedge clk) rbank_q[k] <= l_rdaddr[k][OB +: $clog2(NTILE)];
    assign l_rdata[k] = out_rd_data[rbank_q[k]];
  end

  always_comb begin
    for (int b = 0; b < NTILE; b++) begin
      out_rd_en[b] = 1'b0; out_rd_addr[b] = '0;
      acc_zw_en[b] = 1'b0; acc_zw_addr[b] = '0;
      out_zw_en[b] = 1'b0; out_zw_addr[b] = '0;
      for (int k = 0; k < NT; k++) begin
        if (l_rd[k] && int'(l_rdaddr[k] >> OB) == b) begin
          out_rd_en[b] = 1'b1; out_rd_addr[b] = l_rdaddr[k][OB-1:0];
        end
        if (l_zw[k] && l_zwbuf[k] == BUF_ACC && int'(l_zwaddr[k] >> AB) == b) begin
          acc_zw_en[b] = 1'b1; acc_zw_addr[b] = l_zwaddr[k][AB-1:0];
        end
        if (l_zw[k] && l_zwbuf[k] == BUF_OUT && int'(l_zwaddr[k] >> OB) == b) begin
          out_zw_en[b] = 1'b1; out_zw_addr[b] = l_zwaddr[k][OB-1:0];
        end
      end
    end
  end
endmodule
