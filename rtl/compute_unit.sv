// compute_unit: the DAE execute stage: per-tenant decoders, the execution-mode
// control, and NTILE spatially partitioned 8x8 GEMM + 8-lane ALU tiles.
//
// Execution-mode control: tile t is driven by the compute_lane of the tenant
// that owns it in the tile map (tile_own, kept by the scheduler).  In spatial
// mode each tenant owns one tile, so four tenants compute side by side with no
// shared execution resource; in temporal mode one tenant owns all four tiles
// and each of its iterations runs on all of them at once (256 MACs).
// Tile t reads and writes only bank t of the input, weight, accumulator and
// output scratchpads (its private operand buffers).  Per iteration:
//   ISSUE: read inp[s0], wgt[s1], acc[dst], acc[s0] from bank t;
//   WB   : GEMM: acc[dst] = (clr ? 0 : acc[dst]) + inp x wgt
//          ALU : acc[dst] = op(acc[dst], use_imm ? imm : acc[s0])
//          and out[dst] = low byte of every accumulator lane.
// All addresses are checked against the scratchmap as global addresses
// (bank t, local offset); an operand that fails reads as zero and a write that
// fails is dropped, each pulsing the tenant's viol.  GEMM_C / ALU_C run exactly
// like GEMM / ALU: the tiles have no data-dependent timing to switch off.
module compute_unit
  import sesame_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NT-1:0]     cmd_valid,
  input  insn_t             cmd [NT],
  output logic [NT-1:0]     cmd_pop,
  input  logic [NT-1:0]     l2c_avail,
  output logic [NT-1:0]     l2c_pop,
  input  logic [NT-1:0]     s2c_avail,
  output logic [NT-1:0]     s2c_pop,
  input  logic [NT-1:0]     c2l_full,
  output logic [NT-1:0]     c2l_push,
  input  logic [NT-1:0]     c2s_full,
  output logic [NT-1:0]     c2s_push,
  output logic [NT-1:0]     finish,
  input  own_t              tile_own [NTILE],
  input  own_t              inp_own [INP_NREG],
  input  own_t              wgt_own [WGT_NREG],
  input  own_t              acc_own [ACC_NREG],
  input  own_t              out_own [OUT_NREG],
  output logic [NTILE-1:0]  inp_rd_en,
  output logic [$clog2(INP_WORDS/NTILE)-1:0] inp_rd_addr [NTILE],
  input  logic [INP_W-1:0]  inp_rd_data [NTILE],
  output logic [NTILE-1:0]  wgt_rd_en,
  output logic [$clog2(WGT_WORDS/NTILE)-1:0] wgt_rd_addr [NTILE],
  input  logic [WGT_W-1:0]  wgt_rd_data [NTILE],
  output logic [1:0]        acc_rd_en [NTILE],
  output logic [$clog2(ACC_WORDS/NTILE)-1:0] acc_rd_addr [NTILE][2],
  input  logic [ACC_W-1:0]  acc_rd_data [NTILE][2],
  output logic [NTILE-1:0]  acc_wr_en,
  output logic [$clog2(ACC_WORDS/NTILE)-1:0] acc_wr_addr [NTILE],
  output logic [ACC_W-1:0]  acc_wr_data [NTILE],
  output logic [NTILE-1:0]  out_wr_en,
  output logic [$clog2(OUT_WORDS/NTILE)-1:0] out_wr_addr [NTILE],
  output logic [OUT_W-1:0]  out_wr_data [NTILE],
  output logic [NT-1:0]     viol,
  output logic [NT-1:0]     busy,
  output logic [31:0]       tile_iters [NTILE]   // iterations each tile has executed
);
  localparam int IBW = INP_WORDS / NTILE, WBW = WGT_WORDS / NTILE;
  localparam int ABW = ACC_WORDS / NTILE, OBW = OUT_WORDS / NTILE;

  logic [NT-1:0] u_issue, u_wb, u_gemm, u_clr, u_imm;
  logic [15:0]   u_dst [NT], u_s0 [NT], u_s1 [NT], u_immv [NT];
  alu_op_e       u_op [NT];

  for (genvar k = 0; k < NT; k++) begin : g_lane
    compute_lane u_lane (
      .clk, .rst_n, .cmd_valid(cmd_valid[k]), .cmd(cmd[k]), .cmd_pop(cmd_pop[k]),
      .l2c_avail(l2c_avail[k]), .l2c_pop(l2c_pop[k]), .s2c_avail(s2c_avail[k]), .s2c_pop(s2c_pop[k]),
      .c2l_full(c2l_full[k]), .c2l_push(c2l_push[k]), .c2s_full(c2s_full[k]), .c2s_push(c2s_push[k]),
      .uop_issue(u_issue[k]), .uop_wb(u_wb[k]), .uop_gemm(u_gemm[k]), .uop_dst(u_dst[k]),
      .uop_s0(u_s0[k]), .uop_s1(u_s1[k]), .uop_clr(u_clr[k]), .uop_alu_op(u_op[k]),
      .uop_use_imm(u_imm[k]), .uop_imm(u_immv[k]), .finish(finish[k]), .busy(busy[k]));
  end

  logic [NT-1:0] tviol [NTILE];

  for (genvar t = 0; t < NTILE; t++) begin : g_tile
    logic [TW-1:0] k;
    logic          on_i, on_w;
    logic          ok_i, ok_w, ok_ad, ok_as, ok_o, in_rng;
    logic [ACC_W-1:0] g_res, a_res, res;
    assign k    = tile_own[t].id;
    assign on_i = tile_own[t].v && u_issue[k];
    assign on_w = tile_own[t].v && u_wb[k];
    assign in_rng = (32'(u_dst[k]) < ABW) && (32'(u_s0[k]) < IBW) && (32'(u_s1[k]) < WBW);

    base_bound_checker #(.WORDS(INP_WORDS), .NREG(INP_NREG)) u_ci (.tenant(k), .addr(16'(t*IBW) + u_s0[k]),  .own(inp_own), .ok(ok_i));
    base_bound_checker #(.WORDS(WGT_WORDS), .NREG(WGT_NREG)) u_cw (.tenant(k), .addr(16'(t*WBW) + u_s1[k]),  .own(wgt_own), .ok(ok_w));
    base_bound_checker #(.WORDS(ACC_WORDS), .NREG(ACC_NREG)) u_cd (.tenant(k), .addr(16'(t*ABW) + u_dst[k]), .own(acc_own), .ok(ok_ad));
    base_bound_checker #(.WORDS(ACC_WORDS), .NREG(ACC_NREG)) u_cs (.tenant(k), .addr(16'(t*ABW) + u_s0[k]),  .own(acc_own), .ok(ok_as));
    base_bound_checker #(.WORDS(OUT_WORDS), .NREG(OUT_NREG)) u_co (.tenant(k), .addr(16'(t*OBW) + u_dst[k]), .own(out_own), .ok(ok_o));

    assign inp_rd_en[t]      = on_i;
    assign inp_rd_addr[t]    = u_s0[k][$clog2(IBW)-1:0];
    assign wgt_rd_en[t]      = on_i;
    assign wgt_rd_addr[t]    = u_s1[k][$clog2(WBW)-1:0];
    assign acc_rd_en[t]      = {on_i, on_i};
    assign acc_rd_addr[t][0] = u_dst[k][$clog2(ABW)-1:0];
    assign acc_rd_addr[t][1] = u_s0[k][$clog2(ABW)-1:0];

    gemm_tile u_gemm_t (
      .inp(ok_i ? inp_rd_data[t] : '0), .wgt(ok_w ? wgt_rd_data[t] : '0),
      .acc_in(ok_ad ? acc_rd_data[t][0] : '0), .clr(u_clr[k]), .acc_out(g_res));
    alu_tile u_alu_t (
      .op(u_op[k]), .a(ok_ad ? acc_rd_data[t][0] : '0), .b(ok_as ? acc_rd_data[t][1] : '0),
      .use_imm(u_imm[k]), .imm(u_immv[k]), .res(a_res));
    assign res = u_gemm[k] ? g_res : a_res;

    assign acc_wr_en[t]   = on_w && in_rng && ok_ad;
    assign acc_wr_addr[t] = u_dst[k][$clog2(ABW)-1:0];
    assign acc_wr_data[t] = res;
    assign out_wr_en[t]   = on_w && in_rng && ok_o;
    assign out_wr_addr[t] = u_dst[k][$clog2(OBW)-1:0];
    always_comb
      for (int j = 0; j < VL; j++) out_wr_data[t][8*j +: 8] = res[32*j +: 8];

    always_comb begin
      tviol[t] = '0;
      if (on_w && (!in_rng || !ok_ad || !ok_o || (u_gemm[k] && (!ok_i || !ok_w)) ||
                   (!u_gemm[k] && !u_imm[k] && !ok_as)))
        tviol[t][k] = 1'b1;
    end

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) tile_iters[t] <= '0;
      else if (on_w) tile_iters[t] <= tile_iters[t] + 32'd1;
  end

  always_comb begin
    viol = '0;
    for (int t = 0; t < NTILE; t++) viol |= tviol[t];
  end
endmodule
