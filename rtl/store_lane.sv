// store_lane: one tenant's store engine (the store unit holds one per tenant).
//
// Executes STORE / STORE_E / STORE_S / STORE_SE from the output scratchpad and
// ZEROIZE of the accumulator and output scratchpads, in order:
//   1. take the instruction from the tenant's store command queue;
//   2. if pop_prev, wait for and take a compute->store token;
//   3. STORE: for each 16-beat burst, read 16 output words (one 64-bit word per
//      beat, one read every two cycles, zero past `count` as padding), push the
//      burst with its data into the tenant's split store queue, and when all
//      bursts are queued wait for their write responses;
//      ZEROIZE: sweep zeros over [sram_addr, sram_addr+count) of ACC or OUT;
//   4. if push_prev, push a store->compute token.
// Reads and zero writes are checked against the scratchmap: a blocked read
// returns zero, a blocked write is dropped, and either pulses `viol`.
// At teardown (td_req, while idle) it zeroizes the tenant's whole accumulator
// and output regions and pulses td_done.
module store_lane
  import sesame_pkg::*;
#(
  parameter logic [TW-1:0] TENANT = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  insn_t             cmd,
  output logic              cmd_pop,
  input  logic              tok_avail,     // compute->store token present
  output logic              tok_pop,
  input  logic              tok_full,      // store->compute queue full
  output logic              tok_push,
  input  logic              td_req,
  input  rrange_t           td_acc,
  input  rrange_t           td_out,
  output logic              td_done,
  output logic              wq_valid,
  input  logic              wq_ready,
  output burst_t            wq_burst,
  output logic [BURST_DW-1:0] wq_data,
  input  logic              wr_done,
  input  own_t              acc_own [ACC_NREG],
  input  own_t              out_own [OUT_NREG],
  output logic              rd_en,
  output logic [15:0]       rd_addr,
  input  logic [OUT_W-1:0]  rd_data,
  output logic              zw_en,
  output buf_e              zw_buf,
  output logic [15:0]       zw_addr,
  output logic              viol,
  output logic              busy
);
  localparam int ACC_RW = ACC_WORDS / ACC_NREG;
  localparam int OUT_RW = OUT_WORDS / OUT_NREG;
  localparam int BB     = $clog2(BURST_BEATS);

  typedef enum logic [3:0] {S_IDLE, S_DEP, S_RD, S_CAP, S_PUSHB, S_WAITB, S_ZERO, S_PUSH, S_TD_A, S_TD_O} st_e;
  st_e st;
  insn_t ins;
  logic [15:0] widx, nbursts, sent, acked;
  logic [BB-1:0] beat;
  logic [MEM_AW-1:0] daddr;
  logic rd_ok_q, rd_live_q;
  logic z_start, z_busy, z_done, z_we;
  logic [15:0] z_addr, z_waddr;
  logic [16:0] z_cnt;
  buf_e z_buf;
  logic ok_rd, ok_za, ok_zo;

  zeroizer u_zero (.clk, .rst_n, .start(z_start), .addr(z_addr), .count(z_cnt),
                   .busy(z_busy), .done(z_done), .wr_en(z_we), .wr_addr(z_waddr));

  base_bound_checker #(.WORDS(OUT_WORDS), .NREG(OUT_NREG)) u_chk_r  (.tenant(TENANT), .addr(rd_addr), .own(out_own), .ok(ok_rd));
  base_bound_checker #(.WORDS(ACC_WORDS), .NREG(ACC_NREG)) u_chk_za (.tenant(TENANT), .addr(z_waddr), .own(acc_own), .ok(ok_za));
  base_bound_checker #(.WORDS(OUT_WORDS), .NREG(OUT_NREG)) u_chk_zo (.tenant(TENANT), .addr(z_waddr), .own(out_own), .ok(ok_zo));

  wire logic rd_live = (st == S_RD) && (widx < ins.count);
  wire logic z_ok    = (z_buf == BUF_ACC) ? ok_za : ok_zo;
  assign rd_addr  = ins.sram_addr + widx;
  assign rd_en    = rd_live && ok_rd;
  assign zw_en    = z_we && z_ok;
  assign zw_buf   = z_buf;
  assign zw_addr  = z_waddr;
  assign viol     = (rd_live && !ok_rd) || (z_we && !z_ok);
  assign busy     = (st != S_IDLE);
  assign cmd_pop  = (st == S_IDLE) && !td_req && cmd_valid;
  assign tok_pop  = (st == S_DEP) && ins.pop_prev && tok_avail;
  assign tok_push = (st == S_PUSH) && ins.push_prev && !tok_full;
  assign wq_valid = (st == S_PUSHB);
  assign wq_burst = '{addr: daddr, shaped: op_shaped(ins.op), enc: op_enc(ins.op)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; widx <= '0; nbursts <= '0; sent <= '0; acked <= '0; beat <= '0;
      daddr <= '0; wq_data <= '0; rd_ok_q <= 1'b0; rd_live_q <= 1'b0;
      z_start <= 1'b0; z_addr <= '0; z_cnt <= '0; z_buf <= BUF_ACC; td_done <= 1'b0;
    end else begin
      z_start <= 1'b0;
      td_done <= 1'b0;
      if (wr_done) acked <= acked + 16'd1;
      unique case (st)
        S_IDLE: if (td_req) begin
                  z_start <= 1'b1; z_buf <= BUF_ACC;
                  z_addr <= 16'(int'(td_acc.base) * ACC_RW); z_cnt <= 17'(int'(td_acc.num) * ACC_RW);
                  st <= S_TD_A;
                end else if (cmd_valid) begin
                  ins <= cmd; st <= S_DEP;
                end
        S_DEP:  if (!ins.pop_prev || tok_avail) begin
                  if (ins.op == OP_ZEROIZE) begin
                    z_start <= 1'b1; z_buf <= ins.buf_id; z_addr <= ins.sram_addr; z_cnt <= 17'(ins.count);
                    st <= S_ZERO;
                  end else begin
                    widx <= '0; beat <= '0; sent <= '0; acked <= '0; daddr <= ins.dram_addr;
                    nbursts <= 16'((32'(ins.count) + BURST_BEATS - 1) / BURST_BEATS);
                    st <= (ins.count == 0) ? S_PUSH : S_RD;
                  end
                end
        S_RD:   begin rd_ok_q <= ok_rd; rd_live_q <= rd_live; st <= S_CAP; end
        S_CAP:  begin
                  wq_data[MEM_DW*beat +: MEM_DW] <= (rd_live_q && rd_ok_q) ? MEM_DW'(rd_data) : '0;
                  widx <= widx + 16'd1;
                  beat <= beat + 1'b1;
                  st <= (beat == BB'(BURST_BEATS - 1)) ? S_PUSHB : S_RD;
                end
        S_PUSHB: if (wq_ready) begin
                  sent  <= sent + 16'd1;
                  daddr <= daddr + MEM_AW'(BURST_BYTES);
                  st    <= (sent + 16'd1 == nbursts) ? S_WAITB : S_RD;
                end
        S_WAITB: if (acked == nbursts) st <= S_PUSH;
        S_ZERO: if (z_done) st <= S_PUSH;
        S_PUSH: if (!ins.push_prev || !tok_full) st <= S_IDLE;
        S_TD_A: if (z_done) begin
                  z_start <= 1'b1; z_buf <= BUF_OUT;
                  z_addr <= 16'(int'(td_out.base) * OUT_RW); z_cnt <= 17'(int'(td_out.num) * OUT_RW);
                  st <= S_TD_O;
                end
        default: if (z_done) begin td_done <= 1'b1; st <= S_IDLE; end
      endcase
    end
  end
endmodule
