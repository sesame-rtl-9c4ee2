// load_lane: one tenant's load engine (the load unit holds one per tenant).
//
// Executes the tenant's LOAD / LOAD_E / LOAD_S / LOAD_SE instructions and
// ZEROIZE of the input and weight scratchpads, in order:
//   1. take the instruction from the tenant's load command queue;
//   2. if pop_next, wait for and take a token from the compute->load
//      dependency queue (the compute unit has finished with the buffer);
//   3. LOAD: ask the request unit for ceil(count*beats_per_word/16) bursts from
//      dram_addr (shaped / encrypted as the opcode says), then assemble the
//      returning 64-bit beats into scratchpad words (input: 1 beat, weight: 8
//      beats per word) and write them from sram_addr upward;
//      ZEROIZE: sweep zeros over [sram_addr, sram_addr+count);
//   4. if push_next, push a token into the load->compute queue.
// Every write is checked by a base/bound checker against the scratchmap; a
// write outside the tenant's regions is dropped and pulses `viol`.
// At teardown (td_req, only while idle) it zeroizes the tenant's whole input
// and weight regions and pulses td_done.
// Writes leave on wr_* (global word address); the load unit routes them to banks.
module load_lane
  import sesame_pkg::*;
#(
  parameter logic [TW-1:0] TENANT = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  insn_t             cmd,
  output logic              cmd_pop,
  input  logic              tok_avail,     // compute->load token present
  output logic              tok_pop,
  input  logic              tok_full,      // load->compute queue full
  output logic              tok_push,
  input  logic              td_req,
  input  rrange_t           td_inp,
  input  rrange_t           td_wgt,
  output logic              td_done,
  output logic              rq_valid,
  input  logic              rq_ready,
  output logic [MEM_AW-1:0] rq_addr,
  output logic [15:0]       rq_nbursts,
  output logic              rq_shaped,
  output logic              rq_enc,
  input  logic              rdat_valid,
  input  logic [MEM_DW-1:0] rdat,
  input  own_t              inp_own [INP_NREG],
  input  own_t              wgt_own [WGT_NREG],
  output logic              wr_en,
  output buf_e              wr_buf,
  output logic [15:0]       wr_addr,
  output logic [WGT_W-1:0]  wr_data,
  output logic              viol,
  output logic              busy
);
  localparam int INP_RW = INP_WORDS / INP_NREG;
  localparam int WGT_RW = WGT_WORDS / WGT_NREG;

  typedef enum logic [2:0] {L_IDLE, L_DEP, L_REQ, L_RECV, L_ZERO, L_PUSH, L_TD_I, L_TD_W} st_e;
  st_e st;
  insn_t ins;
  logic [19:0] beats_left;
  logic [15:0] widx;
  logic [2:0]  beat;
  logic [WGT_W-1:0] wbuf;
  logic        z_start, z_busy, z_done, z_we;
  logic [15:0] z_addr, z_waddr;
  logic [16:0] z_cnt;
  buf_e        z_buf;
  logic        w_req, ok_i, ok_w;
  buf_e        w_buf;
  logic [15:0] w_addr;
  logic [WGT_W-1:0] w_data;

  wire logic [3:0] bpw = (ins.buf_id == BUF_WGT) ? 4'd8 : 4'd1;   // beats per word

  zeroizer u_zero (.clk, .rst_n, .start(z_start), .addr(z_addr), .count(z_cnt),
                   .busy(z_busy), .done(z_done), .wr_en(z_we), .wr_addr(z_waddr));

  base_bound_checker #(.WORDS(INP_WORDS), .NREG(INP_NREG)) u_chk_i (.tenant(TENANT), .addr(w_addr), .own(inp_own), .ok(ok_i));
  base_bound_checker #(.WORDS(WGT_WORDS), .NREG(WGT_NREG)) u_chk_w (.tenant(TENANT), .addr(w_addr), .own(wgt_own), .ok(ok_w));

  // raw write request, before the check
  logic recv_we;
  assign recv_we = (st == L_RECV) && rdat_valid && (beat == 3'(bpw - 4'd1)) && (widx < ins.count);
  always_comb begin
    w_req  = recv_we || z_we;
    w_buf  = z_we ? z_buf : ins.buf_id;
    w_addr = z_we ? z_waddr : ins.sram_addr + widx;
    w_data = '0;
    if (!z_we) begin
      w_data = wbuf;
      if (ins.buf_id == BUF_WGT) w_data[MEM_DW*7 +: MEM_DW] = rdat;
      else                       w_data = WGT_W'(rdat);
    end
  end
  wire logic w_ok = (w_buf == BUF_WGT) ? ok_w : ok_i;
  assign wr_en   = w_req && w_ok;
  assign wr_buf  = w_buf;
  assign wr_addr = w_addr;
  assign wr_data = w_data;
  assign viol    = w_req && !w_ok;
  assign busy    = (st != L_IDLE);

  assign cmd_pop  = (st == L_IDLE) && !td_req && cmd_valid;
  assign tok_pop  = (st == L_DEP) && ins.pop_next && tok_avail;
  assign tok_push = (st == L_PUSH) && ins.push_next && !tok_full;
  assign rq_valid = (st == L_REQ);
  assign rq_addr  = ins.dram_addr;
  assign rq_nbursts = 16'(((32'(ins.count) * 32'(bpw)) + BURST_BEATS - 1) / BURST_BEATS);
  assign rq_shaped  = op_shaped(ins.op);
  assign rq_enc     = op_enc(ins.op);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; ins <= '0; beats_left <= '0; widx <= '0; beat <= '0; wbuf <= '0;
      z_start <= 1'b0; z_addr <= '0; z_cnt <= '0; z_buf <= BUF_INP; td_done <= 1'b0;
    end else begin
      z_start <= 1'b0;
      td_done <= 1'b0;
      unique case (st)
        L_IDLE: if (td_req) begin
                  z_start <= 1'b1; z_buf <= BUF_INP;
                  z_addr <= 16'(int'(td_inp.base) * INP_RW); z_cnt <= 17'(int'(td_inp.num) * INP_RW);
                  st <= L_TD_I;
                end else if (cmd_valid) begin
                  ins <= cmd; st <= L_DEP;
                end
        L_DEP:  if (!ins.pop_next || tok_avail) begin
                  if (ins.op == OP_ZEROIZE) begin
                    z_start <= 1'b1; z_buf <= ins.buf_id; z_addr <= ins.sram_addr; z_cnt <= 17'(ins.count);
                    st <= L_ZERO;
                  end else st <= L_REQ;
                end
        L_REQ:  if (rq_ready) begin
                  beats_left <= 20'(rq_nbursts) * 20'(BURST_BEATS);
                  widx <= '0; beat <= '0;
                  st <= (rq_nbursts == 0) ? L_PUSH : L_RECV;
                end
        L_RECV: if (rdat_valid) begin
                  wbuf[MEM_DW*beat +: MEM_DW] <= rdat;
                  if (beat == 3'(bpw - 4'd1)) begin beat <= '0; widx <= widx + 16'd1; end
                  else beat <= beat + 3'd1;
                  beats_left <= beats_left - 20'd1;
                  if (beats_left == 20'd1) st <= L_PUSH;
                end
        L_ZERO: if (z_done) st <= L_PUSH;
        L_PUSH: if (!ins.push_next || !tok_full) st <= L_IDLE;
        L_TD_I: if (z_done) begin
                  z_start <= 1'b1; z_buf <= BUF_WGT;
                  z_addr <= 16'(int'(td_wgt.base) * WGT_RW); z_cnt <= 17'(int'(td_wgt.num) * WGT_RW);
                  st <= L_TD_W;
                end
        default: if (z_done) begin td_done <= 1'b1; st <= L_IDLE; end
      endcase
    end
  end
endmodule
