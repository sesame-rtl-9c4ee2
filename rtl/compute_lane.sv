// compute_lane: one tenant's instruction decoder in the compute unit.
//
// Takes GEMM / GEMM_C / ALU / ALU_C / FINISH instructions from the tenant's
// compute command queue.  It first waits for the dependency tokens the
// instruction asks for (pop_prev: load->compute, pop_next: store->compute) and
// takes them, then runs `count` iterations.  Iteration i addresses
//   dst = sram_addr + i*dst_inc, s0 = src0 + i*src0_inc, s1 = src1 + i*src1_inc
// (bank-local word addresses) and takes two cycles: ISSUE (the tiles read
// their scratchpad banks) and WB (they compute and write back).  The uop_*
// outputs hold the iteration's fields through both cycles.  The iteration
// runs on every tile the tenant owns, so the same instruction does 1x work in
// spatial mode (one tile) and up to 4x in temporal mode (all tiles); the cycle
// count, 2 per iteration, never depends on data.  Finally it pushes the tokens
// the instruction asks for (push_prev: compute->load, push_next:
// compute->store).  FINISH pulses `finish` once its tokens have arrived.
module compute_lane
  import sesame_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  insn_t       cmd,
  output logic        cmd_pop,
  input  logic        l2c_avail,
  output logic        l2c_pop,
  input  logic        s2c_avail,
  output logic        s2c_pop,
  input  logic        c2l_full,
  output logic        c2l_push,
  input  logic        c2s_full,
  output logic        c2s_push,
  output logic        uop_issue,
  output logic        uop_wb,
  output logic        uop_gemm,
  output logic [15:0] uop_dst,
  output logic [15:0] uop_s0,
  output logic [15:0] uop_s1,
  output logic        uop_clr,
  output alu_op_e     uop_alu_op,
  output logic        uop_use_imm,
  output logic [15:0] uop_imm,
  output logic        finish,
  output logic        busy
);
  typedef enum logic [2:0] {C_IDLE, C_DEP, C_ISSUE, C_WB, C_PUSH} st_e;
  st_e st;
  insn_t ins;
  logic [15:0] it;

  wire logic deps_ok = (!ins.pop_prev || l2c_avail) && (!ins.pop_next || s2c_avail);
  wire logic push_ok = (!ins.push_prev || !c2l_full) && (!ins.push_next || !c2s_full);

  assign cmd_pop  = (st == C_IDLE) && cmd_valid;
  assign l2c_pop  = (st == C_DEP) && deps_ok && ins.pop_prev;
  assign s2c_pop  = (st == C_DEP) && deps_ok && ins.pop_next;
  assign c2l_push = (st == C_PUSH) && push_ok && ins.push_prev;
  assign c2s_push = (st == C_PUSH) && push_ok && ins.push_next;
  assign finish   = (st == C_DEP) && deps_ok && (ins.op == OP_FINISH);
  assign busy     = (st != C_IDLE);

  assign uop_issue   = (st == C_ISSUE);
  assign uop_wb      = (st == C_WB);
  assign uop_gemm    = (ins.op == OP_GEMM) || (ins.op == OP_GEMM_C);
  assign uop_dst     = ins.sram_addr + (ins.dst_inc  ? it : 16'd0);
  assign uop_s0      = ins.src0      + (ins.src0_inc ? it : 16'd0);
  assign uop_s1      = ins.src1      + (ins.src1_inc ? it : 16'd0);
  assign uop_clr     = ins.reset_acc;
  assign uop_alu_op  = ins.alu_op;
  assign uop_use_imm = ins.use_imm;
  assign uop_imm     = ins.imm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ins <= '0; it <= '0;
    end else begin
      unique case (st)
        C_IDLE:  if (cmd_valid) begin ins <= cmd; st <= C_DEP; end
        C_DEP:   if (deps_ok) begin
                   it <= '0;
                   st <= (ins.op == OP_FINISH || ins.count == 0) ? C_PUSH : C_ISSUE;
                 end
        C_ISSUE: st <= C_WB;
        C_WB:    begin
                   it <= it + 16'd1;
                   st <= (it + 16'd1 == ins.count) ? C_PUSH : C_ISSUE;
                 end
        default: if (push_ok) st <= C_IDLE;
      endcase
    end
  end
endmodule
