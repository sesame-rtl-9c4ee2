// dma_engine: puts granted bursts on the memory read and write channels.
//
// Read channel: a burst from the read shaper is accepted (rd_ready) when the
// engine is idle and the bank list has room; it is then presented on the AR
// channel (ar_* with id = {fake, tenant}) until the memory takes it.  Read data
// (r_*) flows back outside this module; its last beat retires the burst from
// the bank list.  Write channel: the accepted burst is presented on AW, then its
// BURST_BEATS data beats go out on W; the write response (b_valid) retires it.
// Both channels run independently and carry only fixed-size INCR bursts of
// BURST_BEATS beats of MEM_DW bits.
//
// Cipher latency: memory encryption itself is not built; as in the paper's
// prototype, its cost is emulated by holding an encrypted (_E) burst for the
// cipher latency of every 128-bit block it carries before it is issued:
// QARMA_NS (10 ns) or AES_NS (20 ns) per block at a CLK_NS (10 ns) clock, i.e.
// 8 or 16 cycles for a 128-byte burst, chosen by the tenant's cipher register.
//
// The bank_conflict_checker inside tracks pending banks for the fake
// transaction generators and counts bank conflicts.
module dma_engine
  import sesame_pkg::*;
#(
  parameter int unsigned CLK_NS   = 10,
  parameter int unsigned QARMA_NS = 10,
  parameter int unsigned AES_NS   = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the read shaper
  input  logic                  rd_valid,
  output logic                  rd_ready,
  input  logic [MEM_AW-1:0]     rd_addr,
  input  logic [TW-1:0]         rd_tenant,
  input  logic                  rd_fake,
  input  logic                  rd_enc,
  input  logic                  rd_aes,
  // from the write shaper
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic [MEM_AW-1:0]     wr_addr,
  input  logic [TW-1:0]         wr_tenant,
  input  logic                  wr_fake,
  input  logic                  wr_enc,
  input  logic                  wr_aes,
  input  logic [BURST_DW-1:0]   wr_data,
  // memory
  output logic                  ar_valid,
  input  logic                  ar_ready,
  output logic [MEM_AW-1:0]     ar_addr,
  output logic [TW:0]           ar_id,
  input  logic                  r_valid,
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
  // status
  output logic [DRAM_BANKS-1:0] free_banks,
  output logic [31:0]           conflicts,
  output logic [31:0]           enc_stall_cycles
);
  localparam int BLOCKS  = BURST_BYTES / 16;                          // 128-bit blocks per burst
  localparam int Q_CYC   = BLOCKS * ((QARMA_NS + CLK_NS - 1) / CLK_NS);
  localparam int A_CYC   = BLOCKS * ((AES_NS + CLK_NS - 1) / CLK_NS);
  localparam int BEATW   = $clog2(BURST_BEATS);

  typedef enum logic [1:0] {S_IDLE, S_DLY, S_ADDR, S_DATA} st_e;
  st_e rs, ws;
  logic [15:0] rdly, wdly;
  logic [BURST_DW-1:0] wbuf;
  logic [BEATW-1:0] wbeat;
  logic rd_full, wr_full;

  assign rd_ready = (rs == S_IDLE) && !rd_full;
  assign wr_ready = (ws == S_IDLE) && !wr_full;
  assign ar_valid = (rs == S_ADDR);
  assign aw_valid = (ws == S_ADDR);
  assign w_valid  = (ws == S_DATA);
  assign w_data   = wbuf[MEM_DW*wbeat +: MEM_DW];
  assign w_last   = (wbeat == BEATW'(BURST_BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= S_IDLE; ws <= S_IDLE; rdly <= '0; wdly <= '0; wbeat <= '0;
      ar_addr <= '0; ar_id <= '0; aw_addr <= '0; aw_id <= '0; wbuf <= '0;
      enc_stall_cycles <= '0;
    end else begin
      enc_stall_cycles <= enc_stall_cycles + 32'(rs == S_DLY) + 32'(ws == S_DLY);
      // ---------------- read
      unique case (rs)
        S_IDLE: if (rd_valid && rd_ready) begin
          ar_addr <= rd_addr;
          ar_id   <= {rd_fake, rd_tenant};
          rdly    <= 16'(rd_aes ? A_CYC : Q_CYC);
          rs      <= rd_enc ? S_DLY : S_ADDR;
        end
        S_DLY: begin
          rdly <= rdly - 16'd1;
          if (rdly <= 16'd1) rs <= S_ADDR;
        end
        default: if (ar_ready) rs <= S_IDLE;
      endcase
      // ---------------- write
      unique case (ws)
        S_IDLE: if (wr_valid && wr_ready) begin
          aw_addr <= wr_addr;
          aw_id   <= {wr_fake, wr_tenant};
          wbuf    <= wr_data;
          wdly    <= 16'(wr_aes ? A_CYC : Q_CYC);
          ws      <= wr_enc ? S_DLY : S_ADDR;
        end
        S_DLY: begin
          wdly <= wdly - 16'd1;
          if (wdly <= 16'd1) ws <= S_ADDR;
        end
        S_ADDR: if (aw_ready) begin ws <= S_DATA; wbeat <= '0; end
        default: if (w_ready) begin
          wbeat <= wbeat + 1'b1;
          if (w_last) ws <= S_IDLE;
        end
      endcase
    end
  end

  bank_conflict_checker u_bcc (
    .clk, .rst_n,
    .rd_issue(ar_valid && ar_ready), .rd_issue_fake(ar_id[TW]), .rd_addr(ar_addr),
    .rd_done(r_valid && r_last),
    .wr_issue(aw_valid && aw_ready), .wr_issue_fake(aw_id[TW]), .wr_addr(aw_addr),
    .wr_done(b_valid),
    .rd_full, .wr_full, .free_banks, .conflicts);
endmodule
