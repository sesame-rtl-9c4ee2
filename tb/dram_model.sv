// dram_model: behavioural model of the DRAM behind the accelerator's memory
// port, for simulation only.
//
// AR requests are queued and served in order: after LAT cycles each burst returns
// BURST_BEATS beats, one per cycle, with its id.  A write takes the AW address,
// then BURST_BEATS W beats, then answers with one B response carrying the id.
// Storage is a sparse array of 64-bit words (unwritten words read as zero).
// Tasks poke/peek give the testbench direct access.  It also counts bursts
// that land in the same DRAM bank as the previous one (row-buffer conflicts
// are not timed, only counted).
module dram_model
  import sesame_pkg::*;
#(
  parameter int LAT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ar_valid,
  output logic              ar_ready,
  input  logic [MEM_AW-1:0] ar_addr,
  input  logic [TW:0]       ar_id,
  output logic              r_valid,
  output logic [MEM_DW-1:0] r_data,
  output logic [TW:0]       r_id,
  output logic              r_last,
  input  logic              aw_valid,
  output logic              aw_ready,
  input  logic [MEM_AW-1:0] aw_addr,
  input  logic [TW:0]       aw_id,
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [MEM_DW-1:0] w_data,
  input  logic              w_last,
  output logic              b_valid,
  output logic [TW:0]       b_id
);
  logic [MEM_DW-1:0] mem [logic [MEM_AW-4:0]];
  int reads, writes;

  function automatic logic [MEM_DW-1:0] peek(logic [MEM_AW-1:0] a);
    return mem.exists(a[MEM_AW-1:3]) ? mem[a[MEM_AW-1:3]] : '0;
  endfunction
  function automatic void poke(logic [MEM_AW-1:0] a, logic [MEM_DW-1:0] d);
    mem[a[MEM_AW-1:3]] = d;
  endfunction

  // ---------------- read
  typedef struct { logic [MEM_AW-1:0] a; logic [TW:0] id; int ready_at; } rreq_t;
  rreq_t rq [$];
  int cyc, beat;
  assign ar_ready = (rq.size() < 8);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; beat <= 0; r_valid <= 1'b0; r_last <= 1'b0; r_data <= '0; r_id <= '0; reads <= 0;
    end else begin
      cyc <= cyc + 1;
      if (ar_valid && ar_ready) begin
        rq.push_back('{a: ar_addr, id: ar_id, ready_at: cyc + LAT});
        reads <= reads + 1;
      end
      r_valid <= 1'b0; r_last <= 1'b0;
      if (rq.size() > 0 && rq[0].ready_at <= cyc) begin
        r_valid <= 1'b1;
        r_id    <= rq[0].id;
        r_data  <= peek(rq[0].a + MEM_AW'(beat * 8));
        r_last  <= (beat == BURST_BEATS - 1);
        if (beat == BURST_BEATS - 1) begin beat <= 0; void'(rq.pop_front()); end
        else beat <= beat + 1;
      end
    end
  end

  // ---------------- write
  logic wbusy;
  logic [MEM_AW-1:0] wa;
  logic [TW:0] wid;
  int wbeat;
  assign aw_ready = !wbusy;
  assign w_ready  = wbusy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbusy <= 1'b0; wa <= '0; wid <= '0; wbeat <= 0; b_valid <= 1'b0; b_id <= '0; writes <= 0;
    end else begin
      b_valid <= 1'b0;
      if (!wbusy && aw_valid) begin
        wbusy <= 1'b1; wa <= aw_addr; wid <= aw_id; wbeat <= 0;
      end else if (wbusy && w_valid) begin
        poke(wa + MEM_AW'(wbeat * 8), w_data);
        wbeat <= wbeat + 1;
        if (w_last) begin
          wbusy <= 1'b0; b_valid <= 1'b1; b_id <= wid; writes <= writes + 1;
        end
      end
    end
  end
endmodule
