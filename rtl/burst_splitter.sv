// burst_splitter: cuts one DMA request into equal fixed-size bursts.
//
// A request (start byte address, number of bursts, shaped/encrypted flags) is
// accepted when the splitter is idle (in_ready).  It then emits one burst
// descriptor per cycle in which out_ready is high, at addresses addr,
// addr + BURST_BYTES, ... .  Every burst on the bus therefore has the same size,
// so the size of a tensor shows only as a count of identical bursts, which the
// shaper then spaces evenly.  The compiler pads tensors to a multiple of the
// burst size, so no partial burst exists.  out_ready is the "not full" of the
// tenant's real-transaction queue: a full queue stalls the splitter and, through
// in_ready, the load or store engine behind it.
module burst_splitter
  import sesame_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [MEM_AW-1:0] in_addr,
  input  logic [15:0]       in_nbursts,
  input  logic              in_shaped,
  input  logic              in_enc,
  output logic              out_valid,
  output burst_t            out_burst,
  input  logic              out_ready
);
  logic        busy;
  logic [15:0] left;

  assign in_ready  = !busy;
  assign out_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; left <= '0; out_burst <= '0;
    end else if (!busy) begin
      if (in_valid && in_nbursts != 0) begin
        busy      <= 1'b1;
        left      <= in_nbursts;
        out_burst <= '{addr: in_addr, shaped: in_shaped, enc: in_enc};
      end
    end else if (out_ready) begin
      out_burst.addr <= out_burst.addr + MEM_AW'(BURST_BYTES);
      left           <= left - 16'd1;
      if (left == 16'd1) busy <= 1'b0;
    end
  end
endmodule
