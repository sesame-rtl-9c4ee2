// zeroizer: clears a range of scratchpad words, one word per cycle.
//
// start (with addr and count) begins a sweep; for count cycles it drives
// wr_en with wr_addr = addr, addr+1, ... and the caller writes zero there,
// through its base/bound check.  busy is high during the sweep and done pulses
// in the cycle after the last write.  start is ignored while busy.  count = 0
// finishes at once.  Used for the ZEROIZE instruction and for clearing a
// tenant's regions at teardown.
module zeroizer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] addr,
  input  logic [16:0] count,
  output logic        busy,
  output logic        done,
  output logic        wr_en,
  output logic [15:0] wr_addr
);
  logic [16:0] left;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; left <= '0; wr_addr <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          wr_addr <= addr;
          left    <= count;
          busy    <= (count != 0);
          done    <= (count == 0);
        end
      end else begin
        wr_addr <= wr_addr + 16'd1;
        left    <= left - 17'd1;
        if (left == 17'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign wr_en = busy;
endmodule
