// shaper_timer: the per-tenant timer of the traffic shaper.
//
// While en is high it counts clock cycles and raises `slot` (timer_expire) every
// `period` cycles; slot stays high until the shaper uses it (consume), so a
// slot that waits for the bus is not lost, but slots never pile up: at most one
// is pending.  period = 0 or 1 gives a slot every cycle.  Dropping en clears
// the timer.
module shaper_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [15:0] period,
  input  logic        consume,
  output logic        slot
);
  logic [15:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; slot <= 1'b0;
    end else if (!en) begin
      cnt <= '0; slot <= 1'b0;
    end else begin
      if (cnt + 16'd1 >= period) begin
        cnt  <= '0;
        slot <= 1'b1;
      end else begin
        cnt <= cnt + 16'd1;
        if (consume) slot <= 1'b0;
      end
    end
  end
endmodule
