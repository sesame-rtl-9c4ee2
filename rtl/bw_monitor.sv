// bw_monitor: memory bandwidth measurement widget.
//
// Counts the bytes moved by completed read-data beats (r_valid) and write-data
// beats (w_valid && w_ready) of the memory port.  Every WINDOW cycles the
// counts of the window just ended are copied to rd_bytes / wr_bytes and
// `sample` pulses, so a trace of the two outputs is the bandwidth trace an
// observer (for example a performance counter) would see.  Totals since reset
// are kept in rd_total / wr_total.  Beats of MEM_DW bits.
module bw_monitor
  import sesame_pkg::*;
#(
  parameter int unsigned WINDOW = 1000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        r_beat,
  input  logic        w_beat,
  output logic [31:0] rd_bytes,
  output logic [31:0] wr_bytes,
  output logic        sample,
  output logic [63:0] rd_total,
  output logic [63:0] wr_total
);
  logic [31:0] cyc, rcur, wcur;
  localparam logic [31:0] BYTES = 32'(MEM_DW / 8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= '0; rcur <= '0; wcur <= '0; rd_bytes <= '0; wr_bytes <= '0;
      sample <= 1'b0; rd_total <= '0; wr_total <= '0;
    end else begin
      sample <= 1'b0;
      if (r_beat) rd_total <= rd_total + 64'(BYTES);
      if (w_beat) wr_total <= wr_total + 64'(BYTES);
      if (cyc == WINDOW - 1) begin
        cyc      <= '0;
        rd_bytes <= rcur + (r_beat ? BYTES : 32'd0);
        wr_bytes <= wcur + (w_beat ? BYTES : 32'd0);
        rcur     <= '0;
        wcur     <= '0;
        sample   <= 1'b1;
      end else begin
        cyc  <= cyc + 32'd1;
        rcur <= rcur + (r_beat ? BYTES : 32'd0);
        wcur <= wcur + (w_beat ? BYTES : 32'd0);
      end
    end
  end
endmodule
