// spad_bank: one bank of a scratchpad, a synchronous-read RAM.
//
// One write port and NRD read ports.  A read presents rd_en/rd_addr in one
// cycle and sees rd_data in the next; a write lands at the clock edge, so a read
// issued in the cycle after a write returns the new data.  Contents are not
// reset: the zeroizer clears what a tenant leaves behind.  Written as an array so
// that synthesis maps it to block RAM.
module spad_bank #(
  parameter int unsigned W     = 64,
  parameter int unsigned WORDS = 1024,
  parameter int unsigned NRD   = 1
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(WORDS)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic [NRD-1:0]           rd_en,
  input  logic [$clog2(WORDS)-1:0] rd_addr [NRD],
  output logic [W-1:0]             rd_data [NRD]
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[r]) rd_data[r] <= mem[rd_addr[r]];
    end
  end
endmodule
