// scratchpad: one of the four on-chip scratchpads (input, weight, accumulator,
// output), built from NBANK equal banks.
//
// The word address space of WORDS words is cut into NBANK contiguous banks;
// bank b serves execution tile b and is owned, together with that tile, by one
// tenant at a time.  Each bank has its own write port and NRD read ports, so
// tenants working in different banks never wait for each other.  Ownership is
// recorded per 16 kB region in the scratchmap (tenant_spad_map) and checked by
// base_bound_checker before a request reaches these ports; the scratchpad
// itself stores data only.
//
// Capacity (Table "System Specifications", temporal column = whole accelerator):
// weight 2 MB, input 256 kB, output 256 kB, accumulator 512 kB; a bank is one
// tenant's spatial share (a quarter).  Ports are bank-local addresses; read data
// follows one cycle after rd_en.
module scratchpad #(
  parameter int unsigned W     = 64,
  parameter int unsigned WORDS = 32768,
  parameter int unsigned NBANK = 4,
  parameter int unsigned NRD   = 1,
  localparam int unsigned BW   = WORDS / NBANK,
  localparam int unsigned BAW  = $clog2(BW)
) (
  input  logic               clk,
  input  logic [NBANK-1:0]   wr_en,
  input  logic [BAW-1:0]     wr_addr [NBANK],
  input  logic [W-1:0]       wr_data [NBANK],
  input  logic [NRD-1:0]     rd_en   [NBANK],
  input  logic [BAW-1:0]     rd_addr [NBANK][NRD],
  output logic [W-1:0]       rd_data [NBANK][NRD]
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    spad_bank #(.W(W), .WORDS(BW), .NRD(NRD)) u_bank (
      .clk, .wr_en(wr_en[b]), .wr_addr(wr_addr[b]), .wr_data(wr_data[b]),
      .rd_en(rd_en[b]), .rd_addr(rd_addr[b]), .rd_data(rd_data[b]));
  end
endmodule
