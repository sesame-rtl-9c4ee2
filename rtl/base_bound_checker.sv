// base_bound_checker: grants or blocks one scratchpad access.
//
// Combinational.  An access by `tenant` to global word address `addr` of a
// scratchpad with WORDS words and NREG regions is allowed when the address is
// inside the scratchpad and the 16 kB region holding it is owned by that tenant
// in the scratchmap.  A blocked write is dropped and a blocked read returns zero
// (the callers do this); `ok` is the only output.  The region is found from the
// top bits of the address, so base and bound of every region are implicit in
// the region size.
module base_bound_checker
  import sesame_pkg::*;
#(
  parameter int unsigned WORDS = 32768,
  parameter int unsigned NREG  = 16
) (
  input  logic [TW-1:0] tenant,
  input  logic [15:0]   addr,
  input  own_t          own [NREG],
  output logic          ok
);
  localparam int unsigned RW = WORDS / NREG;   // words per region
  logic [15:0] region;
  always_comb begin
    region = addr / 16'(RW);
    ok = 1'b0;
    if (32'(addr) < WORDS)
      ok = own[region[$clog2(NREG)-1:0]].v && (own[region[$clog2(NREG)-1:0]].id == tenant);
  end
endmodule
