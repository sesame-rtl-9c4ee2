// fake_txn_gen: chooses the address of a fake (dummy) burst for one tenant.
//
// When the shaper has a transmit slot and the tenant has no real transaction
// waiting, it sends a fake one instead, so the bus sees a constant rate.  The
// address is drawn from a 16-bit LFSR, masked to the tenant's addr_range
// (addr_base, size 2**addr_log2 bytes, burst aligned), so a fake access never
// leaves memory the tenant may touch.  If the drawn address falls in a DRAM
// bank that has a transaction pending, the bank bits are moved to the next free
// bank when that keeps the address inside the range; the fake then does not
// delay real traffic with a bank conflict.  `next` (a fake was issued) steps
// the LFSR.  The address output is combinational.
module fake_txn_gen
  import sesame_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [MEM_AW-1:0]     addr_base,
  input  logic [4:0]            addr_log2,
  input  logic [DRAM_BANKS-1:0] free_banks,
  input  logic                  next,
  output logic [MEM_AW-1:0]     addr
);
  logic [15:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lfsr <= SEED;
    else if (next) lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  localparam int BL = $clog2(BURST_BYTES);
  localparam int BK = $clog2(DRAM_BANKS);

  always_comb begin
    automatic logic [MEM_AW-1:0] size = MEM_AW'(1) << addr_log2;
    automatic logic [MEM_AW-1:0] off  = (MEM_AW'(lfsr) << BL) & (size - 1);
    automatic logic [MEM_AW-1:0] cand = addr_base + off;
    automatic logic [BK-1:0]     bank = cand[DRAM_BANK_LSB +: BK];
    addr = cand;
    if (!free_banks[bank] && (free_banks != '0)) begin
      for (int d = 1; d < DRAM_BANKS; d++) begin
        automatic logic [BK-1:0]     nb  = bank + BK'(d);
        automatic logic [MEM_AW-1:0] alt = cand;
        alt[DRAM_BANK_LSB +: BK] = nb;
        if (free_banks[nb] && alt >= addr_base && alt < addr_base + size && addr == cand)
          addr = alt;
      end
    end
  end
endmodule
