// sesame_pkg: types and constants shared by the multi-tenant DAE accelerator.
//
// The accelerator is a decoupled access/execute (DAE) machine (load, compute and
// store units joined by dependency queues) extended so that up to NT mutually
// distrusting tenants can share it.  Everything a tenant owns (queue partitions,
// scratchpad regions, execution tiles, memory bandwidth) is looked up by its
// tenant id.
//
// Sizes that follow the paper: four tenants, four 8x8 GEMM tiles (256 MACs in all,
// 64 per tenant in spatial mode), 16 kB scratchpad regions, 8-bit operands, and the
// scratchpad capacities of the temporal column of the paper's system table
// (weight 2 MB, input 256 kB, output 256 kB, accumulator 512 kB).
// The instruction encoding, the memory word (64 bit), the burst length (16 beats)
// and the DRAM bank bits are this design's own choices.
package sesame_pkg;

  // ---------------------------------------------------------------- tenants
  localparam int NT      = 4;            // tenants supported
  localparam int TW      = $clog2(NT);   // tenant id width
  localparam int NTILE   = 4;            // 8x8 GEMM/ALU tiles, one scratchpad bank each
  localparam int VL      = 8;            // vector length of a tile (8x8)

  // ---------------------------------------------------------------- memory port
  localparam int MEM_DW      = 64;                 // DRAM data beat
  localparam int MEM_AW      = 32;                 // DRAM byte address
  localparam int BURST_BEATS = 16;                 // fixed burst length (AXI INCR16)
  localparam int BURST_BYTES = BURST_BEATS * MEM_DW / 8;
  localparam int BURST_DW    = BURST_BEATS * MEM_DW;
  localparam int DRAM_BANKS  = 8;                  // DDR3 has 8 banks
  localparam int DRAM_BANK_LSB = 13;               // bank = addr[15:13]

  // ---------------------------------------------------------------- scratchpads
  localparam int REGION_BYTES = 16 * 1024;         // ownership granule
  // word widths: input/output 8 x int8, weight 8x8 int8, accumulator 8 x int32
  localparam int INP_W = VL * 8;
  localparam int WGT_W = VL * VL * 8;
  localparam int ACC_W = VL * 32;
  localparam int OUT_W = VL * 8;

  typedef enum logic [1:0] {BUF_INP = 2'd0, BUF_WGT = 2'd1, BUF_ACC = 2'd2, BUF_OUT = 2'd3} buf_e;

  // ---------------------------------------------------------------- ISA
  typedef enum logic [3:0] {
    OP_LOAD    = 4'd0,  OP_LOAD_E  = 4'd1,  OP_LOAD_S  = 4'd2,  OP_LOAD_SE  = 4'd3,
    OP_STORE   = 4'd4,  OP_STORE_E = 4'd5,  OP_STORE_S = 4'd6,  OP_STORE_SE = 4'd7,
    OP_GEMM    = 4'd8,  OP_GEMM_C  = 4'd9,  OP_ALU     = 4'd10, OP_ALU_C    = 4'd11,
    OP_ZEROIZE = 4'd12, OP_FINISH  = 4'd13
  } opcode_e;

  typedef enum logic [1:0] {ALU_MAX = 2'd0, ALU_MIN = 2'd1, ALU_ADD = 2'd2, ALU_SHR = 2'd3} alu_op_e;

  // One instruction.  Address fields are scratchpad word addresses: global
  // (bank in the top bits) for LOAD/STORE/ZEROIZE, bank-local for GEMM/ALU,
  // which run on every tile (bank) the tenant owns.
  typedef struct packed {
    opcode_e      op;
    logic         pop_prev;   // wait for a token from the previous stage
    logic         pop_next;   // wait for a token from the next stage
    logic         push_prev;  // send a token to the previous stage
    logic         push_next;  // send a token to the next stage
    buf_e         buf_id;     // LOAD: INP/WGT, STORE: OUT, ZEROIZE: any
    logic [15:0]  sram_addr;  // LOAD/STORE/ZEROIZE address; GEMM/ALU destination (acc)
    logic [15:0]  src0;       // GEMM input address; ALU source accumulator address
    logic [15:0]  src1;       // GEMM weight address
    logic [31:0]  dram_addr;  // LOAD/STORE byte address in DRAM
    logic [15:0]  count;      // words (LOAD/STORE/ZEROIZE) or iterations (GEMM/ALU)
    logic         reset_acc;  // GEMM: start from zero instead of the accumulator
    logic         dst_inc;    // per-iteration increment of sram_addr (0/1)
    logic         src0_inc;   // per-iteration increment of src0 (0/1)
    logic         src1_inc;   // per-iteration increment of src1 (0/1)
    alu_op_e      alu_op;
    logic         use_imm;    // ALU: second operand is imm, not acc[src0]
    logic [15:0]  imm;
  } insn_t;

  localparam int INSN_W = $bits(insn_t);

  function automatic logic is_load(opcode_e o);  return o inside {OP_LOAD, OP_LOAD_E, OP_LOAD_S, OP_LOAD_SE};     endfunction
  function automatic logic is_store(opcode_e o); return o inside {OP_STORE, OP_STORE_E, OP_STORE_S, OP_STORE_SE}; endfunction
  // _S variants use the shaped channel, _E variants are encrypted
  function automatic logic op_shaped(opcode_e o);
    return o inside {OP_LOAD_S, OP_LOAD_SE, OP_STORE_S, OP_STORE_SE};
  endfunction
  function automatic logic op_enc(opcode_e o);
    return o inside {OP_LOAD_E, OP_LOAD_SE, OP_STORE_E, OP_STORE_SE};
  endfunction

  // ---------------------------------------------------------------- request unit
  // A burst descriptor as it waits in a split load/store queue.
  typedef struct packed {
    logic [MEM_AW-1:0] addr;
    logic              shaped;
    logic              enc;
  } burst_t;

  // Per-tenant shaper / cipher configuration (tenant-private registers).
  typedef struct packed {
    logic              shaper_en;
    logic [15:0]       bandwidth;   // cycles between two bursts on a shaped channel
    logic [MEM_AW-1:0] addr_base;   // fake-transaction address range (byte)
    logic [4:0]        addr_log2;   // range size = 2**addr_log2 bytes
    logic              cipher_aes;  // 0: QARMA-128 latency, 1: AES-128 latency
  } shaper_cfg_t;

  // Region range owned by a tenant in one scratchpad.
  typedef struct packed {
    logic [7:0] base;   // first region
    logic [7:0] num;    // number of regions
  } rrange_t;

  // Owner of a scratchpad region or an execution tile.
  typedef struct packed {
    logic          v;     // owned
    logic [TW-1:0] id;    // owning tenant
  } own_t;

  // Regions per scratchpad (16 kB each) and words per scratchpad.
  localparam int INP_WORDS = 256 * 1024 * 8 / INP_W;        // 32768
  localparam int WGT_WORDS = 2 * 1024 * 1024 * 8 / WGT_W;   // 32768
  localparam int ACC_WORDS = 512 * 1024 * 8 / ACC_W;        // 16384
  localparam int OUT_WORDS = 256 * 1024 * 8 / OUT_W;        // 32768
  localparam int INP_NREG  = 256 * 1024 / REGION_BYTES;     // 16
  localparam int WGT_NREG  = 2 * 1024 * 1024 / REGION_BYTES;// 128
  localparam int ACC_NREG  = 512 * 1024 / REGION_BYTES;     // 32
  localparam int OUT_NREG  = 256 * 1024 / REGION_BYTES;     // 16
  localparam int NREG_MAX  = WGT_NREG;

endpackage
