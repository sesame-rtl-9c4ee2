# A multi-tenant enclave for a decoupled access/execute inference accelerator

An inference accelerator that is shared between several mutually distrusting
users leaks information in two ways. First, tenants contend for things on the
chip: queues, scratchpad space and execution units. A tenant can time that
contention to learn what another tenant is doing. Second, anyone who can watch
the memory bus sees each tenant's traffic. The number, size and timing of its
bursts give away the layer shapes and tiling of a neural network. With private
data, they can also reveal the data itself.

This RTL closes both channels in a VTA-style decoupled access/execute (DAE)
accelerator. It rests on four mechanisms:

* **Partitioning.** Every shared on-chip resource is split by tenant id. This
  covers the queues, the scratchpad regions and the execution tiles. A tenant
  cannot fill, read or slow down another tenant's share.
* **Scratchpad access control and zeroization.** The owner of every scratchpad
  region is checked before each access. A tenant's regions are wiped before
  they are handed back.
* **Traffic shaping.** A shaped tenant puts exactly one fixed-size burst on the
  memory bus per programmed period. When it has nothing real to send, the burst
  is a fake one. The bus trace is then the same whatever the program does.
* **Cost of memory encryption.** Encrypted loads and stores pay the latency of
  a 128-bit block cipher. A real cipher is not built.

Up to four tenants run at once. In *spatial* mode each tenant gets a quarter of
the machine. In *temporal* mode a single tenant owns everything.

## Tenants, launch and teardown (`scheduler`, `tenant_spad_map`)

The host driver reaches the accelerator through one register port. It writes
per-tenant configuration registers and then a launch command:

| addr | register | meaning |
|---|---|---|
| 0 | EXEC_MODE | bit0: 1 = temporal, 0 = spatial |
| 1 | TILE_MASK | the execution tiles wanted |
| 2 | QDEPTH | depth of the tenant's instruction, command and dependency queue partitions |
| 3..6 | SPAD_INP/WGT/ACC/OUT | `{first region[15:8], region count[7:0]}` per scratchpad |
| 7 | SHAPER | bit0 shaper_en, bit1 AES (else QARMA) latency |
| 8 | BANDWIDTH | shaper period in cycles per 128-byte burst |
| 9 | ADDR_BASE | base of the tenant's fake-traffic address range |
| 10 | ADDR_LOG2 | log2 of its size in bytes |
| 15 | CMD | 1 = launch, 2 = teardown |

**Launch.** A launch is an atomic claim of resources. `tenant_spad_map` holds
two tables: the owner of each execution tile, and the owner of each 16 kB
region of each scratchpad (the *scratchmap*). A claim succeeds only if:

* every requested tile and region is free;
* no region lies in a scratchpad bank whose tile belongs to someone else;
* a temporal tenant would be alone;
* no spatial tenant would join a temporal one.

Otherwise `launch_err[k]` is raised and nothing changes. This is the
over-subscription check.

**Teardown.** Teardown is the reverse, in three steps:

1. The tenant's load lane zeroizes all of its input and weight regions.
2. Its store lane zeroizes all of its accumulator and output regions.
3. The ownership is released and the tenant's queue partitions are flushed.

Only then is `active[k]` cleared. A relaunch therefore starts from zeros, and
the next owner of those regions finds nothing.

## Private queues (`private_queue`)

Every queue that two tenants could share is a `private_queue`:

* the instruction queue;
* the per-unit command queues;
* the four DAE dependency-token queues (load→compute, compute→load,
  compute→store, store→compute);
* the split read/write queues in the request unit.

The tenant id on each push or pop selects the tenant's partition.

* **Spatial mode:** a partition is a fixed quarter of the storage. Its usable
  depth is the tenant's QDEPTH register, clipped to that quarter.
* **Temporal mode:** the one tenant may use the whole storage.

A full partition refuses pushes (`full[k]`) without touching the other
partitions. A push that arrives anyway is dropped and sets a sticky overflow
flag.

## Scratchpads and their checks (`scratchpad`, `spad_bank`, `base_bound_checker`, `zeroizer`)

There are four scratchpads, sized as in the prototype this design follows:

| scratchpad | size | word | words per bank | 16 kB regions |
|---|---|---|---|---|
| input | 256 kB | 8 × int8 | 8192 | 16 |
| weight | 2 MB | 8×8 × int8 | 8192 | 128 |
| accumulator | 512 kB | 8 × int32 | 4096 | 32 |
| output | 256 kB | 8 × int8 | 8192 | 16 |

Each scratchpad has four banks, and bank *t* is private to execution tile *t*.
One tenant's quarter is therefore physically separate from another's. Every
load, store, GEMM and ALU access goes through a `base_bound_checker` against
the scratchmap:

* a blocked write is dropped;
* a blocked read returns zero;
* either raises the tenant's `violation` flag.

`zeroizer` clears one word per cycle. It serves the ZEROIZE instruction and
teardown.

## Execution tiles and modes (`compute_unit`, `compute_lane`, `gemm_tile`, `alu_tile`)

There are four 8×8 int8 GEMM tiles (64 MACs each, 256 in all) and four 8-lane
int32 ALU tiles (MAX, MIN, ADD, arithmetic shift right, with an optional
immediate). The datapath is constant time:

* every GEMM or ALU iteration takes two cycles (read, then compute and write)
  whatever the data;
* GEMM_C and ALU_C therefore behave like GEMM and ALU.

Each tenant has its own decoder (`compute_lane`). It runs an instruction on
every tile the tenant owns, so a temporal tenant with all four tiles does 256
MACs per iteration. GEMM and ALU addresses are bank-local, and the bank is
implied by the tile.

## Load, store and zeroization (`load_unit`, `load_lane`, `store_unit`, `store_lane`)

Each tenant has its own load lane and store lane. They follow the DAE
dependency-token protocol (`pop_prev`/`pop_next`/`push_prev`/`push_next` bits
in every instruction).

* **Load lane.** It splits a LOAD into bursts, queues them in the tenant's read
  queue and writes the returned 64-bit beats into the input or weight banks.
  An input word is one beat; a weight word is eight beats.
* **Store lane.** It reads output words and sends them as write bursts. It
  pushes its token only after every write response has come back.

ZEROIZE of the input or weight scratchpad runs in the load lane. ZEROIZE of the
accumulator or output runs in the store lane. Dependencies on ZEROIZE are
expressed with the ordinary tokens, so the compiler orders it like any other
instruction.

## The memory side: request unit, traffic shaper and DMA (`request_unit`, `burst_splitter`, `traffic_shaper`, `shaper_timer`, `fake_txn_gen`, `dma_engine`, `bank_conflict_checker`)

This part is the core of the design. Every request is cut into fixed 128-byte
bursts: 16 beats of 64 bits, AXI INCR16. The bursts wait in the tenant's
partition of the read or write queue. When that partition is full, the lane
stalls, and `rq_stall[k]` is high while it does.

One `traffic_shaper` per direction then decides which burst goes next. For a
tenant with `shaper_en` set:

* a `shaper_timer` expires every BANDWIDTH cycles;
* at each expiry exactly one burst leaves: the tenant's real head burst if it
  has one, otherwise a fake one;
* at 100 MHz a period of 32 cycles is 400 MB/s and a period of 128 cycles is
  100 MB/s. These are the temporal and per-tenant spatial bandwidths of the
  prototype.

Fake bursts are made as follows:

* their addresses come from a per-tenant `fake_txn_gen`, an LFSR inside the
  tenant's ADDR_BASE/ADDR_LOG2 range;
* the address is steered to a DRAM bank (`addr[15:13]`) that the
  `bank_conflict_checker` reports as having nothing pending, so fakes cause no
  bank conflicts that could be observed;
* fake reads are dropped on return;
* fake writes carry zeros into the tenant's own range.

Other bursts are handled as follows:

* Bursts from LOAD/LOAD_E/STORE/STORE_E (the unshaped opcodes) of a shaped
  tenant bypass the timer and are counted as bypasses.
* Tenants without shaping send whenever they have a burst.
* A round-robin arbiter merges the tenants into the one `dma_engine`.

The DMA engine drives the AR and AW/W channels. It can have up to 8 bursts
outstanding per direction. Its transaction id is `{fake, tenant}`.

For an encrypted (`_E`) burst the engine waits for the cipher latency of eight
128-bit blocks before issuing it:

* QARMA-128 at 10 ns per block: 8 cycles;
* AES-128 at 20 ns per block: 16 cycles.

These cycles are counted in `enc_stall_cycles`. No cipher is computed. The data
goes to memory in plain form.

## Instructions

`insn_t` in `sesame_pkg` is one wide word (the encoding is this design's own):

* opcode;
* the four dependency bits;
* the scratchpad id;
* scratchpad addresses (global for LOAD/STORE/ZEROIZE, bank-local for GEMM/ALU);
* the DRAM address;
* a count;
* per-iteration address increments;
* ALU op and immediate.

The opcodes are:

* LOAD, LOAD_E, LOAD_S, LOAD_SE and STORE, STORE_E, STORE_S, STORE_SE. The `_S`
  forms are shaped and the `_E` forms are encrypted.
* GEMM, GEMM_C, ALU, ALU_C.
* ZEROIZE and FINISH. FINISH raises `done[k]`.

## Statistics

The top exposes the counters that an attacker, or an evaluator, would look at:

* bank conflicts;
* fake read and write bursts;
* bypasses;
* cipher stall cycles;
* the per-tenant queue-full stall signal;
* tile iterations;
* a `bw_monitor` with bytes read and written per 1000-cycle window and in
  total.

## Using it

The top is `sesame_top` with its defaults (`DQ_TOTAL` = 16 dependency-queue
entries, `BW_WINDOW` = 1000). `sesame_pkg.sv` must be compiled first. Every
module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/sesame_pkg.sv tb/tb_sesame_top.sv \
        --top-module tb_sesame_top && obj_dir/Vtb_sesame_top

(the other modules are found through `-Irtl -Itb`).

`tb_sesame_top` runs the whole accelerator at its default size against a
behavioural DRAM model (`tb/dram_model.sv`, 8-cycle latency). It takes about a
second. It goes through these phases:

1. Three spatial tenants run the same small layer: GEMM, then ReLU, then a
   store. They use different threat models:
   * tenant 0 keeps its model and input private: shaped and encrypted loads
     and stores, with the traffic shaper on;
   * tenant 1 is public: plain instructions, plus one load aimed at tenant 0's
     region, which must be blocked;
   * tenant 2 keeps its input private: encrypted, unshaped loads and stores
     with AES latency.
2. A fourth tenant asks for a tile that is already taken, and is refused.
3. All three tenants are torn down. Tenant 0 is relaunched on the same regions
   and must read back zeros.
4. A temporal tenant takes the whole accelerator, and a spatial launch is
   refused. One GEMM runs on all four tiles. A long shaped load fills its read
   queue.

Results are compared with a reference computed in the testbench. The testbench
also counts each mechanism and fails if one never happened:

* fake reads and writes;
* bypass;
* cipher stall;
* queue-full stall;
* bank conflict;
* violation;
* refused launch;
* zeroization at teardown;
* mode switch.

## Where this departs from, or goes beyond, the published design

* **Choices this design makes where the description stops short:**
  * the instruction encoding and the register map;
  * the 64-bit memory beat and the 128-byte burst;
  * bank = `addr[15:13]`;
  * queue sizes;
  * the round-robin arbitration;
  * the bypass of unshaped bursts;
  * the bank rule for region claims;
  * zeroization by the lanes at teardown;
  * two cycles per compute iteration.
* **ZEROIZE ordering is left to software.** ZEROIZE is described as adding a
  dependency to later instructions that touch the same scratchpad regions.
  Here, that dependency is carried by the ordinary DAE tokens that the compiler
  sets. Within a lane, instructions run in order. No hardware scoreboard
  compares address ranges.
* **Encryption is latency only.** Nothing is enciphered. Fake bursts get no
  cipher delay, which an observer able to time the DMA engine could tell from
  real encrypted bursts.
* **No data-dependent optimizations.** The GEMM and ALU have none, so the
  constant-time instructions are the same as the normal ones.
* **Not built:** the system MMU, the DRAM, the host CPU and its driver, and
  remote attestation. The memory port and the host register port are brought
  out of the top instead. The compiler passes are software and are also not
  built. These include tiling, zeroize insertion and burst-size padding, so
  programs must already be in bursts of 128 bytes.
* **Workloads.** The evaluated networks (AlexNet, VGG11/16, ResNet18/34/50 on
  ImageNet, 8-bit) have 11.7 to 138 MB of weights. They run by streaming tiles
  through the scratchpads from DRAM; no network fits on chip. For example, VGG16
  needs about 1.2 s of GEMM time in temporal mode (15.5 GMAC at 128 MAC per
  cycle and 100 MHz). They are far too large to simulate whole.
  `tb/tb_workload_conv.sv` runs one scratchpad-sized chunk of such a layer on
  the full-size accelerator: a temporal tenant with all four tiles, 64 pixels ×
  64 input channels × 32 output channels, an 8-step K reduction, requantization
  and ReLU, all traffic shaped at 400 MB/s. It checks every output byte. It
  also checks that real read bursts leave exactly one per 32 cycles and that
  the read bandwidth stays flat whether the tenant is busy or idle.
