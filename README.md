# Dustin cluster RTL: mixed-precision SIMD dot products and vector lockstep execution

Quantized neural networks run well on small RISC-V clusters only if two costs
are kept down: the instructions spent unpacking sub-byte operands, and the
energy spent by sixteen cores fetching the same instruction stream. This RTL
implements the two hardware ideas of the Dustin cluster that attack those
costs, together with the shared L1 memory system they sit on:

1. **Bit-scalable mixed-precision dot products.** Every core has a dot-product
   unit that multiplies two 32-bit registers as vectors of 16-, 8-, 4- or 2-bit
   elements, including the mixed cases where the second operand is narrower
   than the first (16x8 ... 4x2, ten formats in all). The format is not
   encoded in the instruction. It lives in a control register, so one
   "virtual" dot-product instruction serves every format. A small controller
   walks through the sub-groups of the narrow operand by itself.
2. **Vector Lockstep Execution Mode (VLEM).** The sixteen cores can switch, in
   one cycle, from ordinary MIMD operation to a mode in which core 0 (the
   *leader*) fetches instructions and the other fifteen (*followers*) execute
   them in the same cycle. The followers' fetch stages and private instruction
   caches are clock gated. On the data side a *lockstep unit* keeps the sixteen
   cores cycle-aligned when their memory accesses collide. It also merges
   identical loads into a single broadcast access.

The cluster built here has 16 cores' worth of mixed-precision units, 128 kB of
L1 data memory in 32 word-interleaved banks, a single-cycle interconnect with
round-robin arbitration, a 2-D DMA engine between the L2 and the L1, a
hardware barrier that clock-gates waiting cores, and the VLEM control. The
RISC-V pipelines themselves, the instruction caches and the SoC around the
cluster are not part of this RTL. Their
signals are ports of the top module `dustin_cluster` (see *What is outside*).

## 1. Mixed-precision dot products

### Formats

The format register holds two 2-bit precision codes: bits [3:2] for operand A
and bits [1:0] for operand B. The codes are 0 = 16 bit, 1 = 8 bit, 2 = 4 bit
and 3 = 2 bit. B is always the narrower operand (or as wide as A). A write
that asks for a wider B is stored with B as wide as A. The encoding and the
register addresses (0xBC0 format, 0xBC1 MAC target, 0xBC2 slice) are this
design's choice.

A holds 32/wA elements. B holds 32/wB elements, i.e. wA/wB times as many as a
single dot product uses. B is therefore cut into wA/wB *slices* of 32/wA
elements each. Slice k is the elements [k·n, (k+1)·n-1] with n = 32/wA. For
example, in 8x2 each dot product uses 4 of B's 16 two-bit elements, and B has
4 slices.

| format | elements A | elements B | slices of B | MAC/cycle |
|--------|-----------:|-----------:|------------:|----------:|
| 16x16, 16x8, 16x4, 16x2 | 2 | 2/4/8/16 | 1/2/4/8 | 2 |
| 8x8, 8x4, 8x2 | 4 | 4/8/16 | 1/2/4 | 4 |
| 4x4, 4x2 | 8 | 8/16 | 1/2 | 8 |
| 2x2 | 16 | 16 | 1 | 16 |

### The dot-product unit (`dotp_unit`)

The unit has four regions, one per width of A: 2 multipliers of 16 bits, 4 of
8 bits, 8 of 4 bits and 16 of 2 bits. Each region has its own adder tree that
also adds the 32-bit accumulator operand C. Each region's operand registers
are loaded only when an instruction of that width is issued, so the idle
regions do not toggle. A *slicer and router* in front of the regions picks
the slice of B and widens each element of B to the width of A. It sign-extends
when `signed_b_i` is set and zero-extends otherwise. `signed_a_i` does the
same for A. Multipliers are one bit wider than the element, so that signed
and unsigned elements share one datapath.

Timing: the operands are registered at the issue edge, and the result is
valid during the following cycle (`valid_o`). That is one cycle of latency,
with a new dot product accepted every cycle. The sum wraps modulo 2^32.
`accumulate_i` = 0 gives the plain dot product; 1 gives C + A·B.

### The mixed-precision controller (`mp_controller`)

A convolution inner loop typically loads B (weights) once and reuses each
slice for a fixed number of dot products against different A registers
(activations). The controller counts dot products issued in a mixed format
(*MAC counter*). When the counter reaches the programmed target, it returns to
0 and the *slice selector* moves on to the next slice. After the last slice
it returns to slice 0. With target 2 in format 8x2 the sequence of (counter,
slice) seen by consecutive dot products is

    (0,0) (1,0) (0,1) (1,1) (0,2) (1,2) (0,3) (1,3) (0,0) ...

Software can write the slice selector directly for access patterns that
this rule does not cover; such a write also clears the counter. Writing the
format restarts the controller at slice 0. A target of 0 acts as 1. Uniform
formats do not move the controller.

`simd_fmt_csr` holds the three registers. `mp_simd_ext` wires the registers,
the controller and the dot-product unit together into what one core adds to
its pipeline.

## 2. Vector lockstep execution

### Entering and leaving the mode (`vlem_ctrl`)

Software first meets at a barrier. Then one core writes bit 0 of the mode
register. The mode changes at the next clock edge.

* **In VLEM** every follower's decode stage receives the leader's fetched
  instruction and valid bit. The follower's own fetch stage is clock gated.
  Its private instruction cache is told to abandon any refill in flight
  (`icache_abort_o`). The cache's clock stops as soon as it reports no refill
  outstanding (`icache_busy_i` low).
* **On exit** the clocks come back. For one cycle `pc_set_o` tells every
  follower to load the leader's program counter (`pc_o`), so that all cores
  continue from the leader's position.

The clock gates (`cluster_clk_gate`) are the usual latch-and-AND cells: the
enable is captured while the clock is low, so a gated clock never has a
shortened pulse. `test_en_i` forces them open. The latch is intended; a
standard-cell library would supply this cell.

### Keeping data accesses in step (`lks_unit`)

In lockstep all sixteen cores issue their loads and stores in the same cycle.
If two of them hit the same bank, the interconnect serves one of them first.
Without help the cores would then drift apart by a cycle. The lockstep unit
sits between the cores and the interconnect. In MIMD it is transparent. In
VLEM it works in four parts:

* **Broadcast unit.** If all sixteen cores load from the same address, which
  is typical when every core reads the same weights, the unit raises `brdc_o`.
* **Request silencer.** Under broadcast only the leader's request is sent to
  memory. Otherwise it stops re-sending the request of a core whose access
  memory has already granted, so no access is performed twice.
* **Grant synchronizer.** Grants to the cores are held back until the memory
  has granted every requesting core (or the leader's single broadcast access).
  They are then given to all requesters in the same cycle.
* **Data synchronizer.** Load data that arrived early is buffered. All cores
  receive their data, or the broadcast word, in the same cycle.

As a result, a conflict that costs k extra cycles stalls all sixteen cores by
the same k cycles, and equal loads cost one bank access instead of sixteen.
Stores are never merged. The mode should change only while no access is
outstanding, which the barrier before the switch guarantees.

## 3. L1 data memory

* `tcdm_bank`: 1024 x 32-bit words (4 kB) with byte enables. Read data comes
  one cycle after the access. It is written as an array; a chip would use an
  SRAM macro.
* `tcdm_interconnect`: a crossbar from 16 core ports plus one DMA port (the
  DMA port count is this design's choice) to 32 banks. Bank =
  address[6:2] and row = address[16:7], so consecutive words fall in
  consecutive banks. Each bank has a round-robin arbiter whose pointer moves
  past the winner. The grant is given in the same cycle as the request, and
  the read data follows one cycle later.

Because the banks are word-interleaved, sixteen cores that run in step and
each walk their own buffer hit the same bank every cycle whenever the buffer
stride is a multiple of 32 words. Padding the per-core buffers (for example
a 3x3x16 im2col buffer padded from 4608 to 6144 bytes for 16 cores) removes
these conflicts. This is a software matter; the hardware needs nothing extra.

## 4. DMA (`cluster_dma`)

The DMA moves blocks between the L2 and the L1 while the cores compute. A job
is a 2-D copy: `rows` rows of `len` 32-bit words. Within a row the words are
consecutive, and row r starts at base + r·stride. Source and destination have
separate bases and strides, so one job can scatter a packed L2 array into
padded per-core L1 buffers. The direction bit selects L2 to L1 or L1 to L2.

Inside there is a read address generator, a write address generator and a
16-entry data buffer. A read is issued only while the reads in flight plus
the words already buffered number fewer than 16. Every returning word
therefore has a buffer slot, and up to 16 L2 reads are outstanding. As long
as the L2 answers within 16 cycles, the engine moves one word per cycle. With
a slower L2 it moves 16 words per L2 latency. `busy` is high during a job and
`done` pulses once at its end. The L2 side is a request/grant port with
in-order read responses; on the chip this is an AXI port behind a
dual-clock FIFO, which is not modelled.

## 5. Barrier (`event_unit`)

Each core signals arrival (`arrive_i`) and loses its clock enable in the next
cycle. When all cores selected by the mask have arrived, `evt_o` pulses for
one cycle. The clock enables return two cycles after that pulse. Only this
barrier function of the cluster's event unit is built. The other event
sources, and the register map through which cores reach the unit, are not
modelled.

## 6. The top module, `dustin_cluster`

Parameters: `N_CORES` = 16, `N_BANKS` = 32, `BANK_WORDS` = 1024 and
`DMA_MAX_OUTSTANDING` = 16. Shared types and constants are in `dustin_pkg`. A data access is
a `tcdm_req_t` struct {addr, we, be[3:0], wdata}. The port groups are:

| group | ports | meaning |
|-------|-------|---------|
| core data | `core_req_i`, `core_mreq_i`, `core_gnt_o`, `core_rvalid_o`, `core_rdata_o` | each core's load/store port, through the lockstep unit |
| DMA | `dma_*`, `l2_*` | DMA job (start, direction, addresses, row length, rows, strides, busy, done) and the L2 memory port |
| mode | `vlem_cfg_we_i/wdata_i/rdata_o`, `lockstep_o`, `brdc_o` | VLEM register and status |
| fetch | `if_instr_i`, `if_valid_i`, `leader_pc_i`, `id_instr_o`, `id_valid_o`, `pc_set_o`, `pc_o` | instruction forwarding and PC resynchronisation |
| caches and clocks | `icache_busy_i`, `icache_abort_o`, `if_clk_o`, `icache_clk_o`, `*_clk_en_o`, `test_en_i` | follower gating |
| barrier | `barrier_*`, `core_clk_en_o` | event unit |
| mixed precision | `csr_*`, `dotp_*` | per-core CSR access and dot-product issue/result |

All ports are synchronous to `clk_i`; `rst_ni` is an active-low asynchronous
reset. Requests follow a request/grant handshake: a request is held until it
is granted, and read data comes with `rvalid` one cycle after the grant.

## 7. What is outside this RTL

The following are represented only by ports, or not at all:

* the RISC-V core pipelines, an RI5CY-class 4-stage core with DSP extensions,
  and their decoders;
* the 512 B private and the 4 kB 8-bank shared instruction caches;
* the peripheral interconnect, the timer, and the AXI ports with their
  dual-clock FIFOs;
* the SoC: fabric controller, 80 kB L2, I/O DMA, peripherals, debug and FLLs.

Because the cores are not here, no program runs on this RTL. The testbenches
drive the ports the way cores would.

## 8. Where this design decides for itself

Besides the encodings and addresses named above:

* the mixed-precision ALU operations (non-dot-product) are not built; only
  the dot-product path is;
* broadcast needs all sixteen cores to load the same address in the same
  cycle; partial groups are served as ordinary conflicting accesses;
* the cache busy/abort handshake and the one-cycle `pc_set_o` pulse;
* the barrier is a discrete port interface, not memory-mapped registers;
* one DMA port into the L1; DMA jobs of whole 32-bit words; the DMA job as
  plain ports rather than registers; a simple L2 port in place of AXI.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_dotp_unit` | 4000 random dot products over all ten formats, every slice, signed/unsigned, with and without accumulation; one-cycle latency |
| `tb_mp_controller` | the (counter, slice) sequence of an 8x2 loop, other targets and 16x2 wrap, uniform formats, software slice writes, restart on format change |
| `tb_simd_fmt_csr` | register read-back and format legalisation |
| `tb_lks_unit` | MIMD bypass, grant hold on conflicts, simultaneous release, broadcast, stores |
| `tb_tcdm_interconnect` | random traffic from 20 masters to 32 banks against a reference memory; fairness |
| `tb_tcdm_bank` | all 1024 words, byte enables, read latency |
| `tb_vlem_ctrl` | forwarding, gating after refills end, PC set on exit, single-cycle switch |
| `tb_event_unit` | sleep on arrival, event, wake-up two cycles later |
| `tb_cluster_dma` | random 2-D jobs both ways against memory models; never more than 16 reads in flight, exactly 16 with a slow L2; one word per cycle when the L2 answers within 16 cycles |
| `tb_dustin_cluster` | the full-size cluster at default parameters: a 2-D DMA job fills L1 from an L2 model, barrier, enter VLEM, an 8x2 kernel on 16 cores with broadcast weight loads and conflicting activation loads, exit VLEM; counts that each mechanism happened |

Running one testbench with Verilator 5:

    verilator --binary --timing --assert -y rtl rtl/dustin_pkg.sv \
        tb/tb_dotp_unit.sv --top-module tb_dotp_unit -o sim
    ./obj_dir/sim

The full-size cluster testbench takes about two minutes to build and seconds
to run.
