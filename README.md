# PIFS-Rec fabric switch

A CXL fabric switch that computes embedding reductions itself, instead of
only forwarding traffic. The host sends the switch a short program for each
SparseLengthSum (SLS): a Configuration instruction, then one DataFetch per row.
The Configuration says how many rows make up the sum and where the result must
go. Each DataFetch gives a row address and its weight.

The switch turns each DataFetch into an ordinary memory read to the right CXL
Type 3 device. It multiplies each returning row by its weight and adds it to
the running sum of its SumTag, in whatever order the rows arrive. When the last
row is in, it writes the finished vector to the address the host reserved.
Only the result crosses the host link, not every row. Hot rows are kept in an
on-switch SRAM buffer. Pages can be moved between devices one cache line at a
time while they stay readable.

## Structure

```
host ──► ingress queue ──► MemOpcode checker ──┬─► VCS ─────────────────────► devices (NUM_DSP)
                                               │    ▲  ▲                          │
                                               ▼    │  └── migration controller ◄─┤ (line read/write)
                                         process core                              │
          ┌──── mem_req (repacked MemRd) ─────┘     │                              │
          ▼                                         │                              │
   on-switch buffer ── miss ──► VCS ────────────────┘                              │
          │ hit                                                                    │
          └───────────────► row arbiter ◄──── switch-bound responses (by DPID) ◄───┘
                                │
                         process core ──► egress queue ──► host (D2H result, DataValid)
```

| file | block |
|---|---|
| `rtl/pifs_pkg.sv` | instruction format, structs, constants |
| `rtl/fp32_pkg.sv` | FP32 multiply and add |
| `rtl/sync_fifo.sv` | ingress and egress queues |
| `rtl/rr_arbiter.sv` | round-robin arbiter (VCS, row return) |
| `rtl/memopcode_checker.sv` | sends PIFS opcodes to the process core and everything else to the VCS |
| `rtl/instruction_repacking.sv` | turns a DataFetch into a MemRd with SPID = switch |
| `rtl/instruction_ingress_registry.sv` | IIR: outstanding DataFetches, looked up by the address of a returning row |
| `rtl/instruction_decoder.sv` | splits instructions into ACR writes and IIR records; joins a row with its record |
| `rtl/accumulate_config_register.sv` | ACR: result address and remaining count per SumTag |
| `rtl/accumulate_config_logic.sv` | count-down, completion, CapacityCounter and back-pressure |
| `rtl/functional_config_register.sv` | FCR: spill enable, buffer enable, resulting capacity limit |
| `rtl/accumulate_unit.sv` | weighted accumulation with accumulate register, swap register and spill store |
| `rtl/process_core.sv` | the blocks above, wired together |
| `rtl/address_profiler.sv` | access counters for the hottest-recording (HTR) policy |
| `rtl/on_switch_buffer.sv` | SRAM row cache with HTR replacement |
| `rtl/memory_indexing.sv` | address to downstream port; remap table for migrated pages; line lock |
| `rtl/vcs.sv` | request arbitration and routing; response routing by DPID |
| `rtl/migration_controller.sv` | line-by-line page migration |
| `rtl/pifs_switch.sv` | top level |

### Instruction format

The M2S request follows the extended CXL.mem request of the paper:

| field | bits |
|---|---|
| V | 1 |
| MemOpcode | 4 |
| ST/MF/MV | 7 |
| Tag | 16 |
| Address | 46 |
| N/A | 4 |
| SPID | 12 |
| DPID | 12 |
| Others | 8 |
| SumTag | 6 |
| VectorSize (DataFetch) or SumCandidateCount (Configuration) | 3 or 9 |

- MemOpcode 1110b is DataFetch and 1111b is Configuration.
- A DataFetch carries its FP32 weight in the low 32 bits of the 16-byte data slot.
- VectorSize n means n+1 chunks of 16 bytes, so a row is 16 to 128 bytes (4 to 32 FP32 lanes).
- A Configuration reuses the Address field for the result address.

### Timing

- The accumulate unit handles one 16-byte chunk per cycle: a row of n chunks takes n+1 cycles, including the cycle that accepts it.
- Switching to another SumTag whose partial sum is in the swap register costs no extra cycle.
- A partial sum in the spill store costs 2 cycles to read and 2 to write.
- A buffer lookup takes 2 cycles.

## How the mechanisms work

- **Bypass.** Standard CXL.mem requests go straight through the VCS. Their responses carry the host's ID in DPID and return to the host.
- **Repacking.** The DataFetch is recorded in the IIR and, in the same cycle, sent on as a MemRd with SPID set to the switch ID (12'hFFE). The device answers to that ID, so the row comes back to the switch.
- **DataValid.** When a row is matched in the IIR, the host gets a one-cycle pulse carrying the request's Tag.
- **Out-of-order accumulation.** The accumulate unit holds one partial sum in its register.
  - When a row for another SumTag arrives, the current sum moves to the swap register (4 entries) and the needed one is brought in, from the swap register or the spill store.
  - When the swap register is full, the displaced sum goes to the spill store instead. This happens only if spilling is enabled in the FCR.
  - With spilling disabled, the capacity limit drops to SWAP_DEPTH+1 SumTags. Every live partial sum then always has a register to sit in.
- **Capacity and back-pressure.** CapacityCounter counts the SumTags that are configured but not yet finished. At the limit, the next Configuration waits at the head of the instruction stream. Rows of SumTags already live are unaffected, so those SumTags finish and free their slots.
- **Completion.** Each accumulated row decrements the SumTag's count. When the last row is added, the result leaves through the egress queue as a D2H write to the reserved address, and the SumTag becomes free.
- **On-switch buffer.** The buffer is direct-mapped with one row per 128-byte line (512 KB = 4096 lines).
  - A repacked read checks the buffer first. A hit is answered from the SRAM; a miss goes on to the VCS.
  - A row returning from a device is offered to the buffer. The address profiler counts accesses per row. The row replaces the resident one only if its count is higher (HTR).
- **Memory indexing and migration.** 4 KB pages are interleaved over the downstream ports.
  - A migration command moves a page line by line: read 64 bytes, write them to the same offset of the destination page, then record progress in the remap table.
  - Reads to migrated lines go to the destination. Reads to the line in flight are held in the VCS while other requests pass.

## Verification

Every block has its own self-checking testbench, `tb/tb_<block>.sv`. `type3_model.sv` is a behavioural CXL memory device used by the system tests.

`tb_pifs_switch` tests the whole switch with four device models. It runs at reduced sizes: 4 KB buffer, 8-entry IIR, swap depth 2.

`tb_pifs_switch_full` runs the same test on the switch at its default sizes. It takes about ten seconds of simulation.

Both system tests:
- Run SLS batches with rows in random order.
- Compare every result with a reference. Weights are powers of two and data are small integers, so sums are exact in any order.
- Mix in standard reads.
- Turn spilling off to force back-pressure.
- Migrate a page while reading it.
- Require each mechanism to occur at least once: bypass, PIFS instruction, buffer hit, fill, HTR rejection, swap, spill, back-pressure, DataValid, migration, lock stall and remapped read.

### Running a test

Any testbench builds with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  --top-module tb_pifs_switch \
  rtl/pifs_pkg.sv rtl/fp32_pkg.sv tb/tb_fp_pkg.sv tb/tb_pifs_switch.sv -o sim
obj_dir/sim +verilator+rand+reset+2
```

- Put the name of another testbench in place of `tb_pifs_switch`.
- Each run prints `TB_RESULT checks=N failures=M` and ends.
- Variables start at random values, so reset behaviour is exercised too.

### How far to trust it

- The arithmetic, the bookkeeping and every handshake have been checked in simulation: by the block tests, and end to end at both sizes with random orders and stalls.
- Each block test was also run against a deliberately broken copy of its block, and it detected the fault.
- Nothing has been run through timing closure. The FP32 multiply-add handles one 16-byte chunk per cycle, all combinational. At the 1 GHz the paper assumes, it would need pipelining.
- The 512 KB buffer is written as a plain array. A real implementation would map it to SRAM macros.

## Relation to the paper

Taken from the paper:
- The block list and data flow of the switch.
- The instruction fields and opcodes, and the 6-bit SumTag (64 SumTags).
- The 16-byte granule and 8 vector sizes.
- Repacking of MemOpcode and SPID, and DataValid.
- SumCandidateCount counting down to zero, CapacityCounter, and back-pressure.
- The swap register, and spilling to SRAM controlled by the FCR, with SRAM access of at least two cycles.
- HTR with an address profiler.
- The 512 KB buffer and four devices (the default evaluation point).
- Line-granular locking during page migration.

This design's own choices (the paper does not give them):
- All depths and sizes other than the above: IIR 32, swap register 4, spill store 64 rows, profiler 1024 entries, queues 4, remap table 8.
- Direct-mapped buffer organisation.
- FP32 rounding: round to nearest even, subnormals flushed to zero.
- Weight position in the data slot, and the MemRd encoding 0001b.
- Switch and migration-controller IDs.
- Routing responses by DPID, and round-robin arbitration.
- The interleaving granule.
- The lock and remap mechanics.
- The command ports for migration and for the FCR.

Differences from the paper:
- The paper moves the partial sum to the swap register in half a cycle. Here the exchange is a full-cycle register swap with no stall.
- The paper lets partial sums sit in the buffer SRAM itself. Here the spill store is a separate array with the same two-cycle access. It does not take space from the row cache.
- The paper mentions a swap region shared among several process cores. This switch has one process core.
- Rows longer than 128 bytes, such as Table 1's 64- and 128-element FP32 rows, do not fit one DataFetch. The host splits them into 128-byte pieces under separate SumTags.
- These parts are not built:
  - The scale-up mechanism across several switches: the forward controller, the scheduler and Sub-SumCandidateCount.
  - Host-side monitoring of polluted addresses.
  - Host snooping of the result address. The D2H result is an output port.
  - The fabric manager, PHYs, PPB/vPPB binding and the host's page-management software. The page-management software decides which pages to migrate; here it is represented by the migration command port.

## Workload sizes

Sizes from the paper (Table 1, Sec. IV-C):

| workload | table size |
|---|---|
| RMC1 | 16384 × 64 FP32 = 4 MB |
| RMC2 | 131072 × 64 = 32 MB |
| RMC3 | 1048576 × 64 = 256 MB |
| RMC4 | 1048576 × 128 = 512 MB |

The default evaluation point is batch 8 over four devices with a 512 KB buffer.

- The tables live in the devices. The switch only caches hot row pieces: 4096 pieces of 128 bytes at 512 KB.
- A 64-element row needs two SumTags and a 128-element row needs four.
- With batch 8, RMC4 keeps 32 SumTags live, within the 64 the ACR holds.
- The buffer sweep from 64 KB to 1 MB is a parameter change (BUF_BYTES).
