# Warp processing hardware for a MicroBlaze soft-core system

A soft processor built in FPGA logic is slower and uses more energy than a hard
processor core. *Warp processing* closes much of that gap while the program runs,
and the program itself does not change. An on-chip profiler finds the hottest
loop. A second, small processor (the *dynamic partitioning module*, DPM)
decompiles that loop and turns it into a circuit. It loads the circuit into
configurable logic, then patches the program binary so the next run of the loop
goes to the circuit. The circuit sits in a *warp configurable logic
architecture* (WCLA). The WCLA also holds fixed hardware that every such loop
needs: an address generator that walks the loop's arrays in memory, a loop
controller, three operand/result registers and a 32-bit multiply-accumulator.

This RTL is the hardware of that system, around one or more MicroBlaze cores:

* per processor:
  * the LMB memory controllers and dual-ported BRAMs for instructions and for data;
  * the branch profiler;
  * a WCLA slice.
* shared: the BRAM Interface, through which the DPM reaches each processor's
  instruction memory.

The processors, the DPM (a processor running software) and the configurable
fabric itself are not included. Their connections are the ports of the top
module, `warp_processor`.

The published description of this system is at block-diagram level. It gives
the blocks, their connections, and a sentence or two on what each does. Almost
every protocol, register layout, width and schedule below is this design's own
choice. Those choices are marked as such where they appear, and listed in the
last section.

## System organisation

```
            i_lmb ──┬── lmb_cntrl ── Instr. BRAM (port A)
 MicroBlaze         │                Instr. BRAM (port B) ── BRAM Interface ── DPM port
  (ports)           └── profiler ──────────────────────────────────────────── DPM port
            d_lmb ───── lmb_cntrl ── Data BRAM (port A)
                                     Data BRAM (port B) ── WCLA: DADG & LCH
            opb ────────────────────────────────────────── WCLA: OPB slave
                                                           WCLA: config port ── DPM port
                                                           WCLA ⇄ fabric ports
```

`NUM_CORES = 1` (the default) is the single-processor warp processor. This is
the main system and the one whose speed and energy were measured. With
`NUM_CORES > 1` each processor gets its own memories, profiler and WCLA slice.
All processors share one DPM through the BRAM Interface and the core-indexed DPM
ports. They also share the fabric, which sits outside the RTL.

| module | role |
|---|---|
| `warp_pkg` | LMB/OPB bus structs, WCLA register map, channel mode bits, profiler entry type |
| `lmb_cntrl` | LMB to BRAM controller |
| `dp_bram` | true dual-port BRAM (instruction and data memories) |
| `profiler` | backward-branch frequency cache on the instruction LMB |
| `bram_interface` | the DPM's select-and-access path into instruction BRAMs |
| `wcla` | one WCLA slice: register file, OPB slave, DADG/LCH, Reg0-2, MAC |
| `wcla_opb_slave` | OPB transfers to WCLA register accesses |
| `dadg_lch` | data address generator with loop control hardware |
| `wcla_regs` | Reg0, Reg1, Reg2 |
| `wcla_mac` | 32-bit multiplier-accumulator layer |
| `warp_processor` | top |

## How a loop moves into hardware

1. **Profiling.** The profiler watches every instruction fetch on i_lmb. A fetch
   to a lower address than the fetch before it counts as a taken backward
   branch, the signature of a loop. The previous address is the branch (`src`)
   and the new one is the loop head (`tgt`). A small fully associative cache
   (16 entries, tagged by `src`) counts how often each branch is taken:
   * on a miss it replaces the least-counted entry, using a free entry first;
   * when a 16-bit counter would overflow, every counter is halved instead, so
     the counts keep their order.

   The profiler only observes the bus and never stalls the processor.
2. **Selection and decompilation (DPM, software).** The DPM reads the profiler
   entries (`prof_core`, `prof_idx` → `prof_entry`) and picks the most frequent
   loop. It then reads that loop's code out of port B of the processor's
   instruction BRAM, through the BRAM Interface (`bi_sel_*`, `bi_*`).
3. **Configuration.** The DPM writes the loop's access pattern and MAC setting
   into the WCLA slice's registers (`wc_*`). It also loads the synthesised
   circuit into the fabric, which is outside this RTL.
4. **Patching.** The DPM overwrites instructions of the loop through the BRAM
   Interface. The processor's next fetch of the loop sees the new code, which
   now hands the loop to the WCLA.
5. **Hardware execution.** Over the OPB, the patched code:
   * writes the run-time values (iteration count, array bases);
   * writes `CTRL.start` and polls `STATUS`;
   * reads the results (the accumulator or a register).

   Meanwhile the WCLA works on the processor's data through port B of the data
   BRAM.

## The WCLA slice

This is the largest part of the design and the one with the most design choices.

### Data path

```
 data BRAM port B ⇄ DADG & LCH ──mem_data──► Reg0  Reg1  Reg2 ◄── fab_out[0..2] (dedicated bus)
                        ▲                     │     │     │
                        │                  ┌──▼─────▼─────▼──┐
                        │                  │  32-bit MAC     │  out[i] = Reg i, or acc + a*b on one slot
                        │                  └──┬─────┬─────┬──┘
                        │                  fab_in[0] [1]   [2] ──► configurable fabric (outside)
                        └──────────────────────────────────────── fab_exit
```

Each of the three registers serves one array of the loop (one *channel*).
A channel's mode has three independent bits:

* `M_RD`: at the start of every iteration, load the register from memory at the
  channel's current address.
* `M_FAB`: in the execute cycle, load the register from the fabric's result bus.
* `M_WR`: at the end of every iteration, store the register to memory at the
  channel's current address.

After each iteration, every channel address advances by its signed byte stride.
This covers the "regular access patterns" the address generator is meant for:
unit stride, column walks (stride = row length), descending walks, and in-place
updates (read, fabric, write on one channel).

The MAC layer passes the three register values to the fabric unchanged. When
it is enabled, one output (`slot`) instead carries `acc + Reg[sel_a] * Reg[sel_b]`.
That is the low 32 bits of the product, added with wrap-around. The value is
combinational, so the fabric sees this iteration's sum, and it is committed to
`acc` in the execute cycle. A dot product therefore needs no fabric logic at all.

### Loop schedule and timing

One iteration is a fixed sequence:

| phase | cycles | what happens |
|---|---|---|
| RD | reads + 1 (1 if no reads) | one BRAM read per `M_RD` channel, lowest first; each word lands in its register one cycle later |
| EXEC | 1 | MAC step; `M_FAB` registers take `fab_out`; `fab_exit` is sampled |
| WR | writes | one BRAM write per `M_WR` channel, lowest first |

An iteration therefore takes **reads + writes + 2 cycles**. A run of N
iterations keeps `busy` high for exactly N × (reads + writes + 2) cycles. This
count can be read back as `CYCLES`, and the testbenches check it. The loop stops
in two ways:

* after `ITERS` iterations;
* after the iteration in which the fabric raised `fab_exit`, if `LOOPCFG[0]` is
  set. This is the fabric-to-loop-controller line of the original block diagram.

`ITERS = 0` finishes at once. `ITDONE` gives the number of iterations run.

The schedule is sequential, not pipelined. It uses a single BRAM port and
assumes the fabric settles within one cycle. The original gives no cycle-level
behaviour for the WCLA. A pipelined address generator would reach about one
iteration per cycle for single-array loops, but it would be an invention on top
of an invention.

### Register map

Each slice has one 32-word register file. The OPB reaches it at byte offset
4 × index from `WCLA_BASE` (default `0x8000_0000`, a 128-byte window), and the
DPM reaches it with `wc_addr` = index.

| index | name | access | meaning |
|---|---|---|---|
| 0 | CTRL | W | bit 0: start (ignored while busy) |
| 1 | STATUS | R | bit 0: busy, bit 1: done (set when a run ends, cleared by start) |
| 2 | ITERS | R/W | iteration count |
| 3 | LOOPCFG | R/W | bit 0: also stop on `fab_exit` |
| 4 | ACC | R/W | MAC accumulator (write to clear or preset) |
| 5 | MACCFG | R/W | bit 0 enable, [2:1] `sel_a`, [4:3] `sel_b`, [6:5] output slot (3 acts as 2) |
| 6 | CYCLES | R | busy cycles of the last run |
| 7 | ITDONE | R | iterations of the last run |
| 8+4c | BASE c | R/W | channel c start byte address |
| 9+4c | STRIDE c | R/W | channel c signed byte stride |
| 10+4c | MODE c | R/W | bit 0 `M_RD`, bit 1 `M_FAB`, bit 2 `M_WR` |
| 11+4c | VALUE c | R/W | Reg c (write presets, read returns the result) |

If the DPM port and the OPB try to use the register file in the same cycle, the
DPM wins and the OPB transfer waits a cycle.

## Bus behaviour

* **LMB** (`lmb_cntrl`): the BRAM is enabled in the `addr_strobe` cycle when the
  address is in `[BASE, BASE + 4·DEPTH)`. `ready` and the read data follow one
  cycle later. A new access may start every cycle. `dbus` is zero while `ready`
  is low.
* **OPB** (`wcla_opb_slave`): the master holds `select` until `xfer_ack`. The
  slave acknowledges exactly once, at the earliest one cycle after the access.
  Outside the ack cycle `dbus` is zero, so the response can be ORed with other
  slaves. An assertion checks that a waiting master keeps `select` high.
* **BRAM Interface**: `sel_we`/`sel_in` sets the core (out-of-range values are
  ignored). DPM accesses go to that core's instruction BRAM, port B. Read data
  arrives one cycle later. It comes from the core that was accessed even if the
  select changes in the meantime.

All buses use little-endian `[31:0]` vectors, not the vendor's `[0:31]`. There is
one clock and an asynchronous active-low reset (`rst_n`).

## Sizes and parameters

| parameter | default | source |
|---|---|---|
| data width | 32 | the MicroBlaze is a 32-bit core; the MAC is 32-bit |
| registers per WCLA slice | 3 | given (Reg0-Reg2) |
| `NUM_CORES` | 1 | single-processor system; the multi-processor figure shows 2 |
| `IMEM_DEPTH`, `DMEM_DEPTH` | 2048 words (8 KB each) | own choice (sizes are "user defined") |
| `PROF_ENTRIES` | 16 | own choice ("a small cache") |
| `PROF_CNT_W` | 16 | own choice |
| `IMEM_BASE`, `DMEM_BASE` | 0 | own choice |
| `WCLA_BASE` | `0x8000_0000` | own choice |

## Evaluated workloads

The system was evaluated on six Powerstone/EEMBC programs: brev, g3fax, canrdr,
bitmnp, idct and matmul. For each, the single most critical loop was moved to
hardware. The reported average speedup is 5.8× (16.9× for brev, where the bit
reversal becomes pure wiring) and the average energy reduction is 57%. Those
numbers depend on the fabric and the partitioning tools, neither of which is
here. The RTL can hold any such kernel whose loop:

* touches at most three arrays;
* walks each array with a constant stride;
* uses at most one multiply-accumulate.

The data must fit the 8 KB data BRAM. The array sizes of these benchmarks are
not stated, so whether each one fits cannot be decided from the available
information. Only two kernels are described well enough to run. `tb_workloads` runs both on
the default system:

* **matmul**: a 16×16 matrix product. Each element of C is one WCLA run of 16
  iterations at 5 cycles each. Reg0 walks a row of A and Reg1 a column of B,
  and the MAC accumulates. The running sum goes through the fabric (plain wires
  here) to Reg2, which is stored to C[i][j] with stride 0. A product of size N
  needs 3N² words, so N ≤ 26 fits the default data BRAM.
* **brev**: in-place bit reversal of 1024 words at 4 cycles per word. One channel
  reads, takes the fabric's reversed word and writes it back.

The end-to-end tests also run a data-dependent search loop, to exercise the
fabric-ended loop exit. Nothing is known about the inner loops of g3fax,
canrdr, bitmnp and idct, so they are not modelled.

## Simulation

Every testbench is self-checking. Each prints `TB_RESULT checks=N failures=M`
and has a watchdog. With plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_warp_processor \
    rtl/warp_pkg.sv tb/tb_warp_processor.sv -o sim
./obj_dir/sim
```

Name the package and the testbench; `-Irtl` lets Verilator find every module
by its file name. `-Wno-fatal` keeps width warnings in the testbenches from
stopping the build.

| testbench | covers |
|---|---|
| `tb_dp_bram` | random two-port traffic against a reference array; read-first, byte enables |
| `tb_lmb_cntrl` | word/byte writes, reads, out-of-window accesses, back-to-back reads, ready timing |
| `tb_profiler` | loop traces against a reference model of the cache; replacement, halving, enable, clear |
| `tb_bram_interface` | three cores' memories; port steering; read data following the accessed core |
| `tb_wcla_mac` | pass-through, slot substitution, accumulation, accumulator load |
| `tb_wcla_regs` | load priority |
| `tb_dadg_lch` | random loops against a reference model; memory, registers, iteration and cycle counts, fabric exit |
| `tb_wcla_opb_slave` | OPB handshake with the register grant withheld at random |
| `tb_wcla` | dot product, bit reversal and search through the register map; DPM/OPB collision |
| `tb_warp_processor` | the whole warp sequence at default parameters (see below) |
| `tb_warp_processor_mp` | the same on two cores at once, sharing the DPM ports |
| `tb_workloads` | whole matmul (16×16) and brev (1024 words) kernels on the default system |

`tb_warp_processor` runs the top at its default parameters:

* it loads a binary through the BRAM Interface and data through d_lmb;
* it replays a fetch trace with a hot loop taken 66,000 times, plus more
  distinct loops than the profiler has entries;
* it then plays the DPM: it finds the hot loop in the profiler, reads the loop's
  code and patches it, and checks that the processor fetches the patched word;
* it runs the three kernels through the OPB and checks results, cycle counts and
  a DPM/OPB register-file collision.

It counts each mechanism (backward branch, hit, replacement, counter halving,
BRAM Interface read and write, patched fetch, DADG read and write, MAC step,
fabric load, both loop-exit kinds, OPB stall), and a mechanism that never
happened is a failure. The run takes well under a second of host time.

## Departures from the original description, and open points

* **Caches or BRAM.** The text describes the main processor "with instruction
  and data caches", but the block diagrams show LMB controllers and BRAMs.
  The BRAMs are built here.
* **One clock.** The original runs the MicroBlaze at 85 MHz and the other
  circuits at up to 250 MHz. This design uses one clock throughout.
* **Register chain in the WCLA figure.** The figure draws arrows from the
  address generator into Reg0, then Reg1, then Reg2. Here that is read as a data
  bus reaching each register, not as a shift chain. The text says each array's
  data sits in one of the registers.
* **Profiler internals.** Only the behaviour (backward branches counted in a
  small cache) is given. The entry count, tagging, replacement and counter
  halving follow the usual design of such loop profilers, not a specification.
* **WCLA programming model.** The register map, start/poll protocol,
  channel modes, schedule and MAC operand selection are all this design's own.
* **Not built:** the MicroBlaze, the DPM and its partitioning software, the
  configurable logic fabric, the OPB bus itself and the example peripherals.
  Testbenches model the processor as a bus-trace player, the DPM as tasks, and
  the fabric as a few fixed behavioural circuits.
