# Fast parallel self-diagnosis for distributed small embedded SRAMs

A chip with many small embedded SRAMs scattered over the die has two test
problems. Each memory is too small to justify its own self-test engine, so one
shared engine has to reach all of them. And the memories have to be *diagnosed*,
not just tested: every faulty cell has to be located for repair or failure
analysis, at a defect rate high enough that a scheme which finds one fault per
pass of the test becomes very slow.

This design shares a single built-in self-diagnosis (BISD) controller among all
memories and keeps the wiring between them to a few global signals. The core
idea is **serial delivery, parallel application, serial observation**:

* a test word is sent to every memory one bit at a time on one wire, and a small
  serial-to-parallel converter (SPC) next to each memory holds it as that
  memory's data input for a whole March element;
* each read response is captured in parallel into a parallel-to-serial converter
  (PSC) next to the memory and shifted back to the controller on one wire per
  memory, without passing through the memory array, so one faulty cell never
  hides another;
* the controller compares every returned bit with the expected value. All
  memories are compared in parallel, so every faulty cell of every memory is
  found in **one** run whose length does not depend on how many faults exist.

The test algorithm is March CW (March C- plus intra-word data backgrounds), with
two extra *no-write-recovery* writes that catch data retention faults (open
pull-up transistors in a 6T cell) without the usual long retention pause.

## Block structure

```
                          bisd_top
 +-------------------------------------------------------------+
 |  bisd_controller (one, shared; sized for largest N, widest C)|
 |   control_gen --- address_trigger                          |
 |        |          data_bg_gen                              |
 |        |          comparator_array (one comparator per memory)
 |        |          diag_scanout (FIFOs + serial record port) |
 +--------|----------------------------------------------------+
          |  global wires: spc_shift, spc_sdi, addr_load, addr_step,
          |  addr_dir, mem_cen, mem_we, nwrtm, scan_en
          v                                     ^ psc_so (one per memory)
   esram_node j (one per memory, WORDS[j] x WIDTH[j])
     spc -> [test/functional mux] -> esram <- local_addr_gen
                                       |
                                      psc
```

| Module | Role |
|---|---|
| `bisd_pkg` | record and element types, element list, cycle-count formula |
| `control_gen` | March sequencer: pattern delivery, read/capture/shift, write, NWRTM |
| `address_trigger` | central index k = 0..N-1 of the current element; starts and steps every local address generator |
| `data_bg_gen` | serial pattern bit and expected response bit for any element and bit position |
| `comparator_array`, `comparator` | one comparator per memory, masks bits and addresses the memory does not have |
| `diag_scanout` | per-memory record FIFOs and a serial output of failure records |
| `spc`, `psc`, `local_addr_gen` | the per-memory converters and address counter |
| `esram` | behavioural SRAM with NWRTM write behaviour and fault injection |
| `esram_node` | one memory with its SPC, PSC, address generator and the test/functional multiplexer |
| `bisd_controller`, `bisd_top` | the shared controller and the complete design |

The default configuration is three memories: 512 x 100 (the size used for the
timing estimate below), 384 x 37 and 256 x 64. The two smaller sizes are this
design's choice; they give a memory narrower than the widest one, one whose width
is not a power of two and one with fewer words than the largest, which are the
cases the scheme has to handle.

## The March element list

The controller stores no table: `bisd_pkg::elem_desc()` returns each element's
description. Each element contains at most one read and at most one write (March
C- is written so), and the write is always the same word for every address of
the element. That is what makes the SPC sufficient: the pattern is delivered once,
before the element, and stays in the SPC.

| # | order | operations | purpose |
|---|---|---|---|
| 0 | up | w0 | initialise, solid background |
| 1 | up | Nw1 | no-write-recovery write of 1 |
| 2 | up | r1, w0 | a cell whose node-A pull-up is open still holds 0 here |
| 3 | up | r0, w1 | |
| 4 | up | Nw0 | no-write-recovery write of 0 |
| 5 | down | r0, w1 | a cell whose node-B pull-up is open still holds 1 here |
| 6 | down | r1, w0 | |
| 7 | up | r0 | |
| 8+3k | up | wB_k | intra-word background k |
| 9+3k | up | rB_k, w~B_k | |
| 10+3k | up | r~B_k, wB_k | for k = 0 .. ceil(log2 C)-1 |

Bit i of background k is bit k of the number i, so for C = 100 there are seven
backgrounds (0101..., 0011..., 00001111..., ...) and 29 elements in all. Any two
bits of a word differ in at least one background, which exposes bridges between
bits of one word and column-decoder faults. March C-'s "either order" elements
are run upwards. The ordering of the NWRTM writes (each right before the
element that reads the value it wrote) is this design's reading of "add two
NWRC writes before the normal write"; the element-by-element order of March CW
is not spelled out by the source either.

### Cycle cost and the run length

For the largest memory (N words) and widest memory (C IOs):

* delivering a pattern: C cycles;
* a write: 1 cycle;
* a read: C+1 cycles: the read itself, one capture into the PSC, and C-1 shifts
  while the memory sits idle.

With 5 writes and 5 reads in the March C- part, 3 writes and 2 reads per
background and the two NWRTM writes, a run takes

    T = 5N + 5C + 5N(C+1) + (3N + 3C + 2N(C+1)) * ceil(log2 C) + 2N + 2C   cycles

(`bisd_pkg::run_cycles`). For 512 x 100 that is 998,440 + 1,224 = 999,664 cycles,
9.997 ms at a 10 ns clock. The simulated run length equals this number exactly;
nothing in the run depends on the fault count.

During the C-1 shift cycles the memory is idle and its data inputs (the SPC) and
write enable do not change, so the read-to-write transition of the next
operation is still exercised at speed.

A memory macro without an idle (no-op) mode is handled by building the design
with `MEM_IDLE = 0`: `mem_cen` then stays high with `mem_we` low through the
capture and shift cycles, so the memory keeps reading the same address and the
data is simply not captured. Nothing compared changes and the run takes the same
number of cycles.

## Pattern delivery into SPCs of different widths

All SPCs hang on one serial wire, but the memories have different widths. If the
pattern were sent LSB first into shift registers that move toward the MSB, a
C'-bit SPC would end up holding the *top* C' bits of the C-bit pattern and the
narrow memory would get the wrong background.

The pattern is therefore sent **MSB first** (`data_bg_gen` produces bit `del_idx`
= C-1 down to 0) and every SPC shifts new bits in at bit 0: `q <= {q, sdi}`
truncated to the SPC's width. After C shifts a C'-bit SPC holds exactly bits
C'-1..0 of the pattern, the same low bits the wide memory gets, which is what a
background defined by bit position requires. The SPC has no enable other than
`spc_shift`, and it is shifted only during delivery, so it drives the memory's
data input steadily for the whole element.

## Response path: PSC, comparison strobe and wrap-around

Each PSC is a row of scan flip-flops with a 2:1 multiplexer each and a single
control, `scan_en`. While `scan_en` is low it captures the memory's `dout` on
every clock; while it is high it shifts toward bit 0, filling with 0, and `so` is
always bit 0. Capturing on every clock that is not a shift is harmless, because
only the capture in the cycle right after a read is ever shifted out and
compared, and it keeps the PSC to one global wire. The response leaves LSB
first, and a C'-bit PSC is empty (reads 0) after C' bits while the wide PSCs
still shift; the comparator ignores those bits.

The timing of one read at index k:

| cycle | controller state | memory | PSC | comparator |
|---|---|---|---|---|
| 0 | RD | read addr | - | - |
| 1 | CAP | idle | capture dout | - |
| 2 | SHIFT | idle | shift | compare bit 0 |
| j = 2..C | SHIFT | idle | shift | compare bit j-2 |
| C+1 | next operation | | | compare bit C-1 |

`control_gen` registers a strobe (`cmp_valid`, `cmp_bit`, `cmp_k`, `cmp_elem`)
that is high in the cycle the bit sits on the PSC outputs, so the last compare
overlaps the following write or read; the comparator registers its result and a
failure record appears one cycle after the strobe.

The address trigger counts k from 0 to N-1 for every element and the local
address generators count with it, but a memory with fewer words wraps around
and visits its addresses again. Because March C- reads and then rewrites each
cell, the second visit sees different data from the first. Each comparator knows
its memory's size (a parameter kept in the controller) and ignores every read
with k >= WORDS and every bit >= WIDTH. The failing address is reported as k for
an upward element and WORDS-1-k for a downward one, matching what the local
generator addressed.

## Data retention faults and NWRTM

A 6T cell with an open pull-up PMOS on one storage node holds a 1 (or 0) only
until leakage discharges the node; a normal test would have to wait tens of
milliseconds to see it. In a *no-write-recovery* write cycle the bit lines are
not precharged: the line that should pull the cell high floats at ground and the
other is driven to ground. A good cell flips anyway, through its own cross-coupled
pull-up. A cell without that pull-up cannot raise its node and keeps its old
value, so the next read sees it at once.

`nwrtm` is one global wire from `control_gen`, high for the whole of elements 1
and 4. In the memory it would switch the precharge circuit; that circuit is
transistor level and is not part of this RTL. `esram` models its effect:

* `F_DRF_A` (open pull-up on node A): an NWRTM write of 1 over a stored 0 fails;
* `F_DRF_B` (open pull-up on node B): an NWRTM write of 0 over a stored 1 fails;
* normal writes work on both.

With the element list above a node-A fault is reported only in element 2 and a
node-B fault only in element 5. The model also injects stuck-at-0/1, an
up-transition fault and an AND bridge between two bits of one word; the bridge
shows only in the background elements. In functional mode `esram_node` forces
`nwrtm` low.

## Diagnosis output

Every comparator produces, per detected bit, a record (`bisd_pkg::fail_rec_t`,
33 bits): memory id (4), element (5, which also tells the background and the
expected value), word address (16) and bit position (8). Records leave the
design in two ways:

* **parallel**: `fail_valid[j]` / `fail_rec[j]`, one pulse per faulty bit, for
  on-chip repair logic; `faulty[j]` stays high once memory j had a failure;
* **serial**: `diag_scanout` queues each memory's records in a FIFO of
  `FIFO_DEPTH` entries, picks non-empty FIFOs round robin and sends each record
  MSB first on `diag_so`, with `diag_valid` high for each of its 33 bits. A
  record that meets a full FIFO is dropped and sets the sticky
  `diag_overflow[j]`; `diag_pending` is high while records are still queued.

A comparator can fail at most once per clock, and a record needs 33 clocks to
leave, so a word with many bad bits can overflow the serial path; the parallel
records are complete in every case. The FIFO depth is this design's choice.

## Top-level interface and operation

`bisd_top` parameters: `NUM_MEM` (3), `MEM_WORDS` ('{512,384,256}),
`MEM_WIDTH` ('{100,37,64}), `FIFO_DEPTH` (8), `NF` (fault slots per memory model,
4), `MEM_IDLE` (1: the memories have an idle mode); `N_MAX`, `C_MAX`, `AW_MAX` are derived.

* `bisd` is a level. Its rising edge clears the flags and starts a run; `busy` is
  high during the run; `done` rises after `run_cycles(N_MAX, C_MAX)` cycles and
  stays high while `bisd` stays high; lowering `bisd` returns the controller to
  idle at any time.
* While `bisd` is low every memory belongs to its functional port (`func_cen`,
  `func_we`, `func_addr`, `func_din`, `func_dout`, indexed by memory, sized for the
  largest memory; unused upper bits read 0).
* `sram_faults[j][i]` injects defects into the behavioural memory models.
* Reset is active-low and asynchronous (`rst_n`).

The global wires from the controller to the memories are `spc_shift`, `spc_sdi`,
`addr_load`, `addr_step`, `addr_dir`, `mem_cen`, `mem_we`, `nwrtm` and
`scan_en`, plus one `psc_so` back from each memory.

## How far it follows the source, and where it departs

Taken from the source scheme: one shared controller with control generator,
address trigger, data background generator and comparator array; a local SPC,
PSC and address generator per memory; MSB-first delivery into SPCs; LSB-first
PSC shifting with the memory idle; size information in the controller for
wrap-around; March CW with two NWRTM writes on one global wire; the cycle count
above (it equals the source's formula for the test time plus the two NWRTM
elements); the 512 x 100, 10 ns benchmark size.

This design's own choices or departures:

* The flip-flops of the SPC and PSC run on the system clock; the source draws a
  separate shift clock. `spc_shift` acts as the SPC's clock enable, and the PSC
  needs none (see above).
* A PSC here has C' stages for a C'-bit memory; one of the source's drawings
  labels the register string with C'+1 positions, the text says C' registers.
* The element order, the placement of the NWRTM writes, the fault models, the
  record format, the FIFO scan-out, the level-sensitive `bisd` handshake and the
  smaller memory sizes are not given by the source.
* The source quotes a time-reduction factor over the earlier serial-interface
  scheme of at least 84 without and at least 145 with retention faults. With the
  run length above and its own formulas (k = 96 iterations of the earlier
  scheme's M1 element, 200 ms retention pause) the factors are 84.15 and 143.4.
* The bit-line precharge circuit and the repair logic that would consume the
  parallel records are not implemented.

## Testbenches and simulation

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. Reference values are computed in the
testbench independently of the RTL (for example the expected element list, the
cycle count formula and a reference memory image).

| Testbench | What it covers |
|---|---|
| `tb_spc`, `tb_psc`, `tb_local_addr_gen`, `tb_address_trigger`, `tb_data_bg_gen`, `tb_esram`, `tb_esram_node`, `tb_control_gen`, `tb_comparator_array`, `tb_diag_scanout`, `tb_bisd_controller` | single blocks |
| `tb_bisd_top` | whole design at small sizes (16x8, 12x5, 7x3; FIFO depth 2): two runs, injected faults of every kind, wrap-around, FIFO overflow, functional mode, a second copy built with `MEM_IDLE = 0` that must behave identically, counts of each mechanism |
| `tb_bisd_top_full` | whole design at the default sizes, one complete run (999,664 cycles), checks run length and that injected faults are found |
| `tb_defect_rate` | default sizes with a 1% defect rate: 256 random faults in the 512 x 100 memory and 128 in each smaller one; every faulty cell reported, no false record, run length unchanged, and the reduction factors printed |

Simulating with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl rtl/bisd_pkg.sv \
        $(ls rtl/*.sv | grep -v bisd_pkg) tb/tb_bisd_top.sv --top-module tb_bisd_top
    ./obj_dir/Vtb_bisd_top

The package has to come first. The full-size runs take about a second each.
