# Zonl48dobu: a RISC-V compute cluster datapath without loop or memory stalls

A cluster of small RISC-V cores with shared L1 memory can run matrix
multiplication at close to one floating-point operation per core per cycle,
but only if two things never get in the way:

* **loop control.** A hardware repeat instruction can replay the innermost
  loop body without fetching it again. Every outer loop, however, still costs
  integer instructions, and the FPU waits for them.
* **memory.** Each core streams two operands per cycle out of a banked
  scratchpad (TCDM). A DMA engine refills the next data tile with wide
  512-bit bursts at the same time. When a burst lands on a bank a core also
  wants, one of the two must wait.

This repository holds SystemVerilog for the two mechanisms that remove these
stalls, assembled into the datapath of an 8-core cluster:

1. A **loop-nest sequencer** (`frep_sequencer`) sits between each integer
   core and its FPU. It accepts a whole nest of `frep.o` loops, each
   configured by one instruction. It stores the loop bodies once in a ring
   buffer and then issues the nest by itself at one instruction per cycle.
   This holds for imperfect nests too (instructions before or after an inner
   loop), and when several loops start or end on the same instruction.
2. A **double-buffering-aware TCDM** (`zc_tcdm`). It has 96 KiB in 48 banks,
   split into two *hyperbanks* of 24 banks. The cores compute out of one
   hyperbank while the DMA fills or drains the other. Because the two never
   share a bank, core and DMA requests cannot collide.

`zonl48dobu_cluster` is the top: 8 sequencers and the TCDM. The integer
cores, FPUs, stream registers (hardware address generators that turn
register reads and writes into TCDM accesses) and the DMA engine are outside
it. The top's ports are their interfaces, and the testbenches model them.

## Parameters at a glance

| Quantity | Value | Origin |
|---|---|---|
| Compute cores | 8, with 3 64-bit TCDM ports each | paper |
| Core ports into the TCDM | 25 (24 compute + 1 data-mover core) | paper's interconnect figure; the use of the 25th port is an interpretation |
| TCDM | 96 KiB; 48 banks × 256 words × 64 bit | paper |
| Hyperbanks | 2 × 24 banks | paper |
| Superbank | 8 adjacent banks = one 512-bit DMA beat; 3 per hyperbank | paper |
| DMA port | 512 bit, one superbank row per beat | paper |
| Loop nest depth `N` | 4 | own choice; the paper leaves it a design-time parameter |
| Ring buffer depth | 32 instructions | own choice; not given in the paper |
| TCDM latency | grant in the request cycle, response one cycle later | own choice |

## 1. The loop-nest sequencer

### What the core sends

The integer core offloads every floating-point instruction to the
sequencer, through a valid/ready port (`inp_*`) that carries the
instruction and the value of its integer source register (`op_a`). The
decoder sorts each instruction into one of three groups:

* **FREP** (`frep.o`). It opens a loop. Bits 31:20 hold the body length
  minus one, and the integer register named by rs1 holds the iteration count
  minus one. Bit 7 marks `frep.o`; `frep.i` and the stagger fields are not
  supported and are treated as ordinary instructions.
* **Loop-capable.** Pure FP arithmetic: the FMA family and every OP-FP
  instruction that neither reads nor writes an integer register. These go
  into the ring buffer.
* **Direct.** Anything touching the integer register file: FP loads and
  stores (integer base address), compares, classify, integer conversions,
  `fmv.x.d` and `fmv.d.x`. These bypass the ring buffer. To keep program
  order, a direct instruction passes only when the sequencer is idle: the
  ring buffer is empty and no loop is configured. Until then it waits.

The sequencer's output (`oup_*`) goes to the FPU, one instruction per
handshake.

### Ring buffer and pointers

The ring buffer (`frep_ring_buffer`) has three pointers, each one bit wider
than the address so that full and empty can be told apart:

* `wptr` is where the next loop-capable instruction is written;
* `raddr` is the next instruction to issue;
* `tail` is the oldest entry that may still be needed.

The buffer issues whenever `raddr != wptr`, and accepts a write while
`wptr - tail < Depth`. While a nest is active, `tail` is the base of the
outermost loop, so no loop body is overwritten before its last rewind. With
no nest, `tail` follows `raddr` and the buffer is a plain FIFO.

Issue does not wait for a whole body to arrive. If the core is slower than
the FPU, the sequencer simply runs empty for a cycle.

### Loop slots and counters

Each FREP is stored, in arrival order, in one of `N` slots. A slot holds the
loop's configuration and `base_ptr`, the write pointer at the moment the
FREP arrived, which is the address of the loop's first body instruction.
`loop_cnt` counts the configured slots, so the nest grows dynamically as
FREPs arrive. Slot 0 is the outermost loop.

Each slot has a loop controller (`frep_loop_ctrl`) with two counters:
`inst_cnt` (position in the body) and `iter_cnt` (iteration). It flags
`last_inst` and `last_iter`.

Loop *i* is *entered* when the read pointer has reached its base. The
sequencer keeps `loop_idx`, the number of loops entered around the current
instruction; this is the paper's "active loop" index plus one, so 0 means
outside all loops.

### What happens on each issued instruction

On every issue (`seq_next`), the nest controller (`frep_nest_ctrl`) works
out in the same cycle:

1. **Which loops contain the instruction.** The *starting-loops detector*
   looks at slots from `loop_idx` inwards. The run of slots that are either
   already entered or whose `base_ptr == raddr` gives `isl`: the number of
   loops around the instruction, including all those starting on it. This
   is a trailing-ones count, so any number of loops can start on one
   instruction.
2. **Which loops advance.** Loop *i* counts the instruction only if it
   contains it and every inner loop that contains it is in its last
   iteration. An instruction inside an inner loop is thus counted once by
   the outer loop, on the inner loop's final pass.
3. **Which loops end.** A loop ends on this instruction when it is both at
   its last instruction and in its last iteration. The *ending-loops
   detector* finds the highest loop that does *not* end. `inel` is the
   number of loops that stay open. If none stay open, the nest ends: all
   slots are cleared and `loop_cnt` returns to 0.
4. **Where to read next.** If loop `inel` (the innermost loop still open) is
   at its last body instruction, the read pointer jumps back to that loop's
   `base_ptr` (a *rewind*). Otherwise it steps forward by one. `loop_idx`
   becomes `inel`.

All four steps are combinational from registered state. The sequencer
therefore issues one instruction per cycle through every loop boundary,
rewinds included.

### FREPs that cannot be nested yet

An FREP is held back (`frep_stall_o`) in three cases:

* all `N` slots are in use;
* the FREP would lie after the end of the innermost configured loop's body.
  It is then a sibling of that loop, not a child, and must wait until the
  current nest ends;
* it arrives in the very cycle the nest ends.

The matmul kernel below relies on this: the next tile's nest is offloaded
while the current one is still running, and waits.

### The matmul kernel as a nest

A C = A·B tile, unrolled 8 times over the columns of C, is one two-level
nest with a 24-instruction body:

```
frep.o  rOuter, 24      # rows x column-blocks
  fmul.d  c0..c7, ftA, ftB          # first k
  frep.o  rInner, 8     # k = 1 .. K-2
    fmadd.d c0..c7, ftA, ftB, c0..c7
  fmadd.d ft2 <- ftA*ftB + c0..c7   # last k, result streamed to C
```

The operands come from stream registers: ftA yields A[m][k] eight times,
ftB walks B, and writing ft2 stores C. With this nest the core issues 27
instructions per tile, and the FPU then works without a bubble between
column blocks, between rows, and between tiles.

## 2. The double-buffering-aware TCDM

### Address map

A TCDM address is a 17-bit byte address.

* **Bit 16 selects the hyperbank.** Each hyperbank therefore owns a 64 KiB
  window, of which the lower 48 KiB are populated.
* **Inside a window**, 64-bit word *w* (address bits 15:3) lives in bank
  `w mod 24`, row `w div 24`.
* **Superbanks.** Banks 0–7, 8–15 and 16–23 of each hyperbank form its three
  superbanks. A 64-byte-aligned address is one full row of one superbank,
  which is what the DMA moves per beat.

The choice of the top bit for the hyperbank and interleaving within a
hyperbank follow the paper. The 64 KiB window and the modulo-24 arithmetic
are this design's choice: the paper does not say how a non-power-of-two
hyperbank is addressed.

### Core branch

`core_xbar` is a 25×24 crossbar.

* **Routing.** Each port's word index picks one of the 24 bank positions.
* **Arbitration.** Each position runs its own round-robin arbiter: the
  lowest requesting port above the last winner wins, else the lowest
  requesting port.
* **Grant and response.** A port is granted in the cycle its request wins,
  and its response (read data, or an acknowledge for a write) returns on the
  following cycle.

Behind each crossbar output, a 1-to-2 demux (`hb_demux`) steers the request
to bank *j* of hyperbank 0 or 1 by the address MSB. It registers the choice
so the response comes back from the right side.

Because the demux stage sits after the crossbar, the crossbar is only as
wide as one hyperbank. Two cores that want bank *j* of different hyperbanks
still compete for the same crossbar output.

### DMA branch

`dma_xbar` decodes the 512-bit request's row and superbank index (0–2). A
512-bit `hb_demux` per superbank index then picks the hyperbank. A DMA beat
therefore reaches exactly one of the six superbanks.

### Where the branches meet

Each of the six superbanks has a `superbank_mux` in front of its 8 banks.

* **Without contention.** Core lanes pass straight through, and a DMA beat
  takes all 8 banks.
* **With contention.** When the DMA and any core lane want the same
  superbank in the same cycle, the mux raises `conflict`. It gives either
  the DMA or all the cores the cycle, alternating between the two after
  every contended cycle. The DMA never takes fewer than all 8 banks.

Conflicts are possible only in a superbank that both the cores and the DMA
address. If software keeps the computing tile in one hyperbank and the DMA
in the other, as double buffering does, `conflict` stays low and neither
side ever waits for the other. Conflicts among the cores themselves are
unaffected; they depend on the data layout.

### Banks

`tcdm_bank` is a single-ported 256 × 64-bit array with byte strobes. A read
returns its data one cycle after the request. It is a behavioural array with
no SRAM macro and no reset of its contents.

## 3. Top level: `zonl48dobu_cluster`

| Port group | Per | Meaning |
|---|---|---|
| `inp_*` | core | offloaded instructions from the integer core: valid/ready, `instr`, `op_a` |
| `oup_*` | core | instructions to the FPU: valid/ready, `instr`, `op_a` |
| `seq_*` | core | status: busy, rewind, nest end, FREP stall, active loop index |
| `tcdm_*` | port (25) | TCDM request valid/gnt and request struct; response valid and data |
| `dma_*` | — | one 512-bit TCDM port with the same handshake |
| `sb_conflict_o` | superbank (6) | DMA and cores contended for a superbank this cycle |

Core *c*'s stream registers use ports 3c, 3c+1 and 3c+2. Port 24 belongs to
the data-mover core. All sequential logic is on the rising edge of `clk_i`,
with an asynchronous active-low reset on `rst_ni`.

## 4. How far the RTL can be trusted

Each block has a self-checking testbench in `tb/`. Each testbench was also
run against a copy of its block with one deliberate bug, and it caught the
bug in every case.

| Testbench | What it shows |
|---|---|
| `tb_frep_sequencer` | Directed nests: loops that start or end together, a one-instruction innermost body, and the 24-instruction matmul body. Then random nests of 1–3 levels, with random trip counts, body sizes, and instructions before and after inner loops. Some programs put a second nest right behind the first, so that FREP stalls occur. The issued stream is compared against a software expansion of the nest, both with an FPU that stalls at random and with one that is always ready. In the always-ready runs, one issue per cycle is checked across every loop boundary once the nest is buffered. The core model offers instructions back to back. |
| `tb_frep_nest_ctrl`, `tb_frep_loop_ctrl`, the two detector testbenches | Each control block against a reference model, exhaustively or over random inputs. |
| `tb_core_xbar`, `tb_dma_xbar`, `tb_hb_demux`, `tb_superbank_mux`, `tb_tcdm_bank` | Routing, data and one-cycle responses, fairness (no port waits more than 24 cycles under full load), and the DMA all-or-nothing rule. |
| `tb_zc_tcdm` | Whole TCDM against a memory model under random traffic from all 25 ports and the DMA. With the DMA in the other hyperbank: no conflicts, no core waiting on the DMA, and a DMA beat every cycle. With the DMA in the same hyperbank: conflicts appear and both sides are slowed. |
| `tb_zonl48dobu_cluster` | End to end at default parameters. Two FP64 32×32×32 matmul tiles run on all 8 cores through their sequencers and the TCDM, with the DMA double-buffering. Every C element is compared bit-exactly against a reference. Tile 0, with the DMA in the other hyperbank, runs at 100% FPU utilisation with zero conflicts. For contrast, tile 1 lets the DMA read the cores' own hyperbank: about 8000 conflicts, and utilisation falls to about 63%. |

The FPU, stream registers and DMA in these testbenches are simple
behavioural models. The FPU finishes every instruction in one cycle. The
stream registers have 4-entry FIFOs and a fixed access order. The DMA
issues one beat per cycle. The measured utilisation is therefore that of
this datapath with ideal neighbours, not of a full cluster.

## 5. Departures from the paper and open points

* **The cores, FPUs, stream registers, DMA engine, instruction caches and
  SoC crossbar are not here.** The paper reuses them from earlier work and
  does not describe them.
* **Nest depth `N` = 4 and ring-buffer depth 32 are guesses.** The paper
  gives neither.
* **The FREP encoding follows the original Snitch `frep.o` layout**, as the
  paper says it keeps it: body length − 1 in bits 31:20, iterations − 1 in
  rs1. `frep.i` and stagger are not implemented.
* **Rewind condition.** The paper's text names `last_iter[inel]` as the
  rewind condition while describing it as "last instruction". This design
  rewinds when the innermost open loop is at its last instruction, which is
  the reading that produces correct loops.
* **Crossbar size.** The paper's interconnect figure shows the 64-bank
  variant (25-to-32 crossbar, 1-to-4 DMA crossbar, four 512-bit demuxes).
  This design is the 48-bank variant: 25-to-24, 1-to-3, three demuxes.
* **Arbitration.** Round-robin in the crossbar and at the superbank muxes,
  and the single-cycle TCDM timing, are this design's choices.
* **The conflict-free data layout is software.** In the end-to-end test,
  each matrix sits in its own superbank, skewed by one bank per row so that
  the eight cores hit different banks. The hardware neither requires nor
  enforces this.

## 6. Simulating

Everything needs only Verilator 5 with timing support. For example:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/zonl_pkg.sv tb/zonl_tb_pkg.sv tb/tb_zonl48dobu_cluster.sv \
    --top-module tb_zonl48dobu_cluster
./obj_dir/Vtb_zonl48dobu_cluster +verilator+rand+reset+2
```

Every testbench prints one line `TB_RESULT checks=N failures=M` and stops
on its own; a watchdog turns a hang into a failure. To change the cluster,
edit the constants in `rtl/zonl_pkg.sv` (bank count, superbank width, words
per bank) or the parameters of `zonl48dobu_cluster` (nest depth, ring-buffer
depth).
