# Spatz: a small RISC-V vector unit for a shared-L1 cluster

Spatz is a compact vector co-processor for a tiny RISC-V scalar core. The scalar core fetches
instructions and runs the control flow. Every RVV vector instruction it meets is handed to Spatz,
which does the data-parallel work. The main idea is to keep the vector unit small:

- one centralised vector register file (VRF) that every functional unit shares;
- narrow 32-bit memory ports that plug into the same L1 crossbar the scalar cores use, instead of
  a wide private memory path;
- chaining at the granularity of one VRF word, so that units can work on the same vector at once.

This makes one vector core complex competitive with several scalar cores sharing the same L1
memory.

This repository holds synthesizable SystemVerilog for the default configuration, **Spatz4**:

- four 32-bit multiply-accumulate units (MACUs) and VLEN = 512 bits;
- 32 vector registers, 2 KiB of VRF;
- one core complex in a cluster with 16 KiB of L1 memory in 16 banks.

The scalar core itself, the instruction caches, the DMA engine and the AXI bus are not
included. Their connections are ports of the top module, `spatz_cluster`.

## Block map

```
              X-interface (instructions, rs1/rs2, results)
 scalar core ─────────────┐
                          ▼
                 ┌──── spatz_controller ────┐  decoder, vl/vtype CSRs,
                 │  spatz_decoder           │  scoreboard, dispatch,
                 │  spatz_scoreboard        │  completion reporting
                 └──┬─────────┬─────────┬───┘
                    ▼         ▼         ▼
               spatz_vau  spatz_vlsu  spatz_vsldu
               (4 MACUs)  (4 ports,   (slides)
                    │      ROB)        │
                    └──── spatz_vrf ───┘   4 banks, 3 reads + 1 write each
                               │
 core data port ──┐        4 × 32-bit
                  ▼            ▼
              spatz_addr_demux ──────► external port (in place of AXI)
                      │
              spatz_tcdm_xbar (round robin per bank)
                      │
              16 × spatz_sram_bank (256 × 32 bit)
```

`spatz` wraps the controller, the VRF and the three functional units. `spatz_cluster` adds the
memory system. Shared types and the configuration constants are in `spatz_pkg`.

## The register file and what a "word" is

The whole design is organised around the VRF **word**. A word is 32·N bits, where N is the number
of MACUs: 128 bits in Spatz4. A 512-bit register is four words. Word `w` of register `r` sits in
bank `w` at row `r`, so a word address is `{r, w}` and its two low bits select the bank.

Each bank has three read ports and one write port. That is exactly what `vmacc` needs for one
word per cycle: it reads `vs2`, `vs1` and the old `vd`, then writes `vd`. All three operands of a
given word index live in the same bank.

The functional units have five read ports and three write ports in total:

| port    | unit  | use                    |
|---------|-------|------------------------|
| read 0–2 | VAU  | vs2, vs1, vd           |
| read 3   | VLSU | store data             |
| read 4   | VSLDU | slide source          |
| write 0  | VAU  | result                 |
| write 1  | VLSU | load data              |
| write 2  | VSLDU | slide result          |

Arbitration uses fixed priority in port order. A bank grants at most three reads and one write
per cycle. Reads are combinational: the data comes back in the cycle the port is granted. Writes
land at the next clock edge, under byte enables.

Every unit reads and writes whole words, in increasing word order, and moves one word per cycle
at full rate. Register groups (LMUL = 2, 4, 8) are simply consecutive words.

## Chaining and hazards (`spatz_scoreboard`)

Each unit runs one instruction at a time. The controller records, for the instruction in each
unit, the word ranges it reads and the range it writes. Each unit reports a write pointer: the
address of the next word it will commit. Two rules follow.

- **Read after write: chaining.** A unit's read of word `a` is held back when another busy unit
  is going to write `a` and has not yet done so (`a` is in its write range and `a ≥` its write
  pointer). Held back means the request is not passed to the VRF, so the reader just waits.
  - The moment the producer commits the word, the consumer may read it.
  - So a `vmacc` can start on word 0 of a vector that the VLSU is still loading.
  - This is the "operand back-pressure" that resolves hazards without stalling issue.
- **Write after read / write after write.** A new instruction is not issued while another busy
  unit reads or writes any word the new instruction would write. Issue waits until that older
  instruction ends. This is simpler than tracking these hazards per word, and it is this
  design's choice.

Chaining works only because every producer commits whole words in order. The VLSU's reorder
buffer and the slide unit's word registers are there to guarantee exactly that.

## Functional units

### VAU (`spatz_vau`, `spatz_macu`, `spatz_simd_dp`)

Each MACU handles 32 bits per cycle, whatever the element width. It has four datapaths: one
32-bit, one 16-bit and two 8-bit.

| element width | elements per lane | datapaths used            |
|---------------|-------------------|---------------------------|
| 32 bit        | 1                 | 32-bit                    |
| 16 bit        | 2                 | 32-bit and 16-bit         |
| 8 bit         | 4                 | all four                  |

Each datapath works on operands extended by one bit, so one adder, multiplier, comparator and
shifter serve both signed and unsigned operations.

Supported operations:

- `vadd`, `vsub`, `vrsub`;
- `vand`, `vor`, `vxor`;
- `vsll`, `vsrl`, `vsra`;
- `vmin[u]`, `vmax[u]`;
- `vmul`, `vmulh`, `vmulhu`, `vmulhsu`;
- `vmacc`, `vnmsac`, `vmadd`, `vnmsub`;
- `vmv.v.x/i`.

All come in .vv, .vx and .vi forms where RVV defines them.

Timing: the operands of word `w` are read when all needed ports are granted. The word is
computed combinationally and captured in a result register. The register is written to the VRF
the next cycle, while word `w+1` is read. An instruction of `k` words therefore takes `k + 3`
cycles from handover to its done pulse.

### VLSU (`spatz_vlsu`)

The VLSU has N independent 32-bit memory ports. It supports unit-stride and constant-stride
loads and stores of 8, 16 and 32-bit elements. It picks one of two modes per instruction:

- **Packed mode.** Used for unit stride, or a stride equal to the element size, with a base
  aligned to 4 bytes. Port `p` moves bytes `4p..4p+3` of each word, so the four ports move a
  whole word per cycle. That is 16 bytes for 8 operations per cycle, or 0.5 op/byte.
- **Element mode.** Used for everything else. Port `p` moves elements `p, p+N, …` of each word,
  one access per element.

The ports run independently, so load responses return out of order across ports (still in order
within a port). A reorder buffer of four words collects the bytes. Words are written to the VRF
whole and in order. For stores, the same buffer holds words read from the VRF until every port
has sent its share. A store counts as done when the memory accepts it.

Elements must be naturally aligned. An element that straddles a 32-bit boundary is not
supported.

### VSLDU (`spatz_vsldu`)

The slide unit executes `vslideup`, `vslidedown` and `vmv.v.v`; a move is a slide down by zero.

Because the VRF is centralised, a slide is a byte shift across the whole register group. Write
the slide in bytes as `s = q·WORD_B + r`. Each output word is then a window of two consecutive
source words:

- slide down: bytes `r … r+15` of `{src[w+q+1], src[w+q]}`;
- slide up: bytes `16−r … 31−r` of `{src[w−q], src[w−q−1]}`.

The unit streams the source through two word registers and a barrel shifter. It produces one
word per cycle.

RVV rules are kept:

- on a slide up, elements below the offset are not written;
- on a slide down, sources beyond VLMAX read as zero;
- elements at or past `vl` are never written.

## Controller, instruction interface and memory ordering

The scalar core side is a reduced CORE-V X-interface.

- **Issue.** `x_issue_valid/ready` carries the instruction word, the values of `rs1`/`rs2` and
  an id.
  - In the handshake cycle, `x_issue_accept` says whether Spatz took the instruction.
  - `accept = 0` means it is not a supported vector instruction. Masked instructions, 64-bit
    elements, fractional LMUL, misaligned register groups, and anything while `vtype.vill` is
    set are all refused.
- **Completion.** Every accepted instruction produces exactly one result (`x_result_valid`, id)
  once it has finished. For `vsetvl*` the result also carries the new `vl` for `rd`. This is
  how the core learns that vector work is complete.
- **CSRs.** `vl` and `vtype` live in the controller. Each unit copies the values valid at
  dispatch, so a `vsetvli` never waits for older vector instructions.
  - Unsupported vtypes set `vill` and `vl = 0`.
  - Reset leaves `vill` set.
- **Memory ordering.** Scalar and vector memory accesses are kept in order by stalling each side
  while the other is busy:
  - `x_mem_busy_o` is high while the VLSU executes; the core must hold its own load/store unit
    meanwhile.
  - While `core_lsu_busy_i` is high, vector memory instructions are not dispatched.

A vector instruction is dispatched when all of these hold:

- its unit is idle;
- the unit's previous completion has been reported;
- the scoreboard sees no write hazard.

Because each unit holds one instruction, issue and execution overlap only across different
units.

## Cluster memory system

The cluster has five masters per core complex: the scalar core's data port and the four VLSU
ports.

**`spatz_addr_demux`** sends requests in the L1 range (`0x0000–0x3FFF`) to the crossbar, and
everything else to a single external port.

- The external port is shared round robin.
- Its read responses are routed back through a small FIFO of master ids.
- A master may not switch between L1 and external while it has reads outstanding. Otherwise its
  responses could overtake each other.

**`spatz_tcdm_xbar`** connects the masters to 16 word-interleaved banks: bank = address bits
[5:2].

- Each bank has its own round-robin arbiter, so a conflicting request waits at most four cycles.
- Read data returns one cycle after the grant.

**`spatz_sram_bank`** is a 256 × 32-bit array with byte enables and one cycle of read latency.

## Where this RTL departs from the source design

- **Register file banks** are flip-flop arrays rather than latch arrays. Cycle behaviour is the
  same; area and power are not.
- **Slide unit.** The original slide unit has a general all-to-all permutation network. Here
  only the shifter that slides need is built, and no other permutation instruction exists.
- **Write hazards** stall issue for the whole older instruction instead of per element.
- **Instruction queues.** Each unit holds one instruction, and completion must be reported
  before the next one is dispatched. Back-to-back `vmacc`s on one-register vectors therefore
  leave gaps. The end-to-end test's 4×16×16 matrix product runs at about 1.75 MAC/cycle of the
  4 possible. The source design reports over 95 % utilisation on larger matrix products, which
  needs deeper instruction buffering than is built here.
- **Buses.** The memory bus is a plain valid/ready request bus with in-order responses per
  port; it is neither TCDM nor AXI. The external port stands in for the AXI interface.
- **Instruction set.** Only the instruction subset listed above is decoded. Masking, reductions,
  widening/narrowing and fixed-point operations are absent.

## Files and testbenches

The RTL is in `rtl/`, one module or package per file, with `spatz_cluster` as the top. The
testbenches are in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench             | what it exercises |
|-----------------------|-------------------|
| `tb_spatz_macu`       | 20 000 random operations against 64-bit reference arithmetic |
| `tb_spatz_vrf`        | random traffic on all ports; grants, priority, data |
| `tb_spatz_scoreboard` | random unit states against a word-by-word model |
| `tb_spatz_decoder`    | every supported encoding, illegal cases, EMUL rules |
| `tb_spatz_controller` | random instruction streams with behavioural units: vl results, dispatch, hazards, ids |
| `tb_spatz_vau`        | random operations with random port grants; full-rate cycle count |
| `tb_spatz_vsldu`      | random slides and moves against RVV rules |
| `tb_spatz_vlsu`       | random strided and unit-stride loads/stores with out-of-order port responses |
| `tb_spatz`            | random vector programs against an architectural model |
| `tb_spatz_sram_bank`, `tb_spatz_tcdm_xbar`, `tb_spatz_addr_demux` | the memory system, with reference memories |
| `tb_spatz_cluster`    | full design at default parameters (see below) |

`tb_spatz_cluster` plays the scalar core. It checks all results by reading L1 back through the
core's port. It runs:

- a 4×16×16 matrix product with chained loads and `vmacc.vx`;
- a strided 16-bit load, add and slide up;
- a byte load from external memory, slide down, multiply, and a store to an unaligned address;
- three units writing the VRF at once;
- rejected instructions.

It counts, and requires, at least one occurrence of each of these:

- chaining;
- operand back-pressure;
- issue hazard stall;
- L1 bank conflict;
- VRF write-port conflict;
- memory-ordering stall;
- external access;
- packed and element-mode accesses.

To simulate with Verilator (testbench packages first):

```
verilator --binary --timing --assert -Irtl -Itb rtl/spatz_pkg.sv \
  tb/spatz_instr_pkg.sv tb/spatz_ref_pkg.sv tb/tb_spatz_cluster.sv \
  -y rtl --top-module tb_spatz_cluster -o sim && obj_dir/sim
```

Replace the testbench file and top to run another one. The configuration (N, VLEN) is set by the
constants at the top of `rtl/spatz_pkg.sv`. The cluster's bank count and size, and the
number of core complexes, are parameters of `spatz_cluster`.
