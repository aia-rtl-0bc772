# AIA accelerator mesh: RTL for a multi-core RISC-V sampling engine

Probabilistic models such as Bayes nets and Markov random fields are usually
solved with Gibbs sampling. The work is easy to parallelise by graph colouring,
because all nodes of one colour can be sampled at once. Ordinary processors are
still slow at it, for three reasons. Drawing a value from a freshly computed
discrete distribution costs a normalisation and a search. Functions such as
exp and log are expensive. And neighbouring nodes keep exchanging their newly
drawn values through memory.

This design answers each of those with hardware inside a small RISC-V core,
then tiles sixteen such cores into a 4 x 4 mesh:

* **Sampler unit.** Each core has a Knuth-Yao sampler with rejection. It draws
  directly from unnormalised integer weights, with no division and no sort.
  Up to 16 small distributions can be sampled at once.
* **Interpolation unit.** A one-cycle piecewise-linear lookup replaces the
  non-linear functions.
* **Doubled register file.** The register file has 64 words. The lower 32
  words are *shared*: the four direct neighbours in the mesh can read them as
  an instruction operand. A sampled label can therefore go to the next core
  with no load or store.
* **Single-cycle barrier.** One barrier instruction, backed by an AND tree,
  moves all cores from one colour to the next together. Waiting cores have
  their clock stopped.

The RTL here covers the mesh side of the chip:
* the sixteen accelerator tiles;
* the 128 KB global buffer and its crossbar;
* the event unit;
* the host access path;
* the two cross-clock FIFOs that join the mesh to the SoC.

The host SoC is left out. That means the host processor, its 192 KB memory,
the uDMA and peripherals, the clock generators and the pads. Its place is
taken by a simple transaction port in the SoC clock domain.

## Block map

```
 SoC clock domain │ mesh clock domain
                  │
 host port ──► cdc_fifo (requests) ──► mesh_interconnect ──┬──► tile host ports (16)
 host port ◄── cdc_fifo (responses) ◄──┘                    ├──► global_buffer host master
                  │                                        └──► control registers
                  │
                  │   aia_mesh
                  │   ┌──────┬──────┬──────┬──────┐
                  │   │ T0   │ T1   │ T2   │ T3   │── tcdm_interconnect ── 16 x sram_sp (8 KB)
                  │   ├──────┼──────┼──────┼──────┤     (row 0 only)
                  │   │ T4   │ T5   │ T6   │ T7   │
                  │   ├──────┼──────┼──────┼──────┤   every tile: ac_tile =
                  │   │ T8   │ T9   │ T10  │ T11  │     ac_core + IMEM 8 KB + DMEM 32 KB
                  │   ├──────┼──────┼──────┼──────┤     (sram_dp each)
                  │   │ T12  │ T13  │ T14  │ T15  │
                  │   └──────┴──────┴──────┴──────┘   event_unit: barrier AND tree
```

Module hierarchy:

```
aia_top
├── cdc_fifo (x2)
└── aia_mesh
    ├── ac_tile (x16)
    │   ├── ac_core
    │   │   ├── ac_decoder
    │   │   ├── ac_regfile
    │   │   ├── lfsr_rng
    │   │   ├── ky_sampler
    │   │   │   └── ky_decoder
    │   │   └── interp_unit
    │   └── sram_dp (x2)
    ├── global_buffer
    │   ├── tcdm_interconnect
    │   └── sram_sp (x16)
    ├── event_unit
    └── mesh_interconnect
```

`aia_pkg` holds the shared types, opcodes and CSR numbers. The bus structs are
`mem_req_t`/`mem_rsp_t` and `host_req_t`.

## The sampler: rejection Knuth-Yao

This part is the hardest to follow.

**The basic method.** Take a distribution given as integer weights
m[0..N-1]. If the weights sum to a power of two, 2^w, the Knuth-Yao method
walks a binary tree whose leaves are the bins. At tree level j, bin i owns as
many leaves as bit j of m[i] has ones. The walk keeps a distance d:

```
d' = 2d + !rb - Σ_i n_j[i]        n_j[i] = bit j of m[i], rb = a fresh random bit
```

It goes from the most significant bit down. The walk stops at the first level
where d' becomes negative. The label is the first row i at which the running
sum of n_j[0..i] exceeds 2d + !rb.

**Rejection.** Weights rarely sum to a power of two. So the sampler first
computes w = ceil(log2 Σm) and adds a phantom row, rej = 2^w − Σm. Now the
total is exactly 2^w. When a walk lands in the phantom row, it is thrown
away and restarted from the root. This gives exact sampling without any
normalisation.

**Worked example.** Take the weights {1,1,1}. Then w = 2 and rej = 1. With
the random bits 0, 0, 1, 0, the first walk ends in the phantom row and is
rejected. The second walk ends in bin 1. `tb_ky_sampler` replays this example
cycle by cycle.

**Hardware mapping:**

* **Storage.** The weights sit in the private half of the register file,
  starting at a configurable base.
* **Preprocessing.** This takes one register-file read per row through port
  A: nbins x lanes cycles. The sampler sums the rows and counts the non-zero
  rows. One more cycle then forms w and rej.
* **The walk.** Each cycle reads one *column* of the weight matrix through
  port B of the register file. That is bit j of all 32 rows as one word.
  `ky_decoder` then evaluates every lane in one combinational step. It
  produces the new distance, whether a leaf was hit, and which row was hit.
  In the RTL, a running count over the rows computes the first row whose
  count exceeds 2d + !rb, in place of a prefix adder.
* **Lanes.** The 32 rows are split into 1, 2, 4, 8 or 16 lanes of 32, 16, 8,
  4 or 2 rows. Lane k uses rows k·(32/L) … k·(32/L)+nbins−1, and gets its own
  random bit rb[k] from a 32-bit LFSR that advances 16 bits per cycle.
* **Lock-step walking.** All lanes use the largest lane's w, and they walk in
  lock-step. A lane with a smaller total just has a larger rejection weight,
  so its samples stay exact. A rejected lane waits until every lane has
  reached a leaf. Then the rejected lanes start again from the root together.
  This keeps one shared column address.
* **Degenerate distributions.** If a distribution has zero or one non-zero
  bin, the sampler returns that bin (or 0) at once. With a single bin equal to
  2^w, the tree would need a level above w.
* **Result.** The labels are packed into rd, with lane k at bits
  [k·32/L +: 32/L].

**Latency.** Latency = 2 + lanes·nbins + (tree levels visited) cycles,
counted from the start pulse to `done`. The core is stalled for that long.
The expected number of levels per walk follows the entropy of the
distribution, not its size.

**Configuration.** Sampler configuration is CSR 0x7D1:

| Bits    | Field                               |
|---------|-------------------------------------|
| [5:0]   | bins per lane                       |
| [10:8]  | log2 of the lane count              |
| [20:16] | first private register of the matrix |

The LFSR seed is CSR 0x7D2.

## The interpolation unit

`Xprob.IU rd, rs1` treats rs1 as a fixed-point number with F fraction bits.
With i = rs1 >> F and f = rs1 mod 2^F, it returns:

```
Y[i] + (f · (Y[i+1] − Y[i])) >>> F
```

The table Y lives in the private registers from x32 on. It is read through
two extra register-file ports in the same cycle, so the instruction takes one
cycle.

CSR 0x7D0 sets the format:
* bits [28:24] hold F. The reset value is 24, for the 1/7/24 format.
* bits [6:5] select the entry width:
  * 0 means one 32-bit entry per register;
  * 1 means two 16-bit entries;
  * 2 means four 8-bit entries.

Entries are signed.

## The register file and the neighbour port

`ac_regfile` holds 64 words:
* x0..x31 are the shared section (x0 reads as zero);
* x32..x63 are the private section.

Its ports:
* two read ports and one write port for the core;
* one row-read port, one column-read port and one write port for the sampler;
* two read ports for the interpolation unit;
* one read port for the neighbours.

**Arbitration.** Up to four neighbours may ask for the neighbour port at
once. A fixed-priority decoder, in the order N, S, W, E, grants one of them
per cycle. The others see no grant and stall their instruction until they are
served. So a program that does collide is slower but still correct; the
compiler does not have to rule collisions out.

**Mesh wiring.** Tile (r,c) has four sides:
* its W side goes to (r,c−1);
* its N side goes to (r−1,c);
* its S side goes to (r+1,c);
* its E side goes to (r,c+1).

The target sees the request on its opposite side. At the mesh edge, a read is
granted at once and returns 0.

## Instruction set

The cores run RV32I plus multiply (MUL, MULH, MULHSU, MULHU; no division),
the Zicsr CSR instructions, and the custom opcode 0x3B ("Xprob"):

```
31    29 28   25 24  20 19  15 14 12 11   7 6      0
[ Type ][  Op  ][ rs2 ][ rs1 ][ DT ][ rd  ][0111011]
```

| Type | Meaning |
|------|---------|
| 0 | Large-RF ALU op. {DT[2],rd} = {DT[1],rs1} op {DT[0],rs2}; a DT bit of 1 selects the private half. |
| 1 | Neighbour op. rd = rs1 op neighbour.rs2; DT 0 = W, 1 = N, 2 = S, 3 = E. |
| 2 | Sample. rd = packed labels. |
| 3 | Interpolate. rd = LUT(rs1). |
| 4 | Global barrier. |

The Op field values:

| Op | Operation | Op | Operation |
|----|-----------|----|-----------|
| 0 | add | 7 | sra |
| 1 | sub | 8 | mul |
| 2 | xor | 9 | slt |
| 3 | or | 10 | sltu |
| 4 | and | 11 | mulh |
| 5 | sll | 12 | mulhsu |
| 6 | srl | 13 | mulhu |

Other CSRs are mcycle (0xB00) and mhartid (0xF14). EBREAK, ECALL and illegal
instructions halt the core.

## Core pipeline

`ac_core` has two stages.
* **Fetch** reads the synchronous instruction memory.
* **Execute** decodes, executes and writes back in one cycle. Taken branches
  lose no cycle, because the next fetch address comes straight from execute.

Multi-cycle work holds the instruction in execute. That covers loads and
stores (request/grant, then rvalid), neighbour reads without a grant, and
sampling. A barrier holds it too.

The clock enable from the event unit freezes every flip-flop of the core.
That stands in for a gated clock.

Start and restart:
* fetch_en low clears the core;
* a rising fetch_en starts it at address 0.

## Memories and the global buffer

Every tile has an 8 KB instruction memory and a 32 KB data memory. Each is
dual-ported: one port for the core, one for the host. Core data addresses
with bits [31:28] = 2 go to the global buffer; all others go to the local
memory.

Only the four tiles of row 0 are wired to the global buffer. The buffer has
16 single-port banks of 8 KB, interleaved by word. A crossbar with a
round-robin arbiter per bank shares them among those four cores and the host
path. A request is granted in the cycle it wins. Its data comes one cycle
later.

## Barrier and clock gating

A core that executes the barrier instruction raises `barrier_req` and waits.
`event_unit` computes:

```
release = AND_i(barrier_req[i] | !running[i]) & OR_i(barrier_req[i])
```

A core counts as running while it is fetch-enabled and not halted. release
reaches every core in the same cycle. So the barrier completes in the cycle
the last core arrives. While a core waits and release is low, its clock
enable is low. A counter of completed barriers can be read by the host.

## Host access and clock domains

The SoC and the mesh run on unrelated clocks. Host transactions
(`host_req_t`: we, byte enables, address, data) enter through an
asynchronous Gray-pointer FIFO of depth 4. Responses return through a
second one. Each transaction gets exactly one 32-bit response word: the read
data, or 0 for a write. Responses come back in order.

Host address map:

| Address | Target |
|---------|--------|
| 0x1000_0000 + core·0x1_0000 + 0x0000 | instruction memory of a core |
| 0x1000_0000 + core·0x1_0000 + 0x8000 | data memory of a core |
| 0x2000_0000 | global buffer |
| 0x3000_0000 | FETCH_EN, one bit per core (read/write) |
| 0x3000_0004 | HALTED (read only) |
| 0x3000_0008 | number of completed barriers (read only) |

A typical run:
1. Write the programs and data.
2. Write 0xFFFF to FETCH_EN.
3. Poll HALTED.
4. Read the results.

## Where this design departs from the source architecture

* **Core.** The core is a new two-stage RV32IM core with the custom
  extensions, not a modified RI5CY. It has no hardware loops, dot-product
  unit, division or floating point. The shared FPU, the mesh DMA and the
  whole SoC side are not built.
* **Neighbour DT.** The neighbour encoding follows the list W = 0, N = 1,
  S = 2, E = 3. One example in the original description uses DT = 2 for
  West; that example is not followed.
* **Op encodings.** Only add (0) and sub (1) were given. The remaining Op
  encodings, the barrier as Type 4, and all CSR numbers except 0x7D0 are this
  design's own.
* **Fixed-point format.** Two formats were given: 1/8/23 for the compiler and
  1/7/24 for the experiments. The reset fraction is 24, and the CSR selects
  either.
* **Decoder.** The sampler decoder uses a running count instead of a prefix
  adder and comparator tree. Lanes walk in lock-step with a shared w.
* **Neighbour collisions.** These are resolved in hardware by stalling,
  rather than ruled out by the compiler.
* **Memory split.** The 40 KB per tile is split 8 KB / 32 KB. That split, the
  address maps and the host transaction protocol are this design's own.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_ky_sampler` | The worked example cycle by cycle, including its latency; random multi-lane distributions against a lock-step reference model; a sample histogram. |
| `tb_ky_decoder`, `tb_interp_unit`, `tb_ac_regfile`, `tb_ac_decoder`, `tb_lfsr_rng` | Each block exhaustively or randomly against independent models. |
| `tb_ac_core` | A hand-assembled program with delayed memory, neighbour and barrier models. |
| `tb_ac_tile`, `tb_mesh_interconnect`, `tb_tcdm_interconnect`, `tb_global_buffer`, `tb_event_unit`, `tb_cdc_fifo`, `tb_sram_sp`, `tb_sram_dp` | Each block at a small size against reference models. |
| `tb_aia_mesh` | A non-square 2 x 3 mesh: neighbour wiring on every side. |
| `tb_aia_top` | The full-size design end to end (below). |
| `tb_workload_bayes` | Gibbs inference in the five-node "cancer" Bayes network: 16 independent chains, one per core, each computing its conditional weights from probability tables in data memory. The posterior marginals are compared with exact enumeration. |
| `tb_workload_mrf` | A 4 x 4 binary Markov random field (Ising-style denoising prior), one pixel per core, sampled in checkerboard order with neighbour-port reads and barriers. The marginals are compared with exact enumeration over all 2^16 states. |

`tb_aia_top` runs the full-size design with every parameter at its default,
on two clocks. It loads one program into all 16 cores through the host FIFO.
It then checks:
* neighbour reads in all four directions, including the mesh edges;
* simultaneous reads of one core (contention);
* global-buffer bank conflicts, and rows without access;
* private-register Type-0 operations;
* interpolation;
* 512 samples with rejection (histogram and per-core seeds);
* two barriers with clock gating;
* FIFO back-pressure.

It counts each of these mechanisms and fails if one never happened. It takes
about a minute in Verilator.

The two workload testbenches also run at full size. They show the two ways
the paper's workloads use the mesh: many independent chains for a small
Bayes network, and one chain spread over the cores with neighbour exchange
for a Markov random field. Both compare sampled marginals with exact ones,
so a bias in the sampler or a wrong neighbour value shows as a failure.

To run a testbench, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aia_pkg.sv tb/aia_asm_pkg.sv \
  rtl/*.sv tb/tb_aia_top.sv --top-module tb_aia_top -Wno-fatal
./obj_dir/Vtb_aia_top
```

`tb/aia_asm_pkg.sv` is a small assembler, written as SystemVerilog
functions, that the program-level testbenches use.

## Notes for changing the design

* **Mesh size and memories.** Set these with the `ROWS`, `COLS`,
  `IMEM_WORDS`, `DMEM_WORDS`, `GB_BANKS` and `GB_BANK_BYTES` parameters of
  `aia_top`.
* **Mesh width limit.** The host map gives each core a 64 KB window. Tile
  numbers are taken from address bits [19:16], so a mesh can have at most 16
  tiles unless the map is changed.
* **Memory models.** Memories are plain arrays with synchronous read and no
  reset, ready to be swapped for SRAM macros.
* **Remaining lint warnings.** Verilator reports three kinds, all understood:
  * unused bits of configuration words and of the full 64-bit products;
  * a width extension in the interpolation multiply, which is intended;
  * reset used both asynchronously and in assertion `disable iff` clauses.
