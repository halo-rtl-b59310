# HALO in SystemVerilog: a CiD/CiM accelerator for low-batch LLM inference

Generating text with a large language model has two phases, and they need
different hardware.

- **Prefill** pushes the whole prompt through every layer at once. Its matrix
  products are matrix–matrix (GEMM) products with plenty of weight reuse, so
  this phase is *compute-bound*.
- **Decode** produces one token per step. At batch size 1, every weight matrix
  is read once to multiply a single vector (GEMV). This phase is
  *memory-bound*: the time goes into moving weights, not into arithmetic.

HALO puts two kinds of memory-centric compute in one 2.5D package and sends
each phase to the engine that suits it:

| engine | where it sits | what it runs |
|---|---|---|
| Compute-in-DRAM (CiD): 32 int8 multipliers and an adder tree at every DRAM bank | in the HBM3 stacks | decode GEMVs, on the weights where they are stored |
| Analog compute-in-memory (CiM) accelerator: 8T-SRAM crossbars with ADCs | on the interposer, beside the stacks | prefill GEMMs, with high throughput and local reuse |
| Vector unit: element-wise multiply, element-wise add, LUT exponent, 512 lanes | on the HBM logic die | all non-GEMM work (softmax, normalisation, activations, residuals) |

A **phase-aware dispatcher** makes the choice. Each command carries its phase
(prefill or decode) and its class (matrix product or not). The dispatcher
routes it by this rule:

- prefill matrix products go to the CiM accelerator;
- decode matrix products go to the CiD;
- everything else goes to the vector unit.

This repository gives synthesizable RTL for all the digital logic of the
design. The analog crossbar is a behavioural model. Each block has a
self-checking testbench.

## Block map

```
halo_top
├── phase_dispatch          prefill/decode x matmul/non-GEMM router, event counters
├── cim_accel               4x4 mesh of tiles, host port at tile (0,0) west
│   ├── mesh_router         5-port XY router (tile mesh)
│   └── cim_tile            4 MB global buffer (GB) + tile controller + 2x2 core mesh
│       ├── mesh_router     (core mesh)
│       ├── sram_1p         GB
│       └── cim_core        IB 32 KB, WB 64 KB, OB 128 KB, 2 CiM units, command FSM
│           ├── sram_1p     IB, WB, OB
│           └── cim_unit    8 crossbars + sequencer + shift-and-add
│               ├── cim_crossbar   128x128 one-bit cells, 48 7-bit ADCs (behavioural)
│               └── cim_shift_add  bit-slice / bit-serial recombination
├── cid_pch  x N_PCH        one HBM pseudo channel
│   ├── cid_io_buffer       double-buffered 4096-entry input vector
│   └── cid_gemv_unit x 8   one per bank: 32 multipliers, tree, accumulator
└── vector_unit             32-entry vector buffer
    ├── vec_mul_unit
    ├── vec_add_unit
    └── exp_unit
```

`halo_pkg` holds the shared constants and types:

- the flit format `noc_flit_t` and its command codes;
- the CiD command `cid_cmd_t`;
- the vector instruction `vec_instr_t`;
- the top-level command `halo_cmd_t`.

### Default sizes

| quantity | value | origin |
|---|---|---|
| tile mesh | 4x4 | published |
| core mesh per tile | 2x2 | published |
| CiM units per core | 2 | published |
| crossbars per unit | 8 | published |
| crossbar size | 128x128 | published |
| ADC | SAR, 7-bit, 48 per crossbar | published |
| global buffer | 4 MB | published |
| input buffer (IB) | 32 KB | published |
| weight buffer (WB) | 64 KB | published |
| output buffer (OB) | 128 KB | published |
| wordlines active at once | 128 (first configuration) or 64 (second) | published |
| CiD multipliers per bank | 32 x int8 | published |
| CiD input buffer | 4096 int8 entries, double-buffered | published |
| banks per pseudo channel | 8 | published |
| vector width | 512 lanes | published |
| vector lane format | 16 bit | published |
| pseudo channels (`N_PCH`) | 160 | this design: 5 HBM3 stacks x 32 pseudo channels |
| accumulator width | 32 bit | this design |
| vector number format | Q8.8 | this design |
| vector buffer depth | 32 | this design |
| SRAM word width | 64 bit | this design |

## The analog CiM unit

This is the hardest part of the design to follow. Each cell of a crossbar
stores one bit. An int8 weight matrix is therefore **bit-sliced**: crossbar
*j* of a unit holds bit *j* of every weight.

Inputs are applied **bit-serially**. In step *b*, wordline *r* is driven with
bit *b* of input *x_r*. Each bitline then sums the currents of the cells that
store a 1 on an active wordline. The model reduces that analog sum to a count:

```
count[j][col] = popcount( wl_mask & inbit_b & column(col) of crossbar j )
```

The count is digitised by a 7-bit ADC, so it saturates at 127.

There are 128 columns but only 48 ADCs per crossbar. A column multiplexer
therefore converts the columns in three groups of 48, 48 and 32, one group per
cycle.

`cim_shift_add` rebuilds the signed result from the ADC codes. It uses
two's-complement weights: slice 7 and input bit 7 carry weight −2^7.

```
term = Σ_j ±code[j] << j            (the minus sign applies to j = 7)
acc[col] += ±term << b              (the minus sign applies to b = 7)
```

### Wordline modes

The two evaluated configurations differ only in how many wordlines are on at
once. The port `half_wl` selects the mode.

- **128 wordlines** (`half_wl = 0`): one conversion per (input bit, column
  group), so 24 conversions in all. A column can count up to 128 ones, one
  more than a 7-bit ADC can show. The count is then clipped to 127. This
  happens only when every active cell and input bit in a column is 1, e.g. all
  weights and inputs equal to −1. The unit counts these events in
  `sat_events`. This is the price of the fast mode.
- **64 wordlines** (`half_wl = 1`): every input bit is applied twice, to rows
  0–63 and then to rows 64–127. The count can never exceed 64, so the result
  is exact. The cost is twice the conversions (48), the "double ADC accesses"
  that make this configuration use more energy.

### Latency

A `start` is sampled at one clock edge. `done` pulses 26 edges later in the
128-wordline mode and 50 edges later in the 64-wordline mode. The count is
24 or 48 conversions plus two pipeline stages: the ADC register and the
accumulator. The unit testbench checks these numbers exactly.

The behavioural model ignores:

- the SAR bit cycles;
- analog noise;
- device non-linearity.

Each conversion is an ideal count followed by clipping. The published design gives no
transfer function beyond the ADC resolution.

## Core, tile and accelerator: packets and buffers

All traffic in the CiM accelerator uses single-flit packets (`noc_flit_t`,
100 bits). A flit carries these fields:

- `host`: set on replies;
- the tile (`tx`, `ty`) and core (`cx`, `cy`) coordinates;
- `gb`: the flit is for the tile's global buffer rather than a core;
- a command, a 24-bit address and 64 data bits.

Two levels of 2D mesh use the same `mesh_router`:

- 4x4 tile routers, which route on `tx/ty`;
- inside each tile, 2x2 core routers, which route on `cx/cy`.

Each router has one flit buffer per input and round-robin arbitration per
output. Routing is X first, then Y. Replies are flagged `host` and travel to
router (0,0), where they leave through the west port. The accelerator's
external port is also on that west port.

Commands, as the host uses them for one 128x128 block (data bit fields in
brackets):

| command | target | effect |
|---|---|---|
| `WR_GB` | tile GB | write one 64-bit word |
| `RD_GB` | tile GB | reply `RESP` with one word |
| `FILL_WB` / `FILL_IB` | tile GB | copy `len` [15:0] words from GB[addr] into core (`cx` [40], `cy` [41]) at word [39:16]; reply `DONE` |
| `WR_IB` / `WR_WB` | core | write one buffer word directly |
| `LOAD_W` | core | program unit [0] from WB[addr .. +2047]: 128 rows x 16 words of 8 weights; reply `DONE` with the saturation count |
| `RUN` | core | multiply IB[addr .. +15] (128 inputs) by unit [0]'s matrix, with 64 wordlines if [1]; write 128 int32 results to OB[[31:16] .. +63], two per word; reply `DONE` with the saturation count |
| `RD_OB` | core | reply `RESP` with one OB word |

The FILL commands are how the global buffer feeds the IB and WB. A core
serves one command at a time, so its two units do not run concurrently. A tile
controller likewise serves one global-buffer command at a time.

## The CiD side

A pseudo channel (`cid_pch`) has three parts:

- eight bank GEMV units;
- one 4096-entry input buffer, shared by the banks and broadcast to them;
- a controller.

The controller streams 32-byte columns of the open DRAM rows to all eight
banks in lockstep. Each bank unit multiplies its 32 weight bytes by the
matching 32 input bytes, sums them in its adder tree and accumulates over the
`kbeats` beats of a row. It then hands over one int32 dot product. In one
command, a pseudo channel processes `rows` DRAM rows per bank, so it returns
8 x `rows` outputs.

The input buffer is **double-buffered**:

- `WR_BUF` writes lines into the fill half. This is allowed even while a GEMV
  is running.
- `SWAP` exchanges the fill and compute halves. It is accepted only when all
  pseudo channels are idle.
- `GEMV` reads the compute half.

In this way the next token's vector can be loaded while the current one is
being used.

The DRAM arrays are not part of the RTL. Each pseudo channel has a row-buffer
port with these signals:

- `dram_req`/`dram_ready`, with the row and column;
- `dram_valid`/`dram_data`, returning the eight banks' 32-byte slices in
  request order, after any latency.

Several requests may be outstanding. When data are late, the bank pipelines
simply wait. The testbenches exercise this stall with a DRAM model that has
random latency and a random ready signal. Without stalls, a GEMV needs one
cycle per beat plus a few cycles of pipeline.

In the top, every pseudo channel receives the same command and the same
broadcast vector. Each one works on the weight rows stored in its own banks.

## Vector unit

The vector unit holds vectors of 512 lanes of signed Q8.8 values. It executes
three instructions:

- `rd = rs1 * rs2`, rounded and saturating;
- `rd = rs1 + rs2`, saturating;
- `rd = exp(rs1)`.

The exponent uses exp(x) = 2^(x·log2 e):

- log2 e is 369/256 in Q8.8;
- the integer part of the product becomes a shift;
- the top six fraction bits index a 64-entry table of 2^(k/64), held in
  Q1.14 and computed at elaboration.

The result is within about 2 % plus 2 LSB of the true value, and it
saturates at the largest Q8.8 number.

An instruction takes two cycles, and `done` pulses when the result is in the
buffer. In the original system, general-purpose RISC-V cores on the logic die
issue these instructions and do the rest of the work: division, square roots
and moving CiD results. Those cores are not part of this RTL. Their side of
the vector buffer is a port of the top.

## Top-level interface (`halo_top`)

- `cmd` (`halo_cmd_t`) with `cmd_valid`/`cmd_ready`: phase, class and a
  payload for each engine.
- `cim_rsp_*`: replies from the CiM accelerator.
- `dram_*` per pseudo channel: the row-buffer ports.
- `cid_res_valid/row/data`, `cid_busy`: CiD results and status.
- `vbuf_*`, `vec_done`: the vector-buffer port for the logic-die cores.
- `n_cim`, `n_cid`, `n_vec`: commands routed to each engine.
- `n_vmul`, `n_vadd`, `n_vexp`: vector operations executed.

## Where this RTL departs from, or adds to, the published design

**Choices the published description leaves open.** These include:

- number formats: signed int8 operands, int32 accumulation, Q8.8 vectors;
- command and packet formats and single-flit packets;
- router micro-architecture: XY routing, one buffer per port, round-robin;
- where the external link attaches: tile (0,0), west port;
- the CiM sequencing order: input bit, then wordline half, then column group;
- one global buffer per tile;
- the CiD weight layout: output row r·8+b is computed by bank b on DRAM
  row r;
- the number of pseudo channels.

**Simplifications.**

- The buffers' bandwidths are not modelled. Each SRAM moves one 64-bit word
  per cycle.
- A core serves one command at a time.
- The output half of the CiD "input/output buffer" is not modelled. Results
  leave the pseudo channel directly.
- The CiD controller drives all banks in lockstep, and its DRAM timing is
  abstracted into the ready/valid port.

**Reading of an ambiguous size.** "A double-buffered 4 KB buffer for 4096
inputs" is read as two halves of 4096 entries each.

**Not built.** These parts have no logic function that the design describes,
or come from elsewhere:

- the DRAM arrays, TSVs, PHY and interposer;
- the RISC-V (BOOM) cores of the logic die;
- the SAR ADC circuit. Its effect (7-bit quantisation with clipping) is part
  of the crossbar model.

## Workloads

The evaluated models are LLaMA-2 7B and Qwen3 8B, at batch size 1, with input
and output contexts from 128 to about 10 K tokens. The model dimensions below
are public facts about these models, not taken from the design description.

**Storage.** In int8, the weights are 6.7 GB and 8.2 GB. The KV cache for
10 K tokens adds 2.6 GB and 0.75 GB. Both models therefore fit easily in the
80 GB of HBM. A batch sweep to 64 sequences at 128 + 2048 tokens needs about
42 GB, which also fits.

**Decode.** Most decode GEMVs have K = 4096. That fits the CiD input buffer
exactly, so each runs as one `GEMV` command per output slice. The FFN down
projections have K = 11008 or 12288. They take three passes, and the vector
unit adds the partial sums.

**Prefill.** The resident CiM weights amount to 32 units x 16 KB = 512 KB.
One layer of weights is about 200 MB. Prefill GEMMs therefore run as a stream
of 128x128 blocks, each loaded into a unit and reused across all prompt
tokens.

## Verification

Every module has a testbench `tb/tb_<module>.sv`.

- It computes the expected values independently with plain integer
  arithmetic.
- It draws random stimulus with `$urandom`.
- It checks cycle counts where the design fixes them.
- It has a watchdog.
- It ends by printing `TB_RESULT checks=<n> failures=<n>`.

`tb_halo_top` runs the whole design end to end through the phase-tagged
command port:

- prefill blocks on the CiM in both wordline modes, including a case that
  must clip in the 128-wordline mode and stay exact with 64;
- decode GEMVs on the CiD against DRAM models that stall;
- an exp → multiply → add sequence on the vector unit.

It counts each mechanism: both wordline modes, ADC clipping, CiD stalls,
buffer swaps, back-pressure on the reply port, each vector operation and
each dispatcher route. A mechanism that never occurs counts as a failure.

**Simulated sizes.** The full-size top has a 4x4 tile mesh and 160 pseudo
channels, and no testbench simulates it at these defaults. Verilator flattens
the hierarchy: the 64 cores, 128 CiM units and 1024 crossbar models of the
default accelerator expand into hundreds of megabytes of C++.

The largest configurations simulated:

| testbench | configuration |
|---|---|
| `tb_cim_accel` | 2x1 tile mesh (8 cores), global buffers scaled to 64 KB; the same test also passes on a 2x2 mesh (16 cores), whose build takes about 6 minutes |
| `tb_halo_top` | 1 tile (4 cores, 8 CiM units), 2 pseudo channels, 64 KB global buffer |

The crossbar, unit, core, pseudo channel and vector units are simulated at
their full published sizes.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/halo_pkg.sv \
          rtl/cim_crossbar.sv rtl/cim_shift_add.sv rtl/cim_unit.sv tb/tb_cim_unit.sv \
          --top-module tb_cim_unit -o sim && ./obj_dir/sim
```

List the package first, then the files the module under test needs.
