# PICNIC compute tiles: an RTL model of a programmable inter-PE network for LLM inference

Large language models spend most of their energy moving weights and
activations between memory and arithmetic. This design keeps the static
weights where they are used: every processing element (PE) is a 256 x 256
resistive-RAM (RRAM) crossbar that stores one block of a weight matrix and
multiplies an input vector by it in place. What remains to be moved are the
*dynamic* values: layer inputs, partial products from neighbouring PEs,
attention scores, keys and values. Those travel through a 2D mesh of small
programmable routers, one per PE, that can also compute while they forward:
add partial outputs, apply an activation, or multiply two dynamic vectors
(the Q·Kᵀ and S·V products of attention, which have no static operand).
Softmax is done by dedicated units stacked on top of the mesh. Several such
*compute tiles* form the accelerator, joined by an optical network that
is not part of this RTL, and only one cluster of four tiles is powered at a
time.

The SystemVerilog here covers the digital parts of one tile and of the tile
array: routers, their program memory and main controller, softmax units,
the power-gating controller, and a behavioural stand-in for the RRAM PE.

```
                     activation die (top):  softmax unit (SCU) above each odd-column router
                              ^ TSV
   +---------------------------------------------------------------+
   |  IPCN: MESH_X x MESH_Y routers, each with its own RRAM PE     |  middle die
   |  NPM (program banks B1/B2 + CSR)  <- co-processor write port  |
   |  NMC (PC, decoder, command crossbar, repeat counter)          |
   +---------------------------------------------------------------+
                              v TSV
                     optical-engine die (bottom): one link per even-column router  -> opt_* ports
```

## Contents

| file | what it is |
|---|---|
| `picnic_pkg.sv` | widths, port numbers, the instruction struct and the enum encodings |
| `sync_fifo.sv` | per-port input FIFO (32 x 64 bit) |
| `scratchpad.sv` | per-router memory, 4096 x 64 bit (32 KB) |
| `psum_unit.sv`, `lin_act.sv`, `int_mac.sv` | the three compute macros of a router |
| `axis_slice.sv` | AXI-Stream skid buffer between a router and its PE |
| `unit_router.sv` | one router: FIFOs, scratchpad, controller, macros, output crossbar |
| `rram_pe.sv` | behavioural model of the RRAM matrix-vector PE |
| `npm.sv` | network program memory, double-buffered |
| `nmc.sv` | network main controller that plays the program to all routers |
| `exp_pwl.sv`, `recip_div.sv`, `scu.sv` | softmax compute unit and its parts |
| `compute_tile.sv` | one tile: mesh + PEs + NPM + NMC + SCUs |
| `ccpg_ctrl.sv` | chiplet clustering and power gating controller |
| `picnic_system.sv` | top: GRID_X x GRID_Y tiles under the gating controller |

Every file starts with a comment giving its function, interface and timing.

## The idea behind the router network: one program, all routers in lock-step

The mesh is not packet-switched. Nothing in a data word says where it goes.
Instead a central controller (the NMC) steps through a program, and in each
step tells every router what to do with the words waiting at its ports.
All routing decisions are therefore made when the program is written (by a
compiler or by hand), and the hardware needs no headers, no arbitration and
no routing tables. The cost is that the program must know exactly which word
will be in which FIFO at each step. This section explains the pieces in the
order a word meets them.

### Ports

A router has six data ports, each with an input FIFO of 32 words of 64 bits:

| index | port | connects to |
|---|---|---|
| 0 | N | router (x, y-1) |
| 1 | S | router (x, y+1) |
| 2 | E | router (x+1, y) |
| 3 | W | router (x-1, y) |
| 4 | L | the router's own PE, through AXI-Stream adapters |
| 5 | TSV | the die above (odd columns: a softmax unit) or below (even columns: an optical link) |

The scratchpad acts as a seventh source and a destination. Outputs that
leave the mesh edge are accepted and dropped.

### Instruction word (30 bits)

| bits | field | meaning |
|---|---|---|
| 29:18 | `sp_addr` | scratchpad word address |
| 17 | `wr_en` | with `intxfer_en`: 1 = write the result to the scratchpad, 0 = read the scratchpad as an operand |
| 16 | `intxfer_en` | the scratchpad takes part in this command |
| 15:10 | `out_en` | one bit per output port (index above); several bits = broadcast |
| 9:6 | `mode_sel` | 0 route, 1 partial sum, 2 partial sum + activation, 3 activation, 4 MAC |
| 5:0 | `rd_en` | one bit per input FIFO to pop |

The field positions are the paper's. The port bit order and the mode codes
are this design's.

What each mode computes, on 64-bit words:

* **route**: the first operand (lowest port index; the scratchpad counts
  last) is copied to every output in `out_en`.
* **partial sum**: all operands are added as four signed 16-bit lanes with
  saturation. This is how the partial outputs of PEs that share the columns
  of a weight matrix are reduced.
* **activation**: negative 16-bit lanes become zero (ReLU). With partial sum
  it is applied to the sum.
* **MAC**: the first two operands are read as sixteen signed 4-bit elements
  each (16 multipliers x 4 bits = 64 bits). Their dot product is added to a
  64-bit accumulator. The accumulator is cleared on the first repetition of
  the command and sent out only on the last. So a command repeated *r*
  times computes an r x 16-element dot product, such as one score of Q·Kᵀ.

### One command execution inside the router

The router controller has three states:

1. **IDLE**: waits for the `cmd_start` pulse from the NMC. If the NMC gave this
   router no command (selection IDLE), `done` is set at once.
2. **WAIT**: waits until every FIFO named in `rd_en` holds a word. Then it
   pops them all in one cycle and starts the scratchpad read, if the
   command has one. This state is where a router waits for a neighbour that is late.
3. **EXEC**: waits until every output in `out_en` can accept a word. Then it
   writes the result to all of them in the same cycle, so a broadcast is never
   split. It also writes the scratchpad if asked, sets `done` and goes back
   to IDLE.

An execution therefore takes at least three cycles. The scratchpad address
used is `sp_addr + repetition index`, so a repeated command walks through
consecutive words. That is how a row of K or V is stored or replayed.

`out_last` is high on words from the last repetition. On the PE side it
becomes `tlast`. On an odd-column TSV it ends the softmax sequence.

### Program memory (NPM) and its ping-pong banks

The NPM has two program banks, B1 and B2, and a control/status bank (CSR).
Each program bank has two parallel sub-banks with one row per program step:

* **CMR row** (64 bits): `CMD_1` in [29:0] and `CMD_2` in [59:30]. Bits [63:60]
  are unused. Each step offers only two distinct commands.
* **CFR row**: a 2-bit selection for every router (router *i* in bits
  [2i+1:2i]: 0 = IDLE, 1 = CMD_1, 2 = CMD_2), then a 4-bit repeat number.
  With 1024 routers the row is 2052 bits. The co-processor writes it as 64-bit
  chunks, `cp_word` being the chunk number.

Two commands per step is enough for the dataflow the design targets.
For example, all routers of a column forward north while the top one
reduces. It also keeps the CFR at 2 bits per router instead of 30.

A configuration co-processor (outside this RTL) writes a bank through the
`cp_*` port. It then commits the bank by writing the number of rows to CSR row 0
(`cp_region = CSR`, `cp_bank` = bank, `cp_wdata[15:0]` = row count). From then
on the bank belongs to the controller, and co-processor writes to it are
ignored. Once the controller has run the last row it releases the bank and turns
to the other one. The co-processor can thus prepare the next layer's program
in one bank while the current one runs from the other. `csr_status` gives
the two ready flags in [1:0], the bank the controller will run next in [2], and
the number of banks completed in [31:16].

### The main controller (NMC)

For each row the NMC does FETCH → DECODE → START → WAIT. In DECODE, its
crossbar turns the two commands and the per-router selections into one
command per router. START is a one-cycle `cmd_start` to all routers.
WAIT lasts until every router reports `done`. The repeat counter is loaded
with the row's repeat number and runs the same row again until it reaches
zero. A repeat number of *r* runs the command *r* times, and 0 also runs it
once. Each repetition passes its index and first/last flags to the routers.

Since a step ends only when the slowest router is done, the routers stay in
step with each other even though some wait on input. The overhead is four cycles
per row plus three per repetition. That is the price of central control.

## Softmax compute unit (SCU)

Each odd-column router has an SCU above it. The router streams raw scores to
it up the TSV. The SCU sends the probabilities back down, and they arrive in the
router's TSV FIFO.

Number formats: score in signed Q4.12 (bits [15:0] of the word), e^x in
unsigned Q8.16, probability in unsigned Q0.16 (bits [15:0], saturated at
0xFFFF).

The SCU has three states:

1. **Accumulate**. Each score goes through the exponent unit. The result is
   stored in a cache at the running index and added to a partial sum. The
   sequence ends with `last_in` (the router's `out_last`) or when the cache
   (256 entries) is full.
2. **Reciprocal**. A bit-serial divider computes floor(2^48 / sum) in
   49 cycles.
3. **Output**. Each cached e^x is multiplied by the reciprocal and shifted
   down 32 bits. One probability goes out per cycle while `out_ready` is high.
   After the last one the unit returns to state 1.

The first probability appears 51 cycles after the last score is accepted.

**Exponent.** e^x uses eight linear pieces on the unit intervals
[-4,-3) … [3,4). Each piece is the chord between e^k and e^(k+1). Scores
outside the range are clamped. The nine knots are round(e^k · 2^16) for
k = -4 … 4: 1200, 3263, 8869, 24109, 65536, 178145, 484249, 1316326, 3578144.
The chord always lies above the curve, by up to about 8 % in the middle
of each piece. Because every value is divided by the sum of the same approximations, the
probabilities are more accurate than the exponents. The testbench allows
0.02 absolute error against an exact softmax.

There is no max subtraction. Scores are expected to lie in [-4, 4)
already. There is also no running rescale, so a softmax row longer than the
cache cannot be split across passes.

## The RRAM processing element (behavioural)

`rram_pe` is a behavioural stand-in for an analog macro, not logic to
synthesize. It holds a 256 x 256 matrix of 8-bit signed weights. They are
programmed once through `prog_*` and kept through power gating, as the
non-volatile cells would be.

An input vector arrives as 32 AXI-Stream beats of eight 8-bit values. After
4 cycles the model sends 64 beats of four 16-bit results:
y[c] = clamp16( Σ_r x[r]·W[r][c] − offset[c] ). The per-column offset is the
result of the device's calibration step, written through `cal_*`. The
clamp stands in for the ADC range. Real RRAM noise, drift and ADC
quantisation are not modelled.

## Clustering and power gating (CCPG)

Tiles are grouped into clusters of 2 x 2 neighbours. `ccpg_ctrl` keeps exactly
one cluster awake (`sleep` = 0) and the rest asleep. `advance` steps to the
next cluster in row-major order, and `set_valid`/`set_cluster` jumps to one.
A tile asleep freezes its NMC and routers and refuses input. The scratchpads
(the KV cache) and the PE weights keep their contents, so the tile resumes
where it stopped. With `ccpg_en` = 0 every tile is awake, for comparison.
The sleep mask is registered, so it changes one cycle after the request.

## Where this design departs from the paper, and choices the paper leaves open

* **Number of softmax units.** The paper's parameter table gives 1024 SCUs per
  tile, one per router. But its description of the 3D stack connects only
  odd-column routers to the activation die and even-column routers to the
  optical die. This design follows the stack description: 512 SCUs per
  32 x 32 tile.
* **Command selection width.** The paper's figure gives the selection field
  as N bits for N routers, yet each router chooses among three options. Here
  it is 2 bits per router.
* **Vertical ports.** The router has one TSV input/output pair. The table's
  "7 ports" is read as six FIFO ports plus the scratchpad. The TSV link
  carries whole 64-bit words. The "32 x 2" TSV figure is not used as a bus width.
* **Number formats** (4-bit signed MAC elements, 16-bit saturating lanes
  for sums, 8-bit PE inputs and weights, Q4.12 / Q8.16 / Q0.16 in the SCU),
  **activation** (ReLU), **mode codes**, **handshakes**, **NPM depth** (64
  rows per bank) and **SCU cache depth** (256) are this design's choices.
* **SCU control** returns to state 1 after its output. The paper
  describes alternating between states 2 and 3 to keep the output continuous.
  Here there is one reciprocal per sequence.
* **Number of tiles.** The top defaults to 4 x 2 tiles (two clusters). The
  paper's clustering illustration shows 4 x 4, and the real number follows
  from the model size. At 32 x 32 routers a tile holds about 1000 routers,
  scratchpads and PEs. Compiling 16 of them takes more memory than a 32 GB
  machine has (about 2 GB per tile for lint alone), so the default was halved.
  Set `GRID_Y = 4` for the paper's picture.
* **Not modelled:** the silicon-photonic network, DRAM, the RISC-V
  configuration co-processor and the host (all appear as ports), the analog
  behaviour of RRAM, and any activation other than softmax on the top die.

## Capacity against the evaluated models

The paper evaluates Llama 3.2-1B, Llama 3-8B and Llama 2-13B with 512, 1024 and
2048 input/output tokens. The model sizes below come from the public model
descriptions, not from the paper. One tile stores 1024 x 256 x 256 = 67.1 M weights. With one
attention or feed-forward layer per tile:

| model | attention 4·D² | tiles for all decoders | one layer per tile? |
|---|---|---|---|
| Llama 3.2-1B (D = 2048, 16 layers) | 16.8 M | 64 | yes |
| Llama 3-8B (D = 4096, 32 layers) | 67.1 M | 128 | exactly |
| Llama 2-13B (D = 5120, 40 layers) | 104.9 M | 160 | no, needs two tiles |

The default top has 8 tiles, so no full model fits in it. Larger grids are
a parameter change. The KV cache of one layer at 4096 tokens, 1 byte per
element, is at most 40 MiB (13B). That is more than the 32 MiB of scratchpad per tile. For the 1B
and 8B models it is 4–8 MiB.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/picnic_pkg.sv tb/tb_scu.sv --top-module tb_scu
./obj_dir/Vtb_scu
```

Testbenches use reduced sizes where the paper's would be slow:

* `tb_compute_tile`: one tile with a 4 x 4 mesh and 16 x 16 PEs. It runs
  an attention-like program covering PE matrix-vector products, partial-sum
  reduction, scratchpad store, dynamic MAC, softmax through the TSV and
  scratchpad read-back. About 140 cycles.
* `tb_picnic_system`: 4 x 1 tiles in clusters of 2 x 1, each 4 x 4. It adds
  bank ping-pong, programming a sleeping tile, cluster switching, retention
  of scratchpad data over sleep, and CCPG off. It counts each mechanism and
  fails if one never occurs.

These two are the largest configurations simulated. The top at its default
parameters (8 tiles of 32 x 32 routers with 256 x 256 PEs, about 8200
routers and 0.5 G weights) has not been simulated.
