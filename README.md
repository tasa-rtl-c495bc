# Tasa logic die in SystemVerilog

A 3D-stacked LLM accelerator puts its compute die directly under a stack of
DRAM dies. Every core then reads "its" DRAM at very high bandwidth through
vertical connections, but the heat of the logic die has to pass through the
DRAM stack to reach the heat sink, so hot spots on the logic die limit how far
such a design scales. Tasa answers this with two ideas, both of which this RTL
builds:

* **Heterogeneous cores.** Compute-heavy work (the fully connected layers:
  QKV generation, projection, FFN) runs on *P-cores* (performance cores)
  with two 32x32 systolic arrays each. Memory-bound work (attention during
  decoding, which is GEMV against the KV cache) runs on *E-cores*
  (efficiency cores) with an array of 12 MAC trees of 32 inputs. The E-cores
  do far less arithmetic per byte, run cooler, and are interleaved with the
  P-cores to spread the heat. The main configuration uses one E-core per three
  P-cores.
* **Bandwidth sharing.** A P-core that runs a GEMM out of its scratchpad
  hardly uses the DRAM above it. The P-core can stream lines from that DRAM
  straight to its E-core over a dedicated link while its arrays keep
  computing. The E-core's MAC trees can consume such lines as they arrive,
  without storing them first. So an attention head's KV cache can be split
  between the E-core's own DRAM and the DRAM of its P-cores, and the E-core
  sees the summed bandwidth.

The RTL is one logic die: 48 cores in 12 *core groups* (one E-core and three
P-cores each) on a 4x3 mesh, a memory controller per core for the 16 DRAM
bank groups above it, and a thermal monitor that raises the DVFS trigger. The
DRAM dies, the die-to-die bonding, the host and the clock/voltage
controllers are outside this RTL. Their interfaces come out as ports: per-core
DRAM command/data buses, per-core instruction streams and per-core
temperatures. A behavioural DRAM channel model for simulation is in
`tb/dram_channel_model.sv`.

## Organisation

```
tasa_top                      GX x GY core groups on a 2D mesh + thermal_monitor
 └ core_group (x12)           one E-core, NP P-cores, star links E <-> P
    ├ ecore                   core_shell + mac_tree_array + vector_unit + ecore_comm
    │   └ ecore_comm          crossbar E-core / P-core links / noc_router
    │       └ noc_router      5-port XY mesh router
    └ pcore (x3)              core_shell + 2 systolic_array + vector_unit + local_comm
core_shell (in every core)    control_unit, scratchpad, mem_ctrl, vector_unit,
                              LOAD / STORE / VEC / SEND / RECV engines
mem_ctrl                      16 x dram_channel_ctrl, in-order read return
```

Within a group the network is a star (the fat-tree of the design with the
E-core as root): each P-core has one link, to its E-core, and no router.
Only the E-core has a router, and it acts as the proxy of its group on the
global mesh. Core numbers inside a group are 0 for the E-core and 1..NP for
the P-cores. A flit addresses a core by (group x, group y, core number).

Default parameters (all from the source design unless marked):

| parameter | value | meaning |
|---|---|---|
| `GX`, `GY` | 4, 3 | group mesh (own layout: 48 cores = 12 groups) |
| `NP` | 3 | P-cores per E-core (3:1 ratio) |
| `SA_ROWS`, `SA_COLS` | 32, 32 | systolic array size, two per P-core |
| `NT`, `N` | 12, 32 | MAC trees per E-core, inputs per tree |
| `LANES` | 32 | vector unit width (fp32), two per core |
| `SPM_DEPTH` | 1024 | scratchpad lines of 128 B = 128 KB |
| `DRAM_CH` | 16 | bank groups (channels) per core |
| line / flit | 128 B | scratchpad word = NoC flit payload = DRAM burst |

## Data and number formats

Everything moves in **lines of 128 bytes** (`line_t`, 1024 bits): one
scratchpad word, one NoC flit payload and one DRAM burst. A line holds 64
bf16 values or 32 fp32 values.

Arithmetic uses bf16 operands and fp32 accumulation (`tasa_pkg`): products
of two bf16 numbers are exact in fp32, and sums are fp32. The floating-point
functions are simplified. Subnormals flush to zero, results are truncated
rather than rounded to nearest, overflow gives infinity and NaNs are not
handled. For integers below 2^24 the results are exact, which is what the
testbenches rely on.

Operand line formats (this design's own):

* **GEMM operand line k** (P-core): bf16 lanes 0..ROWS-1 hold column k of
  the weight matrix W, lanes 32..32+COLS-1 hold row k of the input X. The
  arrays compute C = W x X (ROWS x COLS). Result row r is written as one
  line of fp32 lanes 0..COLS-1.
* **GEMV input line** (E-core): bf16 lanes 0..31 are a 32-element slice of
  the input vector (e.g. a query).
* **GEMV weight line**: lanes 0..31 are the 32 weights of tree 2p, lanes
  32..63 those of tree 2p+1. Six lines give all 12 trees one step. The
  result is one line of 12 fp32 sums, one per tree (e.g. 12 attention scores).
* **Flit**: `{dst_x, dst_y, dst_core, tag[15:0]}` header plus one line.
  SEND puts the line's index in `tag`.

## Instructions and the control unit

Each core takes a stream of 96-bit instructions (`instr_t`):

| field | bits | use |
|---|---|---|
| `op` | 3 | NOP, LOAD, STORE, GEMM, GEMV, VEC, SEND, RECV |
| `sub` | 4 | variant: vector op, SEND source, GEMV weight source, bit 3 = ReLU post-op |
| `sync` | 1 | wait until everything issued before has finished |
| `a`, `b`, `c` | 10 each | scratchpad line addresses |
| `len` | 10 | lines or steps |
| `daddr` | 23 | core-local DRAM line address |
| `dst_x`, `dst_y`, `dst_core` | 3 each | SEND destination |

| op | does | rate |
|---|---|---|
| LOAD | DRAM `daddr..` -> SPM `a..`, `len` lines | 1 line/cycle peak |
| STORE | SPM `a..` -> DRAM `daddr..` | 1 line / 3 cycles |
| VEC | SPM `c[i] = a[i] op b[i]` on vector unit 0 (`sub[2:0]`: ADD SUB MUL MAX RELU COPY) | 1 line/cycle |
| SEND | `len` lines to a core, from SPM `a..` (sub 0) or **directly from DRAM** `daddr..` (sub 1) | 1 line/cycle |
| RECV | `len` flits -> SPM `a..` | 1 line/cycle |
| GEMM | P-core: both arrays, `len` = K steps, operands `a..` (array 0) and `b..` (array 1), results `c..` and `c+ROWS..` | see below |
| GEMV | E-core: `len` steps, input slices `a..`, weights from SPM `b..` (sub 0), DRAM `daddr..` (sub 1) or the NoC (sub 2), result line `c` | 2 + 6 cycles/step |

The control unit issues in program order. It does not track data
dependences. It tracks five shared resources of the core: scratchpad read
ports, scratchpad write port, memory controller, outgoing link and incoming
link. An instruction issues when its unit is idle and it needs none of the
resources in use. Software puts `sync` on an instruction that must wait for
data. This rule is what lets a P-core run `SEND` from DRAM (memory + outgoing
link) next to `GEMM` (scratchpad only): the two share nothing, so both run.
A `SEND` from the scratchpad waits for the GEMM instead.

## P-core: GEMM

The GEMM sequencer reads operand lines `a+k` and `b+k` in the same cycle
through the two scratchpad read ports and steps both arrays. The arrays are
output-stationary. Each PE keeps its own fp32 accumulator. Skew registers at
the array edges (the input and weight buffers) delay row i and column j by i
and j cycles. After the last step, the array waits ROWS+COLS cycles for the
wavefront to pass, then captures all accumulators into its output buffer.
The rows then go, one per cycle, through vector unit 1 (copy, or ReLU when
`sub[3]` is set) to the scratchpad write port. The two arrays drain one after
the other.

Cycle count for K steps at 32x32: about K + 64 + 64 cycles. Measured: 142
cycles for K = 8.

## E-core: GEMV and the three weight paths

For each step, the sequencer first loads an input slice into the input
register, which all 12 trees share (2 cycles). It then passes six weight
lines from the chosen source, one per cycle. Each line fills the weight
registers of two trees. The line that brings the last pair also fires all
trees, so a step costs no extra cycle. Each tree adds its 32 products with a
single-cycle adder tree and accumulates in fp32. After `len` steps, the 12
sums go through vector unit 1 (copy or ReLU) into one scratchpad line.

The weight source is the point of the E-core:

* **scratchpad**: classic buffered operation;
* **DRAM**: the memory controller's read responses feed the trees directly.
  The scratchpad is bypassed, so KV-cache lines are never copied;
* **NoC**: flits arriving from P-cores feed the trees directly. This is the
  consuming end of bandwidth sharing.

Measured: a 4-step GEMV from the scratchpad takes 41 cycles, against
4 x (2 + 6) = 32 cycles plus start and write-back.

## Bandwidth sharing, end to end

One decode step of an attention head, as the group testbenches run it:

1. The host gives each P-core a `SEND` with `sub = 1`: its block of
   key lines goes from its DRAM to core 0 of its own group. In the same
   program, with no `sync` in between, it gives the P-core a `GEMM` for the
   FC layer. The control unit runs both at once.
2. The E-core runs `GEMV` from DRAM over its own key block, then one
   `GEMV` with weight source NoC for each P-core's block. The key lines go
   from the link FIFO straight into the weight registers.
3. The E-core `SEND`s the score lines on. Across groups, this goes through
   its router and the mesh.

The order in which lines arrive on the NoC is the order in which the MAC
trees consume them. So the host must not let two P-cores stream into one
E-core GEMV at the same time. The testbenches stagger the streams. The KV
split ratio, the bandwidth look-up table and the reallocation policy of the
source design are host software and are not part of this RTL.

## Memory controller

Each core drives 16 channels. In this design a channel is one bank group:
four stacked dies with one bank each, sharing 128 I/Os at 500 MHz. A 128 B
line is a burst of 8 beats of 128 bits, one beat every two core cycles (the
core runs at 1 GHz). One channel therefore moves a line every 16 cycles, and
16 channels give one line per cycle: 128 GB/s per core, 6.1 TB/s for 48
cores. The low 4 address bits pick the channel, and the remaining bits give
column (4 bits), row (13 bits) and die (2 bits).

`dram_channel_ctrl` keeps one row open per die (open-page policy). It
overlaps the next column command with the current burst on a row hit, and
enforces tRCD 17, tCL 2, tRAS 34, tRP 12 and tRC 46 cycles (the source
timings in ns, rounded up). Refresh is temperature-controlled, following the
source design's refresh table: a 32/16/8/4 ms window at up to 85/95/105 °C
and above. Spread over 8192 refresh commands, this gives one refresh every
3906/1953/976/488 cycles. `mem_ctrl` returns read lines in request order with
their tags. A small order queue records which channel each read went to, so
no reorder buffer is needed. A stream of sequential lines runs at 0.86
lines/cycle (256 lines in 296 cycles). The shortfall from 1 is row misses and
refresh.

## Network

* `local_comm` (P-core): one transmit FIFO and one receive FIFO on the link
  to the E-core, one flit per cycle each way.
* `ecore_comm` (E-core): a crossbar between the E-core, the NP P-core links
  and the router's local port. Each source has an input FIFO and each
  destination picks one source per cycle round-robin. So the E-core, every
  P-core link and the mesh can all move a flit in the same cycle. Flits for
  another group go to the router. Flits for this group go to the core named
  in `dst_core`.
* `noc_router`: 5 ports (local, N, E, S, W), input FIFOs of two flits, XY
  routing (x first, y grows southward), round-robin per output.

All links use valid/ready and carry one 128 B flit per cycle. This matches
one core's DRAM bandwidth, which is what a P-core needs to share all of it.

## Thermal monitor

`thermal_monitor` takes the temperature of every core (from sensors outside
this RTL). It registers the maximum and the hottest core's index, and raises
`dvfs_trigger` while the maximum is above 85 °C. Each memory controller also
uses its core's temperature to choose the refresh rate. Changing the clock
and voltage is left to the outside.

## Where this RTL departs from the source design

* The floorplan of P- and E-cores on the 6x8 die is not reproduced. The
  groups are placed on a 4x3 mesh and the position of cores inside a group
  is not modelled.
* The instruction set, the issue rule, all line formats, FIFO depths, the
  router's routing and arbitration and the DRAM address mapping are this
  design's own.
* Vector units do element-wise ADD, SUB, MUL, MAX, ReLU and COPY only. exp
  (softmax), GeLU/SiLU, reciprocal and square root are missing, so attention
  softmax and layer normalisation cannot run on this RTL.
* Floating point truncates and flushes subnormals to zero.
* STORE moves one line per three cycles. Sequential DRAM reads reach 0.86
  of the peak line rate. A GEMV step spends two cycles loading its input
  slice.
* Not built: the DRAM dies and their banks, the hybrid-bonding interface,
  the host-side bandwidth-sharing scheduler (KV allocation ratio, bandwidth
  LUT, reallocation), the host interconnect, DVFS clocking and the
  temperature sensors.
* 60 and 72 cores (GX=5 or 6 with GY=3) and the 5:1 ratio (NP=5) are
  reachable by parameters but are not the defaults and were not simulated.

## Verification

Every block has a self-checking testbench in `tb/` that ends with one
`TB_RESULT checks=N failures=M` line and has a watchdog. Data are small
integers, so bf16/fp32 results can be compared bit for bit with integer
references (`tb_fp_pkg`). `tb_util_pkg` builds instructions and operand lines.
The DRAM channel model checks every command against the timing rules. It
returns a known pattern for lines never written, and can be preloaded and
read back by testbenches.

| testbench | what it shows |
|---|---|
| `tb_systolic_array` | C = W x X for K = 1, 32, 40 with input gaps; done latency ROWS+COLS |
| `tb_mac_tree`, `tb_mac_tree_array` | dot products over several steps; each weight source; one step per 6 lines |
| `tb_vector_unit` | every op on random integers, 1-cycle latency |
| `tb_scratchpad` | two read ports, read-before-write, hold without read enable |
| `tb_mem_ctrl` | refresh interval per temperature band, in-order tags, 0.86 lines/cycle stream, no timing violations |
| `tb_local_comm`, `tb_noc_router`, `tb_ecore_comm` | every flit delivered once, in order, to the right port; full rate without back-pressure |
| `tb_control_unit` | a reference model predicts every issue cycle over 3000 random instructions; GEMM overlaps SEND-from-DRAM |
| `tb_pcore` | RECV, GEMM+ReLU, SEND, STORE/LOAD, VEC, SEND-from-DRAM overlapped with GEMM |
| `tb_ecore` | GEMV from SPM, DRAM and NoC, ReLU, mesh pass-through |
| `tb_core_group` | one full-size group: the decode step above, all mesh ports |
| `tb_tasa_top` | two groups on a 2x1 mesh: local and cross-mesh sharing, results read back from DRAM; counts overlap, stalls, mesh hops, hot-core refresh and the DVFS trigger on and off |

The largest configurations simulated are one complete group at full size
(`tb_core_group`: four cores, 64 DRAM channels) and the two-group top with
8x8 arrays (`tb_tasa_top`). The full 48-core top with 32x32 arrays was not
simulated: just compiling the simulator for it takes far longer than the
simulation budget. It passes lint and elaboration.
Even the reduced `tb_tasa_top` takes several minutes to compile with
Verilator (its simulation itself runs in seconds). It requires control-unit
issue stalls to occur; link back-pressure is counted and reported, but not
required, because whether it happens depends on timing.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tasa_pkg.sv tb/tb_fp_pkg.sv \
    tb/tb_util_pkg.sv tb/tb_pcore.sv --top-module tb_pcore
./obj_dir/Vtb_pcore
```

Un-initialised state is safe: reset is asynchronous and the testbenches
pulse it before the first clock edge, so they also pass with
`+verilator+rand+reset+2`.
