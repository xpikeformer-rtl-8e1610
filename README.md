# A hybrid analog-digital accelerator for spiking transformers

A spiking transformer works on binary spike trains instead of real numbers.
Each token embedding is encoded as T binary vectors, one per time step. Every
layer then passes spikes on to the next. Two kinds of computation dominate:

* **Weight layers** (embedding, Q/K/V projection, feed-forward). They multiply
  a binary vector by a fixed weight matrix and feed the result to leaky
  integrate-and-fire (LIF) neurons. Because the input is binary, the product is
  just a sum of selected weights. An analog crossbar of non-volatile memory
  cells computes that sum in one read.
* **Attention** (Q Kᵀ, then the product with V). Here both operands are spike
  matrices that change with every input, so an analog crossbar cannot hold
  them. With spikes, each product reduces to AND gates and counters. The
  counts are turned back into spikes by a comparator against a random number
  (Bernoulli encoding), so no softmax or division is needed.

The design therefore has two engines. The **AIMC engine**
(analog in-memory computing) holds all weights in phase-change-memory (PCM)
crossbars and contains the LIF neurons. The **SSA engine** (stochastic
spiking attention) is fully digital. The two engines share an on-chip SRAM
and work in turn: QKV projection, then attention, then feed-forward, then the
next block.

This repository holds synthesizable SystemVerilog for the digital part. The
analog parts (PCM crossbar, ADC, programming DAC) are behavioural integer
models. Each unit has a self-checking testbench, and one testbench runs a whole
attention block end to end.

## Block map

```
xpikeformer_top
├── controller            command handshake, SRAM arbitration, counters
├── spike_sram            16384 x 128-bit shared spike memory
├── aimc_engine           NT = 2 spiking neuron tiles, virtual blocks
│   └── spiking_neuron_tile   (x NT)
│       ├── prog_dac            weight -> (G+, G-) levels       [model]
│       ├── synaptic_array      (x RB*CB = 8)
│       │   ├── pcm_crossbar      128x128 differential cells    [model]
│       │   └── sar_adc           2 x 16 5-bit readout units    [model]
│       ├── lif_unit            (x RB*16 = 32), each with a csa_adder
│       └── gdc_unit            global drift compensation
└── ssa_engine            NH = 2 SSA tiles, head split/merge
    ├── lfsr_array          (x2) random bytes for all encoders
    └── ssa_tile            (x NH) N x N SACs, one head each
        ├── sac               (x N*N) AND, counter, encoder, V shift register
        └── bernoulli_encoder (per column)
```

`xp_pkg` holds the shared constants, the SRAM request struct `sram_req_t`
and the command struct `cmd_t`.

## The AIMC side

### Synaptic array and readout

A synaptic array (SA) is a 128x128 crossbar. Each cell is a pair of PCM
devices, G+ and G−, with 16 conductance levels (4 bits). Together they store
one signed 5-bit weight, w = G+ − G−. The model uses the mapping G+ = w, G− = 0
for w ≥ 0, and G+ = 0, G− = −w for w < 0. The code −16 is clipped to −15.

An input spike vector drives the 128 rows. Each column then carries the sum of
the conductances of its active rows. The model computes this as an integer.
There are only 16 readout units per SA, so a multiplexer connects 16 columns
at a time. This sharing ratio of 8 is the paper's. In MUX cycle m, readout
unit k reads column 16·m + k. A readout unit has two 5-bit ADCs, one for the
G+ column and one for the G− column, and a subtractor. Its output, the
"local sum", is a signed number between −31 and 31. The ADC transfer function
is not given by the source, so the model uses `code = min(31, I >> 2)`.

### Row-block mapping and the LIF unit

A tile holds RB = 2 row blocks of CB = 4 SAs each. All SAs of a row block see
different 128-input slices of the same input vector, and they compute the same
128 output neurons. Those neurons are read out 16 at a time. So one row block
covers a 512-input, 128-output slice of a layer, and one tile covers 256
outputs.

The 4 local sums that belong to one output neuron go into a carry-save adder
tree and then to that neuron's LIF unit. The LIF unit applies the drift
compensation gain, `I = (sum * gain) >>> 8`. It then updates the membrane
potential, `V = (V >>> 1) + I`, which is a leak of 0.5. When V ≥ the
threshold, it fires a spike and resets V to 0. The ≥ comparison follows the
source's equation, although its prose says "exceeds".

**Loop order and timing.** Only one membrane register is kept per LIF unit,
and each unit serves 8 output neurons through the MUX. The tile therefore runs
all T time steps of one neuron group before it moves to the next MUX cycle:

```
for m in 0..7            (MUX cycle: which 16 columns)
  for t in 0..T-1        (time step; V cleared at t = 0)
     read SA (1 cycle ADC) -> CSA -> LIF -> spike bit into output buffer
```

The membrane is never stored to memory and reloaded. This is the point of the
token-by-token order the source prescribes. A token takes 8·T + 2 cycles from
`start` to `done`. The tile testbench checks this count.

### Virtual blocks

A layer with more than 256 outputs spans several tiles, called a *virtual
block*. An AIMC command names `tile_first` and `tile_num`. All tiles of the
block receive the same input, and each tile writes its own 256 output bits.
The command sequence runs token by token:

1. **LOAD**: read the token's T input vectors into every tile's input buffer.
2. **RUN**: all tiles compute in parallel.
3. **STORE**: write T output vectors back to the SRAM.

Load, run and store do not overlap, which is a simplification. The SRAM layout
is `addr = base + (t·n_tok + n)·words_per_vector + word`.

### Drift compensation

PCM conductance drifts down over time. The model represents this with a global
factor `pcm_drift_q8/256` on every column current. That input exists only in
simulation.

A calibration command (`OP_CAL`) drives a fixed pattern into every SA of the
block: rows 0..7 active, MUX cycle 0. It then adds up all ADC codes.

* With `cal_ref = 1`, which is meant to run right after programming, the sum is
  stored as the reference and the gain is 1.0.
* With `cal_ref = 0`, a serial divider in `gdc_unit` computes
  `gain = ref·256 / measured`.

The gain is clipped to 1023/256, and the LIF units apply it. Note that the
gain corrects the ADC codes, not the currents. A column whose code has
saturated is therefore not restored exactly.

## The SSA side

### Stochastic attention cell

One SSA tile is an N×N array of cells, and cell (i, j) works on query i and
key j. The tile streams the d_K features of Q, K and V one per cycle:

* Q(i, d) runs along row i.
* K(j, d) and V(j, d) run down column j.

In each cycle, the cell ANDs the Q and K bits and counts the result in an
8-bit counter. After d_K cycles the count equals Q_i·K_j. A Bernoulli encoder
turns the count into one spike S(i, j), which is 1 with probability
count/d_K. Meanwhile a d_K-bit shift register has delayed V by exactly d_K
cycles. So in the next d_K cycles, V(j, d) meets S(i, j), and the cell outputs
S(i, j) AND V(j, d).

For each output (i, d), the N outputs of row i are added, and a second
Bernoulli encoder, scaled to N, turns the sum into the attention spike A(i, d).

The causal mask for decoder models disables the cells with j > i.

**Timing.** Time steps are pipelined back to back. While step t+1 streams in,
step t is encoded and multiplied with V. The first attention output appears
d_K + 1 cycles after the first input, and one extra step of zeros flushes the
pipeline. The top-level test checks this latency (`ssa_first_latency`).

### Random numbers

A Bernoulli encoder fires when `value > r`, where r is uniform in
[0, full scale). The numbers come from arrays of 32-bit LFSRs with polynomial
x³²+x²²+x²+x+1. Each LFSR is advanced 32 steps per clock and tapped as 4 bytes.
Every encoder has its own byte source.

* The cell encoders use numbers that stay fixed for one time step.
* The column encoders use fresh numbers every cycle.

The seeds are `SEED_BASE ^ ((i+1)·0x9E3779B9)`. The source gives neither the
polynomial nor the reuse scheme. Both are this design's choices.

### Splitting and merging heads

The SSA engine drives NH = 2 tiles in parallel, one head each. A command gives
`head_base`. The engine then reads the d_K feature bits of heads
head_base .. head_base+NH−1 from the token's Q, K and V words, runs the tiles,
and writes each head's result back into its place with a bit mask. Sequences
shorter than N are allowed, because tokens n ≥ n_tok feed zeros.

## Controller and commands

The host writes a `cmd_t` with a valid/ready handshake. There are three
operations:

* `OP_AIMC`: one layer on one virtual block.
* `OP_SSA`: NH heads of attention.
* `OP_CAL`: calibration, with or without storing the reference.

Only one command runs at a time. The SRAM is granted to the engine that runs
the command, and to the host port (`host_gnt`) otherwise. Assertions check that
the two engines never request at once and that the host does not access the
SRAM while a command runs.

Weights and thresholds are written directly through `prog_*` and `thr_*`.
These ports stand for the path from off-chip memory. Residual connections
and off-chip memory are not part of the RTL. Their traffic is meant to use the
host SRAM port.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `XBAR_ROWS`, `XBAR_COLS` (pkg) | 128 | SA size (source value) |
| `ADC_SHARE` (pkg) | 8 | columns per readout unit (source value) |
| G_W / W_BITS / ADC_BITS (pkg) | 4 / 5 / 5 | conductance levels, weight bits, ADC bits (source values) |
| `NT` | 2 | spiking neuron tiles |
| `RB`, `CB` | 2, 4 | row blocks per tile, SAs per row block |
| `NH` | 2 | SSA tiles (heads in parallel) |
| `N` | 64 | tokens per SSA tile (the source quotes 16–128) |
| `DK` | 64 | head dimension |
| `TMAX` | 16 | longest spike encoding |
| `SRAM_DEPTH` | 16384 | words of 128 bits |
| `V_W` | 12 | membrane potential width |

Apart from the package constants marked as source values, these sizes are this
design's choices. With NT = 2, the built AIMC engine holds 262,144 weights. The
models evaluated in the source need 3–52 million, because every weight is
stored in its own cell and never reloaded. Those models would need tens to
hundreds of tiles.

## Departures and open points

* The analog behaviour is idealised: there is no noise, no device variation,
  and no per-device drift. Drift is a single global factor.
* The ADC range (`>> 2`), the calibration pattern, the gain format (Q.8) and
  the LIF register width are not given by the source.
* Load, compute and store of the AIMC engine are not overlapped. No timing
  figures from the source are reproduced.
* The residual units are only named by the source and are not built. Spike
  encoding of raw input and the classifier head are not built either.
* `spike_sram` is a register array, not a foundry macro. Address bits above
  log2(DEPTH) are ignored.
* **Lint warning kept deliberately.** Lint reports `rst_n` as used both
  asynchronously and synchronously. The synchronous use comes only from the
  `disable iff` of the assertions.

## Verification

Each unit has a testbench `tb/tb_<module>.sv`. Each one compares the unit
against an independent model written inside the testbench and prints
`TB_RESULT checks=N failures=M`. The large units are tested at reduced
parameters:

* SA: 16x16 and 32x32 cells.
* Tile: 16x16-cell SAs.
* SSA tile: N = 4, d_K = 8.
* SSA engine: N = 8, d_K = 16.

Wherever the random numbers cannot be predicted, the checks are exact where
the result is forced and statistical otherwise. Examples of forced results are
all-one and all-zero scores, and the last row of a causal mask.

`tb_xpikeformer_top` runs one attention block through the whole chip. The AIMC
side runs at full size (2 tiles of 8 SAs, 128x128 cells, 5-bit ADCs, sharing
ratio 8). The SSA tiles are reduced to N = d_K = 16. The sequence is:

1. Program weights and thresholds.
2. Run a random layer and check it bit for bit against a model of crossbar,
   ADC, CSA and LIF.
3. Run the Q/K/V projection over a 2-tile virtual block. Its weights make Q,
   K and V known.
4. Run attention without mask, which gives an exact result, and with the
   causal mask, which gives exact and rate checks.
5. Run a feed-forward layer on the attention output.
6. Calibrate, apply drift, and calibrate again. Check the gain.
7. Rerun the random layer under drift with compensation.

The testbench counts each mechanism and fails if one never happened:

* AIMC layer
* two-tile block
* attention with and without mask
* calibration reference
* gain update
* LIF firing
* ADC saturation
* a command held off while busy
* a switch between engines

The largest size simulated end to end is this one: full AIMC engine, SSA
tiles of 16×16 cells with d_K = 16. With the default N = d_K = 64, the
simulator's C++ model of the 2×4096 attention cells took longer than half an
hour to compile, so it was not run.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/xp_pkg.sv tb/tb_ssa_tile.sv \
          --top-module tb_ssa_tile -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```
