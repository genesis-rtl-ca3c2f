# Genesis: an 8x8 systolic spiking accelerator that keeps learning on chip

Genesis runs a small spiking neural network and trains it on the chip. It uses only local,
event-driven rules, with no back-propagation through time and no off-chip optimiser. The
network has two fully connected layers of leaky integrate-and-fire (LIF) neurons:
input → hidden → output, 256-200-2 by default.

Each time step can run up to four phases:

1. **Forward.** Input spikes are weighted, summed and integrated by the hidden neurons, then
   by the output neurons.
2. **Backward.** Error neurons compare the output spikes with label spikes. They emit
   *false-positive* and *false-negative* error spikes. These spikes reach the output neurons
   directly, and the hidden neurons through fixed random feedback weights. Each neuron
   integrates them into a *dendritic error* U.
3. **Update.** Every synapse whose presynaptic neuron fired moves against its error, gated by a
   boxcar window on the neuron's current. The step is scaled by a *metaplasticity* function of
   the weight and of a per-synapse consolidation parameter M.
4. **Meta.** M itself is adjusted from the pre- and postsynaptic activity traces. Synapses that
   keep being useful become harder to change, which protects old tasks from being overwritten
   by new ones (continual learning).

Everything is event driven. Neurons that did not spike are never fetched, multiplied or written.
The hardware is an 8x8 array of processing elements (PEs) fed from eight interleaved SRAM banks.
Below each column sits one neuron unit. An address encoder turns spike vectors into lists of
active-neuron indices.

The RTL is synthesizable SystemVerilog-2017 in `rtl/`, one module or package per file. Self-checking
testbenches are in `tb/`.

## Number formats and the equations actually computed

All network quantities are 16-bit two's-complement Q7.8 numbers (1.0 = 256): W, M, I, V, U and
the feedback weights. Traces are unsigned 8-bit integers. Every time constant is a power of two,
so each "multiply by a constant" is an arithmetic shift. The shift amounts come from the
configuration registers (a, b, c, u, d, eta, tau).

**Neuron unit (`lif_unit`, forward):**

    I' = I + 2^-a (S·W − I)
    V' = V + 2^-b (V_rest − V) + 2^-c I          (I of the previous step)
    spike = V' ≥ V_th ; after a spike V' = V_rest
    T' = T − (T >> tau) + tr_inc·spike          (saturating at 255)

**Neuron unit (backward):**

    U' = U + 2^-u (E·R)
    Θ  = (I_min < I < I_max)

Here E is the weighted sum of error spikes reaching the neuron. Θ is kept in bit 31 of the
neuron's {Θ,T,U} word.

**Error neurons (`error_neuron`):** one pair per output neuron. They filter the difference
(S_out − S_label) into a current e. A false-positive LIF neuron integrates +e and a
false-negative LIF neuron integrates −e. Each fires when it crosses `err_th` and is then reset.

**Synapse update (PE, "metaplasticity update", `meta_update`):**

    f(W,M) = max(0, 1 − |M·W| / 2^d)
    W'     = W − 2^-eta · f(W,M) · Θ·U

The large |M·W| of a consolidated synapse drives f to zero and freezes it.

**Metaplasticity update (PE):**

    M' = max(0, M + m_step·[T_post ≥ post_thr] − m_step·[T_pre ≥ pre_thr])

## The processing-element array

`pe_array` is 8 columns of 8 PEs. Each column is a skewed shift chain: a PE registers the
instruction and the data it receives and passes them to the PE below one cycle later. An
instruction issued at the top of a column therefore reaches row r after r cycles. Each PE holds:

- a weight register and an M register;
- an accumulator;
- a temp register (the neuron's gated error Θ·U);
- a trace register.

The 3-bit instruction set:

| op | name | effect in a PE |
|---|---|---|
| 0 | ACC | acc += W register |
| 1 | RST_ACC | acc = 0 |
| 2 | META | msel=0: weight update; msel=1: M update (`pre_over` rides with the instruction) |
| 3 | LD_TEMP | shift {U, trace} down into temp/trace |
| 4 | LD_ACC | acc = input |
| 5 | MV_IN | pass the input down unchanged |
| 6 | MV_W | shift {W, M} down through the weight registers |
| 7 | MV_ACC | shift accumulators down, out of the bottom row |

The neuron that row r, column c stands for is 64·tile + 8·r + c. One tile is therefore 64
postsynaptic neurons, and a layer of 200 neurons takes four tiles.

`output_buffer` catches what leaves the bottom row. Its per-column 2:1 multiplexer selects what is
written back to the column's bank: the neuron unit's result (phase 0) or the updated {M,W}
word (phase 1).

## Dataflow and its cycle cost

**Forward and backward.** The control unit hands the presynaptic spike vector to
`address_encoder`, one 16-bit word per cycle. The encoder pushes the index of each set bit into
`spike_fifo`, lowest index first. Then, for each tile:

1. For each index j in the FIFO:
   - eight MV_W cycles: each cycle reads one bank-local address from all eight banks, giving
     the {M,W} words of the synapses j → the eight neurons of one row;
   - one ACC cycle.

   That is 9 cycles per active presynaptic neuron per tile. Inactive neurons cost nothing.
2. Eight MV_ACC cycles shift the 64 sums into the output buffer, bottom row first.
3. The eight neuron units process the eight rows, five cycles per row:
   - read {V,I} and {Θ,T,U};
   - compute;
   - write both back.
4. The FIFO is *rewound* and replayed for the next tile, instead of being re-encoded.

The encoder costs one cycle per spike word plus one per spike. The first spike of the last word
costs nothing extra, because it overlaps the cycle in which the end of the feed is detected.
`tb_control_unit` checks this exact rule by adding input spikes one at a time:

    cost of one more input spike = 9·(tiles) + 1    (one less for the first spike of the last word)

**Backward.** It uses the same machinery. Error spikes reach output neuron o with weight ±1.0.
They reach hidden neuron h through the fixed feedback words {WFP, WFN}: +WFP for a
false-positive spike and −WFN for a false-negative spike.

**Update and meta.** Each tile runs in two steps:

1. LD_TEMP brings each neuron's Θ·U and trace into its PE.
2. For every presynaptic neuron (update: only those that fired; meta: all of them), MV_W
   shifts its {M,W} words in, META computes, and the next MV_W shifts the results out at the
   bottom while the next words come in. The results are written back to the addresses they
   were read from.

Each active presynaptic neuron contributes 64 synaptic operations per 9 cycles.

Measured on the 256-200-2 network with 25 % of the inputs active:

| | cycles at 10 MHz |
|---|---|
| one training time step (forward + backward + update) | about 8,500 – 10,300 |
| metaplasticity sweep | about 11,000 more |

## Memory map

There are eight banks of 8,320 32-bit words. Each word holds two 16-bit halves, upper half first.
Global word address g lives in bank g mod 8 at local address g / 8 (low-order interleaving).
The eight neurons of one PE row are consecutive, so they sit in different banks and share one
local address.

| local range | content | global index of an entry |
|---|---|---|
| 0 – 8191 | synapses {M, W} | layer 1: j·NHP + h; layer 2: n_in·NHP + h·NOP + o |
| 8192 – 8223 | neuron state {V, I} | hidden h → h; output o → NHP + o |
| 8224 – 8287 | feedback {WFP, WFN} | o·NHP + h |
| 8288 – 8319 | neuron state {Θ, 0, T, U} | as {V, I} |

- NHP is n_hid rounded up to a multiple of 8, and NOP is n_out rounded up likewise.
- The address of a region entry is 8·(region base) + index. For example, {V,I} of hidden
  neuron h is at global address 65536 + h.
- Limits that follow from the map:
  - the synapses must fit in 65,536 words;
  - NHP + NOP ≤ 256;
  - n_out·NHP ≤ 512;
  - every layer has at most 256 neurons;
  - at most 8 output neurons.

## Host interface

The host drives a 16-bit bus: `data_in` with `start`, accepted while `ready` is high, and
`data_out` with `dout_valid`. A transfer starts with a header word {cmd[15:12], arg[11:0]}:

| cmd | name | payload |
|---|---|---|
| 1 | CFG | write configuration register `arg` with the next word |
| 2 | MWR | addr hi, addr lo, then `arg` × {hi, lo} words written to SRAM |
| 3 | MRD | addr hi, addr lo; `arg` × {hi, lo} returned on `data_out` |
| 4 | SPK | `arg` words of input spikes, word k = inputs 16k … 16k+15 |
| 5 | LBL | one word of label spikes |
| 6 | RUN | arg[3:0] = {meta, update, backward, forward}; `busy` while running |
| 7 | OUT | returns the output spikes of the last forward step |

A burst holds at most 4,095 words, so larger initialisations are split into several bursts.

Configuration registers (reset values give a usable 256-200-2 network):

| reg | content |
|---|---|
| 0 | n_in |
| 1 | n_hid |
| 2 | n_out |
| 3 | {u, c, b, a} |
| 4 | V_th |
| 5 | V_rest |
| 6 | R |
| 7 | I_min |
| 8 | I_max |
| 9 | {–, tau, d, eta} |
| 10 | trace increment |
| 11 | {pre_thr, post_thr} |
| 12 | M step |
| 13 | error-neuron threshold |

A typical time step is SPK, LBL, RUN with flags 0x7, then OUT. A metaplasticity sweep is RUN
with flag 0x8, at the end of a task or as often as wanted.

## Where this RTL departs from the published design

- **Trace calculators.** They sit in the neuron units below the columns, not in every PE. The
  control unit also keeps the input-layer traces. The PE still holds a trace register, loaded
  by LD_TEMP.
- **Banks.** There are eight SRAM banks, one per column. The published overview draws nine.
- **Memory size.** The published summary quotes 0.5 MB of SRAM, and the memory map works out to
  about 266 kB. This RTL has 8 × 8,320 × 4 B ≈ 266 kB.
- **Co-located words.** W and M share one 32-bit word, so one read fetches both, as the
  published design describes. Its drawing of the memory layout, however, shows them as
  separate arrays.
- **Exponents as attenuations.** The constants written 2^a, 2^b, 2^c, 2^u are used as 2^-a
  etc., so that the equations describe a leak.
- **Scale inside f.** The 2^d in the metaplasticity function divides |M·W|, as the equation
  reads. The drawn datapath shows a left shift at a different point.
- **Sign of the update.** The update subtracts (W − ΔW), following the learning rule. The
  drawn adder is shown producing W + ΔW.
- **M update.** The exact rule is this design's: a fixed step up for a busy postsynaptic
  neuron, a step down for a busy presynaptic neuron, clamped at zero.
- **MV_IN.** This instruction is implemented in the PE but never issued by the control unit.
- **Error neurons.** They are a separate block next to the neuron units. Their current filter,
  shared constants and threshold are this design's.
- **Design choices.** The command set, the configuration map, tiling, FIFO rewind, reset
  behaviour and all saturation points are this design's own choices.
- **Throughput.** Peak throughput is 64 synaptic operations per active input per 9 cycles. At
  10 MHz that is about 71 M synaptic ops/s, well below the 640 MOPS quoted for the chip. The
  quoted number counts differently.
- **Host processor.** It is not part of the RTL. Its bus is the top module's port list.

## Verification

Each block has a testbench `tb/tb_<block>.sv`. Each one drives the block with `$urandom`
stimulus, compares against values computed independently in `tb/tb_ref_pkg.sv`, and ends with

    TB_RESULT checks=<n> failures=<n>

A watchdog ends the run as a failure if it hangs.

`tb/genesis_tb_env.svh` is a shared host-side environment. It holds a complete integer model of
the network (forward, error neurons, backward, update, meta) and the host bus tasks. Two
testbenches use it:

- **`tb_genesis_top`.** Full size, with default parameters and no overrides: 256-200-2, six
  training steps, then a metaplasticity sweep. After every step it compares the output spikes
  and *every* SRAM word against the model. At the end it compares the four activity counters
  exactly. It also counts a failure for any mechanism that never happened:
  - skipped inputs;
  - multiple tiles;
  - hidden and output spikes;
  - false-positive and false-negative error spikes;
  - boxcar open and closed;
  - weight updates;
  - frozen (consolidated) synapses;
  - M increased and decreased;
  - write-back.

  It makes about 630,000 checks and runs in about a second after a ten-second build.
- **`tb_split_mnist`.** Runs the domain-incremental Split-MNIST training schedule at full
  size:
  - five tasks of two classes each, shown one after another;
  - both outputs shared by every task, and no signal that the task has changed;
  - four time steps per image, the last one with the metaplasticity sweep.

  The images are synthetic 16×16 stand-ins with MNIST-like sparsity, because a
  self-contained testbench has no access to the real digits. The test checks the whole chip
  state after every step against the model. It also checks that each image trains within
  10 ms at 10 MHz. The longest image takes about 48,000 cycles (4.8 ms). This testbench does
  not measure classification accuracy.
- **`tb_control_unit`.** Runs a 40-70-3 network. It checks the cycle cost per active input
  exactly, then runs eight learning steps against the model.

## Simulating

Compile the packages first, then everything else. `-Itb` lets testbenches find the shared
environment. For example, for the full-size test:

    verilator --binary --timing --assert -Wno-fatal -Itb --top-module tb_genesis_top \
        rtl/genesis_pkg.sv tb/tb_ref_pkg.sv \
        $(ls rtl/*.sv | grep -v genesis_pkg) tb/tb_genesis_top.sv
    ./obj_dir/Vtb_genesis_top

Replace the top module and the last file to run another block's testbench. Verilator prints
lint warnings, mostly about widths in the testbench model's integer arithmetic, unused
configuration bits and package constants. `-Wno-fatal` lets the build go on despite them.

To change the network, write configuration registers 0–2 and load the SRAM to match the
memory map. The limits listed under the memory map apply. In the testbenches, the network size
is the `NIN/NHID/NOUTN` localparams at the top of the file.
