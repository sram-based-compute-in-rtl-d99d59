# Linear-decay LIF neurons updated inside SRAM: RTL of a compute-in-memory SNN layer

A spiking neural network spends each time step on two things. First it computes synaptic
currents, a weight matrix times a binary spike vector. Then it updates the membrane potential
of every neuron. Compute-in-memory arrays do the first part in one parallel pass. The second
part is usually done by reading each neuron's state, updating it in an ALU and writing it
back, one neuron after another. That sequential update then sets the time per step.

This design removes that bottleneck in two ways:

* **Linear decay.** The usual leak `V <- a*V + I` needs a multiplier. It is replaced by a
  constant decrement, `V <- V - DCY + I`. DCY is a learned per-layer constant and may be
  negative. With this change the whole neuron update is additions only.
* **In-place update.** Each neuron's potential lives in a small SRAM cell pair with its own
  ripple-carry adder. All neurons are updated at once, in three clock cycles, whatever
  their number. The threshold comparison costs no comparator: it is folded into the
  additions and read from a sign bit.

The RTL here describes one layer engine. It has a 256-input x 32-output array of 4-bit
weights, a scaler, and 32 neurons with 10-bit potentials. It is written in synthesizable
SystemVerilog and comes with self-checking testbenches.

## Block diagram

```
 in_spk[255:0] --> input driver (INB = ~IN)
                      |
   +------------------v--------------------------------------+
   | cim_mac: 32 x mac_block                                 |
   |   mac_block: 256 rows x 4-bit weights                   |
   |     per row: prod = NOR(~W, INB) = W & IN               |
   |     adder_tree: sum of 256 products -> 12 bit signed    |
   |   wl_driver: row decoder for weight writes              |
   +------------------+--------------------------------------+
                      | 32 x 12 bit
                 scaler (>>> shift, saturate)
                      | 32 x 10 bit
   +------------------v--------------------------------------+
   | ld_lif                                                  |
   |   cim_buffer: MAC[31:0], TH, -(DCY+TH) registers        |
   |   lif_sequencer: WWL[1:0], RWL[1:0], VMEM_MUX, SPIKE_EN |
   |   32 x vmem_neuron: 10 x vmem_bitcell + spike circuit   |
   +------------------+--------------------------------------+
                      |
                spikes[31:0], vmem[31:0]
```

## The update arithmetic

The neuron model is

```
V' = V + MAC - DCY
if V' >= TH:  spike, V <- 0
else:         V <- V'
```

A direct implementation needs an adder, a subtractor and a 10-bit comparator. The cell
instead reorders the work so that every step is "stored word + one operand". A three-input
multiplexer (VMEM_MUX) picks that operand:

| cycle | read bank | VMEM_MUX operand | written to  | value                                       |
|-------|-----------|------------------|-------------|---------------------------------------------|
| 1     | SRC       | 0: MAC           | DST         | `Vmid  = V + MAC`                           |
| 2     | DST       | 1: -(DCY+TH)     | SRC         | `V'mid = Vmid - DCY - TH`                   |
| 3     | SRC       | 2: TH            | DST         | `V'mid + TH` if `V'mid < 0`, else `0` and spike |

The key point is cycle 2. It subtracts the threshold together with the decay, so `V'mid` is
negative exactly when the decayed potential is below threshold. The sign bit of `V'mid` is
therefore the comparison result. In cycle 3 the cell reads `V'mid` again:

* Sign bit 1 (no spike): the adder adds TH back, restoring `V + MAC - DCY`.
* Sign bit 0 (spike): the spike circuit raises SPIKE. SPIKE disconnects the adder from the
  write bit lines and forces 0 onto them, which resets the neuron.

`-(DCY+TH)` is the same for every neuron, so it is formed once per step, in `cim_buffer`.

Worked example, with MAC = 100, DCY = 10 and TH = 190:

| V    | Vmid | V'mid | spike | new V |
|------|------|-------|-------|-------|
| 98   | 198  | -2    | no    | 188   |
| 108  | 208  | 8     | yes   | 0     |

A neuron exactly at threshold (`V'mid = 0`) fires, because the test is the sign bit.

### Ping-pong banks

Every neuron has two 10-bit words, VMEM_A and VMEM_B. Each cycle reads one word through
the adder and writes the other, so no word is read and written in the same cycle. After
the three cycles the result is in the word that was not the source (DST).

The sequencer does not copy the result back. Instead the banks swap roles, and the next
step starts from the word that now holds the potential. After reset VMEM_A is the source.
Steps then alternate A, B, A, ... `lif_sequencer` keeps this in `src_bank`.

## Membrane cell (`vmem_bitcell`, `vmem_neuron`)

One bit of a neuron (`vmem_bitcell`) contains:

* two storage bits, A and B, each with its own write and read word line (`WWL[0]/RWL[0]`
  for A, `WWL[1]/RWL[1]` for B);
* a read bit line RBL, which carries the selected bit into the full adder's A input. With
  no read word line high, RBL reads 0;
* a MUX3 bit for the adder's B input, selecting the MAC bit, the `-(DCY+TH)` bit or the TH bit;
* a full adder with carry in and carry out, chained to the neighbouring bits;
* the PE_DE switch. When PE_DE is high, the write bit line WBL is taken from outside instead
  of from the adder's sum.

`vmem_neuron` chains ten bit cells into a 10-bit ripple-carry adder; carry into bit 0 is 0.
It also adds:

* the spike circuit: `SPIKE = SPIKE_EN & ~sign(RBL)`;
* the PE disable: `PE_DE = WE | SPIKE`. When PE_DE is high, the write bit lines carry
  `wdata` in write mode (WE) and 0 in spiking mode.

All arithmetic is 10-bit two's complement and wraps on overflow. The usable potential range
is -512 to 511. Keep `V + MAC` and `V - DCY - TH` inside that range, because nothing
saturates in the neuron.

## Synaptic array (`mac_block`, `adder_tree`, `cim_mac`, `wl_driver`)

Each of the 32 blocks (columns) stores 256 four-bit weights, one per input row. The
multiply happens inside the cell. The row is driven with the inverted spike INB, and each
weight bit passes through a NOR with its inverted value WB:

```
NOR(WB, INB) = W AND IN
```

The row therefore contributes either its weight or 0. A balanced binary adder tree (eight
levels) sums the 256 products into a 12-bit signed result.

Weights are two's complement (-8..7). The 12-bit result cannot overflow:
256 x (-8) = -2048 and 256 x 7 = 1792.

The array is purely combinational from `in_spk` to `mac`. Weights are written one row at
a time: `wl_driver` decodes `w_row` into one-hot word lines, and `w_data` carries one
weight per block.

In the RTL each column's cells are a memory array with the per-row NOR product in a loop.
The logic is the same as one cell instance per row, but the full-size design then compiles
quickly in a simulator.

## Scaler

The 12-bit synaptic sums must be put on the 10-bit membrane scale. `scaler` shifts each sum
right arithmetically by `shift` (0..3) and saturates the result to -512..511:

* `shift = 2` maps the full 12-bit range onto 10 bits exactly.
* Smaller shifts keep more resolution, at the risk of clipping large sums.

The rounding is toward minus infinity, the natural result of an arithmetic shift.

## Interface and timing of `ldlif_cim_top`

| port                        | dir | meaning                                                      |
|-----------------------------|-----|--------------------------------------------------------------|
| `clk`, `rst_n`              | in  | clock, asynchronous active-low reset                         |
| `w_we`, `w_row`, `w_data`   | in  | write weight row `w_row`; `w_data[b]` is the weight of block b |
| `v_we`, `v_wdata`           | in  | load all 32 potentials (taken only when idle)                |
| `start`, `in_spk`           | in  | start a time step with this spike vector                     |
| `shift`, `dcy`, `th`        | in  | scaler shift, decay, threshold for this step                 |
| `ready`                     | out | `start` is accepted this cycle                               |
| `spike_valid`, `spikes`     | out | one-cycle pulse with the step's spikes                       |
| `vmem`                      | out | current potential of each neuron (valid between steps)       |

A step is accepted in the cycle in which `start` and `ready` are both high. In that cycle:

* the MAC and scaler work combinationally on `in_spk`;
* `cim_buffer` captures the 32 scaled sums, TH and `-(DCY+TH)`.

The three update cycles follow. `spike_valid` rises in the cycle after the third update
cycle.

`ready` is also high during the third update cycle. This lets a new step start back to back,
so the layer can take one time step every 3 clock cycles:

```
cycle      0      1    2    3      4    5    6      7
start      1      0    0    1      0    0    0
state      IDLE   C1   C2   C3     C1   C2   C3     IDLE
ready      1      0    0    1      0    0    1      1
spike_valid                        1                1
```

Weights may be written at any time; a step uses the weights present in its start cycle.
`v_we` is ignored while a step is running or being started.

## Parameters

All sizes are parameters of `ldlif_cim_top`, with the published values as defaults. Shared
constants live in `ldlif_pkg`.

| parameter  | default | meaning                                  |
|------------|---------|------------------------------------------|
| `N_BLOCKS` | 32      | MAC blocks = neurons                     |
| `N_ROWS`   | 256     | inputs (power of two, for the adder tree) |
| `W_BITS`   | 4       | weight width                             |
| `MAC_W`    | 12      | adder-tree width                         |
| `VMEM_W`   | 10      | membrane potential width                 |

## What follows the published design and what is added

Taken from the published description:

* the three-part structure (MAC, Scaler, LD-LIF);
* the array sizes and widths;
* the NOR in-cell multiply;
* the adder tree;
* the two-bank membrane cell with full adder, MUX3 and PE_DE switches;
* the order of the three update cycles, including the MUX codes 0/1/2;
* the sign-bit spike test and the reset to 0;
* one decay shared by all neurons of a layer.

Chosen here, because the description leaves it open:

* **Number formats.** Weights, sums, potentials, DCY and TH are two's complement. Overflow in
  the neuron wraps.
* **Scaler rule.** A shift of 0..3 bits followed by saturation. The published description
  states only that the scaler aligns the sums to the 10-bit scale.
* **Bank handling between steps.** The A/B roles swap after every step.
* **Protocol.** The start/ready handshake, back-to-back issue, the output spike register
  (one extra cycle of latency) and the write mode that loads all potentials at once.
* **Observation port.** `vmem` exposes each neuron's current potential.
* **Drivers.** The weight write path (row decoder and data) stands in for the bit-line
  drivers, pre-charge and input drivers. Those are analog circuits and are not modelled.
* **Operand buffer.** Registers for MAC, TH and `-(DCY+TH)`, so the next step's MAC can be
  taken while the current update runs.

Two points where the published description is not self-consistent:

* **Waveform example.** The example waveform shows the spike on the case whose arithmetic
  gives a negative `V'mid`. The RTL follows the arithmetic of the text, as in the worked
  example above.
* **Gate type.** The in-cell gate is called both NOR and NAND. NOR is the one that forms the
  product and is used here.

Not represented at all:

* the separate supply voltages of the three parts;
* the low-threshold pass transistors;
* the complementary bit lines (WBLB, RBLB);
* any energy or timing figure.

## Capacity

One pass computes a layer of at most 256 inputs and 32 neurons with 4-bit weights.

The networks used to evaluate the method are larger:

* 2312-256-128-10 needs 625,920 weights;
* 140-128-128-128-10 needs 51,968 weights.

Both exceed the 8,192 weights and 32 potentials stored here. Only their final 128-10 layers
fit in one pass. Running a whole network needs tiling: reloading weights, keeping more
potentials, and accumulating partial sums. No such scheme is described, and none is
implemented.

## Files

`rtl/` holds one module or package per file:

* `ldlif_pkg.sv`: sizes and the VMEM_MUX encoding;
* `ldlif_cim_top.sv`: the layer engine;
* `cim_mac.sv`, `mac_block.sv`, `adder_tree.sv`, `wl_driver.sv`: synaptic array;
* `scaler.sv`;
* `ld_lif.sv`, `cim_buffer.sv`, `lif_sequencer.sv`, `vmem_neuron.sv`, `vmem_bitcell.sv`:
  neuron array.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each compares the block
against an independent reference model and prints
`TB_RESULT checks=N failures=M`. Highlights:

* `tb_vmem_neuron` checks the worked example above plus random operands.
* `tb_lif_sequencer` checks the word-line pattern of every cycle, the bank swap and
  back-to-back issue.
* `tb_ldlif_cim_top` runs the full-size design end to end, with all parameters at their
  defaults. It writes all 8,192 weights and runs 80 time steps against a reference model,
  checking spikes, potentials, the 4-cycle start-to-spike latency and the 3-cycle issue rate.
  It also requires that each of these happens at least once:
  * a spike and a non-spike;
  * scaler saturation and a negative decay;
  * back-to-back steps and a potential write;
  * steps from both banks;
  * a weight rewrite.

`tb_workload_output_layer` runs the 128-input, 10-neuron output layer shared by the two
evaluation networks on the full-size design, 100 time steps each, issued as fast as
`ready` allows. It uses 3-bit weights with a positive decay in one run and 4-bit weights
with a negative decay in the other, and checks every step against the reference model.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
  rtl/ldlif_pkg.sv tb/tb_ldlif_cim_top.sv --top-module tb_ldlif_cim_top -Mdir obj
./obj/Vtb_ldlif_cim_top
```

Replace `tb_ldlif_cim_top` with any other testbench name to run it. The full-size build
takes about a minute of C++ compilation; the simulation itself runs in well under a second.
