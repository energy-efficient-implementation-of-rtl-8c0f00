# A spiking-recurrent-cell network in integer logic

This is synthesizable SystemVerilog for a small spiking neural network classifier. Its hidden
layer uses **Spiking Recurrent Cells (SRC)**, not leaky integrate-and-fire neurons. An SRC is a
recurrent cell whose state produces spikes by itself, with no reset. A second, slower state
variable gives it a refractory period. The original model uses `tanh`, a logistic function
and floating point. Here every one of those is replaced by integer adds, shifts, compares,
a clamp and one small multiply, so a neuron costs only a few dozen LUTs.

The network classifies 28 x 28 digit images presented as **spiking traces (SpTs)**. A trace
is a sequence of binary images, typically 220: 20 blank images that let the network settle,
then 200 random spike images drawn from one digit. The default build is 784-100-10:
- 784 input spikes per image;
- 100 SRC neurons, fully connected;
- 10 integrator ("IR") output neurons;
- a comparator that names the winning class and scores it against the expected label.

At 100 MHz one trace takes 220 x 792 = 174,240 clocks, or 1.74 ms.

## 1. The neuron arithmetic

All neuron quantities are integers scaled by 1000, so the value 1.0 is stored as 1000. The
state of neuron `n` after image `t` is:

| signal | width | meaning |
|---|---|---|
| `h`  | 11 bit signed | output ("membrane") value, saturates at -1024 / +1023 |
| `hs` | 11 bit signed | slow refractory variable |
| `z`  | 10 bit unsigned | relaxation factor used in the last update (x1024) |
| `I`  | 32 bit signed | input current |

For each image, `src_neuron` first builds the input current. It takes one input per clock:

    I[t] = beta * I[t-1] + sum over inputs i with spike_i = 1 of W[n][i]

Then, in a single update cycle, it applies:

    z[t]  = (h[t-1] < 500) ? z_hyp : z_deep            -- z_deep = 100, z_hyp from the zmax port
    x[t]  = I[t] + ((h[t-1] - (hs[t-1] <<< 2) - 3000) <<< 1)
    h[t]  = clamp(((x[t] <<< 1) + x[t]) >>> 2, -1024, +1023)
    hs[t] = ((z[t] * (hs[t-1] - h[t-1])) >>> 10) + h[t-1]
    spike = (h[t] >= 500)

Each line replaces a term of the floating-point cell
`h = tanh(I + 2h - 7hs - 6)`, `hs = z*hs + (1-z)*h`:

- **Recurrent gains.** The gain on `hs` is rounded from -7 to -8. A factor 2 can then be
  taken out, and the gains become shifts.
- **`tanh`.** It becomes a clamped straight line of slope 3/4. That line is computed as
  `(2x + x) >> 2`.
- **Refractory update.** Dividing by 1000 is approximated by `>>> 10` (divide by 1024). The
  2.4 % error is absorbed into the value chosen for `z_hyp`.
- **Logistic gate on `z`.** It becomes a threshold at `h = 500`. Below the threshold `hs`
  relaxes slowly (`z_hyp`, about 0.9). While the cell is spiking, `hs` snaps quickly towards
  `h` (`z_deep`, about 0.1).

The `>>>` operators are arithmetic shifts. Negative values therefore round towards minus
infinity. The testbenches' reference models use floor division, so they reproduce this
exactly.

`z_hyp` is a run-time input (`zmax`). It sets the firing rate: raising it from 880 to 980
cuts the number of spikes by about 3x while accuracy stays nearly the same. The reference
setting is 900.

How a spike is defined: **`spike = h >= 500`**. This design reuses the `z` threshold for it.
The source description never gives the rule that turns `h` into the spike bit sent to the
next layer.

`beta` is realised as `1 - 2^-BETA_SHIFT`. The default `BETA_SHIFT = 0` gives `beta = 0`, so
each image's current stands alone. No value of `beta` was available.

**Saturation.** The equations clamp `h` at +/-1000. The original hardware listing instead
saturates at the limits of the 11-bit register, and its waveforms show `h = 1023`. This RTL
follows the hardware: the limits are `H_MAX = 1023` and `H_MIN = -1024` in `snn_pkg`.

A u-RESET image resets `h`, `hs` and `I` to 0.

## 2. Levels, the Binder and the image schedule

The network is a chain of **NetWorkLevels** with identical structure. Each level has:
- an *input interface* register, loaded on **Latch**;
- a weight matrix held in registers;
- a generate loop of neurons;
- a small control unit that runs the **Go / Ready** handshake (`level_ctrl`);
- an *output buffer*.

The levels are:

| level | module | neurons | inputs | output buffer |
|---|---|---|---|---|
| 0 | `level_inline` | - (SpT block RAM reader) | - | 784 spikes (`l0_pix`) |
| 1 | `level_src` | 100 SRC | 784 | 100 spikes (`src_spk`) |
| 2 | `level_ir` | 10 IR | 100 | ten 32-bit sums (`ir_val`) |
| 3 | `level_cmp` | 10 comparators | 10 | winning class (`digit`) |

The top, `snn_binder`, holds the **Binder**. It wires the levels together and contains the
control unit and micro-machine that paces them. For every image step it runs:

| clocks | Binder state | what happens |
|---|---|---|
| 1 | LATCH | every level copies the previous level's output buffer into its input interface |
| 1 | GO | every level starts; level 0 reads the next image from block RAM |
| 784 | WAIT | each SRC neuron adds one input per clock |
| 1 | WAIT | SRC update cycle (`h`, `hs`, `z`, spike) |
| 1 | WAIT | the level loads its output buffer and raises Ready |
| 1 | WAIT | the Binder sees every Ready |
| 3 | SETTLE | idle (`OVERHEAD - 5`) |

The total is **784 + 8 = 792 clocks per image**. The other levels finish well inside this
time: IR takes 100 clocks, the comparator 2 and level 0 takes 2.

All levels step together, so they form a **pipeline**. During one step, level 0 fetches
image k, the SRC level processes image k-1, the IR level image k-2 and the comparator image
k-3. A run of `num_images` images therefore lasts `num_images + N_SRC_LAYERS + 2` steps. The
last steps feed all-zero flush images, which score nothing.

The pipeline overlap is this design's choice. The source gives only the per-image cycle
count and the Go/Ready/Latch synchronisation, and its 174,240-clock figure covers the images
only, without pipeline fill.

### The side band: u-RESET, u-CMP, CMP_VAL

Every stored image carries six extra bits. They travel through the pipeline together with
the image, through every input interface and output buffer:

- **u-RESET** is set on the first image of a trace. Each level clears its neuron state when
  that image reaches it. The SRC level clears it one step before the IR level does, so no
  trace leaks into the next.
- **u-CMP** is set on the last image of a trace. When that image reaches the comparator, the
  winning class is compared with **CMP_VAL**, the expected class (4 bits). `cmp_cnt` counts
  the comparisons and `err_cnt` counts the mismatches. Accuracy is
  `1 - err_cnt / cmp_cnt`.

Because the control travels with the data, a run may hold any number of traces back to back,
each of any length, for example 20 + 200, 5 + 50 or 2 + 20 images.

## 3. Memories

**SpT memory** (`spt_bram`). The word layout is, from the MSB down:
`{cmp_val[3:0], ucmp, ureset, pix[783:0]}` (type `spt_word_t`). Pixel `p` is image row
`p / 28`, column `p % 28`. The memory has one write port for loading and one read port with
one clock of latency. The default depth is 15,840 words, which is 72 traces of 220 images.
That is what 341 Artix-7 36 Kb block RAMs hold at 790 bits per word.

**Weights** (`weight_matrix`). The weights are held in ordinary registers, so that every
neuron sees its whole row with no read latency.
- SRC weights are signed `W_BITS`-bit values; the default is 9 bits, -256..255. For 2- to
  8-bit quantised weights, set `W_BITS` lower or load values that are already narrow.
- IR weights are one bit each: bit 1 means +10 and bit 0 means -1.

In the original flow the trained matrices are compiled into the bitstream. Here they are
written one word per clock through the load ports.

## 4. Scoring and display

`level_cmp` selects the largest of the ten IR sums. On a tie, the lowest index wins.

`hub75_display` drives a 32 x 64 RGB LED panel:
- **Left half:** the recognised digit, as a green seven-segment glyph.
- **Right half:** the current input image, in white.
- **Scan:** 1/16. For each row address `a`, the driver shifts 64 pixels for rows `a` and
  `a + 16`, pulses LAT, then lights the row with OE low for `HUB_ON` clocks.

The layout, the glyphs and the timing are this design's own.

`reset_system` synchronises the active-low reset switch. It then holds `rst` for `RST_HOLD`
clocks after the switch is released. Its flip-flops power up with reset asserted, so the whole
design is held in reset from the first clock edge, before the switch has been sampled. These
power-up values are declaration initial values; an FPGA configuration loads them.

The 100 MHz clock is an input. No clock generator is included.

## 5. Top-level interface (`snn_binder`)

| port | dir | width | use |
|---|---|---|---|
| `clk` | in | 1 | 100 MHz |
| `sw_rst_n` | in | 1 | reset switch, 0 = pressed |
| `start`, `num_images` | in | 1, 15 | start a run over images `0 .. num_images-1` |
| `zmax` | in | 10 | `z_hyp`, e.g. 900 |
| `busy`, `done` | out | 1 | run status; `done` stays high until the next start |
| `spt_we`, `spt_waddr`, `spt_wdata` | in | 1, 14, 790 | write one image word |
| `w_we`, `w_layer`, `w_row`, `w_col`, `w_data` | in | 1, 1, 7, 10, 9 | write one SRC weight |
| `irw_we`, `irw_row`, `irw_col`, `irw_data` | in | 1, 4, 7, 1 | write one IR weight bit |
| `digit`, `scored`, `mismatch` | out | 4, 1, 1 | latest class; one-cycle pulse and result of a comparison |
| `err_cnt`, `cmp_cnt` | out | 32, 32 | error and comparison counters, cleared at start |
| `l0_pix`, `src_spk`, `ir_val` | out | 784, 100, 10x32 | output buffers of levels 0, last SRC, IR |
| `mon_h`, `mon_hs`, `mon_z` | out | 11, 11, 10 | state of SRC neuron 0 in the first SRC level |
| `latch_o`, `go_o` | out | 1 | the Binder's Latch and Go strobes |
| `hub_clk`, `hub_lat`, `hub_oe_n`, `hub_addr`, `hub_rgb0`, `hub_rgb1` | out | 1, 1, 1, 4, 3, 3 | HUB75 panel |

**Operation:**
1. Press and release the reset switch.
2. Load the weights and the traces.
3. Set `num_images` and pulse `start`.
4. Wait for `done`, then read `err_cnt` and `cmp_cnt`.

The load ports may be used only while no run is in progress.

**Parameters** (with their defaults):
- `N_SRC = 100`
- `N_SRC_LAYERS = 1`; set it to 4 for a 784-100-100-100-100-10 network
- `W_BITS = 9`
- `BETA_SHIFT = 0`
- `SPT_DEPTH = 15840`
- `OVERHEAD = 8`
- `RST_HOLD = 16`
- `HUB_CLK_DIV = 2`
- `HUB_ON = 256`

## 6. What follows the source and what does not

These follow the original design:
- the simplified equations and their constants (3000, 500, 100, `>>> 10`, the slope 3/4);
- the register widths (11/11/10 bits);
- the Binder / NetWorkLevel structure and the Latch/Go/Ready/Resetok signal names;
- 784 clocks plus 8 per image;
- the side-band bits;
- the -1/+10 IR weight coding;
- the 9-bit SRC weights held in registers;
- the argmax with error counting;
- a 32 x 64 HUB75 display.

These are choices made here, where the description is silent:
- the spike rule `h >= 500` and `beta = 0`;
- zero reset values;
- how the 8 extra clocks are spent;
- the pipelining of levels on successive images;
- the load ports and run control;
- the bit order of the side band;
- the IR integration schedule (one input per clock);
- the tie rule in the comparator;
- the comparison counter;
- the memory depth;
- everything about the display's layout and timing;
- the reset synchroniser.

Known differences from the original:
- **Saturation.** The equation text clamps `h` at +/-1000. The RTL saturates at -1024 / +1023,
  as the original hardware listing and waveforms do.
- **Multiplier.** The refractory update keeps one multiplier per neuron, `z * (hs - h)`. The
  original reports both "no DSPs" and "100 DSPs" for the same design. In this RTL the
  multiplier is 10 x 12 bits.
- **Weights.** No trained weights are included. Accuracy figures for MNIST and Fashion-MNIST
  therefore cannot be reproduced with this code alone.

## 7. Simulation

Every module has a self-checking testbench in `tb/`. Each compares against an integer
reference model or an independently written expectation, and ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5, compile the package first:

    verilator --binary --timing --assert -Irtl -Itb rtl/snn_pkg.sv \
        $(ls rtl/*.sv | grep -v snn_pkg) tb/tb_snn_binder.sv --top-module tb_snn_binder
    ./obj_dir/Vtb_snn_binder

`tb_snn_binder` runs the whole default-size network end to end, in about two seconds of
simulation:
- It loads synthetic ten-class weights.
- It runs a 220-image, a 44-image and two 22-image traces; one of them is deliberately
  mislabelled.
- At every Latch it compares the SRC spike vector, the state of neuron 0 and the ten IR
  sums with an integer model of the whole network.
- It checks that every image step takes 792 clocks and that the 220-image trace takes
  174,240 clocks.
- It checks the final scores.
- It fails if any of these mechanisms never occurs: u-RESET, a match, a mismatch,
  saturation at both limits, both `z` values, spikes, flush images, display rows.

`tb_snn_binder_deep` runs the same kind of test on the four-SRC-level network.

`tb_snn_binder_sweep` covers the two sweeps: narrow weights and different values of `z_hyp`.
- It builds the top with 5-bit weights.
- It runs three 44-image traces with `z_hyp` set to 880, 940 and 1000, and checks every step
  against the model.
- At 880 the traces are classified. At 940 and 1000 the neurons fire too slowly for any
  class to score within 40 images, so every trace comes out as digit 0. A short trace
  combined with a high `z_hyp` loses accuracy in the same way.

The block testbenches are `tb_src_neuron`, `tb_ir_neuron`, `tb_weight_matrix`, `tb_spt_bram`,
`tb_level_src`, `tb_level_ir`, `tb_level_cmp`, `tb_level_inline`, `tb_hub75_display` and
`tb_reset_system`. Some of them use reduced level sizes. `tb_src_neuron` tests the neuron at
its full 784 inputs.

## 8. Capacity

At the defaults, the design holds:
- the 784-100-10 network with 9-bit weights;
- any trace length up to the memory size. The traces evaluated for this network are
  20 + 200, 10 + 100, 5 + 50, 4 + 40 and 2 + 20 images.
- every `z_hyp` from 880 to 1000, because `zmax` is 10 bits wide;
- every weight width from 9 down to 2 bits.

It does not hold, at the defaults:
- **The four-level 784-100-100-100-100-10 network.** This needs `N_SRC_LAYERS = 4`.
- **A full 10,000-trace test set.** That is 2.2 M image words, so the memory must be
  reloaded in batches of up to 72 traces.
