# ADC-less in-memory computing tile for spiking neural networks

In an analog in-memory-computing (IMC) accelerator, a resistive crossbar
performs a matrix-vector product in one step. The input spikes drive the
wordlines, and each bitline collects the sum of the conductances on the
driven rows. The expensive part is reading that bitline. A conventional
design shares a multi-bit ADC among several bitlines through a multiplexer,
and those ADCs dominate energy, area and cycle time.

This design removes the ADCs. Every bitline gets a 1-bit sense amplifier
(SA). The sensed bits of the four weight-bit columns of a neuron are shifted
and added into a small signed *binary partial sum*. The partial sums of many
crossbars are added, and a digital leaky-integrate-and-fire (LIF) neuron
integrates the total into its membrane potential. The network is trained to
tolerate the coarse 1-bit quantisation, so the hardware only has to
reproduce that arithmetic exactly. This RTL reproduces it bit for bit.

The RTL covers one **tile** of such an accelerator: input buffering, the
crossbars, the partial-sum accumulation, the LIF neurons and output
buffering. It processes one time step of a spike sequence per clock. The
analog crossbar and its SAs are a behavioural model with integer
conductances. Everything else is synthesizable.

## Hierarchy

```
adcless_tile                      top: one layer slice, one time step per clock
 ├─ spike_buffer  (tile buffer)   input spikes of up to T_MAX=20 time steps
 ├─ processing_element × N_PE=4
 │   ├─ spike_buffer (PE buffer)  two-entry ping-pong of the PE's input slice
 │   ├─ adcless_crossbar × N_XB=15
 │   │   ├─ row_decoder           spikes -> wordlines, programming row select
 │   │   ├─ xbar_sa_array         ReRAM cells + one SA per bitline (behavioural)
 │   │   └─ shift_add             SA bits -> signed partial sum per neuron
 │   └─ ps_accumulator            sum over the PE's crossbars
 ├─ ps_accumulator                sum over the PEs (tile PS accumulation)
 ├─ lif_neuron × N_NEURON=8       membrane potential, leak, fire, soft reset
 ├─ spike_buffer  (output buffer) output spikes of every time step
 └─ sew_iand                      residual IAND merge on the output read path
adcless_pkg                       constants, mapping/reset enums, helpers

hp_adc_crossbar                   separate: multi-bit-ADC crossbar for the
                                  first and last layers (see below)
```

With the defaults, a tile sees `4 × 15 × 64 = 3840` input spikes per time
step. Every crossbar holds the weights of the same 8 output neurons for a
different block of 64 inputs. The tile therefore computes, for each neuron
j, the sum over all 60 crossbars i of PS(i,j). This corresponds to a layer
whose weights have been split along the input dimension across crossbars.
Crossbar `c` of PE `p` receives inputs `[(p·15 + c)·64 +: 64]`.

## Weights on binary cells, and what a sense amplifier returns

This is the part that decides the numbers. Weights are signed 4-bit integers
in [-8, 7]. They are split into a positive magnitude `max(W,0)` and a
negative magnitude `max(-W,0)`, each 4 bits. Every bit goes into its own
1-bit ReRAM cell: ON means low resistance, and the on/off conductance ratio
is 150. Two layouts are supported. `MAP_SCHEME` chooses one at elaboration
time.

**Column-pair mapping (`MAP_COLPAIR`, default).** One row per input and
eight columns per neuron:

| column          | holds                                   |
|-----------------|-----------------------------------------|
| `8j + i`, i=0..3 | bit i of the positive magnitude of W[k][j] |
| `8j + 4 + i`     | bit i of the negative magnitude            |

A spike drives its row. Each SA implements the Heaviside function `h`: it
reports 1 if at least one driven cell on its bitline is ON. The partial sum
of neuron j is

    PS_j = Σ_i 2^i · h_pos,i − Σ_i 2^i · h_neg,i

A 64×64 array holds 8 neurons.

**Row-pair mapping (`MAP_ROWPAIR`).** Two rows per input and four columns
per neuron. Row `2k` holds the positive magnitude and is pulled toward Vdd
when spike k is 1. Row `2k+1` holds the negative magnitude and is pulled
toward Gnd. The SA compares the bitline with Vdd/2, so it senses the
**sign** of (driven ON cells on even rows − driven ON cells on odd rows):

    PS_j = Σ_i 2^i · sign_i,    sign ∈ {+1, 0, −1}

A 64-input crossbar then has 128 physical rows, and 64 columns hold 16
neurons.

The ternary `sign` needs a comment. The training that this hardware must
match uses `sign(0) = 0`, which occurs for any column whose driven cells are
balanced or all OFF. With sparse spikes that case is common. A single
latch-type SA has no third state. The model therefore gives each SA two
output bits, `sa_hi` (above the reference) and `sa_lo` (below it). A balanced
bitline reads as 0 on both. In silicon this needs a second comparator or a
dead zone. This is the one place where the RTL goes beyond "one bit per
bitline".

**Range.** Since the positive magnitude is at most 7, a crossbar's PS lies in
[−15, 7] for real weights. The datapath carries 5 signed bits per crossbar,
[−15, 15].

**Leakage and the SA reference.** `xbar_sa_array` counts current in units of
one OFF cell: ON = 150, OFF = 1. In the column-pair array, the SA reference
is `ROWS` units, the most that OFF cells can leak. One ON cell always gives
at least 150 units. The 1-bit decision is exact as long as the array has
fewer than 150 rows, which holds for all evaluated crossbar sizes (32, 64
and 128); an elaboration-time assertion checks it. In the row-pair array,
both rows of a pair are always driven together, so their OFF leakage
cancels. Device variation, IR drop and noise are not modelled.

## The LIF neuron

`lif_neuron` holds a 12-bit signed membrane potential `U` and the last
spike `S`. One enabled clock is one time step:

```
base = S ? U − Vth : U            (soft reset of the previous spike)
U'   = sat12((base >>> n) + in)   (leak λ = 2^−n, n ∈ {0,1,2}; add the PS sum)
S'   = U' ≥ Vth
```

`U'` and `S'` are registered on the same edge. The spike is therefore
visible in the same step as the potential that caused it, and the threshold
is subtracted one step later. The reset is applied *before* the leak. The
textbook LIF equation subtracts the reset after the leak, but the hardware
datapath (subtractor → MUX → shifter → adder) applies it first. The two
orders agree for λ = 1. Saturation to [−2048, 2047] mirrors the clamp of the
integer quantiser. `RESET_MODE = RESET_HARD` replaces `U − Vth` by 0.

Reference trace (Vth = 45, λ = 1, `leak` = 0), used as a test vector:

| step  | 1  | 2  | 3      | 4  | 5      | 6   | 7      | 8  | 9  |
|-------|----|----|--------|----|--------|-----|--------|----|----|
| in    | 20 | 15 | 30     | 20 | 15     | −10 | 70     | 2  | 2  |
| umem  | 20 | 35 | **65** | 40 | **55** | 0   | **70** | 27 | 29 |
| spike | 0  | 0  | 1      | 0  | 1      | 0   | 1      | 0  | 0  |

Note that the `leak` port holds the shift `n`, not λ: `leak = 0` means
λ = 1.

## Tile operation and timing

1. **Program weights.** Set `prog_en = 1` and give `prog_pe`, `prog_xb`,
   `prog_row` (the physical row) and `prog_data` (one bit per column,
   1 = ON). One row is written per clock. Programming is not allowed while
   `busy`; an assertion checks this.
2. **Write inputs.** `in_wr_en`, `in_wr_addr = t`, `in_wr_data` = the 3840
   spikes of time step t, for t = 0..T−1.
3. **Run.** Pulse `start` with `cfg_vth`, `cfg_leak` and `cfg_steps = T`
   (T ≤ 20). The start clears all membrane potentials and spikes. The
   controller then reads one time step per clock from the tile buffer.
   Each step passes through this pipeline:

   | clocks after the tile-buffer read | stage |
   |---|---|
   | 1 | tile buffer data valid, written into the PE buffers |
   | 2 | PE buffer read |
   | 3 | wordlines driven, SAs latch (compute-sense cycle) |
   | 4 | shift-and-add, PE accumulation register |
   | 5 | tile PS accumulation register |
   | 6 | LIF update (`umem`, `spike`) |
   | 7 | output spikes written to output buffer address t |

   `done` pulses for one clock. It is high after the `(T + 8)`-th clock
   edge counted from the edge that samples `start`. Throughput is one time
   step per clock, and all neurons of the tile advance together.
4. **Read outputs.** Set `out_rd_en` and `out_rd_addr = t`; the data comes
   one clock later with `out_rd_valid`. With `out_sew_bypass = 0`, the
   returned spikes are `out_skip & ~y`. This is the IAND spike-element-wise
   merge `g = (1 − y)·x` that closes a residual block. Here y are the
   stored output spikes and x are the block's input spikes supplied by the
   host. `out_skip` and `out_sew_bypass` are sampled together with the
   read.

`umem` exposes every neuron's membrane potential for observation.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 4 | PEs per tile (the count drawn in the architecture figure) |
| `N_XB` | 15 | crossbars per PE (as drawn) |
| `XBAR` | 64 | inputs per crossbar. 32, 64 and 128 were evaluated; 64 is used here |
| `N_COL` | `XBAR` | physical columns per crossbar |
| `MAP_SCHEME` | `MAP_COLPAIR` | weight mapping, see above |
| `T_MAX` | 20 | time steps held in the buffers (longest evaluated sequence) |
| `RESET_MODE` | `RESET_SOFT` | LIF reset |
| `NB_W`, `U_W`, `LEAK_W`, `RON_ROFF` | 4, 12, 2, 150 | package constants |

The following are consequences of the design, not settings: 4-bit weights
on 1-bit cells, one SA per column, a 12-bit membrane, λ = 2^−n with n ≤ 2,
and one time step per clock.

The row-pair mapping at `XBAR = 64` gives 16 neurons per tile. The
partial-sum widths grow with `$clog2(N_XB)` and `$clog2(N_PE)`.

## Simulating

All modules are in `rtl/`, one per file; the package must come first. For
example, the end-to-end test at reduced size:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/adcless_pkg.sv tb/adcless_ref_pkg.sv tb/tb_adcless_tile.sv --top tb_adcless_tile
./obj_dir/Vtb_adcless_tile
```

The other testbenches build the same way, with their own file and `--top`:
`tb_adcless_tile_full`, the PE and tile tests need `tb/adcless_ref_pkg.sv`,
the others only the package. Verilator stops on width warnings by default;
add `-Wno-fatal` if a changed parameter set produces some.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
with a watchdog. `tb/adcless_ref_pkg.sv` is an independent integer model of
the crossbar partial sums and the LIF step, used by the PE and tile tests.

| testbench | what it checks |
|---|---|
| `tb_lif_neuron` | the reference trace above; 200 random sequences against the model, soft and hard reset, all leaks, saturation |
| `tb_row_decoder` | wordline fan-out for both mappings, one-hot programming decode |
| `tb_xbar_sa_array` | SA bits against counted ON cells, the OFF-leakage corner (128 rows all driven, one ON cell), hold |
| `tb_shift_add` | exhaustive SA patterns for one neuron, both mappings |
| `tb_adcless_crossbar` | random weights and spike densities, both mappings, one-clock sense latency |
| `tb_spike_buffer`, `tb_ps_accumulator`, `tb_sew_iand` | memory, sums and IAND truth table against models |
| `tb_processing_element` | streaming spikes back to back, both mappings, 4-clock latency |
| `tb_adcless_tile` | 17 end-to-end runs at 2×4×32, both mappings; counts spikes, resets, both leak shifts, saturation, full-scale and zero PS, IAND suppression, bypass, back-to-back runs |
| `tb_hp_adc_crossbar` | 300 conversions with random and extreme 8-bit weights, ADC saturation, 8-clock conversion, result hold |
| `tb_adcless_tile_full` | the default-size tile (no parameter overrides): one output pixel of a 3×3, 32-channel convolution (288 inputs on five crossbars) for 20 steps at ~6 % spike rate, then random weights on all 60 crossbars for 10 steps |

The full-size test takes a few minutes to build and about two minutes to
run with Verilator.

## The multi-bit-ADC crossbar

The first and last layers of the networks keep 8-bit weights and a
conventional read-out. `hp_adc_crossbar` models such a crossbar: 64 inputs,
64 columns and 4 neurons. Each weight uses 16 columns: 8 for the positive
magnitude and 8 for the negative magnitude, one bit per column. Eight
bitlines share one 5-bit flash ADC through an 8-to-1 multiplexer. A
conversion therefore takes 8 clocks: `start` latches the spikes, `busy` is
high for 8 clocks, and `ps_valid` rises 8 clocks after the edge that
sampled `start`. In mux phase p, every ADC reads bit p of one magnitude. The
ADC levels are multiples of the ON-cell current, so the code is the count of
driven ON cells, saturated at 31 (a 64-row column can need 6 bits). The
codes are shifted by their bit position and added or subtracted:
`PS_j = Σ_i 2^i (min(n_pos,i, 31) − min(n_neg,i, 31))`, 14 bits signed. The
signed column layout, the ADC levels and the handshake are choices of this
model. `tb_hp_adc_crossbar` checks it against that formula, including ADC
saturation and the 8-clock conversion.

## How far it reaches, and where it departs

What the tile runs: one slice of one SNN layer. It covers up to 3840 inputs
per neuron, 8 output neurons (16 with the row-pair mapping) and up to 20
time steps. This is enough for one output position of a 3×3 convolution
with 32 input channels, as in the gesture-recognition network. A complete
network needs the following, none of which is here:

- **Many tiles and an interconnect between layers.** The original work sizes
  these per network with a floorplanning simulator and does not describe
  them.
- **Time-sharing of LIF modules across spatial positions.** Each LIF module
  here holds a single membrane potential. The original places the LIF
  modules at tile level so that they can be shared among neurons, but it
  does not say how.
- **Tiles of multi-bit-ADC crossbars for the first and last layers.** The
  crossbar itself is provided as `hp_adc_crossbar` (see above), but no
  tile is built around it.
- **Max pooling and the full-precision 1×1 output convolutions of the
  optical-flow network.** Their placement in hardware is not specified.

Choices made in this RTL where the source is silent:

- The counts of PEs and crossbars.
- All crossbars of a tile sharing the same output neurons.
- The buffer organisation (including the two-entry PE buffer).
- The host ports, controller and pipeline registers.
- The column order inside a weight (LSB first, positive group first).
- The SA reference level of the column-pair array.
- The second SA output bit for a balanced bitline.
- Saturating arithmetic and floor rounding of the leak shift.
- Placing the IAND merge on the output-buffer read path.
- Treating `XBAR` as the number of logical inputs per crossbar, so that the
  row-pair mapping doubles the physical rows. This follows the grouping used
  in training, which splits inputs into groups of `XBAR` for both mappings.
