# Vanilla-RNN energy reconstruction for a liquid-argon calorimeter readout FPGA

The back-end electronics of the ATLAS liquid-argon calorimeter receive, for
every calorimeter channel, one digitised sample of the shaped detector pulse
per LHC bunch crossing (every 25 ns, 40 MHz). From these samples the
deposited transverse energy has to be computed for every channel and every
bunch crossing, for 384 channels per FPGA, within 125 ns. Pulses of
successive collisions overlap, which degrades the classical optimal
filter; a small recurrent neural network does better, especially when two
deposits follow each other closely.

This RTL implements that network as firmware. For each channel and bunch
crossing it takes the last five samples of the channel, runs them through
five recurrent cells with an 8-element state and a dense output layer, and
produces one energy. To fit 384 channels into the multipliers of one FPGA,
each network instance is time-multiplexed: it runs at 14 times the
bunch-crossing rate (560 MHz) and serves 14 channels, one sample per clock.
28 instances cover 392 channel slots.

The architecture (network shape, word widths, quantisation per data
category, non-chained DSP use, reuse of the input computation across cells,
per-channel weights in memory, duplicated recurrent weights, 28 x 14
multiplexing) follows a published firmware design for a Stratix 10 FPGA.
That design was written in VHDL and its source was not published; the
pipeline, interfaces, fixed-point binary points and all other details here
are this implementation's own, and are listed in
[Departures and choices](#departures-and-choices).

## The network

A window is the five latest samples of one channel, `x1 .. x5`, oldest
first. The oldest sample lies before the pulse of the bunch crossing of
interest and lets the network see pile-up from earlier deposits; the energy
refers to the second sample of the window. With `W` (kernel, 8), `B` (bias,
8), `R` (recurrent kernel, 8x8), `Wd` (dense weights, 8) and `Bd` (dense
bias) trained per channel:

```
U(x)  = W * x + B                      (scalar times vector, plus bias)
S1    = ReLU(U(x1))                    (first cell: no previous state)
Sk    = ReLU(S(k-1) x R + U(xk))       k = 2..5, T_j = sum_i S_i R[i][j]
E     = sum_i S5_i Wd_i + Bd           (dense layer, linear output)
```

`ReLU(t) = 0 for t <= 0, t otherwise.` The four recurrent cells share one
matrix `R`; all five cells share `W` and `B`.

## Number formats and quantisation

| category               | width | binary point (this RTL) | leaving a computation |
|------------------------|-------|-------------------------|-----------------------|
| samples, energies      | 19    | 10 fraction bits        | energy rounded        |
| internal results U,T,S | 19    | 10 fraction bits        | truncated (floor)     |
| weights W,B,R,Wd,Bd    | 16    | 12 fraction bits        | rounded offline       |

The widths are those of the original firmware; where the binary point sits
was not published, so `DATA_FRAC` and `WEIGHT_FRAC` in `rnn_pkg` are a choice
(samples up to +-256, weights up to +-8). Change them together with the
scaling of weights and samples in software.

A product of a 19-bit sample or state and a 16-bit weight has 22 fraction
bits and fits the 37-bit result of a DSP used in its 19x18 mode. Internal
results are cut back to 19 bits by dropping the 12 low bits (truncation
toward minus infinity) and by dropping the high bits without saturation:
formats are meant to be sized for the trained network so that nothing
overflows, and a 19-bit overflow simply wraps. Only the final energy is
rounded (half toward plus infinity: add half an LSB, then truncate). Rounding
internal results would cost adders and latency for almost no gain in
resolution; rounding the weights and inputs is done before they reach the
FPGA. Exactly where each truncation happens:

* `U`: the products `W_i*x` come from DSPs in their dual mode (two
  independent products per DSP); `B_i*2^10` is added in logic at full
  precision and the sum is truncated once.
* `T`: each DSP sums two products internally (`S_a R_aj + S_b R_bj`); each of
  the four pair sums per output is truncated to 19 bits, and the three
  remaining additions are 19-bit adders in logic. `U` is then added in 19
  bits and ReLU applied.
* `E`: the four pair sums (bias through the first DSP's adder) are added at
  full precision and rounded once.

`tb/rnn_ref_pkg.sv` states these rules as integer arithmetic and is the
reference all testbenches compare against.

## Computing U once per sample: the delay taps

`U(x)` depends on the sample only. A given sample `x(t)` is the newest
sample of the window of crossing `t`, the fourth of the window of `t+1`,
and so on: it is needed by cell 5 now, by cell 4 one crossing later, ...,
by cell 1 four crossings later. Computing `U` separately in every cell
would repeat the same multiplication five times. Instead `first_cell`
computes it once, when the sample arrives, and pushes `{valid, slot, U}`
into a tapped shift register (`tap_delay_line`). Every cell reads the tap
holding `U` of its own sample at the cycle it needs it. Dropping the four
duplicate kernel units and the recurrent product of cell 1 saves about a
tenth of the multipliers (272 instead of 304 per network).

Two delays add up for cell `k`:

* its sample is `5-k` crossings older than the newest one, and one channel
  recurs every `MUX` cycles, so `(5-k)*MUX` cycles;
* cell `k` starts `cell_start(k)` cycles after the newest `U` appeared,
  because the state has to travel through the cells before it:
  `cell_start(1) = 0`, `cell_start(k) = FIRST_LAT + (k-2)*CELL_LAT`.

`u_tap(k, MUX) = (5-k)*MUX + cell_start(k)` in `rnn_pkg`. For `MUX = 14`:

| cell | sample    | start cycle | tap delay |
|------|-----------|-------------|-----------|
| 1    | x(t-4)    | 0           | 56        |
| 2    | x(t-3)    | 1           | 43        |
| 3    | x(t-2)    | 6           | 34        |
| 4    | x(t-1)    | 11          | 25        |
| 5    | x(t)      | 16          | 16        |

This only works if a channel's samples are exactly `MUX` cycles apart, which
is why the input is a gap-free slot stream (`channel_mux`). `first_cell`
asserts that the slot found at the cell-1 tap equals the slot being
processed. A window is valid only if all its five samples were valid; the
valid bits travel with `U` through the taps and with the state through
the cells, so windows reaching into a missing crossing or into the first
four crossings after reset come out with `energy_valid` low.

## Time multiplexing and per-channel weights

A network instance (`vanilla_rnn`) processes one sample per clock. Slot
`s` of its stream carries channel `s` of its group, slot numbers cycling
0..MUX-1. Every unit is a plain pipeline without stalls: one new
(channel, crossing) pair enters per cycle and every pipeline stage carries
its slot number and valid bit.

Each channel has its own weights, so each weight memory has one row per
slot, and a unit reads the whole row of the slot it is about to process in
one cycle (the read is issued with the data, the row arrives one cycle
later, aligned with the unit's input register):

| memory      | row contents          | read ports          |
|-------------|-----------------------|---------------------|
| kernel/bias | W[0..7], B[0..7]      | first cell          |
| recurrent A | R[0..63]              | cells 2 and 3       |
| recurrent B | R[0..63], same data   | cells 4 and 5       |
| dense       | Wd[0..7], Bd          | dense layer         |

The recurrent matrix is stored twice, each copy serving two cells, so that
each copy can sit next to the cells that read it; the two copies are
always written together. Weights are written one 16-bit value at a time
(`cfg_we`, slot `cfg_ch`, address `cfg_addr`): `R[i][j]` at `i*8+j`
(0..63), `W` at 64..71, `B` at 72..79, `Wd` at 80..87, `Bd` at 88.
Loading may overlap with processing; a channel's results are meaningless
while its own row is being rewritten.

## Pipeline and latency

| stage                       | cycles | constant     |
|-----------------------------|--------|--------------|
| kernel/bias (memory + DSP)  | 2      | `KERNEL_LAT` |
| first cell (ReLU register)  | 1      | `FIRST_LAT`  |
| each of cells 2..5          | 5      | `CELL_LAT`   |
| dense layer                 | 5      | `DENSE_LAT`  |
| newest sample to energy     | 28     | `NET_LAT`    |

A recurrent cell: input register while the weight row is read; DSPs
(pair products); first adder level; second adder level; add `U`, ReLU,
register. In `lar_rnn_firmware` the energies of all channels for one
crossing are presented together `NET_LAT + MUX` = 42 clock edges after
the edge that sampled the crossing's `bc_strobe` (75 ns at 560 MHz). The
original firmware takes 65 cycles (116 ns) with deeper pipelining for
timing closure; how its pipeline is split was not published, and the stage
boundaries here have not been timed on an FPGA.

## The firmware top, `lar_rnn_firmware`

```
samples[384] --+--> channel_mux --> vanilla_rnn --> channel_demux --+--> energy[384]
 (per crossing)|     (net 0)        (14 slots)        (net 0)       |   energy_valid[384]
               +--> ...           x 28 networks                 ...-+   energy_strobe
cfg_* -----------------------> weight memories of network cfg_net
```

Channel `c` is slot `c % 14` of network `c / 14`; the eight slots without a
channel are fed invalid. The design has one clock at `MUX` times the
crossing rate and a `bc_strobe` input: a one-cycle pulse exactly every `MUX`
cycles, with the crossing's samples on `samples[]` and a common `bc_valid`.
`channel_mux` serialises a network's samples over the next `MUX` cycles and
asserts if a strobe arrives at any other spacing. `channel_demux` collects a
network's energies back into per-channel registers and pulses
`energy_strobe` when the last slot of a round is in. The reset `rst` is
synchronous and active high; it clears valid bits and pipeline tags but
not the weight memories.

Parameters (defaults): `N_NET = 28`, `MUX = 14`, `N_CH = 384`. All shape
and format constants live in `rnn_pkg`.

## Resource arithmetic

Per network: 8 kernel products, 4 cells x 8 outputs x 4 DSP pairs (256
products), 4 dense pairs (8 products): 272 products. At two 19x18 products
per DSP that is 136 DSPs, and 28 networks take 3808 of the 5760 DSP blocks
(11,520 19x18 multipliers) of the Stratix 10 device the design was
built for, 66%, which agrees with the usage reported for the original
firmware. The RTL has exactly these 136 DSP models per network: 4
`dsp_mult2` for the kernel products, 128 `dsp_mac` in the cells and 4 in
the dense layer. Weight storage per network is 14 x (16 + 2 x 64 + 9) x 16 bits
= 34 kbit.

## Departures and choices

Taken from the original design: the network shape (5 cells, state of 8,
dense layer to one output, ReLU); 19-bit data and internal words and
16-bit weights; truncation inside, rounding of the output, no saturation;
DSPs in 19x18 mode summing two products internally, with the remaining
additions in logic instead of DSP cascades; the single computation of
`W*x + B` handed to the other cells, and no recurrent product in the first
cell; weights in memory, one set per multiplexed channel, with the
recurrent set duplicated so that each copy serves two cells; 28 networks
multiplexing 14 channels each for 384 channels.

This implementation's own choices, where nothing was published:

* binary points (10 fraction bits for data, 12 for weights);
* orientation of the matrix product (`T_j = sum_i S_i R[i][j]`) and the
  order in which samples meet cells (cell 1 = oldest sample);
* a dense-layer bias and a linear output;
* the precision at which the bias is added (full product precision) and
  where pair sums are truncated;
* the pipeline (28 cycles instead of the original 65) and all interfaces:
  bunch-crossing strobe, slot stream, configuration port, address map;
* delays built as flip-flop shift registers with one tap per cell (the
  original uses delay memories below 450 MHz and logic above);
* which cells share a copy of the recurrent weights (2+3 and 4+5);
* memories written as register arrays; a vendor flow would map them to
  on-chip RAM blocks.

Not in the RTL: the placement constraints that give every network the same
shape on the die, and the per-network partitions used for incremental
compilation. They are tool settings, not logic, but the original needed
them to reach 560 MHz.

## Files

| file | contents |
|------|----------|
| `rtl/rnn_pkg.sv` | sizes, formats, types, address map, latencies, tap delays, truncation/rounding |
| `rtl/dsp_mac.sv` | DSP model: `a0*b0 + a1*b1 + c`, registered |
| `rtl/dsp_mult2.sv` | DSP model, dual mode: `a0*b0` and `a1*b1`, registered |
| `rtl/kernel_bias_unit.sv` | `U = W*x + B` for one sample per clock |
| `rtl/tap_delay_line.sv` | shift register exposing all stages |
| `rtl/relu_vec.sv` | element-wise ReLU |
| `rtl/first_cell.sv` | kernel unit, delay taps for cells 2..5, first state |
| `rtl/recurrent_matmul.sv` | `S x R` with pair DSPs and a logic adder tree |
| `rtl/rnn_cell.sv` | cells 2..5 |
| `rtl/dense_layer.sv` | output layer with rounding |
| `rtl/weight_memory.sv` | per-slot weight rows, several read ports |
| `rtl/vanilla_rnn.sv` | one network with its memories |
| `rtl/channel_mux.sv`, `rtl/channel_demux.sv` | crossing-parallel to slot stream and back |
| `rtl/lar_rnn_firmware.sv` | 28 networks, 384 channels |
| `tb/rnn_ref_pkg.sv` | integer reference model and random weight sets |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_pulse_train` and `tb_lar_rnn_full` |
| `tb/lar_tb_body.svh` | body shared by the two firmware-level testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops; a
watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rnn_pkg.sv tb/rnn_ref_pkg.sv tb/tb_vanilla_rnn.sv \
    --top-module tb_vanilla_rnn -Mdir obj_vanilla -o sim
obj_vanilla/sim
```

Other modules are found in `rtl/` by file name. Replace `tb_vanilla_rnn` by
any other testbench. All testbenches compare against `rnn_ref_pkg`, check
the exact cycle at which results appear, and use random weights (up to
+-1 for W, Wd, Bd, +-0.5 for R and B) and samples (-8..+16), so that
ReLU clips part of the lanes and rounding changes part of the energies.

* unit testbenches (`tb_dsp_mac` ... `tb_channel_demux`) use 3 to 5 slots;
* `tb_vanilla_rnn`: one network, 4 slots, distinct weights per slot, some
  invalid samples;
* `tb_lar_rnn_firmware`: 2 networks x 4 slots for 7 channels (one spare),
  weights loaded while crossings already run, one invalid crossing; it
  counts warm-up windows, windows hit by the invalid crossing, ReLU
  clipping in the first and later cells and rounding effects, and fails
  if any of them never happened;
* `tb_pulse_train`: one network at the default 14 slots fed with
  calorimeter-like sample trains: bipolar pulses from hard deposits of
  0..5 GeV about every 30 crossings, pile-up deposits and noise, built from
  a stand-in pulse formula given in the file;
* `tb_lar_rnn_full`: the same test on the full firmware with no parameter
  changed (28 x 14, 384 channels, about 34,000 cycles of weight loading
  and 14 crossings); it builds in about two minutes and runs in seconds.

What has not been verified: timing at 560 MHz or any FPGA mapping, and
agreement with a trained network's floating-point output (no trained
weights or simulated pulses were available; the reference model checks
the RTL against its own fixed-point rules).
