# CiMBA: a compute-in-memory basecalling accelerator in SystemVerilog

A nanopore sequencer measures an ionic current while a DNA strand passes through a pore.
Basecalling turns that current trace into a string of bases (A, C, G, T) with a neural
network. State-of-the-art basecallers are CNN + LSTM networks followed by a CRF decoder.
Running them normally means shipping the raw samples to a GPU. The raw data is about ten
times the size of the called bases.

CiMBA calls bases next to the flow cell, in real time, on a small chip. The idea is to keep
every weight of the network stationary in analog compute-in-memory (CiM) crossbars. Phase
change memory (PCM) conductances hold the weights, and one crossbar read does a whole
512 x 512 matrix-vector product. Small digital units do everything around those products:

- the first convolution;
- batch norm and the activations;
- the LSTM gate arithmetic;
- the decoding.

Raw samples come in, and called bases go out.

This repository holds RTL for the digital parts of that chip and a behavioural model of the
analog tile. They are wired into one top level, `cimba_top`, and every block has a
self-checking testbench.

## 1. The grid

The chip is a 6 x 4 grid of units joined by a 2D mesh:

```
          col 0   col 1   col 2   col 3
  row 0:  SB      CIM     CIM     CIM
  row 1:  DPU     DPU     DPU     DPU
  row 2:  CIM     CIM     CIM     CIM
  row 3:  DPU     DPU     DPU     DPU
  row 4:  CIM     CIM     CIM     CIM
  row 5:  LA      DPU     DPU     DPU
```

- **SB, signal buffer.** A 1.25 MB SRAM. It holds raw samples of 512 flow-cell channels,
  delivered by the IO interface.
- **CIM, compute-in-memory tile.** 11 tiles in all. Each is a 512 x 512 PCM crossbar with
  512 pulse-width modulated (PWM) input drivers and 512 ADCs. A small digital block after the
  ADCs corrects each column's gain.
- **DPU, digital processing unit.** 11 in all. Each runs binary16 (FP16) arithmetic: fused
  multiply-adds (FMAs) arranged as a tree, and piecewise-linear activations built from a
  look-up table (LUT) plus an FMA. It has three flows: digital convolution, convolution
  auxiliary and LSTM auxiliary.
- **LA, LookAround decoder.** It turns the 20 transition scores of every timestep into at
  most one base, streaming, with a fixed 11-cycle latency.

The IO interface sits to the left of the grid and is not modelled. Its sample stream enters
through the `io_wr_*` ports of the top.

A network layer is mapped to one or more CiM tiles plus a DPU next to them. Activations move
between units as vectors of INT10 values, and the units convert them to and from FP16
themselves.

## 2. The mesh (`mesh_2d`)

Each node row has an X line and each node column a Y line. Every line is a bundle of
`LANES = 512` lanes of 10 bits, and every node on the line can drive it or listen to it.

The network has no routing logic and no handshake. The schedule says, in every cycle, what
each node does (`cimba_pkg::mesh_cmd_t`):

| field | meaning |
|---|---|
| `tx_x` / `tx_y` | drive lanes `[tx_off, tx_off+tx_len)` of the row's X line (or the column's Y line) with the same lanes of the unit's output vector |
| `rx_x` / `rx_y` | copy lanes `[rx_off, rx_off+rx_len)` of that line into the unit's input vector; other lanes keep their value |
| `turn_xy` / `turn_yx` | take lanes `[rx_off, rx_off+rx_len)` from one line and drive them on the other |

Three mechanisms follow from this:

- **Multicast.** Several nodes on one line capture the same transfer.
- **Concatenation.** Several sources drive disjoint lane ranges of one line in the same
  cycle. Alternatively, a destination captures different ranges at different times; for
  example, an LSTM tile needs `[x_t, h_(t-1)]`, which arrive from two places.
- **Corners.** Anything not on a straight line goes through one turn node.

Two drivers on the same lane in the same cycle is a schedule error. The lane carries the OR
of the drivers, the line's `x_conflict` / `y_conflict` flag rises for one cycle, and an
immediate assertion prints a warning.

**Timing.** A transfer takes 3 cycles and a turn 3 more:

- At the edge ending cycle `t`, a source's vector is registered together with its command.
- At `t+1` the line register is loaded.
- A destination that issues `rx` in cycle `t+2` has the data in its input vector after that
  edge.
- Turned data is issued at `t+2` in place of an `rx`, and a destination captures it with
  `rx` in cycle `t+5`.

Data stays on a line register for exactly one cycle, so the schedule must issue `rx` in the
right cycle.

## 3. Control: schedule and configuration

The accelerator is statically scheduled: the whole dataflow of a network is compiled ahead
of time. `cimba_top` therefore takes the schedule as an input:

- `node_cmd[r][c]` is the mesh command of node (r, c).
- `unit_cmd[r][c]` is the unit command of node (r, c) (`cimba_pkg::unit_cmd_t`):
  - `start` starts a VMM, a DPU operation or a buffer read. For the decoder, it accepts one
    timestep whose 20 scores are lanes `[la_off, la_off+20)` of its input vector.
  - `dpu` holds `mode`, `act_tab`, `count`, `in_off`, `out_off`, `pbase`, `nch` and
    `stride`.
  - `sb` holds `ch`, `count`, `out_off` and `shift`.

`unit_busy` and `unit_done` report back. The sequencer or compiler that would produce these
commands is not part of this RTL.

All weights, tables and parameters are written through one configuration bus. `cfg_we` is
qualified by `cfg_row` / `cfg_col`, which select the unit, and each unit decodes `cfg_addr`
and `cfg_data`.

**CiM tile** (20-bit address; CB = log2(columns) = 9):

| address | data |
|---|---|
| `addr[19]=0`: row `addr[17:9]`, column `addr[8:0]` | unit cell; `[3:0]` G+ level, `[7:4]` G- level |
| `addr[19:18]=2'b10`: column `addr[8:0]` | `[15:0]` gain (256 = 1.0), `[25:16]` offset |
| `20'hC0000` | `[3:0]` input shift, `[11:8]` ADC shift |

**DPU** (16-bit address):

| address | data |
|---|---|
| `addr[15]=0`: row `addr[12:3]`, word `addr[2:0]` | parameter SRAM, one binary16 per word |
| `addr[15:13]=3'b100`: table `addr[6:5]`, segment `addr[4:0]` | LUT entry `{slope, offset}` (binary16 each) |
| `addr[15:12]=4'hA`: unit `addr[7:0]` | initial LSTM cell state |
| `16'hC000` | binary16 scale applied to h before rounding |

LUT tables: 0 is the sigmoid, 1 is tanh, and 2 is the third activation (swish or clamp).

## 4. The CiM tile (`cim_tile`, behavioural model)

The crossbar, the PWM drivers and the ADCs are analog, so `cim_tile` is a behavioural model
with the tile's ports and latency.

- **Weights.** A weight is `G+ - G-`, two 4-bit conductance levels, so the range is -15..15.
- **Inputs.** An INT10 input becomes a signed 8-bit pulse width: `x >>> in_shift`,
  saturated.
- **ADC.** Each column outputs the exact dot product, shifted right by `adc_shift` and
  saturated to INT10.
- **Post-processing (`cim_postproc`, real RTL).** It then applies
  `round(adc * gain / 256) + offset` per column, which corrects each ADC's own gain error.

`done` rises 40 cycles after `start`, which is the tile's VMM latency. The output holds
until the next VMM.

Programming noise, read noise and conductance drift are not modelled. Those effects are the
reason the network is trained hardware-aware, but they are a property of the devices, not
of logic.

## 5. The DPU (`dpu`)

A DPU takes an INT10 vector from the mesh and converts each element to binary16. It
processes one element per cycle through one of three flows and writes INT10 results into
its output vector:

- **`DPU_DCONV`, digital convolution.** Output `i` has channel `i mod nch` and position
  `i div nch`. The `dpu_fma_tree` computes `sum_k x[in_off + pos*stride + k] * w[ch][k] +
  b[ch]` with `K = 5` taps, and the LUT activation follows. The first convolution of the
  network (1 input channel, kernel 5, 16 outputs) runs here rather than on a tile. It is
  small, and it is the layer most sensitive to analog noise.
- **`DPU_CONV_AUX`, convolution auxiliary.** It computes `act(x*scale[ch] + bias[ch])` on
  the output of a convolution or fully connected layer computed on a tile. Batch norm and
  any re-scaling are folded into the scale and bias.
- **`DPU_LSTM`, LSTM auxiliary.** `dpu_lstm_aux` reads the four gates (i, f, g, o) of a
  hidden unit from four consecutive lanes. It applies a per-gate affine, then
  `c = sigmoid(f)*c_prev + sigmoid(i)*tanh(g)` and `h = sigmoid(o)*tanh(c)`. The new `c`
  goes back to the cell-state SRAM, and `h` leaves as INT10.

**Building blocks:**

- `fp16_fma` is a 3-stage binary16 fused multiply-add with one rounding, to nearest even.
  It handles subnormals.
- `dpu_lut` has 32 segments of width 0.5 over [-8, 8); inputs outside that range use the
  end segments. It has a 1-cycle table read followed by the FMA, 4 cycles in all.

**Timing.** `done` pulses `count + 9` cycles after `start` for CONV_AUX, `count + 18` for
DCONV and `count + 26` for LSTM. Each figure is the 1-cycle SRAM read plus the flow's
pipeline depth.

## 6. The signal buffer (`signal_buffer`)

The buffer has 512 channels of 1225 16-bit samples each (2.45 kB per channel). Each channel
is a FIFO.

- **Writes.** The IO side writes one sample per cycle.
- **Reads.** A read pops `count` samples of one channel, one per cycle. It writes sample
  `k` as `sat_INT10(sample >>> shift)` into lane `out_off + k`; sample `k` is there after
  the edge `k+2` cycles from `start`.
- **Overflow.** Writing to a full channel drops the sample. It sets the sticky `overflow`
  flag and counts the drop in `overflow_cnt`.
- **Underflow.** Reading an empty channel returns 0 and sets `underflow`.

## 7. The LookAround decoder (`la_decoder`)

This is the least familiar part of the design.

The network outputs, per timestep, 20 scores. Each is a transition from one of 5 states
(the last base, or "blank") to another. A CRF decoder normally runs a forward and a backward
pass over a whole chunk before it decides anything. The LookAround decoder decides timestep
`n` from a window instead: one step back and `L` steps ahead. Bases therefore stream out at
one timestep per cycle.

The decoder has two halves with the same structure:

1. **TP half, in log-sum-exp arithmetic.**
   - The lookbehind folds the scores of `n-1` into the scores of `n`.
   - A chain of `L_TP` lookahead elements carries a backward "beta" from `n+L_TP` back to
     `n+1`.
   - A log-softmax turns the combined scores into transition log-probabilities.
2. **MLP half, in max arithmetic.** It repeats the structure on those probabilities with
   `L_MLP` lookahead elements. It ends in an argmax over the 20 transitions.
3. **CTC collapse.** Transition `k` is a stay when `k mod 5 == 0`. Otherwise it emits base
   `(k >> 2) mod 4` (`valid` = 1, `base`).

**Number format.** Scores are fixed point in natural-log units with 4 fraction bits,
saturated to 16 bits. `logsumexp(a,b) = max(a,b) + T(|a-b|)`, with `T` a 128-entry
function computed at elaboration. Every lookbehind and lookahead subtracts the minimum of
its state terms so that values stay bounded.

**Timing.** `en` accepts one timestep. The decision for a timestep is registered
`2*L_TP + 2*L_MLP + 1` accepted timesteps later: 11 at the defaults `L_TP = 4`,
`L_MLP = 1`. `step` starts after the pipeline has filled. Every register advances only on
`en`, so the decoder stalls cleanly.

In `cimba_top` the decoder reads its 20 scores straight from its mesh node's input vector.

## 8. Where this RTL departs from or adds to the paper

- **Lanes.** The mesh is described as 512 wires per direction. Here they are 512 INT10
  lanes, so one transfer moves a whole 512-element vector.
- **Chosen details.** The command formats, lane ranges, configuration address maps, FIFO
  organisation of the buffer, sample width and INT10 conversion by shift are this design's.
  So are the fixed-point format of the decoder and the LUT segmentation.
- **`L_MLP`.** The decoder's block diagram draws an example with `L_MLP = 3`, while the
  evaluated setting is `L_MLP = 1`. The default follows the evaluated setting, and the
  testbench also runs `L_TP = 2`, `L_MLP = 3`.
- **Base mapping.** `(k>>2) mod 4` is copied as printed. A conventional 5-state CRF would
  use `k div 5`, so this mapping decides which letter is printed, not the decoding itself.
- **FMA tree.** The convolution's FMA tree is built as a chain of `K` pipelined FMAs, one
  per tap, starting from the bias. It has the same function and one result per cycle, at
  the cost of a longer latency.
- **Decoder window taps.** The decoder's lookahead elements read fixed taps of its shift
  registers. The diagram's multiplexers, which would choose `L` at run time, are replaced by
  the `L_TP` / `L_MLP` parameters.
- **Not built:**
  - the IO interface, which is only named;
  - the compiler and sequencer that generate the schedule;
  - analog noise and drift in the tile;
  - power and clock management.

## 9. Files and verification

`rtl/` holds one module or package per file. The packages are `fp16_pkg` (binary16 and
INT10 types and conversions), `cimba_pkg` (commands) and `la_pkg` (the decoder's transition
tables).

Every testbench in `tb/` compares against values worked out in the testbench itself:
real-number models, an independent time-series model of the decoder, and a golden
mesh/schedule model. Each prints `TB_RESULT checks=.. failures=..` and has a watchdog.

| testbench | what it runs |
|---|---|
| `tb_fp16_fma` | directed and random operands, against a real-number model rounded to binary16 |
| `tb_dpu_lut` | sigmoid, tanh and swish tables against the exact functions |
| `tb_dpu_fma_tree` | random 5-tap dot products |
| `tb_dpu_lstm_aux` | random LSTM cells, c and h and their latencies |
| `tb_dpu` | all three flows and mode switches (64 lanes) |
| `tb_cim_postproc` | gain and offset correction (64 columns) |
| `tb_cim_tile` | VMMs on a 128 x 128 tile, 40-cycle latency |
| `tb_mesh_2d` | X, Y, turns, multicast, concatenation, conflict and random traffic (32 lanes) |
| `tb_signal_buffer` | FIFO order, overflow and underflow (8 channels) |
| `tb_la_decoder` | two configurations, stalls, a planted path |
| `tb_cimba_top` | end to end at 32 lanes over 16 timesteps (see below) |

`tb_cimba_top` follows this chain for every timestep:

1. Buffer read.
2. Multicast to a DCONV DPU and a CONV_AUX DPU.
3. Concatenation into a CiM tile.
4. Turn to an LSTM DPU.
5. A second tile.
6. Turn to the decoder.

It also forces a buffer overflow and a mesh conflict, and counts each mechanism.

No simulation of the whole top at its default size is included: with 512 lanes, 11 tiles
of 512 x 512 and 11 DPUs, building the Verilator model alone takes about an hour.

The largest sizes simulated are:

- the whole top at 32 lanes (all 24 units, 6 x 4 grid);
- a CiM tile of 128 x 128;
- a DPU at 64 lanes;
- the mesh at 32 lanes on the full 6 x 4 grid;
- the decoder at its default parameters.

All of these sizes are parameters, so a larger run needs only more build time.

To simulate a testbench:

```
verilator --binary --timing -Irtl -Itb -y rtl rtl/fp16_pkg.sv rtl/cimba_pkg.sv \
    rtl/la_pkg.sv tb/tb_util_pkg.sv tb/tb_cimba_top.sv --top-module tb_cimba_top -o sim
./obj_dir/sim
```

Replace the last file and the top module name to run any other testbench.
