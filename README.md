# NLDU: a streaming neural pre-decoder for surface-code syndromes

A surface-code quantum computer measures all of its stabilisers once per
microsecond. Most of the resulting detection events are caused by isolated,
local faults: a single data-qubit error, a single faulty measurement, or a
"hook" error spread by the measurement circuit. The neural local decoding unit
(NLDU) removes these events next to the readout hardware, in real time. It
sends the host's global decoder only the sparse remainder S' and a running
record of the logical flips it has already applied. That record is called
L^L_S.

Each NLDU is responsible for an N x N region of the code (N = 9 by default).
For every measurement round it runs a small, fully convolutional INT8 network
over the region. The network sees three consecutive rounds and a border of
three positions from the neighbouring regions. For every position it
predicts an error class E = [X, Z, M, H]. Every detector is then corrected in
parallel, in one cycle, by XORing in the predictions that touch it.

This repository holds synthesizable SystemVerilog for one NLDU, plus a
self-checking testbench for each block. The host-side block decoder, which
finishes the decoding in software, is not part of it.

## 1. Data representation

**Syndrome tensor.** The patch is laid out on a square grid of positions,
with two channels per position:

- Channel 0 holds X detectors; channel 1 holds Z detectors.
- In a rotated surface code of distance d the grid is (d+1) x (d+1).
- Z stabilisers sit where (r+c) is even, X stabilisers where it is odd.
- Boundary "virtual" vertices fill out the rest of the grid.

Each entry of the tensor has one of three values:

| Value | Meaning |
|---|---|
| 1 | a detection event: the stabiliser's outcome changed since the previous round |
| 0 | no event, or the position is not a vertex of that type |
| 2 | a virtual boundary vertex (a constant) |

The geometry is not built into the RTL. The host supplies it as six masks:

| Mask | Marks |
|---|---|
| `vmask_x`, `vmask_z` | real vertices |
| `virt_x`, `virt_z` | virtual vertices |
| `lz_mask` | data positions on the logical-Z operator |
| `lx_mask` | data positions on the logical-X operator |

So any patch shape, including merged lattice-surgery patches, can be mapped
onto a set of NLDUs.

**Error tensor.** The network produces six scores per position:

- I, X, Y, Z: the Pauli class of the data qubit at that position.
- M: a measurement error at that position, mapped to the earlier of the two
  rounds it affects.
- H: a hook error, mapped to its first end point.

These six scores are compressed to four bits, `err_t` = {x, z, m, h}. A Y error
sets both x and z.

**Numbers.** Activations and weights are signed 8-bit. Accumulators are 24
bits and biases are 16 bits. Between layers a value is rounded by an
arithmetic right shift, using round-half-up, and then saturated to int8. The
shift is programmable per layer.

## 2. The network

| Layer | Operation | Channels in -> out | Kernel | Spatial size (N = 9) |
|---|---|---|---|---|
| 1 | Conv3d + ReLU | 2 -> 7 | 3x3x3 | 15x15 -> 13x13 |
| 2 | Conv3d + ReLU | 7 -> 7 | 3x3x3 | 13x13 -> 11x11 |
| 3 | Conv3d + ReLU | 7 -> 7 | 3x3x3 | 11x11 -> 9x9 |
| 4 | Conv3d | 7 -> 6 | 1x1x1 | 9x9 |

All convolutions are "valid". Three 3x3 layers shrink the frame by two per
layer, so a 9x9 region needs a 15x15 input frame, with a halo of 3. The third
kernel dimension is time. The network is split into three hardware stages:

- ST1 = layer 1
- ST2 = layer 2
- ST3 = layers 3 and 4

## 3. Streaming the time dimension (ICU, PE, OCU)

This is the part of the design that needs the most care.

**The problem.** A 3x3x3 convolution over rounds t-2, t-1 and t needs the
input of three rounds. Holding three frames and recomputing every product
each round would triple the work.

**The idea.** Each input value is multiplied by all three temporal slices of
the kernel as soon as it arrives. The partial sums that belong to future
outputs wait in a small FIFO.

**One ICU.** An input-channel unit (`nldu_icu`) handles one input channel l
for one output channel k and one output position. It has one
multiply-accumulate unit (the FMA), a register REG, and a two-entry FIFO per
position group. In round t it runs 27 taps plus one finishing cycle, 28
cycles in all:

1. Taps 0-8 apply kernel slice z=2 to the new frame, over the 3x3 window. The
   sum A2(t) is parked in REG.
2. Taps 9-17 apply slice z=1. Its sum A1(t) is held in a register.
3. Taps 18-26 apply slice z=0. Its sum A0(t) is left in the accumulator.
4. The finishing cycle:
   - pops the older FIFO entry and emits `y = REG + pend1`;
   - writes `pend1 <- A1(t) + pend2`;
   - writes `pend2 <- A0(t)`.

The output emitted in round t is

    y(t) = A2(t) + A1(t-1) + A0(t-2)

This is the full temporal convolution, with the z=2 slice meeting the newest
round.

**Reuse across position groups.** The PEs are reused over several position
groups in each round. Each group has its own pair of FIFO entries, selected by
`slot`. After reset the FIFO is zero, so the first two outputs see empty
history.

**PE.** A processing element (`nldu_pe`) does the following:

- holds K_IN ICUs, one per input channel;
- sums their outputs in an adder tree;
- adds the output channel's bias;
- applies ReLU and requantises.

**OCU.** An output-channel unit (`nldu_ocu`) is P PEs that share the current
tap's weights and work on P different output positions.

**Stage.** A stage (`nldu_conv_stage`) holds:

- K_OUT OCUs;
- the layer's weight memory (`nldu_weight_mem`), which supplies the weights of
  one tap for all (l, k) pairs per cycle;
- a window fetch;
- a four-state controller: idle, run, fin, drain.

PE p of group g computes output position g*P + p, in row-major order. Every
PE can only ever need G*9 fixed frame positions. So its operand is chosen by a
small AND-OR selector over those positions, not by a full frame-wide
multiplexer.

Weight addressing:

- Taps are issued in slice order z = 2, 1, 0.
- The tap index within the weight memory is z*9 + x*3 + y.
- The load address of a weight is `(tap*K_IN + l)*K_OUT + k`.
- The K_OUT biases follow the weights.

### Stage timing

With G = ceil(OUT_DIM^2 / P) position groups, a stage takes **28*G + 3 cycles**
from `start` to `done`. The extra three cycles come from the registered tap
issue, the FIFO cycle and the output register. Layer 4 (`nldu_pointwise`) is a
serial multiply-accumulate over the 7 input channels. It runs in LANES parallel
lanes and takes G4*(7+1) + 2 cycles.

| Stage | Positions | PEs | G | Cycles | ns at 300 MHz | Published figure |
|---|---|---|---|---|---|---|
| ST1 | 169 | 52 | 4 | 115 | 383 | 433 ns |
| ST2 | 121 | 33 | 4 | 115 | 383 | 433 ns |
| ST3 (layer 3) | 81 | 27 | 3 | 87 | 290 | |
| ST3 (layer 4) | 81 | 27 lanes | 3 | 26 | 87 | |
| ST3 total | | | | 113 | 377 | 346 ns |

Every stage finishes well inside one round (300 cycles), so rounds never back
up.

**Pipelining.** Each stage latches its input frame on `start`. So ST1, ST2 and
ST3 work on three consecutive rounds at the same time.

**Overrun.** A `start` that arrives while a stage is still busy is dropped and
reported on `overrun`. This happens only if rounds come faster than the
stage latency.

### Latency

From a round's readout strobe (`meas_vld`) to its predictions (`e_out_vld`)
takes **347 cycles**:

| Part | Cycles |
|---|---|
| embedding and halo assembly | 3 |
| ST1 + ST2 + layer 3 | 115 + 115 + 87 |
| layer 4 | 26 |
| dequantisation register | 1 |

Because each stage's temporal window is centred one round back, the
predictions that come out after input round t belong to **round t-3**. The
unit keeps the embedded detectors of the last 8 rounds in a ring and tags each
stage's work with its round number. It can therefore update the right round.

Predictions for "rounds" -3, -2 and -1, which are produced from the zero
history after reset, are dropped. At the end of an experiment the host sends
three further rounds so that the last real rounds drain out.

For comparison, the published latency model is 3 rounds plus
28/f * (3 + sum of G_i) = 3 us + 392 cycles.

## 4. Post-processing

**Virtual dequantisation** (`nldu_dequant`). Scores are never converted back
to probabilities:

- A comparator tree takes the argmax of I, X, Y, Z. Ties go to the earlier
  class.
- M and H are set when their int8 score is strictly greater than
  a programmable threshold. The threshold is the int8 image of ln(4), which
  corresponds to a sigmoid confidence of 0.8.
- The reset value of both thresholds is 22. That is ln(4) at an assumed output
  scale of 1/16. It should be reprogrammed to match the trained model's real
  scale.

**Parallel syndrome update** (`nldu_syndrome_update`). The stabiliser at grid
position (r,c) touches the data qubits at (r,c), (r,c+1), (r+1,c) and
(r+1,c+1). For round t:

    S'z(r,c) = Sz ^ M(r,c)[t] ^ M(r,c)[t-1] ^ H(r,c)[t] ^ H(r+2,c)[t-1]
                  ^ X(r,c) ^ X(r,c+1) ^ X(r+1,c) ^ X(r+1,c+1)
    S'x(r,c) = Sx ^ M(r,c)[t] ^ M(r,c)[t-1] ^ H(r,c)[t] ^ H(r,c-2)[t-1]
                  ^ Z(r,c) ^ Z(r,c+1) ^ Z(r+1,c) ^ Z(r+1,c+1)

How the terms arise:

- A measurement error flips the detector in its own round and in the next.
- A hook error flips its first end point now and its second end point, two
  positions away, one round later.
- Hooks run down the rows for Z detectors and along the columns for X
  detectors.
- M and H of round t-1 are held in flip-flops. At the region's edge the
  neighbours' predictions (`e_halo`) supply the missing terms. That is an
  extended plane from row/column -2 to N+1.

**Logical state.** In the same cycle the local logical state is updated:

- An X or Y prediction on the logical-Z support flips logical Z.
- A Z or Y prediction on the logical-X support flips logical X.

These flips accumulate until the host raises `tick`. At the tick the unit
outputs L^L_S XOR L^G_S for one cycle and restarts L^L_S from zero. L^G_S is
the global state the host wrote.

**Defect counts.** The counts before and after the update are reported. They
show how much the pre-decoder removed.

## 5. Working with neighbouring boards

A board's region needs a 3-position border of its neighbours' detectors
before inference, and a 2-position border of their predictions before the
update. Both are exchanged over plain valid-strobed buses. In hardware these
would be board-to-board pins.

- **Before inference** (`nldu_halo_sync`):
  - The own embedded round is driven out on `bcast`.
  - The unit waits until both its own round and the neighbours' `halo` have
    arrived, in either order.
  - It then assembles the 15x15 frame for ST1.
  - If the own round comes again before the halo did, `halo_late` reports
    lost synchronisation.
- **Before the update** (`nldu_top`):
  - The own predictions are driven out on `e_out`.
  - The update fires when both the own prediction and `e_halo` for that round
    are present.
- **Single board.** With `halo_en` = 0 a single board runs alone. The border
  is then zero and neither wait applies.

## 6. Host interface (`nldu_axil_slave`)

AXI4-Lite. Address and data are taken together, and reads answer one cycle
after the address.

| Address | Register | Content |
|---|---|---|
| 0x00 | CTRL | bit 0 halo_en |
| 0x04 | STATUS | bit 0 new S' ready, bit 1 overrun seen (write 1 to clear) |
| 0x08 | ROUND | round number of the S' frame; reading clears "ready" |
| 0x0C | DEFECTS | [15:0] after, [31:16] before |
| 0x10 | LOCAL_L | L^L_S, bit 0 Z, bit 1 X |
| 0x14 | GLOBAL_L | L^G_S from the host |
| 0x18 | THETA | [7:0] M threshold, [15:8] H threshold |
| 0x1C | SHIFT | four 5-bit requantisation shifts, layer 1 in bits 4:0 |
| 0x20 | WADDR | [15:0] weight address, [17:16] layer 0..3 |
| 0x24 | WDATA | writes [15:0] to the addressed layer, then WADDR += 1 |
| 0x100+4i | S' | bits 32i..32i+31, bit index = position*2 + channel |

**Loading a layer.** Write WADDR once, then stream the weights through WDATA,
followed by the biases. Weights use the low 8 bits; biases use all 16.

## 7. Where this design departs from the published one

These points follow the published design:

- the layer shapes;
- the three-stage split;
- N = 9 and P = 52/33/27;
- the ICU's REG and FIFO scheme and its 28-cycle group;
- the comparator tree and thresholds;
- the update equation for Z detectors;
- the use of AXI4-Lite for S' and L^G_S.

The following are this design's own choices:

- **Stage latencies are shorter than the published ones** (383/383/377 ns
  against 433/433/346 ns). Nothing in the published text explains the extra
  cycles, so none were added.
- **Control.** One state machine per stage drives all of its ICUs. The
  published drawing shows a state machine next to the FMA, FIFO and REG of an
  ICU. Here the ICU holds only the datapath.
- **Layer-4 organisation.** Layer 4 is a serial multiply-accumulate with 27
  lanes. Only "parallel to serial" and a multiply-add are given for it.
- **X-detector hook direction.** Only the remark that it differs from the Z
  case is given. The direction used here, two columns, was read from a worked
  hook example.
- **Detector formation.** The unit forms detectors itself, by XOR with the
  previous round. It could equally receive them from the readout hardware.
- **Requantisation.** It uses a power-of-two shift with rounding. The real
  scale factors of the trained model are not published.
- **Reset state.** The FIFOs, the previous-round registers and the logical
  state all start at zero.
- **Interfaces.** The register map, the weight-load addressing, the
  neighbour handshakes and the ring depth are invented here.
- **Pin-level protocol.** The buses carry a whole frame in parallel. A real
  board link would serialise them.
- **Weights.** No trained weights are included. Tests load random weights and
  compare against an integer reference model.

## 8. Capacity

One NLDU predicts a 9x9 grid, which is the tensor of a distance-8 patch. It
reads a 15x15 frame. Larger patches are tiled over several NLDUs that exchange
their borders:

| Distances | Grid | NLDUs |
|---|---|---|
| d = 9 to 17 | 10x10 to 18x18 | a 2x2 tiling of four NLDUs |
| d = 19 to 26 | up to 27x27 | nine NLDUs |

Two counters bound the length of an experiment:

- The round counter is 32 bits, so streaming experiments of 10^6 rounds and
  more run without wrap-around.
- The processing is constant per round.

## 9. Files

| File | Contents |
|---|---|
| `rtl/nldu_pkg.sv` | sizes, types (`act_t`, `err_t`, ...), `requant` and `ceil_div` |
| `rtl/nldu_icu.sv`, `nldu_pe.sv`, `nldu_ocu.sv` | the streaming datapath |
| `rtl/nldu_weight_mem.sv` | per-layer weight and bias memory |
| `rtl/nldu_conv_stage.sv` | one 3x3x3 stage |
| `rtl/nldu_pointwise.sv` | layer 4 |
| `rtl/nldu_dequant.sv`, `nldu_syndrome_update.sv` | post-processing |
| `rtl/nldu_syndrome_embed.sv`, `nldu_halo_sync.sv` | input side |
| `rtl/nldu_axil_slave.sv` | host registers |
| `rtl/nldu_top.sv` | the whole unit |
| `tb/nldu_ref_pkg.sv` | integer reference model used by the testbenches |
| `tb/tb_<module>.sv` | self-checking testbench of each block |
| `tb/nldu_top_bench.sv` | end-to-end bench, used by the two top-level testbenches |
| `tb/tb_nldu_top.sv` | end-to-end bench at a reduced size (4x4 region) |
| `tb/tb_nldu_top_full.sv` | end-to-end bench at the default size |

The reference model in `tb/nldu_ref_pkg.sv` provides the convolution layers,
the classification and the update equations.

## 10. Verification

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops on a
watchdog if the design hangs. What the unit benches check:

- The ICU/PE/OCU benches compare against directly computed sums over three
  rounds, including the reset history.
- The stage bench runs a reduced stage (P = 5, four groups). It checks every
  output of several rounds against the reference, the 28*G+3 latency, and an
  overrun.
- The post-processing bench replays a hand-worked d = 5 example. Four
  errors of types X, Y, M and H are fully removed by the update, and the
  logical-Z flip is reported. The bench then adds random rounds with
  neighbour borders.

The end-to-end bench (`nldu_top_bench`) does the following:

- loads random weights over AXI4-Lite;
- streams rounds of random sparse syndrome flips, one every 300 cycles;
- supplies random neighbour borders and neighbour predictions at random
  delays;
- compares every S' frame and both defect counts with the reference model;
- checks the constant readout-to-prediction latency, the feedback tick and an
  S' read over AXI;
- forces an overrun.

It also counts each mechanism and fails if one never occurred. The mechanisms
are weight load, warm-up drop, waiting for neighbours, X/Z/M/H predictions,
syndrome changes, tick, AXI read and overrun. It runs both at a reduced size
and at the default size (N = 9, 52/33/27 PEs).

To simulate, for example, the full-size top with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/nldu_pkg.sv tb/nldu_ref_pkg.sv tb/tb_nldu_top_full.sv \
        --top-module tb_nldu_top_full
    ./obj_dir/Vtb_nldu_top_full

Any other block works the same way with its `tb_<module>.sv`. Modules are
found through `-Irtl`. The full-size bench builds in about half a minute and
runs in about a second.
