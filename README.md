# EdgeDRNN for prosthesis control: a DeltaGRU accelerator in SystemVerilog

A powered knee–ankle prosthesis runs its control loop at 200 Hz. In each 5 ms period
the controller reads four tracking errors and a gait-phase flag, and it must return two
joint torques. Here that controller is a small recurrent network: two GRU layers of 128
neurons and a fully connected (FC) output layer. The network was trained to imitate the
original PD controller, and it runs on an FPGA accelerator next to the prosthesis
computer.

The accelerator works on **temporal sparsity**. From one 5 ms sample to the next, most
inputs and hidden states barely change. A delta network (DeltaGRU) therefore does not
multiply the weights with the activations. It multiplies them with the *changes* of the
activations, and only with changes large enough to matter. The products are added to
running sums, the *memory terms*, which persist from step to step. Each change that is
skipped saves a whole column of the weight matrix: no fetch from DRAM and no
multiply–accumulate. Weights live in off-chip DRAM, so fetch bandwidth is what limits
speed, and skipping columns is what makes the accelerator fast.

This repository holds the programmable-logic part of such a system. It is synthesizable
SystemVerilog with a bit-exact reference model and self-checking testbenches.

## 1. The arithmetic

### DeltaGRU

For each layer, let `v` be the column vector the weights multiply. For a GRU layer it is
the layer input (`x` for layer 0, the new hidden state of the layer below otherwise),
then a constant 1.0 for the bias, then the layer's own previous hidden state. Each
element `v[c]` has a stored reference `ref[c]`, the value it had when it last "fired":

```
d = sat16(v[c] - ref[c])
fires  <=>  d != 0  and  |d| >= threshold(c)
if it fires:  ref[c] += d ;  M += W[:, c] * d      (one DRAM column, 3H rows)
```

A change that does not fire leaves `ref` where it was. Small changes therefore add up
until they cross the threshold, so the error stays bounded by the threshold and does not
drift. The memory terms of neuron `k` in a GRU layer with `H` neurons are:

| term   | rows of W          | added by               |
|--------|--------------------|------------------------|
| `M_r`  | `k`                | all columns            |
| `M_u`  | `H + k`            | all columns            |
| `M_cx` | `2H + k`           | input and bias columns |
| `M_ch` | `2H + k`           | hidden-state columns   |

The candidate rows are split into `M_cx` and `M_ch` because the reset gate scales only
the recurrent part:

```
r  = sigmoid(M_r)          u = sigmoid(M_u)
c  = tanh(M_cx + r * M_ch)
h' = (1 - u) * c + u * h
```

The FC layer uses the same machinery. Its memory term *is* the output `W·h2 + b`.

**Bias as a column.** Biases are not loaded separately. Each layer has an extra input
column that always holds 1.0. Its reference starts at 0 and its threshold is 0. After a
sequence reset it therefore fires exactly once, with delta 1.0, which adds the bias
column of `W` to the memory terms. It never fires again.

**Thresholds.** `THX` (default 4/256 ≈ 0.016) applies to the network input. `THH`
(default 128/256 = 0.5) applies to every hidden-state vector: the recurrent inputs of a
layer and the inputs of the next layer. Both are registers.

### Number formats

| quantity | format | note |
|---|---|---|
| inputs, deltas, hidden states, outputs | 16-bit signed, Q8.8 | 1.0 = 256 |
| weights | 8-bit signed, Q2.6 | range −2 … +1.98 |
| products, memory terms | 32-bit signed, 14 fractional bits | wrap-around, not saturated |
| gate inputs | memory term `>>> 6`, saturated to Q8.8 | |

The sigmoid is a four-segment piecewise-linear function. It needs only shifts and adds:

```
a = |x|:   a >= 5       -> 1
           2.375 <= a   -> a/32 + 0.84375
           1 <= a       -> a/8  + 0.625
           otherwise    -> a/4  + 0.5
x < 0:  1 - y             tanh(x) = 2*sigmoid(2x) - 1
```

Products of two Q8.8 values are shifted right by 8, which rounds toward minus infinity.
`tb/edgedrnn_ref_pkg.sv` restates all of this in plain integer code. It is the
specification the RTL is checked against.

## 2. Where the logic sits

```
 prosthesis computer ──SPI──> ARM CPU (Zynq PS) ──┬── register bus ──> ctrl_regs ──┐
                                                  ├── word stream  <─> io_manager ──┤
                                                  │                                 v
            DDR3 <── PS memory controller <────── AXI-style read port <── edgedrnn_core
```

`edgedrnn_pl` is the top. The CPU, the SPI link and the DDR memory are not part of the
RTL. Their sides of the interfaces are the top's ports, and the testbenches drive them.
Everything runs on one clock (100 MHz in the target system) with a synchronous
active-low reset.

Inside `edgedrnn_core`:

```
 column scan ─> delta_encoder ─> delta FIFO ─> parameter_fetcher ─AR/R─> DRAM
   (x, bias,     (refs per          (sync_fifo,   (one burst per        │
    h values)     layer/column)      16 deep)      fired delta, 4 in    v
                                                   flight)        mac_array (8 MACs,
                                                                  memory terms)
                                                                        │
 h_mem / y_buf <──────────────── gru_act_unit <── read neuron k ────────┘
```

## 3. One time step

The controller (`edgedrnn_core`) handles layer 0, then layer 1, then the FC layer. Each
layer goes through three phases.

1. **SCAN.** Walk the columns of the layer, one per cycle: `in_size` input columns, the
   bias column, and (GRU only) `M` hidden-state columns. Every value passes through the
   delta encoder. Values that fire enter the delta FIFO. The scan stalls only when the
   FIFO is full. While the scan runs, the parameter fetcher already turns queued deltas
   into DRAM bursts, and the MAC array consumes the returning beats.
2. **DRAIN.** Wait until the FIFO is empty and no burst is outstanding.
3. **ACT.** One neuron per cycle. Read its four memory terms, compute the new state, and
   store it in `h_mem` (or the output in `y_buf` for the FC layer).

Layer 1 scans the hidden state that layer 0 has just produced. After the FC layer, the
two outputs are offered to the I/O manager.

**Cost per frame**, with `B = ceil(rows/8)` DRAM beats per fired column (48 for a GRU
layer at M = 128, 1 for the FC layer):

```
cycles ≈ (134 + 257 + 129) scan  +  Σ fired_columns × B  +  258 activation  +  DRAM latency per layer
```

Fetching dominates. Fetch time is proportional to the number of fired deltas, which is
the point of the design. In the worst case every column fires. That costs about 19,700
cycles (197 µs at 100 MHz) if the DRAM delivers one 64-bit beat per cycle, which is far
inside the 5 ms budget. The full-size testbench uses random weights and smooth random
inputs. With the default thresholds it measures 950–4,700 cycles per frame (10–47 µs).
For comparison, the original system reported 20.9 µs on average on real gait data,
with a range of 9 to 140 µs.

A dense test sets both thresholds to 0 and makes the inputs jump across their full range.
Up to 444 of the 520 columns fire, 16,565 beats are fetched, and the frame takes 17,342
cycles (173 µs), of which 95 % move weights. That is still only 3.5 % of the control
period.

## 4. Weights in DRAM

Each layer has a base byte address, `WBASE0..2`. Its weight matrix is stored column by
column. Column `c` occupies `B` consecutive 64-bit words:

```
byte address = WBASE_l + (c * B + b) * 8 + p      holds  W_l[row = 8b + p][col = c]
```

`p` selects the MAC unit (0..7) and the byte within the word (little-endian). Rows
beyond the layer's row count are padding and must be 0.

Column order in each layer:

| layer | columns | rows (B) |
|---|---|---|
| 0 (GRU) | `x[0..4]`, bias, `h0[0..127]` | r, u, c stacked: 384 (48) |
| 1 (GRU) | `h0[0..127]`, bias, `h1[0..127]` | 384 (48) |
| 2 (FC)  | `h1[0..127]`, bias | 2, padded to 8 (1) |

This is 151,176 bytes at the default size. A burst request is `ar_addr` with
`ar_len = B − 1`. Up to `OUTSTANDING` (4) bursts may be in flight, and their data must
return in order.

A smaller network (for example 2 × 64 neurons) runs unchanged if it is zero-padded into
this layout. A neuron with all-zero weights and bias has r = u = ½ and candidate 0. Its
state stays 0, so it never fires and never feeds anything forward. A network with more
than 128 neurons per layer needs `M` raised at elaboration.

## 5. Programming interface

Register bus: `reg_we`, a 4-bit word address `reg_addr`, 32-bit `reg_wdata`, and
combinational `reg_rdata`.

| addr | name | access | meaning |
|---|---|---|---|
| 0x0 | CTRL | W | bit0 = 1: new sequence (clears hidden states, references, memory terms); bit1: enable |
|     |      | R | bit1 enable, bit2 busy |
| 0x1 | THX | R/W | input delta threshold, Q8.8, reset 4 |
| 0x2 | THH | R/W | hidden delta threshold, Q8.8, reset 128 |
| 0x3–0x5 | WBASE0–2 | R/W | weight base byte address of layers 0, 1, 2 |
| 0x6 | LATENCY | R | cycles from frame accepted to output ready (last frame) |
| 0x7 | NZDELTA | R | deltas that fired in the last frame |
| 0x8 | STEPS | R | frames completed |

Write a new sequence only while the accelerator is idle. The clear takes 257 cycles (the
delta references are cleared one address per cycle). During that time no frame is
accepted.

Data path: the CPU writes the five input words `e_pk, e_pa, ė_pk, ė_pa, s` (Q8.8, with
`s` = 0 or 1.0) on `s_valid/s_ready/s_data`. It reads back `τ_pk, τ_pa` on
`m_valid/m_ready/m_data`, with `m_last` set on the second word. The I/O manager can
collect the next frame while the current one is being computed.

## 6. Files

| file | role |
|---|---|
| `rtl/edgedrnn_pkg.sv` | widths, formats, `delta_item_t`, saturation, sigmoid/tanh |
| `rtl/edgedrnn_pl.sv` | top: registers + I/O manager + core |
| `rtl/ctrl_regs.sv` | register file |
| `rtl/io_manager.sv` | word streams ↔ frames |
| `rtl/edgedrnn_core.sv` | controller, hidden-state and input buffers |
| `rtl/delta_encoder.sv` | threshold test and reference memories |
| `rtl/sync_fifo.sv` | generic FIFO (the delta list, the fetcher's pending queue) |
| `rtl/parameter_fetcher.sv` | delta → DRAM burst, beats → MAC array |
| `rtl/mac_array.sv` | 8 MACs and the banked memory terms |
| `rtl/gru_act_unit.sv` | gates, candidate, state update |
| `tb/edgedrnn_ref_pkg.sv` | bit-exact reference model and DRAM image builder |
| `tb/ddr_model.sv` | behavioural DRAM behind the read port (latency, random stalls) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus workload tests |

Parameters of the top, with their defaults: `N_IN = 5`, `M = 128`, `Q = 2`,
`FIFO_DEPTH = 16`, `OUTSTANDING = 4`. `M` must be a multiple of 8.

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and ends with `$finish`.
Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_edgedrnn_pl \
    rtl/edgedrnn_pkg.sv tb/edgedrnn_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v _pkg) tb/ddr_model.sv tb/tb_edgedrnn_pl.sv
./obj_dir/Vtb_edgedrnn_pl
```

To run another testbench, substitute its name. Packages must come first on the command
line. The testbenches declare no `timescale`, so the simulator's default time unit
applies: the printed simulation time is not in real nanoseconds. Latencies are reported
in clock cycles.

- `tb_edgedrnn_pl`: full default size, end to end through the CPU-side ports. Runs 24
  frames with a sequence reset halfway. It checks outputs and fired-delta counts against
  the model, and checks latency against the 5 ms budget. It also requires each of these
  to happen at least once: skipped deltas, the bias delta, a full delta FIFO, DRAM
  back-pressure, output back-pressure, a sequence reset, and a refused frame while
  disabled. It runs in under a second.
- `tb_workload_small_nets`: the 2 × 32 and 2 × 64 networks, zero-padded on the default
  hardware. Results must be bit-identical to the small networks' own models.
- `tb_workload_worst_case`: the full-size design with thresholds at 0 and jumping inputs.
  Checks each frame's latency between the fetch-bandwidth bound and that bound plus the
  scan, activation and DRAM-turnaround overhead.
- `tb_edgedrnn_core`: a reduced core (M = 16, small FIFO, 30 % DRAM stalls) under zero,
  default and coarse thresholds.
- The remaining testbenches test one module each against their own models.

## 8. How far to trust it, and what is this design's own

The RTL matches the reference model bit for bit in every test. The model is this
design's definition of the arithmetic. It has not been compared with the original
floating-point or fixed-point network, because no trained weights were available. All
tests use random weights.

Taken from the published description of the system:

- 8 MAC units, 16-bit activations and 8-bit weights.
- Weights fetched from external DRAM.
- The DeltaGRU principle (delta against a threshold, memory terms).
- The network shape: 5 inputs, 2 × 128 DeltaGRU, FC to 2 outputs.
- The two thresholds, 2²/2⁸ and 2⁷/2⁸, with Q8.8 implied by those fractions.
- The 100 MHz clock and the 5 ms real-time budget. The published description also quotes
  125 MHz, for the accelerator's earlier standalone version. The 100 MHz of the
  programmable logic in this system is the figure followed here.
- The split into EdgeDRNN, I/O manager and parameter fetcher, controlled by the CPU.

Chosen here, because the description is silent on them:

- The Q2.6 weight format and the 32-bit memory terms.
- The piecewise-linear sigmoid and tanh, and the rounding.
- The GRU variant: the reset gate applied to the recurrent candidate term, and
  h' = (1−u)c + uh.
- The bias-as-column trick, and firing on `>=` the threshold.
- Applying THH to hidden states that serve as inputs of the next layer.
- The scan/drain/activate schedule and the FIFO depths.
- The DRAM layout and the AXI-like burst port.
- The register map and the word-stream protocol.
- The banked accumulator memories and the clear sweeps.

The original accelerator's internal schedule is not published, so its latency profile
will differ from this one in detail. Peak dense throughput here is 8 MACs × 100 MHz
= 1.6 GMAC/s. The much higher effective rates quoted for delta networks count the
skipped operations as done.

Only the network's own I/O is modelled. The SPI protocol to the prosthesis computer, the
CPU software, the trajectory generator and the DDR controller are outside this RTL.
