# Split-inference LSTM core for a small FPGA edge node

A sensor node on a river measures dissolved oxygen once a day. A small LSTM
network forecasts the next reading from the last 15. Sending raw data to a
server costs bandwidth, and running the whole model on the node costs area.
The network is therefore **split**. The node runs the first layers, f_E, on
the FPGA and sends their output z. A server runs the remaining layers, f_S.
The cut point controls two things: how much of the FPGA the node needs, and
how many bytes it has to send.

This RTL implements the FPGA side of such a node for a 4-layer student
network of 871 parameters:

```
x[0..14] (1 feature) -> LSTM(10, all steps) -> LSTM(5, last step) -> FC(10) -> FC(1) -> forecast
                       |<---- Split-B: z = 15x10 = 150 values
                       |<--------------- Split-A: z = 5 values ------>|
                       |<---------------------- LSTM-DO-S: z = the forecast ---------------------->|
```

The cut is chosen when the design is built, with the `SPLIT` parameter
(`lstm_pkg::split_e`):

| `SPLIT` | Layers on the FPGA | Values sent per sequence | Weights held |
|---|---|---|---|
| `SPLIT_FULL` (default, "LSTM-DO-S") | LSTM1, LSTM2, FC1, FC2 | 1 | 871 |
| `SPLIT_A` | LSTM1, LSTM2 | 5 | 800 |
| `SPLIT_B` | LSTM1 | 150 | 480 |

The paper reports the total parameter count (871) and the two split output
sizes (5 and 150), but not the layer widths. The widths 10/5/10/1 are the ones
that reproduce all three numbers:

- LSTM1 (1 input, 10 units): 4·(10·(1+10)+10) = 480 parameters
- LSTM2 (10 inputs, 5 units): 4·(5·(10+5)+5) = 320 parameters
- FC1 (5 inputs, 10 units): 5·10+10 = 60 parameters
- FC2 (10 inputs, 1 unit): 10+1 = 11 parameters

Total: 871. Split-B's output is 15 steps × 10 units = 150 values, and
Split-A's is the 5 LSTM2 units.

## System around the core

```
  processor (soft core, program RAM, UART)        FPGA fabric: lstm_edge_top
  +--------------------------------------+        +-----------------------------------------+
  |                                      | AXI4-  |  comblock            lstm_accel         |
  |  loads weights, writes 15 samples,   |  Lite  |  +-----------+ input +----------------+ |
  |  START, polls STATUS, reads z   <----+------->+--| registers |stream>| LSTM1 -> LSTM2 | |
  |  forwards z to the server (UART)     |        |  | in FIFO   |       |  -> FC1 -> FC2 | |
  +--------------------------------------+        |  | out FIFO  |<output| (per SPLIT)    | |
                                                  |  +-----------+ stream+----------------+ |
                                                  +-----------------------------------------+
```

The processor and its peripherals are not included. The top brings its
AXI4-Lite slave port out as plain signals: 8-bit address, 32-bit data, OKAY
responses only.

### Several processing elements

A processing element is one communication block together with its own core.
The `N_PE` parameter of `lstm_edge_top` sets how many are built (default 1).
They matter when a node measures several quantities at once. Each channel
then gets its own element, and the elements compute at the same time.

- Address bits 7:5 select the element. Element p's registers start at byte
  32·p.
- An address whose bits 7:5 name no element goes to element 0. Element 0 does
  not decode it, so a read returns 0 and a write does nothing.
- Across all elements, only one write and one read may be outstanding at a
  time.
- The routing adds no clock of latency.

For Split-B, the paper's resource count leaves room for two elements, so
`SPLIT = SPLIT_B, N_PE = 2` is the parallel build it suggests.

## Number format

All stored values use one format: 8-bit two's complement with 5 fraction bits
(Q3.5, range −4 … +3.97, step 1/32). This covers samples, weights, biases,
gate values, h, c and FC outputs.

- **Products and sums** go into a 24-bit accumulator with 10 fraction bits. A
  bias is added as `b << 5`.
- **Narrowing** to 8 bits takes the floor (an arithmetic shift right by 5),
  then saturates to −128…127.
- **Gate nonlinearities** are piecewise-linear, with no lookup table:
  - sigmoid uses the "PLAN" approximation, for |x| < 1, 1…2.375, 2.375…5 and ≥ 5:
    - `0.5 + |x|/4`
    - `0.625 + |x|/8`
    - `0.84375 + |x|/32`
    - `1`
    - with `1 − y` for negative x.
  - tanh is `2·sigmoid(2x) − 1`.
  - `lstm_pkg::sigmoid_q` and `tanh_q` evaluate these in integer arithmetic
    with 15 fraction bits. Because that is exact, the results are exactly
    `floor(32·f(x))`, and the testbench reference model computes them
    independently in real arithmetic.

These formats are this design's choices. The paper only says that the
network is quantized to 8-bit fixed point after training.

## How a layer is computed

Both layer types work the same way. `lstm_layer.sv` and `dense_layer.sv` use
one multiply-accumulate lane per output:

- An LSTM layer has 4·N_H lanes, one per gate and unit. The lane number is
  `gate·N_H + unit`, with gates in the order i, f, g, o.
- An FC layer has N_OUT lanes.

When an input vector is accepted, the operand vector is latched: z = [x_t, h]
for an LSTM, or x for an FC layer. The layer's `weight_mem` then supplies one
**row** per clock. Row k holds every lane's weight for operand k, and the last
row holds the biases. In each clock every lane multiplies its weight by the
same operand and adds the product to its accumulator.

The LSTM timestep then finishes in two clocks:

- One clock registers the four gate activations.
- One clock computes `c ← f·c + i·g` and `h ← o·tanh(c)` for all units, with
  the products narrowed as described above.

h and c start at zero for each sequence of 15 steps. They return to zero after
step 15, or at once on `clear`.

Per-layer timing assumes the output is taken immediately. If the input is
accepted at clock edge n:

| Layer | Output available at edge | Clocks per step |
|---|---|---|
| `lstm_layer` (K = N_IN + N_H) | n + K + 5 | K + 6 (LSTM1 17, LSTM2 20) |
| `dense_layer` | n + N_IN + 4 | N_IN + 5 |

The layers are joined by valid/ready streams and run as a pipeline. While
LSTM2 works on step t, LSTM1 already works on step t+1, so LSTM2 (20 clocks
per step) sets the pace. LSTM1 sends its 10-value h vector at every step, so
LSTM2 sees the full sequence. LSTM2 sends only its last h.

For `SPLIT_B` the 150 values leave step by step, unit 0 first. `m_last` marks
the final value of a sequence.

### Latency and how it compares

Latency is measured in simulation, from the first sample accepted by the core
to the last result value taken:

| Configuration | This RTL | At 80 MHz | Paper (80 MHz, includes data transfers) |
|---|---|---|---|
| LSTM-DO-S (`SPLIT_FULL`) | 340 clocks | 4.25 µs | 2.82 µs (≈ 226 clocks) |
| Split-A | 321 clocks | 4.01 µs | 2.85 µs (≈ 228 clocks) |
| Split-B | 264 clocks | 3.30 µs | 3.54 µs (≈ 283 clocks) |

- Split-B is about as fast as the paper's figure.
- LSTM-DO-S and Split-A are about 1.4–1.5× slower. Feeding one operand row
  per clock makes LSTM2 take 20 clocks per step. The paper's core came from a
  high-level-synthesis tool with its own, undisclosed, degree of unrolling.
- To go faster, feed two or more rows per clock. This means widening the
  `weight_mem` read and adding adders per lane.

The communication block's cycle counter includes the clock of the START write,
so it reads 341 for `SPLIT_FULL`.

## Communication block (`comblock.sv`)

The communication block is an AXI4-Lite register block with two first-word
fall-through FIFOs (`sync_fifo.sv`):

- 16 entries on the input side, enough for one sequence.
- 256 entries of {last, value} on the output side, enough for Split-B's 150
  values.

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CTRL | W | bit0 START: let the input FIFO drain into the core. bit1 CLEAR: empty both FIFOs and clear the core's pipeline and LSTM state (weights are kept). |
| 0x04 | STATUS | R | bit0 busy, bit1 done, bit2/3 input FIFO full/empty, bit4/5 output FIFO full/empty, bit6 input overflow (sticky until CLEAR), 15:8 input FIFO count, 31:16 output FIFO count. |
| 0x08 | IN_DATA | W | bits 7:0 pushed into the input FIFO. A write to a full FIFO is dropped and sets overflow. |
| 0x0C | OUT_DATA | R | Pops one result: bits 7:0 value, bit 8 last. Reads 0 when empty. |
| 0x10 | WADDR | RW | Weight address {layer[1:0], row[5:0], lane[7:0]}. |
| 0x14 | WDATA | W | bits 7:0 written to the weight at WADDR. |
| 0x18 | CYCLES | R | Clocks from START to the last result entering the output FIFO. |

Write and read responses are always OKAY. A write needs AW and W in the same
clock, and one transaction per direction may be outstanding.

A run goes like this:

1. Write 15 samples to IN_DATA.
2. Write START.
3. Poll STATUS until done.
4. Read OUT_DATA until a word has bit 8 set.

Samples can also be written after START; the core stalls until they arrive. If
the output FIFO fills, the core stalls until the processor reads.

### Loading weights

Write WADDR, then WDATA, once per weight. The weights of layer `layer` are laid
out as follows:

| Layer | id | Rows | Lanes |
|---|---|---|---|
| LSTM1 | 0 | 0 = x, 1…10 = h, 11 = bias | 40 = 4 gates × 10 units |
| LSTM2 | 1 | 0…9 = input h1, 10…14 = own h, 15 = bias | 20 |
| FC1 | 2 | 0…4 = inputs, 5 = bias | 10 |
| FC2 | 3 | 0…9 = inputs, 10 = bias | 1 |

For a Keras model, the LSTM entry (row, lane) takes these values:

- for an input row: `kernel[row][lane]`
- for a recurrent row: `recurrent_kernel[row − N_IN][lane]`
- for the bias row: `bias[lane]`

Scale each by 32 and round to 8 bits. Keras stores the gates in the same
i, f, g, o order.

## Where this design departs from the paper

- **Writable weights.** The paper stores fixed, trained weights in on-chip
  memory, compiled in by its synthesis flow. The trained values are not
  published, so here the weight memories are written at run time through the
  communication block.
- **Sparsity is not exploited.** The network is pruned to 70% zeros. This core
  stores and multiplies the zeros like any other weight, because a writable
  memory cannot drop them at build time. The testbenches load 70%-sparse
  random weights.
- **Assumed details.** The paper does not give:
  - the Q3.5 format, the accumulator width and rounding
  - the sigmoid/tanh approximation
  - the FC activations (ReLU on FC1, none on FC2 here)
  - the gate order
  - the stream handshakes and the register map

  All of these are this design's choices.
- **Several processing elements.** The paper's resource analysis finds room
  for two Split-B cores on its FPGA, working in parallel. It does not say how
  they connect to the processor. Here `N_PE` elements share one AXI4-Lite
  port, selected by address bits (see "Several processing elements").
  Whether two elements fit the paper's device has not been checked.
- **Not built:** the soft-core processor, its program memory, the UART and the
  vendor reset and interconnect cores. They are standard parts the paper uses
  but does not design.
- **Latency** differs as tabulated above. Resource use and power have not been
  measured on the paper's device.

## Files

| File | Contents |
|---|---|
| `rtl/lstm_pkg.sv` | Formats, sizes, `split_e`, `waddr_t`, saturation and PLAN activation functions |
| `rtl/weight_mem.sv` | Row × lane weight memory, synchronous read |
| `rtl/lstm_layer.sv` | LSTM layer, sequential over timesteps |
| `rtl/dense_layer.sv` | Fully connected layer |
| `rtl/lstm_accel.sv` | Layer pipeline chosen by `SPLIT`, result serializer |
| `rtl/sync_fifo.sv` | First-word fall-through FIFO |
| `rtl/comblock.sv` | AXI4-Lite registers, FIFOs, run control, cycle counter |
| `rtl/lstm_edge_top.sv` | Top: `N_PE` × (comblock + lstm_accel) behind one AXI4-Lite port |
| `tb/lstm_ref_pkg.sv` | Reference model (real arithmetic, floors) for every layer |
| `tb/*_harness.sv` | Parameterised drivers/checkers reused by the testbenches |
| `tb/tb_*.sv` | Self-checking testbenches: one per module, plus the two-element build |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog stops a testbench that hangs and counts that as a failure. Verilator 5
is enough. Pass the packages first, then the design and the testbench:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/lstm_pkg.sv tb/lstm_ref_pkg.sv rtl/*.sv \
  tb/lstm_layer_harness.sv tb/dense_layer_harness.sv tb/accel_harness.sv \
  tb/tb_lstm_edge_top.sv --top-module tb_lstm_edge_top
./obj_dir/Vtb_lstm_edge_top
```

To run another testbench, change the last file and `--top-module`: for
example `tb/tb_lstm_layer.sv` with `tb_lstm_layer`. Verilator accepts
`lstm_pkg.sv` appearing twice (once explicitly, once in `rtl/*.sv`). Each
testbench finishes in seconds.

| Testbench | What it checks |
|---|---|
| `tb_weight_mem` | Random writes and reads against a model, including out-of-range addresses |
| `tb_sync_fifo` | Random push/pop/flush against a queue, full and empty flags, count |
| `tb_lstm_layer` | A 1→10 layer returning all steps and a 10→5 layer returning the last step, with 70%-sparse random weights. Every h is compared with the reference model. Checks latency K+5, random back-pressure and gaps, and an abort with `clear`. |
| `tb_dense_layer` | 5→10 with ReLU and 10→1 linear. Checks values, latency N_IN+4, that ReLU is exercised, and back-pressure. |
| `tb_lstm_accel` | All three `SPLIT` builds, end to end against the reference model, with back-pressure. Checks the 340 / 321 / 264 clock latencies. |
| `tb_comblock` | Register map, FIFOs, START/done, two runs on one batch of samples, byte enables, 64 random weight writes, CLEAR and overflow. Uses a simple echo model in place of the core. |
| `tb_lstm_edge_top` | The top at its default parameters, driven over AXI4-Lite like the processor would. See below. |
| `tb_lstm_edge_dual` | The top built with `SPLIT_B` and `N_PE = 2`, with different weights in each element. Runs both elements at once and checks all 150 values of each, the last flag, CYCLES = 265, and that an unmapped address is harmless. |

`tb_lstm_edge_top` does the following:

- Loads all 871 weights.
- Runs six sequences and checks each forecast and the intermediate LSTM2
  output against the reference model.
- Checks the CYCLES count.
- Aborts one run with CLEAR and repeats it.
- Provokes an input-FIFO overflow.
- Counts the starts, clears, busy polls, pipeline stalls, overlapping layer
  activity and overflows. A mechanism that never occurs counts as a failure.

Each testbench was also run against a copy of its module with one deliberate
bug, such as a swapped gate accumulator, a wrong bias shift, reversed output
order or an off-by-one FIFO full flag. Every such copy failed its testbench.

## Changing the design

- **Network sizes** are the `H1`, `H2`, `D1`, `D2`, `N_STEPS` and `N_FEAT`
  constants in `lstm_pkg`. The layer modules take them as parameters.
  `waddr_t` allows up to 64 rows and 256 lanes per layer.
- **Number format:** `FRAC` in `lstm_pkg`. The activation functions assume an
  accumulator with 2·FRAC fraction bits.
- **Cut point:** the `SPLIT` parameter of `lstm_edge_top`.
- **Parallel elements:** `N_PE` of `lstm_edge_top`, from 1 to 8.
- **FIFO depths:** `IN_DEPTH` and `OUT_DEPTH`. `OUT_DEPTH` must hold all the
  results of one run if the processor reads them only after done.
