# SHIELD8: a sequential, per-layer multi-precision 1D-CNN accelerator

This is synthesizable SystemVerilog for a small inference engine. It classifies acoustic feature vectors, for example to detect a drone from its rotor noise, with a compact 1D convolutional network.

The main idea is to trade throughput for area. The design has exactly one multiply-accumulate unit, and it is reused for every layer:

- Convolutions, pooling and dense layers run one after another on the same datapath.
- The datapath performs one MAC per clock.
- Each layer can pick its own number format: FP32, BF16, INT8 or FXP8. Layers that tolerate quantisation run in 8-bit arithmetic; sensitive ones keep a floating-point format.
- A descriptor per layer tells the hardware the layer's shape, format, activation function and requantisation.
- Weights arrive as a stream, one weight row per output channel, so weight memory only ever holds a single row.

The RTL follows a published architecture description that gives the block structure, the supported formats and activation functions, and the network. It gives no micro-architecture. Every register map, encoding, loop order, rounding rule and latency below is this design's own. The section "Where this design departs from the description" lists where the two disagree.

## The network it is sized for

| layer | operation | shape | output stored |
|---|---|---|---|
| 0 | conv k=3, ReLU, max-pool 2 | 1 x 558 -> 512 x 556 -> 512 x 278 | 142,336 words |
| 1 | conv k=3, ReLU, max-pool 2 | 512 x 278 -> 256 x 138 | 35,328 words |
| 2 | conv k=3, ReLU, max-pool 2 | 256 x 138 -> 128 x 68 = 8,704 (the flatten) | 8,704 words |
| 3 | dense, ReLU | 8,704 -> 256 | |
| 4 | dense, ReLU | 256 -> 128 | |
| 5 | dense, ReLU | 128 -> 72 | |
| 6 | dense, Sigmoid | 72 -> 2 | sent to the output stream |

Where these numbers come from:

- The channel counts, kernel size, pooling, dense widths and the flatten size of 8,704 come from the reference network.
- The input length of 558 samples is an assumption. It is the length that makes three kernel-3, pool-2 stages end at 128 x 68 = 8,704.
- Dropout appears in the reference network but does nothing at inference time, so it is not built.

The whole network is about 125.0 million MACs.

The memory defaults of `shield8_top` follow from this table, and all of them are parameters:

| parameter | default | what it holds |
|---|---|---|
| `FM1_DEPTH` | 142,336 | largest stored map (layer 0's output) |
| `FM0_DEPTH` | 35,328 | input and layer 1's output |
| `WB_DEPTH` | 8,704 | longest weight row (the first dense layer) |
| `MAX_LAYERS` | 8 | descriptor slots |
| `OUT_FIFO` | 4 | result FIFO depth |

## Datapath

```
 AXI-Stream in ──┬──> feature bank 0 ─┐
                 │    feature bank 1 ─┴─> precision alignment ─┐
                 └──> weight row buffer + offset register ─────┤
                                                               v
        MAC (1 product/cycle) ─> normalisation (+offset) ─> scale & shift
        (saturation) ─> CORDIC activation ─> max-pool ─> feature bank
                                                       └─> AXI-Stream out
```

| module | role |
|---|---|
| `shield8_pkg` | formats, descriptor struct, FP32/BF16 arithmetic functions |
| `feature_mem` | one feature bank, synchronous read (one cycle) |
| `weight_buf` | weight row and offset (bias) register |
| `fmt_align` | converts a stored word to the current layer's format |
| `mp_mac` | the multi-precision multiply-accumulate |
| `norm_unit` | adds the per-channel offset |
| `scale_shift` | requantisation and overflow handling |
| `act_cordic` | ReLU, Sigmoid, Tanh, Swish, GELU, SeLU, two-class SoftMax |
| `ctrl_engine` | the FSM running the layer loop nest |
| `cfg_prefetch` | decodes the current descriptor, prefetches the next one |
| `axil_regs` | AXI-Lite register file and descriptor table |
| `dataflow_flags` | busy/done/overflow flags, overflow count, cycle counter |
| `axis_port` | AXI-Stream slave (input) and master with result FIFO |
| `shield8_top` | wires everything together |

### Loop nest and memory layout

A dense layer is handled as a convolution with `in_len = 1` and `k = 1`, so the engine has a single loop nest:

```
for oc in 0 .. out_ch-1:
    stream in offset[oc] and row w[oc][0 .. in_ch*k-1] into the weight buffer
    for pp in 0 .. pool_len-1:
        for s in 0 .. (pool ? 1 : 0):              # the two pool positions
            p   = pool ? 2*pp + s : pp
            acc = sum over ic, kk of x[ic*in_len + p + kk] * w[ic*k + kk]
            y   = act(scale_shift(acc + offset[oc]))
        out[oc*pool_len + pp] = max over s of y
```

The layout is channel-major (`x[ic*in_len + pos]`). Because of this, the output of the last convolution is already the flattened vector that the first dense layer reads, and no reordering step is needed.

Activations ping-pong between the two banks:

- Layer 0 reads bank 0, which holds the staged input, and writes bank 1.
- Layer 1 reads bank 1 and writes bank 0, and so on.

The output of the last layer is written to its bank and is also pushed into the result FIFO. The final word carries `tlast`.

### Number formats

Every value occupies one 32-bit word in memory, whatever its format:

- FP32 uses the whole word.
- BF16 sits in bits [15:0].
- INT8 and FXP8 are sign-extended bytes.

An FXP8 value, and an INT8 value too, has a per-layer count of fraction bits, `frac`, from 0 to 15.

| format | product | accumulator | offset add | requantisation (`scale_shift`) |
|---|---|---|---|---|
| INT8 | 8x8 signed | 32-bit integer | integer | round(acc*scale / 2^shift), saturate to [-128,127] |
| FXP8 | 8x8 signed | 32-bit integer | integer | round(acc / 2^shift), saturate |
| BF16 | exact in FP32 | FP32 | FP32 | exponent minus shift, rounded to BF16, clamp to max finite |
| FP32 | FP32 | FP32 | FP32 | exponent minus shift, clamp to max finite |

The floating-point helpers in `shield8_pkg` behave as follows:

- They round to nearest even.
- Subnormals are flushed to zero.
- An overflow becomes infinity, which the scale-and-shift stage then clamps.
- NaN is not handled.

Integer rounding is half away from zero everywhere.

Every saturation raises `ovf`. `dataflow_flags` keeps a sticky overflow flag and a saturating 16-bit count of saturations, and both appear in STATUS.

**Precision alignment.** When a layer runs in a different format from the layer that produced its input, each word is converted on the read path. This uses the previous layer's format, taken from the prefetcher's `src_prec` and `src_frac`.

- The conversion goes through FP32, which is exact for 8-bit sources.
- A conversion to an 8-bit format rounds half away from zero and saturates.
- Changing the fraction-bit count between two 8-bit layers therefore rescales the values.

### The CORDIC activation unit

ReLU and the identity act on the stored word and finish in 1 cycle. The other five functions reuse one core, built from one exponential and one division, and finish 51 cycles after `start`:

1. Convert the input to signed Q4.12, saturating at ±8.
2. Form the argument `a`:

   | function | a |
   |---|---|
   | Sigmoid, Swish | x |
   | Tanh | 2x |
   | GELU | 1.702x |
   | SoftMax | x − x2 |
   | SeLU | x |

3. Compute `e = exp(-|a|)`:
   - Reduce the range: |a| = q·ln2 + r, with 0 ≤ r < ln2.
   - Run 22 hyperbolic CORDIC rotations in rotation mode. They use shifts 1..20, with 4 and 13 repeated, start from (1/K, 0, −r) and give cosh(r) − sinh(r) = exp(−r).
   - Shift the result right by q.
4. Divide with 25 linear-CORDIC vectoring steps. For a ≥ 0 this computes `s = 1/(1+e)`; for a < 0 it computes `s = e/(1+e)`. Either way, `s = sigmoid(a)`.
5. Finish:

   | function | result |
   |---|---|
   | Sigmoid, SoftMax | s |
   | Tanh | 2s − 1 |
   | Swish, GELU | x·s |
   | SeLU | λx for x > 0, λα(e − 1) otherwise |

   Internal values carry 24 fraction bits. The result is rounded back to the layer's format.

Checked over its range against double-precision references, the unit is within about 2·10⁻³ for Sigmoid and Tanh and within one LSB in the 8-bit formats.

SoftMax is the two-class form, `softmax(x, x2)[0] = sigmoid(x − x2)`. The top ties `x2` to zero, so a SoftMax layer returns sigmoid(x) per neuron. The binary classifier uses Sigmoid.

## Programming it

AXI-Lite registers (byte addresses):

| address | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | write | bit 0 starts a run; bit 1 clears flags and counters |
| 0x04 | STATUS | read | bit 0 busy, bit 1 done, bit 2 overflow, [7:4] layer, [31:16] overflow count |
| 0x08 | NLAYERS | read/write | number of layers, 1 to `MAX_LAYERS` |
| 0x0C | CYCLES | read | clock cycles of the current or last run |
| 0x80 + 16·l | descriptor l, word 0 | read/write | [31:16] in_ch, [15:0] in_len |
| 0x84 + 16·l | descriptor l, word 1 | read/write | [31:16] out_ch, [15:12] k, [11] pool, [10:9] format, [8:6] activation, [3:0] frac |
| 0x88 + 16·l | descriptor l, word 2 | read/write | [20:16] shift, [15:0] INT8 scale |

Encodings:

- Format: 0 FP32, 1 BF16, 2 INT8, 3 FXP8.
- Activation: 0 none, 1 ReLU, 2 Sigmoid, 3 Tanh, 4 Swish, 5 GELU, 6 SeLU, 7 SoftMax.
- For a dense layer, write `in_ch = inputs`, `in_len = 1` and `k = 1`.

The `irq` output is the sticky done flag.

A run goes like this:

1. Write the descriptors and NLAYERS.
2. Write CTRL = 1.
3. Send, on the AXI-Stream slave:
   - the `in_ch·in_len` input words;
   - then, for each layer in order and each output channel in order, one offset word followed by that channel's `in_ch·k` weights, in the order `ic*k + kk`.
4. Collect the results from the AXI-Stream master.

Some details of the interfaces:

- `s_axis_tready` is high only while the engine is consuming a word. The stream can therefore be produced at any pace.
- The result FIFO applies back-pressure to the engine. The engine waits if the FIFO is full.
- AXI-Lite: a write is accepted when address and data are both valid. Each response follows one cycle after its request. Assertions check that `bvalid`, `rvalid` and `m_axis_tvalid`/`tdata` are held until they are accepted.

## Timing

The MAC runs once per cycle with no gaps inside a weight row. Each layer costs about

```
out_ch · [ (1 + R) + P · ( w·(R + 3 + A) + 1 ) ]
```

where the terms are:

| term | meaning |
|---|---|
| R = in_ch·k | MAC cycles per output position |
| P | stored outputs per channel |
| w | 2 with pooling, 1 without |
| A | activation latency: 1 for ReLU and none, 51 for the CORDIC functions |
| 1 + R | streaming the offset and the row at one word per cycle |

On top of that come the input staging (`in_ch·in_len` cycles), a few cycles per layer to switch descriptors, and one cycle per result pushed to the stream.

Weight streaming does not overlap computation. For the full network this overhead is small:

- The network has 125,021,328 MACs.
- A full run takes 129,466,375 cycles, which is 1.036 cycles per MAC.
- At 100 MHz that is 1.29 s per inference.

## Where this design departs from the description

- **Latency.** The reference claims 116 ms per inference at 100 MHz on a small FPGA. It also gives a cycle model that counts one cycle per MAC (Σ MACs + 2L − 3). The network above has 125 million MACs, so that cycle model gives about 1.25 s at 100 MHz, not 116 ms. This RTL follows the single-MAC model, so it does not reach 116 ms; at 1.56 GHz the same run would take 83 ms. If the original network is in fact smaller, only the descriptors and the memory depths change.
- **Memory size.** The reported FPGA build uses only 8 block RAMs/DSPs. The feature banks here hold 178 K words and the weight buffer 8.7 K words, about 6 Mbit in total, because one word per value is kept in every format. Packing four 8-bit values per word would cut this by four, but it is not done.
- **Pruning arithmetic.** The flatten size of 8,704 is described as a 75 % reduction of 35,072, but 35,072 × 0.25 = 8,768. The design is sized for 8,704. The unpruned 35,072-wide dense layer does not fit, because its weight row is longer than `WB_DEPTH`.
- **Parts not built.** Dropout (training only) is not built, and neither are the host side (processor, DRAM, AXI interconnect and AXI DMA). Their connections are the AXI-Lite slave and the two AXI-Stream ports of `shield8_top`.
- **The "MAC array".** It is one multi-precision MAC. The description calls it an array but describes strictly sequential execution with one MAC per cycle.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M` at the end and has a watchdog. `tb_ref_pkg.sv` holds the testbenches' reference helpers: real↔FP32/BF16 conversion and rounding.

To build and run a testbench with Verilator 5:

```
verilator --binary --assert -Irtl -Itb rtl/shield8_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_shield8_top.sv --top-module tb_shield8_top -Wno-fatal
./obj_dir/Vtb_shield8_top
```

Replace the testbench name to run another one. `rtl/*.sv` may be listed for any of them, because unused modules are ignored.

What each testbench covers:

- **Unit testbenches.** These compare each block against independent models:
  - double-precision arithmetic, with rounding to FP32/BF16 where a format needs it, for `mp_mac`, `fmt_align`, `norm_unit`, `scale_shift` and `act_cordic`;
  - integer models for the memories, FIFOs, registers and FSMs.

  They also check the activation latencies of 1 and 51 cycles, and that `ctrl_engine` runs exactly one MAC per cycle through every row.
- **`tb_shield8_top`.** Runs a small network end to end at reduced memory sizes, twice:
  - layer 0: INT8 convolution with pooling;
  - layer 1: FXP8 convolution with pooling;
  - layer 2: BF16 dense;
  - layer 3: FP32 dense with Sigmoid.

  The input stream has random gaps and the output is held off. The testbench checks every stored word and the outputs. It also counts that pooling, saturation, format switches, CORDIC activations, descriptor prefetches, input stalls and output back-pressure each occurred.
- **`tb_shield8_modes`.** Runs the same seven-layer shape with all widths scaled down: conv 8/8/4 channels, input length 46, dense 16 -> 8 -> 6 -> 4 -> 2. It runs once with every layer in FP32, then BF16, INT8 and FXP8. For each format it checks every stored word exactly and the sigmoid outputs.
- **`tb_shield8_full`.** Runs the full network above, in INT8, at the default sizes. It checks every stored word of every layer against an integer model, checks the two sigmoid outputs to one LSB, and checks the MAC and cycle counts. It takes about 1.5 minutes of simulation.

Practical notes:

- The floating-point functions are written for clarity, not speed: for example, normalisation is a 64-step loop. A synthesis tool unrolls them into combinational logic.
- Timing closure at a given clock has not been studied. Pipelining the FP32 adder in the MAC is the first place to look.
