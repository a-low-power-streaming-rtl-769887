# A streaming speech-enhancement accelerator in FP10

This is RTL for a small accelerator that removes noise from speech one STFT
frame at a time. The network is a compact transformer-style model: 1-D
dilated convolutions in an encoder and decoder, two transformer blocks with
a GRU and softmax-free multi-head attention, and a masking stage. It
needs about 15.9 million multiply-accumulates per 16 ms frame. The hardware
meets that budget with only 16 multipliers at 62.5 MHz
(16 × 62.5 MHz = 1.0 GMAC/s, while 15.86 M / 16 ms = 0.99 GMAC/s). Two
ideas make that work:

* **One datapath for every layer type.** Convolutions, linear layers, GRU
  gates, attention products, shortcut additions and masking all reduce to
  element-wise multiply-accumulates on 16 lanes. Only the choice of
  operands differs, and that choice is made through SRAM addressing.
* **Feature maps never leave the chip.** All intermediate tensors of a
  frame stay in a 40 KB data SRAM. Only the frame input, the result,
  weights, biases and the program cross the chip boundary.

All arithmetic uses a 10-bit floating-point format, FP10: 1 sign bit,
5 exponent bits and 4 mantissa bits.

## Block diagram

```
            80-bit in ──►┌────────────┐──► 80-bit out
                         │ mem_ctrl   │  (background loads/stores)
                         └─┬───┬───┬──┘
     ┌─────────────┐       │   │   │
     │ instr_reg   │◄──────┘   │   │
     │ 32 x 32 bit │           ▼   ▼
     └──────┬──────┘   weight_sram   bias_sram      data_sram
            ▼          4 x 320 x 80  2 x 512 x 10   8 x 512 x 80
     ┌─────────────┐        │            │             │  ▲
     │ controller  │── read addresses / micro-op tag ──┘  │
     └─────────────┘        ▼            │             ▼  │ write-back
                   ┌──────────────────┐  │   local_reg_buffer (10 x 160)
                   │ pe_block 0  (8)  │  │             │
                   │ pe_block 1  (8)  │◄─┴─────────────┘
                   └───┬──────────┬───┘
                   tree sums    lane results ─────────────► data_sram / LRB
                       ▼
                   accumulator (+bias, ReLU) ─────────────► data_sram
                   act_lut (sigmoid / tanh) ──────────────► data_sram
```

| Module | Role |
|---|---|
| `se_accel_top` | Wires everything together as a five-stage pipeline. |
| `controller` | Runs the program and generates every SRAM address. |
| `mem_ctrl` | Moves words between the two 80-bit streams and the on-chip memories. |
| `data_sram`, `weight_sram`, `bias_sram` | Banked memories built from `sram_bank`. |
| `instr_reg` | Program store. |
| `local_reg_buffer` | Ten 160-bit registers next to the PE blocks. |
| `pe_block` | Eight `pe_cell`s plus a tree of `fp10_adder`s. |
| `accumulator` | Sums across kernel taps and channel groups, starting from the bias. |
| `act_lut` | Sigmoid and tanh. |
| `fp10_pkg` | FP10 type and operators. |
| `se_pkg` | Sizes, instruction encoding and the pipeline tag. |

## FP10 arithmetic

* **Encoding.** The value is (−1)^s · 1.m · 2^(e−15). Exponent code 0
  means zero. All other codes are normal numbers, from 2^−14 up to
  1.9375 · 2^16. There are no subnormals, infinities or NaNs.
* **Rounding.** Every operator first forms its exact result, then rounds
  once to 5 significant bits, to nearest with ties to even. A result below
  2^−14 becomes +0. A result above the largest value saturates to it.
  * Multiply forms the exact 10-bit product of the two mantissas.
  * Add aligns both operands into a 36-bit integer, so the sum is exact
    before rounding.
* **Where rounding happens.** A MAC rounds twice: once after the multiply
  and once after the add. The tree adder rounds at every node, pairing
  ((0+1)+(2+3))+((4+5)+(6+7)). The accumulator computes
  `acc = (first ? bias : acc) + (sum0 + sum1)`.
* **Checking.** The testbenches compare this against a real-number model
  that follows the same operation order, and require bit-exact agreement.

These rounding, range and ordering rules are choices of this RTL. The
source design fixes only the 1/5/4 bit split.

## Dataflow and the SRAM layout

**Word layout.** An 80-bit word holds 8 FP10 values: eight channels at one
position of the signal. A tensor of 16·G channels occupies G bank pairs.
Channel group c of a tensor based at bank b and address a is in bank
(b+c) mod 8, at address a + position. Base banks are even, so a pair of
banks feeds PE block 0 and PE block 1 in the same cycle.

**Convolution** (also every linear layer). Each cycle one channel pair is
read at one kernel tap. The position read is
p·stride + (k − (K−1)/2)·dilation. Each PE cell multiplies one channel by
its weight. The two trees reduce 8 channels each. The accumulator sums over
taps and channel groups, starting from the bias, and writes one output
channel. A position outside the signal is zero padding: nothing is read and
the cells skip. A K-tap convolution with G channel groups and O output
channels over L positions takes L·O·K·G cycles. Every one of those cycles
keeps all 16 multipliers busy.

**Matrix products along the signal (attention).** The positions of a
signal sit at different addresses of one bank, so they cannot be read in
parallel. Instead:

* One value of A is broadcast to all 8 cells of a block. The cells multiply
  it with a row of B and accumulate in their own output registers.
* `MMKV` forms M = KᵀV for both heads at once, one head per PE block. The
  8 rows go to local-register-buffer rows 0–7. For a length n it takes 8·n
  cycles.
* `MMQ` forms Q·M. Each query word is read from SRAM once and parked in
  buffer row 8 for the other 7 rows. It takes 8·n cycles.

There is no softmax; the model normalises Q and K beforehand.

**Element-wise** (`EW`). The operation is out = ±(a·w) + c on 16 lanes per
cycle, with a replaceable by 1 and c by 0. That covers:

* shortcut additions (a := 1);
* masking and gate products (c := 0);
* the GRU's (1 − z)·n + z·h, as a negated FMA followed by an FMA.

The three operands must come from different bank pairs. The controller
asserts this in simulation.

**LUT** (`ACT`). One sigmoid or tanh per cycle:

* 2^−4 ≤ |x| < 16: a 256-entry table, indexed by sign, 3 exponent bits and
  4 mantissa bits.
* Below that range: the linear approximation, x for tanh and 0.5 + x/4 for
  sigmoid.
* Above it: saturation.

The tables are `rtl/act_lut_sigmoid.hex` and `rtl/act_lut_tanh.hex`.

**GRU and attention sequences.** The source describes the GRU as five steps
and attention as three: QKV linear, then KᵀV, then Q·M. Each step is one or
a few of these instructions.

## Instruction set

Instructions are 32 bits, with the opcode in [31:28]. A program is loaded
two instructions per 80-bit word (bits 31:0 first) into the 32-entry
instruction register.

| Op | Code | Meaning |
|---|---|---|
| HALT | 0 | Stop and raise `done`. |
| CFG | 1 | Set parameter register [27:24] to [23:0]. |
| CONV | 2 | Convolution / linear layer. [0] = ReLU. |
| MMKV | 3 | M = KᵀV into the local buffer. |
| MMQ | 4 | out = Q·M. |
| EW | 5 | ±(a·w)+c. [0] ReLU, [1] a := 1, [2] use c, [3] negate the product. |
| ACT | 6 | LUT. [4] = 0 for sigmoid, 1 for tanh. |
| LOAD | 7 | Input stream → memory. [27:26] target (data, weight, bias, instr), [25:23] bank, [22:14] address, [13:4] words. |
| STORE | 8 | Data bank → output stream. Same fields as LOAD. |
| WAIT | 9 | Wait until the memory controller is idle. |

Parameter registers (CFG):

| Reg | Name | Fields |
|---|---|---|
| 0 | SRC_A | {bank[11:9], addr[8:0]} |
| 1 | SRC_B | {bank[11:9], addr[8:0]} |
| 2 | SRC_C | {bank[11:9], addr[8:0]} |
| 3 | DST | {bank[11:9], addr[8:0]} |
| 4 | LEN | output length [9:0], input length [19:10] |
| 5 | CHAN | 16-channel groups [2:0], output channels [11:3] |
| 6 | CONV | kernel [2:0], dilation [6:3], stride [8:7], output step [10:9] |
| 7 | MEM | weight base [8:0], weight half [9], bias base [18:10], bias bank [19] |

* **Convolution weights.** The weight address is
  base + (o·K + k)·G + g, reading one word per PE block from the selected
  bank pair.
* **Biases.** Biases are loaded 8 per word.
* **Splitting large layers.** A layer whose weights do not fit in one bank
  pair must be split into several CONV instructions. Example: the decoder's
  32→64, k = 3 layer needs 384 words per bank, more than the 320 available.
* **Decoder reshape.** The output step writes interleaved positions, which
  is how the decoder's reshape is done.

LOAD and STORE only start a transfer and return at once. The transfer then
runs in the background while compute instructions proceed. This is the
ping-pong use of the memories: the next layer's weights go into weight
banks 2–3 while the datapath reads 0–1, and likewise for the two bias
banks.

This whole instruction set is this RTL's own. The source design says only
that the chip is programmed by custom instructions held in a 32 × 32-bit
register.

## Pipeline and timing

The controller issues one micro-operation per cycle. The top moves its tag
through five stages:

| Stage | What happens |
|---|---|
| s0 | SRAM reads are requested. |
| s1 | Data arrives, operands are selected, the PE cells compute, the LUT is addressed. |
| s2 | Cell registers are valid. EW and MMQ words are written back, MMKV rows go to the local buffer, the LUT result is written, and the bias is read. |
| s3 | Tree sums are valid and the accumulator adds. |
| s4 | The convolution result lane is written. |

**Instruction timing.** Between instructions the controller waits 5 drain
cycles so the next instruction sees all results. A compute instruction
therefore takes (micro-operations + 7) cycles from fetch to the next fetch.
Both the controller testbench and the end-to-end testbench check this count
exactly.

**Memory-controller timing.**

* The datapath has priority at each data bank. The memory controller waits
  while the datapath uses the same bank, and shows that as a stall.
* It takes an input word at most every other cycle.
* Bias words take 8 cycles, one per bias.
* A store delivers at most one word every 3 cycles.

**Power features.**

* Zero skipping: a cell with a zero data input holds its multiplier inputs
  at zero and passes its addend on.
* Idle SRAM banks get no enable. Per-bank activity is visible on the
  `st_*` outputs, together with stalls, LUT use and padding.

## Capacity against the network

* **Throughput.** The throughput only just fits (0.99 of the 1.0 GMAC/s).
  That requires near-full use of the 16 multipliers, which the convolution
  loop provides. The 7-cycle instruction overhead and the background
  weight loads have to stay small against the layer lengths.
* **Weights.** The 55.9 k weights (about 70 KB in FP10) do not fit the
  12.5 KB weight memory. They are streamed per layer through the ping-pong
  halves.
* **Attention.** Attention on a length-128, 16-channel signal needs
  256 words per tensor and eight buffer rows for KᵀV, both within the
  built sizes.
* **Data memory.** Whether every feature map of a frame fits at once
  depends on layer lengths the source does not state exactly.

## Departures from the source design and open points

* **Not built:** the STFT/iSTFT, which runs outside the accelerator, and
  the external memory. The external memory is represented only by the two
  80-bit streams.
* **Own choices, not taken from the source:**
  * the instruction set;
  * the pipeline;
  * the FP10 rounding rules;
  * the LUT size;
  * the handshakes;
  * the bias and instruction packing;
  * the split of each memory into ping-pong halves.
* **Local register buffer.** The source also uses it for GRU intermediates.
  Here GRU intermediates go through the data SRAM, and buffer row 9 is
  unused.
* **Normalisation.** Batch normalisation is assumed folded into the
  convolution weights and biases. The RTL has no normalisation unit.
* **Frequency.** The chip described runs at 62.5–250 MHz. This RTL has no
  clock-frequency logic; it just runs on `clk`.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. With Verilator 5,
from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
  rtl/fp10_pkg.sv rtl/se_pkg.sv tb/tb_fp10_ref_pkg.sv tb/tb_se_accel_top.sv \
  --top-module tb_se_accel_top
./obj_dir/Vtb_se_accel_top
```

Run it from that directory: the LUT reads its tables through paths relative
to it.

`tb_se_accel_top` runs the full-size design through two programs:

* loads of every memory type;
* a dilated, strided, padded convolution with ReLU, overlapping a store
  that forces bank-conflict stalls;
* element-wise FMA with negate, add, and multiply;
* both attention steps;
* sigmoid and tanh;
* a convolution from the second weight and bias halves.

It compares the whole data memory and both output streams with a model and
counts every mechanism. Each block also has its own testbench,
`tb_<module>.sv`.
