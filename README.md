# Aging-balanced weight memory for a DNN accelerator

## The problem

In a 6T-SRAM cell one of the two PMOS transistors is always under negative
bias: the left one while the cell holds `1`, the right one while it holds
`0`. Negative bias temperature instability (NBTI) slowly raises the threshold
voltage of the stressed transistor, which erodes the cell's static noise
margin. A cell wears least when both transistors are stressed equally, that
is, when the cell holds `1` for half of its life (a duty cycle of 50 %).

The weight memory of a DNN accelerator is a bad case. The same weights are
loaded in the same order for every inference, so a given cell sees the same
short sequence of bits forever. If a network is split into K weight blocks,
each cell only ever holds K distinct values, and with quantised weights those
values are strongly biased per bit position (the high bits of small signed
integers mostly copy the sign bit). Many cells therefore sit at duty cycles of
0, 25 % or 100 % and age at the worst rate. Fixed inversion of every other
write does not help when K is even, and rotating the data needs barrel
shifters that cost far more area and power than the fix below.

## The idea

Every weight block is written into the memory either as it is or bit-wise
inverted, chosen at random when the block is loaded. The choice, a single
bit `E`, is kept for as long as the block stays in memory and is used to
invert the words back as they are read. Because `E` is fresh random for every
block, the bit a cell holds over its lifetime is the data bit XOR a fair coin,
which averages to 50 % whatever the weights are. Nothing else changes: the
dataflow, the addresses and the values that reach the multipliers are exactly
those of the unprotected accelerator.

A real random source is rarely fair. The controller therefore XORs the random
bit with the top bit of a small block counter. That bit is `1` for half of
every 2^M blocks, so if the generator gives `1` with probability p, `E` is `1`
with probability ½·p + ½·(1−p) = ½ exactly, over every whole period of 2^M
blocks.

The cost is one XOR per bit on the write side, one XOR per bit on the read
side, an M-bit counter, a 1-bit register and a random bit generator.

## Block diagram

```
                 +--------------------------- dnn_life_accel ----------------------------+
 weights  ------>| stream_fifo -> wde (XOR E) -> weight_buffer -> rdd (XOR E) --+         |
 (512 b words)   |                  ^                512 KB          ^          |         |
                 |                  |                                |          v         |
                 |   trbg -> aging_controller ---------- E ----------+   processing_array |
                 |             ^ new_block                               8 PE x 8 MAC     |
                 |             |                                                |         |
 commands ------>|        control_unit  (addresses, strobes, New Data Block)    v         |
                 |                                                      accumulation_unit |
 input acts ---->| stream_fifo -> activation_buffer (4 MB) --> processing_array |         |
 (64 b words)    |                      ^  |                                    |         |
 output acts <---| stream_fifo <--------|--+ <------- requantised outputs <------+         |
                 +----------------------------------------------------------------------+
```

The three FIFOs stand at the boundary to off-chip DRAM, which is not part of
the design; their DRAM sides are the top-level stream ports.

## The aging-mitigation path

### Write Data Encoder (`wde`) and Read Data Decoder (`rdd`)

Both are an "inverter switch": one XOR gate per bit, all gates sharing the
enable `E`. The encoder sits between the weight FIFO and the weight memory,
the decoder between the memory read port and the processing array. They are
combinational and add no cycle. Their width is a parameter (64 by default,
the size used for the encoder's area and power evaluation); the top
instantiates them at the full memory word of 512 bits. Cost grows linearly
with width.

### Aging controller (`aging_controller`)

```
 trbg_bit ----------------------\
                                 XOR ---- 1 ---\
 cnt[M-1] ----------------------/               MUX ---> E register ---> E
                                       E --- 0 -/  ^
 cnt <= cnt + new_block                            |
 new_block ----------------------------------------+
```

* `new_block` is a one-cycle pulse from the control unit at the start of
  every weight-block load.
* On that edge the counter advances and `E` takes `trbg_bit XOR cnt[M-1]`,
  using the counter value from before the edge. Between pulses `E` holds.
* `E` is therefore valid from the cycle after the pulse; the control unit
  starts writing the block one cycle later, so the whole block is encoded
  with the new `E`.
* M = 4: the inversion of the random bit is on for blocks 8–15 of every 16.

Only one bit of metadata exists. That is sufficient because the weight memory
holds one block at a time and weight loading and computation do not overlap:
the `E` used to write a block is still in the register when the block is read.
A design that double-buffers the weight memory would need one `E` per buffer
half.

### Random bit generator (`trbg`)

In silicon this is a free-running five-stage ring oscillator sampled by the
clock. It cannot be written as logic, so `rtl/trbg.sv` is a behavioural model
(it uses `$urandom`) that delivers one random bit per clock with a
configurable probability of `1` (`BIAS_PERMIL`, default 500; 700 reproduces a
generator biased to 70 % ones). Replace it with the oscillator macro for
implementation; every other file is synthesizable.

## The accelerator around it

### Sizes

| parameter | value | meaning |
|---|---|---|
| `F` | 8 | processing elements = filters computed in parallel |
| `N` | 8 | multipliers per PE = activations consumed per cycle |
| weight / activation format | signed 8 bit | symmetric int8 quantisation |
| weight word | F·N·8 = 512 bit | weights for one cycle of the whole array |
| `W_DEPTH` | 8192 words | 512 KB weight memory |
| activation word | N·8 = 64 bit | activations for one cycle |
| `A_DEPTH` | 524288 words | 4 MB activation memory |
| `M` | 4 | bias-balancing counter width |
| accumulator | 32 bit | per filter |
| `FIFO_DEPTH` | 4 | each of the three stream FIFOs |

### Processing array and accumulation

All F PEs see the same N activations; PE p takes bits `[p*64 +: 64]` of the
decoded weight word, i.e. the N weights of filter p, multiplies them pair-wise
and sums the products in a balanced adder tree (19-bit result). The
accumulation unit adds each PE's sum into a 32-bit register per filter; the
first word of an output loads the register instead of adding, so outputs
follow each other without a clearing cycle. Output activations are produced
by an arithmetic right shift (`shift` field of the command) and saturation to
[−128, 127]; the F results form one 64-bit activation word.

### Dataflow and commands

A layer's filters are grouped into sets of F. A block is a piece of one set —
the same r×c×ch window of each of the F filters — sized to fit the weight
memory; blocks are loaded one after another, each once per inference, and
each is used for all the computation that needs it before the next one
replaces it. The order in which blocks are visited (along columns, rows,
channels, then the next filter set) is up to whoever issues the commands.

The control unit executes one command at a time (`cmd_t` in
`rtl/dnn_life_pkg.sv`, valid/ready handshake, `cmd_ready` = idle):

| op | fields | action |
|---|---|---|
| `OP_LOAD_W` | `len` | `new_block` pulse, then `len` words from the weight stream to weight addresses 0..len−1, through the encoder |
| `OP_LOAD_A` | `addr`, `len` | `len` words from the activation stream to `addr`.. |
| `OP_COMPUTE` | `addr`, `len`, `stride`, `n_pos`, `out_addr`, `shift` | for p < n_pos: weight words 0..len−1 against activation words `addr + p·stride + i`; output word p written to `out_addr + p` |
| `OP_STORE_A` | `addr`, `len` | `len` activation words to the output stream |

Timing of `OP_COMPUTE`: one weight word and one activation word per cycle,
no bubbles between positions. A read issued in cycle t returns in t+1, passes
decoder, multipliers and adder tree and is accumulated at the end of t+1; the
finished outputs are written back in t+2. From the edge that accepts the
command to `busy` falling takes `len·n_pos + 3` cycles. Loads and stores move
one word per cycle while the stream allows. Stores reserve room in the output
FIFO (counting the read in flight) before each read, so the FIFO never
overflows.

The activation layout (which word holds which pixel and channel) is left to
software: `COMPUTE` only walks `len` consecutive activation words per output
and steps by `stride` between outputs, which covers fully connected layers
and convolutions laid out so that a receptive field is contiguous.

## What comes from where

Taken from the source design: the overall block structure (FIFOs to DRAM,
encoder before and decoder after the weight memory, processing array of f
PEs with N multipliers and an adder tree each, an accumulation unit of adder
plus register per PE); the XOR inverter switch with a single enable; the
controller made of random bit generator, M-bit register with adder,
XOR with the register's top bit, a multiplexer selected by the New Data Block
signal and a 1-bit `E` register; f = N = 8, M = 4, 512 KB of weight memory,
4 MB of activation memory; the ring-oscillator generator and the 0.5/0.7
generator biases.

Chosen here, where the source is silent: word widths (one array-cycle per
word), memory port structure and one-cycle read latency, the FIFO depth and
handshakes, the whole command set and control unit, reset values (`E` = 0,
counter = 0), the timing of `E` relative to the first write, 32-bit
accumulators, shift-and-saturate requantisation, signed int8 arithmetic.

## Limits and departures

* Only int8 arithmetic is built. The encoder, decoder and memory are
  indifferent to the number format, so the aging scheme covers 32-bit float
  weights too, but the PEs cannot compute with them.
* Partial sums are accumulated only within one `COMPUTE`. An output whose
  filter spans several weight blocks would need its partial sums stored
  between blocks; that storage is not built. Every layer of AlexNet fits one
  filter set of 8 filters into a single block (the longest filter, 9216
  weights, takes 1152 of 8192 words), so this does not bite there.
* The activation memory must hold a layer's input and output together;
  VGG-16's first layers (2 × 3.06 MB) do not fit 4 MB without feature-map
  tiling, which the control unit does not do.
* `E` is one bit for the whole memory; weight loading and computation are not
  overlapped.
* The random bit generator is a behavioural model.
* `control_unit` does not use every bit of a stored command after dispatch
  (lint reports the unused bits); the assertions' use of `rst_n` in
  `disable iff` makes lint report it as both synchronous and asynchronous.
  Neither is a circuit issue.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_wde`, `tb_rdd` | random words, E = 0 and 1, against `din` / `~din` |
| `tb_trbg` | fraction of ones for bias 0.5 and 0.7, reset value, toggling |
| `tb_aging_controller` | E and counter every cycle against a reference model; with a 70 %-biased input, E is `1` for 45–55 % of blocks |
| `tb_weight_buffer`, `tb_activation_buffer` | random write/read against a model, read-during-write, output hold |
| `tb_processing_element`, `tb_processing_array` | dot products including −128·−128 |
| `tb_accumulation_unit` | accumulate/clear sequences, shift, both saturation limits |
| `tb_stream_fifo` | ordering, full/empty flags, count, push while full and popping |
| `tb_control_unit` | addresses, strobes and their cycle offsets for all four commands; FIFO reservation |
| `tb_dnn_life_accel` | whole design at its default size: a full 8192-word block and 34 short blocks; memory cells = weights XOR E; every output against a computed reference; COMPUTE time = len·n_pos + 3; counts stalls, back-pressure, saturation, E = 0 / E = 1 blocks and active bias balancing, each of which must occur |
| `tb_custom_net_aging` | weight traffic of 100 inferences of a four-layer CNN (CONV 16×1×5×5, CONV 50×16×5×5, FC 256×800, FC 10×256) with a 70 %-biased generator, in three weight formats; measures the duty cycle of 65536 cells |

Trained weights are not included, so `tb_custom_net_aging` generates roughly
Gaussian weights and stores them as symmetric int8 (σ ≈ 20 LSB), as
asymmetric int8 (the same values plus a zero point of 115) and as 32-bit
floats (σ ≈ 0.05; the float version of the FC 256×800 layer, 12800 words,
exceeds the memory and is loaded as two blocks). The first 128 memory words
are sampled after every block load, each block counting for equal time:

| format | blocks | duty cycle with the scheme | unprotected: range, cells outside 0.3–0.7 |
|---|---|---|---|
| symmetric int8 | 400 | 0.455 – 0.545 | 0 – 1, 57021 of 65536 |
| asymmetric int8 | 400 | 0.448 – 0.552 | 0 – 1, 57978 of 65536 |
| float32 | 500 | 0.462 – 0.538 | 0 – 1, 35977 of 65536 |

Without the scheme each cell sees only four or five distinct bits per
inference, repeated 100 times — the small-K situation described above — and
the bias of each format's bit positions shows up directly. With it, every
sampled cell stays within 0.5 ± 0.055, although the generator itself gives
70 % ones.

### Running

With Verilator 5 (`--timing` is needed by the testbenches' delays), from the
directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/dnn_life_pkg.sv \
    tb/tb_dnn_life_accel.sv --top-module tb_dnn_life_accel -Mdir obj_top
./obj_top/Vtb_dnn_life_accel +verilator+rand+reset+2
```

Any other testbench runs the same way with its own name. The package must be
listed first; `-y rtl` finds the modules by name. The full-size test builds in
about ten seconds and runs in well under a second.

## Files

* `rtl/dnn_life_pkg.sv` — sizes, `op_e`, `cmd_t`
* `rtl/dnn_life_accel.sv` — top
* `rtl/wde.sv`, `rtl/rdd.sv`, `rtl/aging_controller.sv`, `rtl/trbg.sv` — aging mitigation
* `rtl/weight_buffer.sv`, `rtl/activation_buffer.sv` — on-chip memories
* `rtl/processing_element.sv`, `rtl/processing_array.sv`, `rtl/accumulation_unit.sv` — datapath
* `rtl/control_unit.sv`, `rtl/stream_fifo.sv` — control and streams
* `tb/tb_*.sv` — testbenches, one per module plus the workload test
