# Low-power coded DNN inference engine

Quantised neural networks move 8-bit weights and activations between memories, wires and
multipliers. These numbers are far from random. Weights cluster around zero, and after pruning most
of them are exactly zero. ReLU activations quantised to int8 sit at the zero point -128 (0x80)
about half of the time. In plain two's complement this structure is hidden. A weight of -1 is 0xFF,
so weight streams look random bit by bit, with a 1-bit probability and a toggle rate near 0.5.

This engine changes only the *representation* of each number, never its value. It uses codes that
cost no extra bits and at most one gate level:

* **Sign-magnitude weights.** Symmetric quantisation keeps weights in [-127, 127], so the
  magnitude needs only 7 bits. Small weights of either sign then have mostly-zero upper bits.
* **XOR-ZP activations.** XORing an activation with its zero point 0x80 gives `u = q + 128` as
  uint8. The common ReLU value becomes 0x00.
* **Polarity.** Single-ended reads of dual-ported SRAM spend energy on 0-bits. So by default the
  memories hold the bitwise complement of these codes, and the frequent value is stored as all ones.
* **XOR decorrelator on wires.** `y = y_prev ^ x` turns "bit is 1" into "wire toggles". With the
  complemented memory code the XNOR form is used, so "bit is 0" toggles instead. Either way, a run
  of pruned weights or zero-point activations leaves the wires still.

The arithmetic never goes back to int8. The multiplier takes the uint8 activation and the uint7
magnitude directly, and the weight sign is applied inside the adder tree. This multiplier is
smaller than an 8x8 signed one.

The RTL builds a complete small engine around these codes:

```
                 sys_req / sys_rsp  (bus code, from the SoC's system interconnect)
                        |
              [correlator | decorrelator]            recoder
                        |
                 unified_memory  (memory code, 4096 x 64 bit)
                        |
              [correlator | decorrelator]            recoder
                        |
              cluster_interconnect  (bus code, 64-bit, block transfers)
           /            |             \
      pe_tile 0     pe_tile 1  ...  pe_tile N_PE-1
        [corr|decorr]  [corr|decorr]                 recoder per TCM
        W TCM           A TCM       (memory code, 1024 x 64 bit each)
        sm_weight_decoder  act_zp_codec              PE-side coders
                    pe  (ipu + requantizer + sequencer)
```

## Three representations of one number

Every word is 64 bits, made of eight byte lanes. Each lane is one weight or activation, and each
lane is coded on its own. The table uses `MEM_ONES = 1`, the default.

| place | weight `w` in [-127,127] | activation `q` (int8, ZP = -128) |
|---|---|---|
| MAC operand | sign `w<0`, magnitude `\|w\|` (uint7) | `u = q ^ 0x80 = q + 128` (uint8) |
| memory code (TCMs, unified memory) | `~{w<0, \|w\|}` | `~u = q ^ 0x7F` |
| bus code (interconnects) | XNOR decorrelation of the memory code, per bit | same |

With `MEM_ONES = 0` the complement is dropped. The memory code is then `{w<0, |w|}` and `u`, and the
wires use the XOR decorrelator. That variant minimises 1-bits instead of 0-bits.

Weights are coded offline, when the model is compiled. The engine has no weight encoder. Activations
are produced on chip, and `act_zp_codec` encodes each result byte as the PE writes it.

The 32-bit header words hold the bias and rescale factor. They are stored and transported
unchanged, apart from the bus code, which is lossless.

### Why the MAC can use uint8 activations

The layer computes `sum_j w_j * q_j + b`. Since `q_j = u_j - 128`, this equals
`sum_j w_j * u_j + (b - 128 * sum_j w_j)`. The bracket is a per-output constant known at compile
time. The compiler folds it into the bias that is loaded into the accumulator, together with the
output zero point (see the requantizer below). So the PE never decodes activations. It only
inverts the stored byte, and only when `MEM_ONES = 1`.

## The bus code and its restart rule

`xor_decorrelator` and `xor_correlator` each hold one register per bit. The decorrelator outputs
`y = y_prev ^ x`, and the correlator recovers `x = y ^ y_prev`. Each is one gate deep. In the XNOR
form, both outputs are complemented.

A point-to-point link stays in step by itself. Here, though, one decorrelator at the unified memory
feeds four tiles, one transfer at a time. Each tile's correlator sees only its own words, so the
two ends would drift apart. To prevent this, every request carries a `first` flag
(`lp_pkg::bus_req_t`). On the first word of a transfer, both ends code against the reset value
(all zeros) instead of their register. Read responses carry `first` back with a one-cycle delay.

The system port works the same way. Whatever sits on the SoC side must restart its own coder on
the words it marks `first`. `tb_lp_nn_engine` contains such a host-side coder, about ten lines long.

The pay-off can be measured. In `tb_lp_nn_engine`, the weight loads are 80 % pruned and include
their header words. They toggle about 21 k wire bits on the cluster interconnect, against about
37 k for the same data as plain int8 words. In `tb_pe_tile`, a run of zero-weight words toggles no
wire at all after the first word.

## The inner-product unit (`ipu`)

The IPU has eight lanes, one per byte of a word. Each lane does the following:

1. It multiplies the uint8 activation by the uint7 magnitude, unsigned, giving a uint15 product `p`.
2. A register stage stores the products and the eight sign bits.
3. It forms the int16 word `{s, p ^ {15{s}}}`. For `s = 1` this is `-p - 1`, the ones' complement.
4. An adder tree sums the eight int16 words, the eight sign bits and the 32-bit accumulator. The
   sign bits supply the `+1` that turns the ones' complement into `-p`.

The XOR gates are the only overhead: 8 x 15 of them. In exchange, each multiplier saves one
partial-product row.

`acc_init` reloads the accumulator with the compile-time bias. The unit accepts one word pair
(eight MACs) per cycle. A word is in the accumulator two clock edges after it is presented.

## Rescaling (`requantizer`)

The requantizer turns the 32-bit accumulator into an int8 output in three steps:

1. It multiplies the accumulator by a 32-bit rescale factor `mult`.
2. It shifts the 64-bit product right by `shift`, rounding half up: it adds `2^(shift-1)` and then
   shifts arithmetically.
3. It clamps the result to [-128, 127].

For ReLU layers the output zero point is -128, and the compiler puts it into the bias, so the clamp
at -128 *is* the ReLU. ReLU6 needs nothing extra either, as long as its upper limit is quantised to
127. Other activation functions, such as Swish, are not supported. The result is registered, one
cycle after the input.

## Running a layer

### Memory layout expected by the PE

The PE reads a block of `1 + n_words` weight-TCM words for each output `o`, starting at
`w_addr + o * (1 + n_words)`:

* word 0 is the header `{mult[31:0], bias[31:0]}`;
* words 1..n_words hold the sign-magnitude weights, eight per word, in the memory code.

All outputs of a command share the activation words `a_addr .. a_addr + n_words - 1`. This covers a
fully connected layer or a 1x1 convolution directly. Other convolutions need their inputs laid out
as im2col rows; short kernels, such as depthwise 3x3, are padded with zero weights.

Output `o` is written as one byte, through the XOR-ZP encoder, to byte address `out_addr + o` of the
activation TCM. Byte `b` is lane `b % 8` of word `b / 8`.

### Sequence of operations

Nothing inside the engine sequences a whole network. An external controller (a host CPU or a
sequencer) does the following:

1. It writes memory-code data through `sys_req` into the unified memory, as bus-code words, setting
   `first` on the first word of each burst.
2. It moves blocks into a tile with a cluster transfer: `x_dir = XFER_TO_TCM`, plus a tile, a TCM
   select, addresses and a length. A transfer moves one word per cycle. The `x_done` pulse comes
   len + 2 cycles after acceptance.
3. It starts the PE with a `pe_cmd_t`. The TCMs are dual ported, so the next tile can be loaded
   while this one computes.
4. It moves result words back with `XFER_TO_UM` and reads them over `sys_req`.

### PE timing

Each output takes `n_words + 6` cycles:

* 1 cycle to read the header;
* 1 cycle to load the accumulator;
* `n_words` cycles streaming eight MACs per cycle;
* 3 cycles to drain the pipeline and rescale;
* 1 cycle to write the result.

`done` pulses once after the last output.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `lp_nn_engine` | `N_PE` | 4 | tiles |
| | `W_DEPTH`, `A_DEPTH` | 1024, 1024 | TCM words (64 bit), i.e. 8 KiB each |
| | `UM_DEPTH` | 4096 | unified-memory words (32 KiB) |
| | `MEM_ONES` | 1 | memories hold the complemented code; XNOR recoders |
| `lp_pkg` | `LANES`, `B` | 8, 8 | MACs per IPU, bits per value |

The IPU width (eight MACs) and the 8-bit data come from the design being described. The memory
sizes, the number of tiles and `MEM_ONES` are choices made here. The TCMs were sized so that the
largest per-output working set of ResNet50 fits in one tile: a 3x3x512 convolution, 4608 weights
and 4608 activations. Larger networks run layer by layer, with weights streamed in through the
system port.

## How far to trust it, and where it departs

These parts follow the description closely:

* the coding equations (decorrelator, correlator, XOR-ZP, sign-magnitude);
* the datapath of the sign-magnitude MAC and of the adder-tree IPU;
* the placement of the coders in the memory and interconnect hierarchy;
* the integer rescale.

These are this design's own choices:

* all control: the transfer engine, PE sequencer and command formats;
* the `first` restart rule;
* the header word;
* byte-enable writes;
* the memory sizes;
* rounding half up, and the run-time `shift`. The source only says the rescale is "32-bit
  multiply, shift with rounding, saturate".

Departures and omissions:

* **Sign bit in the complemented weight code.** With `MEM_ONES = 1` the sign bit is inverted too.
  A code that left the MSB alone, as XOR-MSB coding does, would make the sign wire toggle on every
  pruned weight once the XNOR decorrelator is applied.
* **XOR-MSB weight coding is not built.** This alternative XORs the seven low bits of a two's
  complement weight with its MSB. It would need either decoding to int8 plus a signed 8x8 MAC, or
  an extra addition in the MAC. Sign-magnitude gives similar bit statistics and a cheaper MAC.
* **The other MAC variants are not built.** The int8 x int8 baseline MAC and the int8 x uint7 MAC
  (activations left uncoded) are absent.
* **Only ReLU-like clipping activations.** There is no Swish or leaky ReLU.
* **One transfer at a time.** The cluster interconnect is a single 64-bit bus with one transfer in
  flight, not a NoC.
* **Write collisions are not resolved.** If both TCM ports write one address in the same cycle,
  the result is unresolved: port B wins.
* **No energy modelling.** The arrays are plain RTL arrays. Power figures require a gate-level
  flow and SRAM macros with single-ended reads.

## What the codes do to the bit statistics

`tb_coding_statistics` passes synthetic 8-bit streams through the RTL coders, in the 1-bit-minimising
polarity, and measures bits per 8-bit word. It uses 20 000 values per stream:

* weights drawn from a Laplacian and clipped to [-127, 127];
* the same weights with 80 % set to zero;
* ReLU activations, half of them at the zero point.

Typical results:

| stream | 1-bits, plain | 1-bits, code | toggles, plain | toggles, code + decorrelator |
|---|---|---|---|---|
| weights | 3.9 | 2.8 | 4.0 | 2.8 |
| pruned weights | 0.8 | 0.6 | 1.4 | 0.6 |
| ReLU activations | 2.3 | 1.3 | 2.1 | 1.3 |

Random data would give 4 for each. The code lowers the 1-bit probability. The decorrelator then
turns that lower 1-bit count into the toggle count, and it loses the bit-probability gain: its
output is about half ones. That is why the memories keep the probability code and only the wires
carry the decorrelated one.

The results depend on the synthetic distributions. Real network parameters are not part of this
repository.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each ends by printing
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. `tb_lp_nn_engine` runs the whole
engine at its default parameters:

* a 512-input ReLU layer with 12 outputs on each of four tiles;
* 80 % pruned weights, and half the activations at the zero point.

It counts coder restarts, overlap of loading with computing, saturation in both directions and
negative weights, and fails if any of them never happened. It also compares wire toggles against
plain int8.

With Verilator 5, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/lp_pkg.sv tb/tb_lp_nn_engine.sv --top-module tb_lp_nn_engine -o sim
./obj_dir/sim
```

Replace the testbench name to run any other unit test or `tb_coding_statistics`. The end-to-end run takes a few seconds.
