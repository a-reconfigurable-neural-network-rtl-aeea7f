# Reconfigurable autoencoder front-end for calorimeter trigger data

A silicon sensor module of a high-granularity calorimeter delivers 48 trigger-cell
charges every bunch crossing (40 MHz). The links leaving the front-end chip cannot carry
all of them, so the data must be compressed on the detector, in a radiation environment,
within two bunch crossings. This design does the compression with the encoder half of a
small neural-network autoencoder: the module image is normalized to its total energy and
the *shape* of the energy pattern is squeezed into 16 latent values of at most 9 bits
each. The network architecture is fixed in silicon, but all 2,288 weights and biases sit in
writable registers, so a different compression can be loaded for each detector region or
for changed running conditions without changing the chip.

The RTL follows the architecture of the ASIC block described in *A reconfigurable neural
network ASIC for detector front-end data compression at the HL-LHC* (Di Guglielmo et al.).
That publication gives the network shape, the bit budgets, the latency and the
radiation-hardening scheme; it does not give bit-level number formats, the parameter
memory map or the control interfaces. Those are filled in here and listed in
[Departures and choices](#departures-and-choices-made-in-this-rtl).

## Data path at a glance

```
                  clock 1                  clock 2
 tc_i[48] x 22b  +-----------+  48 x 8b  +-----------------------------+  16 x 9b
 --------------->| converter |---------->| encoder                     |-----------+
                 | sum, /sum |           | conv2d_layer -> dense_layer |           |
                 +-----------+           +-----------------------------+           v
                       | sum (28b)              ^ 13,728 parameter bits   +-------------------+
                       +--> tmr_reg --> sum_o   |                         | output_truncation |--> payload_o
                                                |                         +-------------------+   (48..144b)
 i2c_clk, byte port (x3) -----------> i2c_param_regs (x3, voted)              ^ width_i[16]
```

* One module enters per clock (initiation interval 1); its result leaves exactly two
  clocks later (50 ns at 40 MHz). `valid_i` travels with the data to `valid_o`.
* Everything in the datapath is fully parallel: 4,448 multiply-accumulates per inference,
  no sharing, no state machine.
* The parameter store runs on its own peripheral clock and is written one byte per clock.

## Normalization (`converter`)

The converter adds the 48 charges (22-bit unsigned, the sum needs 28 bits) and divides
each charge by the sum:

    norm = min(255, floor(256 * tc / sum)),   norm = 0 for all cells if sum = 0

so `norm` is the cell's fraction of the module energy with 8 fraction bits. Cells below
1/256 of the module energy become zero. The quotient can never exceed 256 (a cell is
never larger than the sum), so each cell uses a 9-step restoring divider, and the single
case `tc == sum` is clipped to 255. The sum is kept and delivered with the payload
(`sum_o`, aligned to the same crossing), so the back end can restore absolute energies.

The 48 inputs are taken as three 4x4 arrays: cell `ch*16 + row*4 + col` is channel `ch`,
row `row`, column `col`. How the hexagonal sensor cells are wired onto these arrays is
decided upstream.

## The encoder network (`encoder`, `conv2d_layer`, `dense_layer`)

```
 (3,4,4) x 8b --Conv2D 8 x (3x3x3), same padding, +bias, ReLU--> (8,4,4) x 6b
             --flatten (f,row,col)--> 128 x 6b
             --Dense 128x16, +bias, ReLU--> 16 x 9b
```

**Convolution.** Eight kernels of 3x3 taps by 3 channels slide over the 4x4 arrays with
stride 1. The border is zero-padded, so every filter produces a full 4x4 map; taps that
fall off the array are simply omitted. On a 4x4 array a 3x3 window keeps 4 taps at the
corners, 6 on the edges and 9 inside, 100 per channel, so the layer costs
3 x 100 x 8 = 2,400 multiply-accumulates. **Dense layer.** The 128 activations are
flattened in (filter, row, column) order and multiplied by a 128x16 matrix: 2,048
multiply-accumulates. Both layers end in a ReLU.

**Number formats.** This is the least obvious part of the design. Every weight and bias is
a 6-bit two's-complement number. The binary points chosen here are:

| quantity | width | format | range |
|---|---|---|---|
| normalized input | 8 | unsigned, 8 fraction bits | [0, 1) |
| weight, bias | 6 | signed, 5 fraction bits | [-1, 1) |
| conv product / sum | 15 / 24 | 13 fraction bits | |
| conv activation | 6 | unsigned, 5 fraction bits | [0, 2) |
| dense product / sum | 13 / 24 | 10 fraction bits | |
| encoder output | 9 | unsigned, 5 fraction bits | [0, 16) |

Biases are shifted up to the format of the products before they are added. After the
ReLU, results are truncated toward zero (right shift) and saturated to the top of their
range. The conv activation range is chosen to be just large enough: the normalized inputs
sum to at most 1 and every weight and bias is below 1 in magnitude, so a conv output is
always below 2 and the activation never saturates. The dense output can saturate at 511
(15.97), and does for strongly correlated weights. The fraction-bit positions are
parameters of `conv2d_layer` and `dense_layer` (`*_FRAC_P`) with defaults in `ae_pkg`; a
network trained with other binary points only needs different values there.

The encoder registers its 16 outputs (one clock), so the whole conv-dense chain is one
combinational stage between the converter register and the encoder register.

## Parameter memory and loading (`i2c_param_regs`)

The 13,728 parameter bits form one vector, written as 1,716 bytes; byte `k` holds bits
`[8k+7:8k]`. Inside the vector the four sections follow one another, each parameter
6 bits wide, LSB first:

| section | entries | index of entry | bits |
|---|---|---|---|
| conv weights | 216 | `f*27 + ch*9 + kr*3 + kc` | 0 .. 1,295 |
| conv biases | 8 | `f` | 1,296 .. 1,343 |
| dense weights | 2,048 | `i*16 + o` (input `i`, output `o`) | 1,344 .. 13,631 |
| dense biases | 16 | `o` | 13,632 .. 13,727 |

A write is `i2c_wr_en` high with `i2c_addr` (0..1,715) and `i2c_data` on a rising
`i2c_clk` edge, on each of the three copies of the port (see below); addresses above 1,715 are ignored. A full load takes 1,716 clocks, under
50 us for a clock faster than 34.3 MHz. The serial I2C protocol layer that would drive
this byte port (device address, framing) is not part of the RTL.

Parameters are quasi-static. The two clock domains are not synchronized, so results
computed while a load is in progress use a mix of old and new parameters and should be
discarded.

## Radiation hardening: two kinds of triple modular redundancy

**Datapath registers (`tmr_reg`).** Each pipeline register (normalized image, module sum,
encoder outputs, valid bits) exists three times. All three copies load the same value and
a bitwise 2-of-3 voter (`tmr_voter`) drives the output. An upset in one copy is hidden by
the voter and is overwritten at the next clock edge by fresh data, so no feedback is
needed.

**Parameter registers (`i2c_param_regs`).** Parameters are written once and must then
survive for a long time, so upsets must not pile up. The whole module is built three
times (copies A, B, C), each with its own clock, write inputs and next-state logic. The
next-state logic of a copy computes, for each byte, "new byte if addressed, else my
current value". Each copy's register is loaded from a voter that sees the next-state
values of *all three* copies. A flipped bit in copy B is therefore outvoted by A and C at
B's next clock edge and repaired. This only works while the peripheral clock runs: keep
`i2c_clk` toggling, even when nothing is written. The datapath uses the bitwise majority
of the three copies (`params_o`).

Because the input logic is triplicated too, `ae_top` has three copies of the byte port and
of `i2c_clk` (index 0, 1, 2 for copies A, B, C). A wrong byte on one copy of the port is
outvoted before it reaches any register, just like an upset in a register. The triplicated
serial engine that drives the three ports is not included. Without one, tie the three
copies together outside the block; a clock skew between them of a small fraction of the
clock period is harmless.

## Payload truncation (`output_truncation`)

The 16 encoder outputs are 9 bits wide, 144 bits in all. Sensors with fewer output links
send fewer bits. For each output, `width_i[o]` (0..9) says how many of its *most
significant* bits to keep. The kept fields are packed back to back from payload bit 0 in
output order, and `nbits_o` gives the total. Width 0 drops an output. Codes above 9 are
treated as 9.

| bits per output | payload |
|---|---|
| 9 | 144 |
| 7 | 112 |
| 5 | 80 |
| 4 | 64 |
| 3 | 48 |

Mixed widths and fewer than 16 outputs are equally possible. The truncation stage is
combinational after the encoder register, so it does not add latency. Change `width_i`
only between runs, or accept that the result being output at that clock is packed with
the new widths.

## Top-level interface (`ae_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | bunch-crossing clock; synchronous active-low reset (all registers, both domains) |
| `valid_i` | in | 1 | a module is present on `tc_i` |
| `tc_i` | in | 48 x 22 | trigger-cell charges, cell `ch*16+row*4+col` |
| `width_i` | in | 16 x 4 | kept bits per output, 0..9 |
| `i2c_clk`, `i2c_wr_en`, `i2c_addr`, `i2c_data` | in | 3, 3, 3 x 11, 3 x 8 | parameter byte port, one copy per register copy |
| `valid_o` | out | 1 | `valid_i` of two clocks earlier |
| `payload_o`, `nbits_o` | out | 144, 8 | packed latent payload and its length |
| `sum_o` | out | 28 | module sum of the same crossing |
| `latent_o` | out | 16 x 9 | untruncated encoder outputs |

Reset clears the parameters to zero. With zero parameters every output is zero until a
parameter set has been loaded.

## Departures and choices made in this RTL

Taken from the published design: the block structure (converter, encoder, I2C peripheral);
48 22-bit inputs and 8-bit normalized values; the 3x4x4 input geometry, eight 3x3x3
kernels, the 128x16 dense layer and both ReLUs; 6-bit parameters, 6-bit activations and
9-bit outputs; 13,728 parameter bits loaded in 1,716 byte writes; the two-clock latency at
one input per clock; the 48..144-bit truncation range; simple TMR on the datapath and
full triplication with voted feedback on the parameter store; registers, not SRAM, for
the weights.

Chosen here because the publication does not specify them:

* All binary-point positions, truncation toward zero and saturation (see the table above).
* Zero padding and stride 1 in the convolution. The publication states neither, but its
  count of 2,400 conv multiply-accumulates only works out with them.
* Ordering of the weights within each section, the section order, the byte mapping and the
  byte-address write port.
* Normalization by floor division with the 255 clip; all-zero output for an empty module.
* The `valid` flag, the synchronous reset to zero, the `width_i` configuration port (the
  truncation configuration is not among the 13,728 parameter bits), LSB-first packing, and
  keeping the most significant bits when truncating.
* The module sum, not the maximum cell, is sent as the normalization word. The publication
  says both: its text uses the sum and its overview drawing labels the word "cell max".
* For the truncation modes the publication lists 48, 80, 112 and 144 bits "from 3, 4, 7,
  9-bit outputs". 4 bits give 64, not 80. Free per-output widths cover both readings.
* The input bus is 48 x 22 = 1,056 bits. One drawing in the publication labels it 1,052.
* The publication's closing summary speaks of roughly 225,000 multiply-accumulates per
  inference. The layer shapes give 4,448, which is what is built.

Not part of this RTL: the serial I2C protocol engine; the 7-bit floating-point to 22-bit
expansion that precedes the block in the host chip (its format is not given); clock
gating (process cells, applied at the chip level); the alternative pipelines with
initiation interval 2, 4 or 8 that were only evaluated; physical design (radiation-aware
cell choice, floor plan).

Fixed by the architecture: each of the 16 outputs carries at most 9 bits (at most 144 in
all), and weights are 6 bits. Network variants that need 10-bit outputs (160-bit
payloads), or fewer outputs with wider weights, cannot be loaded.

## Verification

Every block has a self-checking testbench in `tb/`. Expected values come from
`tb/ae_ref_pkg.sv`, an integer model written from the mathematical definitions. It uses
plain division instead of shifts, explicit boundary tests instead of padding logic, and
its own parameter packer. Each testbench prints `TB_RESULT checks=N failures=M` and has
a watchdog.

| testbench | what it establishes |
|---|---|
| `tmr_reg_tb` | one-clock latency, hold, reset; an upset in any single copy is masked and overwritten |
| `converter_tb` | sum and all 48 quotients for dense, sparse, single-cell (clip to 255), empty and full-scale modules; one-clock latency at one module per clock |
| `conv2d_layer_tb` | 128 activations for random images and kernels, a single hot cell in each corner and the middle (padding edges), saturation and ReLU extremes |
| `dense_layer_tb` | 16 outputs for random data, one-hot inputs selecting single weight rows, saturation and clamping |
| `encoder_tb` | conv-dense chain at one image per clock with parameters changing, one-clock latency |
| `output_truncation_tb` | the 3/4/5/7/9-bit modes with exact payload lengths; random mixed widths including dropped outputs |
| `i2c_param_regs_tb` | a full load in exactly 1,716 clocks; random byte rewrites; ignored out-of-range addresses; six single-bit upsets, one copy at a time, masked on the output and repaired within one clock |
| `ae_top_tb` | full-size design: two parameter loads (reconfiguration) over three skewed port copies, one with a corrupted byte, about 270 modules checked bit-exactly two clocks after entry, every truncation mode, input gaps, empty and single-cell modules, output saturation, ReLU clamping, a parameter upset that is repaired, a datapath upset that is masked |

The top-level test runs the design at its real size in about a second. To run any
testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module ae_top_tb \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/ae_pkg.sv tb/ae_ref_pkg.sv tb/ae_top_tb.sv
./obj_dir/Vae_top_tb
```

Replace `ae_top_tb` with any other testbench name. The upset tests use `force`/`release`
on internal registers (`g_copy[g].q_g` in the parameter store, `r_a`/`r_b`/`r_c` in
`tmr_reg`). If you rename those registers, update the testbenches too.

## Changing the design

* Number formats: the `*_FRAC` constants in `ae_pkg` (or the `*_FRAC_P` parameters of the
  two layers). Update the divisors in `ae_ref_pkg` to match.
* Parameter layout: the `*_OFS` constants in `ae_pkg` and `pack_params` in `ae_ref_pkg`.
* Layer shapes are package constants. The parameter vector size (`PARAM_BITS`) must be
  changed with them. The conv index arithmetic assumes 4x4 arrays.
