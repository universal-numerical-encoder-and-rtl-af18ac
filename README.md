# APAX numerical encoder and decoder in SystemVerilog

Many programs spend most of their time waiting for data from memory, not
computing on it. If the numbers crossing the memory, disk or network interface
take fewer bits, that waiting time goes down. The APAX encoder is built for
this. It is a streaming hardware compressor for numerical data: 8-, 16- and
32-bit integers and 32- and 64-bit IEEE floats. It does not look for repeated
byte patterns. Instead it uses three properties of measured and simulated
signals:

* **Limited accuracy.** Most datasets carry far fewer meaningful bits than their
  storage type holds. The encoder scales every sample by a gain the user
  chooses. That scaling sets how much precision is kept, and it is the only lossy
  step.
* **Oversampling.** Neighbouring samples are correlated, so differences (or
  sums, for signals near half the sample rate) are smaller than the samples
  themselves.
* **Changing magnitude.** The peak of a signal is often much larger than its
  average. Coding groups of four samples with a shared exponent follows the
  magnitude as it changes.

This repository holds RTL for the encoder as described in "Universal Numerical
Encoder and Profiler Reduces Computing's Memory Wall with Software, FPGA, and
SoC Implementations" (A. Wegener, Samplify Systems), and a matching decoder.
The top level, `apax_codec`, holds one encoder (data on its way out to memory)
and one decoder (data on its way back) as two independent channels. Self-checking
testbenches, with a behavioural reference decoder, come with it. The paper
describes the encoder's blocks and what they do, and only names the decoder. It does not give bit formats,
interfaces or internals, so most of those details are this design's own
choices. Each section below says which parts come from the paper.

## The data path

```
                    +----------------+
 params (profiler)->|    control     |<------------- blk_done / blk_words
                    | framing, gain  |                      |
 in_data ---------->|     loop       |                      |
                    +----------------+                      |
                       |  samples + block config            |
          +------------+                                    |
          v            v                                    |
   +-----------+  +------------+  +-----------+  +--------+  +----------+
   |  signal   |  | attenuator |->| redundancy|->| header |->|   bit    |-> out_data
   |  monitor  |  |  x * gain  |  |  remover  |  |  gen   |  |  packer  |   out_last
   +-----------+  +------------+  +-----------+  +--------+  +----------+
        | centre-frequency class -> control
```

Samples move through a chain of stages joined by valid/ready handshakes. With
a free-flowing output the chain accepts one sample per clock. Each sample
carries its block's configuration as a sideband (type, mode, gain, frequency
class, chosen stream), so a stage never needs to know what the stages around it
are doing. The block names and their order follow the paper's encoder block
diagram.

| file | block |
|---|---|
| `rtl/apax_pkg.sv` | widths, enums, sample and config structs, `sig_bits()` |
| `rtl/apax_control.sv` | block framing, per-block parameters, gain loop |
| `rtl/apax_signal_monitor.sv` | zero-crossing centre-frequency estimate |
| `rtl/apax_attenuator.sv` | sample x gain, int/float to fixed point |
| `rtl/apax_redundancy_remover.sv` | derivative streams, best-stream choice |
| `rtl/apax_header_gen.sv` | 4-byte / 6-byte block header |
| `rtl/apax_bit_packer.sv` | block floating point, joint exponent tokens, word packing |
| `rtl/apax_encoder.sv` | encoder: the chain above |
| `rtl/apax_bit_unpacker.sv` | decoder: header, tokens, mantissas, padding |
| `rtl/apax_inverse_remover.sv` | decoder: undoes the chosen derivative |
| `rtl/apax_inverse_attenuator.sv` | decoder: divides by the gain, restores the type |
| `rtl/apax_decoder.sv` | decoder: the three stages in a chain |
| `rtl/apax_codec.sv` | top level: encoder and decoder side by side |

## Blocks and the one-block delay

The encoder works on blocks of `blk_size` samples. The paper allows any
multiple of 4 from 64 to 16384, and the size can change from one block to the
next. Each encoded block can be decoded on its own. The filter history is
cleared at every block start, and the first exponent of a block is always sent
in full.

Two decisions about a block are made from the block *before* it. The paper asks
for this for the stream choice: the best stream found for block j is recorded
in the header of block j+1. The design applies the same rule to the centre
frequency class. So the hardware never buffers a whole block. It measures block
j while it passes, and encodes block j+1 with what it learned. The first block
after reset uses the raw samples and the "low frequency" class.

## From integers and floats to one integer datapath: the attenuator

The gain is `g = gain_m / 2^15 * 2^gain_e`. `gain_m` is a 16-bit mantissa and
`gain_e` a 16-bit signed exponent. The attenuator splits each sample into sign
and magnitude:

* **Integers:** the magnitude is `|x|` and the shift is `gain_e - 15`.
* **Floats:** the magnitude is the significand with its hidden bit. The float's
  own exponent is added to the shift. This is how floats of any exponent enter
  an integer datapath.

The magnitude is multiplied by `gain_m`, then shifted. The result is rounded to
nearest, with ties away from zero, so the error is symmetric about zero. It is
then saturated to ±(2^28−1): the datapath is `ATT_W` = 29 bits wide. Infinities
and NaNs saturate. The paper gives only the function, a multiply by a
floating-point value that can change from block to block. The number formats
and the rounding are this design's own.

`ATT_W` is 29 so that the second derivative (31 bits) still has an exponent of
at most 31. That is the largest exponent the 8-bit absolute token can carry
(see below). A 32-bit integer is therefore clipped unless the gain is below
about 1/8. At the ratios of 3:1 and more that the encoder targets, that much
attenuation is normal.

## Finding the cheapest stream: the redundancy remover

From the attenuated samples x, three streams are formed:

```
s0[n] = x[n]
s1[n] = x[n] + sg*x[n-d]
s2[n] = s1[n] + sg*s1[n-d]
```

The values of `(sg, d)` come from the centre-frequency class that the signal
monitor found:

| class | when | filter | removes |
|---|---|---|---|
| `FC_LOW` | under fs/8 | x[n] − x[n−1] | slow, oversampled signals |
| `FC_QUARTER` | fs/8 … 3fs/8 | x[n] + x[n−2] | a tone near fs/4 |
| `FC_HIGH` | over 3fs/8 | x[n] + x[n−1] | a tone near fs/2 |

For each stream the remover adds up what block floating point would spend on
it: 4 × the group exponent, summed over all groups of 4. At the end of the block
it picks the smallest total (ties go to the lower index). The next block is
encoded with that stream. The paper says filtered versions are compared by the
bits they need. The choice of filters and the cost measure are this design's
own.

The signal monitor estimates the centre frequency from zero crossings. A tone
at f crosses zero about 2f/fs times per sample, so C sign changes in N samples
put the centre near C/(2N)·fs. The sign is the top bit of the sample's type,
which works for integers and floats alike.

## Block floating point with joint exponent tokens: the bit packer

This block has the most to understand, and the paper gives the most detail
about it.

**Groups.** Samples of the chosen stream are taken four at a time. The group
exponent `e` is the number of two's-complement bits that the largest member
needs: 0 for an all-zero group, 1 for {0, −1}, and so on. Each of the four
samples is then sent as its low `e` bits.

**Exponent tokens.** Neighbouring exponents are close, so the packer sends how
each exponent differs from the one before. The first group of a block is the
exception. The paper gives the token sizes and counts; the code values are this
design's own:

| token | bits | codes | when |
|---|---|---|---|
| absolute | 8 | first nibble `111e4` (14 or 15), second nibble `e[3:0]` | first group of a block, or a difference outside ±2 |
| pair | 4 | 0 … 8 = 3·(d+1) + (dn+1) | this group's difference d **and** the next group's dn both in −1…+1 |
| single | 4 | 9 … 13 = 9 + (d+2) | d in −2…+2 but no pair possible |

After a pair token, the next group carries no token of its own. Pairing is
greedy. For a group that has no token yet, the packer looks one group ahead.
If both differences are small, it sends a pair token. Otherwise it sends a
single or absolute token. A group that ends its block never starts a pair.

Example: exponents 12, 12, 13, 11, 11, 20 in one block produce

```
group 0: absolute 12          (first of block)
group 1: pair, d=0, dn=+1     code 3*1+2 = 5
group 2: (covered by the pair)
group 3: single, d=-2         code 9+0 = 9   (d=-2 cannot be paired)
group 4: pair? d=0, dn=+9 no; single d=0     code 11
group 5: absolute 20          (d=+9)
```

**Bit order.** Fields are placed least significant bit first into a 160-bit
accumulator, in this order: the header at the start of a block, then each
group's token, then its four mantissas. Full 32-bit words leave from the bottom
of the accumulator. After the last sample of a block, the fill level is rounded
up to a whole word, so every block starts on a word boundary. `out_last` marks
the block's final word. One clock later, `blk_done` and `blk_words` report the
block's size to the control block.

**Flow control.** The packer appends one item per clock: one sample's mantissa,
with a token and header in front of it when due (at most 87 bits). It appends
only while the accumulator has room, so a stalled output stalls the input. A
4-entry group FIFO separates the grouper from the emitter. This gives the
emitter its one group of lookahead.

## The encoded block

Each block is a header followed by the token-and-mantissa data. The paper fixes
the header size: 4 bytes for integers, 6 bytes for floats. The layout below is
this design's own, listed bit 0 first:

| bits | field |
|---|---|
| 1:0 | stream (0 = x, 1 = first, 2 = second derivative) |
| 3:2 | centre-frequency class (sets `sg`, `d` of the inverse filter) |
| 6:4 | data type: 0 int8, 1 int16, 2 int32, 3 float32, 4 float64 |
| 7 | mode: 0 fixed gain, 1 fixed rate |
| 23:8 | gain mantissa |
| 31:24 | gain exponent, bits 7:0 |
| 39:32 | gain exponent, bits 15:8 (floats only) |
| 47:40 | zero (floats only) |

To decode a block:

1. Read the header.
2. Read the tokens and mantissas for `blk_size/4` groups.
3. Sign-extend each mantissa.
4. Undo the filter with `x[n] = s1[n] − sg·x[n−d]`, applied once or twice.
5. Divide by the gain.

`apax_decoder` does this in hardware (next section). The function
`decode_block` in `tb/tb_apax_ref_pkg.sv` does it in plain code and is the
reference for the format. The block size is not stored in the header. The
decoder must be told it (`rd_blk_size`), just as it knows the parameters the
stream was written with.

## The decoder

The decoder is this design's own. The paper only says that data is decoded
when it is read back and that hardware decoders exist. It is the encoder run
backwards, in three stages with valid/ready between them:

* **Bit unpacker.** Words enter a 160-bit accumulator. A parser reads the
  header (32 or 48 bits, by the type field), then for each group its token
  (none if the previous pair token already covered it) and four mantissas of
  `e` bits, which it sign-extends. With the block's last sample it also drops
  the padding up to the next word. One sample leaves per clock when enough
  bits are buffered; reading a header costs one clock per block. A first
  token that is not absolute, or an exponent outside 0…31, sets the sticky
  `err`.
* **Inverse remover.** Two integrators undo the derivatives:
  `y[n] = s[n] − sg·y[n−d]`, then `x[n] = y[n] − sg·x[n−d]`, with the history
  cleared at each block start.
* **Inverse attenuator.** It multiplies by `R = floor(2^47 / gain_m)` and shifts
  by `32 + gain_e`. For a power-of-two mantissa, such as gain 1.0, this is an
  exact division. Integers are rounded to nearest and saturated to their type.
  Floats are rebuilt as IEEE values with a truncated significand; values below
  the smallest normal become zero. `R` comes from a combinational divider,
  registered with the sample; since it is constant over a block, a sequential
  divider would be a cheaper choice.

What comes back is the attenuated value divided by the gain: a 29-bit-accurate
copy of the input at the chosen gain, not the original bits. Integers at gain
1.0 come back exactly unless they saturated. The decoder's latency is about 4
clocks plus the time to buffer a sample's bits.

## The gain loop (fixed-rate mode)

The profiler is the paper's software tool that recommends encoding
parameters. It supplies `params` (`enc_params_t`):

* data type
* mode
* block size
* gain
* `target_words`: the wanted size of an encoded block, in 32-bit words

The control block samples these on the first sample of every block.

* **Fixed gain:** the gain is used as given.
* **Fixed rate:** on each block start the control block looks at the newest size
  report. If it arrived since the last step, it compares it with the target:
  - larger than the target: the gain mantissa loses 1/16 of itself;
  - smaller: it gains 1/16;
  - equal: no change.

  The mantissa is then moved back into [0.5, 1) by adjusting the exponent. On
  entering the mode, the loop starts from the profiler's gain.

Because a block leaves the packer a few clocks after its last sample entered,
the size of block j steers block j+2. Each step is about ±0.5 dB, so the loop
approaches its target slowly (in the testbench, over some tens of blocks) and
then moves up and down around it. The paper says the loop converges to a target
packet size *or a correlation target*. Only the packet-size target is built.

## Interfaces and timing

* **Clock and reset:** one clock; asynchronous, active-low reset `rst_n`.
* **Input:** `in_data[63:0]` with `in_valid`/`in_ready`. Narrow types use the
  low bits; a float32 uses bits 31:0.
* **Output:** `out_data[OUT_W-1:0]` with `out_valid`/`out_ready`, and
  `out_last` on each block's final word.
* **Decoder (read path):** `rd_in_data[OUT_W-1:0]` with
  `rd_in_valid`/`rd_in_ready`; `rd_out_smp` (`dec_smp_t`: 64-bit data in the
  block's type, `first`, `last`, `dtype`) with `rd_out_valid`/`rd_out_ready`;
  `rd_blk_size`, sampled as each header is read, so change it only between
  streams; sticky `rd_err`.
* **Status:** `blk_done`/`blk_words`, `mon_fc`/`mon_xings`/`mon_done`,
  `dec_valid`/`dec_sel`, `tok_valid`/`tok_kind` and `adj_up`/`adj_dn` are
  outputs for monitoring.
* **Throughput:** one sample per clock, as long as the output is ready and the
  encoded data fits in `OUT_W` bits per clock. A block of noise-like full-scale
  data can need more than 32 bits per sample; the input then stalls.
* **Latency:** about 7 clocks from a group's last input sample to its first
  output bits.

The paper quotes 1.5 GB/s for one SoC instance, with no clock frequency. At one
sample per clock, that is 1.5 GB/s at 188 MHz for doubles or at 375 MHz for
32-bit data. The paper states that hardware throughput does not depend on the
data type. Here the *sample* rate is fixed, so the byte rate grows with the
type width.

Parameters: `OUT_W` (top and packer, 32); `ACC_W` (160) and `FIFO_D` (4) in the
packer. The widths in `apax_pkg` (`ATT_W`, `GM_W`, `GE_W`, `BLK_W`) are package
constants. Changing `ATT_W` beyond 29 breaks the 5-bit exponent limit of the
absolute token.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. They use the shared reference package
`tb/tb_apax_ref_pkg.sv`, which holds:

* the attenuation model, in `real` arithmetic;
* the stream and cost models;
* the decoder;
* helpers that compare a decoded sample with the expected value.

Example with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl -y tb rtl/apax_pkg.sv tb/tb_apax_ref_pkg.sv tb/tb_apax_codec.sv \
  --top-module tb_apax_codec
./obj_dir/Vtb_apax_codec
```

`tb_apax_codec` runs the top level at its default parameters, with the
encoder's words looped back into the decoder. It checks every encoded block
with the reference decoder and every sample that comes out of the RTL
decoder (22,400 in all). `tb_apax_encoder` runs the same encoder checks
without the decoder. They cover:

* all five data types and both header sizes;
* every frequency class, stream and token kind;
* attenuator saturation;
* fixed-gain and fixed-rate modes, with the gain loop stepping both ways;
* random output stalls that reach the input;
* one 16384-sample block;
* random stalls at the decoder output;
* a throughput check: the encoder takes 1024 samples (four blocks) in at most
  1028 clocks, and the decoder returns them in at most 1040 (1036 measured:
  a clock per header and a short wait for each block's last, padded word).

They count each of these and fail if any never happened. Each takes a few
seconds.

The unit testbenches check the following against independent models:

* attenuator: rounding and saturation;
* signal monitor: crossing counts and classes;
* redundancy remover: streams and decisions;
* header generator: header bits;
* bit packer: decoded round trip and token statistics;
* control block: framing and each step of the gain loop;
* decoder: every sample against the reference decoder, over all types,
  streams and classes, plus a malformed block that must raise `err`.

## Departures from the paper and limits

* **Built from function only.** For the signal monitor, redundancy remover, header generator
  and control block, the paper gives only what each block does. The insides here
  are the simplest designs that do it. The bit formats (token codes, header
  layout, bit order, padding) are this design's own, so a stream from this RTL
  will not decode with the original product.
* **Group size.** The paper mentions groups of "4 or 8" samples and then fixes
  N = 4. This design uses 4.
* **Signal monitor.** It estimates only the centre frequency. The paper also mentions
  an SNR estimate, without a method or a use, so none is built.
* **Gain loop.** Only the packet-size target is built; the correlation target
  is not. A correlation target needs decoding and a correlation estimate inside
  the loop, which the paper does not describe.
* **Decoder.** The paper mentions a hardware decoder (about 3,500 LUTs on the
  FPGA) but does not describe it. The decoder here is this design's inverse of
  its own encoder; its size has not been compared with that figure.
* **Profiler.** The profiler is software. Its recommendations enter as `params`.
* **Compression ratios.** The paper reports ratios from 2:1 to 10.7:1 on 25
  datasets. Those depend on the original bit formats and on data that is not
  available, so they are not reproduced here. Every data type in those datasets
  is supported. Because the encoder streams, dataset size places no limit on it.
