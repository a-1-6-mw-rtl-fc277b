# A sparse 8-PE accelerator for time-domain speech separation

Separating the voices in a recording with a time-domain network
(encoder, separator of dilated convolution blocks, decoder) takes about a
billion multiply-accumulates per second of 16 kHz audio, even after the
network has been pruned. Many of those operations are wasted. After ReLU,
most activations are zero. Dilated kernels are mostly inserted zeros. A
transposed convolution's input is mostly inserted zeros.

This accelerator avoids the waste with three mechanisms:

- **A small shifted 8-bit float format.** One sign bit, 4 exponent bits and
  3 mantissa bits, with exponent bias 15 instead of 7. The bias is moved so
  that the format's range covers the small values that trained weights and
  activations actually take.
- **Eight processing elements (PEs) fed one nonzero activation per cycle.**
  In ordinary and pointwise convolutions, each nonzero activation is
  broadcast to all eight PEs, which hold eight different filters. Zero
  activations are found on the fly as the data is read, so they never cost a
  cycle. The activation buffer needs no index memory for this.
- **Decomposition of dilated and transposed convolutions.** Instead of
  multiplying by inserted zeros, the address generators read only the
  samples and kernel taps that meet a nonzero.

The result is a very small core: five 2 KB SRAM banks (10 KB), eight FP8
multipliers, one normalisation/activation unit and a sequencer. At 150 MHz it
keeps up with 16 kHz audio.

All of it is synthesizable SystemVerilog in `rtl/`. Each block has a
self-checking testbench in `tb/`. The DMA engine and AXI bus that would feed
the core in a system are not included. The top exposes a plain 64-bit host
port where they would connect.

## Block diagram and data path

```
 host port ──► ctrl_reg ──► controller ─┬─► act_addr_ctrl ─► buffer1 (2 banks) ─┐
 (64 bit)   │                           │                    buffer2 (1 bank)   ├─► zero_skip ─► broadcast value
            ├─► weight buffer (2 banks) ◄── wgt_addr_ctrl ◄── offset index ─────┘        │
            ├─► buffer1 free bank                    │                                   ▼
            └─► bn_reg (32x64)              8 weights/word ─────────────────────► 8 x pe (FP8 mul + acc)
                                                                                          │
                      buffer1 / buffer2 ◄── out_reg (8x8 bit) ◄── norm_act (BN, ReLU/tanh, FP8) ◄┘
```

Each memory word is 64 bits and holds eight FP8 values ("lanes").

| Block | What it does |
|---|---|
| `fp8_mul` | Exact FP8 × FP8 product as a signed fixed-point number (24 fraction bits). |
| `pe` | Multiply-accumulate into a 36-bit accumulator. Its enable stands for a gated clock. |
| `zero_skip` | Eight zero comparators, a packing multiplexer, and offset/value shift registers. |
| `norm_act` | Per-channel scale and bias, ReLU or piecewise-linear tanh, then rounding back to FP8. |
| `out_reg` | Eight output bytes, filled all at once or one per result, then written as one word. |
| `bn_reg` | 32 × 64-bit register file holding the scale and bias words. |
| `sram_2p` | 256 × 64-bit bank, one read and one write port, read data held. |
| `pingpong_buf` | Two banks: the core uses one while the host fills or drains the other. |
| `act_addr_ctrl`, `wgt_addr_ctrl` | Address formulas for the four layer kinds (below). |
| `ctrl_reg` | Layer descriptor, start command, status. |
| `controller` | Loop counters, the zero-skip handshake, PE enables, dumps and write-back count. |
| `dla_top` | Wires the above into the core. |

Shared types and constants are in the package `dla_pkg`:

- the FP8 type;
- the mode and activation enums;
- the descriptor structs;
- all widths and sizes.

## Number format

An FP8 code `S EEEE MMM` has the value (-1)^S · 1.MMM · 2^(EEEE-15):

| Property | Value |
|---|---|
| Largest value | 1.875 |
| Smallest nonzero | 1.125 · 2^-15 |
| Zero | `E=0, M=0`, either sign (that code is reserved) |
| Infinity, NaN | none |

Because the exponent bias is 15, every value has magnitude below 2. That
suits normalised activations and trained weights.

**Multiplying.** With both hidden bits present, the mantissa product is
(8+Ma)(8+Mb) = 64 + 8(Ma+Mb) + Ma·Mb. The only real multiplier is
therefore a 3 × 3-bit one. The product is shifted by the exponent sum into
fixed point with 24 fraction bits. Every product whose exponent sum is at
least 12 is represented exactly. Smaller products are truncated toward zero.

**Accumulating.** Sums are kept in 36-bit fixed point. That holds 2^11 times
the largest product, so a pointwise layer over 256 channels cannot overflow.

**Back to FP8.** `norm_act` computes with 6 more fraction bits, then:

- truncates the magnitude to 3 mantissa bits;
- saturates anything of 2 or more to the largest code;
- flushes anything at or below 2^-15 to zero.

**Scale and bias.** They are FP8 values too. Each layer output y is
`gamma·x + beta` (if enabled), then the activation.

**tanh.** It is the piecewise-linear curve below, kept odd:

| \|x\| | tanh(x) |
|---|---|
| < 0.5 | x |
| < 1 | x/2 + 1/4 |
| < 2 | x/4 + 1/2 |
| otherwise | 1 |

## Zero skipping and broadcast (CONV and PW modes)

These modes are the 1-D convolution and the 1×1 (pointwise) convolution.

**Data layout.** Activations are stored time-major. Word `u·n_grp + g` holds
channels 8g…8g+7 of time step u. For the first convolution, which sees a
single channel, a word instead holds 8 consecutive samples.

**What one output is.** An output position t and filter group og (filters
8og…8og+7) form one output. Its window is `n_in` consecutive words starting
at `act_base + t·in_stride`. For word k of the window, lane i, the weight
word at this row holds the weight of input i for each of the 8 filters
(lane j = filter j):

    row = wgt_base + (og·n_in + k)·8 + i

**Pipeline.** The controller reads each activation word and hands it to
`zero_skip`:

1. Eight comparators produce the nonzero mask.
2. A multiplexer packs the (offset index, value) pairs of the nonzero lanes
   into two shift registers.
3. One pair leaves per cycle, in increasing lane order. Its offset is added
   to the row base that travelled with the word, which gives the weight
   address. The value is registered and broadcast to all PEs one cycle
   later, together with the weight word.
4. PE j multiplies by lane j of the weight word and accumulates.

**Rate.** One cycle per nonzero activation, and one cycle for a word that is
entirely zero. There is no bubble between words: `zero_skip` accepts the
next word in the cycle its last pair leaves.

The controller keeps a fetched word on offer until `zero_skip` takes it. An
SRAM read costs a cycle and its data is held, so the next read is issued
only once the current word has been accepted.

**End of an output.** The last pair of the last word of a window is flagged.
Two cycles later the PEs "dump": the accumulators hold the finished sums for
one cycle while their next product starts a new sum. If the last word is all
zero, `zero_skip` emits a marker pair with no MAC, so the window still ends.

## Decomposed dilated and transposed convolutions (DW and TCONV modes)

In these modes there is no reuse across filters to exploit. Each PE owns one
channel: PE j handles lane j of each word. One activation word and one
weight word are read per cycle. A zero activation does not save a cycle
here. It only switches off its PE, through the nonzero mask.

**Depthwise dilated (DW).** `dil` is the number of zeros inserted between
kernel taps. Output t, channel group g, tap k reads:

    activation  act_base + (t + k·(dil+1))·n_grp + g
    weight      wgt_base + k·n_grp + g

So for a 3-tap kernel with dil = 2, output 1 uses inputs 1, 4, 7 and the
compact weights w1, w2, w3. No stored zero is ever multiplied.

**Transposed (TCONV), stride s.** A transposed convolution normally inserts
s-1 zeros between inputs. Instead, each output sample n uses:

- inputs m, m+1, … with m = ceil(n/s);
- kernel taps ph, ph+s, ph+2s, … with ph = (s − n mod s) mod s.

For s = 3 and a 9-tap kernel this gives:

    o1 = a1·w1 + a2·w4 + a3·w7
    o2 = a2·w3 + a3·w6 + a4·w9
    o3 = a2·w2 + a3·w5 + a4·w8

The addresses for output sample n, tap k, channel group g are:

    activation  act_base + (m+k)·n_grp + g
    weight      wgt_base + (ph + k·s)·n_grp + g

After all taps and groups of sample n, `norm_act` adds the eight PE sums into
one result. `out_reg` collects eight consecutive samples, one byte at a time,
before writing a word.

**Rate.** One cycle per tap and group: `n_pos·n_grp·n_in` cycles for DW and
`8·n_pos·n_grp·n_in` for TCONV.

## Buffers, layers and the host port

**Memories.** Five 256 × 64-bit banks:

- in/out buffer1 (two banks, ping-pong);
- the weight buffer (two banks, ping-pong);
- in/out buffer2 (one bank).

The descriptor bits `buf1_bank` and `wbuf_bank` choose the banks the core
uses. Host writes to buffer1 or the weight buffer always go to the other
bank, so the next layer's data can be loaded while a layer runs.

**Layer fusion.** A layer may read from either in/out buffer and write to
either one. A layer's output can therefore feed the next layer without
leaving the chip.

**Host port.**

| Signal | Meaning |
|---|---|
| `host_we`, `host_wsel`, `host_waddr`, `host_wdata` | Write. `host_wsel`: 0 control register, 1 weight buffer (free bank), 2 buffer1 (free bank), 3 BN register. |
| `host_re`, `host_rsel`, `host_raddr` → `host_rdata` | Read, data one cycle later. `host_rsel`: 0 buffer1 (free bank), 1 buffer2 (only while idle). |
| `busy`, `done`, `status` | Progress. `done` pulses once at the end of a layer. |

To read a layer's result from buffer1, the host flips `buf1_bank` between
layers. Writes to the descriptor are ignored while a layer runs.

**Descriptor.** Control register address 0 is word 0, address 1 is word 1,
and address 2 bit 0 is start.

| Word | Field | Meaning |
|---|---|---|
| 0 | `mode` | 0 CONV, 1 PW, 2 DW, 3 TCONV |
| 0 | `act` | 0 none, 1 ReLU, 2 tanh |
| 0 | `src_buf2`, `dst_buf2` | source / destination is buffer2 (else buffer1) |
| 0 | `buf1_bank`, `wbuf_bank` | bank used by the core |
| 0 | `bn_en`, `bn_base` | apply scale/bias; scale of group g at `bn_base+2g`, bias at `+1` |
| 0 | `act_base`, `wgt_base`, `out_base` | first word of activations, weights, outputs |
| 1 | `n_pos` | output positions (TCONV: output words of 8 samples) |
| 1 | `n_in` | CONV/PW: words per window; DW/TCONV: taps |
| 1 | `in_stride` | CONV/PW: words between windows |
| 1 | `n_grp` | CONV/PW: filter groups; DW/TCONV: channel groups |
| 1 | `dil` | DW: zeros between taps (8 bits) |
| 1 | `tstride` | TCONV: stride s (4 bits) |

The bit positions are those of the packed structs `cfg0_t` and `cfg1_t` in
`dla_pkg`, first field at the top.

**Output addresses.** Output words are written to `out_base`, `out_base+1`,
… in loop order: positions outermost, then groups. All addresses wrap at
256.

**Layer timing.** A layer takes its MAC cycles plus a fixed pipeline
latency. The latency is 8 cycles in the broadcast modes (read, zero-skip
register, shift-out, MAC, dump, two normalisation stages, output register)
and 6 in the dense modes, which bypass the zero-skip registers. Layers do not
overlap.

## Sizing the network onto the buffers

One call processes at most what fits in one 256-word bank of each memory.
Larger layers are split into calls by the host.

**Pointwise layer, 256 input channels.** 32 words per time step, so a bank
holds 8 steps. A group of 8 filters needs 256 weight words, a whole bank.

**Dilated layers with large dilation.** The host places just the three tap
blocks side by side and sets `dil` to their spacing.

**Limits.**

- Nothing adds a partial sum from an earlier call. A transposed convolution
  whose weights need more than one bank does not fit (for example
  256 channels × 16 taps).
- The host must arrange data across calls for the CONV and PW output layout.

With the eight PEs busy in every cycle, 34.8 M MACs per 32 ms frame take
4.36 M cycles, which is 29 ms at 150 MHz.

## Verification

Every block has a testbench `tb/<block>_tb.sv` that checks against values
computed independently of the RTL. `tb/tb_ref_pkg.sv` models the number
format in real arithmetic. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

**`dla_top_tb`** runs the core at its default sizes through five layers:

- a convolution;
- a pointwise layer on the convolution's output;
- a dilated depthwise layer;
- a transposed convolution;
- a 256-channel pointwise layer that fills a whole weight bank.

While each layer runs, the next layer's data is written into the free banks.
A reference model with shadow copies of all buffers computes every output
word. Results must match exactly without scaling and tanh, and within one
FP8 code with them. The testbench also checks the cycle count of every layer
against the rates above.

It counts that each mechanism happened at least once:

- zero lanes skipped;
- all-zero words and end markers;
- fetch stalls;
- PEs gated in dense modes;
- each mode and each activation;
- host writes while busy;
- serial output;
- both routings between the buffers.

**`separator_block_tb`** runs one separator block at the network's real
channel counts, split into 193 calls: pointwise 128 → 256 channels, dilated
depthwise over 256 channels, then pointwise 256 → 128. Each call's outputs
are placed where the next layer expects them. Weights for the next call are
loaded into the free bank while the current call runs. Over all calls the
busy time is the rate bound plus exactly the pipeline latency of each call.

**`codec_layers_tb`** runs the encoder convolution with 256 filters (16-sample
kernel, 8-sample hop) in 16 calls and two weight loads. It then runs a
128-channel transposed convolution with a 16-tap kernel at stride 8, whose
kernel fills one weight bank exactly.

**`controller_tb`** runs random descriptors of every mode with the real
zero-skipping unit. It checks:

- every activation and weight address;
- every broadcast value;
- the MAC and dump counts;
- the cycle count.

**Running a testbench** with Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/dla_pkg.sv tb/tb_ref_pkg.sv tb/dla_top_tb.sv -y rtl -y tb \
      --top-module dla_top_tb -o sim && ./obj_dir/sim

Replace `dla_top_tb` with any other testbench name. Testbenches that do not
use `tb_ref_pkg` still compile with it listed.

## Where this design departs from the published chip, or fills gaps

These follow the chip as described:

- the FP8 format and its bias;
- 8 PEs and broadcast of one nonzero per cycle;
- the zero comparators, multiplexer and shift registers;
- gating of PEs in the depthwise and transposed modes;
- the decomposition formulas;
- the five 256 × 64-bit banks and the 32 × 64-bit BN register;
- the ping-pong pairs and layer fusion through two in/out buffers.

These are this design's own choices:

- **Accumulator.** Fixed point with 24 fraction bits and 36 bits in all. The
  accumulator format of the chip is not known.
- **Normalisation and tanh.** Scale and bias are stored as FP8. The tanh
  curve is piecewise linear. Rounding to FP8 truncates, saturates and
  flushes as described above.
- **Clock gating.** A PE's gated clock is modelled as a register enable.
- **System interface.** The DMA controller, wrapper and AXI bus are replaced
  by the plain host port. Layer descriptors and their encoding are invented
  here.
- **Buffer2.** It has a single bank, so the host reads it only between
  layers.
- **Timing.** All pipeline timing is this design's: 8 (or 6) cycles of latency per
  layer and no overlap between layers.
- **Transposed convolution.** It produces one output signal per call. The two
  separated signals need two calls.
- **Limits.** Dilation is at most 255 zeros and the transposed stride at most
  15.
