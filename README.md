# Origami: a low-bandwidth convolution accelerator core in SystemVerilog

Convolutional layers dominate the run time of ConvNets. Their cost in an accelerator is usually
set by external memory bandwidth, not by the multipliers. The core here is built to keep that
bandwidth low. It computes a *tile* of a convolutional layer: `NCH` input channels by `NCH`
output channels, with an `HK x WK` kernel, over a horizontal stripe of the input image.

Each cycle it receives one input word and, in steady state, sends one output word. Meanwhile it
performs `2*NCH*HK*WK` operations per cycle, because every input pixel is reused for all `NCH`
output channels at once. Only the sum over input channels leaves the chip, never the individual
2-D convolutions. With the default sizes (12-bit words, `NCH = 8`, 7x7 kernel, stripes of up to
512 rows) that is 784 operations per 12-bit word in and per word out.

The RTL follows the architecture, block sizes and clocking of the fabricated Origami chip
(UMC 65 nm, 250 MHz I/O / 500 MHz core). The published description leaves some details open:
the bus protocol, the fixed-point fraction length, overflow handling, memory ports and the
self-test algorithm. Those are filled in here and listed under "Where this RTL departs from, or
adds to, the published design" below.

## What one pass computes

For one tile, with `in[c](y, x)` the input stripe (`h` rows, `w` columns) and `k[o][c][dy][dx]`
the kernels:

```
sop(o, c, y, x) = sat12( ( sum_{dy,dx} k[o][c][dy][dx] * in[c](y+dy, x+dx) ) >>> W_FRAC )
out[o](y, x)    = sat12( sum_c sop(o, c, y, x) )           0 <= y <= h-HK, 0 <= x <= w-WK
```

Words are 12-bit two's complement. Pixels and results share one fixed-point format, and the
weights carry `W_FRAC = 8` extra fraction bits. Each inner product is truncated back to 12 bits
before the channel sum, and the channel sum is done at full precision and then truncated. For a
true (flipped) convolution, load the kernels flipped.

Layers bigger than one tile are split by the host:

- into blocks of 8 input and 8 output channels, with all-zero kernels where channels are unused;
- into stripes of at most 512 rows, overlapping by `HK-1` rows.

The host then adds the partial outputs of the input-channel blocks and applies bias, activation
and pooling. Smaller kernels are zero-padded to 7x7.

## Clocking: two domains, one source

The image window memory and the I/O pads limit the clock to `f`. The multipliers can run faster.
So the core has two domains:

- **slow (`clk_i`, f):** input register, control, image window memory, image bank, filter-bank
  registers, output mux;
- **fast (`clk_fast`, 2f):** sum-of-products (SoP) units and channel summers.

The fast clock is `clk_i XOR clk_shift_i`, where `clk_shift_i` is a copy of `clk_i` delayed by a
quarter period (`origami_clkgen`). Its rising edges fall on the rising edge of `clk_i` and half
a period later.

`phase` is 0 during the first half of each slow cycle and 1 during the second. Because of it,
each of the `NCH/2 = 4` SoP units computes two inner products per slow cycle, for output
channels `2k` and `2k+1`. Four units then do the work of eight.

Signals cross between the domains without synchronisers, because both clocks come from one
source:

- slow-domain registers hold for both fast edges of their cycle;
- the fast domain reports finished results by toggling a flag, which the slow domain samples.

## Data flow and memory organisation

```
in_data/in_valid --> input reg --> control --+--> filter bank (config mode, shift chain)
                                             |
                                             +--> image window memory (4 banks, 1R1W)
                                                        | read word (r,c), shift in new pixel,
                                                        v write back
                                                  image bank (8*7 rows of 7 pixels)
                                                        | 7x7 window of channel c
                            filter bank mux (c, phase)  v
                                        \-------> 4 x SoP (49 mult + adder tree, 4 stages)
                                                        v
                                                  4 x ChSum (2 accumulators each)
                                                        v
                                 output mux --> out_data/out_valid
```

**Input order.** The stripe is sent one column at a time, left to right. Each column is sent top
to bottom, and each row sends channels 0..7. That is `h*w*8` words.

**Image window memory** (`image_window_sram`, 8 x 512 words of 7 x 12 bits = 344 kbit). It has
one word per (row, channel), holding the last 7 pixels of that row and channel. When the pixel
of column `x` arrives, its word is read, the pixel is shifted in at the low end (the oldest pixel
falls out), and the result is written back. The same 7-pixel row goes on to the image bank.

One memory access serves both roles: it updates the window, and it supplies the row that the
kernel window needs now. This is why the memory needs one read and one write per cycle. The
4096 words are split into 4 banks of 1024 words, as on the chip, each with a read port and a
write port.

**Image bank** (`image_bank`, 8 x 7 x 7 registers). Rows arrive with the channels innermost, so
the last 56 rows form a shift chain in which every 8th row belongs to the same channel. Right
after a push, the 7x7 window of the channel just pushed lies at fixed chain taps (positions 0,
8, ..., 48). No read multiplexer is needed.

**Filter bank** (`filter_bank`, 8 x 8 x 49 = 3136 registers, 37.6 kbit). In configuration mode
it is loaded by shifting. In each half slow cycle a multiplexer picks, for each SoP unit, the
kernel for (input channel of the current window, output channel `2k + phase`). The bank is local
in practice: unit `k` only ever reads the kernels of its own two output channels.

**SoP unit** (`sop_unit`). It has 49 multipliers and an adder tree, in 4 fast pipeline stages:

1. operand register;
2. product register;
3. seven row sums;
4. total.

Then comes truncation and saturation. Latency is 4 fast cycles, and the unit accepts new
operands every fast cycle.

**Channel summer** (`chsum`). It keeps two 15-bit accumulators, one per phase, that restart at
input channel 0. After channel 7 the saturated total goes into a holding register, which keeps
it while the next pixel accumulates. Finishing the phase-1 total toggles `done_tog`.

**Output mux** (`output_mux`). When `done_tog` toggles, it copies the 8 totals and sends them in
channel order, one per slow cycle. A new pixel finishes every 8 slow cycles at most, so the
buffer never overflows; an assertion checks this.

## Timing and throughput

- **Stalls.** Input is one word per slow cycle. A cycle without `in_valid_i` freezes the whole
  pipeline: nothing in the control, memory or image bank advances. The next word carries on
  where the stream stopped.
- **Border and column change.** The first `WK-1 = 6` columns of a stripe only fill the memory.
  In every column, the first `HK-1 = 6` rows (48 cycles) only fill the image bank. After that,
  every input row yields one output pixel: 8 words back to back. A stripe therefore gives
  `(h-6)(w-6)*8` output words in `h*w*8` cycles. The border efficiency is
  `(h-6)(w-6)/(h*w)`.
- **Filter load.** A configuration burst takes `1 + 3136` cycles: the height word, then the
  weights.
- **Latency.** The last output word of a stripe appears 14 slow cycles after the last input
  word.
- **Peak rate.** 8 outputs x 49 MACs x 2 operations per 8 slow cycles, i.e. `2*8*49*f`. That is
  196 GOp/s at f = 250 MHz.

`tb_workload_refnet` runs one full-size 8x8 tile of each convolution stage of the reference
scene-labelling network. It measures:

| stage | input | border eff. (measured / published) | filter-load eff. (measured / published) |
|---|---|---|---|
| 1 | 240 x 320 (3 of 8 inputs used) | 0.957 / 0.96 | 0.995 / 0.99 |
| 2 | 117 x 157 | 0.912 / 0.91 | 0.979 / 0.98 |
| 3 | 55 x 75   | 0.820 / 0.82 | 0.913 / 0.91 |

## Pin-level protocol (`origami_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk_i`, `clk_shift_i` | in | 1 | slow clock, and its quarter-period-delayed copy |
| `rst_ni` | in | 1 | asynchronous reset, active low |
| `cfg_mode_i` | in | 1 | 1: input words are configuration |
| `in_valid_i`, `in_data_i` | in | 1 + 12 | input word stream |
| `out_valid_o`, `out_data_o` | out | 1 + 12 | output word stream |
| `clk_out_o` | out | 1 | in-phase clock output (copy of `clk_i`) |
| `bist_start_i`, `bist_done_o`, `bist_fail_o` | in/out | 1 | memory self-test |

1. Raise `cfg_mode_i`. Send the stripe height `h` (7..512) as the first valid word, then the
   3136 weights. Weight `((o*8 + c)*7 + dy)*7 + dx` is the one for output channel `o`, input
   channel `c`, kernel row `dy` and column `dx`.
2. Lower `cfg_mode_i` and send the stripe as described above. Each configuration burst starts a
   new stripe, so reload the filters, or resend them unchanged, before each stripe.
3. Output pixels arrive column by column, top to bottom, with 8 channel words each.

`bist_start_i` runs a March C- test over the whole image window memory. It takes 11 cycles per
word, about 45k cycles. While it runs it owns the memory ports. Run it while no stripe is being
sent.

## Where this RTL departs from, or adds to, the published design

- **Fixed point.** The published design gives 12-bit data, weights and results, and says results
  are truncated to the input format. The fraction length of the weights (`W_FRAC = 8`) is a
  parameter chosen here. Out-of-range values saturate; the published text says only "truncate".
- **Bus protocol.** Three choices are made here:
  - the extra bit on the 12+1 bit buses is a valid bit;
  - a separate configuration-mode pin selects configuration;
  - the stripe height is the first word of a configuration burst.

  The chip's pin count (14 inputs, 13 outputs besides clock/test) fits this, but the actual
  encoding is not published.
- **Memory.** The SRAM macros are modelled as synchronous arrays (`sram_bank`). A read port plus
  a write port per bank is assumed, and the address is `row*8 + channel`.
- **Figure numbers.** The block diagram labels the memory-to-image-bank bus `12*NCH` bits and
  the image bank 5.4 kbit. The text gives a word of `WK*12` bits and a bank of `12*NCH*HK*WK`
  bits, i.e. 4.7 kbit. The RTL follows the text.
- **Output-channel pairing.** Which output channels a SoP unit serves (`2k`, `2k+1`) and the
  weight load order are choices made here.
- **Phase flag.** The flag that tells the fast domain which half of the slow cycle it is in is a
  choice made here.
- **Self-test.** The chip has a memory self-test, but its algorithm is not published; March C- is
  used here.
- **Not included.** The items below have no RTL here:
  - the pad ring;
  - scan chains, which a tool inserts;
  - the host system: FPGA, DMA and DDR3 memory;
  - the host's summing of partial tiles, bias, ReLU and pooling.

## Files and simulation

`rtl/`:

- `origami_pkg.sv`: sizes, and the saturation helper;
- one module per file:
  - `origami_top`
  - `origami_clkgen`
  - `origami_ctrl`
  - `image_window_sram`
  - `sram_bank`
  - `image_bank`
  - `filter_bank`
  - `sop_unit`
  - `chsum`
  - `output_mux`
  - `sram_bist`

`tb/`:

- one self-checking testbench per module, `tb_<module>.sv`;
- `tb_origami_top.sv`: end to end at the default size, covering self-test, stalls, borders,
  saturation, reconfiguration and the peak output rate;
- `tb_workload_refnet.sv`: the three reference-network tiles.

Every testbench prints `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl rtl/origami_pkg.sv tb/tb_origami_top.sv \
          --top-module tb_origami_top
./obj_dir/Vtb_origami_top
```

Timing at the default size:

- `tb_origami_top` builds in about 20 s and runs in under a second;
- `tb_workload_refnet` runs in a few seconds.

The sizes are parameters of `origami_top` (`P_NCH`, `P_HK`, `P_WK`, `P_HIN_MAX`), with defaults
taken from `origami_pkg`. `P_NCH` must be even. `P_NCH * P_HIN_MAX` must be a power of two
divisible by the four memory banks.
