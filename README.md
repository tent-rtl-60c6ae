# A tapered fixed-point inference accelerator

Below 8 bits, plain fixed point fails deep networks. Its step size is the same everywhere, so it
cannot cover both the wide range and the dense cluster of small values that weights and
activations show. *Tapered fixed point* (TFX) fixes this cheaply. It keeps the binary fraction of
fixed point, but writes the integer part in signed unary, the way a posit writes its regime. Small
integers take few bits and leave more bits to the fraction. Values near zero are therefore finer
than large ones, which gives a tent-shaped density. A per-layer setting (IS) limits the unary field
and so picks where the format sits between uniform and strongly tapered. A second setting (SC)
scales the weights by a power of two.

This RTL is an inference accelerator for such networks. It has a 16x16 output-stationary systolic
array of TFX multiply-accumulate elements. Three 108 kB banked scratchpads hold filters, input maps
and output maps. A control unit sequences the work. Every element decodes its TFX operands to fixed
point and multiplies them exactly. It accumulates the sum without loss and rounds once, at the end,
back into an n-bit TFX word.

## The number format

A word TFX(n, IS, SC) has n bits, read from the most significant end:

```
 s | i i ... i | ī | f f ... f
   '-- run ---'  '-- terminating bit (absent when the run reaches IS bits)
```

* `s` is the sign. Its inverse `i = ~s` counts as the first bit of the integer run.
* The run continues while the following bits equal `i`. It ends at a bit that differs (the
  terminating bit, which is skipped) or when it has reached IS bits. The run length m is taken
  over all of them.
* The integer is `I = m - 1` for a positive word (`i = 1`) and `I = -m` for a negative one.
* The remaining bits are a binary fraction `f` in [0, 1). The value is `(I + f) * 2^SC`.

Example, TFX(8, 8, 0): `0 111 0 111`. The run is the inverted sign plus three ones, so m = 4 and
I = 3. The terminating 0 follows, and the fraction `.111` is 0.875. The value is 3.875.

Two properties matter for the hardware:

* **IS = 1 is n-bit two's complement with one integer bit**, and IS = 2 is two's complement with
  two integer bits. Larger IS trades fraction bits near the top of the range for range.
* **Words are ordered like two's complement integers.** A larger bit pattern, read as a signed
  integer, is always a larger value. Adding 1 to a word therefore moves it to the next
  representable value. The encoder uses this to round.

Range for n = 8. Near zero the step is 2^-7 for IS = 1 and 2^-6 otherwise:

| IS | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|----|---|---|---|---|---|---|---|---|
| largest | 0.992 | 1.984 | 2.969 | 3.938 | 4.875 | 5.75 | 6.5 | 7 |
| smallest | -1 | -2 | -3 | -4 | -5 | -6 | -7 | -8 |

In general the largest value is `IS - 2^-(n-IS)` and the smallest is `-IS`.

Choosing IS and SC is done offline, per layer, outside this RTL. IS is `floor(max|x|) + 1`, capped
at n, taken separately for weights and activations. For weights whose largest magnitude is below
0.5, SC is `floor(log2(max|w|)) + 1`; otherwise it is 0. The host quantizes the network's
parameters to TFX with clipping and round-to-nearest-even, and loads the words.

## Decoder (`tfx_decoder`)

The decoder turns an n-bit word into a two's complement fixed-point number. The number has
ceil(log2 n)+1 integer bits and n-1 fraction bits, ceil(log2 n)+n bits in all (11 for n = 8). It is
combinational:

1. It forms `{~s, x[n-2:1]} ^ x[n-2:0]`. This vector has a 1 wherever a bit differs from the bit
   before it, with the sign counting as its own inverse.
2. A count-leading-zeros unit (`tfx_clz`), capped at IS-1, gives z = m-1, the number of run bits
   after the sign. The cap also reports whether the run hit IS and so has no terminating bit.
3. The integer field is `z` for positive words and `~z` (= -m) for negative words, chosen by a
   multiplexer on the sign.
4. The bits after the sign are shifted left past the run, and past the terminating bit if there is
   one. What is left is the fraction, aligned to the top of the n-1-bit field.

Because the fraction field is always n-1 bits wide, `{I, f}` read as one two's complement number
equals `I + f` exactly. IS travels on a ceil(log2 n)-bit port as **IS-1**, so IS = n fits.

## Encoder (`tfx_encoder`)

The encoder does the reverse, with rounding and clipping. Its input is a value in the decoder's
format plus two bits `lo_in` that describe what lies below it: the next bit, and the OR of all lower
bits.

1. **Clip.** A value at or above `IS - 2^-(n-IS)` becomes the largest word. A value below `-IS`
   becomes the smallest word. In both cases `lo_in` is ignored.
2. **Build the word with one shift.** `k` is the integer for a positive value and its inverse for a
   negative one, that is m-1. A pattern is assembled:
   * `{~s, s, fraction, lo_in, 0...}` when the run is shorter than IS;
   * `{~s, fraction, lo_in, 0...}` when the run reaches IS and so has no terminating bit.

   An arithmetic right shift by `k` copies `~s` into the run. The terminating bit and the fraction
   then follow in place.
3. **Round to nearest, ties to even.** Below the n-1 word bits sit a guard bit and a sticky OR of
   everything else. The encoder adds `guard & (sticky | lsb)` to the whole n-bit word `{s, body}`.
   Words are ordered like integers, so a carry that ripples into the run gives the correct next
   value. This includes `-2^-k + round -> 0`. No clipped value rounds, so the largest word cannot
   overflow.

## Processing element (`tfx_pe`)

```
 a_in ──► decode(IS_a) ──────────────┐
                                     ×  ──► + ──► acc (42 b) ──► >>> 11, sat ──► encode(IS_o) ──► ReLU ──► out_q
 w_in ──► decode(IS_w) ──► ·2^SC ────┘      ▲        │
                                            └────────┘ (cleared by a_first)
```

* **Weight scaling.** SC is a signed 3-bit value from -4 to +3. The decoded weight is widened by 4
  fraction bits and 3 integer bits before the shift, so no SC loses a bit. The scaled weight is
  18 bits for n = 8.
* **Exact product and sum.** An 18 x 11-bit signed product has 29 bits and 18 fraction bits. It
  goes into an accumulator that is 13 bits wider (42 bits). That holds at least 8192 worst-case
  terms without overflow (`ACC_GUARD`). Nothing is rounded while the sum grows. This is the point
  of the output-stationary dataflow: each PE owns one output and never emits partial sums.
* **One rounding.** The accumulator is shifted right by 11 bits (n-1 plus the 4 extra weight
  fraction bits). The first shifted-out bit and the OR of the rest become `lo_in`. The result is
  saturated to the encoder's input range and encoded with IS_o. If ReLU is on, negative words
  become 0.
* **Systolic links.** The activation leaves to the right through one register, together with a
  valid bit and a first-of-sum bit. The weight leaves downward through one register. An accumulate
  happens in every cycle with `a_vld_in` set. `a_first_in` starts a new sum.
* **Drain.** `cap` loads the encoded result into `out_q`. `shift` loads `out_q` of the PE above.
  Because the result is held apart from the accumulator, a PE could start its next sum while results drain. The control unit described below does not make use of this.

## Array and dataflow (`pe_array`)

Row r of the array works on output pixel r of a tile. Column c works on filter c. Each cycle the
left edge receives one *ifmap word*, 16 activations with one per row. The top edge receives one
*filter word*, 16 weights with one per column. Edge registers delay row r by r cycles and column c
by c cycles. The k-th activation and the k-th weight therefore meet in PE (r, c) after r + c
cycles.

A word that enters at cycle t has been added into PE (r, c) by the end of cycle t + r + c. The
bottom-right PE finishes `ROWS + COLS - 1` cycles after the last word enters. After `cap`, 16 cycles
of `shift` deliver the rows bottom first: row 15, then 14, down to 0. Each cycle puts out 16 results
at the bottom edge.

## Scratchpads (`sram_buffer`, `sram_bank`)

Each of the three buffers holds 108 kB in four banks. A buffer word is 16 lanes of n bits, split 4
lanes per bank, with every bank at the same address. That makes 6912 words for n = 8; in general
the depth is `108*1024*8 / (16*n)`. Each buffer has one write port and one read port, both a full
word wide, and reads return data one cycle after the request. The filter and ifmap buffers are
filled from the memory side and read by the array. The ofmap buffer is written by the array and
read from the memory side. The banks are plain arrays that a synthesis tool maps to memories.

## Control unit and programming model (`control_unit`)

The host writes registers (word addresses, 32-bit data). Reads are combinational.

| addr | name | contents |
|------|------|----------|
| 0 | CTRL | write bit 0 = 1 to start (ignored while busy) |
| 1 | STATUS | bit 0 busy, bit 1 done (set at the end, cleared by the next start) |
| 2 | FORMAT | `[3:0]` IS_w-1, `[7:4]` IS_a-1, `[11:8]` IS_o-1, `[14:12]` SC (signed), `[15]` ReLU |
| 3 | K_LEN | terms per output (dot-product length) |
| 4 | N_TILES | number of 16x16 output tiles |
| 5 | IFM_BASE | first ifmap word |
| 6 | FLT_BASE | first filter word |
| 7 | OFM_BASE | first ofmap word |
| 8 | FLT_STEP | filter pointer advance per tile (0 = same filters for every tile) |
| 9 | CYCLES | cycles taken by the last operation |

**Data layout.** The host prepares the data in im2col form. Tile t reads ifmap words
`IFM_BASE + t*K .. + K-1`; word k holds term k of the 16 output pixels of the tile. It reads filter
words `FLT_BASE + t*FLT_STEP .. + K-1`; word k holds term k of the 16 filters. Output row r of
tile t goes to ofmap word `OFM_BASE + 16t + r`, which holds that pixel's 16 filter outputs.

**Sequence and timing.** Each tile runs through four phases:

* FEED: K cycles, one read of each buffer per cycle.
* WAIT: ROWS+COLS-1 cycles.
* CAP: 1 cycle.
* DRAIN: ROWS cycles, one ofmap write per cycle.

A tile takes **K + 2·ROWS + COLS** cycles, K + 48 at the default size. Tiles run back to back, and
`done_irq` pulses once at the end. A 3x3x3 convolution, for example, uses K = 27 and takes 75
cycles per 256 outputs, so the array does useful MACs 36 % of the time. Tiles do not overlap: the
next tile's FEED does not start during the current DRAIN.

## What is outside the RTL

* **Host processor, host interface, DDR3 DRAM, memory interface.** The host and DRAM are external
  parts. The two interfaces are only named, not specified. The top module therefore exposes the
  host register port and the memory-side ports of the three buffers, and the system's DMA or host
  bridge connects there.
* **Choosing IS and SC, and quantizing trained parameters.** These are offline steps, described
  under "The number format".
* **Pooling, batch normalisation, residual additions.** The networks used with this accelerator
  contain these layers. The datapath covers the MACs, the re-quantisation and ReLU only.
* **Other word widths.** The width n (`N`) is fixed at elaboration. The default is 8, and 5, 6 and
  7 are tested. One build serves one width.

## Where this RTL fills in or departs from the source description

* **Fraction width.** The decoder puts out n-1 fraction bits, not n-2. That is the width needed for
  IS = 1, and it matches the ceil(log2 n)+n total.
* **IS encoding.** IS is carried as IS-1, so that IS = n fits in ceil(log2 n) bits.
* **Three IS values.** Weights, activations and outputs each have their own IS. A single IS for both
  decoders would force activations and weights into one format.
* **Terminating bit.** A run that reaches IS bits has no terminating bit, and the decoder skips the
  terminating bit explicitly. This reading reproduces the stated dynamic ranges and the worked
  example.
* **Encoder width and rounding inputs.** The encoder's shifter is wider than the sketched n+1 bits,
  and it takes two extra input bits (`lo_in`). Without them, rounding from a wider accumulator
  would not be exactly nearest-even.
* **Multiplier and accumulator.** Multiplication is two's complement rather than sign and
  magnitude; the product is the same. The accumulator is sized to hold every product exactly
  (29 bits plus 13 guard bits). A formula in terms of the format's dynamic range alone would give a
  narrower register, one that cannot hold SC-scaled or IS = 1 products without loss.
* **Single rounding.** Partial sums are never rounded; the sum is rounded once after the last term.
* **ReLU.** ReLU sits after the quantiser and is switched per layer.
* **Control, layout and timing.** The control unit, register map, data layout, skew registers,
  drain scheme, one-cycle SRAM latency and cycle counts are this design's own. The source estimated
  latency with an external simulator and gave no RTL timing.
* **Reset.** All registers use an asynchronous active-low reset (`rst_n`). Memory contents are not
  reset.

## Verification

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. The reference model
(`tb/tfx_ref_pkg.sv`) is written from the format definition, independently of the RTL. It decodes a
word bit by bit. It encodes by searching all 2^n words for the nearest one, with ties going to the
even word, so clipping falls out of the search.

| testbench | what it covers |
|-----------|----------------|
| `tb_tfx_decoder` | every word under every IS, n = 8 and n = 5; the worked example |
| `tb_tfx_encoder` | exhaustive in-range sweep with all round/sticky inputs, random out-of-range inputs, decode→encode round trip, all IS |
| `tb_tfx_pe` | 400 random dot products (random IS, SC, ReLU, length), forwarding, drain shift; SC of both signs, clipping and ReLU must occur |
| `tb_pe_array` | full 16x16 array, 12 random tiles, all 256 outputs each |
| `tb_sram_bank`, `tb_sram_buffer` | full-size memories: latency, hold, read-during-write, lane/bank mapping, depth 6912 |
| `tb_control_unit` | every strobe and address cycle by cycle for multi-tile runs, registers, done pulse, cycle counter, start while busy |
| `tb_tent_top` | default-size accelerator end to end: five operations, all outputs and cycle counts checked; counts SC±, IS = 1 and IS = n, rounding, clipping, ReLU, multi-tile and filter reuse, and fails if any never happened |
| `tb_workload_conv` | a 32x32x3 → 16-filter 3x3 convolution with ReLU (64 tiles, 16384 outputs), data in the CIFAR-10 ResNet-18 ranges, formats chosen with the IS/SC rule |
| `tb_workload_fc` | a 784 → 64 dense layer without ReLU for 16 input vectors (4 tiles, the filter pointer stepping by 784), data in the MNIST ConvNet ranges, so IS_w = 1 and IS_a = 4; checks that both signs occur |
| `tb_tent_top_bits` | the accelerator built for 5-, 6- and 7-bit words |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tent_top \
    -y rtl -y tb +libext+.sv rtl/tent_pkg.sv tb/tfx_ref_pkg.sv tb/tb_tent_top.sv
./obj_dir/Vtb_tent_top
```

Each run finishes in well under a second of simulation, including the default-size top.
Elaborating the full array takes about 20 s.

With n = 8, coarse synthesis of the full design gives:

* about 33,000 word-level cells;
* 18,900 flip-flop bits, mostly the 256 accumulators and the operand registers;
* 2.65 Mbit of memory in the three buffers.

To change the design, edit the parameters of `tent_top`: `N` (word width), `ROWS`/`COLS`,
`KBYTES`, `BANKS` and `GUARD` (accumulator guard bits). Their defaults live in `rtl/tent_pkg.sv`.
