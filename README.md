# Compressed coding-pair streams: ANS cores, number-format glue and a token factory

Most of the bits in a neural network's weights and activations carry little information.
In a bfloat16 weight, the sign and the 7 mantissa bits are close to uniformly distributed.
The 8-bit exponent, though, takes only a few dozen values, and some of them far more often than others.
This design splits every number into a **coding pair**:

- a **code**, here up to 64 values, which is entropy coded;
- **additional data**, 0 to 8 bits whose count depends on the code, which travels uncompressed.

For bfloat16, the code stands for the exponent and the additional data is the sign and mantissa.
That makes the coding lossless at about 10.5 bits per weight for a large language model.
The same mechanism covers other formats:

- reduced-precision floats such as fp12 E8M3, which keeps the full 8-bit exponent range with 3 mantissa bits;
- integers whose code is the position of the leading one;
- single values mapped directly to a code, for example zero.

The compressor and decompressor only ever see (code, additional-data) pairs. A few table-driven
"glue" blocks turn pairs into processor numbers and back.

The RTL implements three layers:

1. ANS entropy coders for coding pairs, one pair per clock. There are two variants: table-based
   (tANS, 8-bit probabilities, 16-bit words) and range (rANS, 16-bit probabilities, 32-bit words).
2. Interface glue between pairs and a processor's internal numbers, for floating-point and
   fixed-point processors, including rounding and direct-value codes.
3. A streaming fabric: channels, FIFOs and a memory arbiter. It is assembled into a **token
   factory**, where P processors run the same model in lockstep on different queries. They share
   one compressed weight stream, decompressed once and broadcast to all of them. Each processor
   also has its own compressor and decompressor for private data such as activations.

All values shared between modules live in `rtl/ans_pkg.sv`.

## Coding pairs on the wire

Inside the fabric a pair is `pair_t = {code[5:0], ad[7:0]}`. The additional data is always
**left-aligned**: a code with `a` additional-data bits uses `ad[7:8-a]`, and the lower bits are
zero. The number of bits per code (`adl`) is a table in every coder. The coder therefore pads with
zeros on decompression and drops the unused bits on compression.

The glue uses one convention:

- `ad[7]` is the sign;
- the bits below it are the mantissa, or the bits below an integer's leading one, most significant first.

## The ANS cores

ANS keeps one integer state `x`. Coding a symbol of probability `p` grows the state by about
`log2(1/p)` bits. Renormalisation keeps `x` in a fixed interval by shifting low state bits out to
the bit stream. The decoder runs the same steps backwards, so **the stream is last-in first-out**:
the decoder produces pairs in the reverse of the order they were compressed in. This shapes the
whole stream format.

Each compressed pair contributes one chunk to the stream. The chunk is `{shed state bits,
additional data}`, `nb + adl` bits long.

### tANS (`tans_encoder`, `tans_decoder`)

- **State and per-code counts.** The state is `x` in [256, 512), and each code has a count `n_s`.
  The `n_s` are the 8-bit normalised probabilities, summing to 256, with `n_s >= 1` for every code
  that occurs.
- **Encoder.** `k_s = 8 - floor(log2 n_s)`. The encoder sheds `nb = k_s` low state bits, or
  `k_s - 1` if `x < n_s << k_s`, so that `x >> nb` lies in [n_s, 2 n_s). It then reads the next
  state from a 256-entry table at `cum_s + (x >> nb) - n_s`.
- **Decoder.** The decoder's table holds `{code, nb, base}` for each of the 256 states. The new
  state is `base + (nb bits read from the stream)`.
- **Tables.** Both tables are computed off line from the counts and written in through the
  configuration bus. The testbench package spreads symbols with step 163 modulo 256.

### rANS (`rans_encoder`, `rans_decoder`)

- **State and per-code values.** The state is `x` in [2^24, 2^25). Each code has a 16-bit
  frequency `f_s` (summing to 65536), a cumulative frequency `c_s`, and `k_s = 16 - floor(log2 f_s)`.
- **Encoder, renormalisation.** The encoder sheds `nb = k_s` bits, or `k_s - 1` if
  `x < f_s << (8 + k_s)`. Then `xs = x >> nb` lies in [f_s 2^8, f_s 2^9).
- **Encoder, division.** The quotient `xs / f_s` therefore has exactly 9 bits. A 9-step restoring
  division, unrolled and combinational, computes it without a multiplier:
  `x' = (q << 16) + c_s + (xs mod f_s)`.
- **Decoder, finding the code.** The low 16 bits of `x` (the slot) are compared in parallel with
  all 64 ranges [c_s, c_s + f_s).
- **Decoder, state update.** One multiplication restores `f_s * (x >> 16) + slot - c_s`. The
  decoder then reads `nb` bits, with `nb` decided by whether `x_pre << (k_s - 1)` already reaches 2^24.
- **Why bit-wise.** Renormalising bit by bit, instead of byte or word at a time, keeps every step
  one clock long and lets the chunk go straight into the bit packer.

### Bit packing and the stream layout

`ans_bitpack` and `ans_bitunpack` are shared helpers.

- **Packer.** It appends a chunk of up to KMAX bits (16 for tANS, 24 for rANS) to a shift register.
  Whenever at least one word is available it emits the oldest W bits, with the oldest bit at the MSB.
- **Unpacker.** It holds `2*KMAX + W` bits. Each clock it takes a chunk from the LSB end and loads
  a new word whenever `W` bits of room are free. That sustains one pair per clock with no bubbles.

A compressed stream in memory, from lowest to highest address:

```
word 0 .. n-1    full words, in the order the encoder emitted them
word n           the r pending bits at the end, right-aligned (r < W)
word n+1         header: tANS {r[11:8], state-256[7:0]}
                         rANS {r[28:24], state-2^24[23:0]}
```

The decoder starts at the header. It restores the final encoder state, loads `r` bits from the
partial word, then takes the full words from the highest address downwards. Data must therefore
be compressed in the **reverse** of the order the consumer needs it in.

- **Weights** are compressed off line, back to front, so the processors receive them in natural order.
- **Activations** written by a processor come back newest first. A consumer that needs them
  oldest first must write them in reverse.

The end-of-stream format, the header, and starting every stream at the lowest state are this
design's own choices.

Both coders accept one pair per clock, limited only by valid/ready back-pressure. Each testbench
checks that rate by pushing or pulling N pairs in N consecutive cycles.

## Number-format glue

Every glue block has one register stage and moves one value per clock. Each is configured through
a 64-entry or 256-entry table.

| block | direction | table | what it does |
|---|---|---|---|
| `fp_expand` | pair -> bfloat16 | code -> {exponent, direct, value} | exponent from the table; sign and mantissa from the additional data; or a whole 16-bit value for direct codes |
| `fp_reduce` | bfloat16 -> pair | exponent -> {code, m} | rounds the mantissa to m bits by adding half a step, then truncates; a carry out of the mantissa selects the next exponent's code through a second read port |
| `fx_expand` | pair -> int16 | code -> {signed shift, direct, value} | `1.mantissa`, negated if the sign is set, then shifted left or right (arithmetic) |
| `fx_reduce` | int16 -> pair | (leading-one position + 1) -> {code, m} | `abs`, priority encoder, round at the step that code keeps, cut to that step, normalise again, look up the code |

Direct codes are selected per code by a table bit. An example is a code meaning exactly 0.0 with
no additional data. They work in both formats, and in the reduce direction simply by pointing an
exponent or leading-one position at that code.

Rounding is to nearest, with ties away from zero, on the magnitude.

`fx_reduce` is the subtle one. How many bits survive depends on the code, which depends on the
leading one, which rounding can move. The block therefore:

1. finds the leading one;
2. rounds at the step that code allows;
3. clears the bits below that step;
4. finds the leading one again and uses that code.

Without step 3, a carry into a code that keeps more bits would leak stale low bits into the result.

Not implemented:

- Saturation or underflow for exponents the processor cannot hold. The internal format is
  bfloat16, which holds every code's exponent.
- Special treatment of inf/NaN. Exponent 255 is just another table entry.

## Streaming fabric

### Channels (`decomp_channel`, `comp_channel`)

A decompression channel is a word FIFO, followed by a tANS or rANS decoder, followed by
`fp_expand` or `fx_expand`. A compression channel is the same in the other direction.

- **Run-time selection.** Each channel holds both coders and both glue paths. A channel register
  picks one coder and one format, so one channel can serve bfloat16 weights now and integer
  activations later.
- **Stream length.** A length register limits a stream to its number of values.
  - The decompressor stops cleanly after the last value and ignores whatever follows in the FIFO.
  - The compressor flushes after the last value. `done` rises once the header word has left its FIFO.
- **Word width.** Memory words are 32 bits. tANS words use the low 16 bits of a memory word.

### Memory arbiter (`mem_arbiter`)

NR read channels and NW write channels share one request/response memory port. Round-robin
arbitration issues at most one request per clock.

- **Reads.** A read channel may request only while it has words left and holds a **credit**. It
  has one credit per free FIFO place. Issuing a read takes a credit, and the decompressor's pop
  returns it. A returning word therefore always has room, and the memory never has to wait for a
  consumer.
- **Read addresses** count downwards from the base, which is the address of the stream's header.
- **Writes.** Write addresses count upwards, and `wr_count` reports how many words a write
  channel has stored. That count is also the length the read channel needs later.

The memory must return read data in request order, tagged with the channel number.

### Token factory (`token_factory`, the top)

- **Weight broadcast.** Channel 0 decompresses the shared weights. A weight leaves it only when
  every processor's small weight FIFO (WBUF = 4 places) has room, and it is then written into all
  of them at once. Processors that take weights at different paces can drift apart by up to WBUF
  weights without losing any.
- **Per-processor channels.** Processor p has decompression channel 1+p and compression channel P+1+p.
- **Memory.** All 2P+1 streams go through one `mem_arbiter` with NR = P+1 read channels and
  NW = P write channels.
- **Default size.** P = 10, the number of processors in the paper's worked example.

The processors and the memory are outside the top, and their signals are ports:

- per processor: `w_*` (weights), `a_rd_*` (own data read back) and `a_wr_*` (own data to store);
- `mem_*`: the memory port.

### Entering a stream in the middle

A decompression channel can start anywhere in a stream, not only at its header. Suppose the
compressor had just finished element i, working back to front. An entry point for element i is
then:

- **Word address `a`:** how many full words the compressor had written.
- **Bit pointer `r`:** how many more bits it held that would become the oldest bits of word `a`.
- **State:** the coder state at that moment.

`{r, state}` is exactly the header the compressor would have written had the stream ended there.
An entry point is therefore a saved header.

`U_CHAN` addr 3 loads that header together with a right shift and an enable bit. Two things change
on the next start:

- The channel feeds the saved header to the decompressor instead of reading one from memory.
- It shifts the first word it fetches right, so that the `r` bits of the entered part become the
  partial word.

The shift is `W - r` when word `a` is a full word. When word `a` is the stream's own final partial
word of `r'` bits, the shift is `r' - r`. The arbiter's read channel is started at address `a`
with `a + 1` words. The channel then returns elements i, i+1, ... in order.

`random_access_tb` checks entries at random positions, at both ends and with both coders. After
each entry it checks that a normal start still works.

### Continuing a stored stream

A compression channel can also append to a stream that is already in memory. `U_CHAN` addr 3
takes the stored header together with a resume bit. `U_CHAN` addr 4 takes the stored partial word.

On start, the compressor loads its state and its pending bits from these two words instead of
starting empty. The arbiter's write base is set to the address of the old partial word, which the
continued stream overwrites.

Because ANS is last-in first-out, the appended values come out *first* when the joined stream is
read. The joined stream is bit-identical to one written in a single pass.

`stream_append_tb` checks this at several split points with both coders.

## Configuration bus

Every block listens to one write bus, `cfg_t = {we, chan[7:0], unit, addr[7:0], data[47:0]}`. A
channel accepts writes whose `chan` matches its CHAN parameter. The arbiter decodes `chan` as the
channel index.

| unit | addr | data |
|---|---|---|
| `U_ADL` | code | [3:0] additional-data bits (0..8) |
| `U_TANS_DEC` | state 0..255 | [5:0] code, [9:6] nb, [17:10] next-state base |
| `U_TANS_ESYM` | code | [7:0] n, [11:8] k, [19:12] cumulative count |
| `U_TANS_EST` | slot 0..255 | [7:0] next state - 256 |
| `U_RANS_SYM` | code | [15:0] f, [31:16] cumulative, [36:32] k |
| `U_FPX_LUT` | code | [7:0] exponent, [8] direct, [24:9] value |
| `U_FXX_LUT` | code | [5:0] signed shift, [6] direct, [22:7] value |
| `U_FPR_LUT` | exponent | [5:0] code, [8:6] mantissa bits kept |
| `U_FXR_LUT` | leading-one position + 1 (0 = zero) | [5:0] code, [8:6] bits kept |
| `U_CHAN` | 0 / 1 / 2 / 3 / 4 | 0: [0] rANS, [1] fixed point; 1: stream length; 2: start; 3: entry point [38:33] shift, [32] enable, [31:0] header (decompression) or [32] resume, [31:0] header (compression); 4: partial word to resume from |
| `U_ARB` | 1 / 0 | 1: read word count; 0: base address, starts the channel |

To start a stream, write the tables and the `U_CHAN` registers, then `U_CHAN` addr 2 (start).
After that, for a read, write `U_ARB` addr 1 (count) and then `U_ARB` addr 0 (base).

The tables are computed by software and are not part of the RTL:

- tANS state tables from the counts;
- normalised probabilities from histograms;
- the format tables.

`tb/tb_ans_model.sv` contains a complete reference: normalisation, tANS and rANS encoders that
produce bit-exact streams, the number formats, and the configuration sequence.

## Verification

Every block has a self-checking testbench in `tb/`. All of them compare against the independent
software models in `tb/tb_ans_model.sv`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

- **Coders.** Random probability tables and random pairs, including codes with 0 and 8
  additional-data bits. Each encoder's output is compared word for word with the model's stream.
  Each decoder decodes model streams. The one-pair-per-clock rate is checked in both directions.
- **Glue.** Random tables and values against the format model, including direct codes and
  rounding carries. Rate is one value per clock.
- **FIFO and arbiter.** Random back-pressure, credit exhaustion, memory stalls and ordering.
- **Channels.** Whole streams through FIFO, coder and glue, in both coders and both formats.
- **`token_factory_tb`.** Runs the top at its default size, P = 10, against a behavioural memory
  with random stalls and latency:
  - 1,500 lossless bfloat16 weights (rANS) are broadcast while every processor stores 300
    activations, each with one of four set-ups: lossless bfloat16 with tANS, integer with rANS,
    fp12 E8M3 with rANS, integer with tANS;
  - all activations are then read back and checked;
  - the run counts broadcast stalls, memory back-pressure, arbiter contention, read-credit waits,
    direct-value codes and float and fixed rounding carries, and fails if any of them never happened;
  - one run has 18,037 checks.

- **`workload_tb`.** Runs the formats evaluated for language-model weights through one
  compression channel and one decompression channel at their default sizes. The input is 4,000
  normally distributed weights (standard deviation 0.02) in bfloat16. The test checks three
  things: the exact round trip, one value per clock in each direction, and a compressed size
  within 2% of the ideal (coded probabilities plus additional-data bits). One run gives:

  | workload | bits per weight | ideal |
  |---|---|---|
  | bfloat16 lossless, tANS | 10.57 | 10.56 |
  | bfloat16 lossless, rANS | 10.55 | 10.54 |
  | fp12 E8M3, rANS | 6.54 | 6.54 |
  | fp11 E8M2, rANS | 5.55 | 5.54 |
  | integer Nb = 6 / 7 / 8 | 6.20 / 7.20 / 8.22 | 6.19 / 7.20 / 8.20 |

  The float results are close to what is reported for real 7B-model weights: about 10.6, 6.6 and
  5.6 bits. The integer sizes are larger than for real weights, because a normal distribution
  has no far outliers. Real weights have them, and that pushes most quantised values into the
  small codes.

- **`random_access_tb` and `stream_append_tb`.** These test entering a stream in the middle
  and continuing a stored stream. Both compare against the software model, with both coders.

To simulate a block with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/ans_pkg.sv tb/tb_ans_model.sv \
    tb/token_factory_tb.sv --top-module token_factory_tb
./obj_dir/Vtoken_factory_tb
```

Replace the testbench name for any other block. The simulator is two-state, so every register is
reset.

## Sizes

| parameter | value | where it comes from |
|---|---|---|
| codes | 64 | the paper's cores |
| additional data | 0..8 bits per code | the paper's cores |
| tANS | 8-bit probabilities, 256 states, 16-bit words | the paper |
| rANS | 16-bit probabilities, 32-bit words | the paper |
| rANS state | 25 bits | this design's choice |
| processors P | 10 | the paper's example |
| channel FIFOs | 16 words | this design's choice |
| weight buffers | 4 values | this design's choice |
| memory address | 32-bit word address | this design's choice |

Every parameter is at its paper value where the paper gives one. Nothing was scaled down.

## Departures and limits

- **Coder internals are standard ANS, not taken from the paper.** The paper gives the cores'
  interfaces and performance but no internals. The state sizes, the bit-wise renormalisation, the
  division in the rANS encoder and the stream layout are this design's own.
- **Probabilities are static per stream.** Adaptive probabilities are not implemented, and the
  probability normalisation and table generation run in software.
- **Important and ordinary weights.** On the decompression side, several codes may map to the same
  exponent with different additional-data sizes. On the compression side, `fp_reduce` has one code
  per exponent. Giving "important" weights their own codes therefore has to happen when the
  compressed stream is prepared, which is off line for weights.
- **Activation statistics are static.** Activation streams use tables prepared from typical data.
  Collecting code frequencies at run time and reprogramming a compressor per block is not built.
- **Binary and ternary weight coding is not implemented.** This means run lengths and group codes.
- **At most 64 codes.** One code per 8-bit integer value would need 128 codes.
- **At most 8 bits of additional data.** Lossless integers above 8 bits plus sign (Nb >= 9) are
  rounded to 7 bits below the leading one.
- **Throughput.** One weight decompressor gives one weight per clock. The paper's 10 tokens/s for
  a 7-billion-parameter model needs 7e10 weights/s, which would take tens of weight channels in
  parallel. The single 32-bit memory port is a similar bottleneck.
- **Memory ordering.** The memory model must return read data in request order.
- **One memory port.** Weights and per-processor data share one memory port; a separate bank for
  private data would be a straightforward split.
