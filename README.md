# Streaming coalescer for a compressing pixel-detector ASIC

A pixel detector that compresses its data on chip runs many encoders in
parallel, one per group of pixels. Every clock cycle each encoder emits a
small fixed-size metadata field and a *variable* number of fixed-size data
words: few when the image region compresses well, many when it does not. The
off-chip link, on the other hand, takes fixed-size words (512 bits here). The
logic in this repository joins the variable-length encoder outputs into one
dense stream and cuts that stream into full 512-bit blocks, so that every
block sent carries only useful bits. It never stalls the encoders: it accepts
a complete set of encoder outputs every cycle, at the pixel-readout clock,
whatever their lengths.

The architecture is the one described by Strempfer, Yoshii, Hammer, Bycul and
Miceli (Argonne National Laboratory) in "Designing a Streaming Data
Coalescing Architecture for Scientific Detector ASICs with Variable Data
Velocity". This is an independent SystemVerilog rendering of it, not the
authors' code (theirs is written in Chisel). Where their description leaves a
detail open, the choice made here is stated below and in each file's header.

```
 encoders (8)          coalescing                                   link side
 ------------   +------------------------------------------+
 meta[8]  ----->| concat -------------------+              |
 data/len[8] -->| merger tree (3 levels) ---+--> packer ---+--> block_fifo --> serializer /
                |        reduction               (buffer)  |    (16 x 512)    transmitter
                +------------------------------------------+
```

## The data format

Each encoder `e` presents, in a cycle where `enc_valid` is high:

* `enc_meta[e]` – `META_W` bits of metadata (4 bits by default). Its meaning
  belongs to the encoder; the coalescer only moves it.
* `enc_data[e][0..MAX_WORDS-1]` – `MAX_WORDS` (5) words of `WORD_W` (8) bits;
* `enc_len[e]` – how many of those words are used (0..5). The unused words may
  hold anything.

One cycle's contribution to the output stream (a *reduction output*) is:

```
word 0 .. 3     : metadata of encoders 0..7 concatenated (encoder 0 in the low bits),
                  cut into 8-bit words
word 4 ..       : enc_len[0] words of encoder 0, then enc_len[1] words of encoder 1, ...
```

so it is between 4 and 44 words long. Stream word `k` of a block sits in bits
`[8k +: 8]` of the 512-bit block; a block holds 64 stream words and a
reduction output may straddle two blocks. To decode, a receiver reads the 4
metadata words, obtains each encoder's word count from the metadata (this is
the encoder's business, so the metadata should carry it), skips that many
words, and finds the next cycle's metadata immediately after.

Metadata goes around the merger tree, not through it. It has the same size
every cycle, so plain wiring places it; and the mergers only handle whole
words of one size, so keeping the metadata out keeps them narrow.

## The merger: joining two variable-length vectors

Everything else is built from one combinational block, `merger`. It takes
input 1 (capacity `N1` words, `len1` used) and input 2 (capacity `N2`,
`len2` used) and returns one vector in which input 2's words follow input 1's
without a gap.

Input 2 starts behind `N1` words of padding, at word position `N1`. It must
end up at position `len1`, so it has to move down by `s = N1 - len1` words.
Rather than a full crossbar, the shift goes through `ceil(log2(N1+1))`
stages; stage `k` shifts the whole vector down by `2^k` words if bit `k` of
`s` is set. For `N1 = N2 = 5` and `len1 = 3`, `s = 2 = 'b010`: the
"by 4" stage passes, the "by 2" stage shifts, the "by 1" stage passes.
Finally word `i` of the result is taken from input 1 when `i < len1` and from
the shifted vector otherwise. Each stage is one row of 2:1 word
multiplexers, so the merger grows as `N log N` instead of `N^2`.

The published figure adds the two parts together. Here a per-word select
is used instead. That way the padding words of an encoder need not be zero.
Words of the result beyond `len1 + len2` are don't-care.

## Reduction: a tree of mergers

`reduction` merges the `NUM_ENC` encoder outputs in `log2(NUM_ENC)` levels.
Level 0 joins encoders (0,1), (2,3), ... with 5+5-word mergers. Level 1 joins
those results with 10+10-word mergers. Level 2 joins the two halves with a
20+20-word merger. Then the metadata words are put in front. Encoder order is
kept. The total length is the sum of the encoders' lengths plus the number of
metadata words. The tree is fully combinational. Its size grows about as
`M N log M log N` for `M` encoders of `N` words. With many encoders it
becomes the largest part of the coalescer (see *Size*).

`NUM_ENC` must be a power of two.

## Packing: from a variable stream to full blocks

`packer` holds a buffer register of one block (64 words) and a fill count,
which is always below 64 after a clock edge. Each cycle a second merger
appends the current reduction output (up to 44 words) to the buffered words,
giving up to 64 + 44 words:

* fewer than 64 words in total: the first 64 words of the merge are written
  back to the buffer and nothing is sent;
* 64 or more: the first half (words 0..63) is a complete block. It goes to
  the FIFO **in the same cycle** (`blk_valid` is combinational). The second
  half, words 64 and up, is the leftover of the current reduction output, and
  it is written to the start of the buffer. The new fill is `total - 64`.

A mux in front of the buffer picks the first or the second half. The only
state in the whole coalescer is this buffer and its count.

The sizing rule carries the stall-free property. The largest reduction output
(`IN_WORDS`, 44 words) must not exceed a block (64 words). Then a cycle can
complete at most one block, the leftover always fits in the buffer, and the
packer never needs to hold back an input. `packer` and `coalescing` stop
elaboration with an error if a parameter set breaks this rule.

## FIFO and data loss

Packing only ensures that blocks are full. The link still runs at a fixed
rate, and the encoders' output is bursty: a stretch of poorly compressible
frames can produce more than 512 bits per cycle of link time. `block_fifo`
(16 blocks by default) absorbs such bursts. Then only the *average* output
rate must stay below the link rate, not the rate of every cycle.

The encoders cannot be stopped. So when a block finds the FIFO full and no
block leaves in the same cycle, that block is dropped. `overflow` pulses for
that cycle and `drop_count` counts it (the counter saturates). A dropped block
breaks the decoding chain described above. The optional block header below
lets a receiver pick the chain up again at the next block.

## Block header (optional)

A receiver that loses a block, or wants to start reading in the middle of a
stream, cannot tell where the next cycle's metadata begins. Setting
`HDR_WORDS` (on `packer`, `coalescing` or `detector_daq`) reserves the first
`HDR_WORDS` words of each block for a header. The payload shrinks to
`64 - HDR_WORDS` words. The header holds the word offset, within the payload,
of the first reduction output that starts in that block. Decoding can resume
from that offset. The packer keeps a start offset next to the buffer. The
offset is the buffer position where the first output added since the last
block landed. The offset is valid in every block because of the sizing rule:
the words carried over from the previous block are always fewer than a
payload, so some new output always starts inside the block. An assertion
checks this. The stall-free rule becomes `IN_WORDS <= 64 - HDR_WORDS`.

## Link side

The transmitter side is a show-ahead valid/ready port: `tx_data` is the oldest
block whenever `tx_valid` is high, and `tx_ready` removes it.

## Modules

| file | what it is |
|---|---|
| `rtl/coalesce_pkg.sv` | default sizes and two helper functions (metadata words, max reduction words) |
| `rtl/merger.sv` | two-input variable-length merge, log-shifter |
| `rtl/reduction.sv` | merger tree plus metadata concatenation (combinational) |
| `rtl/packer.sv` | block buffer, merge with the reduction output, first/second half mux |
| `rtl/coalescing.sv` | reduction + packer |
| `rtl/block_fifo.sv` | block FIFO, drop-on-full, show-ahead read |
| `rtl/detector_daq.sv` | top: coalescing + FIFO, with encoder inputs and link outputs as ports |

Timing: the path from `enc_*` through reduction and packer to `blk_valid`,
`blk_data` and the buffer's D inputs is a single combinational cycle. The
architecture runs the coalescer at the low pixel-readout clock and accepts a
larger area in return. The FIFO adds one register stage toward the link.
Reset (`rst_n`) is synchronous and active low. It empties the buffer and the
FIFO and clears the drop counter.

## Parameters and where they come from

| parameter | default | origin |
|---|---|---|
| `NUM_ENC` | 8 | eight parallel encoders, as in the published architecture |
| `BLOCK_W` | 512 | the 512-bit link word of the published detector |
| `MAX_WORDS` | 5 | the example size used in the published figures; no production value is given |
| `WORD_W` | 8 | this design's choice |
| `META_W` | 4 | this design's choice (enough for a 0..5 word count) |
| `FIFO_DEPTH` | 16 | this design's choice |
| `HDR_WORDS` | 0 | per-block header words; the header is suggested in the source, its format is this design's |

Word width and metadata width are not given in the source. They were chosen
so that a worst-case cycle (352 bits) fits in a 512-bit block. Wider words or
more words per encoder need `BLOCK_W` to grow with them, or `NUM_ENC` to
shrink. The elaboration check mentioned above catches a bad combination.

## Departures and omissions

* **Per-block recovery header is optional and off by default.** The source
  suggests that metadata could be put at the start of every block, so that a
  receiver can find the start of a reduction output after a transmission
  error. It gives no format, and the main configuration it draws has no such
  field. With `HDR_WORDS > 0` the first `HDR_WORDS` words of a block hold the
  payload offset of the first reduction output that begins in the block, and
  the remaining words are payload (see *Block header*). With the default of 0,
  blocks carry only stream words.
* **Encoders, pixel array and serializer/transmitter are not included.** The
  compression algorithm comes from the authors' earlier work and is not
  specified. The link is an analog/mixed-signal macro. These parts appear as
  ports of `detector_daq`.
* **Choices where the source is silent:** the `enc_len` signal, the
  `enc_valid` qualifier (the source assumes data on every cycle), the word and
  bit order, synchronous reset, the FIFO depth and handshake, and the
  drop-on-full policy with its status outputs.
* There is no flush. Words left in the buffer at the end of an acquisition
  stay there until more data arrives. The source does not describe an
  end-of-stream mechanism.

## Verification

Every testbench checks itself against a model written independently of the
RTL, prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb/tb_merger.sv` | the 3+4-word example; all 36 length pairs of a 5+5 merger; an asymmetric 9+4 merger |
| `tb/tb_reduction.sv` (+ `tb_reduction_run.sv`) | 8x5 and 4x4 trees, random lengths incl. all-empty and all-full, against a stream built word by word |
| `tb/tb_packer.sv` | blocks against a word-queue model, with the block in the very cycle the 64th word arrives; fill count; leftover and exact-fit cases; a second instance with a one-word header, checking each header offset |
| `tb/tb_block_fifo.sv` | order, count, full, drop, read+write when full, read when empty |
| `tb/tb_coalescing.sv` | reduction + packer at default size through good, typical and worst-case phases |
| `tb/tb_detector_daq.sv` | whole top at default parameters, link ready every other cycle: every block on the link, FIFO level, overflow and drop count; it requires each mechanism (carry, exact fit, idle, worst case, FIFO full, drop, simultaneous read/write, drain) to occur |
| `tb/tb_detector_daq_header.sv` | the same end-to-end run with a one-word block header; checks the header offset of every block on the link |
| `tb/tb_fig5_example.sv` | 4 encoders x 4 words, 17-word blocks. Thirteen words wait in the buffer and the encoders add 2, 1, 3 and 0 words. One block leaves, and the third encoder's three words remain for the next block. Then a random run follows |

Running one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/coalesce_pkg.sv tb/tb_detector_daq.sv --top-module tb_detector_daq
./obj_dir/Vtb_detector_daq +verilator+rand+reset+2
```

The simulator has only two states, so every testbench initialises its inputs
before reset. The clocked assertions in `packer` and `coalescing` check the
length limits after reset: no encoder length above `MAX_WORDS`, and no buffer
fill of a whole block.

## Size

Generic-gate counts from Yosys synthesis (8-bit words, 5 words per encoder):

| encoders | 2 | 4 | 8 | 16 | 32 |
|---|---|---|---|---|---|
| reduction gates | 253 | 1202 | 3749 | 11600 | 31260 |

| merger N1 = N2 | 4 | 8 | 16 | 32 | 64 |
|---|---|---|---|---|---|
| gates | 214 | 523 | 1214 | 2716 | 5991 |

Each doubling of the merger's size multiplies its gate count by about 2.2 to
2.4. That fits `N log N`. The reduction tree grows by about 3x per doubling of
the encoder count, close to the `M log M` scaling reported for the original.
At the default size the packer synthesizes to about 5,600 gates. That
includes 519 flip-flops: the 512-bit buffer and its count. Its 64+44-word
merger is therefore larger than the 8-encoder reduction tree. The original
reports the reduction as the largest part. The balance shifts toward the
reduction as encoders are added, because the tree grows faster than the
packer.
The FIFO holds 16 x 512 bits of storage.
