# Quad length codec for e4m3 data

Collective operations in distributed training move large tensors of 8-bit
floating point (e4m3) values between accelerators and are often limited by
link bandwidth. The byte values of such tensors are far from uniformly
distributed, so an entropy code can shrink them losslessly. A Huffman code
does that best, but its code lengths vary widely (6 to 18 bits, or 3 to 39
for some tensors) and decoding walks a deep tree bit by bit.

A *quad length code* keeps most of the gain with a decoder that never looks
at more than a 3-bit prefix to know where a code ends. The 256 byte values
are ranked by probability; the ranked list is cut into eight contiguous
**areas**. A code is the 3-bit area number followed by a fixed number of
bits that index the symbol inside its area. Each area's index width is
chosen so that frequent symbols get short codes; only four distinct code
lengths occur. Encoding is one table read; decoding is one prefix lookup,
one addition and one table read, so one symbol is decoded per clock cycle
whatever its length.

This repository holds synthesizable SystemVerilog for such a codec,
following the scheme published by Agrawal et al. in *Quad Length Codes for
Lossless Compression of e4m3*, plus self-checking testbenches. The paper
specifies the code and the look-up tables; the hardware organisation around
them (streams, word format, pipeline, table loading) is this design's own
and is marked as such below.

## The code

Symbols are first renumbered by rank: mapped symbol 0 is the most probable
byte value of the tensor type, 255 the least probable. Two area layouts are
built in (`qlc_pkg::SCHEME_FFN1`, `SCHEME_FFN2`):

| area code | scheme 0: ranks | index bits | length | scheme 1: ranks | index bits | length |
|-----------|-----------------|-----------:|-------:|-----------------|-----------:|-------:|
| 000       | 0-7             | 3          | 6      | 0-1             | 1          | 4      |
| 001       | 8-15            | 3          | 6      | 2-9             | 3          | 6      |
| 010       | 16-23           | 3          | 6      | 10-17           | 3          | 6      |
| 011       | 24-31           | 3          | 6      | 18-25           | 3          | 6      |
| 100       | 32-39           | 3          | 6      | 26-33           | 3          | 6      |
| 101       | 40-55           | 4          | 7      | 34-65           | 5          | 8      |
| 110       | 56-87           | 5          | 8      | 66-97           | 5          | 8      |
| 111       | 88-255          | 8          | 11     | 98-255          | 8          | 11     |

Scheme 0 suits distributions without a dominant value (the paper derives it
from the FFN1 activations of a Gemma 2B fine-tuning run, where it reaches
13.9% size reduction against 15.9% for Huffman). Scheme 1 gives the two
most probable values 4-bit codes, for tensors dominated by zero after a
non-linearity (19.0% against 23.2% for Huffman on FFN2 activations).

Inside areas 000-110 the index is `rank - first rank of the area`. In the
last area the 8 index bits are **the rank itself**, not the offset from the
area's first rank: for scheme 0, rank 253 is `111_11111101`. The decoder
therefore adds an offset of zero for that area, and the code points
`111_00000000` up to the area's first rank minus one are never produced.
`qlc_area_decoder` flags them on `invalid`.

Worked example, scheme 0: the bits `100 010 …` have area 4, which has 3
index bits; the index is 2, the area's offset 32, so the encoded symbol is
34. The decoder LUT then gives the byte value that had rank 34.

## Tables

Each tensor type (activations, weights and their gradients of each layer
kind) has its own pair of tables and its own scheme; `NUM_TABLES` (default
8) pairs are held.

* **Encoder LUT** (`qlc_encoder_lut`): 256 entries per table, indexed by the
  byte value, holding `{length[3:0], code[10:0]}` with the code right
  aligned. Encoding is a single read.
* **Decoder LUT** (`qlc_decoder_lut`): 256 entries per table, indexed by the
  rank, holding the byte value.
* **Scheme register** (inside `qlc_decoder`): one bit per table, 0 or 1.

Building the tables needs the symbol histogram of the tensor type, sorted by
decreasing count. That is done offline (once per tensor type, ahead of
time) and is not part of this RTL. `qlc_lut_loader` takes the sorted list:
after a `start` pulse with the table number and scheme, it accepts the 256
byte values in rank order, one per cycle, and for the value `v` at rank `k`
writes `enc[table][v] = code(k)` and `dec[table][k] = v`. The code of a rank
comes from `qlc_code_assign`. A load takes 256 cycles plus one; `done`
pulses when it ends. Traffic must not use a table while it is being
loaded. The loader does not check that the 256 values are distinct.

## Compressed stream format

The paper defines the codes but not how they travel; the format here is
this design's choice.

* Codes are concatenated most significant bit first, area code first, into
  `WORD_W`-bit words (default 32). The first bit of a block is bit 31 of
  its first word.
* A **block** is any run of symbols the sender marks with `last` on its final
  symbol. The block's final word is zero padded and carries `last = 1` and
  `bits` = number of code bits it holds (1..32). No code straddles two
  blocks.
* The table (tensor type) is given with the symbols of a block at the
  encoder and with the words of the block at the decoder; it is carried
  beside the stream, not inside it.

## Encoder

`qlc_encoder` = encoder LUT + one pipeline register + `qlc_bit_packer`.
A symbol accepted in cycle *t* is looked up in cycle *t* (registered read),
handed to the packer in *t+1*, and its bits are in a word offered from *t+2*
on. The packer keeps a 64-bit accumulator; it accepts a code whenever at
most 53 bits are held and offers a word whenever 32 are held, so with the
output ready it takes one symbol every cycle. On a block's last code it
stops accepting until the block's words, including the padded final one,
have left.

## Decoder

`qlc_decoder` = `qlc_bit_unpacker` + `qlc_area_decoder` + decoder LUT.

* The unpacker appends incoming words to a 64-bit buffer (only the code bits
  of a block's final word) and shows the next 11 unread bits. It takes a new
  word whenever it holds at most 32 bits, so that at one code per cycle it
  never runs short while words keep arriving.
* The area decoder reads the top 3 bits, looks up the index width of that
  area in the table's scheme, and forms `rank = index + offset`. The code
  length `3 + index width` goes back to the unpacker, which drops those bits
  in the same cycle. A code is taken once its full length is held.
* The rank is read from the decoder LUT; the byte appears on `out_sym` one
  cycle later with `out_last` on the final symbol of the block.

The loop that matters for speed — prefix to length to buffer shift — is one
3-bit table lookup and one shifter, independent of the code length; this is
what makes one decoded symbol per cycle possible, where a Huffman decoder
would spend up to one step per code bit.

The table of a block is sampled with its first word and held until the
block's last code has been consumed; the next block's first word is
accepted in the following cycle.

## Top level

`qlc_codec` joins the loader, encoder and decoder around the shared tables.
Ports (all valid/ready streams; a transfer happens when both are high on a
rising clock edge):

| group       | signals                                                  |
|-------------|----------------------------------------------------------|
| `load_*`    | `start`, `table`, `scheme`, `valid/ready/sym`, `busy`, `done` |
| `enc_in_*`  | `valid/ready`, `sym[7:0]`, `table`, `last`               |
| `enc_out_*` | `valid/ready`, `data[31:0]`, `last`, `bits[5:0]`         |
| `dec_in_*`  | `valid/ready`, `data[31:0]`, `last`, `bits[5:0]`, `table`|
| `dec_out_*` | `valid/ready`, `sym[7:0]`, `last`, `invalid`             |

The encoder output and decoder input are kept apart so that one codec
compresses what a node sends and decompresses what it receives; connect
`enc_out_*` to the link and the link to `dec_in_*` of the far end. `rst_n`
is an asynchronous, active-low reset of all control state; the LUT contents
are not reset and must be loaded before use. Scheme registers reset to 0.

Parameters: `NUM_TABLES` (default 8; the number of tensor types is not
fixed by the paper, 8 covers the four tensor kinds of the two feed-forward
layers it studies) and `WORD_W` (default 32, this design's choice; must be
at least 11).

Size at the defaults: 47,104 bits of table memory (8 × 256 × 15 encoder,
8 × 256 × 8 decoder), about 175 flip-flops and about 220 word-level cells
outside the memories.

## Where this departs from, or adds to, the paper

* Only the code and the tables come from the paper. Word width, bit order,
  block framing, the valid/ready handshakes, the pipeline, the loader
  protocol, the `invalid` flag and the reset behaviour are this design's.
* The paper's tables are built offline from a sorted histogram; no
  histogram or sorting hardware is included.
* Only the two published area layouts can be selected. The paper notes that
  the number of areas and their sizes could be tuned for other
  distributions; changing `SCHEME_FFN1`/`SCHEME_FFN2` in `qlc_pkg` (or adding
  a third entry and widening `scheme_id_t`) does that at build time, with
  the constraint that areas are contiguous, cover all 256 ranks, and the
  last area carries the rank verbatim in 8 bits.
* The paper gives no throughput or latency figures for its decoder; one
  symbol per cycle is this design's target and is checked in simulation.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=N failures=M`. Expected values come from
`tb/tb_qlc_ref_pkg.sv`, a reference model written from the area sizes
alone (walking the areas, not using the RTL package).

| testbench            | what it establishes |
|----------------------|---------------------|
| `tb_qlc_code_assign` | every rank under both schemes; the code examples printed in the paper's table; the number of symbols of each length |
| `tb_qlc_area_decoder`| every code under both schemes with random trailing bits; the 32+2=34 example; invalid last-area codes |
| `tb_qlc_encoder_lut`, `tb_qlc_decoder_lut` | all 8 × 256 entries written and read back; one-cycle read; output holds without a read |
| `tb_qlc_lut_loader`  | tables built from random orders match the reference; 256 writes; `done` timing |
| `tb_qlc_bit_packer`  | random codes and block sizes, with and without backpressure; one code per cycle |
| `tb_qlc_bit_unpacker`| window always equals the reference stream; never short at full rate |
| `tb_qlc_encoder`     | two tables, both schemes; words equal the reference stream; one symbol per cycle |
| `tb_qlc_decoder`     | round trip from reference-encoded words; one symbol per cycle; invalid flag |
| `tb_qlc_codec`       | whole codec at default parameters: all 8 tables loaded, one reloaded with the other scheme, about 140 blocks through a link model with random stalls; every decoded byte and every compressed size checked; each mechanism (stalls on all three streams, exactly full and partial final words, one-symbol blocks, all four code lengths of both schemes) must occur |

| `tb_qlc_workload_ffn1` | FFN1-activation-like traffic (below) at default parameters: the byte values whose ranks the paper prints are placed at those ranks and coded as printed (113 -> `000_000`, 233 -> `001_000`, 128 -> `111_11111111`); 64 blocks of 1024 symbols round trip unchanged and their mean code length matches the model's expectation |

The FFN1 model distribution follows the Huffman code lengths the paper
states for that tensor: the 37 most probable values at probability 2^-6
each, the next 35 at 2^-7, and the remaining 19/128 spread evenly over the
other 184 values (the even spread is an assumption). Under it scheme 0
averages 7.08 bits per byte, 11.5% smaller; the paper measures 13.9% on the
real tensors, whose tail is more skewed than this model. No comparable
model can be built for the FFN2 activations from what the paper states, so
scheme 1 is exercised with synthetic data only.

The other data used is synthetic (random orders, a skewed rank distribution),
because the tensor data behind the paper's numbers is not available; the
compressibility the codec testbench prints describes that synthetic data,
not the paper's workloads. What is exact is that each block's compressed
size equals the sum of its code lengths, so the codec reaches whatever
compressibility the code itself gives.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qlc_pkg.sv tb/tb_qlc_ref_pkg.sv tb/tb_qlc_codec.sv \
    --top-module tb_qlc_codec -o sim
./obj_dir/sim
```

Replace `tb_qlc_codec` by any other testbench name. All testbenches finish
in seconds.
