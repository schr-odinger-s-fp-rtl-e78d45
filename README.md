# Variable-length FP32 containers for training-tensor traffic

Training a neural network spends much of its time and energy moving activation
and weight tensors to and from off-chip DRAM. Most FP32 values carry far more
bits than training needs: the useful mantissa is often only a few bits long,
and the exponents of a tensor cluster tightly around a common value. This RTL
is the hardware that turns those observations into less DRAM traffic. It sits
in front of the memory controller and stores each tensor in containers that are
only as wide as needed, then expands the values back to ordinary FP32 on the
way in, so that the compute units and on-chip buffers stay untouched.

Two widths decide the size of a stored value:

* **Mantissa width** (`man_width`, 0..23 bits kept, 5-bit input) is chosen
  outside the hardware, per tensor, by the training method (a learned
  per-tensor bitlength, or a network-wide bitlength driven by the trend of
  the loss). The hardware simply keeps the top `man_width` mantissa bits,
  which is truncation of the mantissa to that length.
* **Exponent width** is found by the hardware itself, per row of 8 values,
  and stored as 3 bits of metadata per row. It is lossless: every exponent
  comes back exactly.

The design follows the compressor/decompressor appendix of the
"Schrödinger's FP" training paper (Nikolić et al.). Where that description
stops, choices were made here; they are listed in
[Where this RTL departs from or adds to the source](#where-this-rtl-departs-from-or-adds-to-the-source).

## Container format

A tensor is streamed as **rows of 8 FP32 values** (lane *i* in bits
`[32i+31:32i]` of a 256-bit row).

**Exponent code.** Each 8-bit exponent `E` is turned into an unsigned code:

    d = (E - 127) mod 256, read as a signed byte (-128..127)
    z = (d << 1) XOR (d >>> 7)         // 0,-1,+1,-2,+2,... -> 0,1,2,3,4,...

Exponents near the bias of 127 (values of magnitude near 1.0, above or below)
get small codes. The map is a bijection on 8 bits, so it is lossless for every
exponent, including 0 (zeros, denormals) and 255 (Inf/NaN).

**Row exponent width.** The 8 codes of a row are ORed together and the leading
one located. Its position plus one, `n` (0..8), is the number of bits every
code of the row fits in. It is recorded as a 3-bit code `w`:

| `w` | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|-----|---|---|---|---|---|---|---|---|
| exponent bits stored | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 8 |

(a row needing 7 bits is stored with 8).

**Stored value.** Every value of a row has the same width

    B = sign_en + expbits(w) + min(man_width, 23)     (0..32 bits)

and is laid out most significant bit first as
`{sign (if sign_en), low expbits(w) bits of z, top man_width mantissa bits}`.
`sign_en` drops the sign bit for tensors known to be non-negative (for example
after a ReLU); such values come back with sign 0.

**Columns.** Value *i* of every row is appended to its own bit stream, column
*i*. Each column stream is cut into 32-bit words, filled from bit 31 down, and
a value may straddle two words. Because all values of a row share one width,
the 8 columns fill at exactly the same rate: whenever one completes a word, all
8 do, and together they form one 256-bit compressed row. No crossbar is needed;
a value never leaves its column.

**Metadata.** The per-row codes `w` go to memory as a separate, sequential
stream: 85 codes per 256-bit metadata word, code *k* in bits `[3k+2:3k]`.

**End of tensor.** The last compressed row and the last metadata word are
zero-padded. Reading a tensor back, the decompressor is told the number of
rows implicitly by the number of metadata entries it consumes, and a `clear`
before the next tensor drops the padding.

Example: ReLU activations with exponents within ±3 of 127 (codes 0..6, 3 bits)
and a 2-bit mantissa, sign dropped, take 5 bits per value plus 3/8 of a bit of
metadata: 5.4 bits against 32, a 5.9x reduction.

## Compressor

`compressor` takes one row per cycle (valid/ready) and works in one step:

1. `bias_encoder` replaces each exponent by its code `z` (combinational).
2. `width_detector` ORs the 8 codes (64 bits) and finds the leading one,
   giving `w` (combinational).
3. Eight `packer`s, one per column, insert their value into their column
   stream.

Outputs are registered: the row's `w` and, if the columns completed a word,
the compressed 256-bit row appear one cycle after the row is accepted. With
both outputs ready the compressor accepts a row every cycle. Compressed rows
are produced at the compression rate: a row of 4-bit values completes a word
every 8 input rows. `flush` emits the partly filled row of the last values of
a tensor.

### Packer

Each packer holds a 64-bit ring made of two 32-bit registers, L (ring bits
63:32) and R (ring bits 31:0), and a 6-bit rotation counter pointing at the
next free ring bit. Per value:

* **mask-and-shift** builds the `B`-bit value from the sign, the low
  `expbits(w)` code bits and the top `man_width` mantissa bits, left-aligns
  it in 64 bits and rotates it right by the counter, so it lands at the next
  free ring position (wrapping from R back into L);
* the value is ORed into the ring and the counter advances by `B` modulo 64;
* when the fill crosses the end of L (or of R), that register is complete:
  the **MUX** puts it on the packer's word output in the same cycle, and the
  register is cleared for reuse while the other one keeps filling.

Since `B` is at most 32, at most one register completes per value.

## Decompressor

`decompressor` mirrors the compressor. Column *i* of each compressed row goes
to `unpacker` *i*. For every output row it takes one `w` from the metadata
stream; with the tensor's `man_width` and `sign_en` this fixes `B` for all 8
unpackers, which therefore consume bits in lock step and need a new compressed
row in the same cycles.

### Unpacker

Each unpacker keeps a 64-bit register holding the unused bits, left aligned,
and a count of them.

* **combine-and-shift**: if fewer than `B` bits are held, the next 32-bit
  column word is ORed in right behind them (the decompressor supplies it in
  that same cycle); after the value is taken the register shifts left by `B`.
* **mask-and-extend**: the leftmost `B` bits are split into sign, exponent
  code (zero-extended to 8 bits) and mantissa (trimmed bits put back as
  zeros).

The 8 expanded values are registered (Word7..Word0) and `bias_decoder`
inverts the exponent code on the way out. One row leaves per cycle while
metadata, compressed data (when needed) and the consumer are ready; a row
appears one cycle after its metadata entry is accepted.

## Metadata path

`meta_packer` gathers `w` codes into 256-bit words and emits a word when 85
codes are in, or on `flush`. `meta_unpacker` holds one word and offers its
codes one per cycle; when the last code of a word is taken, the next word can
be loaded in the same cycle, so the decompressor never waits on a word
boundary. One metadata access covers 85 rows (680 values).

## Top level: `sfp_codec_top`

The accelerator has 8 DRAM channels and two codec units per channel, 16 units
in all (`N_CHANNELS = 8`, `UNITS_PER_CHANNEL = 2`). Unit
`u = channel*2 + k` has an independent write path (compressor + metadata
packer) and read path (metadata unpacker + decompressor). All ports are
arrays indexed by unit:

| group | signals | meaning |
|---|---|---|
| write, from buffers | `wr_in_valid/ready`, `wr_in_data[u]` (256b), `wr_man_width[u]` (5b), `wr_sign_en[u]` | uncompressed rows and their format |
| write, control | `wr_flush[u]` (pulse), `wr_flush_busy[u]`, `wr_flush_done[u]` | end a tensor |
| write, to memory | `wr_data_valid/ready`, `wr_data[u]` (256b); `wr_meta_valid/ready`, `wr_meta[u]` (256b) | compressed rows and metadata words, two sequential streams |
| read, from memory | `rd_data_valid/ready`, `rd_data[u]`; `rd_meta_valid/ready`, `rd_meta[u]`; `rd_man_width[u]`, `rd_sign_en[u]`, `rd_clear[u]` | compressed tensor, its format, start of a new tensor |
| read, to buffers | `rd_out_valid/ready`, `rd_out_data[u]` | FP32 rows |

A `wr_flush` pulse (accepted while `wr_flush_busy` is low) first flushes the
compressor, then waits until the compressor's last `w` has entered the
metadata packer and flushes that; `wr_flush_done` pulses when both partial
words are out. No rows are accepted meanwhile. `man_width` and `sign_en` must
be held constant over a tensor. All resets are synchronous and active low
(`rst_n`).

Peak rate: 16 units x 8 values x 500 MHz = 64 G values/s per direction,
256 GB/s of FP32 data before compression, which is above what 8 LPDDR4-3200
channels deliver (about 51-102 GB/s depending on channel width; not from the
source), so the codec does not limit the memory system.

## What is outside this RTL

* The **training-side methods** that choose `man_width`: learning per-tensor
  mantissa and exponent bitlengths by gradient descent, or adjusting a
  network-wide bitlength from a linear regression of recent losses. They run
  in the training software; the hardware only takes their result. Clamping
  the exponent range (the lossy exponent methods) also happens there; the
  codec then finds short exponent codes automatically.
* The accelerator's compute array and on-chip buffers, the memory
  controller and the DRAM.
* BFloat16 or FP8 baseline containers: this codec takes FP32 rows.

## Where this RTL departs from or adds to the source

Taken from the source: 8-value rows; bias subtraction with a fixed bias of
127; OR plus leading-one width detection with a 3-bit result stored as
separate per-row metadata; 8 packers and 8 unpackers working in tandem, each
confined to its own 32-bit column; the packer's mask-and-shift, 6-bit
rotation counter advanced by the value width, L/R register pair and output
MUX; the unpacker's 64-bit register with combine-and-shift and
mask-and-extend, zero-extended exponent and zero-filled mantissa; the 3-bit
`exp_width` and 5-bit `man_width` inputs; one row per cycle; two units per
channel on 8 channels.

Choices made here:

* **Negative exponent differences.** The source encodes exponents as
  `E - bias` but does not say how differences below zero stay short. The
  zig-zag fold above is this design's answer.
* **3-bit width for 0..8 bits.** Code 7 stands for 8 bits.
* **Sign bit.** The source counts only exponent and mantissa bits per value
  and says the sign is omitted whenever possible. Here `sign_en` stores it
  when the tensor may be negative.
* **Bit order** (MSB first, fields `{sign, exponent, mantissa}`), the
  metadata word (85 codes per 256 bits), `flush`, `clear`, valid/ready
  handshakes, registered outputs and synchronous reset are not specified by
  the source.
* The unpacker figure in the source labels the metadata input "8(29)"; only
  the 8 bits `{exp_width, man_width}` are used here.
* Area (about 0.03-0.04 mm² per compressor or decompressor in 65 nm, as
  reported in the source) and power were not re-evaluated.

## Files

`rtl/` (one module or package per file):

| file | content |
|---|---|
| `sfp_pkg.sv` | widths, exponent code functions, width-code and value-width functions |
| `bias_encoder.sv`, `bias_decoder.sv` | exponent code and its inverse for a row |
| `width_detector.sv` | OR + leading one, 3-bit width code |
| `packer.sv`, `unpacker.sv` | per-column packing and unpacking |
| `compressor.sv`, `decompressor.sv` | 8-column units |
| `meta_packer.sv`, `meta_unpacker.sv` | metadata stream |
| `sfp_codec_top.sv` | 8 channels x 2 units |

`tb/`: one self-checking testbench per module (`<module>_tb.sv`), a shared
reference model `sfp_ref_pkg.sv` (bit-queue packing, integer exponent codes,
independent of the RTL), and `sfp_codec_top_tb.sv`, which runs all 16 units of
the default top concurrently: several tensors per unit are stored with random
memory stalls, read back and compared row by row, and the test fails if any
mechanism (stalls, partial-row and partial-metadata flushes, full metadata
words, 0-bit and 8-bit exponent rows, dropped signs, word-straddling values,
clears) never occurred. The compressor, decompressor and metadata-unpacker
testbenches also check the one-row-per-cycle rate.

`sfp_workload_tb.sv` streams larger synthetic tensors through unit 0 of the
default top at typical training operating points and prints the measured
traffic. Each point is one (mantissa width, sign) setting, with exponents
clustered around a centre. It checks the round trip and that the rows written
match the reference count exactly. It checks every width code in the metadata
against the reference. It also checks that the write path takes one row per
cycle. Sample output ("exponent ratio" is stored exponent bits over 8):

| tensor | man_width | sign | data + metadata rows per 4000 rows | reduction | exponent ratio |
|---|---|---|---|---|---|
| activations, exponents 125±2 | 2 | dropped | 620 + 48 | 5.99x | 0.37 |
| weights, exponents 120±2 | 3 | kept | 1077 + 48 | 3.56x | 0.58 |
| weights, exponents 121±3 | 1 | kept | 801 + 48 | 4.71x | 0.55 |
| FP32, random exponents (1000 rows) | 23 | kept | 1000 + 12 | 0.99x | 1.00 |

The value distributions are synthetic. The ratios show how the format behaves
at these widths; they are not measurements on real networks. Uncompressible
data costs only the metadata, 3 bits per 256-bit row.

Every testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/sfp_pkg.sv tb/sfp_ref_pkg.sv tb/sfp_codec_top_tb.sv \
        --top-module sfp_codec_top_tb -o sim
    ./obj_dir/sim

(replace the testbench file and top module for the others; `-y` lets
Verilator find the other modules by name). The full-size top test runs in a
few seconds.
