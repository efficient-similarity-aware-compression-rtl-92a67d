# SimCom: similarity-aware compression of image blocks on the way to NVM

Non-volatile main memories (PCM and similar) pay for every bit they write,
in energy, latency and wear. Image-processing programs write a lot of bitmap
data, and inside one 64-byte cache block of a bitmap, neighbouring pixels
are usually almost the same colour. SimCom uses this. It sits in the memory
module controller. For a block the program has marked approximable, it
stores only the pixels that differ noticeably from their predecessor. Each
run of "close enough" pixels is stored as one *base* pixel plus a *run*
count. When the block is read back, each base is repeated run+1 times.

Two things make this harder than it sounds:

* The memory does not know the pixel format. A block may hold 1, 3 or 4
  channels per pixel, of 8 or 16 bits each. So the block is compressed in all
  six formats at once, and the format whose pixels look most alike is kept.
* "Close enough" must be tunable. Each approximable memory region carries an
  *approximation factor* (AF), held in a small quality table.

This repository holds synthesizable SystemVerilog for the SimCom datapath:
the quality table, the six compression engines with their processing units,
the mode selector, the approximate decompressor, and a top level that joins
them into write and read paths. It also holds self-checking testbenches for
every block.

## The similarity test (Word-PU)

A *word* is one pixel as the mode sees it: CC channels of 1 or 2 bytes.
Word p is similar to the current base q when

    max_i |p[i] - q[i]|  /  maxValue  <=  AF,      maxValue = 255 or 65535

`simcom_word_pu` evaluates this without a divider. AF is a 17-bit unsigned
fixed-point number with 16 fraction bits. AF = 1.0 is `17'h10000`, and
0.05 is 3277. The test becomes

    max_diff * 2^16  <=  AF * maxValue

AF = 0 therefore means "identical only". 16-bit channels are little-endian
within the block.

## Compression modes and the compressed block

| mode | number | CC x bytes | word | words N | remainder R |
|------|--------|------------|------|---------|-------------|
| 1C1B | 0 | 1 x 1 | 1 B | 64 | 0 |
| 3C1B | 1 | 3 x 1 | 3 B | 21 | 1 B |
| 4C1B | 2 | 4 x 1 | 4 B | 16 | 0 |
| 1C2B | 3 | 1 x 2 | 2 B | 32 | 0 |
| 3C2B | 4 | 3 x 2 | 6 B | 10 | 4 B |
| 4C2B | 5 | 4 x 2 | 8 B | 8 | 0 |

A block is split uniformly into N words plus R leftover bytes.

### Engine behaviour

Each `simcom_mode_engine` walks the words, one per clock:

* word 0 is the first base, with run 0;
* a similar word increments the run;
* a dissimilar word closes the pair (base, run) and becomes the new base,
  with run 0.

The leftover bytes are handled by the *Remainder-PU*
(`simcom_remainder_pu`). It compares the remainder with the first R bytes of
the last base, using the same test with R/bytes-per-channel channels. If
they are similar, the remainder is dropped, and the decompressor refills it
from the last base. Otherwise the remainder bytes are appended and the
*remainder bit* is set. That bit is the MSB of the last run byte.

### Compressed block layout

    byte 0          metadata {mode[2:0], nbases[4:0]}
    then per pair   W base bytes, 1 run byte {remainder_bit, run[6:0]}
    then            R remainder bytes, only if the remainder bit is set

The block is *compressible* if this comes to fewer than 64 bytes. Otherwise
the raw block is stored, and the compressible bit stays clear. A 3C1B block
of one flat colour takes 1 + 3 + 1 = 5 bytes. A block of noise takes far more
than 64 bytes and is stored raw.

The format matches the scheme's own 16-byte illustration, which is replayed
in the mode-engine testbench. There, 4-byte pixels are cut into five 3-byte
words and one leftover byte. All five words are similar, but the leftover
byte is not. The result is metadata, one base, its run byte with the
remainder bit set, and the leftover byte: 6 bytes, 10 less than the input.

Each engine also adds up the max channel differences of words 1..N-1 against
the base each word was compared with (`diff_sum`).

## Picking the mode (Adaptive Approximate Compression Logic)

`simcom_adaptive_compressor` runs the six engines side by side. When all six
have finished, `simcom_mode_selector` takes the mode with the smallest mean
normalized difference:

    mean_m = diff_sum_m / (maxValue_m * (N_m - 1))

The means are compared exactly, by cross-multiplying two 32x64-bit
products, so there is no divider and no rounding. A tie goes to the smaller
compressed size, then to the lower mode number.

The point of this rule: the mode that matches the real pixel format sees the
smallest channel differences. A wrong mode compares, say, a red byte with a
green one.

The winning mode's block, size and compressible flag are registered. Its
number is also in the metadata byte, so a reader needs nothing else.

## Decompression

`simcom_decompressor` reads the metadata byte and derives W, N and R from the
mode. It then writes one word per clock: the current base is repeated until
its run is used up, then it steps to the next pair. Finally it fills the
remainder, either from the stored bytes (remainder bit set) or from the last
base.

The decompressed block is the approximation the write produced. Words that
were within AF of their base come back as the base.

## Write and read paths (`simcom_top`)

### Write path

A 64-byte write arrives with the approximable bit that the caches keep per
block. The address is looked up in the quality table (`simcom_quality_table`:
16 entries of {valid, start, end inclusive, AF}, lowest index wins).

* **Approximable and inside a region:** the adaptive compressor runs with
  that region's AF.
* **Otherwise:** the block goes out on the `pc_*` port to a precise
  compressor. This covers approximable data outside every region.

The NVM write carries the data (compressed if it is smaller than 64 bytes,
otherwise raw), its size, the compressible bit and the approximable bit.
The NVM stores the two bits as per-block metadata.

### Read path

A block read from the NVM returns with its two bits:

| compressible | approximable | action |
|---|---|---|
| 0 | - | bypass: data returned as read |
| 1 | 1 | approximate decompressor |
| 1 | 0 | sent out on the `pd_*` port to the precise decompressor |

### Handshakes and timing

Every port is a valid/ready pair. A raised valid holds its payload until
ready, and assertions in `simcom_top` check this. Each path has one access in
flight; its ready is low while it is busy.

Latencies, counted in clock edges after the edge that accepts the access:

| event | latency |
|---|---|
| approximable write, `nvm_wr_valid` rises | 66 (65 for the compressor) |
| read bypass, response | 0 (valid in the cycle right after acceptance) |
| approximate read, response | N + 2 (N = words of the stored mode) |

The precise paths take as long as the external units take.

## How far it can be trusted

Each block has a self-checking testbench in `tb/`. All of them compare
against `simcom_ref_pkg`, a separate reference model written as plain loops
over byte arrays.

* **Compressor:** blocks in all six formats (with noise and edges), random
  blocks and edge cases are checked byte for byte.
* **Mode choice:** the chosen mode is checked.
* **Decompressor:** its output is checked.
* **Timing:** every latency above is checked.
* **End to end:** `tb_simcom_top` runs the top at its default parameters
  with an NVM model and with back-pressure. It counts each mechanism and
  fails if one never happens:
  * approximate compressed and raw writes
  * every mode chosen
  * a stored remainder
  * quality-table misses
  * precise compressed and raw writes
  * bypass, approximate and precise reads
  * write and read stalls

Each testbench was also run against a copy of its block with one deliberate
bug, and each copy failed.

`tb_simcom_workload` streams synthetic raster images through the compressor
and decompressor, one per bitmap format: (1,8), (3,8), (4,8), (1,16),
(2,16), (3,16) and (4,16), written as (channels, bits per channel). The
images have slowly drifting colour, small noise and an edge every 16 to 80
pixels. Each block is compressed with AF = 0.05.

For each format the testbench checks three things:

* every decompressed channel is within AF x maxValue of the original;
* the format's own mode is chosen for at least one of its blocks;
* its blocks need fewer bytes than raw ones.

It prints the share of blocks each mode took. A typical run:

    format   1C1B 3C1B 4C1B 1C2B 3C2B 4C2B incomp  avg bytes
    (1,8)    85.4  0.0  0.0 12.5  2.1  0.0  0.0     5.6
    (3,8)     0.0 70.8  0.0  0.0 29.2  0.0  0.0     8.2
    (4,8)     0.0  0.0 47.9  9.4  0.0 42.7  0.0     9.2
    (1,16)    0.0  0.0  0.0 95.8  3.1  1.0  0.0     6.0
    (2,16)    0.0  0.0  0.0 12.5  0.0 87.5  0.0    13.7
    (3,16)    0.0  0.0  0.0  0.0 99.0  0.0  1.0    10.0
    (4,16)    0.0  0.0  0.0  0.0  0.0 100.0  0.0   11.0

A wrong mode can also win. For example, 4C2B can take 4 x 8-bit data when
two 8-bit channels that change together look like one smooth 16-bit
channel. The stored block then stays within the AF bound, but the bound
applies to the word layout of the mode that was chosen, not to the image's
real channels. Real photographs, with their texture, will give different
shares from these synthetic images.

## Where this implementation makes its own choices

* **AF encoding:** Q1.16 per region. The quality-table size (16), the
  inclusive end address and the lowest-index priority are also choices of
  this design.
* **"Similar" means normDiff <= AF.** The published text says both "no
  larger than" and "smaller than"; this design uses "no larger than".
* **Runs start at 0.** A base followed by k similar words stores run = k.
* **Run byte:** one byte for every mode, with 7 bits of run and the
  remainder bit on top. The longest run, 63, fits.
* **Mode selection denominator and tie-break:** the denominator uses N-1
  (the number of words compared), and ties go to the lower mode number.
* **Timing and interfaces:** one word per cycle, and every interface and
  handshake. Nothing about timing is published.
* **Quality-table miss:** an approximable write that misses the quality
  table is treated as precise.
* **External precise compression:** precise compression and decompression
  (FPC in the original evaluation) are not part of this RTL. They are the
  `pc_*` and `pd_*` ports. The testbench stands in a trivial model that only
  compresses all-zero blocks.
* **Not included:** the NVM itself and any bit-write-reduction circuit at
  the array, such as Flip-N-Write.
* **2-channel 16-bit images:** there is no 2C2B mode. The published
  evaluation lists a (2,16) bitmap format, but it has only the six modes
  above. Such images are compressed by the 16-bit modes.

## Files

| file | block |
|---|---|
| `rtl/simcom_pkg.sv` | shared constants, types, per-mode helper functions |
| `rtl/simcom_word_pu.sv` | Word-PU similarity test |
| `rtl/simcom_remainder_pu.sv` | Remainder-PU |
| `rtl/simcom_mode_engine.sv` | one compression mode (parameters CC, BPB) |
| `rtl/simcom_mode_selector.sv` | minimal-mean mode choice |
| `rtl/simcom_adaptive_compressor.sv` | six engines + selector |
| `rtl/simcom_decompressor.sv` | approximate decompressor |
| `rtl/simcom_quality_table.sv` | approximable regions and their AF |
| `rtl/simcom_top.sv` | write and read paths |
| `tb/simcom_ref_pkg.sv` | reference model and block generators |
| `tb/tb_simcom_*.sv` | one testbench per block |
| `tb/tb_simcom_workload.sv` | image workloads in all bitmap formats |

## Simulating

The testbenches use only `$urandom`. Each prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, from the repository
root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/simcom_pkg.sv tb/simcom_ref_pkg.sv tb/tb_simcom_top.sv \
        --top-module tb_simcom_top
    ./obj_dir/Vtb_simcom_top

Replace `tb_simcom_top` with any other testbench name. The end-to-end run
(240 writes and reads) takes a few seconds.

`BLOCK_BYTES` is a parameter throughout, but only 64 (the published block
size) has been simulated. A larger block would also need a wider nbases
field and a wider size.
