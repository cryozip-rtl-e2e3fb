# CryoZip syndrome compressor — SystemVerilog RTL

A fault-tolerant quantum computer measures its error-correction syndromes every microsecond or
so, inside a dilution refrigerator. The decoder that interprets them usually sits at room
temperature, and every syndrome bit that crosses the 4 K to room-temperature boundary costs
power from a cooling budget of about a watt. Syndromes are sparse, though: even when a local
predecoder at 4 K gives up on a block and must ship it upstairs, most bits are zero.

CryoZip compresses a block of `d` syndrome rounds (one decoding window of a distance-`d` code)
in two steps:

1. **Sparse Distance (SD).** The block is read as one long bit string, round after round. Each
   active syndrome (a 1) is replaced by the number of zeros since the previous one. Long runs of
   zeros are cut at a maximum distance.
2. **Huffman encoding (HEnc).** Each distance is replaced by a variable-length prefix code read
   from a table. The table is built offline from distance statistics and loaded at boot.

The hardware has to keep up with a new round every 1 µs while using only a small part of that
time. It therefore does not look at a whole round at once. A small window slides over the
round, a few dozen bits per clock cycle.

This RTL implements that compressor, following the CryoZip design (Tao et al., "CryoZip: An
Efficient Cryogenic Compressor for Quantum Error Correction Syndromes"). Where that description
stops, this implementation makes its own choices. Each one is marked below as *own choice*.

```
 round_bits (N_SYN)                                      fwd_en (predecoder)
      |                                                        |
      v                                                        v
 +-----------+  up to WINDOW+1   +-----------+  1/cycle  +-----------+  code,len  +------------+
 | sd_stage  |--- entries/cycle->| dist_fifo |---------->| huff_enc  |----------->| bit_packer |--> out_data
 | window +  |<-- free count ----|           |<--ready---| code LUT  |<--ready----| word buffer|    (OUT_W words,
 | zero count|                   +-----------+           | len  LUT  |            +------------+     valid/ready)
 +-----------+                                           +-----------+
                                                               ^
                                                  cfg_we/cfg_sym/cfg_code/cfg_len (boot)
```

## The distance code

Take a block of `D` rounds of `N_SYN` bits each. Concatenate the rounds, bit 0 of round 0
first, into one string of `D*N_SYN` bits. Keep a count `c` of zeros, starting at 0, and walk the
string:

| bit | condition                 | emitted symbol      | new `c` |
|-----|---------------------------|---------------------|---------|
| 1   | any                       | `c`                 | 0       |
| 0   | `c == MAX_DISTANCE`       | `MAX_DISTANCE + 1`  | 0       |
| 0   | otherwise                 | none                | `c + 1` |

So symbols run from 0 to `MAX_DISTANCE + 1`. A symbol `s <= MAX_DISTANCE` means "`s` zeros, then a
one". The symbol `MAX_DISTANCE + 1` means "`MAX_DISTANCE + 1` zeros and no one". Decoding is
direct: expand each symbol, then pad with zeros to `D*N_SYN` bits.

Examples, with `MAX_DISTANCE = 8`:

* `0 1 0 0 0 1` gives `1, 3`.
* Nine zeros, then `0 1`, gives `9, 1`. The ninth zero is where the run saturates.

The count runs on across round boundaries, so a distance can span two rounds. This is the
"carry-over" between rounds. The zero count is the only state that passes from one round to
the next.

With the default `MAX_DISTANCE = 510` there are exactly 512 symbols. That gives a 9-bit symbol
and 512-entry tables.

*Own choice:* zeros after the last emitted symbol of a block are not coded. The receiver knows
the block length, so it restores them as padding. Because of this, an all-zero block still
produces `floor(D*N_SYN / (MAX_DISTANCE+1))` saturation symbols, and a block never codes to an
empty stream at the default size.

## Sliding window and timing

The published design targets a 1 µs round and allows 100 ns of it for compression. It runs at
100 MHz (10 ns), so a round must be scanned in 10 cycles. The published description does not
give the window size for CryoZip. Here it is derived: `WINDOW = ceil(N_SYN / 10) = 44` bits for
the default 440-bit round (*own choice* of round size, see Parameters).

`sd_stage` loads a round into a shift register and shifts it right by `WINDOW` bits per cycle.
In each cycle a chain of `WINDOW` counter steps turns the window's bits into up to `WINDOW`
symbols. These are packed, in stream order, into the low lanes of a registered burst `out_n` /
`out_entries`. After the last window of round `D` the stage adds one end-of-block entry and
clears the counter.

If `N_SYN` is not a multiple of `WINDOW`, the last window of a round is partial. Its unused bit
positions are skipped; they are not filled with bits of the next round.

Cycle by cycle, with a round taken at rising edge `t`:

* windows are scanned at edges `t+1 … t+NWIN`, where `NWIN = ceil(N_SYN/WINDOW)` (10 by default);
* the symbols of each window are in the FIFO one edge after that window is scanned;
* HEnc looks a symbol up one cycle after popping it;
* the packer takes the code in the following cycle.

`round_ready` is high again during the last window, so rounds can follow each other every `NWIN`
cycles. That is far faster than the 1 µs (100-cycle) arrival rate.

### Throughput limit: the one-symbol-per-cycle encoder

SD can produce up to 44 symbols in a cycle. The Huffman encoder and the packer take one per cycle.
The FIFO between them (128 entries by default) absorbs the bursts. SD scans a window only if the
FIFO can take a full burst, counting the burst still in its output register. Otherwise SD holds
the window and raises `sd_stall`.

The sustained limit is therefore about 100 symbols per 1 µs round, roughly one active syndrome
in four bits. Denser rounds are still compressed correctly. They take longer, and
`round_ready` holds the source back. Realistic error rates stay far below that density.

## Huffman tables

`huff_enc` contains two `lut_sram` instances indexed by the symbol:

* a **code table**, `CODE_W` bits wide (16 by default);
* a **length table**, `clog2(CODE_W+1)` bits wide (5).

A code of length `L` is stored right-aligned in bits `L-1..0` and sent starting with bit `L-1`.
The length clips the code: bits at or above `L` are forced to zero. Whatever else sits in a
table entry therefore does not matter. An end-of-block entry passes through the stage with length
0.

Loading: write each symbol's entry with `cfg_we`, `cfg_sym`, `cfg_code` and `cfg_len` (one per
cycle, 512 cycles in all) before the first round. The published design scans the codebook in at
boot time and keeps it fixed while it runs. The plain write port used here is an *own choice*.

**Building a codebook.** Collect the distance symbols of many simulated blocks for the code and
error rate of interest. Build a Huffman code over the 512 symbols and give every symbol a code,
including those never seen. Limit code lengths to `CODE_W` bits, for instance with
package-merge, or by flattening the tail until the Kraft sum `Σ 2^-L(s)` is at most 1. Then
assign canonical codes.

The testbenches use a fixed canonical code in place of a measured one: length 4 for symbols
0–7, 8 for 8–71, 10 for 72–255 and 13 for 256–511. Its Kraft sum is 0.96. Codes are assigned in
symbol order, each one the previous code plus one, shifted left whenever the length grows.

## Bit packer and output format

`bit_packer` appends codes MSB-first to an accumulator. Every full `OUT_W`-bit word (64 by
default) goes into a buffer of `BUF_WORDS` words (256 by default, 16384 bits). As published, the
output is valid only after the block's last round: when the end-of-block entry arrives, the
packer flushes the last partial word, left-aligned and zero-padded. It then samples `fwd_en`:

* `fwd_en = 1`: the predecoder could not resolve this block. The words are sent on
  `out_valid/out_data/out_ready`, with `out_last` on the final word. `out_bits` (the code
  length in bits) and `out_overflow` are valid with every word.
* `fwd_en = 0`: the predecoder has corrected the block locally. The block is discarded and
  `blk_dropped` pulses.

Stream bit `k` of a block is bit `OUT_W-1-(k mod OUT_W)` of word `k / OUT_W`.

*Own choices:* the buffer size and what happens when it is exceeded. A block that codes to more
than `BUF_WORDS*OUT_W` bits keeps its first `BUF_WORDS` words. It is sent with `out_overflow`
set, and `out_bits` gives the full length. The default buffer holds 1.77 times the raw block
(9240 bits). An overflow therefore means the block was denser than raw, and a system would
then send the raw syndromes instead. That raw fallback path is not part of this RTL.

While it sends, the packer takes no codes. The FIFO and then SD wait behind it.

## Top-level interface (`cryozip_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock (100 MHz intended), asynchronous active-low reset |
| `cfg_we`, `cfg_sym`, `cfg_code`, `cfg_len` | in | 1, 9, `CODE_W`, `clog2(CODE_W+1)` | codebook write |
| `round_valid`, `round_ready` | in/out | 1 | round handshake; the round is taken on a rising edge with both high |
| `round_bits` | in | `N_SYN` | one syndrome round, bit 0 first |
| `fwd_en` | in | 1 | predecoder decision for the block whose end reaches the packer |
| `out_valid`, `out_ready`, `out_last` | out/in/out | 1 | output word handshake, last word of block |
| `out_data` | out | `OUT_W` | packed code, MSB first |
| `out_bits`, `out_overflow` | out | 32, 1 | code length of the block in bits, buffer overflow |
| `sd_busy`, `sd_window`, `sd_stall` | out | 1 | SD scanning a round; a window scanned; a window held |
| `blk_sent`, `blk_dropped` | out | 1 | one-cycle pulses per block |
| `fifo_level` | out | `clog2(FIFO_DEPTH+1)` | FIFO occupancy |

`fwd_en` is sampled in the cycle the packer takes the end-of-block entry. A system should hold
it at the predecoder's verdict for that block until `blk_sent` or `blk_dropped` pulses.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `D` | 21 | code distance of the published design-space exploration |
| `N_SYN` | 440 | *own choice*: `d²−1` stabilizer measurements of a distance-21 surface code |
| `WINDOW` | 44 | *own choice*, from the published 10-cycle (100 ns at 100 MHz) budget: `ceil(440/10)` |
| `MAX_DISTANCE` | 510 | published (symbols 0..511) |
| `CODE_W` | 16 | *own choice*; the codebook must be length-limited to it |
| `OUT_W` | 64 | *own choice* |
| `FIFO_DEPTH` | 128 | *own choice*, a power of two, at least `WINDOW+1` |
| `BUF_WORDS` | 256 | *own choice* |

Defaults live in `cryozip_pkg`. The symbol width is fixed at 9 bits (`SYM_W`), so
`MAX_DISTANCE` may be lowered but not raised above 510 without widening `SYM_W`.

Block shape (`D`, `N_SYN`) is fixed when the design is elaborated. To compress a different code,
build with its numbers. For a distance-`d` surface code use `D=d`, `N_SYN=d²−1` and
`WINDOW=ceil(N_SYN/10)`. A bivariate-bicycle code `[[n,k,d]]` has `n` checks per round. A
triangular 6.6.6 colour code has `(3d²−3)/4`.

After coarse synthesis with the defaults, the compressor has about 1.6 k word-level cells and
1080 flip-flops. Its memories hold 28,416 bits: the two tables (512 × 21), the FIFO (128 × 10)
and the output buffer (256 × 64). The SD window logic is the largest part of the logic. It is a
44-step chain of counter updates plus a 45-lane compaction network.

## Compression on code-shaped blocks

`tb_cryozip_codes` builds the compressor once per block shape: surface code `d` = 5…21,
bivariate-bicycle `[[72,12,6]]` … `[[360,12,24]]`, and colour code `d` = 5…21. Each build gets
`WINDOW = ceil(N_SYN/10)`. The bench sends 40 blocks at each of two densities of independent
random active bits. Every block comes back bit-exact. Some of the ratios it prints, using the
fixed test codebook:

| block | 0.5 % active | 0.05 % active |
|-------|--------------|---------------|
| surface d=21 (21 × 440) | 18.7× | 37.2× |
| BB [[360,12,24]] (24 × 360) | 18.5× | 37.0× |
| colour d=21 (21 × 330) | 18.5× | 36.6× |

With sparse blocks, most symbols are long distances. This codebook gives every such distance
10–13 bits, and its shortest code is 4 bits, so the ratio is bounded by the codebook. A codebook
trained on real detector statistics moves those limits. Real syndromes are also clustered,
not independent.

## Departures and open points

* **Maximum distance.** The published text gives `max_distance = 510` with symbols 0..511 in
  one place, and "`max_distance = 512`" as the chosen design point in another. This RTL uses
  510, which gives exactly 512 symbols. That reads "512" as the size of the symbol space.
* **Window size, round size, code width, FIFO and buffer sizes** are not given in the published
  description. They are chosen here, as listed under Parameters.
* **Carry between rounds.** The published schedule shows "leftover data" of round *i* processed
  together with round *i+1*. Here the leftover is the zero count. A partial last window is
  not merged with the next round's first bits. This changes when symbols appear, but not which
  symbols appear.
* **End of block.** Trailing zeros are not coded, and an explicit marker travels through the
  FIFO. Both are *own choices*.
* **Not included:** the predecoder, the qubit array, the cryogenic transmitter and link, the
  offline codebook generator, and the 22 nm FDSOI SRAM macros. Each is either outside the
  compressor or not described as logic. The tables are plain memory arrays that a flow can
  map to SRAM.
* **Not verified:** compression ratios against the published figures. Those depend on
  circuit-level noise simulation and a trained codebook, neither of which is part of this
  RTL. The testbenches check bit-exact behaviour against an independent reference model and
  decode every stream back to the original syndromes. `tb_cryozip_codes` also reports the
  ratio on synthetic i.i.d. syndromes.

## Files

`rtl/`:

* `cryozip_pkg.sv` — defaults, symbol type, FIFO entry struct
* `sd_stage.sv` — Sparse Distance with sliding window
* `dist_fifo.sv` — multi-lane-write FIFO
* `lut_sram.sv` — table memory
* `huff_enc.sv` — two tables, clipping
* `bit_packer.sv` — word packing, buffering, forward/drop
* `cryozip_top.sv` — the pipeline

`tb/`:

* `cryozip_tb_pkg.sv` — reference SD encoder/decoder, codebook, Huffman encoder/decoder
* `tb_sd_stage.sv`, `tb_dist_fifo.sv`, `tb_lut_sram.sv`, `tb_huff_enc.sv`, `tb_bit_packer.sv` —
  one self-checking bench per block
* `tb_cryozip_top.sv` — the end-to-end bench at a small size (3 × 24-bit rounds, 5-bit window,
  `MAX_DISTANCE = 8`). It drives every mechanism: stalls, saturation, distances across rounds,
  partial windows, overflow, dropped blocks, back-pressure. It also checks the `NWIN`-cycle
  round time.
* `tb_cryozip_full.sv` — the same test with the top at its default parameters. The shared body
  is in `tb_cryozip_body.svh`.
* `tb_cryozip_codes.sv` (with `cz_code_run.sv`) — compresses blocks shaped like the surface,
  colour and bivariate-bicycle codes, checks them and prints compression ratios

Every bench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps --top-module tb_cryozip_full \
    -y rtl -y tb +libext+.sv -Itb rtl/cryozip_pkg.sv tb/cryozip_tb_pkg.sv tb/tb_cryozip_full.sv
./obj_dir/Vtb_cryozip_full
```

Replace the top module and file for any other bench. The benches use two-state simulation. They
drive and reset everything they read, except the table and buffer contents, which are always
written before they are read. Random stimuli come from `$urandom`; use `+verilator+seed+N` to
change the seed. The full-size bench runs in a few seconds.
