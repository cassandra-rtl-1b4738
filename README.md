# Cassandra decode/encode hardware: one stored model, two readable precisions

Speculative decoding speeds up LLM token generation by letting a small *draft* model guess
several tokens that the full *target* model then checks in one pass. On an edge device the
draft model normally costs extra memory and training. Cassandra avoids both. Every weight
matrix and every KV-cache tensor is stored **once**, in a format split into two parts:

* **speculation data**: which values survive pruning (a bitmap), their signs, their
  exponents in compressed form, and the high bits of their mantissas;
* **verification data**: the low mantissa bits of those kept values, plus the pruned values
  in full.

Reading only the speculation data gives a pruned, mantissa-truncated copy of the model: the
draft model. Reading both parts gives back the target model. In the *Cassandra-1* scheme it
comes back bit-exact. In the *Cassandra-2* scheme the kept values come back in
shared-exponent (MX-like) form. The draft is a strict subset of the target, so no byte is
stored twice.

The catch is that this format is bit-level and variable-length, so no matrix unit can use it
directly. This RTL is the hardware that converts it at memory speed. It has three parts:

* a **decoder** that turns the stored streams back into dense BF16 tiles, for draft or
  target, in either scheme;
* an **encoder** that puts freshly computed KV-cache tiles into the format online;
* a **DMA-side top** that places 40 decoders and one encoder between a 9 MB scratchpad and
  an NPU's compute units, with the block scheduling that keeps variable-length streams
  contiguous in memory.

Everything is synthesizable SystemVerilog-2017. Each part has a self-checking testbench.

---

## 1. The stored format

### Tiles and the five streams

Data is handled in **tiles of 32 BF16 values** (`TILE`). A tile is encoded with a keep count
*k*: the *k* values of largest magnitude are kept, ties going to the lower index. The tile
then contributes a variable number of bits to each of five independent bit streams
(`cass_pkg::stream_e`):

| # | stream | read by | per tile, Cassandra-1 | per tile, Cassandra-2 |
|---|--------|---------|-----------------------|-----------------------|
| 0 | `ST_BMP` bitmap | draft, target | 32 bits, bit *i* = 1 if value *i* is kept | same |
| 1 | `ST_EXP` exponents | draft, target | one unary codeword per kept value | one 8-bit shared exponent |
| 2 | `ST_SPM` sign + mantissa high | draft, target | 4 bits per kept value: sign, mantissa[6:4] | 5 bits per kept value: sign, MX magnitude[7:4] |
| 3 | `ST_VLO` mantissa low | target | 4 bits per kept value: mantissa[3:0] | 4 bits per kept value: MX magnitude[3:0] |
| 4 | `ST_PRN` pruned values | target | 16 bits per pruned value (raw BF16) | same |

Fields are packed least significant bit first. Kept values go in index order, and tiles
follow each other with no padding. Each stream is cut into **blocks of 1024 bits (128
bytes)**, and a stream's blocks sit at consecutive addresses from a per-stream base. The
low-bit split is `TRUNC` = 4 bits.

### Cassandra-1: unary exponents

Exponents in trained LLMs are concentrated on a few values. A codebook (`NSYM` = 32 entries,
written at configuration time) lists the exponents from most to least frequent. The
exponent of rank *r* is stored as *r* zeros followed by a one: `1`, `01`, `001`, and so on.
Every codeword ends in a one, so code boundaries can be found in parallel, without any
serial parsing. An exponent that is not in the codebook cannot be encoded. The encoder then
raises its sticky `err`, and the decoder does the same for a rank beyond the table.

A target read rebuilds `{sign, codebook[rank], mant_hi, mant_lo}`, which is the original
value exactly. A draft read gives the same value with the low 4 mantissa bits cleared.

### Cassandra-2: one shared exponent per tile

The tile stores a single 8-bit shared exponent, which is the largest exponent among the
kept values. Each kept value becomes an 8-bit magnitude. The magnitude is the hidden one
followed by the 7 mantissa bits, shifted right by *(shared − own exponent)*; it is zero if
that shift is 8 or more. The top 4 bits of the magnitude and the sign are speculation data.
The low 4 bits are verification data.

To decode, the decoder counts the leading zeros *lz* of the magnitude. The new exponent is
*shared − lz*, and the mantissa is shifted left by *lz* with the hidden one dropped. A zero
magnitude gives a signed zero. A value whose *lz* reaches the shared exponent is also
flushed to signed zero. Target reads of this scheme are therefore exact only for values
that the MX rounding did not touch. That is the accuracy-for-size trade the scheme makes.

### Worked tile example (Cassandra-1, k = 2)

Take a tile where values 3 and 9 are the two largest. Their exponents are 127 (rank 0) and
128 (rank 2). The streams receive:

* bitmap: bits 3 and 9 set;
* exponents: `1` then `001`, which is bits `1,0,0,1` in stream order;
* SPM: sign and mantissa[6:4] of value 3, then of value 9;
* VLO: mantissa[3:0] of each;
* pruned: the 30 other values, 16 bits each, in index order.

---

## 2. The decoder (`cass_decoder`)

One decoder owns a buffer per stream, `cass_stream_buf`. Blocks arrive on a single
`blk_valid / blk_type / blk_data` port. Each buffer keeps whatever part of a block a tile did
not use, so the next tile continues mid-block. A buffer holds two blocks and reports its
fill `level`. The scheduler feeding it (section 4) never sends a block to a buffer holding
more than one block, so a buffer cannot overflow; an assertion checks this.

Each tile runs through a short state sequence:

1. **S_BMP**: pop the 32 bitmap bits. The prefix popcount (`cass_prefix_sum`) gives *k* and,
   for every position, its index in the kept list and in the pruned list.
2. **S_UEXP** (Cassandra-1): decode *k* unary codewords. This is the most involved part, see
   below. **S_MXE** (Cassandra-2) instead pops the 8-bit shared exponent.
3. **S_VAL**: pop *k* SPM fields and, for a target read, *k* VLO fields and 32 − *k*
   pruned values. Then, in 32 parallel lanes:
   * `cass_mant_concat` joins the high and low mantissa bits (zeros for a draft);
   * `cass_dyn_shifter` rebuilds the BF16 value: in Cassandra-1 from the sign, the codebook
     exponent (`cass_exp_lut`) and the mantissa; in Cassandra-2 by the leading-zero
     normalisation described above.
4. **S_OUT**: `cass_value_concat` scatters the kept values back to their bitmap positions.
   Each pruned position gets its stored value (target) or zero (draft). The tile is
   presented on `out_valid / out_ready` and held stable until it is taken; an assertion
   checks the hold.

A job is started with `start`, `job_mode` (scheme), `job_full` (1 = target) and
`job_ntiles`. It ends with a one-cycle `done` pulse.

### Parallel unary decoding

The exponent stream is read through a 32-bit window, cut into four 8-bit chunks. Each chunk
goes to a **parallel zero counter** (`cass_zero_counter`). For every bit position, the
counter gives the length of the codeword that ends there: the zeros since the previous one,
plus one. At a zero bit it gives 0. It also gives the number of ones in the chunk, its last
bit, and the trailing zeros left open at its end. For example, the chunk bits 0 0 1 1 0
(after a completed codeword) give 0 0 3 1 0.

A codeword may start in one chunk and end in a later one. `cass_unary_decoder` fixes this
the way the original algorithm describes. It carries each chunk's trailing zeros into the
first codeword of the next chunk, running through all four chunks in one cycle. Then a
**zero eliminator** compacts the non-zero counts into an ordered list of ranks, with the
bit position where each codeword ends.

The decoder takes up to the *k* codewords it still needs, pops exactly the bits they used,
and loops in S_UEXP while more are needed. A tile therefore takes one cycle per 32 bits of
exponent codes. A codeword not closed inside the window simply waits for the next cycle.

The zero counter has an explicit count input (`cin`) for zeros carried in from before the
chunk. The decoder drives it with 0 and adds the carry itself, which keeps the chunk
counters identical and independent.

---

## 3. The encoder (`cass_encoder`)

Weights are formatted offline. The encoder exists for the KV cache, whose new entries
appear every generated token. It takes one tile and its keep count *k* per cycle and runs a
chain of units:

| unit | job |
|------|-----|
| input register | holds the tile while the merge buffer is busy |
| `cass_bitonic_sorter` | full bitonic network sorting 32 keys `{magnitude, ~index}` in descending order, so ties favour the lower index |
| `cass_format_splitter` | the first *k* sorted keys set the bitmap; prefix sums compact the tile into the kept and pruned lists |
| `cass_exp_sel` | Cassandra-1: looks each kept exponent up in the code table (CAM search), giving the code length rank+1, or a miss. Cassandra-2: the shared exponent is the largest kept exponent, and each magnitude is shifted right. Splits each kept value into its SPM and VLO fields |
| `cass_addr_gen` | lays the fields of each stream out as bit strings with lengths, using running sums of the field lengths; keeps the next block address of each stream |
| `cass_merge_buffer` | appends each stream's bits to a two-block accumulator; writes any full 1024-bit block with its type and address, lowest stream first, one per cycle |

A tile is accepted only while no full block is waiting, so an accumulator cannot overflow.
After the last tile, `flush` writes out the partly filled blocks, padded with zeros. A flush
that arrives while a tile is still in the input register waits for that tile. `blk_cnt`
then gives the number of blocks per stream, which a later decode command needs.

---

## 4. Keeping streams contiguous: the block scheduler (`cass_block_sched`)

The five streams of a tensor grow at different, data-dependent rates. Packing each stream
densely into its own run of 128-byte blocks keeps memory reads contiguous and wastes no
space. The price is that the decoder may receive more of one stream than it can use yet.
The scheduler handles this as the original memory controller does:

* it keeps, per stream, the address of the next block and the number of blocks left;
* each cycle it offers at most one block read, visiting the streams round robin;
* a stream whose decoder buffer holds **more than 128 bytes** is *skipped*: its address
  stays put, and a per-stream skip counter (`skip_cnt`) counts the skip;
* a stream read in the previous cycle is not read again, because the buffer level seen
  lags the read by two cycles;
* a draft job reads only streams 0 to 2, so verification data is never fetched.

With the 128-byte threshold and a 256-byte buffer, a decoder buffer can never overflow.

---

## 5. The top: a Cassandra-aware NPU DMA (`cassandra_top`)

The top models the DMA of a small NPU: the side between main memory, the on-chip
scratchpad and the compute units.

* **Scratchpad** (`cass_spad`): 73,728 words of 1024 bits, which is 9 MB. It has one write
  port (`mm_wr_*`), through which main memory brings in superblocks of formatted blocks. It
  has 41 read ports with one cycle of latency: one per decode lane and one for standard
  data.
* **40 decode lanes**, each a block scheduler and a decoder. A command on `cmd_*` names:
  * the lane;
  * the scheme and draft or target;
  * the tile count;
  * per stream, the base address and block count.

  Decoded tiles leave on `out_*[lane]` towards the matrix unit, each lane with its own
  valid/ready. Lanes run independently.
* **Region table** (`cass_region_table`): the NPU has no virtual memory, so standard data
  and Cassandra data live in separate physical ranges. The table holds four
  `[base, limit)` ranges, each marked Cassandra or standard, written through `rg_wr_*`.
  It guards both read paths:
  * a decode command is refused with `cmd_err` unless all five base addresses lie in
    Cassandra ranges;
  * a command to a busy lane is not accepted (`cmd_ready` low);
  * the standard read port `raw_*` bypasses the decoders, and `raw_err` refuses it for an
    address inside a Cassandra range.
* **Encoder**: one encoder, whose blocks leave on `enc_out_*` with their main-memory block
  addresses.
* The codebook is written once through `cb_wr_*` into every decoder and the encoder.

### Parameters

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| `NDEC` | 40 | decode lanes | from the source design (sized to a 1024 B/cycle scratchpad) |
| `WORDS` | 73728 | scratchpad words of 128 B, which is 9 MB | from the source design |
| `BLK` | 1024 | block size in bits (128 bytes), also the skip threshold | from the source design |
| `TRUNC` | 4 | mantissa low bits moved to the verification data | from the source design's default configuration |
| `TILE` | 32 | values per tile | this design's choice |
| `NSYM` | 32 | unary codebook entries | this design's choice |
| `NREG` | 4 | address ranges in the region table | this design's choice |
| `CHUNK`, `EXPW` | 8, 32 | zero-counter chunk; unary window per cycle | chunk from the source design; window is this design's |

---

## 6. How far to trust it, and where it departs from the original description

Followed closely:

* the split into speculation and verification data;
* unary codes of the form zeros-then-one;
* 8-bit zero-counter chunks with a carry between chunks and zero elimination;
* the Cassandra-2 normalise-and-subtract path;
* bitmap de-sparsification;
* the encoder chain of sorter, splitter, exponent selection, address generation and merge
  buffer;
* the 128-byte skip rule with per-type skip counts and next addresses;
* encoder and decoders inside the DMA, with separated physical address ranges;
* 40 decoders and a 9 MB scratchpad.

This design's own choices, since the description does not give them:

* The tile size of 32 and the bit layout of every stream.
* The exact Cassandra-2 element format: the width of the magnitude, which exponent is
  shared, and flushing to zero on underflow.
* The codebook size and the error on a missing exponent.
* All handshakes, the command format, the region-table form, round-robin scheduling and the
  one-read-per-cycle limit.
* The merge buffer's flush. The source description gives codes `0`, `10`, `110` in one
  encoder drawing, but `1`, `01`, `001` in its text and in its coding example. The text's
  form is used throughout.
* The zero counter takes a zero count from the previous chunk instead of its last bit; the
  information carried is equivalent.
* The zero counter outputs the code length (zeros + 1), as the original drawing's worked
  example does. The original pseudo-code outputs the zero count. The decoder subtracts one
  before the codebook lookup, so both give the same ranks.

Known gaps:

* **Decoder throughput.** A lane produces one tile in about five cycles, plus one cycle per
  extra 32 bits of unary codes. At the default 60 % keep rate it consumes roughly
  11 bytes of stored data per cycle. Forty lanes then draw about 450 B/cycle, less than
  the 1024 B/cycle scratchpad they are sized for. Pipelining the state sequence, so that
  one tile is in S_VAL while the next is in S_BMP/S_UEXP, would close most of that gap.
  This was not done.
* **Not built:**
  * the compute units (matrix array, vector unit and their SRAMs);
  * main memory;
  * the alternative GPU integration, with decoders beside L2 slices and Cassandra flags in
    page-table bits;
  * process-specific SRAM macros.

  The scratchpad is a plain array, and tools map it to memory cells.
* **Pruning policy.** Which values to keep is an input (*k* per tile, chosen by magnitude).
  Weight pruning by activation-aware scores is done offline in software.
* **Command length.** A command decodes at most 65,535 tiles (2 M values). Larger tensors
  need several commands.

## 7. Verifying and modifying it

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/cass_ref_pkg.sv` is an independent
behavioural model of the format: top-k selection, both encodings, block cutting and the
expected draft and target values. The encoder, decoder and top testbenches compare against
it.

| testbench | what it exercises |
|-----------|-------------------|
| `tb_cass_zero_counter` | exhaustive 8-bit chunks with carries; the worked example above |
| `tb_cass_unary_decoder` | random code streams across chunk borders, unclosed codes |
| `tb_cass_dyn_shifter`, `tb_cass_mant_concat`, `tb_cass_exp_lut` | both schemes, draft and target, underflow, misses |
| `tb_cass_prefix_sum`, `tb_cass_value_concat`, `tb_cass_bitonic_sorter`, `tb_cass_format_splitter`, `tb_cass_exp_sel`, `tb_cass_addr_gen` | random tiles against direct models |
| `tb_cass_stream_buf`, `tb_cass_merge_buffer` | bit-exact stream buffering; the merge buffer also under output back-pressure and flush |
| `tb_cass_block_sched` | read legality, work conservation, skip counts, draft-only streams |
| `tb_cass_region_table`, `tb_cass_spad` | range edges; read-before-write |
| `tb_cass_decoder`, `tb_cass_encoder` | many tiles of random *k* in both schemes, blocks against the model, stalls, error flags |
| `tb_cassandra_top` | the top end to end, with 5 decode lanes and every other parameter at its default |

`tb_cassandra_top` overrides only `NDEC` (5 lanes instead of 40). It first encodes 24 tiles per scheme through the encoder and checks every
block. It writes the blocks into the scratchpad, then runs draft and target decodes of both
schemes on four lanes at once under random output stalls, and checks every tile. It also
exercises:

* a busy-lane refusal;
* a command into a standard range;
* a standard-data bypass read, and a bypass read of a Cassandra address;
* lane reuse after a job.

It counts each mechanism and fails if one never happened: encoder stalls, draft and target
tiles, both schemes, parallel lanes, output stalls, scheduler skips, both refusals,
bypass reads and done pulses.

To simulate one with plain Verilator (5.x):

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/cass_pkg.sv tb/cass_ref_pkg.sv tb/tb_cass_decoder.sv --top-module tb_cass_decoder
./obj_dir/Vtb_cass_decoder +verilator+rand+reset+2
```

Add `-CFLAGS -O0` for faster builds. The largest size simulated is the full default
configuration (40 lanes, 9 MB scratchpad): the same testbench with `NDEC` set to 40 and the
lane numbers 0, 1, 17 and 39 for the four jobs and 5 for the refused command passed all its
checks. Built with `-CFLAGS -O0` it needs about 2 minutes and runs in under a second. With
Verilator's default C++ optimisation the 40-lane build takes over 10 minutes, which is why the
testbench defaults to 5 lanes. The lanes are identical and independent, so the reduced run
exercises the same logic.

To change the format, edit the widths in `rtl/cass_pkg.sv` (`TILE_DEF`, `TRUNC_DEF`,
`NSYM_DEF`, `BLK_DEF`) and the matching constants at the top of `tb/cass_ref_pkg.sv`.
