# Bancroft: reference-based genome compression on an FPGA card with HBM

Sequencing reads of one species are nearly identical to that species'
reference genome. So a read can be stored as a list of pointers into the
reference, and only the parts that match nothing need to be stored verbatim.
If the card that consumes the reads (an alignment filter, for example) holds
the reference in its own high-bandwidth memory, the host only has to send
the short compressed stream over PCIe. The card expands it at memory speed
and hands plain 2-bit bases to a user kernel. Compression works the other
way round. The card hashes every k-mer of the input and checks a
probabilistic table, so the host only has to search the reference for the
few k-mers that are likely to occur in it.

This repository holds synthesizable SystemVerilog for the on-card part:

- a **compressor** front end;
- a **decompressor**;
- an example user kernel, a **shifted-Hamming-distance (SHD) pre-alignment filter**;
- a top level that puts three decompressors, one compressor and two filter
  lanes on 17 HBM pseudo channels.

The host software, the PCIe DMA engine and the HBM itself are outside the RTL.
They appear only as ports. The testbenches use a behavioural memory model.

## Data representation

- **Bases.** Each base is 2 bits: A = 00, C = 01, G = 10, T = 11. So the
  complement of a base is its bitwise inverse. Base *i* of a word sits in bits
  `[2i+1:2i]`, so base 0 is at the least significant end. A 32-bit word holds
  16 bases. A 512-bit memory or bus word holds 256 bases.
- **k-mers and strides.** A k-mer is K = 64 bases (128 bits). The input
  advances in strides of S = 16 bases (one 32-bit word). A new k-mer is
  formed every stride, once K/S = 4 strides of a sequence have arrived.
- **Reference layout.** Each decompressor owns three pseudo channels. The
  2-bit reference is laid out contiguously over them: reference word *w*
  (256 bases) is in channel `w >> 22`, at word address `w mod 2^22`. Three
  channels of 2^22 × 64 B give 768 MB, enough for a human genome of about
  700 MB in 2-bit form.

## The compressed format

A compressed stream is a sequence of **chunks**. A chunk is one 32-bit
header holding sixteen 2-bit element codes, with element *i* in bits
`[2i+1:2i]`. Payload words follow, one per element that needs one:

| code | element | payload | output |
|------|---------|---------|--------|
| 00 | verbatim | 16 bases | those 16 bases |
| 01 | forward match | reference offset I | ref[I, I+64) |
| 10 | reverse-complement match | reference offset I | revcomp(ref[I, I+64)) |
| 11 | continuation | none | the next k-mer of the current run: I+64 forward, I−64 reverse |

Continuations are the reason the format compresses well. A read that matches
the reference over a long stretch costs one payload word and then 2 bits per
64 bases.

**Jobs.** A decompression job is a whole number of chunks plus a length in
bases (`job_bases`). The last chunk may carry more data than the length
needs. Its extra output is cut off and its remaining payload words are
dropped.

**Known inconsistency.** The original description says a decompressed chunk
is at most 128 bytes. Sixteen elements of up to 64 two-bit bases are 256
bytes, and this design follows the element format.

## Compressor (`bancroft_compressor`)

```
ASCII ─ ascii_parser ─┐
                      ├─ stride_shifter ─ k-mer ─┬─ murmur3 seed 1 ─┐
binary strides ───────┘                          ├─ murmur3 seed 2 ─┤
                                      revcomp ───┼─ murmur3 seed 1 ─┼─ lookup FIFO ─ filter_router ─ 8 × filter_memctrl ─┐
                                                 └─ murmur3 seed 2 ─┘                                                   │
   records to host  ◄──────────────────────────── outbound_encoder (reorder buffer) ◄──────────────────────────────────┘
```

**Input.** `ascii_parser` takes 16 FASTA characters per beat and does the
following:

- skips `>` header lines up to the newline;
- maps `ACGT` in either case to 2-bit codes;
- counts any other letter (N, for example) in `n_other` and stores it as A;
- drops newlines and other non-letters;
- emits one 16-base stride whenever it has one.

`flush` pads out a partial stride. In binary mode the host supplies 2-bit
strides directly.

**Hashing.** `stride_shifter` keeps a 64-base window that moves by one stride
per input. `revcomp` gives the window's reverse complement. Four pipelined
Murmur3 x86_32 hash units hash the forward and reverse k-mers, each with seeds
1 and 2. Each unit reads the 128-bit k-mer as four little-endian 32-bit
blocks. It has six stages, and all four stall together.

**Probabilistic filter.**

- Each hash value selects a 4-bit entry in a 2 GB table spread over 8 pseudo
  channels.
- Bits [31:29] of the hash pick the channel. Bits [28:0] index the nibble.
  One 256-bit read returns 64 nibbles.
- A lookup **hits** when the stored nibble equals the low four bits (the first
  two bases) of the k-mer that was hashed. This is the forward k-mer for
  lanes 0 and 1 and the reverse complement for lanes 2 and 3. The host fills
  the table so that a hit means "probably in the reference".
- `filter_router` sends each channel the lowest-numbered lookup that wants it.
  So it issues all four lookups of a stride in one cycle when they target four
  different channels. When several target the same channel, they go out over
  several cycles. Each `filter_memctrl` keeps up to 32 reads in flight.

**Records.**

- Lookups on different channels complete out of order. `outbound_encoder`
  holds a 64-entry reorder buffer, indexed by a 6-bit tag given to each stride
  as it enters.
- It emits one record per stride, in input order: the stride, the four
  hashes, the four hit bits and `kmer_valid`.
- The stride and hashes are the 20 bytes the host needs to finish the search.
- Strides that do not yet complete a k-mer carry `kmer_valid = 0`, zero
  hashes and no lookups.

**Throughput.** The compressor takes one stride per cycle when the four
lookups go to different channels. With random hashes it averages about 1.75
cycles per stride because of channel conflicts. That is about 2.3 GB/s of
FASTA at 250 MHz, below the 3.7 GB/s reported for the original. How the
original avoids the conflicts is not described.

## Decompressor (`bancroft_decompressor`)

```
compressed words ─ decomp_parser ─┬─ verbatim FIFO ───────────────────────────┐
                                  ├─ piece FIFO (source, length, last) ───────┤─ shuffler ─ 512-bit beats
                                  └─ ref_router ─ 3 × ref_memctrl ─ aligner ──┘
```

### Parser and runs

This is the densest part of the design. `decomp_parser` buffers up to 8
compressed words, which arrive 1 to 4 per beat. It examines the header
through a **window of four element slots**. Each cycle it takes the longest
run, up to four elements and never past the end of the chunk, of one of these
two kinds:

- **Consecutive verbatims.** Up to four payload words go to the verbatim FIFO
  in one push.
- **A match followed by continuations, or continuations alone.** These
  together cover one contiguous stretch of the reference: 64·n bases, n ≤ 4.
  - A forward run starting at I asks for ref[I, I+64n).
  - A reverse run's last k-mer ends lowest, so the run asks for
    ref[I−64(n−1), I+64). The whole span is reverse-complemented, which puts
    the k-mers in the right order.

Each run is issued as one request together with a **piece descriptor**: where
the piece comes from, how many bases it has, and whether it is the last of
the job. The descriptors keep the output in element order while reference
reads are still in flight.

A run is issued only when the verbatim FIFO, the piece FIFO and the reference
request port can all take it. With stall-free outputs, a chunk of
continuations takes about one cycle per four elements plus one cycle for the
header.

### Reference fetch and alignment

A span of 64 to 256 bases starting at any base offset covers one or two
512-bit words. `ref_router` does three things:

- It issues the one or two reads to whichever of the three channels holds
  each word, one read per cycle.
- It records the order of channels in a FIFO, so that responses from
  different channels, whose latencies differ, are put back in request order.
- Its aligner concatenates the two words, shifts the span down to base 0,
  masks it to its length and, for reverse runs, reverse-complements the whole
  span.

Each `ref_memctrl` limits its channel to 8 reads in flight and buffers their
responses, so the memory never has to wait for the router.

### Shuffler

The `shuffler` takes pieces in descriptor order. Each piece comes from the
verbatim FIFO (16 to 64 bases) or from the router (64 to 256 bases). The
shuffler masks the piece to its length and ORs it into a **1024-bit
accumulator** at the current fill level. Whenever 256 or more bases are held,
the low 256 bases leave as one output beat and the rest shift down. A piece
can straddle two beats.

At the end of a job the remainder leaves as a short beat, with `out_last` set
and `out_nbases` giving its length. At most one beat leaves per cycle, which
is the 512-bit × 250 MHz = 16 GB/s of the original.

## SHD filter (`shd_filter`)

The filter estimates whether a read is within E edits of a reference
segment. For every shift s in −E..+E (11 shifts for E = 5) it forms a mask.
Bit *i* is 1 when read base *i* differs from reference base *i+s*.

- **Edges.** Bases shifted in from beyond either end of the pair count as
  matches.
- **Amendment.** This optional step fills short runs of zeros between ones in
  each mask: `amend[0]` turns 101 into 111, and `amend[1]` turns 1001 into 1111.
  A stray match inside a mismatching region then does not hide the mismatch.
- **AND and count.** The eleven masks are ANDed. The ones that survive are
  counted by a tree of saturating 3-bit adders, which gives a lower bound on
  the edit distance.

With read ACGAGACGT, reference ACAAGAGTG and E = 1, the final mask is
001000100, an estimate of 2.

**Windows.** The filter works on 256-base (512-bit) windows, one per cycle,
and holds one window of look-ahead. Shifts across window edges use the last
E bases of the previous window and the first E bases of the next. Amendment
and counting are done per window. Window counts are summed with saturation at
7. At the end of the pair, `res_dist` is output, and `res_accept` is set when
`res_dist` ≤ E. Latency is the look-ahead window plus three register stages.

## Top level (`bancroft_top`)

There are three decompressors, each with its own three channels (0–2, 3–5,
6–8) and its own compressed input stream.

- **Decompressor 0** supplies reads.
- **Decompressors 1 and 2** supply the reference segments to compare them
  with. This is a multi-reference filtering set-up.
- The three streams advance together. A beat is taken from all three in the
  same cycle, when all three have one.
- Two SHD lanes report a distance and an accept flag per pair. So the three
  jobs of a pair must have the same length.

The compressor runs independently on channels of its own (eight filter-table
ports). All memory ports are simple valid/ready request channels with
in-order, always-accepted responses after any latency.

| parameter | default | meaning |
|-----------|---------|---------|
| `N_DECOMP` | 3 | decompressors; N_DECOMP−1 filter lanes |
| `D_PC`, `D_PC_WORDS_LOG2` | 3, 22 | channels per decompressor, 512-bit words per channel (log2) |
| `N_CPC`, `C_HBM_AW` | 8, 23 | filter-table channels, 256-bit words per channel (log2) |
| `E` | 5 | filter edit threshold |

The original platform fits up to ten decompressors on its 32 channels. The
evaluated ensembles use four decompressors, which needs `N_DECOMP = 4`.

## Interfaces and timing conventions

- **Handshakes.** Every stream is valid/ready. A transfer happens on a rising
  edge where both are high. Reset is synchronous and active high.
- **Decompressor input.** `in_data` carries 1 to 4 compressed words, and
  `in_nwords` says how many. A job is started with a one-cycle `job_start`
  pulse together with `job_bases`, before its first word.
- **Compressor.** `seq_start` begins a new sequence, so the k-mer window
  refills. `bin_mode` selects binary strides instead of ASCII input.
- **Filter and compressor outputs.** Filter results are single-cycle pulses.
  Compressor records are a packed struct `cmp_rec_t` with these fields:
  `kmer_valid`, `filt_hit[3:0]`, `hash3..hash0` and `stride`.

## Files

| file | contents |
|------|----------|
| `rtl/bancroft_pkg.sv` | constants, element codes, request and record structs |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO used throughout |
| `rtl/ascii_parser.sv`, `stride_shifter.sv`, `revcomp.sv`, `murmur3_hash.sv`, `filter_router.sv`, `filter_memctrl.sv`, `outbound_encoder.sv`, `bancroft_compressor.sv` | compressor |
| `rtl/decomp_parser.sv`, `ref_router.sv`, `ref_memctrl.sv`, `shuffler.sv`, `bancroft_decompressor.sv` | decompressor |
| `rtl/shd_filter.sv`, `rtl/bancroft_top.sv` | filter kernel and top level |
| `tb/tb_pkg.sv` | models shared by the testbenches |
| `tb/hbm_model.sv` | behavioural memory channel |
| `tb/tb_*.sv` | one self-checking testbench per block |

`tb/tb_pkg.sv` holds these models:

- computed reference and filter-table contents;
- Murmur3;
- a generator of random compressed jobs and a software decompressor;
- the filter model.

`tb/hbm_model.sv` computes its contents instead of storing them, so the
full-size 768 MB reference costs nothing to simulate. It answers after a fixed
latency and drops `ready` at random.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/bancroft_pkg.sv tb/tb_pkg.sv tb/tb_bancroft_top.sv --top-module tb_bancroft_top
obj_dir/Vtb_bancroft_top
```

What the testbenches check:

- **Models.** Results are compared with independent models: loop-based
  Murmur3, a software decompressor, and a whole-pair filter model.
- **Throughput.** Rates are checked where they matter: records per cycle in
  the compressor, and runs and beats per cycle in the parser and the
  decompressor.
- **`tb_bancroft_top` at full size.** It runs the top with its default
  parameters: the full 3 × 4 M-word reference space, the 2 GB filter table and
  E = 5. It pushes 24 read/reference pairs through all three decompressors
  and both filter lanes, and runs binary and FASTA input through the
  compressor at the same time. It checks every beat, result and record.
- **Coverage.** `tb_bancroft_top` counts how often each mechanism occurs and
  fails if one never does: four-element verbatim and reference runs,
  continuations, reverse-complement and two-word reads, short final beats,
  multi-window pairs, accepted and rejected pairs, amendment changing a
  result, every channel used, filter hits, records without a k-mer, FASTA
  headers, router conflicts and output back-pressure.

## Where this design departs from, or adds to, the original

- **Choices the description leaves open.** The header bit order, the base
  code, the job framing (`job_start`/`job_bases`), the FIFO depths and the
  memory-port handshake are this design's choices. So are the Murmur3 seeds
  (1 and 2), the nibble-compare rule of the filter table and the way the
  decompressor's reference is spread over its channels.
- **Filter windows.** The treatment of filter window edges and the per-pair
  saturated sum are additions. The original describes disjoint 512-bit
  windows and does not say how window results combine.
- **Compressor speed.** Throughput is limited by channel conflicts, as
  described above.
- **Shuffler structure.** The original shuffler uses a multi-cycle pipelined
  shifter and a compaction network built from sorting networks. Here the
  parser already turns every run into one gap-free piece. So each piece is
  placed into the accumulator by a single registered shift, and no sorting
  network is built.
- **Not modelled.** Timing closure at 250 MHz and resource use have not been
  checked against the reported 36 K LUT (compressor) and 26 K LUT
  (decompressor).
- **Outside the RTL.** The host-side software is not built. It covers the
  offset table that turns probable hits into reference positions, the
  comparison with the reference, the writer that produces the compressed
  stream, and the index of compressed files. The PCIe DMA engine and the HBM
  controllers are not built either; they are vendor IP.
