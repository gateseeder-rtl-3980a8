# GateSeeder seeding kernel in SystemVerilog

Read mapping finds where each short or long DNA read comes from in a reference genome. This design is the
FPGA half of GateSeeder, a CPU–FPGA read mapper. The FPGA sits next to high-bandwidth memory (HBM). Its
job is *seeding*, the part of read mapping that is mostly memory traffic:

1. Cut every read into minimizer seeds.
2. Look each seed up in a hash-table index of the reference.
3. For every reference location the index returns, emit an *anchor*.

An anchor pairs a read position with a reference position. It carries the difference of the two
positions, δ = L_ref − L_read. Anchors from the right mapping location pile up on the same δ. The host
sorts the anchors by δ (the reference location shifted back to the read's start) and votes on them; that part is not in this RTL.

The main idea is to keep the whole index in the HBM, beside the accelerator, and to give each processing
element (PE) its own memory ports. Each PE can then stream its reads in, walk the index and stream
anchors out at about one base per clock cycle. It never stalls on another PE or on the host. The RTL
here covers that kernel: M = 8 identical PEs, each a four-stage dataflow pipeline with four memory
channels.

## The processing element

```
              read batch                 map array          key array              anchor buffer
            (own section)               (shared index)     (shared index)          (own section)
                 |  rd_*                      |  map_*           |  key_*                 ^  anc_*
                 v                            v                  v                        |
   +-----------------------+  FIFO  +---------------+ FIFO +---------------+ FIFO +--------------------+
   |   seed_extraction     |------->| map_querying  |----->| key_querying  |----->|  location_adjust   |
   | 1 base/cycle, W hash  | seeds  | 2 reads/seed  | ptrs | 1 read/entry  | locs | δ, write 1 anchor  |
   | units, min tree       |        | map[h],map[h+1]|     | key[start..end)|     | per cycle          |
   +-----------------------+        +---------------+      +---------------+      +--------------------+
```

The four tasks are separate modules. They are joined by `gs_fifo` first-word fall-through FIFOs
(depth 16), so each task runs at its own pace. A task that is stalled on memory pushes back on the task
before it through its FIFO. Every link, between tasks and towards memory, uses a valid/ready handshake.
A word moves when both are high on a rising clock edge.

Besides seeds, two kinds of *marker* travel down the same path, in order:

- **End of read (eor).** Every read ends with one.
- **End of batch (last).** Sent once, after the batch.

Markers bypass the memory lookups. At the end of the pipe, an eor marker becomes a special word in the
anchor buffer, so the host can tell which anchors belong to which read. The last marker raises `done`.

Control is per batch. The host places each PE's batch in memory and sets the ports:

- `rd_base`: where the PE's read batch is.
- `nb_bases`: how long the batch is.
- `anc_base`: where the PE's anchors go.
- `map_base`, `key_base`: where the shared index is.

It then pulses `start` for one cycle. When `done` rises, `nb_words` holds the number of words written to
the anchor buffer. `empty_lists` holds the number of seeds that the index did not contain. A new
`start` clears both counters and begins the next batch. No reset is needed in between.

## Seed extraction: a minimizer every cycle

This is the hardest part of the design, and the only one with real arithmetic.

A *k-mer* is a run of K consecutive bases. A *window* is W consecutive k-mers, so it covers W+K−1 bases.
The *minimizer* of a window is its k-mer with the smallest hash. Sliding the window one base at a time
and keeping each new minimizer gives a sparse set of seeds, about 2/(W+1) per base. Two reads that share
a stretch of at least W+K−1 bases are guaranteed to share a seed in it.

Done in software, each window costs W hashes and W−1 compares. To sustain one window per cycle, the
hardware keeps the whole window in registers and hashes all of it in parallel:

- **S1, window register.** A shift register `win[0..W+K-2]` holds the last W+K−1 bases of the current
  read. Each accepted base shifts in at the top. A counter tracks how many bases of the read have been
  seen. The window becomes valid once W+K−1 bases are in. Its first k-mer then starts at read position
  `count − (W+K−1)`.
- **S2, W hash units.** `kmer_hash_unit` copy *t* looks at `win[t .. t+K-1]`. It builds the 2K-bit
  forward code and the reverse-complement code of its k-mer and keeps the smaller one (the canonical
  k-mer). It hashes that code and reports:
  - the strand: 1 when the reverse complement was smaller;
  - whether the k-mer holds an N. A k-mer with an N cannot be a minimizer.
- **S3, minimum.** A compare chain picks the valid k-mer with the smallest hash, the leftmost on a tie.
  Its read position is the window start plus its index in the window.
- **Output, de-duplication.** Consecutive windows usually share their minimizer. The output stage
  remembers the position it emitted last for this read and drops a repeat. So each minimizer position
  leaves the stage once.

All four stages advance together whenever the output register is empty or being read. A stalled
consumer therefore freezes the window in place, and no base is lost.

Latency from a base to its seed is four cycles. The measured throughput is one base per cycle: 6,146
bases took 6,159 cycles without back-pressure.

The read separator `E` resets the window, restarts read positions at 0 and sends one eor marker. A read
shorter than W+K−1 bases never fills a window, so it yields no seeds, only its marker.

Reads are fetched by `read_fetch`. It keeps up to four `RD_DW`-bit words in flight, buffers them, and
hands out one 4-bit base code per cycle. After `nb_bases` codes it sends a final "last" token.

**The hash.** This is minimap2's invertible integer hash, computed on 64 bits and masked to 2K bits:

```
h = (~x + (x << 21));  h ^= h >> 24;  h = (h + (h << 3)) + (h << 8);  h ^= h >> 14;
h = (h + (h << 2)) + (h << 4);  h ^= h >> 28;  h += h << 31;      (each step mod 2^2K)
```

Because the hash is a bijection on 2K bits, it also serves directly as the seed's identity. It is the
index into the map array.

## The index: map array and key array

The index is a static hash table with two arrays:

- **Key array.** Each entry is 64 bits: `{31'b0, strand, ref_location[31:0]}`. It lists every reference
  location of every kept minimizer, grouped by hash. The groups appear in increasing hash order.
- **Map array.** Each entry is a 32-bit key-array index, and there is one entry per possible hash value
  plus one. `map[h]` is where the locations of hash *h* start. `map[h+1]` is where they end.
  Absent hashes have `map[h] == map[h+1]`.

Minimizers that occur more than `max_occ` times in the reference are left out of the index when it is
built. This filters repeats, and to the FPGA the filtered minimizers look exactly like absent ones.

Because every lookup costs a fixed number of memory accesses, the two query tasks are simple pipelines:

- **`map_querying`** issues two reads per seed, `map_base+h` and `map_base+h+1`. That makes its
  initiation interval 2. While the responses are in flight, the seed's read position and strand wait in
  a 16-entry queue. A seed then leaves as a `(start, end)` pointer pair. Measured: 400 seeds in 810
  cycles.
- **`key_querying`** walks `key_base+start … key_base+end−1`, one request per cycle, and pairs each
  returned entry with the seed's read position and strand. Empty lists produce no output and are counted
  in `empty_lists`. Requests for the next seed start as soon as the previous list has been issued, so
  lists of different seeds overlap in the memory pipeline.

Each of the two arrays has a channel of its own, so map lookups and key walks overlap.

## Location adjustment and the anchor buffer

`location_adjust` turns each (reference location, read location) pair into one 64-bit anchor word. It
writes the words to consecutive addresses from `anc_base`:

```
 63    62    61 ........ 32   31 ............. 0
 eor   str   rd_loc[29:0]     delta = L_ref - L_read   (mod 2^32)
```

- `str` is the reference strand XOR the read strand, so 1 means the read matches the reverse strand.
- After the anchors of each read, one word with only bit 63 set (`0x8000_0000_0000_0000`) marks the end
  of the read. A read with no anchors still gets its marker, so read *i* of the batch is the *i*-th group.
- The last marker writes nothing. It raises `done` and freezes `nb_words`.

## Memory channels

Every memory port is a reduced AXI: single-beat reads and writes with valid/ready handshakes and
*word* addresses (`ADDR_W` = 40 bits):

| channel | direction | request | data |
|---------|-----------|---------|------|
| `rd_*`  | read  | `ar_valid/ar_ready/ar_addr` | `r_valid/r_ready/r_data`, `RD_DW` = 256 bits, 64 bases |
| `map_*` | read  | same | 32-bit map entry |
| `key_*` | read  | same | 64-bit key entry |
| `anc_*` | write | `w_valid/w_ready/w_addr/w_data` | 64-bit anchor |

Read responses return in request order, and any latency is allowed. A requester never takes more
responses than it has asked for. A write is complete when it is accepted. In a real system each port
would sit behind an AXI protocol adapter and the HBM controller's switch. Bursts, IDs and write
responses are left to that adapter.

Byte addresses are the word address times the word size. A word address plus a 30-bit hash (K = 15)
fits in 40 bits.

## Parameters and what fits

| parameter | default | meaning |
|-----------|---------|---------|
| `M` | 8 | PEs. Four memory ports each, so 8 PEs use the 32 ports of a two-stack HBM. |
| `K` | 15 | k-mer length (the long-read, Nanopore preset) |
| `W` | 10 | k-mers per minimizer window |
| `RD_DW` | 256 | read-channel word width |
| `FIFO_DEPTH` | 16 | depth of the three FIFOs inside a PE |
| `META_DEPTH` | 16 | seeds a query task can have in flight |

At the defaults, a human-genome index needs the following (genome of about 3.1 Gbp):

- **Map array:** 2^30+1 entries of 4 B, about 4 GiB.
- **Key array:** about 0.56 G minimizer locations of 8 B, about 4.5 GB.
- **Per PE:** a 64 Mbp batch, 32 MB at 4 bits per base, and a 512 MB anchor area (64 M anchors).

Together that is about 12.8 GB, which fits a 16 GB HBM. Reads of up to 2^30 bases and references of up
to 2^32 bases fit the location fields.

The short-read (K = 21, W = 11) and accurate long-read (K = 19, W = 19) settings elaborate and simulate.
**They cannot hold a human index with this map layout**, because the directly indexed map array grows as
4^K: 2^38 entries for K = 19, and 2^42 for K = 21, which also exceeds the 40-bit address. A real build
for those settings would need a map array indexed by only part of the hash, with the rest of the hash
checked against the key array. That extension is not built here. (The K = 21 simulation works because its small
test index has no two hashes that agree in their low 40 bits, which the testbench checks.)

## Where this departs from, or adds to, the published design

The published accelerator was written in HLS and is described at block level. The following points are
this design's own choices:

- **Markers in the anchor stream.** The eor word and the `nb_words` count are this design's way of
  splitting the anchor buffer per read. The original keeps read metadata on the host.
- **δ on the reverse strand.** δ = L_ref − L_read is used as written for both strands. Some mappers use
  L_ref + L_read on the reverse strand to keep reverse-strand anchors on one diagonal. If the host voting
  expects that, change the single subtraction in `location_adjust`.
- **Hash and k-mer rules.** Neither the hash function nor the canonical-k-mer, tie and N rules are given
  at block level in the source description. The choices here follow minimap2, the mapper the original
  is measured against.
- **Memory interface and sizes.** The AXI interface is reduced to single beats. All widths, FIFO depths
  and the key-entry and anchor bit layouts are chosen here.
- **Index addressing.** For the fastest HBM access, each memory port should stay inside its own 512 MB
  section. The read and anchor ports do. The index ports cannot: the K = 15 map array alone spans eight
  sections, and a PE has only one map port and one key port. Here they use flat word addresses
  (`map_base + h`, `key_base + i`) and rely on the HBM switch to reach the right section, at some cost in
  latency. Giving each PE one port per index section would remove that cost, at the price of many more
  ports.
- **Shared start.** One `start` drives all PEs, while each PE has its own `done`. Giving a PE
  `nb_bases = 0` leaves it idle for that round.

Outside the RTL entirely:

- the host, the PCIe link, the HBM and its controller and switch;
- building the index;
- parsing reads into batches;
- sorting the anchors and voting on mapping locations.

## Verification

Each block has a self-checking testbench in `tb/`. The checks compare against `gs_tb_pkg`, a plain
sequential model written separately from the RTL. It contains the minimizer scan, the index build with
the `max_occ` filter, and the expected anchor words.

Memory is modelled by `hbm_rd_model` and `hbm_wr_model`, sparse memories with:

- a fixed read latency;
- in-order responses;
- a run-time percentage of cycles on which they refuse requests (`stall_pct`).

| testbench | what it shows |
|-----------|---------------|
| `tb_gs_fifo` | ordering, full/empty, simultaneous push and pop, flush, against a queue (depth 5) |
| `tb_seed_extraction` | every seed and marker of random batches with N runs and short reads; stalls on both sides; one base per cycle |
| `tb_map_querying` | pointer pairs for random hashes, marker order, two cycles per seed |
| `tb_key_querying` | every key entry of random lists incl. empty ones, stalls, one entry per cycle |
| `tb_location_adjust` | δ, strand, eor words, addresses, `nb_words`, write stalls |
| `tb_gs_pe` | one PE end to end: reference with repeats, `max_occ` filter, forward, mutated, reverse-complement, random, N-containing and too-short reads; two batches, the second with stalls |
| `tb_gateseeder_top` | all 8 PEs at default parameters, four rounds (see below) |

`tb_gateseeder_top` runs the full kernel at its default parameters. Every round is checked word by word
against the model, and it counts how often each mechanism occurs:

- **Rounds:** no stalls; 25 % stalls; one PE given an empty batch; 85 % stalls.
- **Mechanisms counted:** memory stalls, full FIFOs, all PEs busy at once, seeds absent from the index,
  seeds removed by `max_occ`, seeds with several locations, reverse-strand anchors, reads with N, reads
  too short to have seeds, restarts, and empty batches.

A mechanism that never occurs counts as a failure. A run takes about ten seconds.

Three more testbenches run the three read technologies through all 8 PEs:

- `tb_workload_ont`: Nanopore-like reads, 500 to 3,000 bases with 10 % errors, at the default K = 15,
  W = 10.
- `tb_workload_hifi`: HiFi-like reads, 2,000 to 4,000 bases with 0.2 % errors, at K = 19, W = 19.
- `tb_workload_ilmn`: Illumina-like reads, 250 bases with 0.5 % substitutions, at K = 21, W = 11.

Each runs three `max_occ` settings (10/50/100, 1/2/5 and 50/150/450). The reference is synthetic, with
repeats planted at copy numbers chosen so that every setting filters a different set of minimizers. Each
PE's batch is the setting's batch size (64, 32, 16, 128 or 32 Mbp) divided by 8,000.
All three settings of a technology draw on the same reads, and the memory models do not stall.

All anchors are checked against the model. The tests also check that a larger `max_occ` never makes
the kernel faster per base. Measured on the longest batch of the 8 PEs:

| setting | cycles per base |
|---------|-----------------|
| Nanopore | 1.003 / 1.007 / 1.08 |
| HiFi | 1.002 / 1.002 / 1.002 |
| Illumina | 1.03 / 1.84 / 5.0 |

With long reads and few locations per seed, the kernel runs at the rate of the seed extractor, one base
per cycle. With short reads and a large `max_occ`, the key-array walk and the anchor writes dominate:
one location per cycle.

## Files

`rtl/`:

- `gs_pkg.sv`: shared widths, the base-code enum, the key and anchor structs, and the hash function.
- `gateseeder_top.sv`: the M-PE top level.
- `gs_pe.sv`: one PE.
- `seed_extraction.sv`, with its helpers `read_fetch.sv` and `kmer_hash_unit.sv`.
- `map_querying.sv`, `key_querying.sv`, `location_adjust.sv`.
- `gs_fifo.sv`.

Base codes are 4 bits each: A=0, C=1, G=2, T=3, N=4, E (read separator)=5. They are packed
little-endian, so base *i* of a word is in bits `[4i+3:4i]`.

`tb/`: the testbenches, the reference model `gs_tb_pkg.sv`, and the two memory models.
