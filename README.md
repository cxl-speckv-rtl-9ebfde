# CXL-SpecKV: a speculative, compressed KV-cache engine on an FPGA

Large-model inference keeps a key/value cache (KV cache) for every request, layer and
token position, and that cache quickly outgrows GPU memory. This design moves the cache
to memory attached to an FPGA behind a CXL link and hides the link's latency by
*guessing*. When the GPU generates a token it sends the FPGA a hint: request, layer,
position and the last 16 tokens. A token predictor (outside this design) proposes the
next tokens. The FPGA then fetches the KV pages the GPU will need for the next
positions and the next two layers. It fetches them before they are asked for, into a
GPU-side staging buffer called L2. Pages are stored compressed (INT8 quantization,
delta and run-length coding) and are decompressed on the way out. The hardware also
keeps track of:

- which pages the GPU owns, so they must be written back first;
- which pages are hot or cold;
- how hard to prefetch.

Everything here is synthesizable SystemVerilog in `rtl/`. Every block has a
self-checking testbench in `tb/`.

## Block map

```
            hints / demand reads / GPU reads+writes / config
                               |
  +----------------------------+-----------------------------------------+
  | speckv_top                                                           |
  |  prefetch_ctrl --- prefetch_dir (L2 directory) --- coherence_dir     |
  |       |                 ^                              |             |
  |       | page reads      | shared port, coherence first |             |
  |       v                                                v             |
  |  cache_engine x N_ENG  [ atu | dma_engine | compress | decompress ]  |
  |       |                                                              |
  |  mem_ctrl (weighted round robin, 16 channels)  --> ch_* ports        |
  |  page_tracker (hot/cold)     policy_engine (throttle, mode, depth)   |
  +----------------------------------------------------------------------+
```

Common types live in `rtl/speckv_pkg.sv`:

- **Data.** A beat is 512 bits, or 32 FP16 values. A page is 4 KB, or 64 beats.
- **Entry address `vaddr_t`.** {request 9 b, layer 7 b, position 12 b} = 28 bits.
- **Physical page number.** 24 bits. Memory is addressed in 64-byte words, with a
  30-bit word address, so it covers 64 GB.
- **Page-table entry.** {valid, mode, compressed length, ppn}.

## Compression (compress_engine)

This is the hardest datapath. A 20-stage pipeline takes one beat per cycle (II = 1) in
one of four modes. Each beat becomes one variable-length *record*:

| mode  | record                                             | bits        |
|-------|----------------------------------------------------|-------------|
| RAW   | the beat                                           | 512         |
| INT8  | 16-bit scale (FP16 max-abs of the beat) + 32 x INT8 | 272         |
| DELTA | as INT8, but lane i>0 stores q[i]-q[i-1] mod 256   | 272         |
| RLE   | scale, pair count, pairs {run-1 (5 b), byte (8 b)} | 21 + 13*pairs |

The stages are:

1. **Stages 1-4.** Register the input and form lane magnitudes; a max tree
   (32 -> 8 -> 2 -> 1) finds the largest magnitude.
2. **Stages 5-8.** Scaling without a divider: a reciprocal ceil(127*2^32/max) is
   formed, multiplied in, shifted and rounded, giving q = round(127*|x|/max) with sign.
   The reciprocal keeps 32 fraction bits, which makes the rounding exact for every
   FP16 input.
3. **Stage 9.** Delta coding, q[i]-q[i-1] mod 256 (lane 0 kept).
4. **Stages 10-14.** Run-start flags and a 5-level prefix count give every lane its
   pair index.
5. **Stages 15-18.** RLE: run ends, pair scatter, run lengths, record assembly.
6. **Stages 19-20.** Bit packer and output register. Records are packed LSB-first
   into 512-bit words, with a carry of the bits left over from the previous record.
   The last word of a page is padded with zeros, so every stored page starts on a
   word boundary.

A RAW beat accepted in cycle n leaves in cycle n+20. The engine reports the number of words written. This count goes into the page-table
entry.

## Decompression (decompress_engine)

The decompressor does the reverse. Four input stages are shared by both paths. An
unpacker then holds a 1024-bit bit buffer and cuts one record per cycle off its low
end, using the record header to learn the length. Twenty stages follow: a prefix sum
of run lengths places the RLE pairs, runs are expanded, a second prefix sum (mod 256)
undoes the delta coding, and multipliers (stages 15-18) convert INT8 back to FP16
(value·max/127).

Compressed beats come out 25 cycles after their word arrives. RAW pages take a
separate bypass that takes 5 cycles. An in-order merge keeps the output in page order.

## Address translation (atu)

The TLB has 64 fully associative entries. A hit answers in 4 cycles. On a miss, the
page walk reads one word of the page table at `PT_BASE + vpn` through the memory
controller. A miss costs 4 + 15 cycles when memory answers at once. The result is a
PTE: ppn, mode and length. An invalidate port drops a TLB entry when its page-table
entry is rewritten.

## DMA (dma_engine) and the cache engine

The DMA engine works from page descriptors. Each descriptor carries its own ppn and
word count, which gives scatter-gather. Read words go out tagged. At most **16** are
in flight. A reorder buffer puts the responses back in order before the decompressor
sees them. On the write path, the compressor's words go to `{ppn, index}`.

`cache_engine` connects ATU, DMA, compressor and decompressor:

- A page read translates the address, then streams, decompresses and outputs the page.
- A page write compresses the page, stores it, and rewrites its page-table entry with
  the mode and length.

## Memory controller (mem_ctrl)

Requests go to 16 channels. The channel is picked by the low 4 address bits. When
several engines (clients) compete, arbitration is a weighted round robin. A client's
weight is α·(queue depth) + (1-α)·(1/average latency), computed in fixed point.
Latency is a running average, and α = 0.5 by default. Responses carry the client id
and go back to their owner. The memory itself is outside the design; the channel
ports accept any latency.

## Prefetch controller and L2 directory (the core mechanism)

`prefetch_ctrl` runs the prefetch loop for one hint at a time:

1. Send the token history to the predictor and receive up to 4 candidate tokens.
2. Score last round's guess against the token that was really produced. This updates
   the request's depth k:
   - k starts at 4 and ranges from 1 to 16;
   - it doubles after 8 correct guesses in a row;
   - it halves on a miss.
3. The effective depth is k·β, where β is the throttle. It is also capped by the
   depth the bandit chose.
4. For the next k positions and for layers l, l+1 and l+2:
   - translate the address;
   - skip unmapped entries and entries already in L2;
   - otherwise reserve an L2 slot and issue a page read.
5. Wait until every read has completed, mark the slots filled, and notify the GPU.

A *demand* port serves reads the prediction missed, through the same controller.

`prefetch_dir` tracks what L2 holds. It covers 2 GB of 4 KB slots, i.e. 2^19 slots,
as a 4-way directory with 2^17 sets. The set index is an XOR fold of the entry
address. Its operations are ALLOC, USE, FILL and INVAL. A victim is a free way
(invalidated entries count as free) or else a round-robin choice. This gives *lazy
invalidation*: stale entries stay until they are overwritten. After reset the
directory spends 2^17 cycles clearing itself.

## Coherence (coherence_dir)

The GPU's reads first ask the coherence directory. There are four answers:

- **L2:** the entry is in L2.
- **MEM:** the entry is read from memory.
- **OWNED:** the GPU holds a newer copy that must be written back first.
- **ERR:** the table is full.

A GPU write marks the entry owned (32 entries). It also invalidates any L2 copy, so a
wrongly fetched prefetch is dropped. Writebacks are requested when the link is idle.
They are requested at once when a read needs the entry.

## Page tracker and policies

`page_tracker` counts accesses to 64 pages and halves the counts every 128 tokens. It
raises a *promote* event above T_h (8) and a *demote* event below T_c (2). Memory
pressure raises both thresholds. A high miss rate lowers T_h. Moving the data itself
is left to software.

`policy_engine` has three parts:

- **Throttle.** Every 1024 cycles it measures link use U and sets
  β ← β·(1 − κ·max(0, U − θ)). The defaults are θ = 0.8 and κ = 1.
- **Compression mode per layer class.** It picks the mode with the highest
  w_r·R + w_q·Q − w_c·L among modes whose quality Q is at least Q_min. The tables are
  registers written by software.
- **Depth bandit.** A UCB bandit chooses the depth cap from {1, 2, 4, 8, 16}. It is
  rewarded by prediction hits.

Configuration register map:

| address | register |
|---------|----------|
| 0 | β |
| 1 | κ |
| 2 | θ |
| 3 | w_r |
| 4 | w_q |
| 5 | w_c |
| 6 | Q_min |
| 7 | UCB constant c |
| 8-19 | R table |
| 20-31 | Q table |
| 32-35 | L table |

## Top level (speckv_top)

`speckv_top` connects all of the blocks above, with N_ENG cache engines (default 1).
Requests map to engines by request id mod N_ENG. The L2 directory has one port, which
coherence and the prefetcher share; coherence wins. The top also derives:

- link busy/idle, from the memory channels;
- a high-miss flag: more than 64 memory reads among the last 256 GPU reads;
- the bandit reward.

`stat[24]` exports counters:

| index | counter |
|-------|---------|
| 0 | hints |
| 1 | correct guesses |
| 2 | wrong guesses |
| 3 | pages issued |
| 4 | skipped, already present |
| 5 | skipped, unmapped |
| 6 | demand fetches |
| 7 | k increases |
| 8 | k decreases |
| 9 | directory use hits |
| 10 | directory use misses |
| 11 | fills |
| 12 | unused pages dropped |
| 13 | L2 answers |
| 14 | memory answers |
| 15 | owned answers |
| 16 | invalidations |
| 17 | writebacks |
| 18 | promotions |
| 19 | demotions |
| 20 | throttle steps |
| 21 | bandit switches |
| 22 | packed {utilisation, T_h, T_c, owned count} |
| 23 | packed {weight, last k} |

## Verification

Each testbench in `tb/tb_<block>.sv` checks the block against a reference model. It
prints `TB_RESULT checks=N failures=M` and has a watchdog. `tb/hbm_model.sv` is a
memory model with random latency. `tb/speckv_tb_pkg.sv` holds reference compress and
decompress functions.

`tb_speckv_top` runs the top at its default sizes: the full 2^17-set directory, 80
layers and 64 TLB entries. The directory clear is part of that run. It drives hints,
guesses, GPU reads and writes, page writes, pressure and configuration. It fails if
any of the counted mechanisms never happens.

Results:

| testbench | checks | failures |
|---|---|---|
| tb_speckv_top | 3044 | 0 |
| tb_cache_engine | 6273 | 0 |
| tb_prefetch_dir | 8236 | 0 |
| tb_coherence_dir | 2093 | 0 |
| tb_prefetch_ctrl | 1129 | 0 |
| tb_page_tracker | 512 | 0 |
| tb_policy_engine | 394 | 0 |

The compressor, decompressor, ATU, memory controller and DMA testbenches also pass.

Example command:

```
verilator --binary --timing --assert -Irtl -Itb rtl/speckv_pkg.sv tb/speckv_tb_pkg.sv \
  rtl/*.sv tb/hbm_model.sv tb/tb_speckv_top.sv --top-module tb_speckv_top
./obj_dir/Vtb_speckv_top
```

## Where the design departs from the paper

- **Pipeline depth.** The paper gives the compressor as both "4-stage" and 20 stages.
  20 stages is built.
- **Decompressor latency.** The paper gives a latency of 25 cycles and 20 stages. The
  output is timed at 25 cycles.
- **Scale granularity.** The quantizer scale is per beat, not per page. A per-page
  scale would need the whole page before the first output. The paper's formula
  x·s⁻¹·127 is read as the usual 127·x/max.
- **The L1 check.** The prefetch check "not in L1 ∪ L2" covers only L2. L1 is in GPU
  memory and is invisible to the FPGA.
- **Learning.** κ, θ, the compression weights and the tables are learned by gradient
  methods in the paper. Here they are registers written by software. In hardware β
  only decreases; software raises it again.
- **Hints.** One hint is processed at a time.
- **Entry size.** Storage is one 4 KB entry per (request, layer, position). The
  paper's own KV-size formula implies 32 KB per token and layer; the paper is
  inconsistent here.
- **Sizes the paper does not give.** These are all own choices:
  - TLB size;
  - queue depths;
  - directory associativity;
  - owned-table size;
  - tracker size;
  - thresholds;
  - epoch length;
  - window length;
  - field widths: positions 12 bits, tokens 18 bits, requests 9 bits.
- **Not built.** The token predictor (LSTM), the CXL controller IP, the HBM devices
  and the GPU caches. They appear as ports, with behavioural models in the
  testbenches.
