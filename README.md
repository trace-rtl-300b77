# TRACE controller in SystemVerilog: implementation notes

This appendix describes a synthesizable SystemVerilog model of the TRACE CXL Type-3
memory controller. TRACE keeps the standard 64-byte CXL.mem load/store interface but
changes how the device stores tensors:

- every 4 KB block of BF16 data is split into 16 bit-planes;
- KV-cache blocks are first regrouped channel-major and their exponents rewritten
  as deltas to a per-channel base;
- each plane is LZ4-compressed on its own;
- a load through a reduced-precision alias view reads only the planes that view needs.

The model covers all four pipeline stages of the controller (front end, metadata,
codec complex, plane-aware scheduler), the write-path transform and the read-path
reconstruction. The CXL link, the DDR PHY and the DRAM devices are outside the design.
The testbenches use a behavioural DRAM model.

## A.1 Files

| File | Role |
|---|---|
| `rtl/trace_pkg.sv` | Constants, view / index-entry / request / statistics types |
| `rtl/alias_decoder.sv` | Host address → view, block, line; KV and uncompressed-region flags |
| `rtl/plane_mask_gen.sv` | View format (r_E, r_M, d_E, d_M) → returned-plane and fetch-plane masks |
| `rtl/request_frontend.sv` | CXL.mem request decode, 5-cycle pipeline |
| `rtl/plane_index_cache.sv` | On-chip cache of 64 B plane-index entries, 2-cycle lookup |
| `rtl/staging_buffer.sv` | Store coalescing into whole blocks, KV window index, backpressure |
| `rtl/plane_encoder.sv` | Transform T (KV regroup and exponent delta) and bit-plane split |
| `rtl/lz4_compress_lane.sv` | One LZ4 compressor lane (one 256 B plane) |
| `rtl/lz4_decompress_lane.sv` | One LZ4 decompressor lane |
| `rtl/codec_complex.sv` | 32 lanes: 16 compress and 16 decompress, plus raw-plane bypass |
| `rtl/plane_reconstruct.sv` | Operators R and T⁻¹: zero fill, inverse KV transform, rounding, packing |
| `rtl/plane_scheduler.sv` | Per-bank plane FIFOs, row-hit first, DRAM command issue |
| `rtl/trace_controller.sv` | Top level |
| `tb/tb_<module>.sv` | One self-checking testbench per module |
| `tb/dram_model.sv` | Behavioural DRAM used by the scheduler and top-level testbenches |
| `tb/tb_ref_pkg.sv` | Reference models: LZ4 encoder/decoder, KV transform, view code with rounding |

## A.2 Storage format

**Bit-planes.** A block holds 2048 BF16 words. Plane *i* holds bit *i* of every
word, so a plane is 2048 bits (256 B, four 64 B lines). The planes are numbered by
BF16 bit position:

- the sign is plane 15;
- the exponent is planes 14 down to 7;
- the mantissa is planes 6 down to 0.

**KV transform.** The host writes a KV block token-major: word *e = t·128 + c*
for token *t* (0..15) and channel *c* (0..127). The encoder moves word *e* to
position *p = c·16 + t*, so each channel's 16 tokens become contiguous. Token 0
of each channel keeps its exponent, which serves as the base β_c. Tokens 1..15
store (exponent − β_c) mod 256. Sign and mantissa pass unchanged. The modular
delta keeps the transform lossless for any input. The inverse adds β_c back.

**Compression.** Each of the 16 planes is compressed separately into a standard
LZ4 block. A plane is stored raw if either:

- its stream would not be shorter than 256 B; or
- the block lies in the configured uncompressed region.

A block whose planes are all raw is marked *bypass*.

**Plane bundle.** The stored planes are appended at a bump pointer in device DRAM,
sign plane first, down to plane 0. Each plane is padded to whole lines, so it takes
1 to 4 lines.

**Index entry.** Each block has one 64 B index entry. It is kept at device line
address 2³² + block number, which is the upper half of a 2³³-line (512 GiB)
device. The entry holds:

- valid, KV and bypass flags;
- 16 raw flags;
- the 33-bit line address of the bundle;
- sixteen 9-bit plane lengths in bytes.

That is 196 of the 512 bits. 64 B per 4 KB block is the paper's 1.56 % overhead.

**Capacity.** The block number is 26 bits. The full-precision view therefore spans
256 GiB, and the host address is 40 bits.

## A.3 Precision views

A view is configured by (r_E, r_M, d_E, d_M), an element width 2^ret_lg bits
equal to 1 + r_E + r_M, and a base host address. Up to four views are configured.

- **View 0** is the lossless full-precision view: r_E = 8, r_M = 7, 16-bit
  elements. It is the only view that accepts stores.
- **Reduced views** return packed N-bit codes, with 512/N elements per 64 B line.
  A reduced view's region is N/16 of the full-precision region, as in the paper's
  address-alias figure, where view P_i spans L·N_i bits.

**Plane masks.** The returned planes are the sign, the top r_E exponent planes and
the top r_M mantissa planes. The fetch mask adds d_E exponent and d_M mantissa
guard planes below them. Both masks are clipped to their field.

**Rounding.** Round to nearest, ties to even, applied to the concatenated kept
bits. The result saturates at the all-ones code instead of wrapping into the sign.

- The guard bits are the mantissa guard planes when mantissa bits are kept, or
  when all 8 exponent bits are kept.
- Otherwise the guard bits are the exponent guard planes.
- The first guard bit is the round bit. The rest form the sticky bit.

**KV blocks in reduced views.** A KV block stores exponent deltas, and the top bits
of a delta do not give the top bits of the exponent. A reduced view of a KV block
therefore fetches all eight exponent planes, rebuilds the exponents, and then cuts
and rounds. Sign and mantissa planes are still fetched selectively.

## A.4 Operation

**Store path.**

1. A store to view 0 is placed in a staging slot, one slot per open block. It is
   acknowledged once staged.
2. If no slot is free, `req_ready` falls. This is the backpressure case.
3. For KV blocks the slot also tracks the window index: the number of complete
   16-token windows received.
4. When all 64 lines of a block are present, the commit engine runs:
   - transform and plane split;
   - parallel compression of the 16 planes;
   - bundle lines written through the scheduler;
   - the index entry written to DRAM and into the index cache;
   - the slot freed.

**Load path.**

1. The front end decodes the view and attaches the fetch mask. This takes 5 cycles.
2. The index entry comes from the cache in 2 cycles. On a miss it comes from one
   extra DRAM read of the metadata region.
3. Only the lines of masked planes are requested, so unmasked planes are never
   read.
4. Compressed planes are decoded. Raw planes bypass the lanes, and a bypass block
   skips the codec stage altogether.
5. The requested line is rebuilt and returned.

A load waits while its block is complete in the staging buffer or being committed.

**Scheduler.** Each bank has a FIFO.

- Within a bank, the oldest row-hit request is served first, otherwise the oldest
  request.
- Across banks, column commands win over ACT/PRE, with round robin among banks of
  the same class.
- A request becomes eligible 9 cycles after it is queued, so an idle scheduler
  issues its first command 10 cycles after the request (the paper's S stage).
- Timing: tRCD = tCL = 27 cycles, tRP = 27, and column commands are 4 cycles apart
  (burst).
- The device line address is {row, bank[3:0], column[3:0]}: 16 banks and 1 KB rows.
  Consecutive lines of a bundle share a row unless they cross a 16-line boundary.

## A.5 Timing against the paper

The paper's load-to-use figure breaks down as:

- F = 5 cycles (front end);
- M = 2 cycles (metadata);
- S = 10 cycles (scheduler);
- a 58-cycle DRAM window (tRCD 27 + tCL 27 + burst 4);
- a 32-cycle codec stage that starts with the first data and overlaps the DRAM
  window;
- 89 cycles in total, 85 at 3x compression, and 76 on the bypass path.

Measured in the testbenches:

| Stage | Paper | This design |
|---|---|---|
| Front end | 5 | 5 (checked on every request) |
| Index lookup, hit | 2 | 2 (checked) |
| Scheduler + DRAM, closed bank | 10 + 58 | 68 from request to data (checked) |
| Scheduler + DRAM, open row | — | 41 (checked) |
| Whole load, top level | 85–89 (76 bypass) | about 750 to 4000 |

The first four stages match. The whole load does not, because of three choices
made to keep the design small:

1. **Byte-serial codec lanes.** Each LZ4 lane handles one byte per cycle. A plane
   takes roughly 250–500 cycles instead of being streamed under the DRAM window.
2. **Whole-block reads.** A load reads every line of each masked plane and
   reconstructs the whole 4 KB block, then returns the requested line. It does not
   fetch only the slice that the line needs.
3. **One load at a time.** Only one load is in flight, and it shares the scheduler
   with commits of staged blocks.

The 256 GB/s line rate of the paper's 7 nm implementation is not reached for the
same reasons.

## A.6 Differences from the paper and choices made here

**Codec.**
- The paper reuses a commodity LZ4 engine without describing it. The compressor
  here finds only runs of a repeated byte (offset-1 matches), which are what the
  bit-plane layout exposes.
- Its output is valid LZ4 and the decompressor accepts any offset. Compression
  ratios are therefore lower than a hash-chain LZ4 encoder would achieve, and much
  lower than the paper's ZSTD figures.

**Reduced-view data.**
- The paper says at one point that missing low planes are zero-padded back to
  16-bit containers. At another, its address-alias figure gives view P_i a span of
  L·N_i bits.
- This design follows the figure: reduced views return packed N-bit codes.
- Element widths must be powers of two, so a line holds whole elements.

**Metadata timing.** The paper says the index resolves offsets in a single cycle,
but its timing breakdown gives 2 cycles. The cache uses 2 cycles.

**Choices the paper does not state:**
- Index cache: 256 sets, direct mapped.
- 4 staging slots.
- Scheduler queues of 8 entries.
- tRP = 27.
- KV blocks are 16 tokens × 128 channels.
- β is the first token of each channel.
- A 512 GiB device, with a 256 GiB full-precision capacity.

**Not built:**
- reclaiming the space of overwritten bundles (garbage collection);
- more than one outstanding load;
- response backpressure;
- merging a partly staged block with its committed copy. A load of a block that is
  only partly staged returns the last committed data;
- the CXL link layers, the DDR PHY and the DRAM devices.

## A.7 Verification

Each module has a self-checking testbench. Each compares the module against an
independent reference model, runs under a watchdog, and ends with a
`TB_RESULT checks=… failures=…` line. Latencies are checked where the paper gives
them.

The top-level testbench `tb_trace_controller` uses the full-size parameters with no
overrides. It:

- writes weight, KV and uncompressed-region blocks;
- reads them back through four views (16-bit, two 8-bit formats, 4-bit), including
  a rounding view and KV blocks through reduced views;
- checks every returned line against the reference model;
- counts each mechanism and fails if any never occurs. The mechanisms counted are
  compressed and raw planes, bypass loads, index hits and misses, skipped planes,
  staging stalls, row hits, KV and uncompressed commits, held loads and refused
  requests;
- checks that the DRAM model sees no protocol violations.

Every module also has a deliberately broken copy (one changed line). The matching
testbench reports failures against it, which shows that the checks are sensitive
to that behaviour.

To run one testbench with Verilator 5 (the remaining modules are found via `-I`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/trace_pkg.sv tb/tb_ref_pkg.sv tb/tb_trace_controller.sv \
  --top-module tb_trace_controller
./obj_dir/Vtb_trace_controller
```

## A.8 Capacity for the paper's workloads

With 2²⁶ blocks of 4 KB, the full-precision capacity is 256 GiB. Each of the
following fits:

| Workload | Size | Blocks |
|---|---|---|
| GPT-OSS-120B BF16 weights | about 240 GB | 58.6 M |
| GPT-OSS-120B-MXFP4 weights | about 60 GB | — |
| LLaMA 3.1 70B BF16 weights | 141 GB | — |
| Mixtral 8×7B BF16 weights | 93 GB | — |
| OPT 30B BF16 weights | 60 GB | — |
| GPT-OSS-120B KV, one sequence of 256k tokens | about 19 GB | — |
| LLaMA 3.1 8B KV at 128k tokens | about 17 GB | — |

The largest entry, 58.6 M blocks, is within the 67.1 M available. The two KV sizes
use the public model shapes, which the paper does not list.
