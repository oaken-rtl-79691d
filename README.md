# Oaken KV-cache quantization path in SystemVerilog

In LLM serving with large batches, the key/value (KV) cache sets both the memory
footprint and the memory traffic. Oaken's answer is to store the KV cache in about
4.8 bits per element, and to quantize and dequantize it in hardware that sits in the
DMA path between the compute units and device memory. The matrix units therefore
keep seeing 16-bit values, while memory holds only the compressed form.

The scheme mixes offline and online work:

* **Offline.** Four thresholds per layer are profiled, separately for keys and values:
  `T_lo^o <= T_lo^i <= T_hi^i <= T_hi^o`. They split every element into one of three groups.
  * **outer:** `x < T_lo^o` or `x > T_hi^o`. These are the rare large outliers.
  * **middle:** `T_lo^o <= x < T_lo^i` or `T_hi^i < x <= T_hi^o`. This group holds most values.
  * **inner:** `T_lo^i <= x <= T_hi^i`. These are the rare values close to zero.
* **Online, per token.** Each group of a vector gets its own min/max uniform quantizer.
  Middle values get 4-bit codes. Inner and outer values get 5-bit codes.
* **Group shift.** Before quantizing, outer values are shifted toward zero by `T_hi^o` or
  `T_lo^o`, and middle values by `T_hi^i` or `T_lo^i`. This narrows each group's range, so
  the few bits stretch further.
* **Fused dense-and-sparse storage.** Every element owns a 4-bit slot in a dense array.
  For an inner or outer element, that slot holds the low 4 bits of its 5-bit code. A
  one-byte COO entry, `{index[5:0], group, sign}`, holds the remaining bit and says where
  the outlier sits. Sparse storage therefore costs one byte per outlier. With roughly 10 %
  outliers, the cost is `(4*64 + 0.1*64*8)/64 = 4.8` bits per element.

The RTL here covers the part of an Oaken core that does this work: the quantization
engine, the dequantization engine, the memory management unit (MMU) that places the
variable-size records in memory, and the per-layer threshold registers. They are
wrapped in a DMA top, `oaken_dma`. The matrix and vector processing units, the
memory controllers, the host link and the on-chip interconnect come from an earlier
accelerator and are not part of this design. `oaken_dma` exposes the ports where
those units would connect.

## Number format and vector shape

* **Elements** are `data_t`, a signed 16-bit fixed-point value. The original design
  works on FP16. Integer arithmetic was chosen here so that the engines need no
  floating-point units. Nothing in the algorithm depends on the scale of the
  integers, so any fixed-point position may be used by convention.
* **Vectors.** The unit of quantization is a vector of `VEC_LEN = 64` elements. This
  follows from the 6-bit COO index. A 128-element attention head is handled as two
  vectors, each with its own scales.
* **Beats.** Vectors move in `NBEATS = 2` beats of `LANES = 32` elements. 32 is the vector
  width of the compute core this design plugs into.
* **Scale block.** For each group, 16 bytes store `Min` and `step = (Max-Min)/(2^m-1)`.
  * Fields of `scales_t`, from the top: 8 bits of padding, then outer, inner, middle,
    each a 16-bit `Min` and a 24-bit `step`.
  * `step` carries 8 fraction bits.
  * The quantizer uses the reciprocal `sigma = (2^m-1)/(Max-Min)`, with 16 fraction bits,
    and computes `q = round((x-Min)*sigma)`. The result is clamped to `2^m-1`.
  * The dequantizer computes `Min + q*step`. It therefore multiplies and never divides.
  * These scales add 2 bits per element beyond the 4.8 above. The paper does not count
    them.

## Quantization engine (`oaken_quant_engine`)

A vector passes through four phases.

1. **IN, 2 cycles.**
   * `oaken_decomposer` sorts each lane into its group and applies the group shift. It
     sends middle values to the inlier path and inner/outer values to the outlier path,
     with zeros in the other path.
   * Both paths are written to vector buffers.
   * Three `oaken_minmax_finder`s track the ranges of the middle, inner and outer groups.
   * The thresholds are taken with the first beat.
2. **SIGMA, about 26 cycles.** Three `oaken_sigma_calc`s compute `sigma` and `step` in
   parallel. Each uses a 24-bit restoring divider (`oaken_seq_div`) that produces one
   quotient bit per cycle. An empty group, or a group with zero range, gets `sigma = 0`.
   All its codes are then 0 and decode to `Min`.
3. **QUANT, 2 cycles.** The buffers are read back.
   * Middle lanes become 4-bit codes. Inner and outer lanes become 5-bit codes.
   * The dense slot gets the inlier code ORed with the low 4 bits of the outlier code.
     Exactly one of the two is non-zero.
   * Each outlier lane also makes a COO entry. `oaken_zero_remove_shifter` appends the
     entries of each beat after the entries already held, leaving no gaps.
4. **OUT.** The record is held until the consumer takes it:
   * 256 bits of codes;
   * 128 bits of scales;
   * up to 64 COO entries and their count.

One vector is processed at a time. From first beat to record ready takes about
30 cycles.

## Dequantization engine (`oaken_dequant_engine`)

A record is loaded into one buffer, together with the thresholds of its layer.
`oaken_zero_insert_shifter` turns the packed COO list back into three per-position
bit masks:

* is-outlier;
* group, inner or outer;
* sign bit.

The vector then leaves at one beat per cycle:

* **Positions without an entry** are decoded as middle values.
* **Positions with an entry** get a 5-bit code, made of the sign bit followed by the 4
  dense bits. The code is decoded with the inner or outer scale.

The group shift has to be undone. Storage keeps no sign of the original value, so the
engine uses the sign of the reconstructed value instead:

* a reconstructed value `>= 0` gets `T_hi` added back;
* a negative one gets `T_lo` added back;
* the sum saturates at 16 bits.

This is where the design goes beyond what the paper draws. The paper's dequantizer has
no threshold input. Because a correctly shifted value keeps its sign, the rule
recovers every value except those that round across zero.

A new record is accepted in the cycle the previous one's last beat leaves. Records that
follow each other therefore stream without gaps.

## Memory management (`oaken_mmu`)

Every vector produces two records of different sizes:

* a dense record of 48 bytes, always present;
* a sparse record of one byte per outlier, often zero bytes.

The MMU keeps two tables indexed by `{stream, token}`. A stream is the sequence of one
attention head's key or value half-vectors in one layer; the host assigns stream
numbers. Each table entry holds a byte address and a transfer size.

* **Allocation.** An ALLOC command places the next token's dense record right after the
  previous one in the stream's current dense page, and does the same for the sparse
  record in the stream's current sparse page.
  * When a record would not fit in what remains of a page, a fresh page is taken from a
    linear pool. Pages are `PAGE_BYTES = 4096`, with `NUM_PAGES = 262144`, i.e. 1 GiB
    per core. A record never straddles a page.
  * Consecutive tokens of a stream therefore sit back to back in memory. This is what
    makes burst reads of the whole history possible.
* **Lookup.** A LOOKUP command returns the stored entries of a token.
* **Errors** are reported for:
  * a stream holding `MAX_SEQ = 32768` tokens;
  * an empty pool;
  * a lookup of a token that has not been written.
* **Freeing.** `clear` returns every page at once. Individual pages are not freed.

The tables are plain arrays. At the default sizes, each holds 262144 entries of 46 bits.

## DMA top (`oaken_dma`)

* **Write path.** A vector arrives from the matrix unit as 2 beats, tagged with stream,
  layer and K/V. It is quantized, the MMU allocates its slot, and the DMA writes the
  dense record and then the sparse record. `wr_ack` returns the token index, and
  `wr_error` is set if allocation failed.
* **Read path.** A request names a stream, its layer and K/V tag, a first token and a
  count.
  * The read path is a three-stage pipeline joined by FIFOs, so that many tokens are
    in flight at once:
    1. **lookup:** one MMU lookup per token, at most one every second cycle;
    2. **issue:** a dense read request and, if the token has outliers, a sparse one;
    3. **collect:** responses are assembled, in order, into a record FIFO that feeds
       the dequantization engine.
  * A token counts as in flight from its first request until the dequantization
    engine takes its record. At most `RD_DEPTH = 8` tokens may be in flight. The
    record FIFO has `RD_DEPTH` entries, so it always has room for every response.
    This matters because the memory response channel cannot be stalled.
  * With an 8-cycle memory latency, a long history streams out at one beat per cycle.
    That is one token every two cycles, which matches the MMU's lookup rate.
  * `kv_out_last` marks the final beat of the request.
  * `rd_error` reports a token that was never written. The tokens before it are still
    delivered; the rest of the request is dropped, and `kv_out_last` is not given.
* **MMU sharing.** Both paths share the MMU. The write path wins when both ask in the
  same cycle.
* **Memory port.** The port is `mem_wr_*` / `mem_rd_*` / `mem_rsp_*`:
  * byte address and byte length per request;
  * one 512-bit word per request, with byte k in bits `[8k+7:8k]`;
  * read data returns in order, with no back-pressure.
  
  A dense record is stored as codes (32 bytes) followed by scales (16 bytes). A sparse
  record holds byte k = COO entry k.

The port issues one request per record. Records of consecutive tokens lie contiguous
in memory and are requested back to back at rising addresses. However, the read path
does not merge them into multi-record burst transactions, so each record costs one
transaction. Merging is the natural next step. It needs a multi-beat response
channel, and an unpacker that splits the byte stream into 48-byte dense records and
variable-size sparse records.

**Throughput.** The two paths differ widely in speed:

* **Write path:** about 40 cycles per vector, because the quantization engine takes
  one vector at a time and waits for its dividers.
* **Read path:** 2 cycles per vector.

That imbalance is deliberate. In a decode step each stream gains one token but
re-reads its whole history. For a 2K-token history, reading a stream costs about
4096 cycles, against about 40 for the write. The quantizer's latency is therefore
not worth pipelining. The read rate, 64 bytes of restored KV per cycle from about
27 bytes of compressed data per cycle, is what has to keep up with memory.

## Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `LANES` | 32 | vector width of the host core |
| `VEC_LEN` | 64 | 6-bit COO index |
| inlier / outlier bits | 4 / 5 | the Oaken scheme |
| `NUM_LAYERS` | 80 | largest model evaluated (a 70B model with 80 layers) |
| `NUM_STREAMS` | 8 | own choice; the original gives no table size |
| `MAX_SEQ` | 32768 | longest sequence evaluated |
| `PAGE_BYTES` | 4096 | own choice |
| `NUM_PAGES` | 262144 | 256 GB of device memory shared by 256 cores |
| `ADDR_W` | 38 | byte address of 256 GB |
| `RD_DEPTH` | 8 | own choice: tokens in flight on the read path |

`NUM_STREAMS = 8` is far below what one full request needs: layers × KV heads × K/V ×
2 halves, which is thousands of streams. The table size is therefore the parameter to
raise in a real configuration. Its cost in SRAM grows as `NUM_STREAMS * MAX_SEQ * 92`
bits.

## Where this departs from the original

* Fixed point replaces FP16.
* Inner and outer groups each have their own min/max finder and scale. The text
  describes per-group scales, while the block diagram draws a single shared finder.
  The text was followed.
* The dequantizer takes the layer thresholds to undo the group shift, as described
  above.
* Scales are stored as `Min` and `step`, with an assumed 16-byte layout.
* Read requests are per record and pipelined, not merged into burst transactions.
* Token-level batch scheduling across cores is outside this block.

## Files and simulation

**Source files.** `rtl/oaken_pkg.sv` holds the shared types and the reference
`quantize` / `dequantize` / `unshift` functions. Every other file in `rtl/` holds one
module.

**Testbenches.** Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* **Reference model.** The testbenches compare against `tb/oaken_ref_pkg.sv`, an
  independent integer model of the whole encode/decode.
* **Memory model.** `tb/oaken_mem_model.sv` is a behavioural device memory with
  latency and random stalls.
* **`tb_oaken_dma`** runs the top at its default parameters. It writes and reads back
  many vectors and counts each mechanism:
  * page changes, dense and sparse;
  * vectors without outliers;
  * inner+outer mixes;
  * output and memory stalls;
  * MMU conflicts between the paths;
  * a full read window;
  * read errors.
* **`tb_oaken_head_workload`** writes one attention head's keys and values for 2048
  tokens across four streams, the size of a 1K-in/1K-out request. It then reads the
  whole history back in one request per stream.
  * It checks every element, and checks the page count against the placement rule.
  * It requires the codes and COO bytes to cost about 4.8 bits per element. The measured
    cost is 4.80.
  * It requires reads to stream at close to one beat per cycle. The measured rate is
    1.003 cycles per beat.

Example with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_oaken_dma \
    rtl/oaken_pkg.sv $(ls rtl/*.sv | grep -v oaken_pkg) \
    tb/oaken_ref_pkg.sv tb/oaken_mem_model.sv tb/tb_oaken_dma.sv
./obj_dir/Vtb_oaken_dma
```

The packages must come before the files that import them. The full-size DMA
testbenches take about a minute to build, because the two MMU tables are large.
Each one then simulates in a few seconds.
