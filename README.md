# AI smart NIC: ring all-reduce with BFP compression

This is the FPGA logic that sits in an AI smart NIC for data-parallel training. Each training
node has one such NIC. The NICs are connected in a ring. When the worker finishes its backward
pass, it hands its FP32 weight gradients to the NIC. The NICs of all nodes then sum the
gradients with a pipelined ring all-reduce. Each NIC writes the summed gradients back into its
own worker's memory. The worker CPU does not touch the network or the additions.

On the network the gradients can optionally travel in BFP16 block floating point. In this
format 16 values share one 8-bit exponent, and each value keeps a sign bit and a 7-bit
magnitude. A block of 16 FP32 values (512 bits) becomes 136 bits, so a link carries 3.76
times as many gradients.

## Data path of one node

```
 worker memory                                                 next node
   rd_req/rd_rsp --> host_dma --> In FIFO --+                    ^
                                            |                    | eth_tx (256-bit flits)
                                            v                    |
                 Rx FIFO -------------> reduce_unit        stream_gearbox (136->256)
                    ^                  (8 x fp32_add)            ^
                    |                       |                    |
             bfp_decompress                 v                bfp_compress
                    ^                 allreduce_ctrl --> Tx FIFO -+  (or raw FP32)
                    |                 (steering)   \
             stream_gearbox (256->136)              --> Out FIFO --> host_dma --> wr_req
                    ^
   previous node -- eth_rx
```

- **host_dma** reads the local gradients from worker memory into the In FIFO, one chunk at a
  time in ring order. It writes each finished chunk from the Out FIFO back to the same place.
- **reduce_unit** has eight FP32 adder lanes, so one 256-bit word (8 gradients) is handled per
  clock. For each word it either adds the local (In) and received (Rx) operands, or passes one
  of them through unchanged.
- **allreduce_ctrl** is the control FSM. It knows the node's rank and the ring size. For every
  word it picks the operation, and it steers each result to the Tx FIFO (on to the next
  node), to the Out FIFO (final result), or to both.
- **bfp_compress** / **bfp_decompress** convert between FP32 and BFP16 on the network side
  only. Worker memory and the adders always see FP32.
- **stream_gearbox** packs 136-bit blocks back to back into 256-bit flits, and unpacks them on
  the receiving side. Because of this packing, compression reduces the number of flits on the
  link.
- **sync_fifo** is the FIFO used for the In, Rx, Tx and Out queues.
- **ai_smart_nic** is the top level. It connects all of the above.

### Schedule

The gradient vector of `count` elements is split into N chunks, one per node. Each chunk
holds `ceil(count/N)` elements rounded up to whole 16-element blocks, and the tail is
zero-padded. Node r runs 2N-1 operations per chunk position:

| op k | operation | result goes to |
|------|-----------|----------------|
| 0 | pass the local chunk r | Tx |
| 1 .. N-2 | local + received | Tx |
| N-1 | local + received (this chunk is now fully reduced) | Tx and Out |
| N .. 2N-3 | pass the received final chunk | Tx and Out |
| 2N-2 | pass the received final chunk | Out |

The reads walk chunks r, r-1, … and the write-backs walk chunks r+1, r, … (indices mod N). A
ring of one node just copies the data through.

Chunks are cut into segments of `SEG_WORDS` = 256 words, and the whole schedule runs once per
segment. This keeps the data in flight around the ring below what the FIFOs can hold, so large
layers (a 2048×2048 layer gives 87382 words per chunk on 6 nodes) cannot deadlock the ring.
Each segment is one network message, and its last flit is flagged with `last`.

The all-reduce is in place: the summed gradients overwrite the local gradients. Every node
receives the same sums. The node that completes a chunk keeps its exact FP32 sum. With BFP on,
the other nodes receive that sum after one more compression.

### BFP16 rules

- The shared exponent is the largest biased exponent in the block.
- Each magnitude is the 24-bit significand shifted right by the exponent difference and
  truncated to 7 bits.
- Subnormal inputs count as zero. Inputs are assumed finite.
- Decoding is exact, except that results below the FP32 normal range become zero. A zero
  magnitude decodes to +0.

### FP32 adder

- Three pipeline stages.
- IEEE round to nearest even, with full subnormal support.
- Any NaN result is the quiet NaN 0x7fc00000.

### Network framing

- The packer pads the last flit of a message with zeros.
- When that padding is a whole block or longer, the packer also raises `pad`, and the unpacker
  then discards that block's worth of padding. For example, 2 blocks = 272 bits = 2 flits
  with 240 bits of padding. One flag is enough, because the padding is always shorter than
  two blocks.
- With compression off, the FP32 words go straight onto the link.

## Interfaces of `ai_smart_nic`

All streams use valid/ready handshakes. Everything runs on one clock (`clk`) with an
active-low asynchronous reset (`rst_n`).

| port group | meaning |
|------------|---------|
| `req_valid/req_ready/req` | start an all-reduce with `{base, count, nodes, rank, bfp_en}`. `base` is the byte address of the FP32 array, `nodes` ≤ 32, `rank` < `nodes`. Accepted only when idle. |
| `done`, `busy` | `done` pulses once all results are written and all flits have left |
| `rd_req_*`, `rd_rsp_*` | 32-byte reads of worker memory. Responses come back in request order, with up to `TAGS` outstanding. |
| `wr_req_*` | 32-byte writes with per-byte enables. Bytes beyond `count` are not written. |
| `eth_tx_*`, `eth_rx_*` | 256-bit flits with `last` and `pad`. `eth_tx` goes to the next node in the ring and `eth_rx` comes from the previous one. |

All nodes of one all-reduce must use the same `count`, `nodes` and `bfp_en`, and distinct ranks.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `LANES_P` | 8 | FP32 lanes per word. 8 matches a 40 Gb/s link. Set 16 for 100 Gb/s (512-bit words). |
| `FIFO_DEPTH` | 512 | words in each of the four FIFOs |
| `TAGS` | 256 | outstanding worker-memory reads |
| `SEG_WORDS` | 256 | words per segment / network message |

BFP block size, exponent width and mantissa width are set in `nic_pkg` (16, 8, 7). The
compressor and decompressor take them as parameters.

### Timing

- After a request, the chunk size is found by a 33-cycle serial divide.
- At full speed the ring then moves one word per clock per node. An all-reduce takes about
  (2N-1) × chunk words cycles plus a small per-segment pipeline latency.
- The adder lanes add three cycles of latency.
- The compressor and decompressor each add one block (two words) of buffering.

## Where this RTL goes beyond the published description

The published description of this NIC gives the block diagram, the ring all-reduce and the
BFP16 format (16 elements, 8-bit shared exponent, 7-bit mantissas, 8 lanes at 40 Gb/s, 16 at
100 Gb/s). The following points are choices made here and may differ from the original:

- FIFO depths, the number of outstanding reads, and the adder latency.
- Segmenting chunks into 256-word messages.
- Truncation (rather than rounding) in the compressor, and treating subnormal inputs as zero.
- Network framing with the `last` and `pad` flags.
- The request format, and the in-place write-back to worker memory.
- Chunk sizes rounded up to whole BFP blocks.

The FP32 adders are plain logic here; synthesis decides whether to map parts of them to DSPs.
The 400 Gb/s variant (four 100 Gb/s interfaces) is not built.

## Simulating

Every testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
  rtl/nic_pkg.sv tb/fp_ref_pkg.sv tb/tb_ai_smart_nic.sv --top-module tb_ai_smart_nic
./obj_dir/Vtb_ai_smart_nic
```

Replace `tb_ai_smart_nic` with any other `tb_*` module. `tb_full_size` simulates about one
million cycles and takes under half a minute.

## Not included

These parts stay outside the design, and their signals are ports of `ai_smart_nic`:

- the PCIe/CCI-P host shim;
- the Ethernet/inter-FPGA transport;
- the network switch;
- the worker CPU and its software.

## Files

- `rtl/nic_pkg.sv`: shared constants and types.
- `rtl/sync_fifo.sv`, `rtl/fp32_add.sv`, `rtl/reduce_unit.sv`, `rtl/allreduce_ctrl.sv`,
  `rtl/host_dma.sv`, `rtl/bfp_compress.sv`, `rtl/bfp_decompress.sv`,
  `rtl/stream_gearbox.sv`, `rtl/ai_smart_nic.sv`: the blocks described above.
- `tb/tb_<module>.sv`: a self-checking testbench for each block. Each ends with a
  `TB_RESULT checks=… failures=…` line.
- `tb/fp_ref_pkg.sv`: reference FP32 addition and BFP16 encode/decode, used by the
  testbenches.
- `tb/nic_ring_env.sv`: a ring of `ai_smart_nic` nodes with worker memories. Its links and
  memories have random stalls and outages. It checks every node's memory bit for bit against
  a reference all-reduce.
  - `tb/tb_ai_smart_nic.sv` runs a 6-node set of cases that exercise every mechanism.
  - `tb/tb_full_size.sv` all-reduces one 2048×2048 FP32 layer (4.2 M gradients) across 6
    nodes with BFP compression.

## Verification summary

| testbench | what it covers |
|-----------|----------------|
| tb_fp32_add | 20k random and corner-case operand pairs against a reference, with random stalls |
| tb_sync_fifo | random push/pop against a queue model |
| tb_reduce_unit | all three modes, latency, back-pressure, one word per clock |
| tb_bfp_compress / tb_bfp_decompress | 2000 random blocks each against the reference encoder/decoder, plus throughput |
| tb_stream_gearbox | packer + unpacker round trip, flits per message, zero padding, pad flag |
| tb_allreduce_ctrl | schedule and steering for rings of 1–8 nodes and every rank, plus 32 nodes and multi-segment chunks |
| tb_host_dma | read and write order, padding, byte enables, segments, out-of-order back-pressure |
| tb_ai_smart_nic | 6-node ring: BFP and FP32, padding, 2-block tails, a single node, link and memory outages, full-speed cycle bounds, and a count of every mechanism |
| tb_full_size | one 2048×2048 layer on 6 nodes (961k cycles), bit-exact |
