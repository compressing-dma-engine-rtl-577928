# Compressing DMA engine for offloading sparse activations

When a GPU trains a deep network whose activations do not fit in its own
memory, the activations are copied to host memory after the forward pass and
copied back before the backward pass. These copies cross PCIe (16 GB/s for
gen3) and become the bottleneck. After ReLU layers, about half of the
activation values, and often far more, are exactly zero. This design compresses
the activations in hardware while they are being copied. It encodes each
128-byte line as a 32-bit zero mask followed by only the non-zero words, so
fewer bytes cross PCIe.

The hardware has three parts.

- **Compression units ("C").** One sits beside each of the GPU's six memory
  controllers. It compresses lines as they are read from DRAM and
  decompresses them as they are written back.
- **Crossbar.** Because the units compress before the crossbar, the crossbar
  carries only compressed data. The DMA engine therefore needs no wider
  crossbar port even when data compresses 10× or more.
- **DMA engine with staging buffer "B".** It keeps enough line reads in flight
  to fill PCIe, puts the compressed lines back in address order, and packs
  them into the PCIe stream. In the other direction it unpacks the stream and
  sends each line to its memory partition for decompression.

This repository gives synthesizable SystemVerilog for all of these parts, and
self-checking testbenches for each.

## Zero-value compression (ZVC) format

A line is 32 words of 32 bits (128B), moved as four 32B sectors of 8 words.
Its compressed form is:

```
mask[31:0]   bit i = 1  <=>  word i of the line is non-zero
w0 .. wn-1   the n = popcount(mask) non-zero words, in word order
```

- An all-zero line shrinks to its mask (4B).
- A dense line grows by 4B.
- Word 0 is mask bit 0 and is stored in the low-order bits of every packed
  array.
- In "raw" mode a line is sent as its 32 words without a mask. This serves
  ordinary, uncompressed copies. Internally a raw line is handled as mask
  `32'hFFFF_FFFF`.

## Compression pipeline (`zvc_compressor`, `zvc_prefix_sum`)

Each cycle the compressor takes one 32B sector and passes it through three
stages.

1. **Compare and prefix sum.** The 8 words are compared with zero, giving the
   sector's 8-bit mask segment. A prefix sum over the zero flags gives, for
   each word, the number of zero words in front of it.
   - The prefix network (`zvc_prefix_sum`) is a Brent-Kung tree: 7 up-sweep
     and 4 down-sweep 3-bit adders, 11 in all.
   - The total count gets one more bit, because a sector can hold 8 zeros.
2. **Bubble-collapsing shifter.** Each non-zero word moves down by its count
   of leading zeros. The sector's non-zero words then sit in words 0..n−1.
3. **Shift and append.** Those n words are written into a 32-word line buffer
   at the position held in a length register, and the length grows by n. The
   8-bit segment is appended to the line mask.

Sector 0 of a line clears the line buffer. The finished line (mask, count,
packed words, tag) is offered for exactly one cycle, six cycles after sector 0
when the four sectors arrive back to back. The compressor cannot be stalled.
The unit around it makes sure there is always room for the result.

## Decompression pipeline (`zvc_decompressor`)

A compressed line arrives as a packet of 1 to 4 flits.

- Each flit carries the mask and up to 8 payload words.
- An all-zero line is a single flit with no payload.

For each output sector, the first stage does the following:

- It takes the sector's 8-bit mask segment and pop-counts it, which gives the
  number of payload words the sector uses.
- It computes the mux selects with a second prefix sum on the inverted
  segment. Word i takes payload word "number of non-zero words in front of
  i".
- It appends incoming payload to a 16-word staging register, so that a sector
  whose words straddle two flits can wait for the second one.

In the second stage, each word is muxed from the selected payload word, or is
set to zero where its mask bit is 0. The result goes to a valid/ready output
register. One decompressed 32B sector leaves per cycle.

A sector starts as soon as its payload words are present, and the next line's
first flit is accepted in the cycle the current line's last sector is formed.
So a line needs only two cycles beyond the arrival of its data. The testbench
checks this exact completion cycle for every sector.

## The compression unit beside each memory controller (`cdma_cunit`)

**Read (offload).**
1. A request from the crossbar names a line and carries a tag.
2. The unit reads the line's four sectors from its memory controller and
   feeds the returning data to the compressor.
3. It returns the compressed line as `flits_for(nnz)` response flits. Each
   flit carries the tag, mask, word count, flit index and up to 8 words.

A credit counter allows at most `LINE_Q` (16) lines inside the unit at once.
Every line the compressor produces therefore has a place in the unit's output
queue. Sixteen lines cover a read latency of about 85 cycles at the unit's
share of the traffic (about one line in six cycles); a slower memory needs a
larger `LINE_Q`.

**Write (prefetch).**
1. A packet of compressed flits enters the decompressor.
2. Each decompressed sector is written to the memory controller.
3. When the fourth sector has been accepted, a one-flit acknowledgement with
   the packet's tag is queued.
4. Acknowledgements go out ahead of read data, but only between packets.

Memory-controller side:

- Sector reads use valid/ready.
- Read data returns in order, one sector per cycle, with no back-pressure.
- Sector writes use valid/ready.
- A sector address is `{line address, sector}`.

## Crossbar slice (`cdma_xbar`)

Only the part of the GPU crossbar that the DMA engine uses is modelled.

- **Requests** are demultiplexed to the partition named by the engine.
- **Responses** from the six partitions are merged by a round-robin arbiter.
  The arbiter keeps its grant until the granted packet's last flit has
  passed, so the flits of different lines never interleave.

One 32B flit moves per cycle in each direction.

## Buffer B and in-order reassembly (`cdma_buffer`)

This is the hardest part of the design to get right.

**Why it is needed.** To keep PCIe busy when lines compress well, the engine
must keep many line reads outstanding. It cannot know in advance which of
them will compress. If they do not, all of them come back at full size.

**Sizing.** The buffer is sized to the bandwidth-delay product of those
reads: 200 GB/s × 350 ns = 70,000 bytes. It is organised as 547 slots of one
uncompressed line (128B) each, plus each slot's mask and word count.

**Protocol.**
1. A line read may be issued only after it has taken the next free slot. The
   slot number travels with the read as its tag.
2. Responses from different partitions come back in any order. Each is
   written straight into its slot, and the slot is marked complete when its
   last flit arrives.
3. The drain side walks the slots in allocation order, which is address
   order. It waits for the head slot to complete.
4. It emits the head slot's stream words (the mask, then the non-zero words;
   in raw mode only the 32 words) to the packer in items of up to 8 words,
   one item per cycle. The mask shares the first item, so a line with at
   most 7 non-zero words leaves in a single cycle. Item k carries word 7 of
   payload flit k-1 followed by words 0..6 of flit k.
5. It then frees the slot.

As a result, the stream sent over PCIe lists the lines in address order
whatever order the memory partitions answered in.

`buf_full_stall` is high while a read is waiting for a slot. In normal
operation PCIe, not the buffer, limits the rate, so this happens often.

The buffer is written as an array of registers. A chip would use an SRAM
macro of the same shape.

## PCIe stream format (`cdma_stream_packer`, `cdma_stream_unpacker`)

The compressed lines of one transfer are concatenated with no gaps and cut
into 32B units. The last unit is zero-padded and marked `tx_last`.

- **Packer.** It appends items into a 16-word accumulator and sends a unit
  whenever more than 8 words are waiting. An item can enter in the same cycle
  that a unit leaves, so full items pass at one unit per cycle.
- **Unpacker.** It does the reverse for a transfer whose number of lines is
  known. Per line it takes the mask word, then emits 1 to 4 flits of up to 8
  payload words, each with the mask. After the last line it drops the padding.
  Taking the mask costs one cycle per line, so a raw line needs 5 cycles for
  128B. That is faster than PCIe gen3 at any clock above 640 MHz.

Both count the words of the transfer. The compressed size reported to
software is 4 × that count: masks plus non-zero words, without the final
padding.

## DMA engine and commands (`cdma_engine`)

A command is:

```
cmd_dir    0 = offload (GPU memory -> PCIe), 1 = prefetch (PCIe -> GPU memory)
cmd_raw    1 = plain copy, no compression
cmd_laddr  first 128B line of the GPU-memory region (27 bits: 12 GB)
cmd_nlines number of lines (27 bits)
```

- `cmd_ready` is high while the engine is idle.
- On completion `done_valid` pulses and `done_bytes` gives the compressed
  size of the region. This is the value a compressed `memcpy` would return to
  software. A zero-line command completes at once with size 0.

**Offload.** The engine issues one line read per cycle while buffer slots are
free and the crossbar accepts. Line addresses go to partitions round robin
(partition = line address mod 6). Completed lines drain from buffer B into the
packer and out on `tx_*`. The command ends with the last unit.

**Prefetch.** The unpacker turns `rx_*` into line packets, which go to the
partitions in the same round-robin order. The command ends when every line's
write acknowledgement has come back.

## Top level (`cdma_top`)

`cdma_top` connects the engine, the crossbar slice and six compression units.
Everything outside the compressing DMA path becomes a port:

- the command and completion interface;
- the PCIe transmit and receive streams (32B units, valid/ready);
- per memory controller, arrays `mc_rd_*` and `mc_wr_*` of sector read and
  write ports;
- the status outputs `buf_used` and `buf_full_stall`.

The parameters are `SLOTS` (547) and `LINE_Q` (16). All widths and counts live
in `cdma_pkg`.

## Verification

Every module has a testbench `tb/tb_<module>.sv`. Each one computes its
expected values independently of the RTL and ends with
`TB_RESULT checks=N failures=M`. The testbenches check the following rates
and latencies:

- **Compressor:** six cycles per line.
- **Decompressor:** the exact completion cycle of every sector, and 20 dense
  lines back to back within 84 cycles (one sector per cycle plus pipeline fill).
- **Compression unit:** a read returns its first flit 1 + DRAM latency + 6 + 1
  cycles after the request.
- **Packer:** one unit per cycle.
- **Unpacker:** 5 cycles per raw line.
- **Crossbar:** no port waits more than 5 packets.

`tb/gpu_dram_model.sv` is a behavioural model of the six memory controllers
with their DRAM. It has a fixed read latency, random back-pressure, and
counts accesses that arrive at the wrong partition.

**`tb_cdma_top`** runs a small system (`SLOTS = 8`). It does a compressed
offload of 120 lines of mixed sparsity and checks the PCIe stream word for
word against a reference encoding. It prefetches that stream into another
region and compares the memory. It then repeats both steps as raw copies. It
counts and requires each of these mechanisms:

- buffer-full stall;
- PCIe transmit back-pressure and receive gaps;
- crossbar contention;
- DRAM back-pressure;
- all-zero and dense lines;
- the switch between compressed and raw mode.

**`tb_cdma_top_full`** does the same with every parameter at its default (the
full 70KB buffer) and 2048-line (256KB) transfers. It takes a few seconds.

**`tb_cdma_workloads`** offloads 1024 lines of each of three kinds of
activation data through the default-size top, with PCIe and DRAM never
stalling, checks each stream word for word and measures the rate:

| data | compression ratio | cycles | activations per cycle |
|---|---|---|---|
| 49.4% zeros (an average training layer) | 1.88 | 2710 | 48.4 B |
| 1-2 non-zero words per line (the sparsest layers) | 14.27 | 1076 | 121.8 B |
| no zeros | 0.97 | 5174 | 25.3 B |

Two limits set these numbers. The engine issues one 128B line read per
cycle. Its output moves one 32B unit per cycle, and a line needs
ceil((nnz + 1) / 8) units there. The testbench requires each run to finish
within the sum of those units plus 200 cycles.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert rtl/cdma_pkg.sv rtl/cdma_fifo.sv \
  rtl/zvc_prefix_sum.sv rtl/zvc_compressor.sv rtl/zvc_decompressor.sv \
  rtl/cdma_cunit.sv rtl/cdma_xbar.sv rtl/cdma_buffer.sv \
  rtl/cdma_stream_packer.sv rtl/cdma_stream_unpacker.sv rtl/cdma_engine.sv \
  rtl/cdma_top.sv tb/gpu_dram_model.sv tb/tb_cdma_top.sv --top-module tb_cdma_top
./obj_dir/Vtb_cdma_top
```

A note for anyone who changes the testbenches: random values are drawn in
separate statements (`r = $urandom();`), not inside a larger expression in a
loop. Verilator 5.050 was seen to evaluate `$urandom()` only once for such an
expression in an unrolled loop.

## Where this design departs from the paper, or fills gaps

**Taken from the paper:**

- the ZVC format;
- the 32B-per-cycle datapath;
- the three compression stages with an 11-adder prefix sum;
- the six-cycle compression latency;
- the two-stage decompressor that starts on partial data;
- one (de)compression unit per memory controller (six), placed before the
  crossbar;
- the 70KB staging buffer at the PCIe interface;
- a completion that reports the compressed size.

**This design's own choices:**

- the flit and packet formats, and all handshakes;
- line-by-line interleaving over the partitions;
- the slot-per-line organisation and in-order drain of buffer B;
- the packing of compressed lines into 32B PCIe units;
- the raw (uncompressed) mode;
- the unit's queues and credit scheme;
- the command interface.

**Throughput.** The paper sizes the engine to read 16 GB/s x 13.8 = 220.8 GB/s
of activations when PCIe runs at full rate on the most compressible data.
This design reads at most one 128B line per cycle (about 122 B per cycle
measured), so it needs a clock of about 1.8 GHz to reach that figure. The
paper gives no clock. At 1 GHz the sparsest data would leave PCIe partly
idle. Issuing more than one line per cycle would remove the limit.

**Not modelled:**

- the PCIe protocol and PHY;
- the memory controllers and DRAM (ports plus a behavioural model only);
- L2 and the SMs, and the SM traffic that shares the crossbar;
- the host side.

The compression ratios in the paper's evaluation use 4KB windows. ZVC costs
one mask bit per word whatever the window size, so the 128B windows of the
hardware give the same size, apart from the final padding of a transfer.
