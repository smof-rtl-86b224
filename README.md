# Off-chip eviction for streaming CNN accelerators

A streaming (layer-pipelined) CNN accelerator gives every layer its own
hardware and connects the layers by FIFOs. All weights sit in on-chip RAM, and
so do all activations in flight. Modern networks break this model in two ways:

* **Long skip connections.** In a UNet, YOLO or X3D, an early layer's output
  also feeds a concatenation or addition many layers later. The skip edge needs
  a FIFO deep enough to hold everything the long branch has not yet consumed.
  That can be a large part of a feature map, and thousands of BRAMs.
* **Large weight sets.** A wide convolution deep in the network may need more
  weight memory than the device has left.

The off-chip memory of such accelerators is normally used only for the network
input and output. SMOF (Toupas, Yu, Bouganis, Tzovaras) uses it as overflow
storage for both cases, without stopping the pipeline:

* **Activation eviction.** The deep skip FIFO is replaced by a detour through
  DRAM. A small FIFO and an encoder push the data out in DMA bursts. A second
  small FIFO and a decoder bring it back in front of the consumer.
* **Weight fragmentation.** A layer's weight memory is cut into fragments. The
  *static* fragments stay on chip, packed into a smaller RAM. The *dynamic*
  fragments live in DRAM and are streamed, one after another, through a single
  shared on-chip buffer as the layer's read counter reaches them.

Both paths can compress what they send with run-length or Huffman coding.
When there are more DMA ports than memory banks, ports share a bank in turn.

This repository gives synthesizable SystemVerilog for these datapaths. It also
gives a top level that holds evicted skip connections and fragmented weight
memories, modelled on the paper's UNet example on an Alveo U200. By default
it has one of each. There,
the skip connection from `Relu_3` to `Concat_47` is evicted, and a quarter of
the weights of `Conv_22` are moved off chip (URAM 256 → 192). The layers
themselves are not included. In the paper they are generated unchanged by the
fpgaConvNet toolflow. Here they connect to the top's stream ports.

## Block map

```
         skip_in[a] ─► activation_eviction (lane a) ─► skip_out[a]
                           │                 ▲
                           ▼                 │ read channel a
   DRAM ◄── write port ── dma_write_arbiter  dma_read_arbiter ◄── read port ── DRAM
                (id a)                       │ read channel ACT_LANES + g
                                             ▼
   st_* (static load) ─► weight_fragment_memory (lane g) ─► w[g] (to the convolution)
```

| file | role |
|---|---|
| `smof_pkg.sv` | widths, encoding enum `enc_e`, Huffman code-book struct `huf_cfg_t` |
| `smof_offchip_top.sv` | top: evicted skip lanes and fragmented weight lanes, shared ports |
| `activation_eviction.sv` | evicted skip connection |
| `weight_fragment_memory.sv` | static + dynamic weight memory |
| `dma_read_arbiter.sv` | round-robin sharing of a memory read port |
| `dma_write_arbiter.sv` | round-robin sharing of a memory write port, a burst at a time |
| `stream_encoder.sv`, `stream_decoder.sv` | choose the codec for a port at elaboration |
| `rle_encoder.sv`, `rle_decoder.sv` | run-length codec |
| `huffman_encoder.sv`, `huffman_decoder.sv` | per-word canonical Huffman codec |
| `word_packer.sv`, `word_unpacker.sv` | "no encoding": two words per DMA beat |
| `stream_fifo.sv` | valid/ready FIFO used throughout |

All streams use valid/ready handshakes: a transfer happens on a clock edge
where both are high. Reset is active-low and asynchronous (`rst_n`). The words
are 8 bits wide, matching the 8-bit quantisation of weights and activations.
A DMA beat is 16 bits and a burst is 16 beats.

## The evicted skip connection

`activation_eviction` has a producer side and a consumer side that look like the
two ends of the FIFO it replaces (`in_*`, `out_*`). It has three memory-side
ports: a write port, a read-request port and a read-data port.

**Frames.** The stream has no end-of-frame signal, just as between
fpgaConvNet layers. The block counts `frame_words` words to find the end of a
frame (one feature map). Frame ends matter because encoders must close their
last run or pad their last beat there.

**Write side.** Words are encoded and queued in the write FIFO. A write burst
starts when a full burst (16 beats) is queued, or when the final beat of a
frame is queued. The burst then sends 16 beats, or stops after that final beat.
`wr_last` marks the end of every burst, so frame ends produce short bursts and
no data waits in the FIFO for the next frame.

**Where the data lives.** The block does not address DRAM. It treats the off-chip
area as a FIFO, with its head and tail pointers kept by the memory side (in
SMOF, the host). The block counts only `pending_beats`: beats written and not
yet asked back.

**Read side.** A read request for `min(pending_beats, 16)` beats is raised
once the read FIFO has room for all of them, counting beats already requested
and still in flight. A request is therefore never larger than what was written
and never larger than what can be stored. A granted burst always drains, and a
shared read port cannot deadlock. Returned beats pass through the read FIFO
and the decoder to the consumer.

**Sizing.** Each of the two FIFOs is `FIFO_DEPTH` beats deep, two bursts by
default. With only one burst of storage, the read side must wait for a full
memory round trip between bursts. In simulation that limited the skip path to
about 0.67 words per cycle. With two bursts it reaches 0.98 words per cycle
with run-length coding. That holds against a memory with 8 cycles of latency
and on ReLU-like data. The paper requires one more thing, which is a
design-time condition and not hardware: an edge is only evicted if its
original buffer is deeper than the DMA round-trip delay. Otherwise the consumer
would wait for data in flight.

## The fragmented weight memory

A convolution reads its `DEPTH` weights in the same order over and over.
`weight_fragment_memory` splits them into `DEPTH/FRAG` fragments. Bit *f* of
`DYN_MAP` marks fragment *f* as dynamic. The default, `4'b0010` with four
fragments of 1024, makes the dynamic share m = 0.25. That matches the paper's
`Conv_22` example.

* Static fragments are stored back to back in a RAM of `(1-m)·DEPTH` words.
  They are written through `st_we/st_addr/st_data`, where `st_addr` is the
  *physical* address. On an FPGA these weights would come with the bitstream.
* All dynamic fragments share one buffer of `FRAG` words. It is a FIFO filled
  by the decoder from the DMA port. Weights are read strictly in order, so a
  FIFO is all the "time-multiplexed region" needs. The buffer refills while
  the static fragments are being read.
* A read counter `pos` walks the logical addresses 0..DEPTH-1. For each word
  it picks the static RAM, advancing a separate physical static address, or the
  dynamic buffer.

The off-chip image holds the dynamic fragments of one pass in read order,
encoded as one frame. The memory side replays it cyclically. Requests are
always one full burst and are raised when the beat FIFO in front of the
decoder has room for a whole burst. No request is raised during reset.

The output is registered. The static RAM read is synchronous, so it maps to
block RAM. In steady state one weight leaves per cycle. If the dynamic buffer
is empty when its turn comes, the output stalls and `dyn_stall_cycles` counts
the lost cycles. The paper's point is that, with enough bandwidth, this never
happens. The testbench shows both cases.

## Encodings

`ENC` selects the codec of a port at elaboration: `ENC_NONE`, `ENC_RLE` (the
default, which the paper found best for UNet) or `ENC_HUFFMAN`. Each word is
one symbol.

* **Run-length.** One token per DMA beat: `{run-1 [15:8], value [7:0]}`, for
  runs of 1 to 256. Runs end at frame boundaries. The encoder takes one word
  per cycle and stalls for one cycle at a frame end. The decoder emits one word
  per cycle.
* **Huffman.** The encoder looks up a right-aligned code of 1 to 12 bits from a
  256-entry table. It appends the code to a bit accumulator and sends 16-bit
  beats with the oldest bit in the MSB. A frame's last beat is zero-padded at
  the bottom. The decoder needs a *canonical* code book: codes of equal length
  are consecutive integers, ordered by length. It is loaded as the number of
  codes of each length plus the list of symbols in code order. The first code
  of each length is derived as `first[L+1] = (first[L] + count[L]) << 1`. All
  twelve lengths are compared with the head of the bit buffer at once, and the
  shortest match wins, giving one word per cycle. After the last symbol of a
  frame, the padding is dropped: the bits left are `pad + k·16` with
  `pad < 16`, so clearing the low four bits of the bit count keeps the `k`
  whole beats of the next frame. The code book comes through one
  `huf_cfg_t` port; building it from data statistics is done offline.
* **None.** Two words are packed per beat, and the frame's last beat may be
  half empty. The unpacker uses the frame length to skip the empty slot.

## Parallel streams and shared memory ports

A layer with coarse-grain parallelism moves several words per cycle, as
parallel streams. Each stream gets its own eviction or fragmented memory,
with its own encoder and decoder. That is why the codec cost grows with the
number of streams. The top has `ACT_LANES` skip lanes and `WGT_LANES` weight
lanes. Lane signals are packed arrays indexed by lane. With one lane each
they reduce to plain signals.

The top has `MEM_PORTS` memory port pairs (one read, one write), one by
default. The paper makes this cap a user parameter, chosen after place and
route. Read channel *c* uses port *c* mod `MEM_PORTS`, and skip lane *a*
writes through port *a* mod `MEM_PORTS`. Ids are global, whichever port
carries them. When streams outnumber ports they share a port in turn:

* `dma_read_arbiter` serves N read ports from one memory port. It grants one
  request at a time, round-robin starting after the last winner. It forwards
  the request with the port number (`bank_req_id`). It then routes the next
  `len` returned beats to that port before it grants again. Read channels
  `0..ACT_LANES-1` are the skip lanes and the weight lanes follow.
* `dma_write_arbiter` serves N write ports from one memory port. When the port
  is free, it picks a valid port round-robin. It keeps that port connected
  until the beat marked `last` is taken, so bursts never interleave.
  `bank_id` tells the memory which skip lane's off-chip area the burst belongs
  to. There is no idle cycle between bursts. Holding the port for a whole
  burst is safe because an eviction offers a burst only once all its beats
  are queued.

The testbenches check that grants rotate when every port is busy.

## Top-level interface (`smof_offchip_top`)

| group | signals | notes |
|---|---|---|
| config | `hcfg_act`, `hcfg_wgt`, `frame_words` | Huffman books (ignored for RLE); words per skip frame |
| skip connection | `skip_in_*`, `skip_out_*` | per lane: 8-bit valid/ready streams to the producer and consumer layers |
| weights | `st_we/st_addr/st_data`, `w_data/w_valid/w_ready` | static load (`st_we` picks the lane); per lane: weight stream to the convolution |
| memory write | `mem_wr_data/valid/last/id/ready` | per port: 16-bit beats; `last` ends a burst; `id` is the skip lane |
| memory read | `mem_rd_req_valid/len/id/ready`, `mem_rd_data/valid/ready` | per port: burst requests with channel id; beats in request order |
| status | `act_pending_beats`, `act_bursts_written`, `w_dyn_stall_cycles`, `w_passes` | per lane, 32-bit counters |

The memory side must serve each skip channel as a FIFO: append on write, pop
on read. It must serve each weight channel as a cyclic replay of that lane's
weight image. A request must be answered with exactly `len` beats. All lanes
of a kind share one Huffman code book and one frame length.

## Departures from the paper and limits

* Only the eviction and fragmentation datapaths are built. The convolution,
  pooling, resize and concatenation hardware, the DMA engines, DRAM and host
  pointer management are outside. Partitioning into subgraphs, device
  reconfiguration and the design-space exploration are compile-time software.
* The paper gives no widths, burst sizes, token formats, code-book format,
  request protocol or arbitration policy. Everything in those areas here is
  this design's choice, as described above.
* The paper's FIFOs hold "a DMA burst". They are two bursts deep here, for the
  reason given above; `FIFO_DEPTH` can be set back to `BURST_LEN`.
* The fragmented memory delivers one 8-bit weight per cycle per lane. The
  paper's `Conv_22` consumes weights far faster: 221 Gbps at 250 MHz is about
  884 bits per cycle. A design at that rate would need about 56 weight lanes,
  with a memory system to match, or a wider memory and port. The lane counts
  of the paper's designs are not published, and both default to 1. The weight memory depth of that layer is not published;
  4096 words is this design's default.
* The paper's UNet design has separate DMA ports. The top defaults to one
  read port and one write port shared by all lanes, which is the
  time-multiplexed case. `MEM_PORTS` raises the number of port pairs.
  Streams are assigned to ports statically, stream *k* to port
  *k* mod `MEM_PORTS`. The paper does not say how it assigns them.
* Evicted data is read back in the order it was written. The paper also
  allows a consumer that reads in a different order, at the cost of random
  DRAM access (its bandwidth penalty factor greater than one). That case is
  not built.
* The evicted data's DRAM addressing is left to the memory side, as the paper
  leaves the pointers to the host.

## Simulating

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and ends. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/smof_pkg.sv tb/tb_smof_offchip_top.sv --top-module tb_smof_offchip_top
./obj_dir/Vtb_smof_offchip_top
```

* `tb/ddr_model.sv` is a behavioural memory with a configurable latency and
  a mode that accepts writes only now and then and a mode that pauses reads.
* `tb/huf_tb_pkg.sv` holds the test code book: 1 bit for zero, 4 bits for 1..3,
  10 bits for everything else. It also holds a reference bit packer.
* `tb/evict_harness.sv` drives one eviction instance.

`tb_smof_offchip_top` runs the top at its default parameters. It streams
eight 1500-word frames through the skip connection with a consumer that
starts late, while reading 6 passes of 4096 weights. For a while the memory
accepts writes only now and then, and later it pauses its reads. It checks every word and
counts each mechanism:

* full and frame-end write bursts;
* read-backs and weight refills;
* read-port switches;
* compression (4245 beats for 12000 words);
* off-chip occupancy beyond the on-chip FIFOs (about 2700 beats);
* producer back-pressure;
* weight stalls.

`tb_smof_offchip_lanes` runs the top with two skip lanes and two weight
lanes (1024 weights, half of them off chip). The four channels share the
memory ports. It checks that every lane gets exactly its own data back, and
that both arbiters switch between lanes. `tb_smof_offchip_ports` runs the
same test with two memory ports, each with its own memory model. It checks
that each stream uses its assigned port.

`tb_weight_fragment_codecs` runs the fragmented memory with a Huffman image
and with a raw image. It uses two dynamic fragments that are not adjacent.
At full speed, both deliver one weight per cycle with no stall. The Huffman
image of the test weights is 77 beats, against 256 raw.

`tb_workload_skip_eviction` streams whole feature maps through one evicted
connection at default parameters:

* the UNet map that feeds the evicted skip: 64 × 368 × 480 words;
* a YOLOv8n map of 32 × 160 × 160 words;
* an X3D-M map of 24 × 16 × 128 × 128 words.

The producer offers 0.95 words per cycle. That is the UNet example's rate:
21 frames per second at 250 MHz. The consumer starts once a FIFO's worth of
words is in flight. For UNet that is the 926 BRAMs of 18 Kbit that eviction
frees, about 2.13 M words. For the others it is half a map, as their depths
are not published. Every word comes back, and the producer is never held up.
About 1.35 Gbps is written, against 1.4 Gbps in the paper's example, with
synthetic data that compresses to 0.71 of its raw size. The run takes about
20 seconds. The 285 M-word UNet3D map is not simulated.

`tb_compression_variability` shows what happens when activations compress
worse than the design assumed. Eviction is sized for a predicted ratio, and
the real ratio varies from input to input. One evicted connection runs
against a memory with a fixed budget of about 0.4 beats per cycle each way.
Five runs use less and less compressible data:

| compression | words per cycle | beats per cycle used |
|---|---|---|
| 0.71 | 0.94 | 0.34 |
| 1.10 | 0.71 | 0.39 |
| 1.54 | 0.51 | 0.39 |
| 1.88 | 0.42 | 0.39 |
| 1.99 | 0.39 | 0.39 |

While the budget has room, the producer keeps its 0.95 words per cycle.
Once the budget is used up, back-pressure stalls the producer, and the rate
falls in proportion to the compression ratio. This is the plateau and then
the drop that the paper reports for varying compression ratios. Every word
still returns intact.

The block testbenches also check the rate where one is claimed:

* one word per cycle through each codec;
* exactly 4096 cycles per weight pass with no stall;
* at least 0.9 words per cycle through an evicted connection.
