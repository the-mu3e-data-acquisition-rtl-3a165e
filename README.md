# A streaming readout for the Mu3e detector, in SystemVerilog

Mu3e looks for the decay of a muon into three electrons. It stops about
10^8 muons per second on a target and records every hit of its pixel,
scintillating-fibre and tile detectors, with no hardware trigger. The
readout therefore streams all zero-suppressed hits, of the order of
100 Gbit/s. On the way, three layers of FPGAs sort, merge and thin the
stream. A farm of GPU-equipped PCs then decides, one time frame at a time,
which parts of the data are worth keeping.

This RTL models that chain as a synchronous design:

```
 clock & reset box        front-end boards            switching boards          farm node (one PC)
 reset_stream_tx ──┬──> reset_stream_rx                                              ┌─> daisy chain (fwd)
                   │    ASIC links: dec8b10b ─ asic_link_rx                           │
                   │      ─ timewalk_corr (pixel) ─ hit_sorter              stream_merger ─ farm_buffer
                   │      ─ fibre_cluster (fibre) ─ feb_link_tx ──> stream_merger        │  ├─ coord_transform ─ dma_engine A ─> host ring A
                   └──> (every board)                              ─ fibre_coinc / rewrite │  └─ (PC decision) readout ─ dma_engine B ─> host ring B
                                                                   ─ hit_histogram, pcie_regs
```

`mu3e_daq_top` wires one slice of this system. Pixel front-end boards feed
the central-pixel switching board, and fibre front-end boards feed the
fibre switching board. Both switching boards feed one farm node. The other
inputs of the farm node come from switching boards outside the slice, so
they are ports.

## Time: clock, bins and frames

Everything runs on one 125 MHz clock. This matches the experiment, where
all clocks derive from a common master. The design's own choices are these:

- **Time stamp bin:** one bin is one clock (8 ns). Time stamps are 16 bits
  (`daq_pkg::TS_W`).
- **Frame:** 8 bins make one 64 ns frame (`FRAME_LOG2 = 3`). The frame is
  the unit everything downstream works in. Its number is `ts >> 3`.
- **Trailer:** every link closes every frame with a trailer word, the
  control character K28.4 followed by a 24-bit frame number. This happens
  even when the frame is empty.

Mergers align frames by their trailers, not by time, so they need no
knowledge of link latencies. The farm makes its keep/drop decisions per
frame.

The paper's frames overlap, so that tracks at a frame boundary are not
lost. The overlap size is left open there, so the frames here do not
overlap.

## Synchronisation: the reset stream

The clock and reset box sends a 1.25 Gbit/s 8b/10b stream. That is one
byte per 125 MHz clock. Each byte is an 8-bit datagram that encodes a
transition, and K28.5 marks idle.

- `reset_stream_tx` turns commands into datagrams.
- `reset_stream_rx` on each board decodes them. Its path is a fixed
  register pipeline with no elastic buffer. The `RESET` datagram therefore
  restarts the time stamp counter on the same clock edge on every board:
  4 clocks after the generator accepted the command.

Datagram codes:

| datagram    | code |
|-------------|------|
| RUN_PREPARE | 0x10 |
| RUN_START   | 0x12 |
| RUN_STOP    | 0x13 |
| RESET       | 0x30 |

Run-state rules:

- The run states are IDLE → PREPARED → RUNNING → IDLE.
- A `RESET` between prepare and start keeps the board prepared, so the
  time stamps can be synchronised just before the run starts.
- A `RESET` during a run ends the run.
- Front-end boards accept hits only while RUNNING. They close frames all
  the time.

## The ASIC links

Each ASIC link is an 8b/10b symbol stream. `dec8b10b` decodes it and flags
two kinds of error:

- **Code error:** the symbol is no code word at all.
- **Disparity error:** the symbol is a code word only at the other running
  disparity.

The decoder searches the encoder's table (`daq_pkg::enc_sym`), so the
encoder and decoder cannot disagree.

`asic_link_rx` parses the packet protocol. The packet format is this
design's own:

- **Hit:** K28.0, then four bytes `{ts[9:0], column[7:0], row[7:0],
  ToT[4:0], parity}`, with even parity over the 32 bits.
- **Monitoring:** K28.3, then two bytes.

The link checks count code errors, disparity errors, parity errors and
protocol errors (data outside a packet, or a K character inside one). The
10-bit chip time stamp is extended against the board's 16-bit counter. It
takes the counter's upper bits, minus one period if the chip value is
ahead of the counter.

On pixel boards, `timewalk_corr` subtracts a correction from each hit time
stamp. The correction comes from a 32-entry table indexed by time over
threshold (ToT). It is 4 bits wide and written over a configuration port.
Small pulses cross the threshold late, so they get a larger correction.

## Time sorting (`hit_sorter`), the heart of the front-end board

Hits from up to 36 links arrive nearly, but not exactly, in time order.
The sorter must turn them into one stream in strict time-stamp order at
125 MHz. It follows the scheme of insertion at time-stamp addresses:

1. **Storage.** Each link has its own memory bank. A bank is a ring of
   `2^SLOT_LOG2` time slots with room for `DEPTH` hits each. A hit with
   time stamp `ts` goes to slot `ts mod SLOTS` of its link's bank, at
   position `count[link][slot]`, and the count is incremented. The
   counters are the per-ASIC, per-time-stamp hit lists.
2. **Reading.** The reader trails the present by `DELAY` clocks, so that
   late-arriving hits of a slot are already in. For one slot, it takes the
   set of links with a non-zero count and reads their hits one per clock,
   link after link, clearing each count when done. Strung together, these
   reads are the single read sequence.
3. **Empty slots cost nothing.** The reader looks ahead over the rest of
   the current frame and jumps straight to the next occupied slot. A frame
   whose last slots are empty is closed by one marker item, which costs
   one clock.
4. **Losses are counted.** A hit `DELAY` or more clocks old is dropped as
   late, because its slot may already be read. A hit beyond `DEPTH` in its
   link and slot is dropped as overflow. After reset the counters are swept
   to zero, one slot per clock, before hits are accepted.

Throughput is one hit per clock, plus at most one clock per frame for the
marker. Each output item carries `slot_end` and `frame_end` flags. These
drive the clustering and the frame trailers downstream.

## Fibre detector: clusters and coincidences

A particle crossing a fibre ribbon fires several neighbouring SiPM
channels at the same time, while dark counts fire single channels.

**Clustering (`fibre_cluster`, front-end board).** For each 8 ns slot the
clusterer sets bits in a channel map (channel = MuTRiG × 32 + MuTRiG
channel). It then scans the map one run of adjacent channels per clock.
Runs of at least `MIN_SIZE = 2` channels become cluster words; single
channels are counted and dropped.

**Coincidence (`fibre_coinc`, fibre switching board).** Each ribbon is
read at both ends. Boards `0..N/2-1` are taken as one end and boards
`N/2..N-1` as the other, with equal channel numbers. A cluster is checked
against a table of clusters from the other end in the same frame and
within one bin:

- If a partner is there, one coincidence word with both time stamps goes
  to the farm.
- Otherwise the cluster is stored in its own end's table.

An 8-bit frame tag in each table entry replaces clearing the table at each
frame. The board mapping and the window are this design's choices.

## Link words

| where                 | word                                                                      |
|-----------------------|---------------------------------------------------------------------------|
| front-end link, pixel | `{00, ts[2:0], chip[5:0], col[7:0], row[7:0], tot[4:0]}`                  |
| front-end link, fibre | `{01, ts[2:0], 12'b0, channel[9:0], size[4:0]}`                            |
| monitoring            | `{10, link[5:0], 8'b0, data[15:0]}`                                        |
| trailer (k = 1)       | `{K28.4, frame[23:0]}`                                                     |
| farm link, pixel      | `{0, switching board[2:0], board[5:0], chip[5:0], col[7:0], row[7:0]}`     |
| farm link, fibre      | `{1, ts[2:0], board[5:0], coinc, ts_other[2:0], 3'b0, channel[9:0], size[4:0]}` |

`feb_link_tx` sends one 32-bit word per clock, which is 5 Gbit/s after
8b/10b coding on the 6.25 Gbit/s optical link.

- Data words have priority.
- The trailer follows the last word of its frame.
- Monitoring words fill idle clocks. Each link has a one-word pending
  register, and a monitoring word that finds it full is counted as
  dropped.

## Switching board

`stream_merger` gives each input a FIFO. For the current frame it forwards
data words from the lowest-numbered input that has not yet delivered its
trailer. It consumes trailers in parallel. Once every enabled input has
closed the frame, it sends one merged trailer. A disabled input (BAR1
mask) is drained and ignored, so a dead link cannot stall the merge.
Trailers with a different frame number are counted.

After the merge:

- **Monitoring words** go in order into the FPGA-writeable BAR memory.
- **Pixel hits** feed a hit map (`hit_histogram`, bin = {board, chip},
  saturating 32-bit counters, cleared by a sweep). They are then rewritten
  to the farm-link form.
- **Fibre clusters** go through the coincidence on the fibre board.

`pcie_regs` models the four BAR areas as the paper gives them:

- 64 registers of 32 bits written by the FPGA;
- 64 registers written by the PC;
- two 256 KB memories, one written by each side.

Reads return one clock after the request. The PCIe protocol itself
belongs to the vendor's hard IP, which is not modelled.

## Farm node

**Alignment.** `stream_merger` aligns the 16 switching-board links.

**Buffer or forward (`farm_buffer`).** At the first word of each frame the
node decides where the whole frame goes:

- If there is room for `MAX_FRAME` words and a free frame-table entry, the
  frame goes into the local buffer.
- Otherwise it goes, untouched, to the next PC of the daisy chain.

There is no back-pressure towards the switching boards. A full node passes
frames on, which is the load distribution of the paper. The buffer is an
on-chip array standing in for the DDR4 memory.

**Coordinates (`coord_transform`).** From each locally kept frame, the
central-pixel hits go to the coordinate transform. Per sensor it holds
nine Q16.16 constants, so that x, y and z are affine functions of
(column, row). Each result is converted to an IEEE single-precision float.
This is a pipeline with one clock of latency.

**DMA (`dma_engine`).** The engine writes a stream into a ring buffer in
host memory. After each 64-word block it writes the ring position to a
separate control address, which the PC polls (no interrupts). The PC's
read pointer, held in a BAR1 register, keeps the engine from overwriting
unread data. When the input has been idle for 2^10 clocks, a partial block
is signalled too.

- Ring A carries `{hit, x, y, z}`.
- Ring B carries the read-out frames.

**Decision.** The GPU selection is software. The PC returns one keep/drop
decision per kept frame by writing BAR1 register 8:

- keep: the frame is read out of the buffer into ring B;
- drop: its space is freed.

## What follows the paper and what is this design's own

The paper gives this structure and these numbers:

- the chain of blocks and what each does;
- 36 links per front-end board;
- 34 front-end boards per switching board;
- 12 fibre boards;
- 16 links into a farm node;
- 64 ns frames;
- the four BAR areas and their sizes;
- ring buffer plus control-memory signalling for DMA;
- forwarding when the buffer is full;
- three single-precision coordinates per hit;
- the reset stream with 8-bit transition datagrams.

The following are this design's own choices:

- the time stamp bin;
- all word and packet formats;
- the datagram codes;
- the sorter's sizes;
- the clustering granularity;
- the coincidence mapping;
- the register map;
- the DMA block size;
- the farm buffer's frame decision.

Known departures from the paper:

- **Single output stream.** Each switching board and the farm node move
  one 32-bit word per clock (4 Gbit/s). The paper uses several 10 Gbit/s
  links. A full pixel switching board at the rates of Table I (34 boards
  × 58 MHz) would need about 2 G words/s, which is far more than one
  stream. The structure is complete, but the bandwidth is not.
- **No overlap.** Frames do not overlap.
- **No triplet preselection.** The selection of hit triplets in the farm
  FPGA is not built, because its geometric criterion is not given.
- **Slower control link not modelled.** The 6.25 Gbit/s control link is
  not modelled. The time-walk tables are loaded through a plain
  configuration port.
- **On-chip buffer.** The DDR4 buffer is an on-chip array.

## Sizes and throughput at the defaults

| load (sizes from the paper's Table I) | needed                    | built                  | fits |
|---------------------------------------|---------------------------|------------------------|------|
| pixel front-end board                 | 58 MHz hits + 15.6 MHz trailers | 125 M words/s     | yes  |
| fibre front-end board                 | 28 MHz hits               | 125 MHz sorter and link | yes |
| tile front-end board                  | 15 MHz hits               | 125 MHz                | yes  |
| pixel switching board, 34 boards      | 1972 M hits/s             | 125 M words/s          | no   |
| farm node, 16 × 10 Gbit/s             | 160 Gbit/s                | 4 Gbit/s               | no   |

## Simulating

All testbenches are self-checking and print a line
`TB_RESULT checks=N failures=M`. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/daq_pkg.sv tb/tb_hit_sorter.sv \
          --top-module tb_hit_sorter -Mdir obj && obj/Vtb_hit_sorter
```

Every block has a testbench `tb/tb_<block>.sv`. The testbenches check
outputs against models written independently in the testbench:

- **Coding:** the encoder against the code tables; the decoder on all
  bytes at both disparities and on corrupted symbols.
- **Sorter:** against a sorted reference, with directed overflow.
- **Merger:** frame contents and order.
- **Fibre:** coincidences against a software matcher.
- **Farm:** buffer accounting; DMA pointer and overwrite rules.
- **Coordinates:** against floating-point evaluation.

`tb_mu3e_daq_top` runs the slice end to end at the following reduced size:

| part                | size                   |
|---------------------|------------------------|
| pixel boards        | 2, with 4 links each   |
| fibre boards        | 2, with 2 links each   |
| farm links          | 3                      |
| sorter              | 64 slots × 2 hits      |
| farm buffer         | 512 words              |
| host rings          | 256 words              |

It counts each mechanism and fails if one never happens:

- run start;
- hits reaching the host with correct coordinates;
- sorter overflow and late hits;
- cluster suppression and coincidences;
- monitoring reaching BAR memory;
- the hit map;
- frames kept, dropped and forwarded down the daisy chain;
- DMA pointer writes;
- no hits after RUN_STOP.

That is also the largest configuration simulated. The full-size slice (34
+ 12 front-end boards with 36 and 8 links, 16 farm links) was not
simulated, because building it exceeds the memory of a 16 GB machine.

Parameters worth changing:

- **Sorter:** `SLOT_LOG2`, `DEPTH` and `DELAY` trade memory against
  tolerance for late and bunched hits. `DELAY < 2^SLOT_LOG2` is required.
- **Farm buffer:** `BUF_LOG2`, `MAX_FRAME` and `NFR_LOG2` set how much a
  node holds before it forwards.
- **DMA:** `RING_LOG2`, `BLOCK_LOG2` and `FLUSH_LOG2` shape the host
  transfers.
