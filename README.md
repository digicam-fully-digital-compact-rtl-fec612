# DigiCam microcrate: read-out and trigger logic in SystemVerilog

DigiCam is the camera proposed for the SST-1M, a 4 m single-mirror telescope
prototype for the Cherenkov Telescope Array. The camera has 1296 silicon
photomultiplier pixels, and everything after the analog shaping is digital. Every
pixel is sampled by a 12-bit flash ADC at 250 MS/s. The samples wait in ring
buffers while a trigger looks at the whole image, 4 ns slice by 4 ns slice. The
camera's electronics are split into three identical *microcrates*. Each crate
serves one 432-pixel sector with nine ADC boards and one trigger board, all
joined by a backplane.

This RTL describes the FPGA logic of one microcrate at its real size:

* 9 ADC boards of 48 channels (432 pixels);
* 16 trigger *triplets* per board (a triplet is three neighbouring pixels);
* 1024-sample ring buffers;
* a 256-cell trigger area with 144 patch centres;
* 64-clock trigger-lane equalization;
* a 9-into-1 read-out funnel to 10 Gb/s Ethernet.

The DigiCam publication describes the hardware and the FPGA subsystems at block
level. This code makes those descriptions concrete. Wherever the publication
gives no detail (frame formats, L0 arithmetic, packet layout, geometry
conventions), the code makes its own choice. These choices are listed in
[Where this design departs from or goes beyond the source](#where-this-design-departs-from-or-goes-beyond-the-source).

## The path of one sample

One clock is one sample period (4 ns). Everything runs in this single clock
domain.

```
 converter lane (16-bit receiver words)
   └─ fadc_frame_aligner ──► prbs_ber_checker (test mode)
        │ 12-bit samples, 48 per board
        ├─► ring_buffer (1024 x 576 bits) ──► event_packetizer ──► readout_buffer ──┐
        └─► l0_triplet: 16 x 8-bit L0 values per clock                             │
              │   (backplane)                                                        │
              ▼                                                                      │
 trigger_board: delay_equalizer (9 local + 2 neighbour lanes, bonded)               │
              ─► trigger area 16 x 16 ─► trigger_patch_sum ─► L1 ──► every ring_buffer
              readout_arbiter (round robin over the 9 boards) ◄──────────────────────┘
              ─► 64-bit stream to the 10GbE MAC
```

`adc_board` holds the upper part of the diagram and `trigger_board` the lower
part. `digicam_crate` wires nine `adc_board`s to one `trigger_board`. The
package `digicam_pkg` holds the crate constants, the `patch_mode_e` enum and the
`axis_beat_t` stream word (64 data bits and `tlast`).

### Latency budget (after bonding)

| step | clocks |
|---|---|
| frame completed in the receiver word → sample out of the aligner | 1 (plus 1 inside the lane) |
| sample → L0 value registered on the ADC board | 1 |
| L0 value → output of the delay equalizer, on every lane | 64 (fixed; includes the link) |
| patch pipeline (run sums, patch sums, comparison) | 3 |
| L1 → ring buffer trigger | 1 |

In the full-crate testbench, L1 rises 70 clocks after the converter model sends
the shower frame. The ring buffer sees L1 at the following edge, when the
newest sample in it is 5 frames older than the trigger edge. Set `pre_trig` to
cover that distance plus the pre-trigger window you want. For example,
`pre_trig = 80` with `blk_len = 16` places the shower near the end of the
block.

## The trigger area and the patch sums

This is the least obvious part of the design. The trigger board works on a
16 × 16 rhombus of hexagonal cells, each holding the 8-bit L0 value of one
triplet. Rows are counted downwards. Each row is shifted half a cell to the left
of the row above, so cell (r, c) has these six neighbours:

```
        (r-1,c) (r-1,c+1)
   (r,c-1)  (r,c)  (r,c+1)
        (r+1,c-1) (r+1,c)
```

The hexagonal distance between two cells is (|dr| + |dc| + |dr+dc|) / 2. A
7-triplet patch is a centre and all cells at distance 1. A 19-triplet patch is a
centre and all cells at distance 2 or less.

The 256 cells are filled as follows:

| rows | cols | contents |
|---|---|---|
| 0–1 | all | *phantom*, always 0 |
| 2–15 | 0–1 | *phantom*, always 0 |
| 2–13 | 2–13 | the 144 local triplets: ADC board b, triplet t at row 2 + 4·(b/3) + t/4, col 2 + 4·(b%3) + t%4 |
| 14–15 | 2–15 | 28 overlap triplets from neighbour lane 0 (index k → row 14 + k/14, col 2 + k%14) |
| 2–13 | 14–15 | 24 overlap triplets from neighbour lane 1 (index k → row 2 + k/2, col 14 + k%2) |

Patch centres exist only in the 144 local cells. The two-cell rim on every
side is exactly what a 19-triplet patch needs. Centres next to the phantom rim
see zeros there. Centres next to the bottom and right edges see the real data
that the neighbouring crates also own.

`trigger_patch_sum` evaluates all 144 patches in parallel. It takes a new area
every clock through three register stages:

1. For every cell it forms horizontal run sums of 2, 3, 4 and 5 cells.
2. It adds the runs of each patch row. For PATCH7 that is the pair at (r-1, c..c+1),
   the triple at (r, c-1..c+1) and the pair at (r+1, c-1..c). For PATCH19 it is
   the runs (r-2, c..c+2), (r-1, c-1..c+2), (r, c-2..c+2), (r+1, c-2..c+1) and
   (r+2, c-2..c).
3. It compares each sum with `threshold` (strictly greater). The result is the
   144-bit `hit` map and `l1`, the OR of all hits.

The mode travels with the area through the pipeline. `threshold` is read at
stage 3.

## Equalizing the trigger lanes

L0 data from the crate's own ADC boards cross one transceiver hop. Overlap data
cross two: ADC board → own trigger board → neighbour trigger board. Without
correction, a patch at the sector border would add values from different
4 ns slices. `delay_equalizer` gives every lane the same total latency of
`TARGET` = 64 clocks. It does this in a start-up *bonding* step:

1. The crate's common sync (`bond_start`) makes every source send a marker bit
   beside its L0 word in the same clock.
2. A counter started by the same sync records, for each lane, how many clocks
   the marker took to arrive. This is the lane's link latency L.
3. The lane is then read from its circular buffer TARGET − 1 − L words behind the
   write pointer. The output register supplies the last clock.

`bonded` rises when every lane has reported. `bond_error` flags a lane slower
than TARGET − 1 clocks, or one that stayed silent for the buffer depth (128). The
trigger board enables L1 only after bonding. Two equalizers are instantiated:
one for the nine 128-bit local lanes and one for the two 224-bit neighbour
lanes. Both share the same sync.

## ADC board details

**Frame alignment.** The receiver hands over 16-bit words (4 Gb/s per lane, 16
line bits per sample) at an arbitrary bit offset. At start-up, and after
`resync`, the converter sends the training word `F0CA`h. The aligner looks at a
16-bit window inside {previous word, current word}. It moves the window one bit
after every mismatch, and locks after 8 matches in a row. In lock, each frame
goes through a self-synchronizing descrambler (1 + x^14 + x^15, MSB first), and
bits 11:0 are the sample. The first frame after lock only fills the descrambler
history, so it is flagged invalid.

**BER test.** With `prbs_mode` set, the converters send PRBS-9. A
self-synchronizing checker on every lane counts checked bits and mismatching
bits. No seed needs to be agreed. One flipped bit on the line counts as three
errors. `ber_sel` selects the lane whose counters are shown.

**L0 values.** Triplet k is channels 3k, 3k+1 and 3k+2. Its L0 value is
clip((s0 + s1 + s2 − 3·baseline) >> l0_shift, 0, 255), computed every clock.

**Ring buffer and read-out.** All 48 samples of a clock form one 576-bit memory
word. On L1 the buffer reads `blk_len` consecutive words, starting `pre_trig`
words before the newest, and hands them out with a time stamp. The packetizer
sends a header word {board[7:0], event number[23:0], time stamp[31:0]}. It then
sends 9 words of 64 bits per sample time, channel 0 in the low bits, with `tlast`
on the final word. A block of N samples is therefore 1 + 9N words. The words
wait in a 512-word read-out FIFO for the board's read-out link. Keep two
constraints in mind:

* While a block is being read, further triggers are dropped and counted in
  `drop_count`.
* The block must be read out before the write pointer catches up. With one
  read beat every R clocks, pre_trig + (R − 1)·blk_len must not exceed
  DEPTH − 2. In the crate R = 9 when the packetizer is not stalled.

## Read-out funnel and reconfiguration flash

`readout_arbiter` grants one of the nine board streams for a whole packet. It
moves on, in rotating order, only after the word with `tlast` has been
accepted, so packets are never interleaved. Granting a packet costs one idle
clock. The output is one 64-bit word per clock, 16 Gb/s at 250 MHz, against
about 9 Gb/s of input. The crossing into the 10GbE MAC's clock domain is not
part of this code.

`qspi_flash_writer` performs one flash operation at a time:

* **Sector erase:** WRITE ENABLE, then 4-byte SECTOR ERASE (DCh).
* **Page program:** WRITE ENABLE, then 4-byte QUAD INPUT PAGE PROGRAM (34h).
  Up to 256 bytes are sent from its page buffer on four data lines.

After either operation it polls READ STATUS (05h) until the flash is idle.
SCK is half the block's clock (62.5 MHz from 125 MHz). Any operation that
touches the protected golden area is refused with `prot_err` and never reaches
the pins. The golden area is the lowest 0x0155_0000 bytes, 341 sectors of
64 KiB. Operations that run past the 64 MiB end of the flash are refused in
the same way. The flash is 512 Mbit, which holds the golden image and two
multi-boot images. The trigger board's configuration is 162 Mbit (20.3 MB).
That fits the golden area (21.3 MiB), and two copies fit the remaining
42.7 MiB.

## Where this design departs from or goes beyond the source

These follow the source closely:

* crate organization (9 × 48 channels, 16 triplets per board);
* 12-bit, 250 MS/s samples;
* 1024-sample ring buffers with programmable block size and position;
* 7- and 19-triplet patch sums over a 256-cell area with phantom and overlap
  parts, centres in the 144 local cells only;
* a fixed 64-sample-period trigger latency set by a start-up bonding procedure;
* BER measurement with converter PRBS patterns;
* round-robin AXI-stream funnelling of nine read-out sources;
* a 512 Mbit flash with a write-protected golden image, 62.5 MHz clock and a
  4-bit bus.

These are this design's own choices:

* **Frame format.** Only the 4 Gb/s scrambled-frame converter is supported. The
  training word, the lock rule, the scrambler polynomial and the frame layout
  are invented. The JESD204/8B10B format of the other candidate converter is
  not implemented.
* **L0.** The arithmetic is invented: pedestal subtraction, a shift, and an
  8-bit clip. The 8-bit width comes from the 4 × 8 Gb/s trigger links per ADC
  board: 128 line bits per sample for 16 triplets.
* **Geometry.** The cell placement, the hexagon orientation, which neighbour
  crate supplies which border, and the two-cell rim are a reading of the
  published area drawing.
* **Bonding.** The marker mechanism and the per-lane buffers are invented. The
  original equalizer sits inside the transceiver quad; here it is plain logic
  after the receivers.
* **Event format and FIFO.** The packet layout and the 512-word FIFO depth are
  invented. Triggers are dropped while a block is being read.
* **Flash.** The command set and the golden-area size are invented. Sector erase
  is included because programming needs it. Broadcast delivery to many boards
  happens upstream, in software and the network, and is not built.
* **Links.** The backplane is direct wires. The camera-link copy of the L0 lanes
  sends all local lanes unchanged. The DDR3 memory, the slow-control paths, the
  CST clock/sync lines and White Rabbit timing are not modelled.
* **Out of scope.** The converters, transceivers, Ethernet cores, processor
  system and flash chip are outside the RTL. Their signals are ports of
  `digicam_crate`.

## Using and simulating the code

All files are IEEE 1800-2017 SystemVerilog. `rtl/` holds one module or package
per file. `tb/` holds one self-checking testbench per module, plus two
behavioural models used only by testbenches:

* `fadc_lane_model`: a converter lane with training, scrambled data and PRBS
  modes, arbitrary bit offset and error injection;
* `qspi_flash_model`: a quad-SPI NOR flash.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed number of clocks if something hangs. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/digicam_pkg.sv \
          tb/tb_trigger_patch_sum.sv --top-module tb_trigger_patch_sum
./obj_dir/Vtb_trigger_patch_sum
```

| testbench | what it establishes |
|---|---|
| tb_fadc_frame_aligner | lock and offset at bit offsets 0/5/13; every scrambled sample returned in order; resync drops lock |
| tb_prbs_ber_checker | clean PRBS-9 gives 0 errors; 4 flipped bits give 12; a non-PRBS stream gives many |
| tb_ring_buffer | block position, length, `out_last` and stamp for several settings; 1 sample/clock; dropped trigger |
| tb_event_packetizer | header and 9-word sample layout under random back-pressure |
| tb_readout_buffer | random traffic against a reference queue, full and empty flags |
| tb_l0_triplet | L0 values against an integer reference |
| tb_delay_equalizer | lanes with 1/3/7/12-clock links aligned to exactly 64 clocks; late lane flagged |
| tb_trigger_patch_sum | all 144 hits against a brute-force hexagonal-distance reference, both modes |
| tb_readout_arbiter | strict rotation when all sources are busy; whole packets under random traffic |
| tb_qspi_flash_writer | erase and program of a flash model, command timing, golden-area refusal |
| tb_adc_board | 6-lane board: lock, L0, bonding marker, triggered packets, BER |
| tb_trigger_board | equalized 7/19 triggers across the overlap border, latency TARGET+2, funnel |
| tb_digicam_crate | full-size crate end to end (see below) |

`tb_digicam_crate` runs the crate with every parameter at its default:
432 lanes, 1024-deep rings and 64-clock equalization. Every mechanism named
above must happen at least once:

* lock of all 432 lanes;
* bonding with 20- and 35-clock neighbour links;
* a 7-triplet trigger 70 clocks after the shower;
* read-out of all nine boards' packets, in round-robin order, checked sample by
  sample;
* a trigger dropped while the boards are busy;
* a trigger that only a 19-triplet patch can see;
* 10GbE back-pressure;
* a PRBS BER measurement with injected errors;
* a flash erase and program, and a refused golden-area write.

Building and running it takes about a minute.

Everything has been verified by simulation only. The modules compile with
Verilator and with the slang front end of Yosys. The small blocks synthesize
with generic Yosys, but the trigger board and the crate have not been
synthesized to completion, and nothing has been placed, routed or timed on an
FPGA. The 13-bit, 144-way patch adder tree is the path most likely to need extra
pipelining at 250 MHz.

To change the size, override the parameters of `digicam_crate`: `CH`, `DEPTH`
and `TARGET`. The trigger-area placement assumes 9 boards of 16 triplets and the
28/24 overlap cells. Change `trigger_board`'s area assembly if the geometry
changes.
