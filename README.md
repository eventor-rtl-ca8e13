# Eventor RTL: event-based multi-view stereo on a Zynq programmable-logic fabric

An event camera does not deliver frames. It reports single pixels whose brightness changed, each
as an event (x, y, time). Event-based multi-view stereo (EMVS) recovers depth from these events
and a known camera trajectory, without first rebuilding images. Each event is cast as a viewing
ray into a voxel volume placed in front of a reference view. For every voxel the algorithm
counts how many rays pass through it. Scene edges show up as voxels where many rays meet. This
volume of counts is the disparity space image (DSI).

Almost all of the work is back-projecting rays and counting them. This RTL runs that part in
hardware. The host keeps pose tracking, key-frame selection, DSI reset and depth-map extraction.

The design splits the back-projection into two steps of very different cost:

1. **Canonical projection, P(Z0).** Each event goes through one 3x3 homography H onto a single
   reference depth plane Z0. This takes one matrix-vector product and one division per event.
2. **Proportional projection, P(Z0→Zi), plus voting R.** The point on Z0 is mapped to every other
   depth plane Zi. All planes are parallel to Z0, so this map is a scale and an offset:

       x(Zi) = a_i · x(Z0) + bx_i        y(Zi) = a_i · y(Z0) + by_i

   The point is rounded to the nearest voxel, and that voxel's 16-bit score gets +1. Nearest
   voting replaces the four-neighbour bilinear voting of the original algorithm. It costs
   little accuracy, but each vote becomes a single integer increment of a single memory word.

Step 1 runs once per event. Step 2 runs once per event and plane, N_z times per event. So the
hardware has one canonical processing element (PE_Z0) and several proportional elements
(PE_Zi) that work on different planes of the same event. The two steps form a two-stage frame
pipeline, joined by double-buffered memories.

## Number formats

| quantity | format | width |
|---|---|---|
| event coordinates (x, y) | signed Q9.7 | 16 |
| canonical point x(Z0), y(Z0) | signed Q9.7 | 16 |
| homography H, per-plane parameters a, bx, by | signed Q11.21 | 32 |
| voxel coordinates x(Zi), y(Zi) | unsigned integer | 8 |
| DSI score | unsigned integer | 16 |

One event packs into one 32-bit word: y in bits 31:16, x in bits 15:0.

Products of a coordinate and a parameter are carried exactly, as Q.28 values in 48 to 50 bits:
- The matrix-vector sums u, v, w of PE_Z0 are exact.
- The division u/w is truncated toward zero to Q9.7. If w = 0, or the quotient does not fit
  Q9.7, the result saturates to ±32767. That lands outside the image, so it later counts as a
  miss.
- The proportional map a·x0 + b is exact. It is rounded half-up to an integer voxel: add 2^27,
  then keep bits 49:28. A result outside 0..W-1 or 0..H-1 is a projection miss and casts no
  vote.

The package `eventor_pkg` holds all of these widths and the record types `point_t` (y, x) and
`phi_t` (by, bx, a).

## Block structure

```
              AXI4-Stream from DMA                   start instructions from the CPU
                      |                                      |
   +------------------v--------------------------------------v-----------+
   | canonical_projection_module                                          |
   |   axi_interface --> buf_h ----+                                      |
   |          |------> buf_e ----> pe_z0 (3 x mv_mac_unit, 2 x norm_div) ---> buf_i --+
   |          +------> buf_p -------------------------------------------------------+|
   |   canonical_controller (frame sync, key-frame wait)                          ||
   +-------------------------------------------------------------------------------||-+
   | proportional_projection_module                                                vv |
   |   data_allocator --> pe_zi[0] --> buf_v[0] --+                                   |
   |                 \--> pe_zi[1] --> buf_v[1] --+--> vote_execute_unit ==> 2 x AXI4 |
   |   proportional_controller                                       (DRAM ports)     |
   +----------------------------------------------------------------------------------+
```

Each PE_Zi is a chain of `scalar_mac_unit` (a·x0 + b for x and y), `nearest_voxel_finder`
(rounding and miss test) and `vote_addr_gen` (linear voxel index).

The top module is `eventor_top`. It brings out three interfaces:
- the AXI4-Stream slave for the DMA;
- a start-instruction handshake for the host;
- per lane, one AXI4 master: single-beat read and write channels towards the DRAM controller.

The CPU, DMA, DRAM controller and DRAM are not part of the RTL.

## Feeding a frame

The DMA stream carries 32-bit words. `TDEST` selects the buffer:

| TDEST | buffer | words per frame |
|---|---|---|
| 0 | Buf_H | 9: h00, h01, h02, h10, ..., h22 |
| 1 | Buf_E | one per event, at most 1024. `TLAST` on the last event ends the frame. |
| 2 | Buf_P | 3 · N_z: a, bx, by of plane 0, then plane 1, ... |
| 3 | unused | dropped and counted in `bad_beats` |

The host sends one start instruction per frame: `cmd_valid` with `cmd_key` and `cmd_base`.
- `cmd_key` marks a key frame.
- `cmd_base` is the byte address of the DSI this frame votes into.

The DSI in DRAM is W·H·N_z 16-bit scores, plane-major. Voxel (x, y, z) sits at
`cmd_base + 2·((z·H + y)·W + x)`. Clearing the DSI for a new key frame is the host's job.

Frames may be streamed back to back. Every buffer has two banks, so the stream can fill the
next frame's banks while the current frame is processed.

## Double buffering and the hand-over between stages

Every buffer — Buf_H, Buf_E, Buf_P, Buf_I and each Buf_V — uses the same two-bank controller,
`pingpong_ctrl`:
- The writer fills its bank and **commits** it, recording how many entries it holds.
- The reader sees the committed bank as available and **releases** it when done.
- The writer side blocks only when both banks are committed.

This simple rule carries all the flow control between the stages:

- **Canonical stage.** The canonical controller starts a frame when four conditions hold:
  - a start instruction has arrived;
  - Buf_E and Buf_H each hold a committed bank;
  - Buf_I has a free bank;
  - for a key frame only: the proportional module is idle and both Buf_I banks are empty.

  It then streams one event per cycle from Buf_E through PE_Z0 (19 cycles of latency) into
  Buf_I. A full frame of 1024 events needs 1024 + about 25 cycles. When the frame is written,
  it commits the Buf_I bank and releases Buf_E and Buf_H.
- **DSI base tag.** The DSI base from the start instruction travels as a tag on the Buf_I bank.
  So the proportional side always votes into the right DSI, even while the canonical side has
  moved on to the next frame.
- **Proportional stage.** It starts when Buf_I and Buf_P both hold a frame. When every vote of
  that frame has been written to DRAM, it releases both and pulses `frame_done`.

**Normal frames.** P(Z0) of frame N+1 runs while frame N is still being voted, so it is hidden.

**Key frames.** The new reference view needs a freshly cleared DSI. So P(Z0) of a key frame
waits until the previous frame has fully finished (`key_wait` is high meanwhile). A key frame
therefore costs P(Z0) plus P(Zi)+R.

## Proportional stage in detail

**Data allocator.** It walks the frame event by event. For each event it walks the planes in
groups of `LANES`: in group g, lane p gets plane g·LANES + p. All lanes get the same canonical
point from the single Buf_I read port in the same cycle. Each lane gets its own phi from its own
Buf_P read port. With 100 planes and 2 lanes that is 50 groups per event, so 51,200 issue
cycles per 1024-event frame.

**PE_Zi pipelines.** Each lane's PE_Zi has 5 pipeline stages. On a hit it appends the voxel
index to its own Buf_V. Lanes own disjoint sets of planes, so two lanes never touch the same
voxel.

**Stall.** Allocator and PE_Zi pipelines advance on a common enable. The enable is the AND of
all Buf_V `wr_ready` signals. When any Buf_V has both banks full, everything upstream freezes
in place (`vbuf_stall`), and no vote is lost or reordered.

**End of frame.** When the allocator has issued the last group, the controller does three
things in order:
1. It waits the 5 pipeline cycles, counting only un-stalled cycles.
2. It flushes the partly filled Buf_V banks.
3. It waits until every Buf_V and the vote unit are idle.

**Vote execute unit.** It has one lane per Buf_V, each with its own AXI4 master. For each vote
address a lane performs a read-modify-write:
1. Read the aligned 32-bit word that holds the score.
2. Take the high or low half-word and add 1, saturating at 65535.
3. Write the word back with `WSTRB` (the byte-enable mask) set to that half-word only (`1100` or
   `0011`).

The neighbour score in the same word is therefore never disturbed.

Done one at a time, a read-modify-write costs a full memory round trip, about ten cycles. So the
lane pipelines them. It keeps a table of up to `OUTS` = 8 votes in flight, and six pointers
walk the table strictly in order:
- **alloc:** the vote enters the table.
- **ar:** its read request is issued.
- **r:** its read data has returned; the new word is computed and stored in the entry.
- **aw** and **w:** its write address and write data are issued, independently of each other.
- **b:** its write response has returned, and the entry is free again.

Each channel handshake moves one pointer, so the lane can issue one read and one write per
cycle. All responses of a port return in order, because a single AXI ID is used.

Several votes in flight can hit the same score. This happens when consecutive events fall on the
same voxel of a plane. A read of the second vote must not overtake the write of the first, or
one vote would be lost. So a new vote is compared with every entry in the table, and waits
before entering it while its score is still in flight. AXI gives no ordering between the read
and write channels, so this check is what keeps the counts exact.

Each transaction is a single beat (LEN 0, 4 bytes, INCR). Those constant AXI fields are not
brought out and belong to the port adaptor.

## Where this RTL departs from the paper, or goes beyond it

The paper states only part of the design. Everything below is this design's own choice.

- **Number of depth planes.** N_z is never given. The default is 100.
- **Buf_V depth.** Also never given. The default is 512 addresses per bank.
- **Form of phi.** Three words per plane: a, bx, by.
- **Stream format.** The TDEST routing and the word order on the stream.
- **Start instruction.** A key flag plus a DSI base address.
- **DSI layout.** Plane-major, as above.
- **Rounding and saturation.** The division truncates toward zero and saturates as described
  above.
- **Buf_I.** The paper mentions two PE_Zi "and corresponding" intermediate buffers. Its block
  diagram, however, shows one Buf_I. This RTL uses one double-buffered Buf_I whose single read
  port feeds every lane, because all lanes consume the same event. The per-lane parameters come
  from a Buf_P with one read port per lane.
- **Voting throughput.** How the votes reach memory is this design's own choice; see the vote
  execute unit below.
  - The paper reports about 552 µs per 1024-event frame at 130 MHz for P(Zi)+R, roughly 72,000
    cycles.
  - Against the randomly delayed memory model of the testbench, the full-size test measures
    78,000 to 83,000 cycles per frame, within about 15 % of that figure. The test requires at most
    1.25 times the published figure.
  - The compute side alone needs 51,200 cycles per frame.
  - About 90,000 votes are cast per frame, and memory read and write latency sets the rest.
    With real DDR latencies the rate depends on how many votes are allowed in flight (`OUTS`).
- **Per-frame command port and miss/vote strobes.** These are status outputs added for
  observability.

Sizes that follow the paper:
- the 240×180 sensor;
- 1024 events per frame;
- two PE_Zi and two DRAM ports;
- the bit widths of the table above;
- the 32-bit data paths.

The on-chip storage at the defaults comes to about 25 KB, well within the 64 KB of block RAM
the original implementation reports:

| buffer | size |
|---|---|
| Buf_E | 2 × 1024 × 32 bit |
| Buf_I | 2 × 1024 × 32 bit |
| Buf_P | 3 × 256 × 32 bit |
| Buf_V | 2 × 2 × 512 × 23 bit |

The DSI itself, 240·180·100·2 bytes = 8.64 MB, lives in DRAM.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M`.
`tb/eventor_ref_pkg.sv` is a bit-exact reference written with plain 64-bit integer arithmetic:
canonical projection, division with saturation, proportional rounding.
`tb/axi_dram_model.sv` is a behavioural AXI memory with random ready signals and random
response delays.

`tb_eventor_top` runs the whole design at its default sizes:
- Four frames of 1024 events and 100 planes (key, normal, key, normal) into two DSI regions.
- It compares all 2 × 4.32 million scores with the reference.
- It checks that P(Z0) reads one event per cycle.
- It checks that each frame's voting stage stays within 1.25 times the published time per frame.
- It checks that normal frames overlap the previous frame's voting and that key frames do not.
- It requires that stream backpressure, key-frame waiting, Buf_V stalls, projection misses and
  stage overlap each happen at least once.

It runs in a few seconds of simulation.

The block tests use smaller sizes where a mechanism would otherwise be rare. For example, the
proportional module test uses a 40×30 image, 9 planes and 32-entry Buf_V banks, so that stalls
occur often. Frames of the public datasets used to evaluate the original design are not
included. The tests generate random homographies, events and plane parameters instead.

To run a test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/eventor_pkg.sv tb/eventor_ref_pkg.sv tb/tb_eventor_top.sv
./obj_dir/Vtb_eventor_top +verilator+rand+reset+2
```

Replace `tb_eventor_top` with any other testbench name. The design is plain synthesizable
SystemVerilog:
- asynchronous active-low reset;
- one clock;
- memories written as arrays with synchronous reads, so they map to block RAM;
- handshake and pipeline-alignment assertions, which a synthesis front end may ignore.
