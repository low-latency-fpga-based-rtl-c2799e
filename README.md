# Hardware feedback loop for rearranging atoms in an optical-tweezer array

A row of optical tweezers loaded from a cold-atom cloud fills at random:
each trap holds one atom about half the time. To get a gap-free block of atoms,
you look at every trap, decide which atoms should move where, and then move
them by sweeping the radio-frequency (RF) tones of the acousto-optic deflector
(AOD) that forms the tweezers. The atoms can be lost before they are moved,
so the look-decide-move loop has to be fast. If it is fast enough, it can run
several times while the atoms are still trapped, each round using spare atoms
to fill the gaps the previous round left.

This RTL implements the whole loop in logic on one clock, from single-photon
detector pulses to RF samples for the AOD. Its main configuration is 24 traps
(`N_TRAP = 24`) with a 10-site target zone at the left end of the row, on a
250 MHz clock (4 ns per cycle). The loop has four stages:

```
 SPD pulses ─► trigger_unit ─► photon_counter ─► threshold_compare ─► readout_regs
   (24 TTL)    5 ms window      24 counters       occupancy bits        read port
                                                                          │
            ┌─────────────────────────────────────────────────────────────┘
            ▼
      path_planner ─► rf_cmd_encoder ─► sync_fifo ─► backplane_tx ══╗
      CLOSE / MOVE     15 or 12 frames    frame list     packet       ║ backplane
      commands         per command                                    ║
                                                                      ▼
      dds_mixer ◄── awg_tone_bank ◄── awg_cmd_decoder ◄── backplane_rx
      DAC samples    24 tones, chirps     instructions       checks packet
                          ▲
                    awg_sequencer: ramp down ─ move ─ commit ─ ramp up
                    (rearrangement indicator is high for the whole round)
```

- **Detection (counter card).** The photon counts in a fixed window become an
  occupancy bit per trap.
- **Planning.** The occupancy bits become a list of CLOSE and MOVE commands.
- **Command transfer.** The command list is encoded into fixed-size 32-bit
  frames, buffered, and sent as one packet to the waveform generator card.
- **Waveform generation (AWG card).** The packet is decoded into a tone table,
  and one rearrangement round is run on that table.

`qc100_top` wires all of these together. The blocks communicate only through
ordinary handshakes and pulses, so any stage can be replaced on its own.

## Detection: from photon pulses to occupancy bits

Every trap's fluorescence goes to its own single-photon detector (SPD), so
detection is fully parallel. Each detector has its own TTL input in `spd_i`.

- **`trigger_unit`.** A rising edge on `trig_i` opens the counting window for
  `WINDOW_CYCLES` clocks. The default is 1,250,000 clocks, which is 5 ms.
  - `start_o` pulses once as the window opens.
  - `gate_o` is high while the window is open.
  - `done_o` pulses once when the window closes. This is the
    detection-completion pulse, brought out as `det_done_o`; latency is
    measured from it.
  - Triggers that arrive while a window is open are ignored.
- **`photon_counter`.** Each channel passes through a two-flop synchroniser
  and a rising-edge detector, then feeds a 16-bit saturating counter.
  - `start` clears all the counters.
  - The counters count only while `gate` is high.
  - One clock after `done`, all counts are latched together and `valid_o`
    pulses.
- **`threshold_compare`.** A trap is occupied when its count is strictly
  greater than that trap's threshold (`thr_i`, one per trap). The comparison
  takes one registered clock.
- **`readout_regs`.** This holds the latest result for the planner and raises
  `irq_o` until it is acknowledged. It stores both forms of the result, so the
  reader chooses one by the addresses it reads. Read data comes one clock after
  the request.

  | Address | Content |
  |---|---|
  | 0 | status: `{seq[15:0], …, ready}` |
  | 1 … N | raw count of trap 0 … N−1 ("real-value" readout) |
  | 0x40 + k | occupancy bits 32k … 32k+31 ("comparison-value" readout) |

  Because of this map, `N_TRAP` can be at most 63.

  The planner's read of one result takes its number of reads plus 4 clocks,
  from `irq_o` to the acknowledge. At 24 traps that is 28 clocks (112 ns) in
  real-value mode and 5 clocks (20 ns) in comparison mode. In the second
  mode the cost grows by one clock per 32 channels.

Three steps take one clock each: taking the trigger, latching the counts, and
comparing with the thresholds.

## Planning the rearrangement

`path_planner` turns one occupancy vector into commands. It first reads the
result in one of two ways:

- **`real_mode_i = 1`.** It reads the N raw counts, one per clock, and
  thresholds them itself. This is the real-value mode, the setting of the
  published measurements; it keeps the raw counts visible for debugging.
- **`real_mode_i = 0`.** It reads only ⌈N/32⌉ packed occupancy words. This
  is the comparison-value mode, 23 clocks shorter at 24 traps.

The mode is sampled with each result, so it can change from one detection
to the next.

Then it acknowledges the interrupt. The plan uses one simple rule for a
one-dimensional row with the target zone at the left:

> The *k*-th occupied trap counted from the left, for *k* < `n_target_i`,
> goes to target site *k*. All other atoms stay where they are. Every empty
> trap is closed for the duration of the round.

The rule is computed with prefix counts rather than a search:

- For each trap *p*, `rank[p]` is the number of occupied traps to its left.
- The atom at *p* moves if `occ[p]`, `rank[p] < n_target_i` and
  `rank[p] != p`. Its destination is `rank[p]`.

Atoms only ever move left, onto sites that are empty or that are being vacated
in the same round. Since every moving tone chirps at the same time and ends at
a distinct site, tones never have to pass through each other. That is why one
round can run all moves in parallel.

Commands come out on a valid/ready stream, `{op, src, dst, last}`:

1. first one CLOSE per empty trap, in ascending order;
2. then one MOVE per atom that changes site, in ascending order of source.

The final command has `last = 1`. A result that needs no commands still
pulses `plan_done_o`, and no packet is sent for it.

The planner also reports four things about the plan:

- `n_move_o` and `n_close_o`, the number of moves and closes;
- `target_ok_o`, which says whether enough atoms were loaded to fill the
  target at all;
- `target_full_o`, which says that every target site is already occupied.
  A detection after a round uses this to verify that the target is
  defect-free. The source of the timing triggers uses it to decide whether
  another round is worth running.

The target size `n_target_i` is an input, so it can be set between 2 and 12,
the range of the target-size sweep, without rebuilding. The default
configuration uses 10.

A loading with fewer atoms than the target still produces a plan: every atom
is packed to the left. The target then stays incomplete, and `target_ok_o` is
low.

## RF command frames

`rf_cmd_encoder` compiles each command into a fixed number of 32-bit frames:
15 for a MOVE and 12 for a CLOSE. A list of *m* moves and *c* closes therefore
takes `f = 15·m + 12·c` frames; 10 moves and 10 closes make 270 frames. The
fixed sizes come from the system this design follows. The contents of the
frames are this design's own:

| Command | Frame | Content |
|---|---|---|
| MOVE | 0 | header `{8'h01, src, dst, frame index[7:0]}` |
| | 1 | `f_start`: tuning word (FTW) of the source site |
| | 2 | `f_stop`: FTW of the destination site |
| | 3 | `f_step = (f_stop − f_start) >>> MOVE_LOG2`, the chirp rate per clock |
| | 4 | amplitude, `AMP_FULL` |
| | 5–14 | zero (reserved) |
| CLOSE | 0 | header `{8'h02, p, p, frame index[7:0]}` |
| | 1 | FTW of site *p* |
| | 2 | `a_step = (AMP_FULL << 16) >> RAMP_LOG2`, the ramp rate per clock in 16.16 fixed point |
| | 3–11 | zero (reserved) |

- **Frequency plan.** Site *p* has the FTW `F0 + p·DF`:
  - `F0 = 0x51EB851F`, which is 80 MHz;
  - `DF = 0x0147AE14`, which is 1 MHz per site.

  Both assume a 250 MHz sample clock. They are in `qc_pkg`.
- **`frame_count_o`.** The encoder reports the frame count of the list.
- **`list_done_o`.** This pulses with the last frame.
- **`sync_fifo`.** This first-word-fall-through FIFO holds the list until it
  is complete. It is 512 frames deep. The longest list this planner can
  produce is 324 frames (12 moves and 12 closes at a target of 12), or 318
  at a target of 10.

## Backplane packet

When the list is complete, `backplane_tx` sends the whole list as one packet
on a 32-bit word link, one word per clock:

```
 word 0      {16'hA55A, length}        sop=1
 word 1..n   frames                    
 word n+1    XOR of the n frames       eop=1
```

- **Checks.** `backplane_rx` checks the magic word, the length and the
  checksum. It forwards the frames as they arrive, marking the first one with
  `frm_sop_o`, and at the end pulses either `pkt_ok_o` or `pkt_err_o`.
- **Bad packets.** The AWG side collects instructions as they stream in. If
  the packet turns out to be bad, it throws them away (`discard`), and no
  round starts.
- **Overlap.** The top asserts that a new packet never starts while one is
  still being sent.

## AWG card: tone table and the rearrangement round

This is the least obvious part of the design.

### The tone table

The AOD makes one trap per RF tone. `awg_tone_bank` therefore keeps a table
of `N_TONE` entries. Each entry holds:

- a frequency word;
- a 32-bit phase accumulator;
- an amplitude in 16.16 fixed point;
- the instruction fields loaded for the next round.

After reset, entry *p* is the static tweezer at site *p*: frequency
`F0 + p·DF`, full amplitude. Every phase accumulator advances by its frequency
word every clock, in every phase.

### Loading instructions

`awg_cmd_decoder` counts frames so that it knows which field each frame is,
and emits an instruction once the last frame of a command has arrived.

- **Unknown opcode.** It raises `err_o` and ignores the rest of the packet
  until the next start of packet.
- **Loading.** The tone bank stores each instruction in the entry it names:
  - a CLOSE marks entry *p* to ramp down;
  - a MOVE marks entry *s* to chirp from `f_start` to `f_stop` by `f_step`,
    with destination *d*.

### The round

A good packet starts `awg_sequencer`, which steps the table through four
phases. `rearr_ind_o` is the rearrangement indicator, and it is high for the
whole round.

| Phase | Length (clocks) | What the tone table does |
|---|---|---|
| RAMP_DOWN | 2^`RAMP_LOG2` = 32768 (131 µs) | closing tones lose `a_step` per clock, clamped at 0 |
| MOVE | 2^`MOVE_LOG2` = 131072 (524 µs) | moving tones gain `f_step` per clock, a linear chirp |
| COMMIT | 1 | the table is re-indexed (see below) |
| RAMP_UP | 2^`RAMP_LOG2` = 32768 (131 µs) | every tone below full amplitude gains `a_step` per clock, clamped at `AMP_FULL` |

- **Round length.** With these defaults the indicator is high for
  `2·2^15 + 2^17 + 1 = 196,609` clocks, which is 786 µs.
- **Why ramp first.** Closing empty traps before the move means that no atom
  is dragged through a live, empty trap. The traps are reopened only after the
  atoms have arrived.
- **Chirp end point.** `f_step` is an arithmetic shift of the frequency
  difference, so the chirp ends up to 2^`MOVE_LOG2` LSBs short of the target.

### The commit step

This step keeps multi-round operation simple. It does two things at once:

- **It snaps the frequency.** Every moving tone is set exactly to its target
  frequency, which removes the truncation error of the chirp.
- **It re-indexes the table.** Each moving entry is copied, phase included, to
  the slot of the site it reached. Slots that were vacated and not refilled
  get a silent tone at their home frequency.

After the commit, the table is again "entry *p* = site *p*". The next round
can therefore be planned from a new detection exactly like the first one,
with no memory of earlier moves. The RAMP_UP phase then brings every silent
tone back to full amplitude, so empty traps are reopened and can be refilled
in a later round.

## RF synthesis

`dds_mixer` turns the table into one signed 16-bit sample per clock. It takes
three pipeline stages:

1. The top bits of each phase accumulator are converted to a sine with a
   parabola, `4x(1−|x|)`.
2. The usual correction `y + 0.225·(y·|y| − y)` is applied. Its error is below
   0.2% of full scale.
3. Each sine is multiplied by its tone's amplitude, the products are summed,
   and the sum is halved.

`AMP_FULL = 0x0AAA` is chosen so that 24 tones at full amplitude cannot
overflow the sample. The sample is `dac_o`, the input to the DAC.

## Timing

With default parameters and a 14-atom loading, the full-size testbench
measures the following:

- **Detection-completion pulse to the rising edge of the rearrangement
  indicator:** 579 clocks, which is 2.3 µs. The list in this run is 10 moves
  and 10 closes, 270 frames.
- **The latency is deterministic.** For every loading it is

  ```
  t = 2·f + reads + 15 clocks
  ```

  - `f` is the number of frames. Each frame takes one clock to encode and
    one clock to send; the packet adds a header and a checksum word.
    Commands follow each other with no gap, because the encoder accepts the
    next command in the clock in which the last frame of the previous one
    leaves.
  - `reads` is 24 in real-value mode and 1 in comparison mode.
  - The remaining 15 clocks are fixed pipeline delays: result latch,
    acknowledge, planning, decode and round start.

  The end-to-end testbench checks this formula on every round. The frame
  term dominates, as in the original system, where the transfer of the frame
  list took most of the time.
- **Rearrangement round:** 196,609 clocks (786 µs).

The published system this design follows measured a feedback latency of
282 µs. Most of that was software on an embedded processor and the
processor-to-logic transfer of the frame list, at about 0.8 µs per frame.
Since that software is built here as logic, the two numbers measure different
implementations.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `N_TRAP` | 24 | traps, SPD channels and tones (`qc_pkg`, `N_TRAP_P` on the top) |
| `n_target_i` | 10 (input) | target zone size |
| `WINDOW_CYCLES` | 1,250,000 | 5 ms detection window at 4 ns |
| `CNT_W` | 16 | photon counter width |
| `RAMP_LOG2` / `MOVE_LOG2` | 15 / 17 | round phase lengths, as powers of two |
| `FIFO_DEPTH` | 512 | frame buffer |
| `real_mode_i` | 1 (input) | planner reads raw counts (1) or packed bits (0) |
| `F0_FTW`, `DF_FTW`, `AMP_FULL` | 80 MHz, 1 MHz, 0x0AAA | tone plan (`qc_pkg`) |

## How this departs from the published system

- **Single clock.** In the original, the counter card and the AWG card are
  separate FPGA boards in a PXIe chassis. Here they share one clock, and the
  backplane is a 32-bit word link whose protocol (magic word, length, XOR
  checksum) is this design's own. The chassis backplane's physical layer is
  not modelled.
- **Planning in logic.** In the original, the counts are read, the moves are
  planned and the frames are compiled by software on the counter card's ARM
  processor. Here `path_planner` and `rf_cmd_encoder` do this in logic. The
  readout-latency laws of the original (about 279 ns per trap in real-value
  mode, about 15 ns per trap in comparison mode) describe that software
  and are not reproduced. This design reads one word per clock.
- **Frame contents.** Only the frame counts per command (15 and 12) come from
  the original. The contents are this design's own.
- **No segments.** The original's AWG plays pre-loaded sub-waveforms, up to
  128 of them, whose "longest segment number" sets the card-to-card transfer
  time. Here the AWG is a direct tone synthesiser with linear chirps and
  ramps, and has no segment memory.
- **Round shape.** The phase lengths, linear chirp and ramp shapes, and the
  commit re-indexing are chosen here. The 786 µs round is close to the
  roughly 0.8 ms indicator pulse seen in the original's latency trace.
- **Threshold.** Occupancy uses count > threshold. The thresholds and the
  target size are inputs, standing in for the host configuration.
- **Not included.** Detectors, DAC, RF chain and host PC are outside the
  RTL. Their signals are the top-level ports.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
with a `TB_RESULT checks=… failures=…` line and has a watchdog. With Verilator
5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/qc_pkg.sv tb/tb_qc100_top.sv \
          --top-module tb_qc100_top -o sim && ./obj_dir/sim
```

The package must come first on the command line. Swap in any other testbench
name the same way.

- **`tb_qc100_top`.** The end-to-end test, with a shortened window and round
  (window 400 clocks, `RAMP_LOG2=4`, `MOVE_LOG2=7`).
  - It runs 8 random loadings, each with up to 5 rounds.
  - It models a 10% loss of each moved atom, so later rounds have gaps to
    fill.
  - It checks, against its own model:
    - the detected occupancy;
    - the move and close counts;
    - the frame count;
    - `target_ok`;
    - the tone table in the middle of the move;
    - the indicator length;
    - the restored table afterwards.
  - It also counts how often each mechanism occurred: closes, moves,
    multi-round fills, short loadings, loadings that need no move, full
    targets, packets, and rounds in each readout mode (loadings alternate
    between the two). A mechanism that never occurs counts as a failure.
  - A second part sweeps the target size from 2 to 12. It runs four random
    loadings per size, each with up to five rounds and all the checks above,
    and prints how many loadings end with a full target. These fractions come
    from the testbench's own loading and loss model. They exercise the logic;
    they are not a physics prediction. One loading at target size 12 has all 12 atoms
    in the reservoir. It produces the largest list this planner can make,
    324 frames, and the loop takes 687 clocks (2.75 µs).
- **`tb_readout_sweep`.** Runs the read-out path (`readout_regs` feeding
  `path_planner`) at 1, 7, 8, 24, 32, 33 and 35 channels in both modes. It
  checks the occupancy the planner ends up with, the number of reads, and
  the read latency.
- **`tb_qc100_full`.** The same flow with every default: 24 traps, a 5 ms
  window and a 786 µs round. It runs one 14-atom loading and checks the plan,
  the frame count, the indicator length and the resulting target.
