# Row-pipelined atom rearrangement: Tetris planner and multi-tone AOD waveform generator

Neutral atoms loaded into an array of optical tweezers land at random: each
site holds an atom with probability around one half. To get a defect-free
array, atoms are picked up by mobile tweezers and moved into a target
geometry. Two acousto-optic deflectors (AODs) steer those mobile tweezers: one
tone on an AOD is one tweezer column (X) or row (Y). Every microsecond spent
before and during this rearrangement costs atoms, because they are lost over
time.

This design shortens the sequence by overlapping its stages row by row.
It does not wait for the whole camera image. Each row of tweezer sites is
decoded as soon as its pixel lines have left the camera. The rearrangement
strategy (the *Tetris* algorithm) plans that row's move at once, and the
waveform generator starts moving those atoms while later rows are still
being read out. In one row move, every atom of a row moves at the same time:
the X AOD gets one tone per moving atom (up to K = 32) and the Y AOD a single
tone. Each tone is its own direct digital synthesiser (DDS). The tones are
summed and streamed to a 1.2288 GS/s, 16-bit DAC.

```
 camera pixel bus -> image_decoder --+
                                      +-> row FIFO -> tetris_planner -> move FIFO -> dwg -> DAC X, DAC Y
 host frame       -> row_emulator ---+    (1 row =     (row moves,         (moves)    (K DDS + single
                      (emu_mode)           44 bits)     examination,                    tone, sums)
                                                        column moves)
```

Everything is in one clock domain. The clock is the DAC rate divided by 8:
153.6 MHz, or 6.51 ns per clock. Every clock, each DDS produces 8 consecutive
samples (8 interleaved cores).

## The Tetris strategy

The target geometry is given per column *i* as the set R_i of rows that must
end up holding an atom in that column. It is stored as a 44-bit mask per
column, so any geometry that can be drawn on the site grid is allowed.
The strategy has three steps.

1. **Row moves, one per camera row k.** For every column, m_i is the lowest
   target row in R_i that has not been claimed yet. Suppose row k holds n
   atoms. The n columns with the smallest m_i are chosen. Ties go to the
   leftmost column, and columns with no open targets are never chosen. The
   row's atoms, taken left to right, are sent to the chosen columns, also
   left to right. Each chosen column then gives up its lowest open target
   row. Because the order is kept, no two atoms cross.
2. **Examination.** After the last row, every R_i must be empty. If one is
   not, the loading had too few atoms in the right places. The attempt is
   abandoned: `done` pulses with `success = 0`, and no column move is issued.
3. **Column moves.** In each column, the atoms parked there during step 1
   sit in various rows. The k-th of them (from the top) goes to the k-th
   target row of that column, again keeping order. This is one move per
   column that has targets.

The name comes from the picture: each row drops a "piece" of atoms into the
columns with the deepest gaps, and the column moves close the gaps.

### How it is computed in logic

`tetris_row_select` replaces the sort with a ranking. Each column's key is
(m_i, i). A column is chosen when it has an open target and fewer than n
other non-empty columns have a smaller key. This gives the same set as taking
the first n entries of a stable sort, in one combinational pass of
COLS² = 1936 comparators.

`pair_matcher` pairs the i-th set bit of a source mask with the i-th set bit
of a destination mask. Each bit's rank comes from a prefix count. The same
unit serves both move kinds:

* For a row move, the sources are the row's occupied columns and the
  destinations are the chosen columns.
* For a column move, the sources are the rows whose atom was assigned to
  that column and the destinations are the column's target rows.

`tetris_planner` holds two 44×44 bit arrays:

* `rem`: the open target rows per column. The update `rem & (rem - 1)` clears
  a column's lowest bit.
* `assigned`: which row holds an atom destined for which column.

A row is planned in the clock it is accepted. Its move descriptor is ready
the next clock. The descriptor is the axis, the line, a count, and K source
and K destination indices. A row is accepted only when the move register is
free, so back-pressure from the waveform generator stalls the planner. Those
stalls are counted in `n_stalls`, and rows wait in the row FIFO meanwhile.

Two rules are this design's own. At most K atoms move per row. With a target
30 columns wide, the strategy never asks for more than 30. A row with
nothing to move issues no move.

## The waveform generator (`dwg`)

A move descriptor is accepted only when the generator is idle. It is then
executed in four phases:

| phase     | what happens |
|-----------|--------------|
| LOAD      | each active trajectory is set to its source frequency; each DDS gets a pseudo-random start phase from a 32-bit LFSR. Random phases keep the sum of many tones from building up large intermodulation peaks. |
| RAMP_UP   | a common intensity level rises by `cfg.ramp_step` per clock, moving atoms from the static traps into the mobile ones |
| TRAVEL    | all trajectories start together; the phase ends when the last one has arrived |
| RAMP_DOWN | the level falls back to zero, handing atoms back to the static traps |

**Site index to frequency.** Index *s* becomes the tuning word
`f0 + s*df`, with a separate pair (f0, df) for each axis (`dwg_cfg_t`). A
tuning word counts in units of 1.2288 GHz / 2^24 = 73.24 Hz.

**Trajectories** (`tweezer_trajectory`). The position is the frequency, kept
with 16 fraction bits. Each clock, the velocity grows by `accel` until it
reaches `vmax`. Once the distance left is no more than the distance covered
while speeding up, the steps repeat in reverse order. The last step is clipped
so the tweezer lands exactly on the destination frequency. So each move
speeds up at a fixed rate, holds its top speed, and slows down symmetrically.

**DDS** (`dds`, `cos_lut`). A 24-bit phase accumulator holds the phase of the
first of the 8 samples in a clock. Core j uses `acc + j*freq`. The
accumulator then advances by `8*freq`. So the phase stays continuous however
the frequency changes from clock to clock. The cosine table has 1024 16-bit
entries, `round(32767*cos(2πa/1024))`. It is computed at elaboration, so no
data file is needed. From a frequency or amplitude change to the output takes
3 clocks.

**Amplitudes** (`amp_compensation`). Tweezer i gets `A_i = level × gain(f_i)`.
The gain table has 64 entries, indexed by the top 6 bits of the tuning word.
It flattens the AOD's frequency response. The host loads it through
`comp_we/comp_waddr/comp_wdata`; after reset every entry is unity (`16'hFFFF`).

**Summing and routing.** Each of the 8 lanes has a pipelined addition tree
over the K tones (`addition_tree`, log2 K levels). The sum is scaled down by
2^log2(K) and saturated to 16 bits, so K full-scale tones cannot overflow the
DAC word. A separate single-tone DDS holds the fixed axis at the frequency of
the move's line, and is silent when idle. The routing depends on the move:

* Row move: the multi-tone drives `dac_x` and the single tone drives `dac_y`.
* Column move: the two swap.

The axis flag travels down the pipeline with the samples, so the swap takes
effect on the exact sample. `n_mode_switches` counts the swaps. Latency from
the first frequency change in TRAVEL to the DAC ports is 4 + log2 K = 9
clocks (59 ns).

## Occupancy from the camera (`image_decoder`)

The EMCCD streams pixels on a Camera Link style bus (`fval`, `lval`, `dval`,
16-bit pixel). The bus is deserialised outside this design and must be in
the fabric clock. Each site is imaged onto a 3×3 pixel block. The block's
corner is at `(x0 + 3*col, y0 + 3*row)`; x0 and y0 are set at run time.

While a site row's three pixel lines stream in, the decoder adds each pixel
into the accumulator of its site column. When the third line ends, every
accumulator is compared with `threshold`. The 44-bit occupancy row then leaves
one clock later. The image itself is never stored.

The decision rule is the simplest one: the sum over the footprint must reach
a threshold. A better classifier would replace only the comparison.

## Hardware-in-the-loop mode (`row_emulator`)

With `emu_mode = 1`, the camera and decoder are replaced by a host-supplied
frame (`emu_frame`). It is replayed with the camera's readout latency
(`emu_cam_delay`, once) and a per-row decoding delay (`emu_row_delay`). Both
delays are in clocks. So the rest of the pipeline sees realistic row timing
even without a camera. For reference, the measured overheads of the original
system are:

* camera latency: 835 µs, i.e. 128,256 clocks;
* decoding: 37.1 µs per pixel row, i.e. 17,096 clocks for one 3-pixel site
  row.

## Top level (`atom_rearranger`) and its parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `COLS`, `ROWS` | 44, 44 | reservoir size in sites; 44×44 holds a 30×30 compact target |
| `K` | 32 | mobile tweezers per move, DDS channels |
| `ROW_FIFO_DEPTH` | 64 | occupancy rows buffered; a whole frame, since the camera cannot be paused |
| `MOVE_FIFO_DEPTH` | 4 | moves buffered between planner and generator |

These are the status outputs:

* `done` / `success`: the frame is finished (planner done and last move
  played) and whether the examination passed.
* `image_done`: pulses at the end of each camera frame.
* `move_done`: pulses after each executed move.
* Sticky flags: `row_overflow`, `move_queue_full_seen` and `trunc_seen`.
* Counters: `n_stalls`, `n_row_moves`, `n_col_moves` and `n_mode_switches`.

The configuration that a processor would normally write comes in as ports:
`dec_cfg`, `dwg_cfg`, `target` and the compensation table.

Synthesised with the default parameters (generic cells, before technology
mapping), the top comes to about 37 k cells and 34 k flip-flop bits. Most of
that is in the 33 DDS channels and the 44×44 planner state.

## Latency against the measured overheads of the original system

The original system reports the following start-up overheads for a row of 32
atoms:

* camera latency: 835 µs;
* decoding: 37.1 µs per pixel row;
* algorithm on the soft-core: 60 µs;
* waveform generator: 0.715 µs;
* DAC: 0.19 µs.

In this design:

* The camera terms are set by the camera. They are the numbers to load into
  the emulator.
* The decoder adds one clock after a row's last pixel line.
* The planner adds one clock per row, plus one clock each for the row FIFO
  and the move FIFO.
* The generator's first samples appear a few clocks after a move is accepted
  (LOAD, then 3 DDS stages, then log2 K tree stages, then routing).

From then on, what limits the rate is the atom motion: the ramp lengths and
the trajectory speed set in `dwg_cfg`. The original used 35 µs per transfer
between static and mobile traps, and 30 µs per site of travel.

## Where this design departs from the original system

* **The strategy runs in logic.** The original runs the Tetris algorithm as
  software on a soft-core processor. Here it is a state machine with
  combinational column choice, so a row is planned in one clock instead of
  about 60 µs. Decisions are the same as the algorithm's, except for the
  choices listed next.
* **Choices the algorithm leaves open.** Ties between equal m_i go to the
  lower column index. At most K atoms move per row. Unpaired atoms stay in
  place. A column move pairs the k-th parked atom with the k-th target row.
* **Column moves.** The original describes only the row moves in detail: a
  multi-tone on X with a fixed Y tone. For column moves this design swaps the
  roles: multi-tone on Y, fixed tone on X.
* **Invented parts.** The following are not taken from the original system:
  * the linear index-to-frequency map;
  * the 64-entry gain table;
  * the LFSR used for random phases;
  * the output scaling;
  * the move descriptor format;
  * the FIFOs;
  * the threshold decoder.
* **Not built:**
  * the camera;
  * the Camera Link deserialiser;
  * the soft-core processor and its host interface;
  * the DAC and its JESD204 link (samples leave as 8 parallel words per
    channel per clock);
  * the AODs.
* **Random test frames come from the host.** In the hardware-in-the-loop
  mode, the 50 % random loading patterns are supplied through `emu_frame`.
  They are not generated on chip.
* **One tone on the fixed axis.** A 2-D array of tweezers with several
  Y tones (e.g. 32×8) cannot be produced.
* **Sizes.** The defaults hold a 30×30 compact target in a 44×44 reservoir,
  and staggered targets up to 43×43 sites. Larger targets need larger
  `COLS`/`ROWS`. More than 32 simultaneous tweezers (the original estimates
  that over 400 fit an FPGA) need a larger `K`; the logic grows linearly
  with it.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block
with an independent model and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_image_decoder` | random frames through `emccd_model` (a noisy camera with blanking and pixels outside the grid); every decoded row against the frame, and each row within two clocks of its last pixel line |
| `tb_row_emulator` | exact clock of every row against cam/row delays |
| `tb_tetris_row_select` | random masks against a sort-based reference |
| `tb_pair_matcher` | random masks against list pairing, truncation |
| `tb_tetris_planner` | every move of random frames against `tetris_ref_pkg` (a queue-based software model of the algorithm), abandon case, stalls |
| `tb_dds` | all 8 lanes against A·cos(phase) from the exact accumulated phase, under random frequency/amplitude changes and phase reloads, 3 clocks later |
| `tb_addition_tree` | sums for N = 32 and N = 5, latency |
| `tb_tweezer_trajectory` | monotonic motion, speed and acceleration bounds, exact landing, duration against an ideal trapezoidal profile |
| `tb_amp_compensation` | products against the table, writes |
| `tb_dwg` | tone frequencies and X/Y routing from the DAC samples (x[j+1] + x[j-1] = 2cos(ω)x[j]), a 32-tweezer move, move durations, counters, silence when idle |
| `tb_atom_rearranger` | full size, three frames: through the camera model, through the emulator with slow ramps, and an under-filled frame that must be abandoned. Every move the top executes is compared with the reference model; each mechanism (stall, full move queue, mode switch, abandon, camera and emulator paths) must occur. |

`tb_workloads` runs the full-size pipeline in hardware-in-the-loop mode with
the original system's timing:

* camera latency 835 µs, and 111.3 µs of decoding per site row;
* 35 µs transfer ramps, and travel at 30 µs per site;
* tones in the 90–110 MHz band.

It checks every move, each move's duration and the start-up overhead, and it
prints the total time for each target. One run gave these times:

| target | atoms | reservoir | moves | total time |
|--------|-------|-----------|-------|------------|
| compact 10×10 | 100 | 16×16 | 23 | 7.4 ms |
| compact 20×20 | 400 | 30×30 | 47 | 13.5 ms |
| compact 30×30 | 900 | 44×44 | 72 | 26.0 ms |
| staggered 30×30 | 450 | 31×31 | 60 | 10.7 ms |
| staggered 43×43 | 925 | 44×44 | 84 | 17.8 ms |

In every case the first move starts 946 µs after `start`: the camera latency
plus one row of decoding. The atom motion dominates the total.

`emccd_model` is a behavioural camera that turns an occupancy frame into a
noisy pixel stream.

To simulate with Verilator 5, run from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rearr_pkg.sv tb/tetris_ref_pkg.sv tb/tb_atom_rearranger.sv \
    --top-module tb_atom_rearranger -o sim && ./obj_dir/sim
```

For another block, replace the testbench name. The full-size end-to-end run
takes under a minute, including compilation. Testbenches drive inputs and
sample outputs on the falling clock edge. This keeps them free of races in a
two-state simulator.
