# ASAP: edit distance computed as signal delay

This RTL computes the Levenshtein (edit) distance between a short DNA read and a
reference string with a *race-logic* circuit rather than a dynamic-programming
loop. Each cell of the edit-distance table becomes a small hardware element
that delays a rising edge by a number of clock cycles equal to the cost of a
match, mismatch, insertion or deletion. A single rising edge enters the
top-left corner of a grid of such elements. The first time it reaches the
bottom row (local, Smith-Waterman-style alignment) or the bottom-right corner
(global, Needleman-Wunsch-style alignment) is the distance, measured by a
counter. All cells work at once, so a 128 x 128 comparison takes about as many
cycles as the distance itself plus the pipeline registers. It does not take
128 x 128 steps.

Around the grid, called the *lattice*, sits an accelerator function unit. It
fetches read/reference pairs from host memory in 1024-bit lines and spreads
them over four lattices. It packs the 32-bit results back into lines and
writes them to host memory.

## 1. The delay element

`asap_delay_element` is one cell (i, j). Rows are read positions i, columns
reference positions j. The cell has three inputs, each a level signal that
goes high when the wavefront arrives and stays high:

| input     | comes from   | delayed by                                     |
|-----------|--------------|------------------------------------------------|
| `in_diag` | (i-1, j-1)   | match penalty if Read[i] == Ref[j], else mismatch penalty |
| `in_left` | (i, j-1)     | deletion penalty                               |
| `in_up`   | (i-1, j)     | insertion penalty                              |

Each input runs through a short shift register, and a multiplexer picks the
tap given by the penalty. Tap 0 is the input itself, so a zero penalty costs no
clock cycle. This matters because a match normally costs 0. With the default
`PW = 2`, penalties are 0 to 3 cycles and each shift register holds 3 bits.

The output is the OR of the three delayed signals. Because the signals are
levels, OR means "whichever arrives first". That is the `min()` of the
edit-distance recurrence, and the shift register is its `+ penalty`. So the
time at which cell (i, j) goes high is exactly D(i, j) from the usual table.
Penalties are run-time inputs, so one build serves any cost set within range.

The shift registers only advance when at least one input is high. This is a
clock enable that stands in for the clock gating of idle cells. A synchronous
`clr` empties them between comparisons.

## 2. Tiles and the timing they add

A full lattice built only from combinational zero-delay paths would be one
very long chain (a run of matches along a diagonal). So the lattice is cut
into T x T tiles (`asap_tile`, default T = 16). Tiles exchange signals through
registers:

* The bottom row and the right column of a tile are registered once before
  they reach the tile below or to the right.
* The bottom-right corner is registered twice before it reaches the diagonal
  neighbour's top-left cell. This matches the two cycles a path would spend
  going right and then down.

Every tile boundary a wavefront crosses therefore costs one extra cycle, and
a diagonal crossing costs two. **The value this lattice reports is the
minimum over all paths of (sum of penalties + tile boundaries crossed).** It
is not exactly the edit distance. For pairs that align close to the main
diagonal, the extra cycles are roughly constant (2 per tile step). Far from
it they are not, and a path with slightly higher cost but fewer crossings can
win. The testbench reference model (`tb/asap_ref_pkg.sv`, `lattice_times`)
computes this exact quantity, including the crossings, and every test compares
against it. A user who needs the plain distance should either subtract the
diagonal offset for the alignment in question or build with `T` equal to the
lattice size, which has no internal registers.

## 3. Lattice and result readout

`asap_lattice` tiles the grid (`LQ` x `LR`, default 128 x 128). The start
signal drives the diagonal input of cell (0, 0). All inputs off the edge of
the grid are tied low. It outputs the unregistered last row `out_row` and its
last element `out_nw`.

`asap_core` wraps one lattice with its readout:

* Two `asap_delay_counter`s start when the comparison starts. One stops when
  any bit of the last row is high (SW). The other stops when the bottom-right
  cell is high (NW). `cfg.mode` selects which one is reported.
* LV mode (`cfg.lv_en`): if the selected count reaches `cfg.max_ld` before
  the wavefront arrives, the comparison stops and reports `max_ld`. This
  bounds the cycles spent on hopeless pairs.
* Handshake: `in_valid/in_ready` take a pair; `res_valid/res_ready` return
  the 32-bit result. From acceptance to `res_valid` takes (reported value + 2)
  cycles.

Counter width comes from the bound on the largest delay in the lattice,
ceil(log2(min(dI*lQ + dD*lR, dM*lQ + dD*(lR-lQ)))), computed with the largest
penalty. Added to it are the tile crossings and one spare bit
(`counter_width()` in `rtl/asap_pkg.sv`). The counters saturate rather than
wrap.

**Band elimination.** The parameter `BAND` (in tiles, 0 = off) drops every tile
whose tile row and tile column differ by more than `BAND`. Those tiles are
never built and read as 0. When the alignment is known to need few indels (LV
mode with a small `max_ld`), the wavefront that matters never leaves the band,
so the result does not change and area falls. With 8 tiles per side and
`BAND = 1`, 22 of 64 tiles are kept.

## 4. The accelerator function unit (`asap_afu`, the top)

A job is described by a 1024-bit *work element descriptor* (WED) in host
memory. `job_wed` holds its address and `job_start` starts the job. Fields,
from bit 0:

| bits      | field                                             |
|-----------|---------------------------------------------------|
| 63:0      | `in_ptr`: byte address of the first input line    |
| 127:64    | `out_ptr`: byte address of the first result line  |
| 159:128   | `num_cases`: number of comparisons                |
| 167:160   | match penalty                                     |
| 175:168   | mismatch penalty                                  |
| 183:176   | insertion penalty                                 |
| 191:184   | deletion penalty                                  |
| 223:192   | `max_ld` for LV mode                              |
| 231:224   | flags: bit 0 = NW (else SW), bit 1 = LV timeout   |

Penalties above 3 saturate at 3 in the default build.

**Input lines.** Each 128-byte line holds N = 1024 / (2 (LQ + LR)) comparisons,
so 2 at 128 bp and 4 at 64 bp. Comparison k occupies bits
[k·2(LQ+LR) +: 2(LQ+LR)]. The read comes first (nucleotide n at bits 2n+1:2n
of the comparison) and the reference follows. The encoding is A = 0, C = 1,
G = 2, T = 3.

**Data path.**

1. `asap_control_unit` reads the WED, then requests input lines one after
   another. It only issues a read while the input cache has room for it and
   for every read still outstanding.
2. `asap_input_cache` is a 256-line (32 KB) first-word-fall-through FIFO.
3. `asap_case_mux` picks comparison `mux_sel` from the head line. The line is
   popped after its last comparison.
4. `asap_crossbar` hands comparisons to the four cores round-robin, and
   collects results in the same order. Results therefore stay in input
   order, even though up to four comparisons overlap.
5. `asap_output_cache` packs 32 results into a line (result k at bits
   [32k +: 32]). The control unit writes each full line to
   `out_ptr + 128·line`. At the end it flushes a last partial line, with
   zeros in unused slots.
6. When all results are written, a status line goes to WED + 128: the word
   `0xA5A0D0DE` in bits 31:0 and the result count in bits 63:32. Then
   `job_done` pulses.

**Host memory channel.** `cmd_valid/cmd_ready` carry a command (`cmd_write`,
128-byte aligned `cmd_addr`, `cmd_wdata`). Read data returns on
`rsp_valid/rsp_data` in request order. Writes take priority over reads.

**MMIO.** `mmio_rd` with `mmio_addr` returns, one cycle later:
0 = {done, running}, 1 = comparisons dispatched, 2 = result lines written,
3 = cycles a core was free but no input was ready (input stalls),
4 = cycles the job was running.

## 5. Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `LQ`, `LR` | 128 | read and reference length (lattice rows, columns) |
| `T` | 16 | tile edge; must divide `LQ` and `LR` |
| `PW` | 2 | penalty width in the lattice; largest penalty 2^PW - 1 |
| `BAND` | 0 | kept tile diagonals on each side of the main one, 0 = all |
| `NC` | 4 | lattices (cores) |
| `DEPTH` | 256 | input cache lines |

Lattice area grows as LQ x LR. Changing lengths or `PW` means rebuilding,
while penalties, mode and `max_ld` are set per job.

## 6. Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
RTL="rtl/asap_pkg.sv $(ls rtl/*.sv | grep -v asap_pkg)"
TB=tb_asap_core
verilator --binary --timing --assert -Wno-fatal --top-module $TB \
    $RTL tb/asap_ref_pkg.sv tb/asap_host_mem.sv tb/$TB.sv
./obj_dir/V$TB
```

| testbench | what it covers |
|-----------|----------------|
| `tb_asap_delay_element` | random penalties and input rise times, output rise cycle against the earliest path |
| `tb_asap_tile` | one 8 x 8 tile against the reference model, edge registers |
| `tb_asap_lattice` | 32 x 32 lattices, full and `BAND = 1`, random pairs and penalties |
| `tb_asap_delay_counter` | count, hold, clear, saturation |
| `tb_asap_core` | SW, NW, LV timeout, result latency |
| `tb_asap_input_cache`, `tb_asap_output_cache` | FIFO and packing against queues |
| `tb_asap_case_mux` | every slot at 64 bp and 128 bp |
| `tb_asap_crossbar` | order of results under random core latencies |
| `tb_asap_control_unit` | descriptor, addresses, status line, credit limit |
| `tb_asap_afu` | three jobs end to end at 16 x 16 (SW, NW, NW+LV) |
| `tb_asap_afu_full` | two jobs on the default build (four 128 x 128 lattices) |

`tb_asap_afu` fails if any of these never happens: host back-pressure, a full
input cache, input stalls, overlapping lattices, LV timeouts or a partial last
line. `tb_asap_afu_full` runs in about two seconds once built. Building it takes
about 14 minutes on a 4-core machine, because the default design has
4 x 16384 cells.

`tb/asap_host_mem.sv` is a behavioural host memory with configurable latency
and random back-pressure. `tb/asap_ref_pkg.sv` holds the software reference:
the delay recurrence with tile crossings and band, and a generator for
read/reference pairs with a chosen number of edits.

## 7. Departures from the original description

* **Tile-crossing delay is path-dependent** (section 2). It is not a constant
  offset, and results are not corrected for it.
* **Host interface.** The coherent host-attach layer and its protocol are not
  part of this RTL. The top has the simple in-order line channel of section 4
  instead. The WED field layout, status line and MMIO map are this design's
  own.
* **Clock gating** is a clock enable on each cell's shift registers.
* **Lattice size.** The default is 128 x 128, the largest size the original
  work fitted on its FPGA. Its interface example uses 64 bp strings with four
  per line, which is the same RTL built with `LQ = LR = 64`.
* **Large penalties.** Long block-RAM shift registers for large penalties are
  not provided. `PW` simply lengthens the flip-flop shift registers.
* **Distribution over lattices** (round-robin, in-order results) is this
  design's choice.
* **Band elimination** is per tile, not per cell, so it keeps slightly more
  area than a cell-exact cut.
* Strings longer than the lattice (splitting into sub-strings and re-injecting
  the wavefront) are not supported.
