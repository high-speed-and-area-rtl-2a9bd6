# A two-level 2-D 5/3 wavelet transform engine on two interleaved memory banks

This is synthesizable SystemVerilog for a small image-compression front end: the
two-dimensional discrete wavelet transform (DWT) of a grey-scale image, computed in
place in a pair of dual-port memory banks. The transform is the integer 5/3 lifting
wavelet (the reversible wavelet of JPEG 2000). One 1-D filter does all the work. It
passes over the image line by line, once down the columns and once along the rows,
and then again on the low-pass quarter. That gives the usual two-level pyramid: LL2,
LH2, HL2, HH2 in the top-left quarter and LH1, HL1, HH1 around it.

The architecture follows the DWT processor of S. Kaur and R. Mehra, "High Speed and
Area Efficient 2D DWT Processor based Image Compression" (Signal & Image Processing,
2010). Its parts are a lifting filter, a memory controller built from counters and a
phase register, crossbars that interleave data between the two banks, and a
high-pass delay that keeps the two filter outputs from colliding on one bank. The
publication gives the filter equations and describes the other parts only in words.
The bank map, the address sequences, the widths, the latencies and the host port
below are this design's own. They were chosen to meet every property the
publication states. The section *Departures and choices* lists them.

## Data flow

```
            host port (load pixels / read coefficients, while idle)
                 |                                   ^
                 v                                   |
   +---------------------------------------------------------------+
   | dwt_processor                                                 |
   |  mem_controller --rd addr--> read_crossbar --even,odd--+      |
   |    | counters, phase          ^     |                  v      |
   |    |                          |     |              dwt_filter |
   |    +--wr addr/bank---> write_crossbar <--L-----------+ |      |
   |                              ^ <--H-- h_delay <--H------+     |
   +------------------------------|---|----------------------------+
                 bank 0 <---------+   +---------> bank 1    (ext_mem_bank x2)
```

Every cycle of a phase does four things:
- It reads one even/odd pixel pair, one pixel from each bank.
- The filter takes in that pair.
- The filter puts out one low-pass coefficient L and one high-pass coefficient H.
- It writes two words: the L just computed to one bank, and the H from one line
  earlier to the other bank.

So the engine moves two pixels per clock in and two coefficients per clock out,
and both banks are read and written on every cycle.

## The lifting filter (`dwt_filter`)

For a line X(0..NL-1) the filter computes

    H(n) = X(2n+1) - floor((X(2n) + X(2n+2)) / 2)
    L(n) = X(2n)   + floor((H(n-1) + H(n) + 2) / 4)

The ends of the line are mirrored, as in whole-sample symmetric extension:
- On the last pair, X(2n+2) is replaced by X(2n).
- On the first pair, H(n-1) is replaced by H(n).

The line framing arrives as `sol` and `eol` flags on the first and last pair.

The filter has three register stages:
1. Stage 1 holds the pair (X(2n), X(2n+1)).
2. H(n) is formed as soon as the next pair's even sample is at the inputs, and goes
   into stage 2.
3. L(n) is formed from stage 2 and its stored H(n-1), and goes into stage 3.

The latency is exactly 3 cycles. Within a line the pairs must come on consecutive
cycles, and an assertion checks this. Between lines there may be gaps. Integer
floors are arithmetic right shifts. Words are 16-bit two's complement. 8-bit pixels
reach about 12 significant bits after two 2-D levels.

## Memory organisation

The image lives in two banks of N*N/2 words. Pixel (row, col) is stored as follows:

    bank = row[0] XOR col[0]            (a checkerboard)
    word = {row, col[msb:1]}

This map has two properties, and the rest of the design depends on them:

1. **The two pixels of a pair are in different banks.** This holds for any pair
   (2m, 2m+1) along any row or column, so the whole pair can be read in one cycle.
2. **An L write and a one-line-old H write are in different banks.** Take L(m) of
   line `li`, which goes to position m of that line. Take H(m) of line `li-1`, which
   goes to position NL/2+m of the previous line. NL/2 is even, so the position
   parity is the same and the line parity differs. The banks therefore differ.

Without the delay, L(m) and H(m) of the same line would always fall in the same
bank. That is exactly why the high-pass stream is delayed by one line of outputs,
NL/2 cycles. For the 64-pixel lines of the first level this is 32 cycles, the figure
the publication gives. At the second level it is 16 cycles. `h_delay` is a 32-stage
shift register with a tap selected per phase. `mem_controller` asserts both
properties on every cycle.

Each bank (`ext_mem_bank`) has one write port and one registered read port. When a
read and a write hit the same address in the same cycle, the read returns the old
word.

## Phases, counters and address generation (`mem_controller`)

A run has `2*LEVELS` phases. Phase p works on the NL x NL top-left region, where
NL = N >> (p/2):

| phase | level | pass       | region  | line = | L goes to      | H goes to       |
|-------|-------|------------|---------|--------|----------------|-----------------|
| 0     | 1     | vertical   | 64 x 64 | column | top half       | bottom half     |
| 1     | 1     | horizontal | 64 x 64 | row    | left half      | right half      |
| 2     | 2     | vertical   | 32 x 32 | column | top half       | bottom half     |
| 3     | 2     | horizontal | 32 x 32 | row    | left half      | right half      |

Three registers drive everything.

- **Master counter `cnt`** (reads). While `cnt < NL*NL/2`, line `li = cnt / (NL/2)`
  and pair `m = cnt % (NL/2)`. The pixels read are those at positions 2m and 2m+1
  of line `li`. In a level-1 horizontal pass both banks are read at word `cnt`
  itself, which is a stride-1 sweep. In the other passes the word is a permutation
  of the counter's bits. `sol` and `eol` are simply `m == 0` and `m == NL/2-1`.
  They are registered by one cycle so that they line up with the read data.
- **Write counter `wcnt`.** It starts `PIPE_LAT = 4` cycles after `cnt`: 1 cycle of
  bank read latency plus 3 cycles of filter latency. So `wcnt = j` is the index of
  the L/H pair that is leaving the filter right now:
  - L is written when `0 <= j < NL*NL/2`, to position `j % (NL/2)` of line
    `j / (NL/2)`.
  - H is written when `NL/2 <= j < NL*NL/2 + NL/2`, to position
    `NL/2 + j % (NL/2)` of line `j / (NL/2) - 1`.

  In a horizontal pass, consecutive L writes of a line go to the same word of
  bank 0 and of bank 1 in turn.
- **Phase register.** It advances when the last H of the phase has been written.
  Reset holds both counters at zero until a `start` pulse. A `start` during a run
  is ignored. `done` pulses for one cycle after the last phase.

**Why in-place writing is safe.** A write only ever goes to a position of its own
line, or of the line before it. That position has already been read:
- L(m) lands on position m, which was read when the line was at pair m/2.
- H(m) lands on NL/2+m, which was read at pair NL/4+m/2, long before its H comes
  out.

Each phase also waits for its last H write before the next phase starts reading.
This drain is NL/2 + PIPE_LAT cycles, so the next phase always reads finished data.

**Cycle counts.** A phase takes NL*NL/2 + NL/2 + PIPE_LAT cycles. At the default
size that is 2084 cycles at level 1 and 532 cycles at level 2. A whole run takes
2*(2084+532) = 5232 cycles from `start` to `done`. Loading and reading back the
image through the host port take N*N cycles each.

## Output layout

After a run, coefficient (row, col) is read from the same coordinates. The first
letter of a band name is the vertical filter and the second the horizontal filter.

| rows     | cols     | band |
|----------|----------|------|
| 0..15    | 0..15    | LL2  |
| 0..15    | 16..31   | LH2  |
| 16..31   | 0..15    | HL2  |
| 16..31   | 16..31   | HH2  |
| 0..31    | 32..63   | LH1  |
| 32..63   | 0..31    | HL1  |
| 32..63   | 32..63   | HH1  |

## Top-level interface (`dwt2d_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock; synchronous active-low reset |
| start | in | 1 | start pulse (ignored while busy) |
| busy, done | out | 1 | run in progress; one-cycle pulse at the end |
| phase | out | 2 | current phase |
| host_we | in | 1 | write pixel `host_wdata` at (`host_row`, `host_col`), idle only |
| host_re | in | 1 | read coefficient at (`host_row`, `host_col`), idle only |
| host_row, host_col | in | log2 N | pixel coordinates |
| host_wdata | in | 8 | unsigned pixel, zero-extended into the bank |
| host_rvalid, host_rdata | out | 1, 16 | read data, one cycle after `host_re` |

The processor block `dwt_processor` has the same host port. It also brings out the
two banks' ports, for use with other memories. Those memories must have a one-cycle
registered read and read-before-write behaviour.

Parameters, with their defaults: `N = 64` (a power of two, at least 8 when
`LEVELS = 2`), `LEVELS = 2`, `W = 16` and `PIX_W = 8`. The smallest line
(N >> (LEVELS-1)) must be at least 4 pixels long.

## Departures and choices

These points come from the publication:
- the lifting equations;
- sol/eol framing;
- a pipelined filter;
- two external dual-port banks with read-before-write;
- crossbars that spread L and H over the two banks;
- a 32-cycle H delay that puts L and H in opposite banks;
- a controller made of two counters and a phase register, whose counts are held at
  zero until start;
- four phases;
- stride-1 reads and write addresses used twice;
- two decomposition levels.

The following are this design's own:

- **Image size 64 x 64.** The publication prints no size. With two pixels per
  cycle, its 32-cycle delay equals one line of outputs only for 64-pixel lines.
- **Two pixels per cycle.** This rate is inferred from the same delay and from the
  simultaneous read and write of both banks. The publication does not print it.
- **Bank map, address sequences and the level-2 delay of 16 cycles.** These are not
  given. They were derived so that the stated properties hold.
- **Latency.** The publication says the controller does not account for memory or
  filter latency. Here the latency is a fixed offset between the two counters,
  plus a drain at the end of each phase. Without these the written data would be
  wrong.
- **Pass order.** The text says both that rows are filtered "vertically" first and
  that columns are then filtered "horizontally". The figure after the first step
  shows L above H, so the first pass here filters down the columns.
- **Boundary handling.** Symmetric extension is used. Only sol/eol are mentioned.
- **Memory model.** The memory is drawn as a vector model made of a selector, two
  product terms, a write inserter and a read section. It is written here as a plain
  RAM array.
- **Host port.** The original is a simulation model that imports the image from a
  workspace. A host load/read port replaces that. Pixels are not level-shifted.
- **Results not reproduced.** The FPGA results (about 500 flip-flops, 143 MHz on
  Spartan-2, 231 MHz on Spartan-3E, 117 mW) come from the authors' own
  implementation and are not reproduced. The memory banks of this design are
  arrays inside `dwt2d_top`, where the original keeps them off chip.

## Files

`rtl/`: `dwt_pkg` (latencies, pass direction, bank map), `dwt_filter`, `h_delay`,
`mem_controller`, `read_crossbar`, `write_crossbar`, `ext_mem_bank`,
`dwt_processor` and `dwt2d_top`.

`tb/`: one self-checking testbench per module (`<module>_tb`), plus
`dwt_ref_pkg`, a plain software model of the transform that the end-to-end tests
compare against. Each testbench prints `TB_RESULT checks=N failures=M` and has a
watchdog.
- `dwt2d_top_tb` runs the design at its default size. It loads three 64 x 64 images
  (random, ramp, 0/255 checkerboard), checks all 4096 coefficients of each and the
  5232-cycle run length, and checks that start and host writes are ignored while
  busy. It also counts that every phase, both line-end extensions, the dual-bank
  writes and reads, and the host accesses actually occurred.
- `dwt_processor_tb` runs 16 x 16 with three levels, down to 4-pixel lines.
- `mem_controller_tb` checks every read and write address of a full run against the
  pass order.

To simulate, for example, the end-to-end test:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/dwt_pkg.sv tb/dwt_ref_pkg.sv tb/dwt2d_top_tb.sv --top-module dwt2d_top_tb
    ./obj_dir/Vdwt2d_top_tb

Replace the testbench name for the others. A full-size run takes well under a
second.
