# Area-efficient N x N 2D FFT processor with reused butterflies

A two-dimensional DFT of an N x N image is a one-dimensional DFT of every
column followed by a one-dimensional DFT of every row. A conventional
hardware radix-2 1D FFT spends one column of N/2 butterflies on each of its
log2(N) stages, so two of them cost N*log2(N) butterflies. This design
builds each 1D FFT from a **single column of N/2 butterflies that is reused
for every stage**: the results of one stage are held in a register array
and fed back through the same butterflies in the next clock. The whole 2D
processor therefore needs N butterflies (N complex multipliers, 2N complex
adders) instead of N*log2(N), which is a factor log2(N) less:

| N x N image | butterflies, one column per stage | butterflies, this design |
|---|---|---|
| 8 x 8 (default) | 24 | 8 |
| 64 x 64 | 384 | 64 |
| 1024 x 1024 | 10240 | 1024 |

The cost is time: a 1D transform takes log2(N) clocks instead of passing
through a pipeline, and every stage's butterflies, routing multiplexers and
multipliers must settle within one clock period.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, and parameterised
by N (a power of two, at least 4; default 8, the size the architecture was
published and measured at).

## Dataflow of the 2D processor (`fft2d`)

```
           column c                    column c -> RAM (write mode)
 x_col ──► fft1d (columns) ──► 1:2 DMUX ──► RAM1 ─┐
              │ done                      └► RAM2 ─┤ row u <- RAM (read mode)
              ▼                                    ▼
        RAM controller ── addr, sel, R/W-bar ──► 2:1 MUX ──► fft1d (rows) ──► y_row
```

* The first `fft1d` transforms the incoming image one column per frame.
* Its results go, through the demultiplexer, into whichever frame RAM is in
  write mode. Each RAM is N x N complex samples and is written a column at a
  time and read a row at a time, so it also performs the transposition
  between the two passes.
* Meanwhile the second `fft1d` reads, through the multiplexer, one row per
  frame of the other RAM (the complete column transform of the previous
  image) and transforms it.
* The RAM controller counts the `done` pulses of the first FFT. The count is
  the address shared by both RAMs: column `addr` is written into one RAM in
  the same frame in which row `addr` of the other is read. After N pulses the
  address wraps and `sel` toggles, which swaps the two RAMs (ping-pong).

| `sel` | RAM1 (R/W-bar = `sel`) | RAM2 (R/W-bar = `~sel`) | second FFT reads |
|---|---|---|---|
| 0 (after reset) | write | read | RAM2 |
| 1 | read | write | RAM1 |

Both 1D FFTs are reset together and free-run in lock step, so `done` of the
first coincides with `done` of the second. An immediate assertion in
`fft2d` checks this every clock.

## Inside one 1D FFT (`fft1d`)

```
 x ──► ISL muxes ──► routing network ──► N/2 butterflies ──► OSL demux ──► y
          ▲                ▲ SB               ▲ twiddles (ROM, by SB)  │
          └── register array ◄──────────────────────────────────────────┘
                     control unit: SB (stage), ISL, OSL
```

The control unit is a stage counter `sb` that advances on every clock and
wraps after log2(N)-1. From it come two select lines:

* **ISL** (input select) is 0 only in stage 0: the butterflies get the
  external frame `x`. In later stages ISL = 1 feeds back the register array.
* **OSL** (output select) is 1 only in the last stage: the butterfly outputs
  are the transform and appear on `y`. In earlier stages OSL = 0 and the
  outputs are loaded into the register array.

For N = 8 one frame takes three clocks:

| clock | `sb` | ISL | OSL | butterflies compute from | results go to |
|---|---|---|---|---|---|
| t   | 0 | 0 | 0 | `x` (external) | register array |
| t+1 | 1 | 1 | 0 | register array | register array |
| t+2 | 2 | 1 | 1 | register array | `y`, with `done` = 1 |
| t+3 | 0 | 0 | 0 | next `x` | register array |

`done` is OSL: a one-clock pulse per frame while `y` holds the result
(`y` is zero otherwise). `take` = ~ISL tells the source when `x` is
consumed. A new frame enters every log2(N) clocks with no idle cycle.

### The butterfly

Each butterfly computes, in one clock and without a register of its own,

```
y_add = (A + W*B) / 2        y_sub = (A - W*B) / 2
```

with a four-multiplier complex product. The halving in every stage makes
the 1D FFT return DFT(x)/N and the 2D FFT DFT2(x)/N^2, so no stage can
overflow (see "Number format" below).

### Routing network and twiddle ROM: how one column of butterflies serves every stage

This is the part that is easiest to get wrong. The butterflies' outputs are
wired to fixed places: butterfly b writes its sum to register-array entry b
and its difference to entry b + N/2 (and, in the last stage, to `Y(b)` and
`Y(b+N/2)`). The routing network in front of the butterflies must therefore
fetch, for each stage, the pair the radix-2 decimation-in-time algorithm
needs, from wherever the previous stage left it.

The algorithm followed is the textbook in-place DIT FFT on a bit-reversed
input. In stage s (half-span h = 2^s) butterfly b handles group g = b / h,
position j = b mod h, i.e. the logical elements i = 2hg + j and i + h, with
twiddle `W_N^(j*N/(2h))`. The network's select tables follow from this:

* stage 0: logical element l comes from input `x[bitrev(l)]`, so the bit
  reversal costs no extra hardware;
* stage s > 0: logical element l was written in stage s-1 by butterfly
  `b' = (l / 2h') * h' + (l mod h')` (h' = 2^(s-1)) to entry b', or b'+N/2
  if `(l / h')` is odd.

In the last stage butterfly b handles exactly elements b and b + N/2, so
the output needs no reordering: `y` is in natural frequency order.

For N = 8 the tables are (A and B are the butterfly inputs; `r` = register
array entry):

| stage | BF0 A,B | BF1 A,B | BF2 A,B | BF3 A,B | twiddles BF0..BF3 |
|---|---|---|---|---|---|
| 0 | x0, x4 | x2, x6 | x1, x5 | x3, x7 | W^0, W^0, W^0, W^0 |
| 1 | r0, r1 | r4, r5 | r2, r3 | r6, r7 | W^0, W^2, W^0, W^2 |
| 2 | r0, r2 | r1, r3 | r4, r6 | r5, r7 | W^0, W^1, W^2, W^3 |

(W = exp(-j*2*pi/8).) Both tables are computed by constant functions
during elaboration (`routing_network`, `twiddle_rom`), so changing N needs
no hand-made tables. In hardware each butterfly input is an N:1 multiplexer
steered by `sb`, and the ROM is a small combinational look-up.

## Timing at the top level

* `col_take` is high once every log2(N) clocks (stage 0 of the first FFT).
  In that cycle `x_col[r]` must hold pixel (r, c) of the next column c;
  columns 0..N-1 of an image go in consecutive take cycles, starting with
  the first take after reset.
* The RAM write of column c happens at the end of that frame's `done`
  cycle; the address then advances, and after column N-1 `sel` toggles.
* Output rows appear when `row_valid` = 1: `y_row[v]` = F(u, v) / N^2 with
  u = `row_idx`, rows in order 0..N-1, one every log2(N) clocks.
* Latency: row 0 of an image leaves N*log2(N) + log2(N) - 1 clocks after
  its column 0 was taken (26 clocks for N = 8). Throughput: one N x N image
  every N*log2(N) clocks (24 for N = 8), continuously.
* During the first N*log2(N) clocks after reset the read RAM holds nothing
  yet; the second FFT runs but `row_valid` stays low (`primed` in the RAM
  controller).

Reset (`rst`) is synchronous and active high. It resets the stage counters,
the RAM address, `sel` and `primed`; the register arrays and frame RAMs are
not reset, because nothing reads them before they are written.

## Number format

Not fixed by the architecture; chosen here and collected in `fft_pkg`:

* samples: 16-bit signed real and imaginary parts (`DATA_W`), integers;
* twiddles: 16-bit signed Q1.14 (`TW_W`, `TW_FRAC`), 1.0 = 16384;
* product rounded to nearest from Q1.14, each butterfly output halved with
  rounding and saturated to 16 bits.

Because every stage halves, |output| never exceeds the largest input
modulus, so inputs with modulus below 32768 (e.g. parts within +/-23000)
cannot overflow. Measured error against a floating-point DFT: within 3 LSB
for the 8-point 1D FFT and within 4 LSB for the 2D FFT at N = 4..32. Note
that the scaling by 1/N^2 costs 2*log2(N) bits of dynamic range for small
spectral components; widen `DATA_W` if that matters.

Input may be complex; for a real image tie the imaginary parts to zero.

## Modules

| module | role |
|---|---|
| `fft_pkg` | sample and twiddle types, widths, helpers |
| `butterfly` | combinational radix-2 butterfly, (A +/- W*B)/2 |
| `twiddle_rom` | twiddles of all N/2 butterflies for the current stage |
| `routing_network` | stage-dependent selection of each butterfly's A and B |
| `register_array` | N-entry feedback store, loads while OSL = 0 |
| `control_unit` | stage counter, SB / ISL / OSL |
| `fft1d` | N-point 1D FFT from the blocks above |
| `ram_controller` | shared address, `sel`, R/W-bar lines, ping-pong swap |
| `frame_ram` | N x N frame buffer, column write, row read (two instances) |
| `ram_dmux` | first FFT output to RAM1 or RAM2 |
| `ram_mux` | RAM1 or RAM2 row to the second FFT |
| `fft2d` | top level |

Synthesised at N = 8 (generic coarse synthesis), the top has 521 flip-flop
bits (2 x 256 register-array bits plus counters and control) and 2 x 2048
bits of frame RAM, and 32 real multiplications (four `*` in each of the
8 butterflies; synthesis merges them with the rounding adders).

## Where this RTL departs from, or adds to, the published architecture

The block structure, the stage schedule (ISL low in stage 0, OSL high in
the last stage, one stage per clock), DONE = OSL, the N/2 reused
butterflies with register-array feedback, the twiddle ROM fed by the stage
bus, the ping-pong RAMs, the `sel` protocol and the single address shared by
both RAMs follow the published description. The following are this
design's own:

* **Number format and per-stage scaling by 1/2** (the original gives none).
* **Routing permutation and output order.** The published block diagram
  labels the outputs of the first butterfly Y(0), Y(1); in a radix-2 FFT a
  last-stage butterfly always produces Y(k) and Y(k+N/2), so here butterfly
  b drives Y(b) and Y(b+N/2) and the output is in natural order.
* **Butterfly without a clock.** The original draws a clock into each
  butterfly but states that it finishes both operations within one clock
  period; here it is combinational and its result is registered by the
  register array.
* **Transposing frame RAM.** The original shows the first FFT working along
  columns and the second along rows with a frame buffer between, but not how
  the RAM reorders; here each RAM is written by column and read by row, with
  an asynchronous read (so the whole frame RAM is registers or distributed
  RAM, not block RAM).
* **Parallel frames.** All N samples of a frame enter and leave in one
  clock, as the block diagram's X(0..N-1) and Y(0..N-1) ports suggest.
* **Added signals:** synchronous reset, the RAM write strobe `wr_en`
  (= done), `primed`/`row_valid` to hide the first, empty image period,
  `row_idx`, and `take`/`col_take` to tell the source when a frame is taken.
* **Not reproduced:** the published FPGA figures (Virtex-6: 301 slice
  registers, 748 LUTs, 16 DSP48E1 for the 8-point 1D FFT; 1132 registers,
  2109 LUTs, 33 DSP48E1 and a 32.5 ns delay for the 8 x 8 2D FFT). This RTL
  uses 4 multipliers per butterfly, 16 per 1D FFT and 32 in all; the
  register and LUT counts depend on how the frame RAMs are mapped.

## Simulating

Every testbench in `tb/` is self-checking and ends by printing
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_fft2d.sv \
          --top-module tb_fft2d -y rtl -y tb +libext+.sv -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_fft2d` | top at default N = 8: six images streamed back to back (real, impulse, constant, random complex) against a floating-point 2D DFT / 64; row order, latency 26, row spacing 3; RAM swaps both ways, both RAMs used, feedback, suppressed first period |
| `tb_fft2d_sizes` | top at N = 4, 16, 32 (via `fft2d_harness`) against the 2D DFT, with latency and row order |
| `tb_fft1d` | 60 back-to-back 8-point frames against a DFT / 8, latency 2, one frame per 3 clocks, y zero outside done |
| `tb_butterfly` | 2000 random cases and saturation corners against floating point |
| `tb_twiddle_rom` | every entry for N = 8 and 16 against cos/sin |
| `tb_routing_network` | the N = 8 pairing table above |
| `tb_register_array` | load/hold against a model |
| `tb_control_unit` | SB/ISL/OSL sequence for N = 8 and 16, reset mid-frame |
| `tb_ram_controller` | address, sel, R/W-bar, primed against a pulse counter |
| `tb_frame_ram` | column write / row read, no write in read mode or without strobe |
| `tb_ram_mux` | both legs of the demultiplexer and multiplexer |

To try another size, instantiate `fft2d #(.N(16))` (any power of two from
4 up). The largest size simulated so far is N = 32; build time grows
quickly with N because every butterfly input is an N:1 multiplexer and
each frame RAM is N^2 samples.
