# A multi-mode inference engine for CNNs

This engine computes both the convolutional and the fully-connected layers
of a CNN on one array of 192 multiply-accumulate units. The convolutions can
use any of the filter shapes found in AlexNet, VGG-16 and ResNet-50:

- 3x3 with stride 1
- 5x5 with stride 1
- 1x1 with stride 1
- 7x7 with stride 2
- 11x11 with stride 4

Most convolution accelerators fit one filter shape well and leave many
multipliers idle on the others. This design keeps every multiplier busy in
all shapes.

The key idea is to treat a convolution like a fully-connected layer:

- The input pixels are broadcast one per cycle to every processing element
  (PE).
- Each PE is working on a few output pixels of one output map.
- Each PE is fed, in every cycle, the filter weight that the current pixel
  has to be multiplied by for the output pixel that PE is accumulating.

What changes between filter shapes is only the pattern in which weights
move from PE to PE. That pattern is produced by a small reconfigurable
register network, the *weight generator*, in each tile.

The RTL is SystemVerilog 2017. It is synthesizable, apart from the
testbenches.

## 1. The dataflow in one dimension

The engine works on one filter row at a time. Take one input row of width
W_in, one filter row of width W_f and a stride S. Output pixel t of the row
needs input pixels t·S … t·S+W_f−1. Input pixel x arrives in cycle x, so:

- output pixel t starts accumulating in cycle t·S;
- it finishes W_f cycles later;
- it needs weight w[x − t·S] in cycle x.

At any moment at most ⌈W_f/S⌉ output pixels are open. If the output pixels
are dealt round-robin to *tsub* PEs, with tsub·S ≥ W_f, every PE finishes
one pixel just as its next one begins. The weight a PE needs in cycle x is
then the weight its neighbour needed S cycles earlier. The weights therefore
circulate around a ring of tsub·S registers, advancing one step per cycle,
with PE k tapping the ring at position k·S. The ring is filled once per
pass, and no weight is read from memory again during the pass.

A PE keeps the partial sum of each of its output pixels in its own 64-word
memory. Output pixel j of a job (raster order, j = z·W_out + t) goes to PE
j mod tsub, at address j / tsub.

A 2D filter of H_f rows over C_in channels is computed as C_in·H_f such
passes, filter row fastest:

- Pass (c, r) streams input rows z·S + r, for z = 0 … H_out−1, of channel c.
- Each pass adds its products into the same memory words.
- The first pass of a job starts every word from zero.

A single pass therefore covers all output rows of the job, and a job can
hold up to tsub·64 output pixels per PE group.

### Per-mode geometry

A tile has six PEs. Depending on the mode, they form one or more *logical
tiles* of tsub PEs each, and every logical tile computes one output map.

| mode  | W_f | S | tsub | logical tiles per tile | ring length | pixels per job (tsub·64) |
|-------|-----|---|------|------------------------|-------------|--------------------------|
| 3x3   | 3   | 1 | 3    | 2                      | 3           | 192                      |
| 5x5   | 5   | 1 | 6    | 1                      | 6           | 384                      |
| 1x1   | 1   | 1 | 1    | 6                      | 1           | 64                       |
| 7x7   | 7   | 2 | 6    | 1                      | 12          | 384                      |
| 11x11 | 11  | 4 | 3    | 2                      | 12          | 192                      |
| FC    | –   | – | 1    | 6                      | –           | 1 neuron per PE          |

In 5x5 mode one slot of the six-slot ring carries a zero, because tsub·S = 6
is greater than W_f = 5. The 7x7 ring has 5 zeros in 12 slots, and the 11x11
ring has 1 zero in 12. The number of PEs per logical tile and the ring
lengths follow the original design. With 32 tiles the engine has 64, 32,
192, 32, 64 and 192 logical tiles in the six modes.

## 2. The weight generator and the hand-over between rows

`weight_gen` has six register sets of eleven registers, one set per PE.
Each set has an input multiplexer and a tap multiplexer:

- The input multiplexer chooses what enters register 1. This is either a
  weight port (In #1…#6, during loading) or the tail of the preceding set of
  the same ring.
- The tap multiplexer chooses which register of the set feeds the next set.
- The output of PE k (Out #k) is the input-multiplexer output of set k.

Chaining the sets with taps of S registers builds the rings of the table
above:

- 3 + 3 sets for 3x3
- one ring of 6 for 5x5
- six self-loops of length 1 for 1x1
- 6 × 2 for 7x7
- 3 × 4, twice, for 11x11

The weight ports are In #1 and In #4 for the two 3x3 and 11x11 logical
tiles, In #1 for 5x5 and 7x7, and In #1…#6 for 1x1.

**Hand-over.** The last output pixel of an output row and the first of the
next row belong to different input positions. The first pixel of a new row
needs w[0] while its ring neighbour is still partway through the previous
row. To fix this, the set that holds the last pixel of a row switches its
tap from register S to register W_f for exactly one ring period. This
period is tsub·S cycles, starting S cycles after that pixel started. During
the window the weights reach the next PE W_f − S cycles later than usual,
which is exactly the shift between the two rows.

This is why each set has eleven registers: W_f can be as large as 11. A
counter per set (`tw` in `tile`) opens the window. The window placement was
worked out for this implementation and checked against the full weight
schedule in the testbench.

**Row-width rule.** The hand-over only works if a row is long enough for
the window of one row to end before the next row's window opens:

    S·W_out ≥ (tsub − 1)·S + W_f

This means W_out must be at least 5 for 3x3 and 11x11, 10 for 5x5, 9 for
7x7 and 1 for 1x1. An assertion in `tile` checks the rule at every pass
start. All layers of AlexNet, VGG-16 and ResNet-50 meet it. Narrower maps
can be computed by padding the output row.

## 3. The tile

`tile` is one weight generator, six PEs and the scheduler that tells each
PE when to start a new output pixel, which address to use, and when its set
must hand over. All six PEs see the same pixel. The scheduler is a few
counters driven by the pass control in the incoming stream:

- `col`: input column
- `t`: output column
- `sph`: stride phase
- `jm`: output pixel modulo tsub
- `ja`: address

Each PE also has a countdown of W_f cycles.

A **PE** (`pe`) is a 16×16 multiplier, a 24-bit adder and a 64 × 24-bit
memory (`pe_sram`). In every enabled cycle it computes

    mem[addr] ← (clr ? 0 : mem[addr]) + (x·w >>> 13)

With its enable low, the PE outputs ReLU(mem[addr]), requantised. The
results are read out that way. The memory is an array with synchronous
write and combinational read, so the read, the add and the write-back fit in
one cycle.

**Number format.**

| Quantity | Fractional bits | Width |
|---|---|---|
| Pixels | 2 | 16 bits |
| Weights | 15 | 16 bits |
| Products | 17 | – |
| Partial sums | 4 | 24 bits, wrap on overflow |
| Output | 2 | ReLU(sum) >> 2, saturated to 16 bits |

The 2- and 15-bit formats are the original design's. The shifts,
saturation and wrap-around are this implementation's choice.

## 4. Pipelining the tiles and sharing the weight bus

All 32 tiles receive the same pixels. Their weights come over one 48-bit bus
(three 16-bit lanes), one tile at a time. The tiles are therefore staggered:

- Tile i runs dly cycles after tile i−1.
- A `pipe_stage` between them delays the pixel and the pass-control bits.
- The delay can be selected from 0 to 12 cycles; 0 is a bypass.

While tile i is loading its ring, the other tiles keep computing.

| mode | dly = cycles to load one tile | lanes used |
|---|---|---|
| 3x3 | 3 | lane 0 → channel 2i (In #1), lane 1 → channel 2i+1 (In #4) |
| 11x11 | 12 | same as 3x3 |
| 5x5 | 6 | lane 0 → In #1 |
| 7x7 | 12 | lane 0 → In #1 |
| 1x1 | 2 | cycle 0: lanes 0–2 → In #1–#3; cycle 1: lanes 0–2 → In #4–#6 |
| FC | 0 | weights come from the distributor |

Loading cycles at or beyond W_f load a zero, which gives the padding slots
of the ring. In 1x1 mode the pass starts one cycle late, so that PEs 1–3 are
loaded before the first pixel.

**Pass period.** A pass lasts `len = lead + H_out·W_in` cycles, but the bus
needs P·dly cycles to serve all tiles. The controller makes each pass last
max(len, P·dly) cycles. When it has to stretch a pass it raises
`pass_pad` for one cycle. This happens for small maps in the 7x7 and 11x11
modes.

## 5. Fully-connected layers and the distributor

In FC mode each PE is one output neuron. It accumulates into its address
0, using one input value shared by all and its own weight. A step therefore
needs 1 pixel and 192 weights, which is 193 16-bit values. The
`distributor` gathers them from the 64-bit external word {48-bit weight bus,
16-bit pixel bus}:

- four values per word, in 49 words;
- slot 0 is the pixel;
- slot 1 + 6i + k is the weight of PE k of tile i.

After the 49th word it pulses `step`, and all PEs multiply-accumulate once.
The first step clears the sums. After fc_n steps the neurons are read out
like a convolution result. In the original design the distributor runs the
tiles on a slower clock, at one fifth of the convolution clock. Its memory
runs about ten times faster than the tiles, and run-length compressed
weights make the 193 values fit in those ten memory cycles. Here there is
one clock and no decompression. A step takes 49 words, and the tiles simply
act once per completed step.

## 6. Job sequence and read-out

The `controller` runs one job after `start`. Its states are:

    IDLE → PASS × (C_in·H_f) → FLUSH → DRAIN → DONE

or `IDLE → FC → FLUSH → DRAIN → DONE` for an FC job.

- **PASS.** The controller requests pixels (`px_req`, `px_ch`, `px_row`,
  `px_col`) and weights (`w_req`, `w_tile`, `w_idx`, `w_ch`, `w_frow`).
  The host must answer both in the same cycle, on `px_data` and
  `ext_weight`. Addresses are relative to the job's input window. The host
  adds its own base address, which is how a large layer is cut into jobs.
- **FLUSH.** Waits (P−1)·dly + 3 cycles, until the last tile has finished.
- **DRAIN.** Reads the results out. For each address, then each PE, then
  each group of four tiles, `out_mux` puts four 16-bit results on the
  64-bit output. `out_grp`, `out_pe` and `out_addr` say which results the
  word holds.

A convolution job takes exactly

    C_in·H_f·max(len, P·dly) + (P−1)·dly + 3 + N·nsub·P/4

cycles, where N is the number of pixel addresses used per PE. An FC job
takes fc_n·49 + 3 + 6·P/4 cycles, plus the idle words. The testbenches
check these counts. During read-out the tiles do not compute.

**Mapping output pixels and maps to the ports:**

- Output map `g·(P·nsub) + i·nsub + s` is sub-tile s of tile i.
- Its pixel j is at PE s·tsub + j mod tsub, at address j/tsub.

### Top-level interface (`mmie_top`, parameters P = 32, L = 64)

| port | dir | width | meaning |
|---|---|---|---|
| start / busy / done | in / out / out | 1 | job handshake |
| mode | in | 3 | 0 3x3, 1 5x5, 2 1x1, 3 7x7, 4 11x11, 5 FC |
| w_in, w_out, h_out | in | 8 | padded input width, output width, output rows |
| c_in | in | 12 | input channels (passes = c_in·W_f) |
| fc_n | in | 16 | FC inputs |
| px_req, px_ch, px_row, px_col | out | 1, 12, 10, 8 | pixel request |
| px_data | in | 16 | pixel (also low 16 bits of an FC word) |
| w_req, w_tile, w_idx, w_ch, w_frow | out | 1, 5, 4, 12, 4 | weight request: tile, load cycle, channel, filter row |
| ext_weight | in | 48 | weight bus (three lanes) |
| fc_valid | in | 1 | FC word {ext_weight, px_data} valid |
| out_valid, out_data | out | 1, 64 | results |
| out_grp, out_pe, out_addr | out | 3, 3, 6 | position of the results in `out_data` |
| pass_pad | out | 1 | a pass was stretched for the weight bus |

The configuration inputs must stay stable during a job. The reset is
asynchronous and active low.

## 7. Sizes of real networks

A job must satisfy all of these:

- W_in ≤ 255
- at most tsub·64 output pixels
- at most 64·nsub·P output maps
- W_out at least the minimum of Section 2

A layer is cut into jobs by output rows, by column windows where a row is
longer than tsub·64, and by groups of output maps. Padding is done by the
host, which supplies zero pixels.

Every convolutional and FC layer of AlexNet, VGG-16 and ResNet-50 fits:

- VGG's 224-wide rows are run as two 112-wide windows.
- ResNet-50's 1x1 layers with 2048 input channels use the 12-bit channel
  count.
- The stride-2 1x1 projections run as stride 1 on a subsampled input.

All PE memories together hold 192 × 64 × 24 bits = 36.9 kB.

## 8. Departures from the original design

- **No bias.** The original adds a per-map bias at the end. Here it can be
  fed as an extra input channel with pixel value 1.
- **No weight decompression.** The distributor does not decode run-length
  compressed FC weights. The original uses a scheme from other work and does
  not give its format.
- **One clock.** The slower FC clock is replaced by a step enable.
- **Derived details.** The following were worked out for this
  implementation; the original describes only the principle:
  - the hand-over window and the row-width rule;
  - the bus lane assignment and the load cycles per mode;
  - the pipelining delays;
  - the read-out order;
  - the same-cycle request/response interface to external memory.
- **Row-change cost.** The input is streamed row by row, W_in pixels per
  output row. A change of output row therefore costs W_f − S cycles beyond
  the S per output pixel. The original's cycle estimate charges W_f − 1
  per row change. The two agree for stride 1 and differ by S − 1 otherwise.
  In both, the first pixel of a new row starts W_f cycles after the last
  pixel of the previous row.
- **Weight port for the second 3x3 logical tile.** The original's text and
  drawing disagree. This design uses In #4, the same port as the 11x11
  mode.

## 9. Files and simulation

| file | module |
|---|---|
| `rtl/mmie_pkg.sv` | modes, stream struct, per-mode constants |
| `rtl/pe_sram.sv`, `rtl/pe.sv` | PE memory and PE |
| `rtl/weight_gen.sv` | register sets, rings, hand-over taps |
| `rtl/tile.sv` | one 6-PE tile with its scheduler |
| `rtl/pipe_stage.sv` | selectable 0–12-cycle stream delay |
| `rtl/distributor.sv` | 193-value FC operand gatherer |
| `rtl/out_mux.sv` | 4 × 16 → 64-bit output |
| `rtl/controller.sv` | job sequencer |
| `rtl/mmie_top.sv` | the engine |

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each
testbench computes the expected values with its own independent model: a
direct convolution, a fully-connected layer, or the weight schedule of
Section 1. Each ends by printing `TB_RESULT checks=… failures=…`.

- `tb_mmie_top` runs eight jobs over all six modes on an 8-tile engine. It
  counts stretched passes, hand-overs, mode switches, read-out words and FC
  steps, and fails if any of these never happens.
- `tb_mmie_full` runs the engine at full size (32 tiles, 192 PEs) on seven
  jobs, in about a second of simulation time.
- `tb_mmie_layers` runs the engine at full size on one job shaped like each
  kind of layer of AlexNet, VGG-16 and ResNet-50. It uses the real widths,
  heights, filters and strides, including the 227- and 229-pixel input rows
  of the first layers. The channel counts are cut to 3 or 4. It takes about
  three seconds.

To run a testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl rtl/mmie_pkg.sv \
              $(ls rtl/*.sv | grep -v mmie_pkg) tb/tb_mmie_full.sv \
              --top-module tb_mmie_full -o sim && ./obj_dir/sim +verilator+rand+reset+2

The package must be compiled first. The remaining warnings are width
extensions in the testbenches and one unused stream output of the last
pipelining stage.
