# Grid clustering core for event-camera detection of orbital objects

An event camera does not deliver frames. Each pixel reports, on its own, when
its brightness changes, and the camera emits a sparse stream of events
`(x, y, polarity, time)`. A satellite or a piece of debris crossing a
night-sky field of view leaves a short trail of such events; stars and sensor
noise leave scattered ones. A simple and fast way to tell them apart is grid
clustering: divide the sensor into square cells, count how many events of a
short time window fall into each cell, and keep the cells that collect at
least a minimum number of events (five, in the system this core was built
for). The centroid of the events in a kept cell is a detection.

The system splits that algorithm in two. A host computer attached to the
camera filters the events to a region of interest, groups them into batches
(at most 250 events or 20 ms), sends the coordinates to an FPGA board and
later does the counting, the threshold and the centroids. The FPGA does the
stateless part: it maps every event to its cell. This repository holds the
RTL of that FPGA part, the grid clustering core, together with testbenches
that also model the host-side clustering so that the whole chain can be
checked in simulation.

## What the core computes

For every 32-bit input word the core returns one 32-bit output word, in the
same order:

| word        | bits 31..16                 | bits 15..0                  |
|-------------|-----------------------------|-----------------------------|
| input       | `y`                         | `x`                         |
| output      | `cell_y = y / grid_size`    | `cell_x = x / grid_size`    |

The division is unsigned and truncating. `grid_size` is the side of one cell
in pixels, a 16-bit register that software writes over AXI4-Lite; it is 16
after reset. With the host's region of interest `x` in 20..580 and `y` in
20..420 and `grid_size = 16`, the cells used run from (1, 1) to (36, 26).
A `grid_size` of zero makes both indices all ones (65535), a cell no pixel
reaches, so such events never join a real cluster.

The core holds no state from one event to the next. Nothing in it depends on
the batch size, the time window or the event threshold; those belong to the
host.

## Where it sits

```
 processor (PS)                         programmable logic
 ┌──────────┐ M_AXI_GP0  ┌──────────────┐   s_axi_control  ┌─────────────────┐
 │          │──────────▶ │ AXI          │ ───────────────▶ │ grid_cluster_ip │
 │          │            │ interconnect │ ──┐              │                 │
 │          │            └──────────────┘   │ S_AXI_LITE   │  in_stream  ◀───┼── MM2S
 │          │ S_AXI_HP0/1 ┌─────────┐ ◀─────┘              │  out_stream ────┼─▶ S2MM
 │          │ ◀────────── │ AXI DMA │ ◀──────────────────▶ │                 │
 └──────────┘             └─────────┘                      └─────────────────┘
```

The DMA engine reads a batch of event words from processor memory into
`in_stream` and writes `out_stream` back to memory; the processor programs
the DMA and the core through an AXI interconnect. The DMA engine, the
interconnect and the processor are vendor blocks and are not part of this
RTL: their connections are the ports of `grid_cluster_ip`. Which DMA channel
feeds `in_stream` is this design's reading of the system; the results path
into the DMA's `S_AXIS_S2MM` port is the documented one.

## The pipeline

`grid_quant_pipe` has three stages with two registers between them:

```
in_stream ─▶ Unpack ─▶ [R1] ─▶ Divide ─▶ [R2] ─▶ Repack ─▶ out_stream
             x, y              x/gs, y/gs        {cell_y, cell_x}
                                 ▲
                         grid_size (AXI-Lite)
```

* **Unpack** splits the word into `x` and `y` and loads R1.
* **Divide** (`grid_divider`) divides both by `grid_size`, side by side, and
  loads R2.
* **Repack** puts the two quotients back into one word and drives
  `out_stream` straight from R2.

Each register has a valid flag. A register loads when it is empty or when
the register after it empties in the same clock. That is what lets the core
take one event every clock (initiation interval 1) while the output is
ready, and lets a gap in the input or a stall at the output move through
without losing or repeating a word:

* **Latency**: a word accepted on `in_stream` at clock edge *k* is offered on
  `out_stream` after edge *k+1* and can be taken at edge *k+2*. A batch of
  250 events goes through in 252 clocks at full rate: 1.26 µs at the
  intended 200 MHz.
* **Back-pressure**: when `out_stream_tready` is low, R2 holds its word (it
  stays valid and unchanged, which an assertion checks), R1 fills, and
  `in_stream_tready` drops. The ready path is combinational from
  `out_stream_tready` to `in_stream_tready`; there is no skid buffer. If a
  surrounding design needs registered ready signals, an AXI4-Stream register
  slice can be placed on either side.
* **TLAST** travels with its event, so the DMA's write channel sees the end
  of each batch.
* **Changing grid_size**: the Divide stage reads the register directly, so a
  write takes effect on whatever sits in R1 at that moment. Change it only
  between batches, with the pipeline empty, as the host software does.

The division is written as the `/` operator in one stage. That is the
simplest correct form and it synthesizes, but a 16-by-16-bit divider in a
single 5 ns stage is deep logic. The original core was produced by a
high-level-synthesis tool that spread the division over DSP slices and
extra pipeline registers; to close timing at 200 MHz on a 7-series part,
replace `grid_divider` by a pipelined divider and add matching stages to the
valid flags in `grid_quant_pipe`. The latency then grows, the rate stays one
event per clock.

## Control registers

`grid_axil_ctrl` is an AXI4-Lite slave with a 6-bit address:

| offset | name        | access | reset | meaning                                   |
|--------|-------------|--------|-------|-------------------------------------------|
| 0x10   | `grid_size` | R/W    | 16    | bits 15..0: cell side in pixels; bits 31..16 read 0 |
| other  | –           | R      | 0     | writes ignored                            |

The offset follows the usual layout of high-level-synthesis cores (control
and interrupt registers at 0x00–0x0C, first argument at 0x10), but the core
has no start/done control: it runs whenever data arrive. Write address and
write data are accepted in either order; the register is written once both
are held, with byte strobes honoured, and the response comes one clock later.
A read answers one clock after its address is taken. Every response is OKAY.

## Clock and reset

One clock, `aclk`, for both ports, intended to run at 200 MHz. One reset,
`aresetn`, active low and synchronous: it empties the pipeline, drops any
pending AXI-Lite transfer and sets `grid_size` back to 16.

## Files

| file | contents |
|------|----------|
| `rtl/grid_pkg.sv` | widths, register offset, reset value, word structs `event_word_t` and `cell_word_t`, AXI response codes |
| `rtl/grid_divider.sv` | Divide stage: two unsigned divisions by `grid_size` |
| `rtl/grid_quant_pipe.sv` | three-stage AXI4-Stream pipeline around the divider |
| `rtl/grid_axil_ctrl.sv` | AXI4-Lite slave holding `grid_size` |
| `rtl/grid_cluster_ip.sv` | top level: control port plus pipeline, plain AXI ports |
| `tb/tb_grid_divider.sv` | divider against a bit-serial long division, corner cases and random |
| `tb/tb_grid_quant_pipe.sv` | pipeline: II = 1, latency 2, random gaps and stalls, several grid sizes |
| `tb/tb_grid_axil_ctrl.sv` | register: reset value, strobes, unmapped offsets, held responses |
| `tb/tb_grid_cluster_ip.sv` | whole core at its defaults: batches of 250 region-of-interest events, grid changes, back-pressure, host-side clustering with the 5-event threshold |
| `tb/tb_workload_peak_rate.sv` | one second of a camera's peak output (250,000 events) as back-to-back batches |

## Simulating

Every testbench prints one line `TB_RESULT checks=N failures=M` and stops,
and has a watchdog that fails it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/grid_pkg.sv tb/tb_grid_cluster_ip.sv --top-module tb_grid_cluster_ip
./obj_dir/Vtb_grid_cluster_ip
```

Replace the testbench name to run another. The package must come first on
the command line; the other files are found through `-y`. Each test runs in
well under a second. The top-level testbench runs the core with every
parameter at its default.

## How far it can be trusted

* Checked in simulation: the bit layout of both words, the quotients against
  an independent long division for all divisors 1..64 and random 16-bit
  operands, one event per clock, the 2-clock latency, no loss or duplication
  under random gaps and stalls, TLAST, the register map, reset, and that
  host-side clustering of the returned cells finds every planted group of
  five or more events with the right centroid.
* Not checked: timing at 200 MHz (see the note on the divider), behaviour
  with a real DMA engine, and power. The original system mentions clock
  gating and frequency scaling for power, but nothing in this core does
  either.
* Size: synthesized alone, the core is about 130 flip-flops, two 16-bit
  dividers and a few dozen small cells, with no block RAM. The utilisation
  reported for the original FPGA overlay (34,560 LUTs, 42,240 flip-flops,
  121 DSP blocks, 84 block RAMs) covers the whole overlay with its DMA
  engines and interconnect and a tool-generated divider; nothing in this RTL
  corresponds to those numbers, and no attempt was made to match them.
* The input is taken straight off `in_stream`; there is no FIFO inside the
  core. Any buffering sits in the DMA engine.
* Chosen here, not given by the original design: the register offset and
  the absence of start/done control, the reset polarity and style, the
  TLAST side band, the stall scheme, the single-stage divider, and the
  all-ones result for a zero `grid_size`. The original text calls the grid
  both "16 × 16" and "16 × 16 cells", while its formula divides pixel
  coordinates by `grid_size`; the RTL takes 16 as pixels per cell, the
  reading the formula supports.
