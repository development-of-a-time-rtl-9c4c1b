# Synchronous position encoder and event memory for a micro-pixel TPC

A time projection chamber (TPC) records the track of a charged particle in a
gas volume. Electrons freed along the track drift in a uniform field onto a
readout plane; the position where they arrive gives two coordinates, and the
time they take to drift gives the third. In this detector the readout plane
is a micro pixel chamber (μ-PIC): 256 anode strips and 256 cathode strips at
0.4 mm pitch, crossing at right angles over a 10 cm × 10 cm area, with gas
amplification at each anode pixel. Every strip has its own fast preamplifier
and discriminator, so the readout sees 512 digital "strip is hit" lines.

The idea of the readout is to avoid any per-strip digitisation of charge or
time. Instead all 512 discriminator outputs are sampled together on every
edge of a 40 MHz clock. For each 25 ns sample, the hit anodes are reduced to
one X position and the hit cathodes to one Y position (centre of gravity of
the hit strips), and the number of clocks since the trigger gives the drift
time. A track therefore comes out as a string of (X, Y, t) points, one per
clock, much like the droplets of a cloud-chamber picture, and the encoder can
keep up with tens of millions of such points per second.

This RTL implements that digital chain: the position encoding module (PEM)
and the memory module that stores its output for a host computer. It is a
reconstruction from a published description of the system (H. Kubo et al.,
"Development of a time projection chamber with micro pixel electrodes").
That description gives the channel counts, the 40 MHz synchronous encoding,
the centre-of-gravity method, the fields the encoder produces (X position and
width, Y position and width, clock counter, event number), the 32-bit link
with a forwarded clock and the 32 MByte SRAM of the memory module. It gives
no bit layouts, no trigger handling, no pipeline and no bus protocol; those
are this design's own, and each is marked as such below.

## Data path

```
anode_disc[255:0] --> hit_synchronizer --> strip_encoder (X) --+
cathode_disc[255:0] -> hit_synchronizer --> strip_encoder (Y) --+--> event_builder --> 32-bit link --> memory_module --> host port
trigger ----------> hit_synchronizer (4 stages) ---------------+                                        (sram_bank 2^23 x 32)
\_______________________ position_encoding_module ______________________/
\_________________________________________ micro_tpc_readout _________________________________________________/
```

| Module | Role |
|---|---|
| `tpc_pkg` | widths, `cluster_t`, the two 32-bit word formats, width saturation |
| `hit_synchronizer` | samples asynchronous discriminator levels into the clock domain (2 flip-flops per line) |
| `strip_encoder` | per clock: number of hit strips and their centre of gravity, pipelined, 1 result/clock |
| `event_builder` | trigger → event window, clock counter, event number; packs header and hit words |
| `position_encoding_module` | the PEM: two synchronizers, two encoders, trigger alignment, event builder |
| `sram_bank` | 2^23 × 32-bit memory (32 MByte), one write and one read port |
| `memory_module` | writes link words sequentially into the SRAM; full/dropped handling; host read port |
| `micro_tpc_readout` | top: PEM and memory module joined by the link |

Everything runs on one clock, `clk`, nominally 40 MHz. In the real system
the PEM generates this clock and sends it to the memory module on the 33rd
line of the cable beside the 32 data lines; the top models that by feeding
both modules from the same clock. All state is cleared by the asynchronous
active-low reset `rst_n`, except the SRAM contents.

## From hit strips to a position

`strip_encoder` works on one side (256 strips) at a time. With hit flags
h[i], it forms N = Σ h[i] and S = Σ i·h[i] in one pipeline stage and the
position 2S/N in the next. The factor 2 puts the position in half-strip units
(0.2 mm for the 0.4 mm pitch), so for a contiguous group of hit strips from
`first` to `last` the result is exactly `first + last`; for scattered hits it
is the truncated mean. All hit strips of one side in one clock are averaged
together: two separate clusters on the same side in the same 25 ns would
give a single point between them. The width output is N, the number of hit
strips. The published system names a "width" output but does not define it;
the hit count is this design's reading.

The division is a combinational 17-bit by 9-bit divide in its own pipeline
stage. That keeps the RTL short; a timing-driven implementation at 40 MHz may
want a multi-stage divider or a reciprocal table, which changes only the
latency.

Anodes give X and cathodes give Y. The source does not say which is which;
this follows its 2D image, which plots anodes on the horizontal axis.

## Events, trigger and the clock counter

A TPC needs a time reference for the drift time. Here that is an external
trigger (in the reference set-up, a coincidence of two scintillators). The
rules in `event_builder` are this design's choice:

1. A rising trigger edge while no event is open starts an event. In the next
   clock a **header word** with the current event number is sent, the event
   number is incremented and a window of `WINDOW` = 128 clocks (3.2 µs) opens.
2. In every clock of the window the clock counter runs 0 … 127. A clock in
   which both X and Y have hit strips produces one **hit word** with both
   positions, both widths (saturated at 7) and the clock counter. A clock in
   which only one side fired produces nothing, since it has no 2D position.
3. Trigger edges during an open window are ignored.

The 128-clock window covers the full 8 cm drift: the measured drift velocity
in argon/ethane 80:20 near 0.4 kV/cm is about 4.7 cm/µs, so 8 cm takes about
1.7 µs, or 69 clocks.

The trigger passes through a synchronizer that is two stages longer than the
strip synchronizers, exactly the latency of `strip_encoder`. So clusters and
trigger reach the event builder in step. Strips sampled in the same clock as
the trigger edge are not recorded. Strips sampled one clock later get clock
counter 0.

### Word formats (`tpc_pkg`)

```
header word  [31]=0  [30:0] event number
hit word     [31]=1  [30:22] X position  [21:13] Y position
                     [12:10] X width     [9:7]   Y width     [6:0] clock counter
```

Positions are 9 bits in half-strip units (0 … 510). The layout is this
design's; the source only lists the fields.

### Timing and rate

A strip pattern sampled at clock edge k leaves the PEM as a hit word, with
`link_valid` high, after edge k + SYNC_STAGES + 2, which is k + 4 by default.
The stages are two synchronizer flops, the two encoder stages and the event
builder's output register. At most one word leaves per clock, and header and
hit words never compete for a clock (the header's clock is not part of the
window). So the link needs no flow control and carries up to 4 × 10^7
words/s. That is above the "more than 10^7 events/s" that the synchronous
scheme is meant to reach.

## Memory module

The memory module writes each word that arrives with `link_valid` to the next
SRAM address. A run is stored in order from address 0: a header word, then
the hit words of that event, then the next header. Once all 2^23 words
(32 MByte) are used, `full` is set. Later words are not written; they are
counted in `dropped_count`. `host_clear` empties the memory for the next run.
The host reads over a plain synchronous port, with data one clock after
`host_rd_en`, and can see `word_count`, `full` and `dropped_count`.

On the real board the host is a VME CPU and sits behind a VME slave
interface. That interface is not given in the source and is not modelled; the
host port is where it would connect, and it is assumed to run on the same
clock. The 32 data lines carry no "valid" line of their own in the source
(32 data + 1 clock = 33 lines). `link_valid` is this design's addition; on a
real cable an idle code would do the same job.

## What is outside this RTL

The μ-PIC, the drift cage and high voltage, the preamplifier/discriminator
ASICs, the 16-channel analog summing amplifiers, the 100 MHz flash ADC that
records the summed cathode pulse shapes, the VME CPU and the VME interface
have no logic here. The discriminator outputs and the host port are the
top's ports. The source spreads the PEM over five FPGAs; it does not say how
the logic is divided among them, so it is written as one unit.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N_STRIPS` | 256 | published (256 anodes, 256 cathodes) |
| `MEM_DEPTH` / `DEPTH` | 2^23 words | published (32 MByte of 32-bit words) |
| word width | 32 | published |
| clock | 40 MHz (testbench period 25 ns) | published |
| `WINDOW` | 128 clocks | own choice; ≥ 69 clocks needed for 8 cm drift |
| `SYNC_STAGES` | 2 | own choice |
| position / width / clock-counter / event-number fields | 9 / 3 / 7 / 31 bits | own choice |

`N_STRIPS` may be reduced (1 … 256); the word layout stays the same.
`WINDOW` may be at most 128, the range of the 7-bit clock counter.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from a reference model in `tb/tpc_tb_pkg.sv`. The model is written directly
from the rules above and shares no code with the RTL. The package also has a
track generator: a straight track whose X and Y clusters (1 … 9 strips wide)
move a little each clock, some clocks with only one side hit, and random
noise strips.

| Testbench | What it checks |
|---|---|
| `tb_hit_synchronizer` | 2-clock delay of random 256-bit patterns, reset |
| `tb_strip_encoder` | count and centre of gravity for empty, contiguous (incl. edges), sparse and full patterns; 2-clock latency; one result per clock |
| `tb_event_builder` | header/hit/none each clock against the model; window end; retrigger ignored; width saturation |
| `tb_position_encoding_module` | full-size PEM with track events; exact word stream and 4-clock latency; back-to-back words |
| `tb_sram_bank` | full 32 MByte array: random writes incl. first/last address, read-back, write enable, read during write |
| `tb_memory_module` | 64-word memory: order of storage, full, dropped count, read latency, clear |
| `tb_micro_tpc_readout` | end to end with a 512-word memory: fills and overflows, reads back every word, clears and records again; fails unless each mechanism occurred |
| `tb_micro_tpc_full` | whole design at default sizes: 20 events, every stored word read back and compared |
| `tb_workload_tracks` | whole design at default sizes with physical tracks in mm: cosmic muons through the full 80 mm drift (69 clocks, words back to back), short bent ⁸⁵Kr β tracks in a 12 mm gap, a bent Compton-electron track; 3D points rebuilt from memory must lie within 0.5 mm of the true charge position in the right drift clock |

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
          rtl/tpc_pkg.sv tb/tpc_tb_pkg.sv tb/tb_micro_tpc_readout.sv \
          --top-module tb_micro_tpc_readout
./obj_dir/Vtb_micro_tpc_readout
```

The testbenches give their delays in ns, and the RTL has no time unit of its
own, so `--timescale` gives the RTL one. All testbenches finish in seconds,
including the full-size one. They reset everything they read, so they also
run on a two-state simulator.

## How far to trust it

The parts taken from the published system are the channel counts, the clock,
the centre-of-gravity method, the list of output fields, the 32-bit link with
its forwarded clock and the memory size. Everything else is this design's
choice: the pipeline, the word layout, what "width" means, the trigger
window, the coincidence rule and the memory handling. It was made to give
simple, testable behaviour, not to reproduce the original firmware bit for
bit. The testbenches show that the RTL follows these rules. They cannot show
that the rules match the original hardware.
