# A 1 GHz RF Trigger Unit in FPGA logic

A trigger unit sends out pulses that are locked to an accelerator's RF
clock. Each pulse comes a programmable number of RF periods after a
synchronisation pulse (*Sync*). Typical uses are one pulse for a chosen
bunch, a train of pulses one or more machine turns apart, or the
revolution-frequency signal itself. With an RF clock of up to 1 GHz, FPGA
fabric cannot run a counter at the RF rate.

This design avoids that by never clocking logic at the RF rate. The RF clock
is divided by 2 on the board (`rf_div2`, at most 500 MHz). The FPGA's DDR
input serializer/deserializer (SERDES) samples Sync on both edges of that
clock, which gives one sample per RF period. Each group of eight samples
becomes one 8-bit word on a word clock of `rf_div2/4`, at most 125 MHz. The
trigger logic works on these words. Each cycle it decides, for eight RF
periods at once, what Out should be, and an output SERDES sends the word out
one bit per RF period. All timing is therefore exact to one RF period, while
the logic itself runs at one eighth of the RF rate.

The RTL here covers the FPGA part of such a unit:

* the signal path: deserializer, word-clock divider, trigger logic, serializer;
* all six operating modes, including an 8 kB pattern memory whose length can
  be set to the bit;
* the reset sequencing, which makes the Sync-to-Out delay the same after every
  power-up.

Board-level parts are not modelled as RTL. These are the analog delay lines,
fan-outs, pulse shaper, the external divide-by-2 and the re-timing
flip-flops. The host bus is also left out.

## Signal path and clocks

```
 sync_in ──► iserdes_ddr_1to8 ──din[7:0]──► tu_logic ──dout[7:0]──► oserdes_ddr_8to1 ──► out
               ▲  (both edges)                 ▲                       ▲ (both edges)
 rf_div2 ──────┴──────────► clk_div4 ──clk_word┴───────────────────────┘
 clk_sys ──► reset_sequencer ──► div_reset (to the board's RF divider)
                            └──► io_reset ─► (2-FF sync to rf_div2) ─► divider, SERDES
                                                   └─► 8-cycle stretch ─► tu_logic reset
```

| clock      | at 1 GHz RF | drives |
|------------|-------------|--------|
| `rf_div2`  | 500 MHz     | the serial side of both SERDES, one bit per edge |
| `clk_word` | 125 MHz     | the parallel side of both SERDES and all of `tu_logic` |
| `clk_sys`  | free        | `reset_sequencer` and the pattern-memory write port |

In every word, bit 0 is the earliest RF period and bit 7 the latest. This
holds for the deserializer output, the trigger logic and the serializer input.

## Counting RF periods at one eighth of the rate

This is the central idea of the trigger logic (`tu_sequencer`). A counter
stepping once per RF period is not possible, so the sequencer holds `cnt`: the
number of RF periods from bit 0 of the word being built this cycle to the next
event. Each word-clock cycle does one of two things:

* `cnt < 8`: the event falls in this word, at bit `cnt`. The counter is
  reloaded with `cnt + period - 8`, where `period` is the distance to the
  following event.
* otherwise, `cnt` is decremented by 8.

Only one add or subtract per word is needed, and no error builds up, because
the fractional position is carried in the low three bits. This requires
`period >= 8`, so that at most one event falls in a word. HT below 8 is
therefore treated as 8.

The start of a run is placed to the RF period as well. `sync_edge_finder`
looks for the first 0→1 transition in the incoming word. For bit 0 it
compares with the last bit of the previous word. If the edge is at bit `s`,
the counter is loaded with `s + B`.

Each word is then built from the event position `e`:

* **Pulse modes:** bits `e .. e+pw-1` are set. If the pulse runs past bit 7,
  the remaining length (`tail`) is carried into the following words. A pulse
  can therefore be any width from 1 to HT-1 RF periods.
* **Square wave:** the level register flips at bit `e`. Bits before `e` keep
  the old level; bits from `e` on take the new one.

## Operating modes

Every mode is armed by a rising edge on the slow **Start** input and ended by
a rising edge on **Stop**. Both inputs are synchronised to the word clock.
Stop clears the output at once, in every state. Start is ignored unless the
unit is idle. Once a run has begun, further Sync pulses are ignored.

| `cfg.mode`      | behaviour |
|-----------------|-----------|
| `MODE_SINGLE`   | one pulse, B RF periods after Sync, then Idle |
| `MODE_INFINITE` | first pulse at B, then one every HT RF periods until Stop |
| `MODE_WINDOWED` | as Infinite, but W pulses in all, then Idle |
| `MODE_SYNCLESS` | pulse train every HT RF periods, started by Start alone (no Sync); the first pulse comes B RF periods after the start of the word following the synchronised Start |
| `MODE_LOWFREQ`  | square wave from B after Sync: HT RF periods high, HT low (f_RF/2HT), or HT+1 low with `cfg.unbalanced` (f_RF/(2HT+1)) |
| `MODE_PLAY`     | the pattern memory plays from B after Sync and repeats every `cfg.play_len` bits until Stop |

The sequencer states are Idle, Waiting for Sync, B count and HT count, plus
Play for the last mode. As an example, take Windowed mode with B=8, HT=10 and
W=4. Start moves the unit to Waiting for Sync, and Sync moves it to B count.
The first pulse comes at the end of B count. The other three pulses come at
the ends of three HT counts, and the unit then returns to Idle by itself.

Configuration (`tu_pkg::tu_cfg_t`, to be held stable while running):

| field        | width | meaning and limits |
|--------------|-------|--------------------|
| `mode`       | 3     | one of the six modes |
| `b`          | 32    | RF periods from the Sync edge to the first event |
| `ht`         | 32    | RF periods between pulses, or the half period of the square wave; values below 8 act as 8 |
| `w`          | 32    | number of pulses in Windowed mode; 0 acts as 1 |
| `pw`         | 32    | Out pulse width in RF periods, 1 .. HT-1 |
| `unbalanced` | 1     | one extra RF period low in Low-frequency mode |
| `play_len`   | 32    | pattern length in bits, 8 .. 65536 (only the low 17 bits are used) |

## The pattern memory

Play mode has two parts: `play_memory` plus an aligner in `tu_logic`.

The memory holds 8 kB (`MEM_BYTES = 8192`, 65536 bits) as 4096 words of 16
bits. The host writes it one byte at a time on `clk_sys`. Pattern bit `n` is
bit `n mod 8` of byte `n / 8`, and bit 0 of byte 0 plays first.

Because the length is set to the bit, the pattern end rarely falls on a word
boundary. A bit buffer (gearbox) joins the pattern end to its start:

* One 16-bit word is read per word-clock cycle, with one cycle of latency.
  Only the valid bits of the last word are used: `len - 16*q` bits for word
  `q`.
* Each word read is appended to a 40-bit buffer.
* While playing, eight bits leave the buffer every cycle.
* A read is issued whenever fewer than 24 bits would remain after this cycle.

With `len >= 8`, a pass over the pattern takes `ceil(len/16)` reads and
`len/8` cycles, so on average the reads keep up. The 24-bit margin absorbs
the short last word. The buffer never runs dry; an assertion checks this,
and the testbenches exercise lengths from 8 to 65536. The buffer is filled
during Waiting for Sync. Playback can start from the second word-clock cycle
after Start.

The aligner puts pattern bit 0 exactly B RF periods after Sync, at bit
position `e` within its word. To do this, it joins the current eight pattern
bits with the previous eight and takes eight bits starting at `8 - e`. The
shift `e` stays the same for the whole run.

## Latency and reset determinism

The FPGA must always show the same delay from Sync to Out, so the unit can be
calibrated once. The delay depends on where the word boundaries fall relative
to the `rf_div2` edges, so every reset must put those boundaries in the same
place. The sequence is:

1. `reset_sequencer` (on `clk_sys`) holds `div_reset` for 16 cycles. This
   restarts the board's divide-by-2 from a known phase.
2. It holds `io_reset` until cycle 64.
3. `io_reset` passes through a two-flip-flop synchroniser on `rf_div2`. It
   therefore releases the divide-by-4 and both SERDES on a rising edge of
   `rf_div2`, all at the same edge.
4. The word clock then first rises two `rf_div2` cycles later. In both SERDES,
   the word transfer happens two `rf_div2` cycles away from the word-clock
   edge, so there is no race.
5. The trigger logic leaves reset two word-clock cycles after the SERDES.

With this order, Out follows a Sync edge by **B + 41 RF periods** in every
mode:

* 8 periods come from the trigger logic;
* the rest comes from the SERDES pipelines and the one-word output register.

The end-to-end testbench checks that this figure is the same in every trial,
at all eight Sync bit positions, and after a second full reset. The design
does not subtract the constant from B. A user who wants the Out delay to
equal B exactly can program `B - 41`, with B of at least 41.

The cycle counts of the reset sequencer, the synchroniser depth and the
41-period constant belong to this implementation. On real hardware, the
SERDES primitives and the board add their own fixed delays.

## What follows the source design and what is this design's own

Taken from the design description:

* the DDR deserializer/serializer approach with 8-bit words;
* the external divide-by-2 and the internal divide-by-4;
* the DivReset output;
* the six modes and their parameters B, HT and W;
* the unbalanced square-wave flag;
* the 8 kB memory with a bit-granular length;
* the state names;
* the requirement of a constant Sync-to-Out delay.

Chosen here, because the description gives only the function:

* the word-rate counting scheme and the Sync edge finder;
* the Out pulse width as a configuration field (`pw`);
* HT of at least 8;
* Start and Stop acting on rising edges, and Stop clearing Out at once;
* in SyncLess mode, the first pulse counted from the word after Start;
* the 16-bit memory organisation, the gearbox and the aligner;
* the reset ordering and its cycle counts;
* 32-bit counters;
* all encodings and the bit order.

Not built:

* The FPGA's programmable input and output delays (vendor primitives).
  `sync_in` is taken after the input delay, and `out` goes to the output
  delay.
* The board circuits: delay lines, fan-outs, RF divider, re-timing and
  jitter-removal flip-flops, pulse shaper and output multiplexer.
* The host register interface. The configuration is a plain struct port, and
  the memory has a plain byte write port.

`iserdes_ddr_1to8` and `oserdes_ddr_8to1` are models of the FPGA's hard SERDES
blocks, with simplified ports. They use a rising-edge and a falling-edge
process each; the serializer also has a clock-driven output multiplexer. In
an FPGA they would be replaced by the vendor primitives. The ordering of
their reset and their bit order then need to be matched to these models.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module against values worked out independently and ends with
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_tu_sequencer` | 240 random runs of all modes against an RF-period reference (`tu_ref_pkg`): every output bit, end states, play launch word and offset, ignored Sync |
| `tb_play_memory` | full 8 kB memory; 62 lengths (8 … 65536, many not multiples of 8 or 16); every output word against the pattern; no underflow; wrap after 8192 words |
| `tb_tu_logic` | the complete word-level unit with Sync as a bit stream, the synchronised Start/Stop, all modes, and the settings of the source design's figures (Windowed B=8 HT=10 W=4 and B=8 HT=20 W=5, Low frequency B=8 HT=20 unbalanced = 41-period wave, Play B=8 with a 40-bit pattern) |
| `tb_tu_long_counts` | counts far beyond a word: a SyncLess train with HT = 35640 (twelve pulses), Windowed with B = 100003 and HT = 71285, and a 2001-period unbalanced square wave, checked edge by edge |
| `tb_iserdes_ddr_1to8`, `tb_oserdes_ddr_8to1` | bit order, word boundaries and fixed latency of the SERDES models |
| `tb_clk_div4` | divide-by-4, duty cycle and the same phase after every reset |
| `tb_reset_sequencer` | exact lengths of DivReset and SERDES reset, restart on a new reset |
| `tb_trigger_unit_top` | the whole design at default parameters. It uses a 1 GHz RF clock and a board divider model that stops during DivReset, and checks Out bit by bit at RF resolution in all modes, including the figure settings. It also checks the constant latency (B + 41) across trials and resets, and counts each mechanism: every mode, ignored Sync, Stop, end of window, unbalanced wave, pattern wrap, bit-level length, all eight Sync bit positions, repeated reset |

To run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/tu_pkg.sv tb/tu_ref_pkg.sv tb/tb_trigger_unit_top.sv \
    --top-module tb_trigger_unit_top
./obj_dir/Vtb_trigger_unit_top
```

Use the same command for the other testbenches, changing the last file and
the top module. `tb/tu_ref_pkg.sv` is needed only by `tb_tu_sequencer`,
`tb_tu_logic` and `tb_trigger_unit_top`. Each testbench runs in well under a
second.

The following are not checked: timing closure at 125 MHz on an FPGA,
behaviour with the vendor SERDES primitives, and the analog parts. The
random trials use HT and B up to about 40; the long-count testbench runs
values of around 10^5.

## Files

`rtl/` has one module or package per file:

* `tu_pkg` (types)
* `trigger_unit_top`
* `tu_logic`
* `tu_sequencer`
* `sync_edge_finder`
* `slow_trigger_sync`
* `play_memory`
* `clk_div4`
* `iserdes_ddr_1to8`
* `oserdes_ddr_8to1`
* `reset_sequencer`

`tb/` has the testbenches and `tu_ref_pkg`. Each file starts with a comment
that describes its function, its interface and its timing.
