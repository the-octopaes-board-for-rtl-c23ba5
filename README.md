# OctoPAES: PMT and hit-pattern emulation firmware in SystemVerilog

A KM3NeT digital optical module (DOM) carries 31 photomultipliers (PMTs). Their
signals pass through two front-end boards, a 12-channel one and a 19-channel
one, to the module's Central Logic Board (CLB). The CLB measures each pulse
with a TDC. The OctoPAES ("Photon and Acoustic Emulation of Signals") board
plugs into the same CLB connector in place of a front-end board. Instead of
PMT pulses it plays stored bit patterns onto the LVDS lines. The CLB and the
whole data-acquisition chain behind it then see ordinary PMT hits: random
background at a chosen rate, calibration coincidences, or the hit pattern of a
muon crossing a detection unit of 18 DOMs.

This repository holds a synthesizable model of that firmware. The patterns,
the 80 MHz playback, the rates, the Large/Small board split and the ways a
board is started are the published ones. Everything the description leaves
open (encodings, latencies, how a rate is made, how a clock line carries start
and stop) is this design's choice. Each such choice is listed below and in the
opening comment of the file concerned.

## From digits to hits

The pattern store holds **128 pages**. A page has **32 rows of 256 digits**:
rows 0 to 30 belong to the 31 PMTs and row 31 is kept for an acoustic waveform.
A page is played from digit 0 to digit 255 at **80 MHz**, one digit per
12.5 ns. While a row's digit is 1, that PMT's line is above the TDC threshold.
One `1` is a 12.5 ns hit, `11` is a 25 ns pulse (the usual single
photo-electron), and longer runs give longer pulses. A whole page lasts 3.2 µs.

Each clock needs the next digit of every row at once, so `pattern_memory`
stores pages transposed. The 32-bit word at address `{page, digit}` holds digit
`digit` of all 32 rows (bit *r* = row *r*). The store is 32,768 words of
32 bits (1 Mbit) with a synchronous read. `page_player` reads one word per
clock, so a page is 256 consecutive reads. To turn a row-wise pattern file into
this image, write bit *r* of word `page*256 + d` with digit *d* of row *r* of
that page.

Three kinds of page are used:

* A **background page** has one `11` pulse per row, at a random place
  (uniform over the row). One play therefore gives one hit on every PMT.
* A **calibration page** has a single pulse, at the same digit, on row 0 and
  on row 12 only. It is the first channel of the Small and of the Large board
  (next section), so the two boards of every DOM emit one coincident pulse.
  The CLBs then measure the relative delays of the boards.
* A **signal page** holds the hits a passing muon would leave on this DOM. Its
  hit times include the light's travel along the detection unit. For a muon
  crossing one detection unit, the triggered hits span about 1 µs, with of the
  order of ten detected photons on the closest DOM. This fits well inside one
  3.2 µs page.

The page contents are made offline. The store has a plain write port
(`mem_we`, `mem_waddr`, `mem_wdata`) on the board clock, to be filled before
starting. A real device would hold them in its configuration image instead.

## Rates: slots and the background/signal schedule

The board gives a per-channel hit **rate**, not a stream. In this design a rate
is made by playing a page once per period, called a **slot**. With a
background page (one pulse per row), the per-channel rate equals the slot rate.
`rate_timer` is a counter. It ticks on the first enabled cycle and then once
every `period` cycles. `octopaes_top` computes each period from its `CLK_HZ`
parameter:

| use                         | rate    | period at 80 MHz (cycles) |
|-----------------------------|---------|---------------------------|
| standalone, `rate_sel` = 0  | 5 Hz    | 16,000,000                |
| standalone, `rate_sel` = 1  | 10 Hz   | 8,000,000                 |
| standalone, `rate_sel` = 2  | 1 kHz   | 80,000                    |
| standalone, `rate_sel` = 3  | 100 kHz | 800                       |
| muon mode, background       | 5 kHz   | 16,000                    |
| muon mode, signal, `sig_rate_sel` = 0 / 1 | 1 Hz / 10 Hz | 80,000,000 / 8,000,000 |

`emulation_fsm` decides what each slot plays:

* **Standalone** (`muon_mode = 0`): every slot plays the page selected by the
  DIP address.
* **Muon mode** (`muon_mode = 1`): every 5 kHz slot plays the background page
  `bg_page`. A tick of the 1 or 10 Hz signal timer sets a *pending* flag. The
  next background play is then followed directly by one play of the signal
  page. The background rate therefore stays exactly 5 kHz, and the signal hits
  come on top of it. Both timers start together. The signal periods are whole
  multiples of the slot period, so the signal lands on slot 0, 500, 1000, …
  (10 Hz) at the same moment on every board.

```
slot tick   |                                  |
play        [ bg page 256 ][2][ signal page 256 ]      ... idle ...  [ bg page ]
            <------------------------ 16,000 cycles ------------------------>
```

The timing is exact. The signal page's digit 0 comes out 258 clocks (256 + 2)
after the background page's digit 0.

A slot tick that comes while a page is still playing is **dropped** and
reported on `overrun`. This cannot happen at the rates above, since a play
takes 259 clocks and the shortest period is 800. It does happen if the sizes
are reduced, or if the periods are made shorter than a page. The reduced-size
test uses this on purpose.

The **12-bit DIP address** is a row address in the 128 × 32 = 4096-row store.
Its upper 7 bits (`dip_addr[11:5]`) select the page and the lower 5 bits are
ignored. The background page comes in on its own input, `bg_page`.

## Large and Small boards

Each DOM-emulating CLB carries two boards. The **Small** board emulates 12
PMTs and the **Large** board 19, chosen by a DIP switch (`large_mode`). Both
hold the same 31-row pages. `channel_select` sends rows 0 to 11 to outputs 0 to
11 on a Small board, with outputs 12 to 18 held low. On a Large board it sends
rows 12 to 30 to outputs 0 to 18. It registers the result into `pmt_out`, the
19 logic-level lines for the LVDS drivers. Row 31, the acoustic row, is not
played out.

## Starting, stopping and staying in step

Boards that emulate one muon together must start within a few nanoseconds of
each other, and the target is under 10 ns. Three ways of starting are
supported, selected by the inputs `ext_sel` and `chain_mode`:

* **Master standalone** (`ext_sel = 0`, `chain_mode = 0`). The panel button
  goes through a two-flop synchroniser and a 1 ms debouncer
  (`DEBOUNCE_CYCLES`), and each press toggles start/stop (`run_control`).
* **Slave, external start line** (`ext_sel = 1`, `chain_mode = 0`). `run`
  follows the external level `ext_run` through a two-flop synchroniser. This
  path has a fixed latency. From `ext_run` rising to digit 0 of the first page
  on `pmt_out` takes **7 clock edges** (87.5 ns): 3 in `run_control`, 1 in the
  state machine, 2 in the player and store, and 1 in `channel_select`. Every
  board that shares the clock and the start line starts in the same clock
  cycle. The clock itself is chosen on the board (internal oscillator or
  external reference) and arrives on `clk`.
* **Daisy-chained clock line** (`chain_mode = 1` on the master, `2` on the
  slaves). Start and stop travel on the clock line itself. `clock_line_gate`
  lets the master's clock onto the line only while the emulation runs. The
  master's own emulation core and every slave run from that line, and each
  slave passes the line on through `clk_line_out`. All boards advance on the
  same edges and pause together. A stop closes the gate only once the core is
  quiet (no page playing, all lines low), so no PMT line is frozen high. After
  a resume, the boards carry on from where they paused.

The published setups that use an external logic board as master also run in
the slave mode (`ext_sel = 1`). This holds whether the board's clock and start
line reach the emulation boards in a chain or in parallel: only the cabling
differs.

When `run` falls in a non-chained mode, the play in progress is aborted, the
timers are cleared and the pending signal is dropped. The next start begins
again at slot 0.

## Interface of `octopaes_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | 80 MHz board clock (internal or external reference) |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `btn_start` | in | 1 | panel start/stop button, high while pressed |
| `ext_run` | in | 1 | external start/stop level, high = run |
| `ext_sel` | in | 1 | 0 = button, 1 = external line |
| `chain_mode` | in | 2 | 0 off, 1 clock-line master, 2 clock-line slave (static, change in reset) |
| `clk_line_in` / `clk_line_out` | in / out | 1 | daisy-chained clock line |
| `muon_mode` | in | 1 | 0 single page at `rate_sel`, 1 background + signal |
| `large_mode` | in | 1 | 1 Large (19 PMTs), 0 Small (12 PMTs) |
| `rate_sel` | in | 2 | 5 Hz, 10 Hz, 1 kHz, 100 kHz |
| `sig_rate_sel` | in | 1 | signal at 1 Hz (0) or 10 Hz (1) |
| `dip_addr` | in | 12 | DIP row address; page = `dip_addr[11:5]` |
| `bg_page` | in | 7 | background page in muon mode |
| `mem_we`, `mem_waddr`, `mem_wdata` | in | 1, 15, 32 | pattern loading on `clk`, address `{page, digit}` |
| `pmt_out` | out | 19 | PMT hit lines to the LVDS drivers |
| `running`, `playing`, `overrun`, `sig_start` | out | 1 each | started (run request; always 1 on a chained slave), page playing, slot dropped, signal page launched |

Parameters: `CLK_HZ` (80,000,000) sets every period. `N_DIGITS_P` (256) is the
row length; keep it a power of two. `DEBOUNCE_CYCLES` (80,000) is the button
debounce time. The page and row counts are fixed in `octopaes_pkg`.

Size after generic synthesis: about 150 word-level cells, about 140 flip-flops
and 1,048,576 memory bits.

## What is this design's own, and what is left out

These points go beyond the published description, or choose where it is
silent:

* The five published firmware versions are separate builds. Here they are
  modes of one design.
* A rate is made by one page play per slot. The counter starts at tick 0.
* In muon mode the signal page follows the background page of the same slot,
  with a pending flag. The published description only says that background and
  signal pages alternate and that the signal is added.
* The page store is transposed and has a load port.
* The 12-bit DIP value is read as a 7-bit page plus a 5-bit row.
* Small = rows 0–11 and Large = rows 12–30, as read from the calibration page.
* The external start is a level, and a button press toggles. The debounce time
  is 1 ms and the synchronisers have two flops.
* On the chained clock line, start and stop are encoded by gating the clock.
  The encoding in the real firmware is not published. Here the master's own
  core runs from the gated clock, selected by a static clock multiplexer.
* All latencies and the output register are this design's.

These parts are not modelled:

* **Acoustic emulation.** Row 31 is stored but not played, because its use is
  not described.
* **The LVDS drivers, clock oscillator, clock-select jumper and device clock
  resources.** `clk` is the chosen clock, and `pmt_out` is the logic level
  behind the LVDS pins.
* **The external master board.** The tests drive `ext_run` directly.
* **How the pages are computed.** The muon light yield, absorption and the
  30 % quantum efficiency are offline work. The tests generate background and
  calibration pages themselves and fill the rest with random data.

## Simulating

Each module is in `rtl/<name>.sv`, and the shared constants are in
`rtl/octopaes_pkg.sv`. Each test is in `tb/tb_<name>.sv`, checks itself, and
ends with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/octopaes_pkg.sv \
          tb/tb_octopaes_top.sv --top tb_octopaes_top -Mdir obj_top
obj_top/Vtb_octopaes_top
```

Replace the testbench name to run any other test. The tests are:

* Block tests: `tb_pattern_memory`, `tb_page_player`, `tb_rate_timer`,
  `tb_emulation_fsm`, `tb_channel_select`, `tb_run_control`,
  `tb_clock_line_gate`.
* `tb_octopaes_top` runs the full chain with every period divided by 50 and
  16-digit rows. It loads all 128 pages. It compares `pmt_out` in every clock
  with a model that works only from the start edge and the periods:
  * slave start and the 7-clock latency;
  * muon mode with two signal plays in 520 background slots;
  * external stop;
  * button start and stop in standalone mode at 1 kHz on a Small board, with
    the calibration page;
  * 100 kHz with overruns on a Large board;
  * a clock-line master and slave through a pause and resume. The slave must
    equal the master in every clock, up to the second signal play.

  It counts each of these events and fails if one never happens. It runs in
  under a second.
* `tb_octopaes_rates` runs at full size and checks the published rates.
  * Standalone at 100 kHz, 1 kHz, 10 Hz and 5 Hz: the plays must be exactly
    800, 80,000, 8,000,000 and 16,000,000 clocks apart, with one pulse per
    line per play.
  * Muon mode with the signal at 1 Hz for 1.00025 s of emulated time: 5002
    background slots, and two signal plays exactly 80,000,000 clocks apart.
    The pulse count of every line must come out right.

  It takes about 70 s.
* `tb_octopaes_du` builds a full detection unit: 18 DOMs × (Small + Large) =
  36 boards at full size. They share the clock and one start line. Each board
  plays its own background page and a synthetic muon signal page, and every
  line of every board is compared with the model in every clock. The test also
  checks each DOM's hit delay, and that all 36 boards put out the calibration
  pulse in the same clock.
* `tb_octopaes_full` does the same with every parameter at its default:
  80 MHz, 256-digit rows and a 1 ms debounce. It runs 503 slots at 5 kHz with
  the 10 Hz signal twice, then the 1 kHz and 100 kHz standalone modes, with no
  overrun allowed. That is about 8.3 million clocks, in roughly 10 s.

Uninitialised state is random in two-state simulation. The tests therefore
give `rst_n` a falling edge, so that the asynchronous resets act even in
blocks whose clock is not yet running.

## Changing it

* **Other rates.** Change the period table in `octopaes_top` (the `P_*`
  localparams) and `rate_sel_e` in the package. Every period must be at least
  259 clocks, or twice a page plus 5 clocks in muon mode, or slots are
  dropped.
* **Another row length or clock.** Set `N_DIGITS_P` and `CLK_HZ`.
* **Another Large/Small split.** Edit the `channel_select` parameters at their
  instance in the top.
