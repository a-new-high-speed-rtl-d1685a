# jFEX processor logic: jet, tau and E_T-sum trigger for the ATLAS Level-1 calorimeter trigger

The jet Feature Extractor (jFEX) looks at the calorimeter once every LHC bunch crossing
(BC, 25 ns) and has to decide, within a few hundred nanoseconds and without buffering, which
jet and tau candidates and which energy sums to pass on to the topological processor
(L1Topo). A jFEX board carries four large FPGAs. Each one receives a 2.4 x 3.2 (eta x phi)
patch of trigger towers of 0.1 x 0.1 over optical links, but reports objects only for its
0.8 x 1.6 *core*: the rest is environment, duplicated from the neighbouring FPGAs on the
board, so that a jet centred at the edge of the core still sees all its towers. Four cores of
16 phi bins cover the full ring.

This RTL implements the trigger and readout logic of such a processor FPGA and a board top
with four of them. The published description gives the block structure, the tower geometry,
the R = 0.4 sliding-window jet algorithm, the input word formats, the output format (7 TOBs
of 32 bits per fibre) and the latency budget. Almost everything below that level (how pile-up
is subtracted, what a tau is, bit layouts, link packing, clock rates) is not published, and
this design fills it in with the simplest choice that does the job. Every module header says
which parts are which.

## Data flow

One processor (`jfex_processor`) is a six-stage pipeline that advances once per BC:

| stage | module | what happens |
|---|---|---|
| S0 | `rx_deserialiser` x 77 | each link's 7 words of one BC are collected into a 224-bit frame; all frames are captured on the BC strobe |
| S1 | `noise_suppression` | 12-bit LAr and 8-bit Tile codes are decoded to linear E_T (25 MeV units); towers under threshold become 0 |
| S2 | `pileup_subtraction` | a per-eta-row pedestal is subtracted from LAr, clamped at 0 |
| S3 | `small_jet_finder`, `large_jet_finder`, `tau_finder`, `global_sums` | algorithms on the whole core, fully parallel |
| S4 | `tob_sorter` x 3 | the 7 largest small jets, large jets and taus |
| S5 | `tob_serialiser` x 4 | 8 words per BC per output link: 7 TOBs and a trailer |

Readout runs beside it: two `latency_buffer`s keep the input frames and the output TOBs of
the last 128 BCs; on a Level-1 Accept (L1A) the matching entries go to the `derandomiser`,
which queues up to 4 events and sends them as 32-bit words to the readout driver (ROD).
`config_regs` holds thresholds, pedestals and the L1A latency. `jfex_module` instantiates
four processors with phi offsets 0, 16, 32 and 48 bins, one `bc_timing` (BC strobe and BC
counter) and a shared register bus.

### Clocking and latency

The fabric runs at 8 clocks per BC (320 MHz), and `bc_stb` marks one clock in eight. Every
pipeline register loads on `bc_stb`, so the algorithms have a whole BC of combinational
time in simulation. A real device would need them pipelined across the eight clocks. From
the last input word of a BC to the first output word is 42 clocks, i.e. 131 ns. The
published budget is under 390 ns for the whole path, and that budget also covers the
transceivers and the on-board duplication, which are not modelled here.

## Tower data

Input frames pack 10 towers of 21 bits each, `{tile[7:0], lar_sat, lar_code[11:0]}`, with
tower 0 in the low bits. Tower t of the FPGA is at eta = t / 32, phi = t % 32. The 768
towers need 77 links, against 120 transceivers on the device. The packing is a choice of
this design.

The LAr code is multi-slope. Its range (-3.2 GeV to 800 GeV) and its smallest and largest
steps (25 MeV, 400 MeV) are given; the breakpoints are not. `jfex_pkg::lar_decode` uses:

| codes | step | E_T at segment start |
|---|---|---|
| 0-1023 | 25 MeV | -3.2 GeV |
| 1024-1535 | 50 MeV | 22.4 GeV |
| 1536-2047 | 100 MeV | 48.0 GeV |
| 2048-2637 | 200 MeV | 99.2 GeV |
| 2638-4095 | 400 MeV | 217.2 GeV (4095 -> 800.0 GeV) |

A Tile count is taken as 500 MeV. The source figure prints "GeV", which cannot be meant for
an 8-bit energy. If the real breakpoints differ, only `lar_decode` needs to change.

## The algorithms

**Seeds.** A core tower is a seed if its LAr + Tile E_T is above the seed threshold and is a
maximum of its 3x3 neighbourhood. Plateaus would otherwise give several seeds, so the tower
must be strictly larger than the neighbours before it in (eta, phi) order and at least equal
to those after it (`local_max_finder`). The published text only says the window "identifies
the local maximum". The 3x3 neighbourhood and the tie rule are this design's choice.

**Round windows.** The sliding-window jet is the E_T of all towers within R = 0.4 of the
seed, i.e. d_eta^2 + d_phi^2 <= 16 in tower units (49 towers). `round_window_sum` builds a
running sum along phi for every eta row. The part of a circle in one row is then one
subtraction, and a circle of radius r costs 2r + 1 row terms instead of ~pi r^2 additions.
The same module gives the R = 0.8 large-area jets (radius^2 = 64; the radius is this
design's choice, the largest the 0.8 environment allows) and the 3x3 and 5x5 squares
(radius^2 = 2 and 8) used by the taus.

**Taus.** These have the same seeds. The tau E_T is the 3x3 LAr + Tile sum. The isolation is
the LAr-only E_T in the 5x5 square minus the 3x3, reported in the TOB's auxiliary byte. All
of this is assumed: the published material names the tau algorithm and feeds it LAr and Tile
separately, nothing more.

**Global sums.** These are sum E_T, E_x = sum E_T cos(phi) and E_y = sum E_T sin(phi) over
the core. Each FPGA sees only a quarter of the ring, so it sends partial E_x and E_y, and
the missing E_T must be formed downstream. The trigonometric weights come from a 17-entry
Q10 quarter-wave table, round(1024 cos(2 pi k / 64)).

**Sorting.** `tob_sorter` ranks all 128 candidates in parallel: a candidate's rank is the
number of candidates that beat it, where ties go to the lower index. The candidate of rank k
goes to output slot k. This takes 128 x 127 comparators per sorter, which is the most costly
structure in the design.

## Formats

* Jet/tau TOB: `[4:0]` core eta, `[9:5]` core phi, `[21:10]` E_T in 200 MeV units
  (saturating), `[30:23]` tau isolation (0 for jets), `[31]` saturation (seed tower
  saturated or E_T overflow).
* Global stream: word 0 `{sat, 7'b0, sum_et[23:0]}`, words 1-2 signed E_x, E_y, all in
  200 MeV units, words 3-6 zero.
* Output link, 8 words per BC: TOBs 0-6 in descending E_T, then the trailer
  `{12'd0, bcid, 8'hBC}` with `tx_charisk = 4'b0001` (a K28.5 comma). 7 TOBs plus one word
  is what a 12.8 Gb/s link carries per BC with 8b/10b coding. Streams: 0 small jets,
  1 large jets, 2 taus, 3 global.
* Readout event: header `{8'hDA, l1id[11:0], bcid[11:0]}`, then the 539 input-frame words
  (link 0 word 0 first), then 28 TOB words (stream 0 slot 0 first). `rod_sop` and `rod_eop`
  frame the event.
* Registers (per processor; the module puts the processor number in `cfg_addr[9:8]`):
  0x00 LAr threshold, 0x01 Tile threshold, 0x02-0x04 seed thresholds (small jet,
  large jet, tau), 0x05 L1A latency (5-127 BCs), 0x20+eta pile-up pedestal. Energies are
  in 25 MeV units.

The L1A latency is counted from the BC whose input was captured. The TOB buffer is read 4
BCs less deep because its data arrive 4 BCs later. `busy` rises when 3 of the 4 event slots
are in use. An L1A that finds the queue full is dropped and counted in `overflow_cnt`.

## What is not here

Optical connectors and transceivers, the multi-gigabit transceiver PHYs and their PMA
loopback (which duplicates the overlap data between FPGAs), the board controller, IPBus,
the TTC interface and the forward-region FPGAs (|eta| > 3.1, whose irregular tower map is
not published) are not modelled. The RTL starts at the transceivers' 32-bit parallel
interface and takes L1A and BCR as inputs. The output streams are not duplicated onto
the 12 fibres per FPGA that the board provides.

## Verification

Every module has a self-checking testbench in `tb/` that compares against an independent
model. The jet and tau finders are checked against brute-force circle sums over random
sparse grids with plateaus. The LAr decoder is checked against a real-valued formula. The
sorter is checked against a selection sort with many ties, and the global sums against
floating-point cos/sin. `tb_jfex_processor` runs one full-size processor through its links
for 24 BCs. It checks the sorted jet streams, the E_T sum and the 42-clock latency, and
reads out two L1A events. `tb_jfex_module` runs the four-processor board at default size
(a few minutes of simulation). It checks jets, pile-up and noise removal, E_x/E_y signs per
quadrant and trailer BCIDs, then fills the derandomisers with an L1A burst to exercise
busy, overflow and readout.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_jfex_processor \
        rtl/jfex_pkg.sv tb/tb_jfex_processor.sv -y rtl -o sim && obj_dir/sim

Sizes come from `jfex_pkg` (grid, core, links, clocks per BC) and from module parameters
(window radii, buffer depths). If the grid changes, the margins must stay at least as large
as the largest window radius.
