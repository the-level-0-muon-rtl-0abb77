# Level-0 muon trigger processor for LHCb

The muon trigger looks for muons with high transverse momentum (pT) in the LHCb
muon detector. It does this at every LHC bunch crossing (40 MHz) and decides
within a fixed latency. Five muon stations, M1 to M5, are divided into logical
pads. The detector is split into four quadrants and each quadrant into 48 towers.
One processing unit (PU) serves each tower. Each crossing, it looks for straight
tracks that point back to the interaction point:

* every hit pad in M3 seeds a search;
* the search opens a field of interest (FOI) in M2, M4 and M5, and then in M1;
* a track is kept when all four stations have a hit in their FOI;
* the two tracks nearest the beam are kept, and look-up tables give their pT
  from where they hit M1 and M2.

A board controller (BCSU) on each board keeps the two best of its four PUs. A
controller board then keeps the two best of the 24 from the crate's 12 boards.
The controller has two units: the control unit (CU) and the slave unit (SU).

All of this is synchronous logic in SystemVerilog (IEEE 1800-2017). The default
parameters describe one quadrant: 12 processing boards of 4 PUs each, plus a
controller board. The RTL is written to be synthesizable. The parts that are not
digital logic stay outside the top: the serialisers, optical transceivers, the
TTC receiver, the control PC and the backplane drivers. They reach the top as
plain ports.

## Hierarchy

```
l0mu_processor                  one quadrant: NBX x NBY boards + controller
├── processing_board [NBX*NBY]  4 PUs + BCSU + DAQ readout
│   ├── processing_unit [4]     one tower
│   │   ├── link_demux [8]      160 MHz bytes -> 32-bit words
│   │   ├── time_align [8]      circular memory, BCID-tag alignment
│   │   ├── injection_buffer    16 events of test data (ECS loaded)
│   │   ├── injection_mux       fibre or injected words
│   │   ├── strip_to_pad [2]    M2/M3 strips -> pads
│   │   ├── neighbour_format    pad-size conversion toward neighbours
│   │   ├── track_finder        96 road searches
│   │   ├── cand_select_beam    two candidates nearest the beam
│   │   ├── pt_lut [2]          pT and charge tables
│   │   ├── l0_buffer           latency pipeline of 532-bit records
│   │   ├── l0_derandomizer     16-event FIFO, 16-bit readout
│   │   ├── capture_buffer      snapshot of one accepted event
│   │   └── ecs_interface       registers, LUT/injection/capture access
│   ├── bcsu                    best 2 of 8, candidate links, own L0 buffer
│   │   └── pt_sorter
│   ├── daq_readout [2]         event builder for the two DAQ links
│   └── spyd_tx                 link test pattern generator
└── controller_board
    ├── control_unit            best 2 of 24 by pT, to the L0 decision unit
    ├── slave_unit              the rest of the two chosen candidates
    ├── link_mux/link_demux, time_align, l0_buffer, l0_derandomizer
    └── spyd_rx [2*NB]          link test checkers
```

`l0mu_pkg` holds the shared geometry, the structures (`cand_t`, `nb_t`,
`pu_cfg_t`, `ro_word_t`) and the candidate link formats. `bcid_counter` keeps
the 0..3563 crossing number on every unit.

## Tower geometry and the track search

A tower has 48 M1 pads, 96 in M2 and in M3, and 24 each in M4 and M5. This
design lays a tower out as 4 rows. That gives 12 columns in M1, 24 in M2 and M3,
and 6 in M4 and M5. Those x ratios match the pad sizes of the stations. The
number of rows is a choice made here. Only the pad totals are given.

`track_finder` runs the 96 searches in parallel, all in one clock. For the M3
pad at row r and column c:

* **M2** is searched in columns c-5..c+5 and rows r-1..r+1. The nearest hit in
  x wins; on a tie, the lower column wins. Its offset d2 becomes part of the
  candidate.
* **M4 and M5** must each have a hit in columns c/4-2..c/4+2 (their own pad
  units) and rows r-1..r+1.
* **M1**: the straight line from M3 through M2 lands at x1 = c/2 + d2. The
  nearest M1 hit within ±3 of that point gives d1. A track with no M1 hit is
  still reported, with `m1_found` = 0.

The FOI half widths are ECS registers (`foi_m1`, `foi_m2`, `foi_m4`,
`foi_m5`). Their largest values fix how many pads a PU needs from past its own
edges: 8 in M1, 5 in M2, and 2 in M4 and M5, plus one row above and below. Those
border pads come from the neighbouring PUs through `nb_t`, which is 176 bits.
Between PUs of different pad size, `neighbour_format` converts them: COARSE ORs
pairs of pads, FINE copies each pad into two. Each side has its own mode, set by
`nb_mode_l` and `nb_mode_r`.

`cand_select_beam` takes the two valid tracks with the lowest pad number, row
first. Row 0, column 0 is the pad nearest the beam here. `pt_lut` then reads the
table at address {M3 column[4:0], d2[3:0], d1[2:0]} (12 bits) and gets back
{charge, pT[6:0]}. The ECS loads the tables, one per candidate. No pT contents
are built in: the tables must be loaded.

## Links and time alignment

Each PU receives 8 links. Every link word is 32 bits and carries one crossing:

| bits  | content |
|-------|---------|
| 31:28 | BCID[3:0] of the crossing |
| 27:0  | hits |

The hit bits are laid out as follows:

* **M1** uses two links. Link A carries rows 0-1 and link B rows 2-3; pad
  (r, c) is at bit r*12+c.
* **M2 and M3** each carry 24 vertical strips in bits 23:0 and 4 horizontal
  strips in 27:24. A pad is hit when both its strips are. `strip_to_pad`
  rebuilds the 96 pads this way.
* **M4 and M5** carry pads at bit r*6+c.
* Links 3 and 5, the second links of M2 and M3, are logged but carry no hits in
  this layout.

On the wire side each word comes as four bytes at 160 MHz, most significant
first, with a first-byte flag. `link_demux` stands where the transceiver's
parallel output would be.

`time_align` writes each word into an 8-entry memory, indexed by tag[2:0]. It
reads back the entry for (system BCID − `align_delay`). If that entry's 4-bit
tag does not match, it raises `err`. Because 3564 is not a multiple of 8, the
3-bit index jumps by 4 at the orbit turn. So the window of valid delays is

    path_max + 1  <=  align_delay  <=  path_min + 4

where path is a link's latency in crossings. Links of one PU may differ by at
most 3 crossings. On the controller board the candidate links from the boards
take about 11 crossings, so `align_delay` = 13 is used there. A wrong delay gives
`align_err`, except for delays that miss by a multiple of 16, which cannot be
seen with a 4-bit tag.

## Processing unit pipeline

One crossing enters per 40 MHz clock:

| stage | work |
|-------|------|
| c0 | time-aligned link words |
| c1 | fibre or injected words, decoded into hit maps |
| c2 | own maps registered; border pads to the neighbours (`nb_out`) |
| c3 | track search on own + neighbour pads; the two nearest the beam |
| c4 | pT tables: `cand0`, `cand1`, `cand_bcid` |

With `align_delay` = 4, `cand_bcid` is the system BCID − 9.

Each crossing's record enters `l0_buffer`. The record is 532 bits:

* 8 link words (256 bits);
* the 176 neighbour bits;
* the two 25-bit candidates;
* an injected flag and padding.

The record comes out `l0_latency`+1 clocks after its candidates. It then meets
the Level-0 accept for its crossing. An accepted record, with its 12-bit BCID in
front (544 bits), goes into the 16-event `l0_derandomizer`. It is read out as 34
words of 16 bits. An accept that finds the derandomizer full is dropped and
shown in the status register (`dropped_seen`). The BCSU, CU and SU have the same
kind of buffer for their own records: 352, 704 and 720 bits.

## Boards, readout and the controller

**Processing board.** The 4 PUs form a 2 x 2 block of towers. Inside the block
they swap border pads directly. Across block edges they swap through board
ports, which `l0mu_processor` wires to the neighbouring board. The grid is
uniform: each PU has 8 neighbours (left, right, up, down and the corners).

**BCSU.** It sorts the 8 candidates by pT with `pt_sorter`; on a tie the lower
index wins. It sends the best two on two 32-bit links:

* link A = {BCID[3:0], pT and M3 pad of both};
* link B = {BCID[3:0], valid bits, PU number, d2, d1, charge}.

**DAQ links.** `daq_readout` builds the board's two 16-bit DAQ streams. Link 0
carries the PU0 and PU1 events. Link 1 carries PU2, PU3 and the BCSU's 22 words.

**Controller board.** It re-registers the TTC orbit and accept signals once, and
aligns the 24 candidate links. The CU picks the best two of 24 by pT and sends
them to the L0 decision unit. It tells the SU which two it chose. The SU
assembles their remaining fields and sends them out as well. Controller
`daq[0]` carries CU events and `daq[1]` SU events.

**Spyd link test.** It checks every board-to-controller link:

* `spyd_tx` sends four sync words, then eight words with the sender's address
  {slot, FPGA, port}, then a counting pattern, in 2048-word frames;
* `spyd_rx` locks after four syncs;
* it counts word errors in a 16-bit register, flags loss of sync, and keeps the
  sender's address.

## Control interface (per PU)

A synchronous 16-bit local bus (`ecs_addr`, `ecs_wdata`, `ecs_wr`, `ecs_rd`,
`ecs_rdata`):

| address | content |
|---------|---------|
| 0x0000 | control: bit0 test mode, bit1 start injection, bit2 arm capture |
| 0x0001 | FOI: [3:0] M2, [5:4] M1, [9:8] M4, [13:12] M5 |
| 0x0002 | time-alignment delay |
| 0x0003 | L0 latency |
| 0x0004 | neighbour modes ([1:0] left, [3:2] right) |
| 0x0005 | status {lost8, sys_dv, dropped_seen, dr_full, dr_empty, inj15, inj_active, cap_done, test_mode} |
| 0x0006 | derandomizer pop (test mode only) |
| 0x0007 | alignment error flags |
| 0x1xxx / 0x2xxx | pT table 0 / 1 |
| 0x30xx | injection buffer {event[3:0], link[2:0], half} |
| 0x40xx | capture buffer word |

**Test mode.** The injection buffer replays 16 events, one per crossing, on all
8 links at once. The injected crossings accept themselves, and the control
system reads the 16 events back through the derandomizer.

## Simulating

All files are in `rtl/` and `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M`, then calls `$finish`. With Verilator 5:

```
verilator --binary --timing -Irtl -Itb --top-module tb_processing_unit \
    rtl/l0mu_pkg.sv rtl/*.sv tb/tb_processing_unit.sv
./obj_dir/Vtb_processing_unit
```

List the package first (a repeated file on the command line is ignored).
`tb/tb_check.svh` has the shared check, finish and watchdog macros.

Every block has its own testbench, which compares against a model written in
the testbench. `tb_l0mu_processor` runs the crate end to end. It drives hits on
the fibres as bytes, sends TTC accepts and reads every DAQ stream. It counts
each mechanism and fails any that never happens:

* track found;
* best-2 selection;
* neighbour exchange in x, and across boards in y;
* a change of formatting mode;
* an accept dropped at a full derandomizer;
* readout of the L0 events;
* event capture;
* test-mode injection;
* Spyd locking;
* an alignment error when a delay is set wrong.

It takes about 35 s.

## Limits and departures

* **Largest size simulated.** The end-to-end test runs 1 x 2 boards (8 PUs) and
  the controller. No testbench runs the default crate of 12 boards (48 PUs). The
  full quadrant is covered only by compiling it.
* **Topology.** The real detector mixes regions of different pad size, and a PU
  can have up to eleven neighbours. Here the towers form a uniform grid with 8
  neighbours each. Only the x-direction factor-2 pad conversion is built.
* **Strip ghosts.** If two strips are hit in each direction, the decode also
  lights the two pads where the unused strips cross. This comes from the strip
  readout itself; no extra logic removes them.
* **Time-alignment window.** This is the delay condition above. Links with
  larger skew need a deeper memory, which means more tag bits per word.
* **Formats.** These are choices made here, not given: the link word layout,
  the record and candidate-link formats, the pT table address and the ECS map.
* **Readout rate.** A PU event is 34 clocks, which allows 1.18 MHz and so keeps
  up with a 1.1 MHz accept rate. Board DAQ link 1 carries 90 words per event,
  which sustains only 0.44 MHz. Bursts are absorbed by the 16-event
  derandomizers, and the loss shows up in `dropped_seen`.
* **Not built.**
  * The 1.6 Gb/s serialisers and deserialisers with their 8b/10b coding, the
    optical parts and the clock-cleaning PLL. Their byte-level interface is
    what `link_mux` and `link_demux` model.
  * The TTC receiver: its outputs are the top's `ttc_bc0` and `ttc_l0_accept`.
  * The control PC: it is the ECS bus ports.
  * The backplane drivers.
  * The vendor logic analyser.

Some signals are declared but not fully read, where only part of a shared
struct is used. The module headers note where this happens.
