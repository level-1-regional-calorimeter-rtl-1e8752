# A Regional Calorimeter Trigger crate in SystemVerilog

At the LHC, bunches cross every 25 ns. The CMS Level-1 trigger must decide, for every one of those
crossings and with no dead time, whether the event is worth keeping. The Regional Calorimeter
Trigger (RCT) is the first stage of that decision for the calorimeters. Each crossing it takes the
transverse energies of the ECAL and HCAL trigger towers and produces four things:

* energy sums over 4x4-tower *regions*, which the jet trigger and the missing-energy trigger use;
* a small number of *electron/photon candidates*, both isolated and non-isolated;
* one-bit region summaries: a tau veto, a minimum-ionizing (MIP) bit and a Quiet bit;
* the energies of the forward calorimeter (HF).

The RCT has 18 crates. This RTL models one of them. A crate holds seven Receiver Cards, seven
Electron Isolation Cards and one Jet/Summary Card, all joined by a custom backplane. It covers
8 x 28 towers in phi x eta, plus 8 HF towers. The structure, the data widths and the counts follow
the 2003 description of the pre-production crate by the University of Wisconsin group
(Chumney, Dasu, Lackey, Jaworski, Robl, Smith: "Level-1 Regional Calorimeter Trigger System for
CMS"). That description names each function but gives few of the rules inside it. Wherever it
is silent, this design makes the simplest choice that works. The section "Where this design
departs from, or fills in, the published description" lists each such choice.

## The pipeline in one picture

```
 32 links/card ──► Phase ASIC x8 ──► tower LUT x32 ──┬─► Adder stage 1 (x4) ─► Adder stage 2 (x2) ─► region sum, tau, MIP ─┐
  (24 bit/crossing)  align + check    linearize, veto │                                                                    │
                                                       └─► Boundary Scan (delay) ─► 32 towers (7-bit ET + veto) ──┐        │
                                                                                     share_out / from neighbours │        │
 Receiver Card k ─────────────────────────────────────────────────────────────────────────────────────────────────┘        │
                                                                                                                            │
 Electron Isolation Card k: receiver (Sort ASIC, sort off) ─► 2 x EISO ASIC ─► rank LUT ─► 2 iso + 2 non-iso ──┐            │
                                                                                                               ▼            ▼
 Jet/Summary Card:  2 Sort ASICs (28 -> top 4 iso, top 4 non-iso)   2 Sort ASICs as receivers (14 regions) + Quiet bits
                    HF: Phase ASIC ─► 2 HF LUTs ─► Boundary Scan delay ─► 8 HF region sums + quality bits
```

There is one clock and it ticks once per bunch crossing. In the hardware, the links deliver data
at 120 MHz, the backplane runs at 160 MHz and the cables to the next crate at 80 MHz. Those faster
clocks carry one crossing's bits in several beats. In this model every bundle moves in a single
clock. The pipeline takes a new crossing on every clock and has no stalls.

## Link words and the Phase ASIC (the part to read carefully)

Each serial link carries one 24-bit word per crossing (`rct_pkg::link_word_t`):

| bits  | field | meaning |
|-------|-------|---------|
| 7:0   | e0    | energy of the first tower |
| 15:8  | e1    | energy of the second tower |
| 17:16 | c     | characterization bit of each tower (ECAL: fine-grain veto; HCAL/HF: quality/MIP bit) |
| 18    | bc0   | set on the word of bunch crossing zero |
| 23:19 | ecc   | 5-bit error code |

The published description gives the field list. The bit order and the error code are this
design's own. Check bit i is the XOR of the data bits j (j = 0..18) whose number j+1 has bit i
set. Every single-bit error therefore gives a non-zero syndrome. `rct_pkg::make_word` builds a
correct word.

Cables of different lengths mean the words from different links reach the crate at different
times. The Phase ASIC (`phase_asic`, four links per chip) removes that skew, so that every link
delivers the same crossing on the same clock edge:

1. Each link's word goes into a ring buffer of 8 entries every clock. When a word carries `bc0`,
   the chip records which slot it went into.
2. The Clock and Control Card sends every chip the same local strobe, `bc0_local`. On that strobe,
   each channel starts reading at its own recorded bc0 slot. From then on the read pointer steps
   once per clock.
3. At every later strobe, the channel checks that the recorded bc0 slot is the one its running
   pointer has reached. If it is not (the link latency changed), or if no bc0 word arrived during
   that orbit, `align_err` is high for one clock. The channel then re-aligns.
4. The error code of every word that is read out is recomputed. `ecc_err` flags a mismatch.

The strobe must come 1 to 7 clocks after the latest link's bc0 word. If the strobe comes L clocks
after the source's bc0, every Phase ASIC output shows the crossing from L+1 clocks earlier. All
other latencies below are counted from the Phase ASIC outputs. A channel's outputs stay zero until
it has seen one strobe (`locked`).

## Receiver Card

There are 32 links per card, which is 64 tower energies. Links 0..15 carry the ECAL energies of
towers 0..31, two towers per link. Links 16..31 carry the HCAL energies of the same towers.

**Tower lookup (`rc_lut`, one per tower).** Two writable tables, each with 256 entries, translate
the raw 8-bit energies:

* the ECAL table gives a 7-bit ET for the electron path and a 9-bit linear ET;
* the HCAL table gives a 9-bit linear ET.

From these the lookup forms two results:

* the tower sum ET(ECAL)+ET(HCAL), 10 bits, which feeds the adders;
* the electron veto bit. It is set when the ECAL fine-grain bit is set, or when
  HCAL·2^`he_shift` > ECAL. `he_shift` resets to 3, so the veto is set when H/E > 1/8.

At power-up the tables are linear: 7-bit ET = min(raw, 127), linear ET = raw.

**Region sums (`adder_asic`).** The card covers 8 towers in phi by 4 in eta. Tower t sits at
phi = t/4, eta = t%4. Region r holds towers 16r..16r+15. Each Adder ASIC adds eight signed 11-bit
values in one clock:

* the result saturates at the 11-bit range;
* its overflow bit is set when the result saturated, or when any input already carried an
  overflow bit.

Stage 1 (four adders) adds groups of eight towers. Stage 2 (two adders) adds the two halves of
each region. The region ET is the lower 10 bits; an overflowed region reads 1023.

**Region bits.** Both bits are delayed so that they leave with their sum:

* MIP is the OR of the 16 HCAL quality bits of the region.
* Tau veto is set when more than two towers have an ECAL linear ET above `tau_thr`, or more than
  two have an HCAL linear ET above it. `tau_thr` resets to 4.

**Electron data out.** Each tower's 7-bit ET and veto bit pass through the Boundary Scan ASICs
(`bscan_asic`, programmable delay `eg_delay`+1 clocks). They go to the card's own Electron
Isolation Card, to the neighbouring cards, and (through `share_out`) to the neighbouring crates.

## Geometry of sharing

Electron finding uses 3x3 windows, so a tower at the edge of a card needs its neighbours. The
crate builds a 10 x 30 grid `G[phi][eta]`:

* the crate's own towers sit at [1..8][1..28], with Receiver Card k at eta columns 1+4k .. 4+4k;
* the one-tower ring around them comes from the neighbouring crates through the `share_in` port.
  The order is: phi row 0 (eta 0..29), phi row 9 (eta 0..29), then for phi 1..8 the pair
  (eta 0, eta 29).

Electron Isolation Card k sees the 10 x 6 window `G[0..9][4k..4k+5]`. That is its 32 own towers
and 28 neighbours, the numbers the hardware uses.

## Electron Isolation Card and the electron finder

The card receives its 60 towers through a Sort ASIC with sorting switched off, as the hardware
does; here the chip is simply a register stage. Two Electron Isolation ASICs (`eiso_asic`) each
handle one 4x4 region. Region 0 uses window rows 0..5 and region 1 uses rows 4..9.

For each of the 16 towers of its region, the ASIC evaluates:

* **candidate ET** = the tower's ET plus the largest of its four nearest neighbours, saturated at
  127;
* **candidate?** only if the tower's own ET is non-zero and its veto bit is clear;
* **isolated** if none of the eight neighbours has its veto bit set, *and* the ET of the eight
  neighbours, minus the nearest neighbour already counted, is at most `iso_thr`. The threshold is
  a card register that resets to 8. Any other candidate is non-isolated.

The best isolated and the best non-isolated candidate of the region are kept. Ties go to the lower
tower number. A 128-entry output table (`eg_rank_lut`) compresses each 7-bit ET to a 6-bit rank
(default ET/2; ET 0 gives rank 0, meaning no candidate). It also stamps the card number and a
location bit (which region). Each card sends 2 isolated and 2 non-isolated candidates.

The published description gives the window, the input data (7-bit energies, a veto bit,
nearest-neighbour energies) and the output count. The isolation rule above is this design's own.

## Jet/Summary Card

* **Region receivers.** Two Sort ASICs with sorting off take in the 14 region sums: region
  index = 2·card + region. Each region gets a Quiet bit, set when its ET is below that region's own
  threshold (reset 5) and it did not overflow.
* **Electron sorting.** One Sort ASIC (`sort_asic`) takes the 14 isolated candidates and another
  the 14 non-isolated ones. Each passes on its four highest, in descending rank. An equal rank
  keeps the lower input first. A register can switch sorting off, for tests; output k is then
  input k.
* **HF.** One mezzanine's four links carry the 8 HF towers: tower t is on link t/2, in phi sector
  t/4 and eta slice t%4. They pass through a Phase ASIC, then two lookups (`hf_lut`, one per phi
  sector, address {eta slice, energy}) that give a 10-bit region ET. A Boundary Scan delay of
  `hf_delay`+1 clocks lines them up with the region sums. Each HF tower's quality bit travels with
  it.

Outputs toward the Global Calorimeter Trigger:

* 14 region sums with their overflow, tau and MIP bits;
* 14 Quiet bits;
* 8 HF sums with their quality bits;
* the top 4 candidates of each type.

## Latency (register delays at their reset values)

| path | clocks after the Phase ASIC output |
|------|-----------------|
| towers on `share_out` | 2 (lookup, Boundary Scan) |
| Receiver Card region sums | 3 |
| J/S region sums, Quiet bits | 5 |
| J/S electron candidates | 6 (lookup, bscan, receiver, EISO, rank LUT, sort) |
| J/S HF sums | 2 + `hf_delay` |

Add L+1 for the Phase ASIC itself. The crate testbench checks all of these.

## Configuration

`cfg` is a simple write bus (`we`, 19-bit `addr`, 16-bit `data`). It stands in for the crate's VME
access, which is not modelled. `addr[18:15]` selects the card:

* 0..6 are the Receiver Cards;
* 7..13 are the Electron Isolation Cards;
* 14 is the Jet/Summary Card.

`addr[14]` = 0 writes a table entry and 1 writes a register.

| card | table (`addr[14]=0`) | registers (`addr[14]=1`, number in `addr[7:0]`) |
|------|---------------------|---------------------|
| Receiver | `addr[13:9]` tower, `addr[8]` 0=ECAL {et7[6:0], lin[8:0]} / 1=HCAL lin[8:0], `addr[7:0]` raw energy | 0 `he_shift` (3), 1 `tau_thr` (4), 2 `eg_delay` (0) |
| Isolation | `addr[6:0]` ET -> 6-bit rank | 0 `iso_thr` (8) |
| J/S | `addr[10]` HF lookup, `addr[9:0]` {slice, energy} -> 10-bit ET | 0..13 Quiet threshold of region n (5), 16 sort enable (1), 17 `hf_delay` (0) |

The tables start from their linear contents at power-up and are not cleared by reset. Keep `cfg.we`
low while reset is applied.

## Files

`rtl/` has one module or package per file:

* `rct_pkg` holds the shared types and constants;
* the chips are `phase_asic`, `rc_lut`, `adder_asic`, `bscan_asic`, `sort_asic`, `eiso_asic`,
  `eg_rank_lut` and `hf_lut`;
* the cards are `receiver_card`, `eiso_card` and `jet_summary_card`;
* the top is `rct_crate`.

`tb/` has a self-checking testbench `tb_<module>` for each of them. `tb/rct_tb_pkg.sv` holds
reference models of the lookup, the region rules and the electron finder, written independently
of the RTL.

To run one, for example the full crate:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rct_crate \
    rtl/rct_pkg.sv tb/rct_tb_pkg.sv -y rtl -y tb tb/tb_rct_crate.sv
./obj_dir/Vtb_rct_crate +verilator+rand+reset+2
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. `tb_rct_crate` runs the crate at
its full size: 224 towers, 228 links and 260 crossings. It takes about 20 s to build and under a
second to run. It checks about 40,000 values. It also confirms that each of these happened at
least once:

* links locking;
* an error-code error and an alignment error (both injected);
* region overflow, tau, MIP and Quiet bits;
* vetoed towers;
* isolated and non-isolated candidates;
* a candidate built from a tower shared by a neighbouring crate;
* sorting switched off;
* configuration writes.

## Where this design departs from, or fills in, the published description

Taken from the description: the counts and widths listed below.

* 7 Receiver Cards and 7 Electron Isolation Cards.
* 32 links (64 tower energies) per Receiver Card.
* 24-bit link words with two 8-bit energies, two characterization bits, a bunch-crossing bit and
  5 error bits.
* Four links per Phase ASIC.
* Eight signed 11-bit inputs per Adder ASIC, with overflow; two adder stages per region.
* 7-bit ECAL ET plus an electron bit to the isolation card.
* 32 own plus 28 neighbour towers per isolation card.
* One isolated and one non-isolated candidate per region.
* A 7-to-6-bit rank table with a location bit.
* Sort ASICs with sorting switchable; off on the isolation card, on for the 28 candidates (top
  4 of each type).
* A MIP bit per region as the OR of 16 HCAL quality bits.
* A Quiet bit per region with its own threshold.
* 8 HF towers through a Phase ASIC, two lookups for four eta slices and a Boundary Scan delay.

Chosen here, because the description does not give them:

* the link bit order and the error code;
* the ring-buffer alignment mechanism;
* the lookup organisation and the H/E veto rule;
* the reading of the tau rule ("more than 2 active ECAL or HCAL towers" taken as separate ECAL
  and HCAL counts);
* saturation in the adders;
* the electron isolation rule and the requirement of a non-zero central tower;
* tie rules, register reset values, tower and link numbering, and crate geometry;
* the configuration bus.

A conflict in the source: the text says the two Electron Isolation ASICs of a card "choose the two
highest energy electrons of each type" from 44 towers. The crate dataflow diagram says one
isolated and one non-isolated candidate per 4x4 region, four per card. This design follows the
diagram, which agrees with the four candidates per card quoted elsewhere. Each ASIC gets the 36
towers that its 16 windows need.

Not modelled:

* the serial link chips and mezzanine cards, the Clock and Control Card, the backplane and
  cables, and the VME interface. Their signals are the top-level ports.
* the boundary-scan (JTAG) chain of the Boundary Scan ASIC; only its data-sharing delay is built.
* the time multiplexing of the EISO ASIC, which handles four towers per 6.25 ns. Here all 16
  towers are handled in one crossing, which gives the same rate.
* the jet-finding cluster crate. It is a separate crate, whose construction was still pending when
  the description was written.

A full trigger is 18 of these crates. They would be joined through `share_in`/`share_out`: the
phi neighbours feed rows 0 and 9 of the grid, and the eta neighbours feed columns 0 and 29.
