# Sector track finder for the CMS endcap muon Level-1 trigger

The endcap muon system of CMS has four stations of cathode strip chambers. For
every bunch crossing (25 ns, 40 MHz) the chamber electronics report short track
stubs, *LCTs* (local charged tracks), and the Level-1 trigger must decide within a
few microseconds whether a muon with enough transverse momentum (PT) passed. The
endcap is split into six 60-degree sectors per side. One board per sector turns the
LCTs of all stations into sector coordinates, links the stubs of different
stations into three-dimensional tracks, removes duplicates, keeps the three best
tracks and gives each a PT value from a look-up memory.

This RTL describes one such board: the **sector receivers** (coordinate
conversion by cascaded look-up memories) and the **sector processor** (the track
finding proper), pipelined so that a new bunch crossing enters on every 40 MHz
clock. The top module is `csctf_sp`.

The block structure, the stage order, the memory sizes, the field widths of the
receiver tables, the station pairs that are tested and the latencies follow the
published description of the second-generation prototype of this processor. That
description gives each block's function but rarely its insides, so the window
values, the way links are combined into tracks, the ranking, the cancellation
rule, the PT address layout and all word formats are choices made here. They are
marked as such below and in the opening comment of every file.

## Data flow

```
 15 optical links, 2 x 16-bit frames per crossing (80 MHz)
        |
 frame_assembler      16+16 -> 32-bit LCT word                       1 clock
 link_align           per-link programmable delay                    1 + d clocks
 sector_receiver x15  PHIL -> (ETAG || PHIG) look-up chain           2 clocks
        |   + 8 barrel segments, delayed to match
        v
 segment bus: 8 barrel, 6 station-1, 3+3+3 stations 2-4 (23 slots)
        |
 bxa                  bunch crossing analyzer (hold one extra crossing)  1 clock
 eu x6                EU1-2, EU1-3, EU2-3, EU2-4, EU3-4, EU MB1-2        1 clock
 tau x3               track assemblers keyed on stations 2, 3, 4         1 clock
 fsu | pt_precalc x9  cancel + best 3 of 9 | PT address of all 9         1 clock
 sp_mux, au           pick 3 addresses, PT look-up, muon words           1 clock
        |
 3 muon words of 20 bits (60 bits per crossing)
```

`seg_fifo` carries the segment data from the analyzer alongside the extrapolation,
assembly and selection stages, so that the PT precalculation and the output
multiplexer can fetch the segments of a track by station and index.

Latency: the sector processor (analyzer to PT memory output) takes 5 clocks and
the receivers 2, the 7 crossings quoted for this processor. Frame assembly and
alignment add 2 more (with alignment delay 0). In the end-to-end testbench, a muon
appears 9 clock edges after its LCT words are handed to the link model, because
the link model itself spends one period sending the two frames.

## Coordinates: the sector receiver look-up chain

An LCT word (package `sp_pkg`, type `lct_t`) carries what the chamber electronics
measured: CLCT pattern (4 bits), quality (3), half-strip (8), left/right bend (1),
chamber id CSC_ID (4) and an approximate eta from the wire group (7), plus a valid
flag. Bits 30:27 are reserved. Layout, MSB first:
`{valid, rsv[3:0], csc_id[3:0], eta_appr[6:0], patt[3:0], quality[2:0], halfstrip[7:0], lr}`.

Each link has three memories, matching the board's 45 SRAMs for 15 links:

| memory | words | address | data (low bits) |
|---|---|---|---|
| PHIL | 2^18 x 18 | `{2'b0, patt, quality, halfstrip, lr}` | `{phi_local[9:0], phib_local[5:0]}` |
| ETAG | 2^19 x 18 | `{phib_local, phi_local[9:8], csc_id, eta_appr}` | `{phib[4:0], eta[6:0]}` |
| PHIG | 2^19 x 18 | `{phi_local, eta_appr[6:2], csc_id}` | `{phi[11:0]}` |

PHIL converts the strip-level measurement into phi within the chamber and a local
bend angle. ETAG and PHIG are read in parallel and give the bend, eta and phi in
sector coordinates. All geometry, and any alignment correction, lives in the table
contents; the logic only routes fields. The PHIL address fields add up to 16 bits
for an 18-bit memory, so the two top address bits are zero. Which two bits of
phi_local reach ETAG and which five bits of eta_appr reach PHIG is not known from
the source description: the most significant bits are used here.

The memories (`lut_sram`) are written as arrays with one synchronous write port
and a registered read, one clock per look-up. They are loaded through the top's
`lut_we / lut_sel / lut_addr / lut_data` bus, where
`lut_sel = 3*link + {0: PHIL, 1: ETAG, 2: PHIG}` and `45 + p` selects the PT table
of output place `p`. This bus stands in for the board's control (VME) access.
Tables power up undefined and must be loaded before use.

The result is a segment (`seg_t`): `{valid, quality[2:0], phi[11:0], eta[6:0], phib[4:0]}`,
with `phib` a signed bend. Barrel segments enter the top already in this format,
with eta unused. They are delayed 5 clocks so that they meet the endcap segments
of the same crossing. This assumes a barrel segment is captured on the same edge
as the first frame of its crossing's LCT words.

## Late stubs: the bunch crossing analyzer

The LCTs of one muon do not always reach the processor in the same crossing. The
processor must still link a stub with a partner that arrives one crossing later.
`bxa` does this per segment slot. A new valid segment is passed on. If none
arrives, the previous crossing's segment is presented once more, flagged `late`.
A segment is never held twice, and a new arrival replaces a held one.

The extrapolation units refuse to link two `late` segments, because that pair
was already tested in the previous crossing. A held segment paired with a fresh
one is accepted, and that is how the late stub is recovered. The analyzer does
not remove a track that is reported in two successive crossings, for instance
when a third stub arrives late and the two-stub track was already sent.

## Linking stations: extrapolation units

Six units test station pairs: 1-2, 1-3, 2-3, 2-4, 3-4, and barrel-station 1 with
endcap station 2 (`EU MB1-2`). Every segment of one station is compared with
every segment of the other in one clock. The comparators are 18 for 1-2, 18 for
1-3, 9 each for 2-3, 2-4 and 3-4, and 24 for the barrel. A pair is linked when all
of these hold:

* both segments are valid, and they are not both held copies;
* `|phi_a - phi_b| <= DPHI_MAX` (128 of 4096 phi units per sector);
* `|eta_a - eta_b| <= DETA_MAX` (8), except for the barrel unit;
* both bends satisfy `|phib| <= PHIB_MAX` (12), standing for "consistent with a
  muon from the interaction point, not parallel to the beam".

The window values are placeholders. The real windows depend on the station pair,
eta and the magnetic field, and would be set from simulation. They are
parameters of `eu` and of `csctf_sp`.

## Building tracks: the three assemblers and the final selection

The description says that nine candidate tracks reach the final selection. Here
that is three assemblers (`tau`) with three key segments each. Assembler 1 is
keyed on station 2 and uses the links 1-2, 2-3, 2-4 and MB1-2. Assembler 2 is
keyed on station 3 and uses 1-3, 2-3 and 3-4. Assembler 3 is keyed on station 4
and uses 2-4 and 3-4.

For each key segment the assembler takes, in every other station, the
lowest-index segment linked to the key. The port cards send their LCTs best
first, so the lowest index is the best one. A key with no link gives no track.
The track (`track_t`) records the stations present as a 5-bit mask
`{ME4, ME3, ME2, ME1, MB}`, the segment index per station and a rank
`{number of stations, ME1 present}`. Station 1 improves the PT resolution, so it
breaks ties. Note that the stations are linked to the key only, not to each
other: a station-2-keyed track with stations 3 and 4 does not require a 3-4 link.

Consequences of this pairing, which the end-to-end test relies on:

* A muon seen in station 2 yields a track with all its stations.
* A muon without station 2 but with station 3 yields a track without its barrel
  segment. Barrel segments link only to station 2.
* Stations 1 and 4 alone, or barrel and station 3 alone, form no track. There is
  no EU1-4 and no barrel link to station 3.

The same muon is usually built by two or three assemblers. `fsu` cancels a track
when it shares a segment (same station, same index) with another valid track
that beats it. Track j beats track i when its rank is higher, or the ranks are
equal and j has the lower candidate index. The surviving tracks are ordered by
the same rule and the first three are output, best first, with their candidate
index. Cancellation is applied pairwise in one pass. A track removed by a track
that is itself removed stays removed, which can lose a track in rare three-way
overlaps. The unit reports per crossing how many tracks were cancelled and how
many survivors did not fit (`mon_cancelled`, `mon_dropped` at the top).

## PT assignment

The PT measurement uses the phi bend between stations. While the final selection
runs, `pt_precalc` forms a 21-bit address for all nine candidates:

```
addr = { mask[4:0], dphi_a[7:0], dphi_b[3:0], eta[6:3] }
```

Stations are taken in the order MB, ME1, ME2, ME3, ME4.

* `dphi_a` is the phi of the first segment minus the second, saturated to 8
  signed bits.
* `dphi_b` is the second minus the third, shifted right by two and saturated to
  4 signed bits, or 0 for a two-segment track. The second difference only has
  to resolve multiple scattering at low PT, so it needs less precision.
* `eta` is taken from the output segment: station 2, else 3, else 4.

`sp_mux` picks the three selected addresses, and the phi and eta of the output
segment, from the delayed segment data. `au` looks up each address in its own
2^21 x 16 memory, the 4 MB of the description. The PT word is
`{8'b0, quality[1:0], sign, pt[4:0]}`; the contents, i.e. the actual momentum
parametrization, are not part of this design. The output muon word (`muon_t`,
20 bits, 60 bits for three muons) is
`{valid, pt[4:0], sign, quality[1:0], phi[11:7], eta[6:1]}`.

## Link input: frames and alignment

Each optical link delivers one 32-bit word per crossing as two 16-bit frames at
80 MHz. `frame_assembler` assumes that the 80 MHz and 40 MHz clocks come from one
source with aligned rising edges. The first frame (word bits 31:16) is captured
on the edge shared with the 40 MHz clock, the second on the mid-period edge, and
the 40 MHz register takes both at the next 40 MHz edge. A word with either frame
not flagged `rx_dv` is marked invalid. `link_align` then delays each link by a
programmed 0-3 extra clocks (`link_delay`), so that the 15 links present the
same crossing together.

Every two-station track is kept and looked up. Only some two-segment tracks are
meant to be accepted; which ones is left to the PT table, whose quality field can
mark a combination as unusable.

On the board the 15 links are served by three receiver units of five links
each: station 1A, 1B, 2, 3 and 4, three links per station. Here each link has
its own `sector_receiver` instance, and the grouping has no logical effect.

## What is not here

The optical transceivers and the link serializer/deserializer chips are bought
parts. So are the board's SRAM chips, which are modelled here as arrays. The
control interface (registers, VME protocol), the readout to the data acquisition,
the backplane transmission to the muon sorter, the muon sorter itself and clock
distribution are not described in enough detail to be written. The top brings
out the muon words and a table-loading bus in their place. There are no real
table contents: the testbenches load exactly the entries they use.

## Files

`rtl/`: `sp_pkg` (types, sizes, segment bus layout), `lut_sram`,
`frame_assembler`, `link_align`, `sector_receiver`, `bxa`, `eu`, `tau`, `fsu`,
`pt_precalc`, `seg_fifo`, `sp_mux`, `au`, and the top `csctf_sp`.

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.
`tb_csctf_sp` runs the whole board at its default size, with full-size tables of
about 100 MB of simulator memory, in a few seconds. It covers these cases:

* muons with two, three and four stations;
* a track built by all three assemblers;
* four muons in one crossing, one of them dropped;
* a barrel muon;
* a stub one crossing late;
* a link with an alignment delay;
* 60 random single muons, whose results are predicted from the pairing rules
  above.

Every muon must arrive at the expected clock with the expected PT word, phi and
eta.

`tb_csctf_sp_stream` runs the board at full rate, also at the default size. It
feeds 3000 consecutive crossings with random LCTs on all links and random barrel
segments, in light, medium and heavy occupancy. The results are compared with a
crossing-level reference model kept in the testbench. That model repeats the
analyzer, the window tests, the assemblers, the selection and the PT address
rule, but is written independently of the RTL. For every crossing and output
place, the test compares valid, phi and eta of the muon word, and the PT address
presented to the memories.

Running one testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/sp_pkg.sv tb/tb_csctf_sp.sv --top-module tb_csctf_sp
./obj_dir/Vtb_csctf_sp
```

Replace `csctf_sp` by any other module name for its unit test. `fsu` and `bxa`
carry concurrent assertions: the selected tracks are packed best first, and a
held segment is always valid. Verilator checks them with `--assert`. The unit tests of
`lut_sram` and `au` use small tables. The others run at the design's sizes.

## Parameters worth changing

* `csctf_sp`:
  * `DPHI_MAX`, `DETA_MAX`, `PHIB_MAX`: the linking windows, shared by all units
    here. Give each `eu` instance its own values for real use.
  * `PHIL_AW`, `ETAG_AW`, `PHIG_AW`, `PT_AW`: memory sizes.
  * `ALIGN_MAXD`: range of the alignment delay.
* `pt_precalc`: `DPHIA_W`, `DPHIB_W`. The top's PT address width (21) assumes the
  defaults.
