# Trigger path of one New Small Wheel sector, in SystemVerilog

The New Small Wheel (NSW) of ATLAS has two detector technologies: small-strip Thin Gap
Chambers (sTGC) and Micromegas (MM). Both measure a muon's track segment close to the
interaction point, and the Level-1 trigger uses that segment to reject fake endcap triggers.
Each of the 16 sectors has eight sTGC layers and eight MM planes. Every 25 ns bunch crossing
(BC), the sector's electronics must turn the detector hits into at most eight segments. A
segment is a radial position (R-index), an azimuth (phi) and an angle difference
(delta-theta). This repository holds RTL for the logic of that trigger path:

```
 sTGC pads ─► pad_tds ×24 ──frames──► pad_trigger ──bands(≤4)──────────────┐
                                         │ band-id + BCID to every strip TDS │
 sTGC strips ► strip_tds ×8×12 ◄─────────┘                                 ▼
                   │ frames                                              stgc_tp ──► 4 sTGC segments ─┐
                   └─► router ×8 (one per layer) ──4 fibres/layer──────────┘                            ├─► segment_merge ─► 8 segments
 MM strips (VMM ART) ─► art_asic ×32 ──112-bit words──► mmtp ─────────► 8 MM segments ──────────────────┘
```

Everything runs on the BC clock. Each serial link, whether the TDS links, the ART links or
the router fibres, is a word per BC. Analogue front ends, transceivers, slow control and the
readout path are not part of the RTL; see "What is not here".

## The sTGC idea: pads select, strips measure

An sTGC layer has coarse pads and fine strips. Sending every strip charge every BC would be
far too much data. Instead, the coarse pads decide which narrow radial band holds a track,
and then only the strips of that band are sent.

1. **pad_tds**: each of the 24 pad TDS chips reads 104 pad Time-over-Threshold signals. Three
   chips serve each layer. A pad hit is a rising edge of ToT between two BCs. The 104 hit bits
   and a 12-bit BCID form a 116-bit payload, sent every BC.
2. **pad_trigger** holds a table of 4700 trigger patterns, one per pointing tower. A pattern
   names one pad in each of the eight layers. It fires when at least 3 of the 4 layers of
   *both* quadruplets are hit (layers 0-3 and 4-7). Each pattern belongs to a band-id. The
   fired patterns are ORed per band, and a priority encoder takes at most four bands per BC,
   lowest band-id first. A band that straddles two strip TDS chips (flagged `split` in the
   band table) uses two of the four places. Other features:
   - A 2-BC window (`win2`) ORs the pad hits of the previous BC, so a track whose hits arrive
     in two BCs still fires.
   - Two 24-bit masks force a link's pads to 0 or 1.
   - In OCR mode the board sends nothing until an OCR arrives. It then sends the reserved
     band-id 0xFE once, which marks the start of the run.

   For each selected band, the band table also gives the strip TDS position per layer. The
   sFEB selector tells every strip TDS either the band-id it must send, or 0xFF.
3. **strip_tds** keeps the 128 strip charges (6 bits each) of the last `RB_DEPTH` BCs in a
   ring buffer, tagged with their BCID. When asked for a band and a BCID, it looks up the
   band's first strip in its own table and takes 17 strips from there. It sends 14 of them:
   strips 0-13 or 3-16, whichever window holds more charge, with a flag saying which. If the
   BCID is no longer buffered, or the band is unknown to this chip, it sends an empty packet.
4. **router**: one per layer, with 12 strip TDS inputs from three front-end boards. The
   outer board has a shorter cable, so its four inputs can be delayed by 0-2 clocks to line
   up with the rest. Up to four non-empty packets go to the four output fibres in input
   order. Idle fibres carry a null packet whose spare field names sector, layer and fibre
   (`{0, sector[3:0], layer[2:0], fibre[1:0]}`), so cabling can be checked.
5. **stgc_tp** (sTGC trigger processor):
   - Its band builder delays the pad trigger's bands by `pad_dly` BCs so they meet the strip
     packets they asked for.
   - For each of four algorithm slots it takes, in every layer, the fibre carrying that
     band-id.
   - **stgc_segment** finds a cluster in each layer: 2-5 adjacent strips above threshold,
     ignoring one isolated noise strip. It computes the charge-weighted centroid in 1/8
     strip, and averages each quadruplet, which needs at least three good layers.
   - R-index = band-id plus one centroid bit. delta-theta = back minus front quadruplet
     centroid, scaled per band. phi comes from the pad pattern.

### Link framing

All TDS links share one format (`tds_scrambler` / `tds_descrambler`). The 116-bit payload is
scrambled MSB first by the self-synchronous scrambler 1 + x^39 + x^58, so
`s = d ^ s[t-39] ^ s[t-58]`. The result is split into a 26-bit frame and three 30-bit
frames. The first frame gets the unscrambled header `1010` in bits 29:26, and `frames[0]` is
sent first. The receiver checks the header (`hdr_ok`) and inverts the scrambler from the
received bits alone. This is self-synchronising: after 58 received bits it is correct
whatever its start state.

Payload layouts are given in `rtl/nsw_pkg.sv`:
- `pad_payload_t`: 104 pads and a BCID.
- `strip_payload_t`: spare, valid, band-id, BCID, outer flag and 14 charges.

## The MM idea: slope roads

A Micromegas plane gives, per VMM chip, the address of the first strip that fired in a BC
(the ART signal).

1. **art_asic** collects the ART flag and 6-bit address of 32 VMMs.
   - A programmable dead time (0-7 BC) suppresses repeats from the same VMM.
   - Eight cascaded priority encoders pick at most eight hits, highest VMM number first.
   - It packs 112 bits per BC as two 56-bit batches:

     | Mode | Batch 1 | Batch 2 |
     |---|---|---|
     | hit-map | 32-bit hit map, BCID | eight 6-bit addresses, eight parity bits |
     | hit-address | eight 5-bit VMM ids, BCID, hit count | eight 6-bit addresses, eight parity bits |

   - Debug modes: priority bypass (VMMs 0-7 straight through) and a fixed pattern.
2. **mm_decoder** turns each hit into a strip number (32 ART links, four per plane, each
   covering 2048 strips). From the strip it computes a *slope*, the radial position divided
   by the plane's z (16-bit fraction). A straight track from the interaction point has the
   same slope in every plane, so slope bins make natural roads.
3. **mm_finder**: 16 regions (slope bits 15:12) of 64 roads each (bits 11:6), 1024 roads in
   all.
   - A hit sets its road's entry for its plane and starts an age counter. It expires after
     `window` (1-8) BCs.
   - A road fires when it holds at least `thr_x` hits in X planes (0, 1, 6, 7) and `thr_uv`
     in stereo planes, and its oldest hit is in its last BC. So the road fires once, after
     collecting the whole window.
   - Each region fires up to two roads per BC (lowest first), clears them and fits them with
     **mm_fitter**:
     - R-index from the mean X slope;
     - phi from mean U minus mean V;
     - delta-theta = mean slope of the back X planes minus the front X planes.
4. **mm_cand_select** keeps at most eight of the 32 possible segments, lowest region first.

## Merging

**segment_merge** takes the four sTGC and eight MM segments of a BC.
- sTGC segments come first.
- An MM segment whose R-index is within `r_tol` of a valid sTGC segment is a duplicate and
  is dropped. With `phi_from_mm`, the sTGC segment then takes the MM phi, which is finer.
- `ignore_mm` and `ignore_stgc` switch a detector off.
- At most eight segments leave per BC. `n_dup` and `n_lost` count what was removed.

## Timing

Counted in BC clocks; "edge k" is the clock edge at which an input is first sampled.

| Path | Latency |
|---|---|
| pad ToT → `pad_bands` | after edge k+3 |
| OCR in OCR mode → band 0xFE | same edge |
| `pad_bands` → strip request → router fibres | 4 clocks; set `pad_dly = 4` |
| fibres → sTGC segment | 2 clocks (pad ToT → sTGC segment: 9 clocks) |
| ART input → `art_word` | after edge k+1 |
| ART input → MM segment | `window` + 4 clocks (8 with window 4) |
| segments → merged output | 1 clock |

The strip TDS ring buffer must still hold the requested BC. With `RB_DEPTH = 8` a request
can reach back 8 BCs, and the pad-to-request delay here is 3.

## Configuration

Tables are loaded through write ports, one entry per clock:
- `pat_*`: pad patterns.
- `bt_*`: band table, giving the strip TDS position per layer and the split flag.
- `lut_*`: band-to-first-strip table of each strip TDS, selected by `lut_layer` and `lut_pos`.

Everything else is a static input: masks, `win2`, `ocr_mode`, `bc_offset`, `outer_dly`,
`pad_dly`, `q_thr`, ART dead time and modes, MM window and thresholds, merge options.

## Where this departs from the hardware

- Serialisers, clock recovery, sub-BC phase alignment and the pad TDS 3.125 ns delays are not
  modelled. Links are words per BC.
- The router's outer-board delay counts BC clocks; the hardware counts 160 MHz clocks.
- The field order inside the strip packet, the ART batch fields, the hit count, and the
  parity type are this design's own.
- The R-index and delta-theta formulas of both processors, the strip cluster rules, the MM
  slope tables (z = 7000 + 50·plane mm, pitch 0.4375 mm) and the road binning are stand-ins.
  The hardware uses look-up tables whose contents are not public here.
- MM stereo planes are treated like X planes when forming the slope, so stereo hits fall in
  the road of the X hits.
- The band builder does not join the two halves of a split band; it uses the first fibre
  that carries the band.
- The MM decoder uses one offset and one z per plane. The hardware keeps them for each of
  the 8 planes and 16 radial segments.
- MM roads here do not overlap, and a stereo hit counts toward the road of its own slope bin.
  The hardware checks each X-road coincidence against the overlapping U/V "diamond" roads
  (up to 57 per X road, three U/V coincidences per X coincidence).
- The sTGC processor holds the MM segments until the sTGC segments are ready. Here there is
  no holding buffer: `segment_merge` combines segments that arrive in the same BC, so MM and
  sTGC latencies must match.
- The MM processor's 320 MHz internal clock, the input capture/deskew stages and the
  latency FIFOs of the processors are not modelled.
- Priority orders, where the hardware's is not known, are: lowest band-id, lowest input,
  lowest region, lowest road.

## What is not here

- The readout path: the VMM L0 buffers and the ROC.
- The GBTx, SCA, optical links, FELIX, and the Sector Logic that receives the segments.
- The VMM analogue front end.

The readout path is logic and could be added. The rest is analogue, or comes from other
projects.

## Simulation

Every testbench checks itself and ends with `TB_RESULT checks=<n> failures=<m>`:

```
verilator --binary --timing --top-module tb_nsw_sector_trigger -y rtl -y tb +libext+.sv \
          rtl/nsw_pkg.sv tb/tb_nsw_sector_trigger.sv -o sim && ./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_tds_scrambler` | scrambler against a bit-serial model, through the descrambler |
| `tb_pad_tds` | edge detection and BCID |
| `tb_strip_tds` | band windows, ring-buffer age and overwrite, unknown bands |
| `tb_pad_trigger` | 64 patterns; 1- and 2-BC windows, masks, band limit and split bands, OCR mode |
| `tb_router` | routing, null packets and all three outer delays |
| `tb_art_asic` | all four modes, dead time, more than eight hits, BCR |
| `tb_nsw_sector_trigger` | the whole sector over 1200 BCs at 64 pad patterns (all other sizes at their defaults) |
| `tb_nsw_full` | the same test on the unmodified top: 4700 patterns, 1200 BCs |

`tb_nsw_sector_trigger` covers the following:
- Stimulus: random sTGC tracks (one to six per event, sometimes with a missing pad layer)
  and MM tracks, an ART burst of ten hits, and hits inside the ART dead time.
- Phases: OCR start, normal running, 2-BC window, duplicate removal with MM phi, ignore-MM
  and ignore-sTGC.
- Checks: pad bands, null packets, every sTGC and MM segment value, ART hit counts, and the
  merged output against a reference model of the merge.
- Coverage: it counts each mechanism (OCR start, band limit, split band, 2-BC window, null
  packet, dead time, ART overflow, duplicate, MM phi, both ignore options) and fails if one
  never happened.

The sTGC processor, the MM processor and the merge have no separate testbench. They are
verified through this sector test.
