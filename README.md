# A full-mesh, time-multiplexed track-trigger tower processor in SystemVerilog

A Level-1 track trigger has to reconstruct charged-particle tracks from the
silicon tracker for every bunch crossing (BX), that is 40 million times a
second, within a few microseconds. This design tackles the problem in two
ways:

- **Regional multiplexing.** The detector is cut into trigger towers.
- **Time multiplexing.** Inside one tower, successive bunch crossings are dealt
  round robin to many identical processing engines. Each engine therefore gets
  TMUX × 25 ns to finish one event.

The boards that make up a tower processor are connected as a **full mesh**.
Every board receives the stubs of part of the tower's detector modules for
every BX. It keeps the crossings it owns and sends each other crossing
directly to the board that owns it.

Inside each engine, track finding runs in two steps:

1. An **associative memory** (AM) compares coarse hit positions, called
   superstrips, against a bank of precomputed track patterns. The patterns that
   match are called roads.
2. FPGA logic takes each road, forms every combination of one stub per layer,
   and runs a **linearized χ² fit** on each combination. It then removes
   duplicate tracks.

This repository gives RTL for the digital part of that chain. The chain runs
from stub words on the board input links to fitted, de-duplicated tracks at the
output of each engine. The defaults are those of the demonstrator system the
architecture was built as:

- ten pattern-recognition boards (PRBs);
- two pattern-recognition mezzanines (PRMs) per board, so TMUX = 20;
- forty input links per board;
- 1024 patterns per mezzanine;
- at most 200 roads per event;
- four fitters per mezzanine.

The design does not include:

- the serial links themselves (transceivers, word alignment, unpacking of the
  front-end format);
- the board hardware.

The backplane lanes are stood in for by a simple latency model.

## Data words and the end-of-event marker

Every stream in the design uses the same `stub_word_t` (defined in `rtl/tt_pkg.sv`):

| field | bits | meaning |
|---|---|---|
| `eoe` | 1 | this word is the end-of-event marker of `bx` on this stream |
| `bx` | 12 | bunch crossing the word belongs to |
| `stub.layer` | 3 | detector layer 0..5 |
| `stub.module_id` | 8 | module within the layer of the tower |
| `stub.strip` | 10 | strip within the module |
| `stub.zseg` | 4 | segment along z within the module |
| `stub.bend` | 4 | stub bend (carried, not used) |

Streams use valid/ready handshakes. A word moves on a rising edge when both
`valid` and `ready` are high. A source must hold a word steady until it is
taken.

Every stream sends, for every BX it carries, its stubs followed by exactly one
marker. That holds even when a crossing has no stubs, in which case the marker
is sent alone.

Markers are what make merging safe. Whenever several streams are merged into
one, the merge forwards stubs from any input. The marker of a BX, however, is
passed on only once every input shows that marker at its head. It then goes
out once. This "marker barrier" guarantees two things:

- every stub of a BX arrives downstream before the marker that closes it;
- a mezzanine knows an event is complete when all six of its layer streams
  show the marker.

## Data delivery: which board gets which crossing

The owner of a crossing is set by its BX number:

```
slot  = bx mod TMUX
board = slot / PRMS_PER_PRB      (0 .. N_PRB-1)
prm   = slot mod PRMS_PER_PRB    (mezzanine on that board)
```

This matches the round-robin scheme of the architecture. The exact formula is
this design's choice.

One board (`prb`) is made of two stages:

- **`bx_demux_merge`** puts a small FIFO on every input link. It computes the
  owner of each head word and sends it to one of N_PRB output ports:
  - port 0 is the local path;
  - port j is the mesh lane to board `(PRB_ID + j) mod N_PRB`.

  The port number `(owner - PRB_ID) mod N_PRB` plays the role of the "rotator"
  of the original firmware. Each port has its own round-robin arbiter over the
  inputs, so up to N_PRB words move per cycle. An assertion checks that no
  input is ever popped by two ports at once. Markers follow the barrier rule:
  - a marker of a BX owned by board *b* goes out once, on the port of *b*, when
    all forty links show it;
  - the markers of a board's own crossings take the local path.
- **`layer_demux_merge`** has N_PRB sources: the local path plus the N_PRB-1
  receive lanes. It sorts their stubs into one FIFO per (mezzanine, layer), for
  2 × 6 = 12 streams in all. When every source shows the marker of a BX, the
  marker is written into all six layer FIFOs of the owning mezzanine in the
  same cycle.

Receive lane j-1 of a board carries what board `(PRB_ID - j) mod N_PRB` sent on
its transmit lane j-1. `tower_processor` wires these with one `mesh_link` per
ordered pair of boards. `mesh_link` is a behavioural stand-in for a backplane
lane: an in-order, lossless pipeline of `LINK_LAT` cycles that stalls as a
whole.

Because every crossing is closed on every link, a board sends a marker to each
other board for every crossing that board owns. This holds even if it had no
stubs for it. The owner therefore never waits for a board that has nothing to
say.

## Inside a mezzanine

`prm` handles one event at a time. It has four phases:

```
        six layer streams (from the PRB FIFOs)
                 |
   LOAD   local_to_ssid ──► am_pram (hit flags)      one stub per layer per cycle
                 └────────► data_organizer (store)
                 ... until all six streams show the marker
   READ   am_pram roads ─► road_to_ssid ─► data_organizer lookup ─► local_to_global
                 ─► round robin to N_TF lanes: comb_builder ─► track_fitter
                 ─► round-robin merge ─► duplicate_removal
                 ... until the memory is done and every stage is empty
   FLUSH  duplicate_removal sends the surviving tracks out
   CLEAR  hit flags and organizer emptied, evt_done pulses with the BX
```

The stubs of the next event wait in the board's layer FIFOs until LOAD comes
round again. The back-pressure from a busy mezzanine therefore reaches back
through the layer FIFOs, the mesh and the BX sort, up to the input links.

### Superstrips (`local_to_ssid`)

A superstrip is a group of neighbouring strips in one module and one z bin. The
ID is:

```
zbin = zseg * NZ >> 4                 (NZ = 8 bins along z)
ssid = ((module * NZ + zbin) << 7) + (strip >> SS_SHIFT[layer])
```

`SS_SHIFT = {3,3,4,4,5,5}` makes superstrips 8, 8, 16, 16, 32 and 32 strips
wide from the inner to the outer layer. The ID is registered, so the latency is
one cycle.

The eight z divisions follow the chosen bank configuration. The widths in
strips are this design's own: the original sizes are given only as fractions of
a measured position spread.

### Associative memory (`am_pram`)

The bank holds NPAT patterns, each with six superstrip IDs, and is written
through a plain load port.

**During LOAD,** each stub's superstrip is compared against every pattern in
the same cycle. A match sets that pattern's hit flag for that layer. The flags
are sticky for the event.

**At `start`,** a pattern fires if at least THRESH = 5 of its six flags are
set. Fired patterns are read out as roads, one per cycle, lowest address first.
After MAX_ROADS = 200 roads, any remaining fired patterns are dropped. Each one
costs one cycle and is counted in `n_dropped`. `clear` resets the flags.

This is an emulation of an AM chip in FPGA logic, as in the demonstrator. The
production bank would need about 1.5 million patterns in dedicated AM ASICs.
That is far more than this RTL holds; see the workload list below.

### From roads to stub combinations

- **`road_to_ssid`** holds a second copy of the bank. It turns a road address
  back into its six superstrip IDs.
- **`data_organizer`** stores every stub of the event per layer: up to 64 per
  layer, with its superstrip ID. For a road, it compares all stored entries
  against the road's superstrips in parallel. It returns, per layer:
  - the first `K_PER_SS = 4` matches, each with its index in the store;
  - their count;
  - a truncation flag if there were more.

  Stubs beyond 64 in a layer are lost and counted.
- **`local_to_global`** converts each returned stub to global coordinates with
  per-module and per-layer tables:

  ```
  phi = phi0[layer][module] + strip * phi_pitch[layer]
  z   = z0[layer][module]   + zseg  * z_pitch[layer]
  ```

  Geometry and alignment corrections live in the `phi0`/`z0` tables.

- **`comb_builder`** walks a mixed-radix counter over the stubs of each layer.
  It emits one combination per cycle, with no gap between roads:
  1. first, all combinations that use all six layers;
  2. then, for k = 0..5, all combinations that skip layer k.

  A set is only visited if each of its layers has at least one stub. A road with
  n_l stubs in layer l yields Π n_l + Σ_k Π_{l≠k} n_l combinations. The
  five-layer sets are what make the design tolerant of a missing or
  mis-measured stub. They are also the main source of duplicate tracks.

Roads are dealt round robin to the N_TF lanes as soon as a lane's builder is
free.

### The linearized fit (`track_fitter`)

Inside one road a track's parameters, and the constraints a true track
satisfies, are linear in the stub coordinates. The twelve coordinates are x =
(φ₀, z₀, …, φ₅, z₅); a skipped layer contributes zeros. The fitter evaluates,
for every row r of a constant matrix selected by the combination type t (skipped
layer 0..5, or 6 for none):

```
y_r = (Σ_c V[t][r][c] · x_c) >>> 12  +  C[t][r]
rows 0..3  : track parameters
rows 4..11 : constraints F_i
chi2       = Σ F_i²
pass       = chi2 ≤ chi2_cut · ndof       (ndof = 8 for six layers, 6 for five)
```

Constants are 18-bit signed with 12 fraction bits. They are written at run time
through the `coef_*` port; column 12 writes the offset C. In a real system they
come from a principal-component analysis of simulated tracks.

The fitter is a four-stage pipeline, one combination per cycle:

1. products;
2. row sums;
3. squares;
4. χ² and cut.

A combination accepted at edge n is taken from the output at edge n+4 at the
earliest. When the output is blocked, the whole pipeline stalls.

A single constant set per combination type is used for the whole bank. The
original scheme allows one set per road, or per small region; holding that
would need a table indexed by road.

### Duplicate removal (`duplicate_removal`)

Two tracks are duplicates when they use the same stub in at least N_SHARED = 3
layers. "The same stub" means the same layer and the same organizer index.

Passing tracks arrive one per cycle, and each is compared against every track
held so far:

- **No conflict:** the track is stored, up to MAX_TRK = 32. Further tracks are
  dropped and counted in `n_overflow`.
- **Conflicts, and the new track fits better than every one of them:** it
  replaces all of them.
- **Otherwise:** it is dropped.

"Better" means lower χ² per degree of freedom. This is computed exactly by
cross-multiplying, `chi2_a · ndof_b < chi2_b · ndof_a`, so five- and six-layer
fits compare fairly.

At the end of the event (`flush`) the survivors are sent out, lowest slot first.
Of the two duplicate-removal methods considered for this architecture, the
shared-stub one is used here. It needs no particle-dependent resolutions, but
it does need the stub indices carried through the fit; `track_t` carries them.

## Timing

At the default parameters, once the first stub is taken:

| stage | cycles |
|---|---|
| `local_to_ssid` | 1 |
| AM hit flags | 1 |
| `bx_demux_merge` / `layer_demux_merge` | 1 per FIFO stage plus arbitration |
| `road_to_ssid`, organizer lookup, `local_to_global` | 1 each |
| combination builder | 1 per combination, no gap between roads |
| fitter | 4 |
| `mesh_link` | `LINK_LAT` = 4 |

Each mezzanine processes one event at a time. Its cycle count per event is
roughly: stubs of the fullest layer, plus roads, plus combinations divided by
N_TF, plus surviving tracks, plus about 10.

At a 250 MHz clock a mezzanine has 125 cycles per event, because it owns one
crossing in twenty. That is comfortable for the tens of roads and about 200
combinations per tower expected at 200 pile-up. It is not enough for the
200-road limit filled in every event. In that case the layer FIFOs fill and
back-pressure reaches the links.

The original firmware overlaps successive events in a mezzanine; this RTL does
not. No clock frequency is fixed by the design.

## Configuration

`tower_processor` broadcasts one set of configuration ports to every
mezzanine:

- `bank_*` writes the pattern bank (both copies);
- `lut_*` writes the module origins;
- `pitch_*` writes the per-layer pitches;
- `coef_*` writes the fit constants;
- `chi2_cut` sets the cut.

Each mezzanine reports the following:

| kind | outputs | what it covers |
|---|---|---|
| track stream | `trk_valid`/`trk_ready`/`trk_data`, plus `trk_bx` | fitted, de-duplicated tracks |
| end of event | `evt_done`, `evt_bx` | one pulse per finished event |
| per-event counters | `n_roads`, `n_roads_dropped`, `n_combos`, `n_fits_passed` | the last event |
| running counters | `n_dup_removed`, `n_stub_overflow`, `n_trk_overflow` | everything since reset |

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_PRB` | 10 | demonstrator: ten boards per tower |
| `PRMS_PER_PRB` | 2 | demonstrator: two mezzanines per board |
| `TMUX` | 20 | demonstrator time-multiplexing factor |
| `N_IN` | 40 | demonstrator: forty input links per board |
| `NPAT` | 1024 | demonstrator AM emulation |
| `THRESH` | 5 | five of six layers |
| `MAX_ROADS` | 200 | road limit studied for high pile-up |
| `N_TF` | 4 | demonstrator: four fitters per mezzanine |
| `LINK_LAT` | 4 | own choice |
| `DO_DEPTH`, `K_PER_SS` | 64, 4 | own choice |
| `MAX_TRK`, `N_SHARED` | 32, 3 | own choice |
| bit widths in `tt_pkg` | | own choice |

## What differs from the original system

- **Not included:**
  - serial links (transceivers, alignment), unpacking of the front-end data
    format, and board hardware;
  - the "stub removal" stage drawn between coordinate conversion and the
    fitters, whose function is not described;
  - Gray-code and ternary merging of adjacent patterns;
  - the Hough-transform road filter and the bend-in-pattern variant, which were
    studied only as alternatives.
- **Order of coordinate conversion and storage.** The stage diagram puts
  coordinate conversion after the data organizer; the text says stubs are
  converted before they are stored. This design follows the diagram.
- **Bank size.** The AM is an FPGA emulation of 1024 patterns, not the 1.5M
  patterns of the production bank.
- **Event overlap.** A mezzanine does not overlap events.
- **Fit constants.** Fit constants are per combination type, not per road.
- **Own choices.** The BX-to-board formula, all formats and widths, the marker
  protocol, the road order (by address), and the duplicate-removal threshold
  and store size are this design's own.

## Verification

Every block has a self-checking testbench in `tb/` that compares against values
computed independently in the testbench. Each ends by printing
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_local_to_ssid` | IDs against a reference formula |
| `tb_am_pram` | fired roads, order, limit and drop count against a software match |
| `tb_road_to_ssid`, `tb_data_organizer`, `tb_local_to_global` | lookup results against models, under back-pressure |
| `tb_comb_builder` | exact combination sequence and counts |
| `tb_track_fitter` | bit-exact parameters, χ² and pass flag against a model of the arithmetic, and the 4-cycle latency |
| `tb_duplicate_removal` | survivors against a model of the rule |
| `tb_bx_demux_merge`, `tb_layer_demux_merge`, `tb_prb` | every stub on exactly the right output, before its marker; markers in BX order |
| `tb_mesh_link` | order, integrity and latency |
| `tb_prm` | whole events in a toy geometry (see below) |
| `tb_tower_processor` | end to end on a 3-board, 6-mezzanine tower (see below) |
| `tb_tower_full` | the same end-to-end test at the default size (see below) |

**The toy geometry.** `tb/tb_geom_pkg.sv` sets every module origin to zero and
the pitches to 1 (φ per strip) and 64 (z per segment). Its fit constants make
the parameters "φ and z at the first used layer" plus their slopes. The
constraints are the collinearity of consecutive layer triplets. A track whose
strips and segments are linear in the layer number therefore fits with χ² = 0.
Noise stubs placed one to seven strips away, in the same superstrip, produce
combinations that either fail the cut or are removed as duplicates.

**`tb_prm`** checks, for every event:

- that exactly the true tracks come out;
- the layers used, the stub indices, χ² = 0 and the first-layer φ and z;
- the road count;
- the combination count predicted from the stub counts.

**`tb_tower_processor`** runs the same kind of check. It also counts that each
of these mechanisms actually happened:

- stubs crossing the mesh;
- stubs on the local path;
- roads dropped at the limit;
- duplicates removed;
- five-of-six tracks;
- fits rejected by the cut;
- back-pressure on the input links;
- back-pressure on the track outputs.

**`tb_tower_full`** runs the same end-to-end test on the tower processor at its
default parameters: one round of 20 crossings.
Verilator needs about seven minutes to build this model on four cores. The
simulation then takes seconds.

To simulate with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_prm \
    -y rtl -y tb rtl/tt_pkg.sv tb/tb_geom_pkg.sv tb/tb_prm.sv
obj_dir/Vtb_prm
```

List the two packages first. Reset or initialise everything that is read: the
designs reset all control state, but memories (pattern bank, tables, organizer
store) are only meaningful once written.

## Files

- `rtl/tt_pkg.sv`: shared types and widths.
- `rtl/tower_processor.sv`: the top.
- `rtl/prb.sv`, `rtl/bx_demux_merge.sv`, `rtl/layer_demux_merge.sv`,
  `rtl/mesh_link.sv`: data delivery.
- `rtl/prm.sv` and its stages `local_to_ssid`, `am_pram`, `road_to_ssid`,
  `data_organizer`, `local_to_global`, `comb_builder`, `track_fitter`,
  `duplicate_removal`: the pattern-recognition engine.
- `rtl/sync_fifo.sv` and `rtl/rr_pick.sv`: helpers.
