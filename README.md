# MID user logic for the ALICE Common Readout Unit

The muon identifier (MID) of ALICE reads its resistive plate chambers
continuously. Each of 16 optical GBT links brings the data of one half of a
regional crate: eight local trigger cards and the regional card, each sending
its own stream of bytes. The links are not aligned in time. The data of one
bunch-crossing snapshot (a "dataset") therefore reaches the FPGA at different
moments on different links, in a card-oriented format, and without the
heartbeat number that the offline (O2) system needs.

This RTL is the user logic of the FPGA that gathers those streams:

1. It cuts each link's 80-bit word into byte lanes and captures every card's
   frame.
2. It rewrites each local card's hits as four 64-bit O2 words, one per
   detection plane (MT11, MT12, MT21, MT22). Each word carries a geometry
   header taken from a lookup table.
3. It waits until every card of every link has delivered one dataset.
4. It then merges them through three memory stages into one ordered stream:
   plane by plane, crate by crate and card by card.

Cards or links that will not send anything are replaced by dummy words. The
dummies keep the pipeline in step and are dropped at the output. A small
tracker turns resets of the front-end bunch counter into a heartbeat ID.

```
 16 x GBT (80 bit) ──► data extraction ──► reformat (O2 header LUT) ──► 2-D FIFO ──┐
       per link          (9 regs/card)        4 words per card          4 x 8 FIFOs │ x16
                                                                                    │
  gbt_fault_i, detector map ──► lane mask ─────────────────────────────────────────┘
                                                                                    │ global AND
                                                                                    ▼
       Stage 1 burst (8 clk) ──► Stage 2: 32 dual-port RAMs 16x64 ──► Stage 3: 4 RAMs 128x64 ──► 64-bit out
                                 (crate x plane)      128 words/plane    512 words, plane order
```

Everything runs on one clock (`clk_i`) with one active-low asynchronous reset.
The top is `mid_user_logic`.

## Link format and data extraction

The 80-bit GBT word of a link has ten byte lanes:

| Bytes | Lane |
|---|---|
| 0–3 | local cards 0–3 |
| 4 | regional link "RL" |
| 5–8 | local cards 4–7 |
| 9 | regional link "RH" |

A lane is sampled when `is_valid_i` and `is_data_i` are both high. Each lane
has its own `mid_frame_parser`, so the ten lanes are independent and may be at
different points of their frames.

A frame starts with a byte that has bit 7 set (the status byte). Then follow:

- a trigger byte;
- the 16-bit internal bunch counter, high byte first;
- an ID byte: card ID in bits 7:4 and the fired-plane mask in bits 3:0
  (bit 0 = MT11).

A local card then sends four bytes for each fired plane, lowest plane first:
BP high, BP low, NBP high, NBP low. BP and NBP are the bending-plane and
non-bending-plane strip patterns. A regional card stops after the ID byte.
So a local frame is 5 to 21 bytes long. Each card ends up with nine registers:
status, trigger, bunch counter, ID, fired mask and four plane strip registers.

Each byte is written into its register on the clock it is sampled. A one-clock
`done` pulse follows the last byte.

The byte order inside a frame is this design's own. The published description
names the fields but not their order.

## O2 words and the geometry lookup

Every local-card frame becomes four 64-bit words, one per plane. Each plane
has its own header synthesiser (`mid_o2_header_synth`), and there is one set
per lane.

| Bits | Field |
|---|---|
| 63 | dummy marker (this design's choice) |
| 62:51 | zero |
| 50:44 | DetElemID, 1..72 |
| 43:36 | fired column |
| 35:32 | position of the card in that column inside its RPC |
| 31:16 | NBP strips |
| 15:0 | BP strips |

The header fields follow the published O2 layout. The struct is `mid_pkg::o2_word_t`.

The header synthesiser turns (regional ID, local ID) into the four headers,
one clock after the request. It uses a 128-entry table that is built at
elaboration from functions in `mid_pkg`:

- **Cards in the detector.** One detector half has 117 local cards in 7
  columns. The columns are counted 0–6 from the beam side. Each column is cut
  by nine RPCs, numbered bottom to top 14, 15, 16, 17, 00, 01, 02, 03, 04.
  `cards_in(col,row)` gives how many cards of a column sit in each RPC, for
  example 1,2,2,3,0,3,2,2,1 for column 0. `loc_geometry(n)` numbers the cards
  column by column and bottom to top, and returns the RPC, column and
  position of card `n`.
- **Cards per crate.** `crate_card(crate, loc)` maps the eight regional crates
  onto card numbers:

  | Crate | Cards |
  |---|---|
  | 0 | 1–16 |
  | 1 | 31–38, then 53–60 |
  | 2 | 17–30 |
  | 3 | 39–52 |
  | 4 | 61–76 |
  | 5 | 77–92 |
  | 6 | 93–108 |
  | 7 | 109–117 |

  Crates 2, 3 and 7 have empty slots.
- **DetElemID** = 18·plane + RPC + 1.

All three were read off the published detector drawing, and the DetElemID
formula is an assumption. To match a different map, edit these functions; the
table follows them.

Regional IDs 8–15 (the other detector half) and empty slots give headers with
the dummy bit set. `mid_reformat` also sets the dummy bit on every plane that
the card did not fire. A card therefore always produces exactly four words.

## Synchronisation: the 2-D FIFO

This is the part that makes the misaligned links line up.

Each link has a `mid_fifo_2d`: 8 cards × 4 planes of `mid_loc_fifo`. Each FIFO
is first-word-fall-through, 64 × 64 bits by default (`FIFO_DEPTH`).

A readout controller per plane (`mid_ro_ctrl`) forms the *local AND*: every
lane of that plane holds a word, or is masked. The four planes are ANDed into
the link's `gbt_fifo_sync_o`. The top ANDs the 16 link flags into the
*global* sync (`sync_o`).

Stage 1 starts on a clock where both of these hold:

- global sync is high;
- Stage 2 is not busy.

All 16 links and all 4 planes then read in lockstep for 8 clocks. On each
clock every plane reads one lane, lane 7 first down to lane 0. So one
dataset of the whole detector half leaves the FIFOs in 8 clocks. Later
datasets wait in the FIFOs, which absorb the skew between links.

A write into a full FIFO is dropped and flagged on `fifo_overflow_o`.

Timing: the first burst word appears two clocks after the last missing word
is written.

## Stage 2: merging the two links of a crate

`mid_s2_readout` has 32 dual-port RAMs (`mid_dpram`, 16 × 64), one per crate
and plane.

- **Writes.** During a Stage 1 burst, the even link of crate *c* writes
  addresses 0–7 through port A. The odd link writes addresses 8–15 through
  port B. The address is the lane the word came from. Both links write in the
  same clock, which is why the RAMs are dual-port.
- **Busy.** The first burst clock raises `s2_s3_busy_o` (exported as
  `s2_busy_o`). While it is high, Stage 1 cannot start again.
- **Read-out.** When the burst is over and Stage 3 is not busy, port A reads
  the RAMs with the four planes in parallel. Each plane gives 128 words in
  order: crate 0 card 0 first, up to crate 7 card 15. `s23_data_v_o` is high
  during these words.
- **Release.** Busy drops together with the last word.

Timing: with Stage 3 idle, the last word leaves 131 clocks after the last
Stage 1 word.

## Stage 3: one output stream

`mid_s3_readout` has four single-port RAMs (`mid_spram`, 128 × 64), one per
plane.

- **Writes.** The 128-word streams from Stage 2 are written in parallel. The
  first write raises `s3_busy_o`.
- **Read-out.** Two clocks after the last write, the four RAMs are read one
  after another: MT11, then MT12, MT21 and MT22. That gives 512 consecutive
  clocks on the single 64-bit bus `s3_ram_data_o`.
- **Dummies.** Real words have `s3_ram_data_v_o` high. Dummy words are
  rejected: valid stays low and `s3_dummy_o` shows them.
- **Release.** `s3_busy_o` drops with the last word.

Stage 3 takes no back-pressure.

Timing: the last word leaves 513 clocks after the last write.

## Zero suppression

Three cases produce no real data, and all three are handled by dummy words
rather than by stalling:

1. **A plane that a card did not fire.** `mid_reformat` sets the dummy bit
   of that word.
2. **A broken or faulty link.** `gbt_fault_i[l]` comes from the CRU core.
3. **A slot with no card.** This comes from the detector map.

For cases 2 and 3, `mid_zs_mask` produces a registered mask for each link.
Masked lanes count as holding data in the sync AND, and they read out a word
with only the dummy bit set. A dead link thus never blocks the global sync.

All dummy words are dropped at the Stage 3 output. Dropping empty strip
patterns of working cards (payload-level zero suppression) is not done.

## Heartbeat ID

The front end does not send the heartbeat number, but its bunch counter
restarts at each heartbeat frame. `mid_hbid_tracker` is fed with the RL frames
of link 0. It treats a bunch counter that is not larger than the previous one
as a new heartbeat frame. It then increments `hbid_o` (32 bits, start value
`HBID_INIT`) and pulses `new_hbf_o`. `trigger_o` holds the last trigger byte.

These outputs are meant for a raw data header. No such header is built (see
below). The HBID belongs to the dataset being extracted, which is a few
hundred clocks ahead of the one leaving Stage 3.

## Departures and open points

- **Not built.** Packetiser and raw data header (8 kB pages) are missing.
  Their field layout is not published. The output is the bare 64-bit
  data/valid stream with `hbid_o` and `trigger_o` beside it.
- **Own choices.** The frame byte order, the start bit, the lane-to-card
  order (bytes 0–3 = cards 0–3, 4 = RL, 5–8 = cards 4–7, 9 = RH) and the
  dummy marker are this design's.
  - The published link drawing shows 20 data bytes per local lane. The 21
    used here follow from 5 header bytes and 4 × 32 strip bits.
- **Bus width.** The words are 64 bits, as the text says. One drawing of the
  FIFO block prints 56.
- **Plane order.** Stage 3 sends MT11 first, as the text says. One timing
  drawing suggests MT22 first.
- **Busy polarity.** Stage 2's handshake is a *busy* signal: high means "do
  not send". The text calls the same signal "ready" in one sentence.
- **Latencies.** These were measured with the testbenches. The published
  figures come from an implementation whose insides are not described.

  | Path | Here | Published |
  |---|---|---|
  | Synchronisation | 2 clocks | 14 clocks |
  | Stage 2 | 131 clocks | 133 clocks |
  | Stage 3 | 513 clocks | 520 clocks |

- **HBID.** It uses only the FEE bunch-counter resets. The bunch crossing ID
  of the trigger system is not used.
- **Link count.** The number of links (16), crates (8) and planes (4) are
  constants in `mid_pkg`. Stage 2 and Stage 3 are sized from them, but only 16
  links have been simulated.
- **FIFO depth.** 64 is kept as the default. A depth of 8 is believed to be
  enough; set `FIFO_DEPTH` to 8 to save memory.

## Files

| Area | Files |
|---|---|
| Shared | `rtl/mid_pkg.sv`: constants, O2 word struct, geometry functions |
| Extraction | `mid_frame_parser`, `mid_data_extraction` |
| Reformat | `mid_o2_header_synth`, `mid_reformat` |
| Synchronisation | `mid_loc_fifo`, `mid_ro_ctrl`, `mid_fifo_2d`, `mid_zs_mask` |
| Stages 2 and 3 | `mid_dpram`, `mid_s2_readout`, `mid_spram`, `mid_s3_readout` |
| Heartbeat | `mid_hbid_tracker` |
| Top | `mid_user_logic` |

Each module has a self-checking testbench `tb/tb_<module>.sv`. `tb/mid_tb_pkg.sv`
holds frame-building helpers.

`tb_mid_user_logic` drives the full-size top with 16 links and default
parameters through six datasets. The links are skewed, link 5 is marked
faulty, some planes are unfired and the bunch counter restarts once. It
checks every output word against a model and counts:

- sync waits;
- Stage 2 and Stage 3 stalls;
- each kind of dummy;
- heartbeat steps.

## Simulating

Use Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mid_pkg.sv tb/mid_tb_pkg.sv tb/tb_mid_user_logic.sv --top-module tb_mid_user_logic
./obj_dir/Vtb_mid_user_logic
```

Change the testbench name to run another one. Each testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog that ends the
run if it hangs.

The top-level testbench takes about two minutes to build and well under a
second to run. The unit testbenches build in seconds.
