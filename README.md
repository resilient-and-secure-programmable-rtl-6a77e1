# Samsara: replicated accelerator tiles under a trusted hardware controller

Accelerators and softcores loaded into the programmable logic (PL) of an
MPSoC can be updated, swapped and reconfigured at run time. That flexibility is
also why they are harder to trust than fixed-function silicon. This design
does not trust any single one of them. Every request is run by `2f+1` replicated
*tiles*, and a small trusted *controller* compares their replies:

- if all tiles agree, the reply goes back to the application;
- if only `f+1` agree, the reply still goes back, but the disagreeing or late
  tiles are reloaded (*partial-mode rejuvenation*);
- if fewer than `f+1` agree, nothing is delivered and the whole compute platform
  is reloaded (*full-mode rejuvenation*).

Reloaded tiles pick up the application state from the controller. A tile can
also come back as a different but equivalent version (diversity), in a
different partition (relocation), or as part of a larger or smaller replica
set (scaling).

The agreement protocol, called H-Quorum here, needs only one message from the
controller to every tile and one reply from each tile. It works because the
controller, not a peer, orders the requests and because the messages travel
through memories whose write access is fixed in hardware.

This repository holds the synthesizable controller side of the platform and
everything that sits between the controller and the compute cores: the
PL memories, the per-tile protocol engines, SHA-256 units, the checkpoint
SRAM, the voter, the rejuvenation policy and a rate-limiting request port. The
compute cores themselves, the processor that loads bitstreams (MP-Boot), the
bitstream library and the tamper-resistant configuration store are outside
the RTL. Their signals are ports of `samsara_top`.

## Block structure

```
 application ──req/rsp──► request_frontend ─► hq_controller ──mb_cmd/mb_done──► MP-Boot (external)
                            (rate limit, FIFO)    │  │  │
                                                  │  │  └── checkpoint_sram (state checkpoints)
                           owner R/W port         │  └──── uid_counter, hq_timer, majority_voter,
                                ▼                 │        rejuv_policy, sha256_core
                         PLM-C (plm)              │ read-only port on each tile PLM
            ┌──────── r: requests                 ▼
            │         p: controller log    ┌───────────────┬───────────────┐
            │         s: state header      │ tile 0        │ tile 1        │ tile 2
            │                              │ PLM-0 (plm)   │ PLM-1         │ PLM-2
            └─ read-only port per tile ──► │ tile_agent    │ tile_agent    │ tile_agent
                                           │  + sha256_core│               │
                                           │ cmp_* ─► compute core (external)
```

Every PL memory (`plm`) has three BRAMs (`plm_bram`): **r** for requests, **p**
for replies or log, and **s** for state. Each BRAM sits behind a Reset IP
(`plm_reset`). The entity that owns a PLM has the only write port on it.
Everyone else gets read ports:

| memory | written by | read by |
|---|---|---|
| PLM-C | controller | each tile, through its own port |
| PLM-i | tile i's agent | the controller |

A Byzantine tile therefore cannot change a request, another tile's reply or
the controller's log. It can only lie in its own PLM, and the vote catches
that. Because of this, messages need no signatures, only digests against
corruption on the way.

## Message layout

Messages are 256 bits, stored as eight 32-bit words. Each request number owns
a *slot* of 32 words in every Req/Rep BRAM. The slot index is the uid modulo
`LOG_DEPTH`, and the default `LOG_DEPTH` is 100 slots.

| word in slot | PLM-C r (request) | PLM-i p (reply) | PLM-i r (tile log) | PLM-C p (controller log) |
|---|---|---|---|---|
| 0 | uid | uid | uid | uid |
| 1-8 | request | reply | request | request |
| 9-16 | SHA-256(request) | SHA-256(reply) | – | agreed reply |
| 17 | – | tile ID | – | – |

The uid word is always written last. A reader that sees the uid it expects
therefore finds the rest of the slot complete. uid 0 means "empty", so uids
start at 1 and the uid counter saturates rather than wraps. No uid is ever
handed out twice.

The State BRAM (16 words) holds the header of the application state:

| word | content |
|---|---|
| 0 | next uid |
| 1 | next slot |
| 2 | rounds logged so far |
| 3-10 | history digest h |

After every delivered round of a stateful application, the history digest is
updated as `h' = SHA-256(h || reply)`. That is two compression blocks,
whatever the log length. h is the compact fingerprint that a reloaded tile
receives with the state.

## One round of H-Quorum

Each numbered step is one stage of a round; the tile agents work in parallel
and are not in lock step.

1. **Queue and number.** The controller pops a request from the front-end FIFO
   and takes the next uid.
2. **Write the request.** The controller hashes the request (66 cycles). It
   writes request and digest into the slot in PLM-C r, uid word last, and arms
   the reply timer (`REPLY_TIMEOUT`).
3. **Tile reads and checks.** Every tile agent polls the uid word of the slot it
   expects. When its uid appears, it reads the 16 words and recomputes the
   digest. On a mismatch it pulses `hash_err` and keeps polling.
4. **Tile computes and replies.** The agent hands the request to its compute
   core (`cmp_start` … `cmp_done`). It hashes the reply and writes reply, digest
   and tile ID to its own PLM, uid last. It also logs the request.
5. **Controller collects.** The controller polls the active tiles round robin.
   For each tile whose slot carries the uid, it reads the reply, recomputes the
   digest and checks the tile ID. Only a reply that passes both checks is
   valid.
6. **Vote.** When every active tile has answered, or the timer has run out,
   `majority_voter` counts equal valid replies. With `n` active tiles the
   quorum is `n/2+1`:
   - all agree → `RSP_OK`;
   - a quorum agrees → `RSP_DEGRADED` plus partial rejuvenation of the others;
   - no quorum → `RSP_FAIL` plus full rejuvenation. The application must send
     the request again.
7. **Log.** For stateful applications the round is logged in PLM-C p and folded
   into the history digest. The State header is then rewritten.
8. **Log wrap.** After `LOG_DEPTH` rounds the slot index wraps. The controller
   checkpoints the header to the SRAM and pulses `clear`. The Reset IPs then
   zero the Req/Rep BRAMs of every PLM, one word per cycle (3200 cycles at the
   default size).

With hashing on, the round trip takes about 750 cycles at the default size when
the compute core answers in 20-30 cycles. That is four SHA-256 passes on the
controller's critical path and two on each tile, plus single-word memory
accesses. The controller keeps one SHA-256 unit and uses it in turn for the
request, for each reply and for the history.

## Bootstrapping, rejuvenation and state transfer

The controller status is `ST_LOADING` whenever tiles are being (re)loaded. No
application request is accepted in that state.

**Bootstrapping.** Out of reset, the controller waits for PLM-C to be zeroed and
writes the initial header (next uid 1). It checkpoints the header, then sends
MP-Boot two commands: first the Bootloader, then the Tileloader for the
configured replica set. It restores the header to PLM-C and waits under
`READY_TIMEOUT` until every active tile reports Ready.

**Rejuvenation.**

1. The controller checkpoints the header.
2. `rejuv_policy` turns the set of tiles to reload into a Tileloader command
   (`tl_cmd_t`). The command carries:
   - the mask of tiles to load and the new active set;
   - a version per tile (Refresh keeps it, Diversify takes the next one);
   - a partition per tile (Replace keeps it, Relocate takes the lowest free
     partition);
   - the softcore type.

   With Scale set, the active set becomes the lowest `2·severity_f+1` slots,
   clamped to `[min_tiles, max_tiles]`.
3. MP-Boot performs the command. In this RTL that means holding the whole PL
   (`pl_full_rst_n`) or single tiles (`tile_rst_n`) in reset, then pulsing
   `mb_done`. A silent MP-Boot is asked again after `MB_TIMEOUT`.
4. The checkpoint is written back into PLM-C, highest word first. A full reload
   has wiped PLM-C.
5. The controller waits for Ready from all active tiles. Tiles still late at
   `READY_TIMEOUT` are reloaded again: in partial mode if they are a minority,
   in full mode otherwise.

With the proactive policy, one tile (round robin) is also reloaded every
`proactive_period` cycles of idle Ready time, even if it never misbehaved.

**State transfer** is what a reloaded tile agent does first:

1. Wait until the next-uid word of PLM-C s is non-zero. Because the restore
   writes the next uid last, this means the restore has finished.
2. Copy the 16 header words into its own State BRAM.
3. Take next uid and slot from the copy, and raise Ready.

No log matching is needed: the controller's copy of the state is the
reference.

The source description orders step 4 and step 5 the other way round in one
place: "set Ready, then transfer the checkpoint back". In another place it says
tiles report Ready once state transfer is done. This design follows the second
reading, because a tile cannot serve the right uid before it has the state.

## Request port and rate limiting

`request_frontend` sits in front of the controller and runs independently of
it. A flooding application therefore cannot hold up the agreement logic. The
front end takes requests into a 4-deep FIFO, but only while the status is
Ready. A request is consumed from the bus but ignored, with a `req_dropped`
pulse, when either rate rule is broken:

- it arrives less than `rl_min_gap` cycles after the previous accepted request;
- `rl_win_max` requests have already been accepted in the current fixed window
  of `rl_win_len` cycles. `rl_win_max = 0` switches this rule off.

## Configuration

`cfg_t` in `samsara_pkg` is the controller configuration. It is expected to
come from tamper-resistant storage and be held stable. It has these fields:

- `softcore`: the softcore type to load.
- `version`: the version to boot with.
- `min_tiles` and `max_tiles`: bounds on the replica set size.
- `stateful`: log rounds and keep the history digest.
- `policy`: four bits, `diversify`, `relocate`, `scale` and `proactive`.
- `severity_f`: the f used when scaling.
- `proactive_period`: cycles between proactive reloads.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LOG_DEPTH` | 100 | slots per Req/Rep BRAM; rounds between checkpoints |
| `HASH_EN` | 1 | SHA-256 digests on requests and replies (0: trust the wires, digests zero) |
| `REPLY_TIMEOUT` | 4000 | cycles the controller waits for replies |
| `READY_TIMEOUT` | 20000 | cycles it waits for Ready after a reload |
| `MB_TIMEOUT` | 1000000 | cycles it waits for MP-Boot (10 ms at 100 MHz) |
| `FIFO_DEPTH` | 4 | request FIFO depth |
| `MAX_TILES` (package) | 3 | tile slots (`2f+1`, f = 1) |
| `NUM_VERSIONS`, `NUM_RP` (package) | 2, 3 | versions per tile, reconfigurable partitions |
| `MSG_WORDS` (package) | 8 | 32-bit words per message (256 bits) |

Three tiles, three partitions with two versions each, 256-bit messages,
32-bit memory words, a 100-round checkpoint interval and a 100 MHz clock
follow the reference platform. The timeouts, FIFO depth, slot and header
layout are this design's choices.

## Departures and limits

- **Hardware controller.** The reference prototype runs the controller as
  software on a softcore and moves messages over an AXI4-Lite interconnect. Here
  the controller is an FSM, and each entity has dedicated point-to-point BRAM
  ports, so latencies are not comparable with the reference measurements.
- **Fixed message size.** Messages are fixed at 256 bits. Larger messages
  (512-1024 bits) need `MSG_WORDS`, `SLOT_STRIDE` and the SHA-256 padding
  helpers in `samsara_pkg` to be generalised.
- **What is checkpointed.** Only the 16-word State header is checkpointed, not
  the logged requests and replies; the history digest stands in for the log.
  The compute cores' own internal state is not transferred.
- **FAIL rounds.** A round without a quorum is not retried by the controller.
- **Wrap during rejuvenation.** If a log wrap coincides with a rejuvenation,
  the Req/Rep clear of that wrap is skipped. This is safe because uids are
  never reused, but stale slots remain until the next wrap.
- **External parts.** MP-Boot, the bitstream library, partial reconfiguration,
  bitstream authentication and the configuration store are represented only
  by ports. A tile "reload" is a reset of its agent, PLM and core.
- **Assertions.** Assertions use `disable iff (!rst_n)`. A linter notes that
  reset is then used both asynchronously and in a synchronous expression
  (SYNCASYNCNET); this is intended.

## Files and simulation

All modules live in `rtl/`, one per file; `samsara_pkg.sv` must be compiled
first. Each block has a self-checking testbench `tb/tb_<module>.sv`. Every
testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb/tb_samsara_top.sv` runs the whole platform with a 4-slot log and short
timeouts. Using behavioural models of MP-Boot (`tb/mpboot_model.sv`) and of
the compute cores (`tb/tile_core_model.sv`), it drives every mechanism at least
once and counts each one:

- boot;
- agreement;
- a Byzantine tile;
- a hung tile;
- two disagreeing tiles;
- log wrap with checkpoint;
- a lost MP-Boot command;
- a late Ready;
- a rate-limited request;
- proactive rejuvenation;
- scale-in and scale-out with relocation.

`tb/tb_samsara_full.sv` runs the top at its default parameters: 105 rounds
with a log wrap at 100, then a Byzantine tile and its partial reload.

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/samsara_pkg.sv tb/tb_samsara_top.sv --top-module tb_samsara_top
./obj_dir/Vtb_samsara_top
```

The same command with `tb_samsara_full` takes about ten seconds to build and
run.
