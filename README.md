# Readout supervisor core for a triggerless LHCb readout

The upgraded LHCb detector reads out every bunch crossing at 40 MHz. Even
without a hardware trigger, one central unit must still decide which crossings
are kept. It also has to keep thousands of front-end links in step and tell the
readout boards where each group of events goes. This unit is the *readout
supervisor*. Once per bunch crossing it produces one **TFC word** (timing and
fast control). The word carries the bunch identifier (BXID), the crossing type,
the trigger decision and the fast commands. Each accepted event also gets a
small record, the **TFC bank**, which goes to the event-filter farm.

This repository is a SystemVerilog model of the firmware core of such a
supervisor. It is written from the published description of the LHCb
supervisor firmware. The order of the blocks, what each block does, the
start-of-run sequence and the 65-crossing TAE window follow that description.
Widths, encodings, the register map, the word format and the inner workings of
the less-described blocks are this design's own. They are marked as such below
and in each file's opening comment.

## The word chain

There is one TFC word per 40 MHz cycle. Every stage adds a fixed number of
cycles, so any command reaches the links a constant time after its crossing:

```
orbit_in ─► bxid_counter ─┬─► filling_scheme_ram ──► bx_type
                          │
internal_trigger_gen[] ───┤
ext_trg_in, ECS trigger ──┼─► trigger_manager ─► tae_handler ─► latency_pipe (middle)
sync_cmd_gen (commands,   │                                          │
  trigger veto) ──────────┘                                          ▼
                       rb_throttle[N_RB], mep_throttle ─► throttle_handler
                                                                     │
                                  farm requests ─► mep_handler ◄─────┘
                                                       │      └──► tfc_bank ─► bank (to farm)
                                                       ▼
                                       latency_pipe (output) ─► async_cmd_gen ─► tfc_out
```

The latency from a crossing's BXID to the same word on `tfc_out` is fixed:

    1 (trigger manager) + MAX_HALF+1 (TAE) + mid+1 + 1 (throttle) + 1 (MEP) + out+1 + 1 (async)

Here `mid` and `out` are the two pipeline delay settings (register 8). With
the defaults MAX_HALF = 32 and both delays at 0, the latency is 39 cycles. The
bank leaves from the MEP output. So `bank` for an event appears one cycle after
the event word leaves the MEP handler, and `out+1` cycles before the word
reaches `tfc_out`.

The TFC word (`tfc_word_t` in `rs_pkg.sv`) carries these fields:
- BXID and the 2-bit crossing type;
- `trigger`;
- the synchronous commands: `bxid_reset`, `fe_reset`, `be_reset`,
  `header_only` and `synch`;
- `veto`;
- the calibration, NZS (non-zero-suppressed) and snapshot flags;
- `tae` and `tae_central`;
- a 6-bit trigger origin: internal, external, calibration, control system,
  TAE, random;
- the MEP fields `mep_accept` and `mep_dest`.

The real serial link format is not modelled. The word is a parallel port, and a
transceiver would serialise it.

## Bunch counting and the filling scheme

`bxid_counter` counts crossings from 0 to 3563 (`BX_PER_ORBIT`). The external
orbit pulse passes through a two-flop synchroniser and an edge detector. Each
pulse then loads a programmable offset and sends a one-cycle BXID reset into
the word. Once the counter has locked, a pulse at the wrong BXID sets an error
bit.

`filling_scheme_ram` is 224 words of 32 bits, as in the original firmware. It
holds 2 bits per crossing:
- 0 means empty-empty;
- 1 means beam 1 only;
- 2 means beam 2 only;
- 3 means beam-beam.

Crossing *b* sits in word `b/16`, bits `2*(b%16)+1 : 2*(b%16)`. The RAM is read
at the *next* BXID, so its registered output lines up with `bxid`. The control
system writes the RAM at register addresses 0x400 to 0x4DF.

## Trigger sources and the trigger manager

`internal_trigger_gen` (two instances by default) works in one of three modes:
- every *period* clock cycles;
- at one BXID, every *period* orbits;
- pseudo-random. A 32-bit LFSR steps every cycle, and the generator fires
  when its low 24 bits are below *period*. The rate is therefore
  *period*/2^24 of the crossings. These triggers carry their own origin bit.

Each generator can mark its triggers as calibration, as TAE or as NZS. It can
also issue a calibration command *without* accepting the event (the `accept`
bit). The trigger manager ORs the internal sources together with:
- the external trigger, which passes through a synchroniser and a rising-edge
  detector;
- a single trigger written by the control system.

It then applies a mask by crossing type. Last, it merges the synchronous
commands and registers the result as a TFC word. The start-of-run veto is not
applied here. It travels in the word's `veto` bit, and the throttle handler,
several pipeline stages later, removes the trigger. That handler therefore sees
the veto that belonged to that crossing, whatever the pipeline delays are.

## Start-of-run sequence (`sync_cmd_gen`)

This is the part with the most timing subtlety. Front ends and readout boards
must agree on which word is which before data is trusted. A start-of-run
command, sent as a rising edge on control bit 0, runs this sequence:

| state  | words sent                  | leaves when |
|--------|-----------------------------|-------------|
| RESET  | FE reset and BE reset, 1 cycle | next cycle |
| HEADER | Header Only                 | `ho_len` cycles have passed **and** a BXID reset has been seen since the FE reset |
| SYNCH  | Synch                       | `synch_len` cycles |
| POST   | Header Only (if `post_en`)  | `post_len` cycles |
| IDLE   | normal words, veto released | new request |

The published description says two things about Header Only: its length is
programmable, and it ends when the first BXID reset after the FE reset
arrives. This design keeps both rules. Header Only lasts at least its
programmed length, and it then goes on until that BXID reset has been seen.
Because a BXID reset comes once per orbit, HEADER can last up to one orbit
longer than `ho_len`. Front-end links come up after the reset within that time.

The same sequence can be started from the external electrical input
`ext_cmd_in`, when control bit 3 enables it. The input passes through a
two-flop synchroniser and is ORed with control bit 0, so only a rising edge of
the combined level starts a run.

A rising edge on control bit 1 (FE-reset request) runs the same sequence
without the BE reset and without restarting the run. The trigger veto is on
from power-up and from any new request until the sequence ends. A request that
arrives mid-sequence restarts it.

## Timing alignment events (`tae_handler`)

A TAE trigger asks for a window of consecutive crossings around a central one.
Up to 32 crossings can come before it and 32 after, so the window holds 65
events. Crossings *before* the trigger have already left the trigger manager.
For this reason the handler is a shift register of `MAX_HALF+1` words. When a
central TAE word enters the register, the handler sets `trigger`, `tae` and the TAE
origin bit on the `half` words already in the register, and on the central
word. It then keeps marking the next `half` words as they arrive. The
pipeline's fixed length makes the "past" words editable, and it adds
`MAX_HALF+1` cycles of latency whatever `half` is set to. A TAE request that
falls inside an open window restarts the count of words still to mark after it.
Only triggers are spread over the window. Commands carried by the central
word, such as NZS, stay on that word.

## Throttling

`throttle_handler` removes the trigger from a word when an enabled source is
active. It clears `trigger`, `tae`, `tae_central` and `origin`, and keeps the
commands. The sources, each with its own enable bit in register 9, are:

0. the readout boards: `N_RB` (500) lines, each through a synchroniser, ORed;
1. the MEP handler: no farm destination is left for the next event;
2. the start-of-run veto carried in the word;
3. a programmable wait after every FE reset. An FE reset carried in the word
   stream starts it, and so does an asynchronous FE reset sent by the control
   system. That word and the next `reset_wait` words cannot trigger.

Asynchronous commands join the stream after the output pipeline, behind the
throttle stage. So when the control system sends an FE reset, the words
already past the throttle stage still leave after the reset with their
triggers. That covers at most `out+3` words. Only the words after them are
held back for the wait.

`active` shows which sources are asserting, and the status register reports it.

## Multi-event packets and farm destinations (`mep_handler`)

The published material names this block and its connections only. The scheme
built here is the simplest one that fits:
1. A farm node offers to take a packet by presenting its destination id on
   `farm_req_valid`/`farm_req_dest`.
2. The ids wait in a 16-entry FIFO.
3. The next `packing` accepted events are tagged with the id at the head of
   the FIFO. The last of them also carries `mep_accept`, which closes the
   packet.

The handler raises `mep_throttle` once only one slot is left and the FIFO is
empty. It raises it one event early because the throttle stage sits one
register ahead. A trigger that still arrives with no destination is dropped and
flagged as lost. A request into a full FIFO is refused and flagged as overflow.
Both flags become sticky error bits.

## The TFC bank (`tfc_bank`)

The bank is one record for each accepted event. It holds:
- the BXID and crossing type;
- the trigger origin;
- an 8-bit trigger-type mask. Its bits, from bit 0 up, are calib, nzs,
  snapshot, tae, tae_central, header_only, synch and mep_accept;
- the scan step;
- the orbit count since the run started;
- a 64-bit timestamp, counted in clock cycles from a value the control system
  loads;
- the MEP destination;
- 32 bits of other run information.

The BE reset in the word stream marks the start of a run. It restarts the orbit
count and reloads the timestamp.

## Asynchronous commands (`async_cmd_gen`)

The control system can insert calibration, NZS, snapshot, FE-reset or BE-reset
commands at any time. It writes them in register 15 and pulses command bit 3.
They are ORed into the next word after the output pipeline, exactly once.

## Control-system registers (`ecs_regs`)

The bus is 12-bit word addressed with 32-bit data. A write takes effect on the
clock edge. A read returns `rdata` with `rvalid` one cycle later.

| address        | contents |
|----------------|----------|
| 0x000–0x01F    | configuration registers (see `rs_pkg.sv` for fields) |
| 0x040          | command pulses: 0 latch counters, 1 clear counters, 2 single trigger, 3 send async command |
| 0x080–0x083    | status: BXID; MEP FIFO count, throttle sources, sequencer state, veto, busy; run orbits; id 0x52530001 |
| 0x0C0          | sticky errors (0 orbit misalignment, 1 MEP overflow, 2 MEP lost); write 1 to clear |
| 0x100–0x10F    | latched counters |
| 0x180–0x18F    | free-running counters |
| 0x400–0x4DF    | filling-scheme RAM, write only |

Other addresses read as 0xDEADBEEF. The main configuration registers are:
- 0 control: start-of-run, FE-reset request, external-trigger enable,
  external start-of-run enable [3], crossing-type mask [7:4], TAE enable [8], TAE half-width [14:9];
- 1 orbit offset;
- 2–5 the two internal generators;
- 6 and 7 the sequencer lengths;
- 8 the pipeline delays;
- 9 the throttle enables;
- 10 the FE-reset wait;
- 11 MEP packing and enable;
- 12 and 13 the initial timestamp;
- 14 the scan step;
- 15 the async command.

`monitor_counters` keeps 16 counters, each with a free-running copy and a
latched copy. They count orbits, accepted events, internal (periodic and
random), external,
calibration, control-system and TAE triggers, throttled triggers, MEPs, FE
resets, runs, lost events, clock cycles, Header Only and Synch words, and async
commands. One latch command copies every counter on the same clock edge, so
their values can be compared with each other.

## Where this departs from the published design

- The 3564-crossing orbit is the LHC value. The published text does not
  state it.
- The word format, the bank format, the register map and all widths are this
  design's own.
- The MEP credit scheme, the error list and the counter list are this
  design's own. The published text only names these features.
- The published firmware runs behind a PCIe interface on a host PC. Here a
  plain register bus stands in for it.
- The jitter-cleaning PLL and the optical transceivers are not modelled. The
  core is clocked directly by the bunch clock.
- Throttle lines from all boards are ORed. There is no mask for each board.
- The 500 throttle lines come from the 500 event-builder nodes of the system
  overview. How the real system groups its throttles is not given.
- The pipeline depth (256) and the MEP FIFO depth (16) are assumed.
- The published text lists "random" among the trigger origins but does not
  say how random triggers are made. The LFSR generator is this design's own.
- An asynchronous FE reset does not hold back triggers already past the
  throttle stage (see Throttling).
- Resource use cannot be compared with the published FPGA figures. At default
  parameters, synthesis gives about 5400 flip-flop bits and 32 kbit of memory.
  The memory is mostly the two 256-deep latency pipelines and the filling
  scheme.

## Simulating

Every file in `rtl/` holds one module or the package. `rs_pkg.sv` must come
first. Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops on its own, or when a watchdog fires.
Example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/rs_pkg.sv tb/tb_readout_supervisor.sv --top-module tb_readout_supervisor
./obj_dir/Vtb_readout_supervisor
```

`tb_readout_supervisor` runs the whole core at its default parameters for a few
orbits, and finishes in seconds. In that time it:
- loads a filling scheme;
- starts a run from the external command input;
- uses internal periodic, random, external, calibration, control-system and
  TAE triggers;
- throttles from the boards, the MEP handler and the FE-reset wait;
- forms MEPs and overflows the MEP FIFO;
- inserts async commands, among them an FE reset that starts the FE-reset
  wait.

It checks the following:
- every word on `tfc_out` against the expected latency;
- the start-of-run order;
- that no trigger leaks through during the veto or a throttle;
- each bank against its event;
- the counters read back over the bus.

It counts each of these mechanisms, and fails if one of them never happened.

The block testbenches override some parameters to stay short, for example a
20-crossing orbit and 8 throttle lines. The top-level test runs at full size.
