# Trigger and timing logic for a two-detector reactor-neutrino experiment

This is synthesizable SystemVerilog for the digital part of the trigger and
timing system built for the Double Chooz reactor-neutrino detector. The
system watches the analogue signals of all photomultipliers (PMTs). It
decides within a few hundred nanoseconds whether the data acquisition
should record an event. Every accepted event gets a common event number, a
32-bit trigger word that classifies it, and a time stamp from one common
62.5 MHz clock.

The main idea is a trigger made of two independent conditions joined by a
logical AND:

* **Energy.** The analogue sum of all PMT groups crosses a threshold. There
  are four sum thresholds (prescaled, neutrino-like, neutron-like,
  muon-like).
* **Multiplicity.** At least *k* PMT groups are above their own
  threshold. This rejects energy deposits that light only a small part of
  the detector, such as a single noisy PMT group.

Redundancy comes from duplication. Two identical Trigger Boards each see
half of the inner-detector PMTs, wired in alternation so that both watch
the whole volume. Their decisions are ORed, so either board alone is
enough.

## System structure

```
          disc. A/B x18, sum x4                 disc. A/B x18, sum x4
               |                                      |
        +-------------+  +-------------+       +-------------+
        |  TB A (ID)  |  |  TB B (ID)  |       |  TB V (IV)  |
        +-------------+  +-------------+       +-------------+
          8 bit |   ^TA     8 bit |  ^TA         8 bit |  ^TA      ^ INH to all
                v   |             v   |              v   |        |
        +-----------------------------------------------------------+
        |              Trigger Master Board (TMB)                   |<-- 7 external
        |  ISS -> masked OR + 32 CAMs -> scalers -> TR1 mask ->     |    triggers
        |  high level logic -> delay -> TR1, TA, TW, EvNo           |
        |  TR2 mask -> TR2;  clock counter -> OV sync;  FIFO        |
        +-----------------------------------------------------------+
                 |      |      |      |      |      |
                TR1    TR2     TW    EvNo   INH   OV sync   (to the DAQ)
```

`dc_trigger_system` is the top. It holds:

* three `trigger_board` instances. Index 0 is TB A and index 1 is TB B
  (inner detector, ID). Index 2 is TB V (inner veto, IV).
* one `trigger_master_board`.

The master board has four Trigger Board inputs. The fourth is free: its
input and its TA output are top-level ports. Every setting register is a
port: one `tb_cfg_t` per board and one `tmb_cfg_t`. The FIFO read ports
are top-level ports too. The real boards reach all of these over VME.

Everything runs on one 16 ns clock. The Trigger Board's 32 ns "sync clock"
is a clock enable that toggles every cycle, not a second clock domain. The
only asynchronous logic is the input latch in `iss`, described next.

## Catching short asynchronous pulses (`iss`)

A discriminator pulse can be a few nanoseconds long and can arrive at any
moment. Each input passes through three stages:

1. **latched.** A flip-flop with the discriminator as its *asynchronous
   set*. It is cleared synchronously at the next sync edge at which the
   discriminator is no longer active. A 2 ns pulse is therefore held until
   the next sync edge. Reset also clears it synchronously, so it starts
   known.
2. **sync.** `latched` sampled at the sync edge, ORed with its value one
   sync period earlier. Every pulse therefore becomes a sync pulse of at
   least two sync periods: 64 ns on a Trigger Board, 32 ns on the master
   board, where the sync enable is held at 1. This is the signal that all
   logic downstream uses.
3. **irc_en.** High for the first sync period of each sync pulse. The
   input rate counters count it, once per pulse.

The asynchronous set is deliberate. A lint tool will report it as a
signal used both as a clock/async input and as data, and that is expected.
Pulses that arrive exactly at a clock edge are not modelled in any deeper
way than the flip-flop itself; metastability handling is left to the FPGA
flow.

## Trigger Board (`trigger_board`)

A board has 18 group inputs. Each has a low (A) and a high (B)
discriminator. There are also four sum discriminators and one external
NIM input (EX). Per cycle:

* **Multiplicity** (`multiplicity`). There is one condition on the A
  channels and three on the B channels. Each condition has an 18-bit
  channel mask and a minimum count, with 0 meaning "off". The result is
  registered.
* **Trigger logic unit** (`cam_tlu`). It has 32 "CAMs" over 45 inputs: A[18],
  B[18], SUM[4], multA, multB[3] and EX. A CAM is an AND of any subset of
  its inputs, each taken true or negated. A final invert bit lets a CAM
  form a NOR, so it can also express an OR. A CAM with no input selected is
  off. CAMs 4k…4k+3 are ORed into bit k of the 8-bit board output.
* **Outputs.** The 8-bit output goes to the master board after a delay of
  0…15 cycles (`programmable_delay`). Bits 0…2 also drive the NIM outputs
  N1…N3, with their own delay.
* **Event record.** The board writes one record to a 128-entry FIFO
  (`event_fifo`) on each rising edge of TA. TA comes from the master board;
  in stand-alone use it can come from a NIM output or from a gate timer.
  The record holds, LSB first:

  | Field | Bits | Contents |
  |---|---|---|
  | IS | 40 | input status: the sync signals from a settable tap of a 31-stage delay line |
  | IRC | 40×16 | input rate counters: pulses per channel since the previous TA, saturating |
  | TDC | 32 | cycles since the previous TA |
  | EvNo | 32 | event number, first event = 0 |

  When the FIFO is full the board keeps triggering. New records are
  dropped and counted.

While INH (inhibit) is active the board is dead. Its outputs are 0, TA is
ignored, and the counters are held at 0.

## Trigger Master Board (`trigger_master_board`)

The master board sees 39 inputs: four 8-bit board outputs and seven
external inputs. The external inputs pass through an `iss`, with the sync
enable held at 1, and a 0…15-cycle delay. The trigger 1 path is:

1. **Masked OR.** The OR of the inputs selected by a mask becomes a 40th
   CAM input. The raw inputs also go to the CAMs. A CAM, which is an AND,
   can therefore use one OR term. The Double Chooz muon classification
   needs this: "muon in the ID" means TB A's muon bit OR TB B's.
2. **32 CAMs**, as on the Trigger Board.
3. **Scalers** (`cam_scaler`). Each CAM counts its activations (rising
   edges). Every *n*-th activation passes, as a level for as long as the
   CAM stays active. *n* = 0 or 1 passes all. This is how a 1000/s
   prescaled threshold becomes a 1/s trigger.
4. **Trigger 1 mask**, then the **high level logic** (`high_level_logic`).
5. **Trigger 1 delay.** 0…17 cycles (up to 272 ns) to the TR1 output.

Trigger 2 (`trigger2_path`) is a second masked OR of the CAMs, with no
high level logic. It is delayed by the same amount so that it leaves
together with TR1.

### High level logic

This block decides when trigger 1 fires.

**Re-arm rule.** A trigger fires when a CAM becomes active that did not
take part in the previous trigger. Every CAM active at a trigger is marked
*blocked* until it has gone inactive. A condition that stays true for
1 µs therefore gives one trigger, not 60.

Four optional mechanisms come on top of that rule:

| Mechanism | Setting | Behaviour |
|---|---|---|
| Follow-up | `followup` = *f* | If the condition of the last trigger is still true (*f*+2) cycles after it (32…528 ns), fire again. |
| Close-in-time window | `WIN_CIT`, `window` = *w* | For (*w*+2) cycles (32…528 ns) after a trigger, a new activation is not lost. It is delayed to the end of the window. |
| Dead time | `WIN_DEAD`, `window` = *w* | For (*w*+1) cycles (16…512 ns) after a trigger, new activations are lost. |
| Fixed rate | `fixed_period` = *p* | Fire every (*p*+1) × 16.384 µs (1024 cycles), up to 1.0738 s. |
| Inhibit release | on/off | Fire once when INH is released. |

Close-in-time and dead time are the two values of one setting, so only
one of them can be active. Each special trigger sets its own bit of the
trigger word:

* bit 28: fixed rate
* bit 29: follow-up
* bit 30: close-in-time
* bit 31: inhibit release

Fixed-rate and inhibit-release requests wait for the end of a running
window. While INH is active nothing fires.

### Trigger word, event number, time

* **Trigger word.** CAMs 0…27 pass through a 4-stage shift register, so it
  covers the last 64 ns. Each stage has its own 28-bit mask. The trigger
  word is the OR of the masked stages plus the four special bits.
* **When the word is sampled.** The decision and its special bits go
  through the trigger 1 delay first. When they come out, the word is read
  from the shift register. TA pulses, and TW and EvNo change, in the next
  cycle. TR1 follows one cycle after that, so TW and EvNo are stable
  16 ns before TR1.
* **Why the sampling point matters.** A flag that settles one register
  later than the condition that fired still enters the word when the
  delay is at least 1 or 2. Examples are a multiplicity-gated muon bit and
  the IVMPR bits built from it. With a delay of 0 such a flag can be
  missed.
* **Clock counter** (`clock_counter`). 32 bits, held at 0 while INH is
  active. It wraps every 2³² × 16 ns = 68.72 s, and the wrap gives the
  one-cycle OV sync pulse.
* **FIFO record.** The master board writes one record per trigger to its
  own 128-entry FIFO. LSB first: IS[39] | CAM[32] | scaler counts[32×16] |
  clock[32] | EvNo[32] | TW[32]. The record is written when the
  trigger leaves the trigger 1 delay. The input status tap that shows the
  deciding cycle therefore counts back over the transit time plus
  `tr1_delay`; the 31-stage line has room for the longest delay.

### Latency (master board, default settings)

A CAM output that changes in cycle *t* gives:

| Event | Cycle |
|---|---|
| high level logic fire | *t*+1 |
| TA, TW, EvNo | *t*+2+`tr1_delay` |
| TR1 | *t*+3+`tr1_delay` |

Add to that the Trigger Board path:

* up to one 32 ns sync period;
* one cycle for the CAM register, two for a multiplicity term;
* the TB output delay;
* on the master board, one input register and the CAM register.

## The Double Chooz configuration

The end-to-end test sets the system up as the experiment uses it. It is
a good starting point for any other configuration.

**TB A and TB B (ID).**

* 13 group inputs are used (0…12).
* multA requires at least 2 of the 13 groups.
* Sums: 0 = neutron-like, 1 = muon-like, 2 = prescaled, 3 = neutrino-like.
* Output bits: 0 = prescaled, 1 = neutrino-like AND multA,
  2 = neutron-like, 3 = muon-like.

**TB V (IV).**

* Output bit 0 = prescaled.
* Output bit 1 = neutron-like.
* Output bit 2 = muon-like AND at least 10 active A groups.
* Output bit 3 = topology: at least 3 lateral OR at least 1 down OR the
  bottom group, on the B discriminators.
* Channel grouping assumed here: channel 0 is top, 1…4 up, 5…10 lateral,
  11…16 down, 17 bottom. The grouping of the real detector is given by
  region, not by channel number.

**Master board.**

* Trigger word bits:
  * 0…3: TB A
  * 6…9: TB B
  * 12…14: TB V
  * 15…17: passing, stopping and crossing muon
  * 20…25: external inputs
  * 28: fixed rate
* The muon classes use the masked OR (ID muon = TB A bit 3 OR TB B bit 3):

  | Class | Condition |
  |---|---|
  | passing | IV muon AND NOT ID muon |
  | stopping | IV muon AND ID muon AND NOT topology |
  | crossing | IV muon AND ID muon AND topology |

* Trigger 1 comes from these bits:
  * the three prescaled bits, scaled 1/1000;
  * the two neutrino bits;
  * the IV neutron bit;
  * the external bits.
* Dead time is 128 ns (`WIN_DEAD`, code 7).
* Fixed rate is 1/s (code 61034).
* `tr1_delay` = 2.

How the defaults hold the experiment's settings:

| Setting | Arithmetic | Fits |
|---|---|---|
| prescale 1/1000 | 1000 < 2¹⁶ scaling factor | yes |
| fixed rate 1 s | 1 s / 16.384 µs = 61035 steps ≤ 65536 | yes |
| dead time 128 ns | 8 cycles, inside 16…512 ns | yes |
| trigger word | 28 CAM bits + 4 special bits = 32 | yes |
| FIFO | 128 records per board | yes |
| trigger 1 delay | 17 taps = 272 ns | yes |
| OV sync | 2³² × 16 ns = 68.72 s | yes |

## Where this RTL departs from, or adds to, the original boards

The block structure, the counts and the ranges follow the original
system:

* 18 groups, two thresholds per group, 4 sum thresholds
* 4 multiplicity conditions
* 32 CAMs, ORed in groups of 4 into 8 output bits
* 128-event FIFOs
* 39 master board inputs
* scalers and a trigger 1 mask
* the four special triggers with their ranges
* a 4-stage trigger word
* a 32-bit clock with OV sync

The following are choices made here, because the original documentation
does not fix them:

* **Register encodings.** The CAM use/polarity/invert bits, the
  multiplicity mask and threshold, the window and period codes, and
  "scaling factor 0 or 1 = no scaling".
* **Delay depths.** TB output, NIM and EX delays of 0…15 cycles; input
  status taps of 0…31.
* **FIFO records.** Their layouts, the show-ahead read port, and
  "a write together with a read of a full FIFO is accepted".
* **Event number** starting at 0; saturating rate counters; the TDC
  counting cycles.
* **Master board sampling.** The masked OR as an *extra* CAM input rather
  than a gate on all inputs. The trigger word sampled at the end of the
  trigger 1 delay. One-cycle TA and TR1 pulses. TA issued with the delayed
  trigger.
* **INH.** It disables the Trigger Boards completely and freezes the
  clock counter.

Not in the RTL:

* **Analogue front end, threshold DACs, oscillator and fan-outs, GPS
  board.** The discriminator outputs are the inputs of this design; the
  clock comes from outside.
* **VME interface.** Settings and FIFO ports are plain ports.
* **Threshold-scan and other VME-driven test procedures.** Only their
  hardware hooks exist: software-set discriminator values, a disconnect
  of the ISS from the trigger logic, and the gate timer.

## Files

| File | Contents |
|---|---|
| `rtl/dc_trigger_pkg.sv` | constants, enums, configuration structs for both board types |
| `rtl/iss.sv` | input signal synchronisation |
| `rtl/multiplicity.sv` | masked group count against thresholds |
| `rtl/cam_tlu.sv` | 32 AND/NOT units and the OR-of-four outputs |
| `rtl/programmable_delay.sv` | tapped shift register, 0…DEPTH cycles |
| `rtl/input_rate_counters.sv` | per-channel saturating counters |
| `rtl/event_fifo.sv` | 128-entry FIFO with a dropped-record counter |
| `rtl/trigger_board.sv` | one Trigger Board |
| `rtl/cam_scaler.sv` | per-CAM prescalers |
| `rtl/high_level_logic.sv` | trigger 1 decision and special triggers |
| `rtl/trigger_word.sv` | 4-stage masked shift register |
| `rtl/trigger2_path.sv` | trigger 2 |
| `rtl/clock_counter.sv` | run clock and OV sync |
| `rtl/trigger_master_board.sv` | the master board |
| `rtl/dc_trigger_system.sv` | three Trigger Boards and the master board |

Each file in `tb/` tests the module of the same name after `tb_`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/dc_trigger_pkg.sv \
          tb/tb_dc_trigger_system.sv --top-module tb_dc_trigger_system
./obj_dir/Vtb_dc_trigger_system +verilator+rand+reset+2
```

Replace the testbench name to run another test. Every test prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

### What the tests check

* **Unit tests.** Each block is compared cycle by cycle with an
  independent model in the testbench, over random stimulus.
* **`tb_iss`.** Random pulse lengths down to a few ns, and pulse
  positions within the sync period.
* **`tb_high_level_logic`** and **`tb_trigger_master_board`.** These use a
  16-cycle fixed-rate unit to keep the runs short. The master board test
  also uses a 12-bit clock counter, so that it can see the OV sync pulse
  at each wrap.
* **`tb_trigger_board`.** Runs one board at its defaults.
* **`tb_dc_trigger_system`.** Runs the whole system at its default sizes
  in the configuration above. It drives discriminator pulses for the
  following events:
  * neutrino candidates, and low-multiplicity noise that must be rejected
  * neutrons and ID muons
  * passing, stopping and crossing muons, with all three topology cases
  * 2100 prescaled pulses
  * external triggers, and pairs of external pulses 2 µs apart, as the
    asynchronous dead-time monitor sends them
  * pile-up inside the dead time
  * close-in-time, follow-up, inhibit release and fixed rate

  It then reads all four FIFOs and checks that event numbers agree across
  all boards, and that the trigger word and clock stamp agree with TR1.
  Finally it fills every FIFO to overflow. It counts each of 20
  mechanisms and fails if any of them never happened.

Two things are not simulated at full length:

* **OV sync.** With the 32-bit counter the first pulse needs 68.7 s of
  simulated time. It is checked with short counters.
* **Fixed rate of 1 s.** The system test uses the shortest period,
  16.384 µs.
