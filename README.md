# ALICE Run 3 Central Trigger System in SystemVerilog

From Run 3 on, most ALICE detectors read out continuously, with no trigger. A few still need one. The Central Trigger System (CTS) has to serve both at once. It does so from one clock, the LHC bunch-crossing (BC) clock of 40.079 MHz, and one message format.

- **Continuous detectors.** Their data are cut into *HeartBeat frames* (HBf), one per LHC orbit (3564 BCs, 88.9 µs). 128 HBf make one *Time Frame* (TF). For every frame, the CTS decides whether the data are kept or thrown away.
- **Triggered detectors.** They get classic LM / L0 / L1 triggers, made from a set of *trigger classes*.

The system has two board types:

- one **Central Trigger Processor (CTP)**, which makes all decisions;
- one **Local Trigger Unit (LTU)** per detector (18 in all). Each LTU sends the CTP's messages to its detector over up to three kinds of links:
  - TTC-PON, to the Common Readout Units (CRUs);
  - GBT, to the front-end electronics;
  - the legacy RD12 TTC, for detectors that have not been upgraded.

This code is the synthesizable logic of both boards: the CTP firmware and 18 LTU cores. It is wired together in `cts_top`. The optical transceivers, the control bus and the board parts are not included. Their signals are plain ports.

## Timebase and the trigger message

`orbit_bc_counter` counts BCs within the orbit (0 … 3563) and counts orbits (32 bits). It also marks:

- the first BC of each orbit, which is the start of an HBf;
- the first BC of each TF. The TF length is a register, 128 by default.

Every block gets these counters. Anything one BC ahead of the counter (`hbf_next`, `tf_next`) is derived from them.

All information sent to detectors is one 80-bit **trigger message** (`cts_pkg::trig_msg_t`):

| bits | field | content |
|---|---|---|
| 79:48 | orbit | orbit number |
| 47:44 | level | bit0 LM, bit1 L0, bit2 L1 |
| 43:32 | bc | BC within the orbit |
| 31:0 | ttype | trigger-type bits (below) |

Trigger-type bits:

| bit | meaning |
|---|---|
| 0 | orbit |
| 1 | HeartBeat |
| 2 | HeartBeat reject (HBr) |
| 3 | health check |
| 4 | physics |
| 5 | pre-pulse |
| 6 | calibration |
| 7 | start of run |
| 8 | end of run |
| 11 | start of Time Frame |

The field widths are the published ones. The bit order and the type-bit positions are this design's own choice.

## The continuous-readout loop: HBr, HBack, GHBmap, HBd

This loop is the part of the design that is hardest to follow. It closes over many orbits.

1. **HeartBeat reject (`hbr_generator`).** At the start of every HBf, each detector is told to keep its data (HBr = 0) or to reject it (HBr = 1). Each detector has its own mode:
   - *autonomous*: never reject; the CRUs throttle themselves;
   - *downscale*: reject `n` frames in every TF, spread evenly. Every HBf adds `n` to an accumulator. When the accumulator reaches the TF length, the frame is rejected and the TF length is subtracted.
   - *collective*: reject when the highest buffer status any of the detector's CRUs reported during the last frame reached a threshold.

   The HBr bit rides in the frame's first message. The same bit also acts as a busy for triggered detectors for the whole frame (`busy_logic`), so triggered data never fall into a rejected frame.

2. **Acknowledge and map (`hb_map_collector`).** Each of the 441 CRUs acknowledges every frame it kept (HBack). The acknowledge can come several frames late, because the CRUs buffer data. The collector therefore keeps 8 maps of 441 bits in a ring, indexed by frame number modulo 8. When a map's slot comes around again, no more acknowledges can arrive for it. It is released as the **Global HeartBeat Map** (GHBmap) and cleared.

3. **Decision (`hb_decision`).** A general function of 441 inputs cannot be built, so each detector has a 441-bit **HBmask** selecting the CRUs it depends on, plus a function bit:
   - ALL: every selected CRU acknowledged;
   - ANY: at least one selected CRU acknowledged.

   An empty mask gives "keep" for ALL and "drop" for ANY. The result is the HeartBeat decision (HBd). It is sent to all detectors in a *decision record* carrying the frame's orbit number. CRUs use it to delete or ship frames they kept.

The decision for frame *n* is made when frame *n + 8* starts. The published scheme allows an acknowledge up to 8 frames late, and that is where the 8 comes from. The loop, the mask and the ALL/ANY simplification also follow the published scheme. Releasing the map exactly 8 frames on, and the choice of ALL and ANY as the two functions, are this design's own.

## Triggered detectors: inputs, classes, clusters, busy

**Inputs (`trigger_input_logic`).** The 48 trigger inputs come from detectors and the beam pick-ups. Each input:

- is delayed by 0–15 BCs, for alignment;
- is assigned to one level, LM, L0 or L1.

`global_trigger_generator` adds two internal trigger bits:

- a periodic one, for calibration and tests;
- a pseudo-random one (a 32-bit LFSR compared against a threshold).

`bc_mask` holds 4 mask bits for each of the 3564 BC slots, telling which slots carry colliding bunches.

**Classes (`trigger_class`, one instance per level, 64 classes each).** A class fires when all of the following hold:

- it is enabled;
- all of its selected inputs and generator bits are 1 (a class with nothing selected never fires);
- its selected BC mask bit is set, if it uses one;
- it fired at the previous level, if it requires that (`need_prev`);
- it is not vetoed.

The veto is the OR of two things:

- the class's **cluster busy**;
- its **downscaling** veto: a counter that lets only one of every *N* candidates through.

A cluster is a group of detectors read out together. There are 18, and the detector-to-cluster assignment is a bit matrix (`cluster_logic`). A cluster is busy when any member detector is busy in one of three ways:

- its LTU is busy;
- the detector is inside an HBr frame;
- the CTP's own **dead time** for that detector is running.

The LTU's busy takes about 10 BCs to come back to the CTP. During that window, several LMs could be accepted and overflow the LTU's small TTC buffer. To prevent this, the CTP marks a detector busy itself from the BC after it sends the detector an LM or an L0. It keeps it busy until the L1 has gone out and the LTU's busy has had time to arrive (`BUSY_RTT` = 10 BCs). That makes 244 BCs after an LM. The effect is a non-paralysable dead time: at an interaction rate *r* about 1/(1 + *r*·6.1 µs) of the interactions are accepted, about 77 % at 50 kHz.

**Level timing.** The levels are spaced by the Run 2 latencies, 650 ns (LM), 900 ns (L0) and 6.5 µs (L1):

- LM → L0 is 10 BCs;
- L0 → L1 is 224 BCs.

A class at L0 sees its own LM decision exactly 10 BCs later, through a `delay_line` one BC shorter than the gap (the class register supplies the other BC). L1 works the same way.

Once the LTU has accepted an L0, it reports busy. A class that requires the previous level is therefore not checked against cluster busy a second time. Otherwise every L1 would be vetoed by the detector's own L0 busy.

**Records for the CRUs (`record_packer`).** Two streams go to the CRUs as 80-bit GBT words:

- the **Interaction Record**: the trigger inputs, in every BC where any input is set;
- the **class record**: the L0 classes that fired.

Every orbit starts with a header word carrying the orbit number (bit 79 = 1). Data words (bit 79 = 0) carry the BC and 64 payload bits. An 8-deep FIFO absorbs a header and a data word arriving in the same BC. Its overflow is counted.

## From CTP to detectors

**Message builder (`trigger_message_builder`, one per detector).** Once per BC it merges, into one message:

- orbit / HeartBeat / TF / HBr bits;
- the detector's LM, L0 and L1 triggers;
- calibration, start-of-run and end-of-run requests.

It builds the 200 user bits of a TTC-PON frame:

| bits | content |
|---|---|
| 79:0 | the message |
| 87:80 | destination detector |
| 119:88 | running message count |
| 151:120 | decision-record orbit |
| 152 | HBd |
| 153 | decision-record valid |

`nonidle` is set when the frame carries anything.

**OLT sharing (`olt_mux`).** Each OLT carries two detectors, so the CTP needs 9 OLTs for 18 LTUs. When both detectors have a frame in the same BC:

- one frame is sent;
- the other waits in a 4-deep FIFO and is sent in a following BC, round-robin;
- a frame bypasses the FIFOs only when they are empty, so the order is kept.

Idle frames are sent only when nothing is pending. A full FIFO raises a sticky `overflow`.

**LTU (`ltu_core`).** An LTU takes either the CTP's frame or, in standalone mode, that of its own **CTP emulator** (`ctp_emulator`). The emulator reuses the CTP's counter, generator, HBr and message blocks, so a detector can run without the CTP. The LTU frame goes to three outputs:

- TTC-PON: the frame unchanged;
- GBT: a 120-bit word with the message in bits 79:0;
- RD12 TTC (`ttc_transmitter`), only for frames addressed to this detector;
- an LVDS trigger line (`lvds_trg`), pulsed for one BC with each message of the level chosen by `lvds_level` (off, LM, L0 or L1). Some detectors take one trigger level electrically, for example L0 for CPV and LM for HMPID.

The LTU also:

- checks that the counter the CRU sends upstream increments by one per word (`lhmon`);
- reports **busy**: FEE busy OR TTC busy.

## RD12 TTC, the slowest path

Legacy detectors get two one-bit-per-BC channels.

**Channel A** carries the level:

- L0 is a single 1;
- L1 is two 1s in consecutive BCs.

**Channel B** carries the rest of the message: 76 bits, because the level is already on A.

- The message is cut into 7 long words of 12 data bits plus a 4-bit word number. Each long word is 42 BCs with its Hamming check bits.
- A short 16-BC broadcast goes out at every orbit (bunch-counter reset, command `01`) and on calibration requests (command `04`).

One message therefore takes 294 BCs: 136 kHz at most, or about 133.6 kHz once orbit broadcasts are counted. The requirement is about 130 kHz.

To keep the orbit broadcast on time, a long word is started only if it ends 4 BCs before the next orbit. Triggers arriving faster than channel B drains:

- wait in an 8-entry derandomizer (`ttc_derandomizer`);
- busy is raised at 7 entries;
- after each accepted L0, busy is also raised for the 224-BC L0→L1 window.

The field layout follows the usual RD12 receiver convention. The Hamming code is a SEC-DED code of this design's own (`cts_pkg::ham32`, `ham8`).

## Interface of `cts_top`

One clock (the BC clock) and a synchronous, active-high reset.

| group | ports |
|---|---|
| Inputs | `trg_in[48]`; run control `sot`, `eot`, `cal` |
| CRU upstream | HBack messages `ack_valid`/`ack_cru`/`ack_slot`/`ack`, one per BC; buffer status `bs_valid`/`bs_det`/`bs` |
| LTU side | `fee_busy`, `standalone`, emulator settings, `lvds_level`; upstream link counters `cru_valid`/`cru_cnt` |
| Configuration | Ordinary input ports (on the boards they are IPbus registers): input delays/levels, generator period and threshold, BC-mask write port, three arrays of 64 `class_cfg_t`, detector-cluster matrix, HBr mode/parameters, HBmasks and functions |
| Outputs | per-detector `pon_to_cru[200]`, `gbt_to_fee[120]`, `ttc_a`, `ttc_b`, `lvds_trg`, `ltu_busy`, `link_errors`; records `ir_word`/`cr_word` with valids; `hbr`, `hbd`/`hbd_valid`; a global `overflow` |

**Latency.** A detector message reaches its LTU outputs 4 BCs after the class inputs, when its OLT is not contended. Each frame delayed by contention adds one BC.

## Parameters

Defaults are the sizes of the real system. They live in `cts_pkg` and in the parameters of `cts_top`:

| parameter | value |
|---|---|
| `N_D` (detectors) | 18 |
| `DET_PER_OLT` | 2 |
| `N_INPUTS` | 48 |
| `N_CLASSES` | 64 |
| `N_CLUSTERS` | 18 |
| `N_CRU` | 441 |
| `BC_ORBIT` | 3564 |
| `LM_L0_BC` | 10 |
| `L0_L1_BC` | 224 |
| `BUSY_RTT` | 10 (own margin for the busy round trip) |
| HBf per TF | 128 (register) |

The testbenches of the smaller blocks shrink some of these to keep simulations short. The end-to-end testbench runs `cts_top` at the defaults.

## Where this RTL departs from, or adds to, the published system

- **Number of OLTs.** The text gives 9 OLTs for 18 LTUs, two detectors each. The CTP block diagram draws 6 multiplexers with 3 detectors each. The text is followed; `DET_PER_OLT` changes it.
- **Number of inputs.** The inputs listed total 41 (39 from detectors, 2 from the beam pick-ups). The firmware diagram shows 48 input lines, so 48 are built.
- **Own choices.** Not published, chosen here:
  - the arbitration inside the OLT multiplexer and its FIFO depth;
  - the record word format;
  - the CTP-side dead time (`BUSY_RTT`) and the one-BC busy register;
  - the HBr accumulator and the buffer-status threshold rule;
  - the TTC-B guard band and Hamming code;
  - the derandomizer depth and the LTU link-monitor rule;
  - the trigger-type bit positions.
- **LTU upstream.** The LTU's handling of upstream CRU data (combining HeartBeat acknowledges and buffer statuses) was not yet designed. CRU messages therefore enter the CTP directly at `cts_top`.
  - The published block diagram shows each LTU returning a 512-bit HeartBeat/buffer-status word, but the content of that word is not given.
  - Here each acknowledge or buffer status is instead a short message, one per BC: `ack_cru`/`ack_slot`/`ack` or `bs_det`/`bs`.
  - Feeding all 441 CRUs through this port takes 441 BCs per HBf, well inside the 3564 BCs of an orbit.
- **Decision record.** The decision record has 10 bytes of the PON frame, but its format is not published. Here it is one record per HBf: orbit, decision and a valid bit, in bits 153:120.
- **Third CTP GBT link.** The CTP also has a third GBT link for monitoring, whose content is not described. It is not built.
- **TTC-B broadcasts.** Each broadcast has 8 command bits: 6 user bits plus the bunch- and event-counter resets, in the RD12 convention.
  - The orbit broadcast sets the bunch-counter reset (`01`).
  - Calibration uses a user bit (`04`).
- **Not included:**
  - TTC-PON and GBT transceivers;
  - the TTCex optical encoder;
  - IPbus;
  - DDR4 snapshot and pattern memories (including the pattern-driven trigger generator);
  - the CTP-LTU consistency monitor;
  - PLLs, power management and configuration flash;
  - the CRU itself.

## Simulating

Every block has a self-checking testbench in `tb/`, named `tb_<block>`. Each prints `TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog if it hangs. With Verilator 5, from the top of the tree:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cts_pkg.sv tb/tb_cts_top.sv --top-module tb_cts_top -o sim
./obj_dir/sim
```

Replace `tb_cts_top` with any other testbench name. Simulation is two-state, and every register that is read is reset.

**`tb_cts_top`** runs the whole system at full size for thirteen orbits with a TF of 4 frames. It checks each mechanism and counts how often it happened:

- the LM → L0 → L1 cascade on all three links, and the LVDS L0 line;
- the TTC-A one-bit / two-bit coding;
- the BC-mask, busy and HBr vetoes;
- downscaled and collective HBr;
- one decision record per frame;
- OLT contention between the two detectors sharing an OLT;
- emulator orbits and triggers in standalone mode;
- Interaction and class records;
- link-error counting.

**`tb_cts_rates`** runs the full-size system at the three Run 3 interaction rates, three orbits each:

| collision system | interaction rate |
|---|---|
| Pb-Pb | 50 kHz |
| p-Pb | 500 kHz |
| pp | 1 MHz |

Interactions are random. Each one produces an LM → L0 → L1 input sequence for a detector on RD12 TTC, while another detector reads out continuously. The testbench checks that:

- no frame, record word or trigger message is lost;
- the Interaction Record has one word per BC with inputs;
- the continuous detector sees every orbit;
- at 1 MHz, the TTC detector's accepted rate approaches the channel-B limit (about 133.6 kHz, 294 BCs per message) without passing it.

A typical run gives:

| offered | TTC detector accepts | channel B sends |
|---|---|---|
| ≈ 50 kHz | ≈ 60 % of interactions | all of them |
| 500 kHz | ≈ 115 kHz | ≈ 112 kHz |
| 1 MHz | ≈ 150 kHz | ≈ 131 kHz (the limit); the difference waits in the derandomizer |

Three orbits are short samples, so the fractions scatter.

The block testbenches compare against independent reference models: random stimulus for the combinational blocks and cycle-accurate expectations for the serial links.
