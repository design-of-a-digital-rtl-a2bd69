# DAVE trigger-card firmware in SystemVerilog

DAVE ("Digital Atlas Vme Electronics") is a 6U VME card built to replace the
NIM crates that provided trigger and veto logic for the ATLAS SCT detector's
standalone runs. Its central idea is that a standalone run should see exactly
the same trigger conditions as a combined run, so the card's FPGA imitates the
experiment's Central Trigger Processor (CTP). It generates:

- the bunch-crossing timing: a BCID counter and a Bunch Counter Reset (BCR)
  once per LHC orbit;
- Event Counter Resets (ECR);
- Level-1 Accepts (L1A) from random, external, software or replayed
  requests;
- the CTP's simple and complex deadtime, BUSY gating and a veto window around
  BCR.

It can also record the resulting L1A/BCR/ECR sequence into a 4M-word SRAM
(about 50 s of history) and play it back later. A host drives the card over
VME or USB.

This repository holds synthesizable RTL for that firmware, a testbench for
every block and an end-to-end testbench of the whole FPGA. The published
description of DAVE (M. Goodrick et al., "Design of a Digital Atlas Vme
Electronics (DAVE) Module") gives the firmware's block structure and what
each block must do. It gives no register map, no deadtime algorithm and no
SRAM data format. Those parts are this design's own reading, and the sections
below say which parts they are.

## Block structure

```
           VME J1/J2            USB MCU
               |                   |
           +---v-------------------v---+
           |        vme_usb_if         |  A32/D16 slave + USB port, arbiter
           +-------------+-------------+
                         | register bus (hbus_req_t / hbus_rsp_t)
           +-------------v-------------+
           |         reg_block         |  cfg_t, cmd_t out;  status_t in
           +-------------+-------------+
                         |
 LEMO/header  +----------v-+   +-----------+   +---------+
 inputs ----->| input_sync |-->| orbit_gen |-->| ecr_gen |
              +-----+------+   +-----+-----+   +----+----+
                    | trig, BUSY     | BCID, BCR     | ECR
              +-----v----------------v---------------v-----+
              |                ctp_trigger                 |
              |  random_trig -> mask_gate -> deadtime -> L1A|
              +-----+--------------------------------+-----+
                    | L1A/BCR/ECR            playback L1A ^
              +-----v------+                         |
              |  sram_seq  |--- SRAM (4M x 18) ------+
              +-----+------+
                    |  playback L1A/BCR/ECR, status
   +----------------v-----------+   +--------------+
   |        output_map          |   | gen_counters |
   +----------------+-----------+   +--------------+
                    v
        LEMO outputs, header outputs (with output enables)
```

Everything runs on one clock, the BC clock of about 40.08 MHz from the
card's clock multiplexer/PLL. Reset is synchronous and active high. The
blocks exchange configuration through three packed structs defined in
`dave_pkg`: `cfg_t` (register contents), `cmd_t` (one-cycle commands from
register writes) and `status_t` (everything the host can read).

| File | Block |
|---|---|
| `rtl/dave_pkg.sv` | I/O counts, bus structs, register map, source codes, bundles |
| `rtl/dave_top.sv` | the FPGA top level |
| `rtl/vme_usb_if.sv` | VME A32/D16 slave, USB port, arbitration |
| `rtl/reg_block.sv` | register map |
| `rtl/input_sync.sv` | input synchronisers, enables, edge detection |
| `rtl/orbit_gen.sv` | BCID and BCR |
| `rtl/ecr_gen.sv` | ECR |
| `rtl/ctp_trigger.sv` | L1A generation, trigger type, L1ID, counters |
| `rtl/random_trig.sv` | random trigger generator |
| `rtl/mask_gate.sv` | source mask, BUSY gating, BCR veto window |
| `rtl/deadtime.sv` | simple and complex (leaky-bucket) deadtime |
| `rtl/sram_seq.sv` | SRAM record / playback and host access |
| `rtl/output_map.sv` | signal-to-output routing |
| `rtl/gen_counters.sv` | generic counters |

## The trigger path

This is the part where the cycle timing matters most.

**Sources.** There are four trigger requests, each one BC long:

- random (`random_trig`);
- external: a rising edge on LEMO input 0;
- software: a write of bit 1 to the pulse register;
- playback: an L1A replayed from the SRAM.

`R_TRIG_MASK` enables each source. `CTRL_TRIG_EN` switches all of them.

**Random trigger.** A 32-bit xorshift generator advances once per BC. The
request is raised when the new value is below the 32-bit threshold
`R_RND_HI:R_RND_LO`. The mean rate is therefore `f_BC * thresh / 2^32`. With a
40.08 MHz clock, 100 kHz, the highest rate the card is specified for, needs
`thresh = 10 715 986`. A threshold of 0 switches the generator off. An
xorshift step mixes the whole word, so a request in one BC makes a request in
the next no more likely. A plain one-bit-per-step LFSR with a threshold
compare would give bursts.

**Vetoes (`mask_gate`, combinational).** A surviving request is one that is:

- enabled and unmasked;
- not blocked by BUSY: with `CTRL_BUSY_GATE` set, a high level on LEMO
  input 1 blocks triggers;
- outside the BCR veto window: with `CTRL_BCR_VETO` set, no trigger passes in
  the BCR bunch (BCID 0), in the `veto_after` BCs after it, or in the
  `veto_before` BCs before the next BCR. Keeping triggers away from BCR was
  the first thing the SCT asked of the card.

**Deadtime (`deadtime`).** A request that survives the vetoes becomes an L1A
on the next clock unless `dead` is high. There are two mechanisms:

- *Simple deadtime*: the `simple_dt` BCs after an L1A are dead, so two L1As
  are at least `simple_dt + 1` BCs apart. With the default of 4 the minimum
  spacing is 5 BCs.
- *Complex deadtime*: four leaky buckets. Every L1A adds a token to every
  enabled bucket. A bucket loses one token every `bkt_rate` BCs while it is
  not empty. A bucket holding `bkt_size` tokens is full and makes the card
  dead. A bucket of size S and rate R allows a burst of S L1As but no more
  than S + t/R in any t BCs. The default is one bucket of 8 tokens leaking
  one every 415 BCs; this is only a starting value and every setting is a
  register.

`dead` already includes the L1A being issued in the current cycle. The
decision for the next cycle therefore sees the new deadtime at once, and no
second L1A slips through in the cycle after the first.

**Output of the trigger.** `l1a` is registered: a request in cycle *t* gives
an L1A in cycle *t+1*. With each L1A, `ttype` carries the 8-bit trigger type
from `R_TRIG_TYPE`, and `l1id` carries `{ECR count[7:0], event number[23:0]}`.
The event number counts L1As since the last ECR, so the first L1A after an
ECR has event number 0. A request that was refused raises `lost` for one
cycle. 32-bit counters of L1As and of lost requests can be read.

## Orbit and ECR

`orbit_gen` counts BCID 0 .. `orbit_len`-1 and raises BCR in the cycle in
which BCID is 0. `orbit_len` resets to 3564, the LHC value, and can be
programmed shorter for tests. With `CTRL_ORBIT_EXT` set, a rising edge on
LEMO input 2 restarts the orbit: the next cycle has BCID 0 and BCR. If no
edge comes, the counter still wraps at `orbit_len`.

`ecr_gen` issues ECRs in three ways:

- periodically, every `R_ECR_PER` orbits, with `CTRL_ECR_PER` set;
- on a host command (pulse bit 0);
- from a rising edge on LEMO input 3, with `CTRL_ECR_EXT` set.

Periodic and commanded ECRs come out one cycle after a BCR, so they always
fall at the same point of the orbit. A commanded ECR can therefore wait up to
one orbit. External ECRs pass in the cycle after they are seen.

## Record and playback (`sram_seq`)

The SRAM is a 4M x 18 synchronous pipelined part with no bus-turnaround
cycles. The FPGA uses 22 of its address lines and 16 of its data lines. One
16-bit word describes one BC:

```
 15   14   13   12 ............ 0
ECR  BCR  L1A   delta (BCs since the previous word, 1..8191)
```

**Recording.** A word is written in every BC that has an L1A, a BCR or an
ECR. If 8191 BCs pass without one, a word with no flags and delta 8191 keeps
the time base. Entering RECORD mode (`CTRL_SEQ_MODE` = 1) starts at address 0.
Writing continues through the whole memory and wraps; the `wrapped` status
bit is then set. Recording stops when the mode is left. With
`CTRL_SEQ_STOP` set it also stops on a rising edge of BUSY, which keeps the
history leading up to the BUSY. The first BC after entering RECORD has
delta 1.

The capacity arithmetic: a 75 kHz L1A rate plus the 11.2 kHz BCR rate is
about 86 k words/s. 2^22 words then hold 48.6 s, or 55.9 s if only L1As
were stored. This matches the roughly 50 s the card is quoted to hold.

**Playback.** Entering PLAY mode (`CTRL_SEQ_MODE` = 2) reads `R_SEQ_LEN`
words (0 means 4M) from `R_SEQ_ST` onwards into an 8-word prefetch FIFO.
Timing starts only when the FIFO is full, or when all words are fetched. Each
word's flags are then sent on `pb_l1a`/`pb_bcr`/`pb_ecr` exactly delta BCs
after the previous word. The recorded spacing is therefore reproduced, with
a fixed start-up offset. With `CTRL_SEQ_LOOP` set the sequence repeats
without end. Reads run at up to one per BC, so a run of delta-1 words still
keeps up. A word emitted late sets `underrun`; this is a check that should
never fire. The playback L1A is a trigger source, so it passes through the
masks and deadtime again. It is also an output-map source of its own.

**SRAM timing.** Command signals (`sram_ce_n`, `sram_we_n`, `sram_addr`) are
registered. Write data is driven, and read data is sampled, `LAT` = 2 cycles
after the command cycle. `sram_oe` says when the FPGA drives the data bus.

**Host access.** In IDLE mode the host can load a pointer
(`R_SEQ_ADR_L/H`). Writing `R_SEQ_DATA` stores a word at the pointer and
increments it. Pulse bit 4 starts a read at the pointer; the word appears in
`R_SEQ_DATA` when status bit `ST_HOST_VLD` is set. Host accesses made in
RECORD or PLAY mode are ignored.

## Host interface (`vme_usb_if`)

The VME slave follows the card's VME specification:

- A32 addressing; the card answers when A31-A24 equal the base-address
  switches;
- D16 only: both data strobes low and LWORD* high. There is no A0 on the
  bus; A1 selects the 16-bit word;
- address modifiers 0x09 (user data) and 0x0D (supervisory data).

The card ignores, and gives no DTACK* to:

- block transfers, other modifiers and IACK cycles;
- byte transfers and 32-bit transfers;
- address-only cycles.

Only one transfer is done per AS* cycle, so read-modify-write cycles are not
supported. Registers occupy A8-A1 with A23-A9 zero.

AS*, DS* and WRITE* pass through two-flip-flop synchronisers. A slave cycle
runs as follows:

1. Both DS* are seen low.
2. One register request goes out.
3. The ack comes back and the read data is latched.
4. DTACK* goes low one clock later.
5. DS* is seen high and DTACK* is released.
6. The slave waits for AS* to go high.

A read takes about 6-8 BC clocks from DS* to DTACK*.

The USB microcontroller's side is not documented, so it is taken to present
the same register-bus request (`hbus_req_t`: strobe, write, 8-bit word
address, data) synchronously to the BC clock. One request is open at a time.
VME wins when both hosts ask at once, and a waiting USB request is held, not
lost. An assertion checks that a request goes out only while its owner is
recorded.

## Register map

All registers are 16 bits wide and are given by word address. 32-bit values
are split low word first.

| Addr | Name | Access | Contents |
|---|---|---|---|
| 0x00 | ID | R | 0xDA7E |
| 0x01 | VERSION | R | 0x0100 |
| 0x02 | SWITCH | R | {serial number[7:0], modification record[7:0]} |
| 0x03 | BOARD | R | {base A31-A24[7:0], programmable-reset switch, 000, mode switch[3:0]} |
| 0x04 | CTRL | RW | 0 clk80, 1 trig_en, 2 orbit_ext, 3 busy_gate, 4 bcr_veto, 5 ecr_periodic, 6 seq_stop_on_busy, 7 seq_loop, 9:8 seq_mode, 10 ecr_ext |
| 0x05 | PULSE | W | 0 ECR, 1 software trigger, 2 software output pulse, 3 clear counters, 4 SRAM host read |
| 0x06 | LED | RW | 15 front-panel LEDs |
| 0x07 | ORBIT_LEN | RW | BCs per orbit (reset 3564) |
| 0x08 | VETO | RW | {after[7:0], before[7:0]} |
| 0x09/0x0A | RND | RW | random threshold |
| 0x0B | SIMPLE_DT | RW | simple deadtime in BCs (reset 4) |
| 0x0C | TRIG_MASK | RW | 0 random, 1 external, 2 software, 3 playback (reset 0001) |
| 0x0D | TRIG_TYPE | RW | 8-bit trigger type |
| 0x0E | ECR_PER | RW | orbits between periodic ECRs |
| 0x0F | BKT_EN | RW | leaky-bucket enables (reset 0001) |
| 0x10-0x13 | BKT_SIZE | RW | bucket sizes (bucket 0 reset 8) |
| 0x14-0x17 | BKT_RATE | RW | BCs per leaked token (bucket 0 reset 415) |
| 0x18 | CNT_SEL | RW | four 4-bit sources of the generic counters |
| 0x19 | PRST_FN | RW | PULSE bits issued by the programmable reset button (reset 0) |
| 0x1C-0x1F | IN_EN | RW | input enables, inputs 0-55 |
| 0x20-0x2D | OUT_SEL | RW | four 4-bit sources per register, outputs 0-55 |
| 0x30-0x33 | OUT_EN | RW | output enables |
| 0x34-0x37 | OUT_LVL | RW | static output levels |
| 0x38/0x39 | SEQ_ADR | RW | SRAM host pointer |
| 0x3A | SEQ_DATA | RW | W: write at pointer and increment; R: last word read |
| 0x3B/0x3C | SEQ_ST | RW | playback start address |
| 0x3D/0x3E | SEQ_LEN | RW | playback length (0 = 4M) |
| 0x40 | STATUS | R | 0 dead, 1 simple, 2 complex, 3 veto, 4 BUSY, 5 recording, 6 playing, 7 wrapped, 8 host busy, 9 host data valid, 10 underrun, 11 BUSY blocking |
| 0x41/0x42 | L1ID | R | last L1ID |
| 0x43 | BCID | R | current BCID |
| 0x44/0x45 | L1A_CNT | R | L1As |
| 0x46/0x47 | LOST_CNT | R | refused requests |
| 0x48/0x49 | ORB_CNT | R | orbits |
| 0x4A/0x4B | SEQ_WP | R | record write pointer |
| 0x4C-0x4F | IN_STATE | R | synchronised enabled inputs |
| 0x50-0x57 | GCNT | R | generic counters 0-3 |

Register writes are acked one clock after the request and reads return data
with the ack. Unused addresses read 0; writes to them and to read-only
registers are ignored.

## Inputs, outputs and counters

**Inputs.** The 56 inputs are the 8 LEMO data inputs (bits 0-7), then the 16
auxiliary-header pins and the 32 daughter-card header pins. Each input goes
through a two-flip-flop synchroniser and an enable; its level and its
rising-edge pulse are then available. LEMO inputs 0-3 have fixed roles:
external trigger, BUSY, external orbit and external ECR. All synchronised
inputs can be read.

**Outputs.** Each of the 56 outputs picks one of 16 sources (`src_e`):

- 0 and 1;
- L1A, BCR, ECR;
- random request, deadtime, veto, BUSY;
- playback L1A, playback BCR, playback ECR;
- software pulse;
- its own static level bit;
- recording active;
- lost trigger.

Outputs are registered, so they lag their source by one BC and all change
together. A disabled output is low. On header pins it is also not driven
(`aux_oe`).

**Counters.** The four 32-bit generic counters use the same source list. Each
counts the BCs in which its source is high: events for pulses, duration for
levels. They saturate at 2^32-1 and are cleared by pulse bit 3, which also
clears the L1A, lost and orbit counters.

## What is outside the FPGA

These parts of the card have no RTL here:

- **SRAM**: the testbenches use `tb/gs8642z18_model.sv`, a behavioural model
  with the 2-cycle pipeline.
- **Delay25**: the 0.5 ns fine-delay chip for the clock and four signals.
- **Clock multiplexer/PLL and crystal oscillator**: only the 40/80 MHz select
  `clk_sel_80` comes from the FPGA.
- **USB microcontroller**.
- **Level translators** (NIM/ECL/TTL/LVDS).
- **Power supplies and supply monitor**.
- **Configuration PROM**.

The FPGA side of the two clock inputs and two clock outputs is not modelled
either, since these go through the clock multiplexer and the delay line.

## How this relates to the published design

The block structure comes from the published firmware diagram: VME/USB
interface, register block, input enable/sync, orbit generator, ECR
generator, a CTP-like trigger module with random trigger, deadtime and
mask/gate, and an output enable map. The SRAM record/playback and the
generic counters come from the text. So do the quantitative facts:

- VME A32/D16, base address from switches, user and supervisory data AMs,
  no block, RMW or address-only cycles;
- 8+8 LEMO data I/O, 16 auxiliary and 32 daughter-card I/O pins, 15 LEDs,
  8-bit serial and modification switches, a 16-position mode switch;
- a 4M-word SRAM with 22 address and 16 data lines, ~50 s of history at
  75 kHz, recording stopped by BUSY;
- random triggers up to 100 kHz;
- an 8-bit trigger type with each L1A;
- L1ID reset by ECR and BCR once per orbit.

These are this design's own choices:

- **Algorithms.** The real firmware copies the CTP's own code, which is not
  published. The xorshift generator, the leaky-bucket form of complex
  deadtime and its four buckets, and the veto-window encoding are written
  from general knowledge of the CTP.
- **Formats.** The register map and reset values, the SRAM word format and
  the USB port protocol.
- **Timing values.** The orbit length of 3564 BCs (the LHC value), the
  40.08 MHz clock in the rate arithmetic, the roles of LEMO inputs 0-3, and
  the alignment of ECRs to BCR.

The card's sixteen "pre-programmed modes" selected by the rotary switch are
not described anywhere, so here the switch is only readable. The card also
has two reset buttons, and the function of one of them can be programmed. Here a press of that
button issues whichever host commands are set in `PRST_FN`, such as an ECR, a
software trigger or a counter clear. After a press the button is ignored for
65 536 BCs (about 1.6 ms), so contact bounce gives a single command. That set
of functions and the lockout time are this design's choice.

## Simulation

Every block has a self-checking testbench in `tb/` named `tb_<module>`. It
ends with a line `TB_RESULT checks=N failures=M`. `tb_dave_top` runs the
whole FPGA at its default sizes, with the full 4M-word SRAM model, configured
only through the VME and USB ports. It runs the following:

1. It measures the default 3564-BC orbit.
2. It switches to a 200-BC orbit and runs random triggers with simple and
   complex deadtime, the BCR veto window and periodic ECRs.
3. It sends external and software triggers, including one from the
   programmable reset button.
4. It holds BUSY high, which gates triggers and stops the recording.
5. It reads recorded words back through the host port.
6. It plays the recording back as L1As.

It counts each mechanism and fails if any never happened. It takes about 10
seconds of CPU.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dave_top \
  -y rtl -y tb +libext+.sv rtl/dave_pkg.sv tb/tb_dave_top.sv
./obj_dir/Vtb_dave_top +verilator+rand+reset+2
```

`tb_dave_rates` runs the card's two quoted operating points on the same
full-size top level:

- **100 kHz random triggers.** The run lasts 800 000 BCs. It measured 99.5 kHz
  of requests and 98.6 kHz of L1As, with L1As never closer than 5 BCs.
- **Recording at about 75 kHz.** The run lasts 1 600 000 BCs. At the measured
  74.0 kHz it wrote 3404 words, exactly one per BC that carried an L1A, BCR or
  ECR. Scaled to the full memory, that is 49.2 s of history.

Replace `tb_dave_top` by any other testbench name. `tb_sram_seq` shrinks the
SRAM to 12 address bits so that it can test wrapping quickly. The other
testbenches use the default sizes.

## Limits

- The deadtime, random generator and veto behave like the CTP in intent but
  have not been compared against the CTP's firmware.
- The VME slave is synchronous to the BC clock. Bus cycles therefore take
  several BC clocks, and a VME master must allow for that.
- BCRs are recorded together with L1As. At high rates this costs capacity:
  48.6 s instead of 55.9 s at 75 kHz.
- Playback timing starts after the prefetch FIFO fills. The replayed
  sequence is therefore shifted by a few BCs against the moment PLAY is
  entered, and it is not aligned to the live orbit.
