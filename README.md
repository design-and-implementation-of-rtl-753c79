# Car-parking entrance controller for an FPGA

This design runs the entrance of a small car park of 32 slots. A car stops at the gate. If
no slot is free, an LCD at the gate reads `NO SPACE EXIT` and the gate stays shut. If a slot
is free, the LCD reads `SPACE AVAILABLE` and a stepper motor turns to open the door. The
visitor's card is then read. A registered member is *identified*; anyone else is a *new
member* and gets a temporary card. Last, the slots are checked one after another and the
first empty one is allotted to the car, which is shown on a row of LEDs. An IR sensor in each
slot reports over a radio link whether the slot is empty, filled or reserved. One LED per slot
shows filled slots and another shows reserved ones. Every handled visitor is queued as a
record for a host computer.

The RTL follows the structure described by R. Kaur and B. Singh in "Design and Implementation
of Car Parking System on FPGA" (C-DAC Mohali; prototype on a Virtex-5 board). That work gives
the order of operations as a flow chart, and the names and widths of the top-level signals.
It also shows simulations of the stepper, the identification machine and the slot allotment,
and lists the external parts: a 16-pin character LCD, a ULN2003 driver with a stepper motor,
and IR sensors behind an HT12E encoder → RF link → HT12D decoder. It gives no state encodings,
timing, protocols or table sizes other than the 32 slots. Everything of that kind here is this
design's own choice, listed in the section *Where this design goes beyond the original*.

All SystemVerilog is in `rtl/` (one module or package per file) and the self-checking
testbenches are in `tb/`.

## Block structure

```
                       w3 (car at gate)      w4 (card code)
                            |                     |
 HT12D  w2[3:0], rf_vt  +---v---------------+     |
 -----> rf_slot_receiver|  parking_controller|    |
            | report    |  (entrance FSM)   |    |
            v           +--+----+----+---+--+    |
        slot_status <------|----|----|-- |-- alloc_we
        (32 x 2-bit)   door|  id|  slot  |log
            |  empty[]  start start start |
            |  space_available |    |     v
            |          |       |    |  data_buffer --> host port
            |          v       v    v
            |    interfacing  identification   slot_checker --> led[31:0]
            |   (stepper_motor, lcd_controller)
            v      |            |
 led_filled, led_reserv  z[6:0], lcd_*   identified, new_member, temp_card
```

| Module | Role |
|---|---|
| `parking_system` | top level, wires the blocks together |
| `parking_controller` | the entrance sequence (flow chart as a state machine) |
| `rf_slot_receiver` | assembles slot-status reports from HT12D decoder words |
| `slot_status` | status register of every slot; filled/reserved LEDs; "space available" |
| `slot_checker` | ordered search for the first empty slot; one-hot allot LED |
| `identification` | member / new-member decision, temporary-card numbers |
| `interfacing` | groups `stepper_motor` (door) and `lcd_controller` (gate display) |
| `data_buffer` | FIFO of visit records for the host |
| `parking_pkg` | slot-status enum, visit-record struct, default sizes |

## The entrance sequence

`parking_controller` is one state machine that handles one car at a time:

| State | Leaves when | Then |
|---|---|---|
| `P_IDLE` | synchronised rising edge of `w3` | space check |
| `P_SPACE_CHECK` | immediately | no empty slot: pulse `refused`, wait for the car to leave. Otherwise pulse `door_start` |
| `P_DOOR_OPEN` | `door_done` from the stepper | pulse `ident_start` |
| `P_IDENTIFY` | `ident_done` | pulse `slot_start` |
| `P_SLOT_CHECK` | `slot_done` | log |
| `P_LOG` | immediately | push a visit record, pulse `admitted` |
| `P_WAIT_LEAVE` | `w3` low | `P_IDLE` |

Each step starts on the cycle after the previous step reports done. The sequence takes as
long as the door: with the defaults, 50 steps of 2.5 ms at 100 MHz, about 127 ms.
Identification takes 2 cycles and the slot search up to 33. A car that stays at the gate is
never handled twice, because a new car is only accepted after `w3` has fallen.

The space check and the slot search read the same status register, but at different times.
While the door turns, a sensor may report the last free slot as taken. The search then finds
nothing. The car has already been let in, so the record is logged with `found = 0` and no
allot LED is lit. The end-to-end testbench exercises this case.

## Slot status and the RF link

This is the part where the most had to be designed, because the original only says that IR
sensors feed an HT12E encoder, the data crosses an RF link, and the four parallel outputs of
an HT12D decoder reach the FPGA.

**Status values** (`parking_pkg::slot_state_e`): `SLOT_EMPTY = 00`, `SLOT_FILLED = 01`,
`SLOT_RESERVED = 10`. Code `11` is not a status.

**Report framing** (`rf_slot_receiver`). The HT12D presents a 4-bit word on `w2[3:0]` and
raises its VT (valid transmission) output while the word is valid. VT enters as `rf_vt`. Both
pass through two flip-flops. Each rising edge of VT delivers one word, and a report takes two
words:

| Word | bit 3 | bits 2:1 | bit 0 |
|---|---|---|---|
| first | 1 | status[1:0] | slot[4] |
| second | slot[3] | slot[2:1] | slot[0] |
A word with bit 3 = 0 that arrives while a first word is expected is dropped. This is how the
receiver falls back into step after a lost word. A report with status `11`, or with a slot
number of `N_SLOTS` or more, is dropped and pulses `rpt_error`. A good report reaches the
status register on the third clock edge after VT is first sampled high for its second
word: two edges in the receiver, one to write the register.

**Status register** (`slot_status`). There are `N_SLOTS` two-bit registers, all empty after
reset. They have two write ports. An RF report sets the status it carries. An allotment
(`alloc_we` from the slot checker) marks the allotted slot filled at once, so the next car is
not sent to the same slot before its sensor reports. When both write the same slot in the
same cycle, the report wins, since it comes from the sensor. Outputs:

* `led_filled[i]` and `led_reserv[i]` drive the per-slot LEDs;
* `slot_empty[i]` feeds the search;
* `space_available = |slot_empty` feeds the controller and the LCD.

Reserved slots are never allotted.

**Ordered search** (`slot_checker`). The original flow chart asks "slot 1 free? slot 2 free?
… slot n free?" and allots at the first yes. The checker does exactly that, one slot per clock
cycle, starting at index 0. Index *k* is slot *k*+1 of the flow chart. When the first empty
slot is at index *k*, `done` comes *k*+2 cycles after the `start` pulse; when no slot is
empty, `N_SLOTS`+1 cycles after it. The result appears as `slot` (the index), `found`, and the
one-hot vector `led_slotallot`, which is the top-level output `led`. It stays until the next
search.

## Identification and temporary cards

`identification` has two states, idle and identify. One cycle after `start` it reads the card
code `w4` (2 bits). Code *c* belongs to a member if bit *c* of the parameter `MEMBER_MASK` is
set. The default `1110` makes codes 1–3 members and reserves code 0 for "no card". A member
raises `identified`, and `person` carries the code. Anyone else raises `new_member` and is
issued the next temporary-card number on `temp_card`, which counts from 0 and wraps after 16.
Results hold until the next visitor. Every visitor is admitted; see the last section for why.

## Door motor

`stepper_motor` has a free-running counter `cnt` that divides the clock by `DIV`, and a square
wave `clkd` that toggles at every wrap. The coil logic runs on `clk` and uses the wrap as a
one-cycle enable. `clkd` is only an output. On `door_start` the coils step `DOOR_STEPS` times,
one step per wrap, in single-coil order `0001 → 0010 → 0100 → 1000 → …`, called clockwise
here. One wrap after the last step the coils are released (`0000`) and `done` pulses. The
rotor phase carries over to the next opening. The four coil lines are `z[3:0]` of the top
level. `z[6:4]` are the other three inputs of the 7-channel ULN2003 and are held at 0. Nothing
closes the door: the original describes only the opening rotation.

## Gate display

`lcd_controller` drives an HD44780-compatible 16×2 module over an 8-bit bus (`lcd_d`,
`lcd_rs`, `lcd_e`). It only writes, so `lcd_rw` = 0 and it never polls the busy flag; each
transfer is followed by a fixed wait. Each transfer goes:

1. data and RS are set up with E low for one cycle;
2. E is high for `T_E_HIGH` cycles;
3. E is low while data is held for `T_CMD` cycles, or `T_CLEAR` after a clear or the first
   two function-set commands.

After `T_POWERUP` cycles it sends `38h 38h 38h 0Ch 01h 06h`, then `80h` and the 16 characters
of line 1. Line 1 is rewritten whenever `space_available` differs from the message on show.
A complete message is 17 transfers, about 0.85 ms at the default timings. `lcd_ready` is high
while the display is current.

## Host record queue

`data_buffer` is a FIFO of `BUF_DEPTH` records of type `visit_rec_t`:
`{new_member, card, temp_card, found, slot}`, 13 bits. The controller pushes one record per
admitted car. The host reads with `host_rd`; `host_rec` shows the oldest record whenever
`host_empty` is 0. A push into a full queue is dropped, even if a pop happens in the same
cycle, and sets the sticky `host_overflow`. An assertion flags a read from an empty queue.

## Top-level pins (`parking_system`)

| Pin | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `reset` | in | 1 | clock; synchronous active-high reset |
| `w2` | in | 4 | HT12D data D3..D0 |
| `rf_vt` | in | 1 | HT12D valid-transmission strobe |
| `w3` | in | 1 | car present at the gate |
| `w4` | in | 2 | card code |
| `led` | out | N_SLOTS | one-hot: slot just allotted |
| `led_filled`, `led_reserv` | out | N_SLOTS | slot status LEDs |
| `z` | out | 7 | ULN2003 inputs, coils on [3:0] |
| `identified`, `new_member` | out | 1 | identification result |
| `temp_card` | out | 4 | last temporary card issued |
| `lcd_d`, `lcd_e`, `lcd_rs`, `lcd_rw` | out | 8,1,1,1 | LCD bus |
| `host_rd` / `host_rec`, `host_empty`, `host_overflow` | in / out | 1 / 13,1,1 | host queue |
| `refused`, `admitted`, `rpt_error` | out | 1 | one-cycle event pulses |
| `clkd`, `lcd_ready` | out | 1 | divided step clock; display current |

The original top level has `w2(3:0)`, `w4(1:0)`, `w3`, `clk`, `reset`, `led(31:0)`,
`led_filled(31:0)`, `led_reserv(31:0)`, `z(6:0)`, `identified` and `new_member`. The rest are
added. `w2`, `rf_vt` and `w3` are synchronised inside. `w4` is not: it must be steady from
the rise of `w3` until the visitor is identified. `host_rd` must be synchronous to `clk`.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N_SLOTS` | 32 | slots (1..32; the frame carries 5 slot bits) |
| `DIV` | 250 000 | clock cycles per door step (400 steps/s at 100 MHz) |
| `DOOR_STEPS` | 50 | steps per opening (90° of a 200-step motor) |
| `T_POWERUP`, `T_E_HIGH`, `T_CMD`, `T_CLEAR` | 1.5 M, 25, 5 000, 200 000 | LCD timing in cycles |
| `MEMBER_MASK` | `4'b1110` | registered card codes |
| `BUF_DEPTH` | 16 | host queue depth |

`CARD_W` (2) and `TEMP_W` (4) are in `parking_pkg`. Only 32 slots comes from the original;
every other default is this design's.

## Where this design goes beyond the original

The following are not in the original and were chosen here:

* **Inner workings of every block**: the clock frequency (100 MHz assumed), all delays, the
  step sequence and its direction, the number of door steps, and the LCD command sequence
  and timing.
* **RF link**: the two-word report format and the use of the HT12D VT pin. The original does
  not say how 32 slot states pass through four wires.
* **Status register**: the status codes, the reset state (all empty), marking an allotted slot
  filled, and never allotting reserved slots.
* **Identification**: the member table as a parameter, code 0 as "no card", and the
  temporary-card counter.
* **Conflict over failed identification**: the flow chart shows an exit when identification
  fails, but the text gives a new member a temporary card. The text is followed, so nobody is
  turned away at identification.
* **Host queue**: the data buffer is only a named box in the original. The FIFO, the record
  format and the host port are this design's.
* **`z(6:0)`**: read as the seven ULN2003 inputs.
* **Unused signals**: the original's simulations also show signals whose role it never
  explains (`w`, `w1`, `fnd`, `a`, `fnd1`, `cout`, states such as `waiting_6` or
  `state_19`). They are not reproduced.
* **Not built**: door closing, which the original does not describe. The flow chart's last
  box reads "slot allotment using RF". Sending the allotment back over the radio link is not
  described, so the allotment is shown only on `led`. The stand-alone
  identification demo used a 3-bit code (8 persons); the integrated design, built here, has
  a 2-bit code.

The external parts are not modelled: host PC, LCD module, ULN2003 and motor, IR sensors,
HT12E, RF modules and HT12D. The testbenches play their roles directly at the FPGA pins.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own or through a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_parking_system \
    -y rtl -y tb +libext+.sv -Irtl rtl/parking_pkg.sv tb/tb_parking_system.sv -o sim
./obj_dir/sim
```

Use the same command with any other testbench name:

| Testbench | What it covers |
|---|---|
| `tb_stepper_motor` | cycle-exact reference model of divider, coil order, step count and spacing |
| `tb_lcd_controller` | LCD bus monitor: init commands, both messages, E width, waits, data stable while E high |
| `tb_rf_slot_receiver` | random framed reports, malformed ones, stray words, latency |
| `tb_slot_status` | random writes against a reference array, same-slot collisions, full lot |
| `tb_slot_checker` | random occupancy, first-empty result, one-hot LED, exact latency |
| `tb_identification` | members, new members, temporary-card wrap, timing |
| `tb_data_buffer` | against a queue model; overflow; simultaneous push and pop |
| `tb_parking_controller` | step order, one-cycle hand-offs, refusal, one record per car |
| `tb_interfacing` | stepper and LCD together |
| `tb_parking_system` | whole system, 8 slots, short timings |
| `tb_parking_system_full` | whole system at all default parameters |
| `tb_slot15_allotment` | 16-slot lot whose first free slot is slot 15, then full |

`tb_parking_system` covers every mechanism and fails if any one never occurs:

* reserved and filled slots skipped;
* member and new member;
* the lot filling, a refusal, and the LCD switching both ways;
* the race that leaves no slot;
* malformed RF reports;
* host-queue overflow.

`tb_parking_system_full` runs one member through the gate at the default sizes: 32 slots and
50 door steps of 250 000 cycles. That is about 15 million cycles and takes about 13 s. It
checks the step count and the exact step spacing.

## Changing it

* **A different lot size**: set `N_SLOTS` on `parking_system`, up to 32. Beyond 32, widen
  `SLOT_W` in `parking_pkg` and extend the RF frame, which carries only 5 slot bits.
* **A longer card code**: change `CARD_W` in `parking_pkg`, together with the width of
  `MEMBER_MASK`.
* **A different clock**: rescale the timing parameters; they are counts of clock cycles.
