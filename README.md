# Traffic-aware MAC for a wireless network-on-chip

A wireless network-on-chip (WiNoC) adds a few millimetre-wave radios to an
ordinary wired mesh. Each radio, called a wireless interface (WI), sits at one
mesh switch. All WIs share one broadcast channel, so only one of them may
transmit at a time.

The simple way to share the channel is a token passed around a ring. Each WI
then gets the same fixed slot, whether it has a lot to send or nothing. This
design sizes each WI's slot by how much traffic that WI is expected to have.

- Every WI counts the flits its switch routes to the radio during one round of
  the ring, called an *epoch*.
- From that count it predicts the next epoch's demand with a PID formula.
- It announces the prediction at the start of its next slot.
- Every WI hears every announcement, so every WI knows every slot length
  without a central arbiter.
- A WI may send part of a packet and finish it in a later slot.
- Receivers switch themselves off for the flits of a slot that are not
  addressed to them.

This repository holds synthesizable SystemVerilog for the wireless layer:

- one WI with its MAC unit, buffers and serializer;
- a top level with eight WIs on a shared channel.

The radio itself is a behavioural model. The mesh switches and cores are not
included; their side of each WI is brought out as a plain flit port.

## Block structure of one WI

```
 switch ──noc_in──► output VCs ──► tx_controller ──► serializer ──► transceiver ──► antenna
                     │  (8×16)        ▲     │                         (OOK model)     │
                     ▼                │     ▼                                         │
              prediction_unit ──► allocation_unit ◄── REG_demand writes               │
               (Demand_self)       (Slot_counter,           ▲                         │
                                    epoch length)           │                         │
 switch ◄─noc_out── input VCs ◄── rx_controller ◄── deserializer ◄── transceiver ◄────┘
                     (8×16)          │   ▲                              ▲
                                     ▼   │ slot_end                     │ rx_on
                                  sleep_wake_unit ──────────────────────┘
```

| file | role |
|---|---|
| `winoc_pkg.sv` | sizes, flit and slot-information-packet layout, PID constants |
| `vc_buffer.sv` | NUM_VC FIFOs of VC_DEPTH flits; used for input and output buffers |
| `prediction_unit.sv` | Demand_counter, Demand_avg, Demand_prev, PID prediction, Epoch_counter |
| `allocation_unit.sv` | REG_demand (one entry per WI), Slot_counter, epoch length (D-SAM or P-SAM) |
| `sleep_wake_unit.sv` | initial-sleep, wake and post-wake counters; receiver enable; end of slot |
| `tx_controller.sv` | plans the slot, builds the slot information packet, sends the data flits |
| `rx_controller.sv` | parses slot information packets, steers data flits into input VCs, tracks ring order |
| `serializer.sv`, `deserializer.sv` | 32-bit flit ↔ four 8-bit beats |
| `ook_transceiver.sv` | behavioural radio: transmit and receive gating, beat counters |
| `wireless_interface.sv` | one WI |
| `winoc_top.sv` | NWI WIs and the shared channel |

## Time on the channel

One flit occupies the channel for **5 clock cycles**:

- 4 cycles of 8-bit beats, most significant byte first;
- 1 idle cycle that frames the flit.

At a 2.5 GHz clock this gives 32 bits every 2 ns, which is 16 Gb/s. That is the
data rate assumed for the OOK radio. The deserializer uses the idle cycle to find
flit boundaries and delivers each flit one cycle after its last beat.

**Slot.** A slot belongs to one WI and contains two parts:

1. Its slot information packet (SIP), 1 to 5 flits.
2. Exactly the data flits the SIP announced, possibly none.

**Epoch.** The WIs take slots in ring order: 0, 1, …, NWI−1, then 0 again. An
epoch ends when the slot of WI NWI−1 ends. After reset, WI 0 opens the first
slot.

**Hand-over.** Every WI runs its own copy of the slot timer, driven by the SIP it
heard, so all WIs see the end of a slot in the same cycle. The next WI raises
`slot_start` one cycle later. It then spends one planning cycle before its first
beat, so the medium is idle for a few cycles between slots.

## The slot information packet

The SIP is the only control traffic. Bits [31:30] of every flit give its type:

| [31:30] | flit |
|---|---|
| `01` | head of a data packet; bits [29:26] hold the destination WI, `4'hF` = broadcast |
| `00` | body |
| `10` | tail |
| `11` | first flit of a slot information packet |

The fields are the paper's: Header, Size, Demand, ID, and one tuple per
announced VC. Each tuple is *(PktID, DestWI, NumFlits)*. The widths and packing
below are this design's own:

```
flit 0 : [31:30]=11 | Size[2:0] | ID[2:0] | Demand[9:0] | tuple 0 [13:0]
flit k : [31:28]=0000 | tuple 2k-1 [27:14] | tuple 2k [13:0]        (k = 1..4)
tuple  : PktID[4:0] | DestWI[3:0] | NumFlits[4:0]      NumFlits = 0: unused
```

- `Size` is the SIP length in flits, which is 1 + ⌊tuples/2⌋.
- `ID` is the sender's ID_self.
- `Demand` is the sender's predicted demand for the next epoch (Demand_self).
- With 8 output VCs a SIP needs at most 5 flits. Seven tuples would fit in 4
  flits, the size quoted for the original configuration.

Continuation flits start with `00`, the same code as a body flit. This is not
ambiguous, because the receiver knows from `Size` how many SIP flits follow.

The data flits follow the SIP in tuple order: first all flits of tuple 0, then
all flits of tuple 1, and so on. A receiver therefore knows the index of every
flit in the slot before the first one arrives.

## Demand prediction (`prediction_unit`)

The demand of an epoch is the number of flits written into the WI's output
buffers during that epoch (`Demand_counter`). At each epoch end the unit
computes:

```
D_pred = Kp·D_act + Ki·D_avg + Kd·(D_act − D_prev)
Kp = 0.66, Ki = 0.13, Kd = 0.2041      (Q8: 169, 33, 52)
```

The terms are:

- `D_act` is this epoch's count.
- `D_avg` is a running average.
- `D_prev` is the previous epoch's count.

The sum is rounded to the nearest integer and clamped to 0…1023, then stored in
`Demand_self`. After that the unit updates its state:

- `D_avg ← (D_act + D_avg)/2`
- `D_prev ← D_act`
- the counter clears.

If the prediction is 0 while flits are waiting, Demand_self is forced to 1. This
way a WI with traffic is never starved.

`Epoch_counter` is reloaded with the next epoch's length at every epoch end. It
counts down once per data-flit time on the channel. What is left at the end is
the number of flit slots that went unused. The epoch itself ends at the ring wrap
(see "Departures" below).

## Slot allocation (`allocation_unit`)

Each WI writes every demand it hears into `REG_demand[ID]`. Its own entry is not
written; `Demand_self` is used in its place. At each epoch end the allocation is
set in one of two modes.

**D-SAM (default, `MODE = MAC_DSAM`).**

- The WI's slot is its own predicted demand.
- The epoch length is Demand_self plus the sum of all REG_demand entries.
- The epoch therefore grows and shrinks with the total traffic.

**P-SAM (`MODE = MAC_PSAM`).**

- The epoch has a fixed length E_F = 512 flit times (8 WIs × one 64-flit packet).
- Each WI gets the share ⌊Demand_self · E_F / Σdemand⌋, with a minimum of 1 when
  its demand is non-zero.
- The divider is combinational.

The resulting `Slot_counter` is the number of data flits the WI may send in its
next slot. Because every WI uses the same announced numbers, all WIs agree on
the epoch length.

## Partial packets and input-VC steering

A 64-flit packet rarely fits in one slot, so packets are sent in pieces.

**Transmit planning (`tx_controller`).** In its planning cycle the controller
walks the output VCs in index order. Each non-empty VC gets a tuple with
`NumFlits = min(flits waiting, allocation left)`, until the allocation is used
up.

Each packet in an output VC carries a 5-bit `PktID`. The ID is drawn from a
running count when the head flit is written, and every piece of the packet
repeats it. The VC is reported busy (`noc_in_busy`) from its head until its tail
has been sent. The switch must not start a new packet in a busy VC.

**Receive steering (`rx_controller`).** Flits are matched to an input VC by the
pair (sending WI, PktID).

- The head of a new packet reserves the lowest free input VC.
- Later pieces find that VC again.
- A VC stops matching when the tail arrives.
- The VC is freed when the switch has read the tail out.

**Keeping input VCs from running out.** Nothing in the scheme stops receivers
from running out of input VCs. With eight senders, each holding up to eight
half-sent packets, a receiver could need 56 VCs and has 8. So a transmitter
keeps at most `MAX_OPEN` packets "open on the air" at a time. A packet is open
once its head has been sent and until its tail has been sent. A packet whose
tail goes out in the slot being planned no longer counts.

`MAX_OPEN = max(1, NUM_VC/(NWI−1))` is 1 in the default configuration. With it,
no receiver ever holds more open packets than it has VCs, even when every packet
is a broadcast. There is no flow control over the air. If a flit still finds no
VC, or finds its VC full, it is dropped and `rx_drop` pulses. The end-to-end test
treats any drop as a failure.

## Receiver sleep (`sleep_wake_unit`)

The unit is loaded when the last SIP flit of a slot arrives. Its three counts
come from the tuples:

- `initial_sleep`: flits before the first tuple addressed to this WI (its ID or
  broadcast);
- `wake`: flits from there to the end of the last such tuple;
- `post_wake`: the rest of the slot.

Time is cut into 5-cycle flit windows, and each window decrements the first
non-zero counter. The receiver is off during the two sleep phases. It is on
during the wake phase, and between slots so that it hears the next SIP. When the
last count expires, `slot_end` pulses and the ring moves on.

A WI also sleeps through the data of its own slot. If the flits for a WI are not
contiguous, it stays awake over the gap and drops the flits that are not for it.

## Shared channel and transceiver

`winoc_top` models the channel as the OR of all WIs' transmit beats, heard by
every WI in the same cycle. An assertion checks that at most one WI transmits at
a time.

`ook_transceiver` has these properties:

- the transmitted beat appears one cycle after it is sent;
- received beats pass only while the receiver is on;
- it counts beats sent and beats heard, so transceiver energy can be estimated
  outside the RTL.

It has no bit errors, no analog behaviour and no power-up delay.

## Parameters

| name | default | meaning |
|---|---|---|
| `N_WI` / `NWI` | 8 | WIs on the channel (≤ 8 with 3-bit IDs) |
| `NUM_VC` / `NVC` | 8 | virtual channels per buffer |
| `VC_DEPTH` / `DEP` | 16 | flits per VC |
| `FLIT_W` | 32 | flit width (the SIP layout assumes 32) |
| `PKT_FLITS` | 64 | packet length used by the tests |
| `DEMAND_W` | 10 | Demand registers (flits per epoch, max 1023) |
| `EPOCH_W` | 13 | epoch length and Slot_counter |
| `KP_Q8, KI_Q8, KD_Q8` | 169, 33, 52 | PID weights × 256 |
| `EF_PSAM` | 512 | P-SAM epoch length |
| `MODE` | `MAC_DSAM` | `MAC_PSAM` selects proportional allocation |

The VC count, buffer depth, flit and packet sizes, WI count and PID weights are
those of the evaluated configuration. The field widths, E_F and all encodings are
this design's own.

Supported and unsupported configurations:

- **Flit size.** 64- and 128-bit flits would need a new SIP layout.
- **256 cores, 8 WIs.** Needs no change; it only raises the demand each WI sees.
- **256 cores, 16 WIs.** Needs 4-bit IDs and a wider DestWI, because `4'hF` is
  reserved for broadcast.
- **3 WIs (hierarchical variant).** Runs with `NWI = 3` on the top.

## Simulation

Every testbench in `tb/` checks its own results. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. To build one with
Verilator 5:

```
verilator --binary --assert -Wno-fatal -Irtl rtl/winoc_pkg.sv tb/tb_winoc_top.sv --top-module tb_winoc_top
./obj_dir/Vtb_winoc_top
```

Other testbenches build the same way, with the matching `tb_<block>.sv`.

**`tb_winoc_top`** runs all eight WIs at the default sizes.

- Each WI sends six 64-flit packets; about one in eight is a broadcast.
- Received packets are checked for these properties:
  - each arrives exactly once at each addressee;
  - it arrives complete and in order;
  - all its flits use one input VC.
- The test checks these channel rules:
  - no slot exceeds its allocation;
  - received flits keep the 5-cycle grid;
  - no flit is dropped.
- It fails unless each of these happened at least once:
  - a packet split over several epochs;
  - receiver sleep;
  - a broadcast delivery;
  - an epoch with no data;
  - a change of epoch length;
  - a 1-flit slot.
- It takes about 39 000 cycles.

**`tb_winoc_workloads`** runs the four synthetic traffic patterns through three
systems side by side: the default 8-WI system, a 3-WI system, and the 8-WI
system with P-SAM. Both use
`tb/winoc_traffic_bench.sv` with `-Itb` added to the command line.

- Each WI sends 16 packets, four per pattern:
  - uniform random;
  - hotspot, with half the packets going to one WI;
  - bit complement, sending to WI NWI−1−source;
  - broadcast, with half the packets broadcast.
- Every delivery is checked, per pattern.
- The 8-WI D-SAM system needs about 89 000 cycles and averages about 1.5 data
  flits per slot.
- The 8-WI P-SAM system needs about 48 000 cycles and averages about 12 data
  flits per slot.

**Unit testbenches** compare each block against its own reference model, worked
out independently of the RTL:

- a FIFO model;
- the PID formula in integer arithmetic;
- D-SAM and P-SAM sums;
- the counter windows;
- bit-exact serial framing;
- a SIP-to-flit reference for the controllers;
- two WIs talking for the `wireless_interface` test.

`tb_tx_controller` runs with `MAX_OPEN = NUM_VC`, so it also covers SIPs with many
tuples. Those SIPs are rare at system level.

## Departures from the original scheme and known limits

- **Epoch end.** The scheme runs the prediction "when the epoch counter
  expires". Here the epoch ends when the last WI of the ring finishes its slot,
  and Epoch_counter only measures the unused flit times. The two points coincide
  when every WI fills its slot. When some WI sends less than it announced, this
  design does not wait out the unused time.
- **Fixed-point weights.** The PID weights are Q8, so the effective weights are
  0.660, 0.129 and 0.203.
- **What the demand counts.** The scheme defines demand as the flits a WI
  needs to send. Its counter, however, is described as counting flits routed
  to the wireless port. This design counts flits written into the output
  buffers, which is the second reading.
- **Predictor under overload.** Kp + Ki ≈ 0.79 < 1, and the demand counts flits
  entering the output buffers, not the flits waiting there. When the buffers
  back up, arrivals are held back by the switch. The prediction then shrinks
  from epoch to epoch until only the 1-flit floor is left. The end-to-end test
  shows many 1-flit slots for this reason. In the workload test the 8-WI system
  averages about 1.5 data flits per slot, while P-SAM averages about 12 and
  finishes the same traffic in about half the time. So in this closed-loop
  setting D-SAM does *not* beat P-SAM, although the scheme expects it to. The
  formula and weights are kept
  unchanged; a backlog term would be this design's own invention.
- **Limit on open packets.** The `MAX_OPEN` rule is this design's own. It reduces
  how many VCs' worth of packets one WI interleaves.
- **Idle gap between slots.** Slot hand-over costs a planning cycle plus the
  one-cycle pipeline of the receive path, so a few idle cycles separate slots.
- **P-SAM testing.** P-SAM runs end to end only in the workload test. All other
  system-level checks use D-SAM, the main configuration.
- **Parts not included.** The mesh switches, the cores, the antenna and the
  analog transceiver are not included. `noc_in_*` and `noc_out_*` are where a
  switch's wireless port connects.
