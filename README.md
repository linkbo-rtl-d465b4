# LinkBo: a single-wire, peer-to-peer chip link in SystemVerilog

LinkBo connects chips through **one wire**. A pull-up holds the wire high and any
node can pull it low, so the wire computes the AND of all drivers. There is no
clock line and no master. Every node can send, and every node listens. Data is
Manchester coded, so each bit carries its own clock edge. A receiver learns the
sender's bit period from the first pulses of each message and re-aligns on every
bit after that. This lets two chips with unrelated clocks talk at a few hundred
kbit/s.

Two message classes share the wire:

* A **high-priority (HP)** message starts by holding the wire low for a whole bit slot.
* A **low-priority (LP)** message starts with ordinary bits.

A full-slot low never appears in valid Manchester code. As a result, an HP message
wins arbitration against LP traffic, and it can also **interrupt** an LP message
that is already on the wire. Every receiver sees the long low and switches over.

This repository holds synthesizable RTL for one LinkBo node (`rtl/`) and
self-checking testbenches (`tb/`). The testbenches include a two-node system test
that runs every protocol mechanism.

## 1. The message on the wire

Time on the wire is divided into *slots* of `MB_CYCLES` clock cycles (default 10,
so a 3 MHz clock gives 300 kbit/s). Each slot carries one Manchester bit in the
IEEE 802.3 sense:

* **1** is low in the first half and high in the second (a rising mid-slot edge).
* **0** is high, then low (a falling mid-slot edge).

The encoder is just `bit XOR mask`, where `mask` is 1 in the first half of the slot.

| field   | HP                          | LP                               |
|---------|-----------------------------|----------------------------------|
| SYNC    | 2 slots: *low* slot, then 1 | 2 slots: 1, 1                    |
| SIZE    | none (always 1 byte)        | 3 bits, byte count 1..7          |
| PAYLOAD | 8 bits                      | 8 × SIZE bits                    |
| CRC     | 4 bits                      | 4 bits                           |
| ACK     | 1 slot                      | 1 slot                           |
| total   | 15 slots                    | 10 + 8·SIZE = 18..66 slots       |

Further details of the format:

* All fields are sent MSB first.
* The CRC is x⁴+x+1 with a zero start value, computed over the payload bytes only.
* SIZE = 000 is reserved. It is never sent, and a receiver that decodes it reports an error.
* In the ACK slot the sender releases the wire. A receiver that found the CRC correct answers with a Manchester 1 (low, then high). Otherwise it leaves the wire high.

At 3 MHz, an HP message takes 150 cycles = 50 µs. LP messages take 60 µs (1 byte)
to 220 µs (7 bytes).

## 2. Finding the bit period: SYNC

A receiver does not know the sender's clock. It measures the SYNC field with its
own counter (`linkbo_rx_sync`, using the RX prescaler as a stopwatch):

* **HP:** the wire falls, stays low for one slot plus the first half of the following 1, then rises. The time from the fall to that rise is 1.5 slots.
* **LP:** the wire falls at the start of the first 1 and rises at its middle. It then falls and rises at the middle of the second 1. The time from the first fall to the second rise is also 1.5 slots.

In both cases the first falling edge starts the measurement. The length of the first
low tells the two classes apart. A low longer than `MB_CYCLES + MB_CYCLES/4`
cycles (12 by default) means HP, and the counter stops at the first rise.
Otherwise it is LP, and the counter stops at the second rise. The slot length in
the receiver's clock is then `S = round(2·count / 3)`, computed as `(2·count+1)/3`.
After that the receiver never uses its nominal `MB_CYCLES` for decoding, only `S`.
This is what lets two nodes with different clocks work together.

The 1.25-slot HP threshold is this design's choice. A single slot would be fragile
against the ±5 % clock differences the link must tolerate.

## 3. Decoding and re-synchronization

After SYNC, the RX prescaler counts cycles since the last *mid-slot* edge. The
decoder (`linkbo_mdec`) sorts each edge of the synchronized wire by its count `c`.
A boundary edge belongs at `S/2` and a mid-slot edge at `S`:

| count `c`                     | meaning                                                                   |
|-------------------------------|---------------------------------------------------------------------------|
| `S/4 ≤ c < round(3S/4)`       | boundary edge between two equal bits: ignored                             |
| `round(3S/4) ≤ c ≤ S+S/2−1`   | mid-slot edge: gives the bit (rise = 1, fall = 0) and reloads the counter |
| anything else                 | coding error                                                              |
| no edge by `S+S/2−1`          | coding error                                                              |

Reloading the counter on every accepted mid-slot edge is the *re-synchronization*.
An edge that comes a little early or late is still accepted, and the next bit is
measured from where that edge really was. A frequency error therefore never
builds up over a 66-slot message.

The window is lopsided on purpose. Late edges are the common case on this wire,
for two reasons:

* A rising edge depends on the pull-up, so it is slow.
* While two nodes send the same bits during arbitration on slightly different clocks, every rising edge on the AND-ed wire follows the later node and every falling edge the earlier one.

The window bounds are this design's choice.

The receiver (`linkbo_rx`) does the following:

* It assembles the SIZE bits, then the payload bytes in a SIPO register.
* It runs the payload and the received CRC through the same CRC-4 divider, and expects a zero remainder.
* It reports each byte on `rx_recv`/`rx_byte`.
* It answers in the ACK slot, with the mask taken from its own counter.
* It ends with `rx_end` (plus `rx_error` and `rx_hp`).

After any error it waits until the wire has been high for two nominal slots before
it looks for a new SYNC.

## 4. Who owns the wire: arbitration and the HP interrupt

This is the subtle part of the design.

**Arbitration.** Several nodes may start in the same cycle. Each sender checks the
wire at the last cycle of every half slot. If it is releasing the wire (sending a
high half) but reads it low, another node is driving. The sender then stops at
once and reports `tx_end` with `tx_error` and `tx_lost`. The Manchester half that
is low wins:

* An HP message beats an LP message in its first half slot. HP holds the wire low where LP's first 1 is high in its second half.
* Between two messages of the same class, the first differing bit decides. A 1 (low first) beats a 0.

The loop from the output register, through the wire and the two-flop synchronizer,
back to the check is 3 cycles. This must fit in half a slot, so `MB_CYCLES` must
be at least 8.

**Interrupt.** Suppose a node wants to send HP while it is receiving the body of an
LP message.

1. Its TOP FSM (`linkbo_top_fsm`) waits for the next falling edge of the wire and starts the HP message there.
2. The forced-low first SYNC slot then extends a low that the LP sender began. The wire stays low for more than a slot, which no valid Manchester stream can do.
3. The LP sender sees the wire low while it is releasing. It loses arbitration and stops.
4. Every receiver's low-bus detector (`linkbo_lbdet`) fires once the low has lasted `S + S/4 + 1` cycles, with `S` taken from the current message's SYNC. This is 13 cycles for a nominal slot. The receiver drops the LP message and reports it with `rx_error`. It then continues as if in the first slot of an HP SYNC, with its counter preloaded with the low time already seen minus 4 cycles.

The 4 cycles are the interrupter's reaction time: 2 synchronizer flops, 1 TOP FSM cycle and 1 output register. Without this correction the HP slot would be measured too long.

The threshold follows the measured slot because a valid low can already last a full slot, and a sender whose clock runs 10 % slow makes that 11 cycles.

The HP message then completes normally, with its own CRC and ACK.

**Own messages.** A node hears its own transmissions. The TOP FSM marks the node as
sender (`own_tx`) from the start until its receiver is idle again, or only until
the end of the transmission if it lost arbitration. The receiver does not report,
or acknowledge, a message that began while `own_tx` was set. A sender that loses
arbitration, however, receives the winner's message normally.

## 5. Block structure

Each block is one module:

| module                | role |
|-----------------------|------|
| `linkbo`              | one node: all blocks below, wired as in the architecture of the design |
| `linkbo_pkg`          | shared constants (`MB_CYCLES_DEF = 10`, field widths, polynomial), CRC step function, HP threshold |
| `linkbo_synchronizer` | two-flop synchronizer for the asynchronous wire level, reset to 1 |
| `linkbo_top_fsm`      | start rule: starts when the bus is free, or on a falling edge for an HP interrupt; `own_tx` tracking |
| `linkbo_psc`          | prescaler counter with load, half-slot mask and tick outputs (used as TX PSC and RX PSC) |
| `linkbo_tx`           | TX FSM, PISO8/PISO3/PISO4, CRC-4 LFSR, byte counter, field MUX, arbitration check, ACK checker |
| `linkbo_piso`         | parallel-in serial-out shift register, MSB first |
| `linkbo_crc4`         | bit-serial CRC-4 (x⁴+x+1) register, used by TX and RX |
| `linkbo_rx`           | RX FSM with bit and byte counters, size decoder, ACK generator |
| `linkbo_rx_sync`      | SYNC measurement and HP/LP classification |
| `linkbo_mdec`         | Manchester decoder and re-synchronization windows (combinational) |
| `linkbo_sipo`         | serial-in parallel-out byte register |
| `linkbo_lbdet`        | low-bus detector for the HP interrupt |
| `linkbo_driver`       | Manchester encoder (XOR), selection of TX/ACK data and mask, forced low, release, and output register |

The pad is not part of the RTL. Drive the wire low when `bus_out` is 0, release it
when `bus_out` is 1, and feed the wire into `bus_in`.

### Parameters

The top has two parameters:

* **`MB_CYCLES`** (default 10): clock cycles per slot. It must be even and at least 8.
* **`CW`** (default 8): width of all counters. The longest count is a 3-slot SYNC time-out, so `CW` must hold `3·MB_CYCLES`.

### Host interface and timing

**Sending.** Pulse `send` for one cycle with `hp`, `size` and the first byte on
`tx_in`:

* The request is held until the bus is free.
* `upd` pulses each time a byte has been taken. The host then has 8 slots to put the next byte on `tx_in`.
* `tx_end` pulses once, at the end of the ACK check or on lost arbitration.

**Receiving.**

* Bytes appear with a one-cycle `rx_recv` pulse.
* `rx_end` pulses once per message, with `rx_error` for a CRC error, a coding error, an interrupted message or SIZE 000.

**Latency.** `bus_out` is registered (1 cycle). `bus_in` passes two synchronizer
flops before any logic sees it.

## 6. Where this RTL follows its source and where it chooses

Taken from the protocol's description:

* the slot structure and field lengths
* the two SYNC patterns and the 1.5-slot measurement
* IEEE 802.3 Manchester coding built with an XOR encoder
* CRC-4 with x⁴+x+1 over the payload
* the ACK rule (Manchester 1 if the CRC is correct, no edge otherwise)
* wired-AND arbitration in which the low level wins
* HP interrupt via a low-bus detector
* the block set: TOP FSM, TX with PISO8/PISO3/PISO4, CRC-4, byte counter and ACK checker, RX with SYNC, MDEC, re-SYNC, SIPO, CRC divider, LBDET and counters, PSCs, synchronizer, registered driver
* 10 clock cycles per slot

This design's own choices, not fixed by the source:

* bit order (MSB first) and the CRC start value (0)
* the 1.25-slot HP threshold in SYNC, and the interrupt threshold of `S + S/4 + 1` measured cycles
* the 4-cycle correction for the interrupter's reaction time
* the decoding windows `[S/4, round(3S/4))` and `[round(3S/4), S+S/2−1]`
* the half-slot arbitration sampling point
* the ACK-check window (from half a slot into the ACK slot until two slots after its start)
* the TOP FSM's start rules, including starting an HP interrupt on a falling edge
* the `own_tx` handling, so a node does not receive its own message
* error recovery after two idle slots
* the whole host-side handshake

Known differences and limits:

* Measured HP latency in the source is 50.4 µs at 3 MHz. This RTL needs 50.0 µs plus a few cycles of I/O delay. The LP figures differ in the same way (60 µs against 60.6 µs for one byte).
* The source suggests using SIZE 000 for an addressed message type in multi-node systems, but gives no format for it. It is not implemented: SIZE 000 is rejected.
* Nothing analog is modelled. This covers the tri-state pad, pull-up, wire parasitics and the comparator threshold. The wire limits the usable clock rate (the source reports about 300 kbit/s for LP and 710 kbit/s for HP over 5 m). The RTL itself has no rate limit.
* The driver follows the source's four-multiplexer structure: ACK data or TX data, RX or TX mask, forced low, and drive or release, ahead of the output register. The source does not say which input each select value picks, so those polarities are this design's own.
* The source's block diagram has two synchronizer boxes, one on the way in from the pad and one on the way out. Here the wire input is synchronized by two flops. On the way out, the driver's output register does the job, since the outgoing level already belongs to the local clock domain.

## 7. Verification

Every block has a self-checking testbench in `tb/` that compares it with an
independent reference model and prints `TB_RESULT checks=N failures=M`.

`tb_linkbo_system` instantiates two full nodes at their default parameters. It
connects them through an AND-modelled wire and checks each of these at least once:

* HP messages, with a 15-slot latency check
* LP messages of every size 1..7, with a `10 + 8·size` slot latency check
* a bit flip giving a CRC error and no ACK
* a glitch giving a coding error
* LP against HP and HP against HP arbitration
* an HP message interrupting a 7-byte LP message
* node B running with a clock 5 % slower and 5 % faster than node A
* re-synchronization on shifted edges

It counts each mechanism and fails if one never occurred.

`tb_linkbo_multi` puts three nodes on one wire, with clocks 1 % apart. Node 0
sends an LP message while nodes 1 and 2 send HP messages, all at the same moment.
The testbench checks the following:

* The LP node drops out.
* The HP node with the larger byte wins, because its first differing bit is a 1.
* Both losers receive and acknowledge the winner's byte.
* The losers' retry and the final lone LP message then go through in order.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/linkbo_pkg.sv tb/tb_linkbo_system.sv \
          --top-module tb_linkbo_system -Mdir obj_system -o sim
./obj_system/sim
```

Replace `system` with `multi`, `psc`, `synchronizer`, `crc4`, `piso`, `sipo`, `lbdet`,
`mdec`, `rx_sync`, `driver`, `top_fsm`, `tx` or `rx` to run the block tests.
Each one finishes in seconds. Every testbench has a watchdog that counts a failure
and stops the simulation if it hangs.
