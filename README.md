# Bi-directional AER transceiver: one parallel bus, both directions, switched per event

Neuromorphic chips send spikes to each other as address-events (AER): a
multi-bit address with a request/acknowledge handshake. A conventional link
needs one parallel bus for each direction. This transceiver halves the pin
count. Two chips share a single parallel bus (`bus_req`, `bus_ack` and the
data lines) plus two extra wires. Over those wires the chips hand the
bus to each other, and they can do so after every single event. This RTL
models the transceiver block described by N. Qiao and G. Indiveri ("A
bi-directional Address-Event transceiver block for low-latency inter-chip
communication in neuromorphic systems"). That block was built as a fully
asynchronous circuit in 28 nm FDSOI, carrying 26-bit events.

The original is transistor-level, asynchronous logic: pre-charge half-buffer
(PCHB) stages, keepers and C-elements. This SystemVerilog is a **clock-driven
model of that circuit**. Each state-holding node of the circuit is one flip-flop.
The logic between nodes is combinational. One clock cycle therefore stands for
one gate delay, and all latencies below are in cycles, not nanoseconds.

```
        chip L                                             chip R
  +-------------------+        bus_req               +-------------------+
  | TX_FIFO-TX_Buffer |<==========================>  | TX_Buffer-TX_FIFO |
  |        |          |        bus_ack               |        |          |
  |   SW_Control      |<==========================>  |   SW_Control      |
  |        |          |        data[25:0]            |        |          |
  | RX_FIFO-RX_Buffer |<==========================>  | RX_Buffer-RX_FIFO |
  |    sw_ack --------|------------------------------|--> sw_req         |
  |    sw_req <-------|------------------------------|--- sw_ack         |
  +-------------------+                              +-------------------+
```

## Who owns the bus: the switch protocol

Each block drives one wire, `sw_ack`, and reads the partner's wire as
`sw_req`. The meaning of its own `sw_ack` is:

* 1: "I am the transmitter, or I want to be";
* 0: "I have nothing to send, you may transmit".

From reset one block is the transmitter (`t_r = MODE_TX`, `sw_ack = 1`). The
other is the receiver (`t_r = MODE_RX`, `sw_ack = 0`). Written as
(`sw_ack` of L, `sw_ack` of R), the pair only ever moves around this cycle:

| (L, R) | L mode        | R mode        | what happened                       |
|--------|---------------|---------------|-------------------------------------|
| 1 0    | TX            | RX            | L owns the bus                      |
| 1 1    | TX            | RX            | R asked for the bus                 |
| 0 1    | TX -> RX      | RX -> TX      | L let go, both flip                 |
| 1 1    | RX            | TX            | L asks for the bus back             |
| 1 0    | RX -> TX      | TX -> RX      | R let go, both flip                 |

The state (0, 0) can never occur. Three rules inside `sw_switch_ctrl` drive
this cycle:

1. **Asking (`sw_ack` rises).** A block asks only if all three hold:
   * it is in RX mode;
   * an event waits at its TX_Buffer input (`tx_in_req`);
   * `rx_p` is 1, meaning it has received at least one event since it last
     gave the bus away.

   `rx_p` comes from the RX_Probe. Because of this rule the partner always
   delivers at least one event before losing the bus, so neither side can
   take the bus straight back. A block reset into RX mode starts with
   `rx_p = 1`, so it may ask at once.
2. **Letting go (`sw_ack` falls).** A block lets go only if all three hold:
   * it is in TX mode;
   * the partner asks;
   * `tx_p` is 0, meaning no event is half-way through its handshake.

   `tx_p` comes from the TX_Probe. An event that the FIFO offers after the
   partner has asked is held back. Both the TX_Probe and the TX_Buffer's input
   stage ignore it while `sw_req` is high. A pending request therefore wins
   over new traffic, and the bus changes hands after the current event.
3. **Mode.** The mode is `TX_EN = C(!sw_req, sw_ack)`, a Muller C-element,
   with `RX_EN = !TX_EN`:
   * TX_EN becomes 1 once this block asked and the partner let go;
   * TX_EN becomes 0 once this block let go while the partner asks;
   * otherwise it holds.

   TX_EN of L needs `sw_ack`R = 0, while TX_EN of R needs `sw_ack`R = 1.
   Both blocks therefore can never be in TX mode at once, and the bus is
   never driven from both ends.

Timing in this model: an idle owner drops `sw_ack` 1 cycle after the request
arrives. Both C-elements flip 1 cycle later. The new transmitter's first
`bus_req` follows TX_EN after the matched delay, which is 1 cycle. The silicon
measured about 5 ns for each of the first and last of these steps.

## One event across the link

Every handshake is 4-phase (return-to-zero). One event from L to R travels as
follows. Each arrow is one cycle, because each step is a registered node:

```
TX_FIFO tx_in_req -> tx_in_v -> tx_out_req = bus_req (matched delay) and data latched
  -> R: rails evaluated -> out_v (validity) -> rx_in_ack = bus_ack
  -> L: tx_in_ack -> FIFO drops tx_in_req (en falls) -> tx_in_v low -> bus_req low
  -> R: bus_ack low -> L: tx_in_ack low (en rises) -> FIFO offers next event
```

That loop is 12 cycles, so a continuous one-direction stream carries one
event every 12 cycles. With traffic on both sides the bus changes direction
after every event. The hand-over takes two cycles: the partner's `sw_ack` falls, then both
C-elements flip. Those are the same two cycles a FIFO needs to offer the next
event and get it onto the bus, so the period stays 12 cycles. The silicon measured 31 ns in
one direction and 35 ns per event when alternating. The small extra cost of
switching seen on the chip does not appear in this model.

The sending FIFO's acknowledge waits for the remote receiver's
acknowledge, so the TX_Buffer does not decouple the two chips. The FIFOs on
both sides are what let the chip cores run ahead of the link.

## The blocks

| file | block | what it holds |
|------|-------|---------------|
| `ae_transceiver.sv` | top | the six blocks below, wired as one link end |
| `tx_fifo.sv` | TX_FIFO | core -> TX_Buffer, 4-phase both sides, DEPTH words + output register |
| `tx_buffer.sv` | TX_Buffer | bundled-data PCHB output stage (input validity gated by `sw_req`, enable, acknowledge, matched delay, data latches) |
| `sw_control.sv` | SW_Control | `rx_probe`, `tx_probe`, `sw_switch_ctrl` |
| `rx_probe.sv`, `tx_probe.sv`, `sw_switch_ctrl.sv` | probes and switch controller | the three rules above |
| `rx_buffer.sv` | RX_Buffer | PCHB input stage: acknowledge, enable, dual-rail data, validity tree |
| `rx_fifo.sv` | RX_FIFO | dual-rail input from RX_Buffer, bundled 4-phase output to core |
| `ae_bus_buffers.sv` | bus buffers | drive/receive switching of every bus line by TX_EN/RX_EN |
| `pchb_keeper.sv`, `c_element.sv` | primitives | keeper node and C-element |
| `ae_pkg.sv` | package | default sizes, `ae_mode_e` |

**Keeper node (`pchb_keeper`).** This is the basic circuit element. A PCHB gate
has a pull-down stack, a pull-up stack and a weak keeper that holds the node
when neither stack conducts. The RTL reduces that to `set`, `clr` and hold, on
a clock edge, with an assertion that the two stacks never conduct at once.
Every node of the probes, the switch controller and both buffers is one of
these. The inputs of each stack are the signals named in the original
schematics.

**Dual rail.** The RX side hands events to the RX_FIFO in dual-rail form:
every bit has a true rail and a false rail. "Valid" means exactly one rail of
every bit is high. "Neutral" means all rails are low. The validity tree rises
only when every bit is valid and falls only when every bit is neutral. The
RX_FIFO stores the true rails.

**Bus pads.** The shared lines leave the top as `*_o`, `*_oe` and `*_i`:
value, drive enable and wire value. Connect them to bidirectional IO cells
or, in simulation, to a resolved wire. On the silicon these were standard
2 mA IO cells configured by TX_EN/RX_EN. A receiver whose line the block is
driving itself reads 0. Without that, a block would see its own requests as
received events.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `DATA_W` | 26 | the 26-bit events of the chip |
| `FIFO_DEPTH` | 4 | own choice; the FIFOs hold DEPTH+1 events |
| `MATCHED_DELAY` | 1 cycle | own choice; one cycle covers the data latch evaluation |

## Where this model departs from the circuit it follows

* **Clocked, not asynchronous.** Both link ends must run from the same clock.
  No synchronizers are provided for ends in different clock domains. Because
  every node costs one cycle, latencies are cycle counts and do not map to
  the chip's nanoseconds.
* **One reset.** The circuit's two reset nets (stage reset and pre-charge
  reset) are merged into one synchronous `rst`. `t_r` selects the reset mode.
* **Reading of the schematics.** Some points needed an interpretation:
  * The stage-enable and acknowledge parts of the TX_Buffer are described in
    swapped order in the prose. The schematic labels are followed.
  * The signal `Out_vB` of the data stacks is undefined in the source. It is
    taken as the inverted acknowledge of the next stage, as in any PCHB.
  * The RX rail stacks are driven from the bus data. The schematic labels them
    with the output rails.
  * The validity tree's unlabelled combining elements are built as a
    C-element tree.
* **FIFOs.** Only their purpose is given in the source. They are plain
  circular buffers with 4-phase ports.
* **Energy, area, pad drive.** These are not modelled.

## Simulating

Every `tb/tb_*.sv` is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. `tb_ae_link` runs the whole link at the
default sizes:

* two transceivers on a modelled shared bus (`tb/ae_bus_model.sv`);
* a left-to-right burst, a right-to-left burst, traffic from both sides, and
  traffic from both sides against slow receivers;
* every event is checked in order;
* the 1-cycle grant, the 1-cycle switch-to-request, and the 12-cycle periods
  are checked;
* each mechanism is counted and must occur at least once: switches both ways,
  a grant held by an event in flight, a request held by the RX_Probe rule, a
  new event held back, TX and RX FIFO full, and the request right after reset.

It also checks that the bus is never driven from both ends.

`tb_ae_workloads` replays the three operating cases a designer would measure
on silicon, again at the default sizes, and checks every latency in cycles:

| case | setup | checked |
|------|-------|---------|
| A | reset right-to-left, the left side streams 20 events | grant 1, mode change to first `bus_req` 1, `bus_req` to `bus_ack` 3, request period 12 |
| B | both sides stream 20 events at once | the direction turns after every event; request period 12 |
| C | reset left-to-right, one event from the right, then one from the left | grant 1 and mode change to first `bus_req` 1, in both switch directions |

Handshake rules are also written as assertions inside the RTL (compile with
`--assert`):

* a keeper node's set and clear stacks never conduct together;
* a FIFO or buffer request is held until it is acknowledged;
* bundled data is stable while a request waits for its acknowledge;
* an acknowledge rises only on a pending request;
* every dual-rail bit written into the RX_FIFO has exactly one rail high.

```
verilator --binary --timing --assert -Irtl rtl/ae_pkg.sv tb/tb_ae_link.sv \
    -y rtl -y tb --top-module tb_ae_link -o tb_ae_link
./obj_dir/tb_ae_link
```

Swap `tb_ae_link` for any other testbench to run one block. The unit tests
compare each block against a reference model of its rules, under random
stimulus plus directed cases.
