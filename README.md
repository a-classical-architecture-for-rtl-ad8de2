# A broadcast quantum-instruction pipeline for superconducting-qubit control

This is the synthesizable digital part of a classical control system for a
superconducting quantum processor. An ordinary CPU runs the quantum program. It
never executes a "quantum instruction". Instead it stores bytes to a reserved
memory-mapped window. A small decoder next to the CPU turns each store into one
or more short **IQE instructions** ("instrument" instructions). It broadcasts
them over a star of registers to every waveform generator (AWG) and every
digitizer in the chassis.

Three ideas carry the design:

1. **The address names a group of qubits; the data names the operation.** One
   byte store applies one gate to one predefined *partition*: a single qubit, a
   pair, or any set of qubits. Changing which qubits a partition contains is a
   configuration write, not a new instruction. That write can come through the
   configuration stream between runs, or from the program itself in real time
   as an IQE instruction over the same broadcast.
2. **Every device hears everything and keeps what concerns it.** Each IQE
   instruction carries a partition identifier. Each device holds a small table
   of identifiers (its *partition mask*) and drops the rest. One instruction
   reaches any number of devices in the same cycle.
3. **Nothing plays when it arrives.** Devices queue what they accept and start
   only on a global trigger. The trigger reaches all of them in the same clock
   cycle, and it can be repeated a given number of times at a given interval.
   Timing across devices therefore does not depend on when each instruction
   arrived.

Digitizers demodulate and discriminate their readout windows. They send one
result word per measurement back to a result memory next to the CPU, which the
program reads with ordinary loads.

## Structure

```
             MMIO loads/stores                       configuration command stream
   CPU  ───────────────────────┐                    (one 32-bit word per cycle)
 (outside)                     ▼                               │
                        ┌──────────────┐  trigger   ┌─────────────────────────┐
                        │  iqe_driver  │───────────►│ star_tree (registers,   │
                        │ exec_pipeline│  IQE instr │ equal depth to all      │
                        │ trigger_gen  │───────────►│ leaves, fan-out 10)     │
                        │ regfile, cmd │            └────┬───────────┬────────┘
                        └──────┬───────┘                 │           │
                   fmr reads   │                         ▼           ▼
                        ┌──────┴──────┐          awg_unit × 8   digitizer_unit × 2
                        │ system_ram  │◄── result_arbiter ◄──────────┘
                        └─────────────┘                 │               ▲
   instr_ram (CPU program memory, port brought out)   DAC ports      ADC ports
```

`qcs_top` holds one chassis: the driver, 8 AWGs and 2 digitizers, each with 4
channels. There is one clock domain, and reset is asynchronous and active-low.
The CPU, the backplane, the clocking and the converters are outside the RTL.
Their signals are the top's ports.

| Module | Role |
|---|---|
| `qarch_pkg` | MMIO addresses, region sizes, `iqe_instr_t`, `trig_t`, `seq_entry_t`, opcodes |
| `iqe_driver` | `cmd_parser` + `iqe_driver_regfile` + `exec_pipeline` + `trigger_gen` |
| `exec_pipeline` | decodes MMIO requests, expands gates into IQE instructions, answers `fmr` loads |
| `trigger_gen` | emits `count` trigger pulses, `interval` cycles apart; the last one is flagged |
| `star_tree` | balanced register tree; every output has the same latency |
| `awg_unit` | `cmd_parser`, `awg_regfile`, `broadcast_parser`, `instr_queue`, `queue_sequencer`, `pulse_generator` |
| `digitizer_unit` | `cmd_parser`, `dig_regfile`, `broadcast_parser`, `instr_queue`, `queue_sequencer`, `ring_buffer` ×4, `data_process` |
| `result_arbiter` | round-robin merge of digitizer results into the result memory's write port |
| `system_ram`, `instr_ram` | result memory (5120 words) and CPU program memory (16384 words) |

## The MMIO window

| Address | Size | Store means | Load means |
|---|---|---|---|
| `0x40001000` | word | trigger: interval, **issues the train** | – |
| `0x40001004` | word | trigger: repeat count | – |
| `0x40001008` | word | trigger: channel mask (32 bits) | – |
| `0x40002000` | word | Wait *t* cycles, sent to every device | – |
| `0x40003000` | 0x1400 words | – | `fmr`: result word *j* at `+4j` |
| `0x40010000` | 0x4000 bytes | single-qubit gate *g* on qubit *k* (`sb` to `+k`) | – |
| `0x40014000` | 0x8000 bytes | two-qubit gate *g* on pair *k* | – |
| `0x4001C000` | 0x8000 bytes | raw Play of waveform *w* on channel group *k* | – |
| `0x40024000` | 0x4000 bytes | application-defined operation *g* on group *k* | – |

The sizes give room for 16,384 qubits. A gate store's partition identifier is
`base[region] + k`, with one base register per region. The reset values place the
four regions back to back in a 17-bit identifier space (0, 0x4000, 0xC000,
0x14000). The all-ones identifier is reserved for Wait and is accepted by every
device.

**Trigger order.** The trigger is written as three stores: mask, count, and last
the interval. The store to the base address is the one that starts the train.
A trigger store stalls the bus while a train is still being sent, so two trains
never overlap.

Any other address inside the CPU's request is counted in `drv_err_count` and
otherwise ignored.

## Gate expansion and its stall

Each of the SQ, TQ and APP regions has a 256-entry *gate map* in the driver's
register file. The map takes the stored byte (the gate index) to `{start,
length}` in a 1024-entry table of instruction templates. A template is `{op,
operand, param}`, and `op` is Wait, Play, Mask or NOP. A gate with *L* templates is
emitted as *L* consecutive IQE instructions, one per cycle, all carrying the
store's partition identifier. NOP templates produce an empty cycle. While a
gate expands, `mmio_ready` is low for *L* cycles: this is the pipeline's only
stall besides the trigger stall. A Play store (region PLAY) needs no table: it
becomes one Play whose operand is the stored byte and whose parameters come
from a preserved register.

A **Mask** template makes a real-time partition-mask write. Its operand holds
the target device's slot in bits 27:20 and a mask entry index in bits 7:0. Its
param holds the entry's valid bit (31) and channel set (27:24). Every device's
broadcast parser lets a Mask instruction through without filtering and without
queueing it. The device whose slot matches writes the entry one cycle later.
The entry takes the partition identifier of the store that expanded the
template. So a gate such as "join" stored at `ADDR_SQ + 9` puts a chosen
device channel into qubit 9's partition. From then on, that channel accepts
the instructions sent to qubit 9. A configuration-stream write to the same
register file in the same cycle wins.

The CPU port is a valid/ready request. A stalled request must hold its address
and data. A load answers with `mmio_rvalid` one cycle after it is accepted.

## Inside a device: queue, trigger and repetition

An accepted instruction goes through three parts of the device's queue:

* **Queue_gate** is a 16-entry FIFO. It drains one instruction per cycle except
  while the device is *active*, that is, between the first trigger of a train
  and the end of its last round. This keeps instructions meant for the next
  round from being mixed into, or cleared with, the round being played.
* **Queue_delay / Queue_ID** are filled together. A Wait adds its time to a
  pending delay. A Play stores `{channels, waveform, parameters}` in Queue_ID
  and the pending delay in Queue_delay at the same index, then clears the
  pending delay. So `Queue_delay[i]` is the spacing, in cycles, between entry
  *i-1* and entry *i*.

Triggers work as follows. Channel *c* of a device listens to trigger-mask bit
`(trig_base + c) mod 32`. A trigger with any of those bits set starts a round:

* entry 0 starts `Queue_delay[0] + 1` cycles after the trigger;
* entry *i* starts `max(Queue_delay[i], 1)` cycles after entry *i-1*;
* each start goes to the channels the entry names that the trigger enabled.

A round ends when the last entry has started and the engines are idle. Then the
round counter advances. If that trigger carried the *last* flag, the queue is
cleared and the device becomes inactive, which releases anything waiting in
Queue_gate. Every repetition of a train replays the same entries. A trigger
that arrives while a round is still running is counted in `dev_missed` and
ignored, but its *last* flag is kept.

Overflow has two forms, both shown on `dev_overflow`, which is sticky. An
instruction that finds Queue_gate full is dropped. So is a Play that finds
Queue_ID (256 entries) full.

**AWG.** A start looks the waveform index up in the *Mapping* table, which gives
`{start, length}` in the channel's 1024-sample memory. Each selected channel
then streams that range to its DAC port, one 16-bit sample per cycle, with
`dac_valid` high. A channel restarted while playing switches to the new
waveform.

**Digitizer.** Each ADC channel writes a 1024-sample circular buffer every
cycle. A Play with waveform index 128 or more is a measurement. Its parameter
word gives the sampling window: `[15:0]` is the offset after the current sample
and `[31:16]` the length. The engine reads each window sample as soon as it has
been written and accumulates

    I = Σ x[k]·cos[k mod 64]      Q = Σ x[k]·sin[k mod 64]

using the channel's 64-entry tables. It then decides

    state = ((wI·I + wQ·Q) >>> 16) > thr        (signed)

The result word `{count[15:0], 15'b0, state}` is written to result address
`res_base[c] + n`. Here *n* counts the channel's measurements since `res_base`
was last written, and *count* counts all of its measurements. Results leave
through a one-entry slot per channel. A result that finds its slot still full
is lost and sets `dig_res_overflow`. A Play below 128 is ignored by the
digitizer.

## Latency

| From → to | Cycles |
|---|---|
| gate store accepted → first IQE instruction at the driver output | 1 |
| IQE instruction / trigger through the star (10 leaves, fan-out 10) | 2 |
| instruction at a device → entered in Queue_ID | 2 + Queue_gate wait |
| trigger store accepted → first DAC sample | 2 + 2 + 3 + Queue_delay[0] |
| last window sample written → result ready | 3 |

All devices receive the trigger in the same cycle, so entries with equal delays
start in the same cycle on every AWG. The end-to-end test checks this.

## Configuration command stream

All units share one 32-bit command stream that stands in for the chassis
backplane. A header word is `[31:28]` opcode, `[27:20]` slot and `[19:0]`
register address. Slot `0xFF` means every unit. Opcode 1 is followed by one data
word. Opcode 2 is followed by a count *N* and then *N* data words, written to
consecutive addresses. Any other opcode sets the unit's `cmd_err` bit. The driver
is slot 0, AWG *a* is slot 1+*a*, and digitizer *d* is slot 9+*d*.

| Unit | Address | Contents |
|---|---|---|
| driver | `0x00000+r` | partition base of region r (0 SQ, 1 TQ, 2 PLAY, 3 APP) |
| | `0x00004` | preserved Play parameters |
| | `0x01000 + r·256 + g` | gate map (r 0 SQ, 1 TQ, 2 APP): `[20:16]` length, `[9:0]` start |
| | `0x10000 + 2i` / `+2i+1` | template *i*: `[31:30]` op (0 NOP, 1 Wait, 2 Play), `[29:0]` operand / param |
| AWG | `0x000+e` | mask entry: `[31]` valid, `[27:24]` channels, `[16:0]` partition |
| | `0x100` | trig_base |
| | `0x01000+w` | Mapping of waveform w: `[26:16]` length, `[9:0]` start |
| | `0x10000 + c·0x1000 + a` | sample *a* of channel *c* |
| digitizer | `0x000+e`, `0x100` | mask entries, trig_base, as for the AWG |
| | `0x200+c` | `[31:16]` wQ, `[15:0]` wI |
| | `0x210+c` | threshold |
| | `0x220+c` | result base; writing it restarts the shot count |
| | `0x2000 + c·256 + k` | demodulation table: `[31:16]` sin, `[15:0]` cos |

## Where this design follows the architecture and where it fills gaps

These come from the architecture:

* the MMIO window and its sizes;
* the address-to-partition and value-to-instruction decode;
* Wait, Play and Trigger as the IQE instruction set;
* the broadcast with per-device partition masks;
* reconfiguring those masks either between runs or in real time over the star;
* the equal-latency star;
* the local queue with its three named parts, played on trigger;
* repeated triggers;
* measurement by IQ demodulation and discrimination;
* results returned to a memory that the CPU reads.

Everything else is this design's own choice. That includes:

* every field width and register map;
* the command-stream format;
* a fourth IQE instruction, Mask, for the real-time mask write, with its
  encoding and the rule that its entry takes the identifier of the store that
  issued it;
* the template table that implements gate expansion;
* the Mapping format;
* the split of Wait and Play between Queue_delay and Queue_ID;
* the *last* flag and the clear-after-last rule;
* the linear discriminator;
* the result-word format and addressing;
* one base register per MMIO region instead of a full address-to-partition table.

The architecture's own descriptions disagree on which trigger store starts a
train (the repeat count or the interval). This design follows the store order
of the trigger expansion, in which the interval is written last.

Not built:

* the CPU and its cores, which run the program and, as firmware, the syndrome decoder;
* the backplane and its links between chassis;
* clock generation and distribution;
* the DACs and ADCs;
* feedback triggers from measurement results;
* logical-level instructions that pack a whole logical cycle into one store.
  An `app` operation can stand for at most one template of 16 IQE
  instructions, which is far short of a logical cycle;
* the daisy-chain alternative for linking chassis.

## Limits to know about

* Queue entries with Queue_delay 0 start one cycle apart, not in the same cycle.
  Two Plays meant to be simultaneous on one device must be one entry with
  several channels, which the mask's channel set gives.
* The result memory holds one result per 32-bit word, 5120 in all. One
  syndrome round of a distance-90 patch (8,099 ancillas) would not fit without
  packing bits.
* The default top is one chassis. `star_tree` takes any number of leaves and any
  fan-out, but links between chassis are not modelled.
* The driver does not know whether devices are still playing. A trigger train
  whose interval is shorter than a round produces missed triggers, which are
  counted but not replayed.
* Waveform and template memories have no reset. Load them before use.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog. The testbenches
include `tb/tb_macros.svh` (and the unit tests `tb/tb_cmd.svh`), so run from
the repository root:

    verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
        -Irtl -Itb rtl/qarch_pkg.sv tb/tb_qcs_top.sv --top-module tb_qcs_top
    ./obj_dir/Vtb_qcs_top +verilator+rand+reset+2

`tb_qcs_top` runs the top at its default size (8 AWGs, 2 digitizers) in a few
seconds. It configures every unit through the command stream and then runs a
small Bell-state-like program as MMIO stores:

* a Wait, an H gate on qubit 0, a CNOT on pair 0 and a measurement of qubit 0;
* a trigger repeated three times;
* an H gate on qubit 1 stored while the rounds run;
* a second, overlapping trigger train;
* an H on qubit 9, which no device accepts; then a Mask gate that adds AWG 2 to
  qubit 9's partition; then an H on qubit 9 that AWG 2 plays;
* `fmr` loads of the six results;
* 300 raw Plays to overflow one AWG's queue.

It counts and requires each mechanism: the gate-expansion stall, trigger
repetition, partition filtering, the Queue_gate hold, queue overflow, the
trigger-store stall, a missed trigger, a real-time mask write, and results
read back through `fmr`. It
also checks every DAC sample, the trigger-to-sample latency and the alignment
of two AWGs.

`tb_syndrome_round` runs a repeated syndrome-extraction round at the same
size. Six data qubits and two ancillas get H on the ancillas, four layers of
two-qubit gates, H again, measurement and reset, with Waits between layers. That
is 15 stores, one per layer, because a partition names all the qubits of a
layer. The test checks that the 15 stores issue well inside one round of 250
cycles (1 µs at 250 MHz). It also checks that one repeated trigger plays the
round three times with every sample and every result correct and no trigger
missed.

The block tests compare against models written in the testbench:

* software IQ demodulation and discrimination;
* a queue and delay model;
* per-channel DAC streams;
* an IQE instruction scoreboard for random MMIO traffic.

Each test has been shown to fail on a copy of its module with one deliberate
fault, for example a dropped slot check, an inverted discriminator or a
non-accumulating Wait.
