# THOR: a fully connected spiking core that updates 32 neurons per clock

THOR is a digital neuromorphic core with N = 256 leaky integrate-and-fire (LIF)
neurons. Every neuron connects to every other through an N × N crossbar of
4-bit synapses. The synapses learn on-line with spike-driven synaptic
plasticity (SDSP). Its organisation follows the ODIN processor. The main idea
is how it runs a **neuron event**: the spike of one neuron `i` adds row `i` of
the crossbar to all N neurons. ODIN does this one synaptic operation (SOP) at a
time, in two cycles per SOP. THOR keeps both the neuron state and the synapses
in two interleaved memory banks and has P = 32 neuron and synapse logic lanes.
While one group of P neurons is being computed and written back to one bank,
the next group is read from the other bank. A neuron event of 256 SOPs
therefore takes N/P + 1 = 9 cycles. Spikes produced during the event go to two
independent scheduler threads. One feeds them back into the core as new
events. The other sends them off-chip.

This repository holds synthesizable SystemVerilog for the complete core, with
N and P as parameters: memories, lanes, pipeline, schedulers, controller, AER
ports and SPI configuration port. It also has a self-checking testbench for
every block and two end-to-end testbenches against a reference model.

```
             SPI (sck, mosi, miso)        AER in (addr, req, ack)
                    │                            │
               spi_slave                    aer_input
                    └──────────┐        ┌────────┘
                               controller ◄──── spike_scheduler (input thread)
                      stage R ┌────┴────┐                 ▲
                              ▼         ▼                 │ spike vector
                        neuron_core ◄─► synapse_core      │ + offset
                      (2 banks × 7     (2 banks of        │
                       sub-banks, P     4P-bit words,  ───┤
                       LIF lanes)       P SDSP lanes)     ▼
                                                    spike_scheduler (output thread)
                                                          │
                                                     aer_output ──► AER out
```

## 1. The interleaved neuron event

This is the part that needs the most care. Everything else is built around it.

**Groups and banks.** The neurons are split into G = N/P groups of P
consecutive neurons. Group `g` holds neurons `g·P … g·P+P−1`. It lives in bank
`g mod 2`, entry `g / 2`, of both the neuron memory and the synapse memory. A
sweep over groups 0, 1, 2, … therefore alternates between the banks.

**Two-stage pipeline.** The controller issues one slot per cycle: `{op, group,
lane mask, pre}`.

| cycle | stage R (read)                        | stage W (compute and write back)          |
|-------|---------------------------------------|-------------------------------------------|
| k     | read group g from bank g%2             | —                                         |
| k+1   | read group g+1 from bank (g+1)%2       | lanes update group g, write bank g%2      |
| k+2   | read group g+2 from bank g%2           | lanes update group g+1, write bank (g+1)%2 |

Each memory bank is a single-port array with a registered output. The read
issued in stage R therefore appears at the start of stage W. In W:

- the synapse core puts the P weights of row `pre` on `weights`;
- the neuron core puts the P neuron states on `wr_states`;
- P LIF lanes compute the new potential and calcium;
- P SDSP lanes compute the new weights from the same (pre-update) neuron states.

Both cores write back to the bank they read from, in the same cycle. A bank is
therefore either read or written in a cycle, never both, as long as two slots
for the same bank are never issued back to back. Consecutive groups of a sweep
always differ in bank parity. Between two sweeps the controller spends one
cycle in IDLE to accept the next event. That cycle covers the case of a
single-group synapse event followed by a slot for the same bank. Assertions in
both cores flag any violation in simulation.

A neuron event is G issue cycles plus one final write cycle. With N = 256 and
P = 32 that is 9 cycles for 256 SOPs. Back to back, a new event can start every
G + 1 cycles, counting the controller's accept cycle. The end-to-end
testbenches time every sweep that is not stalled. They check that its G groups
are issued in G consecutive cycles.

**Spike vectors.** In stage W the neuron core also outputs a P-bit vector of
the lanes that fired and the group's first neuron number (`spike_offset =
g·P`). Both scheduler threads receive it in the same cycle.

**Stall.** A neuron event can produce up to G non-empty spike vectors. The
output thread cannot drop any of them. The controller issues a group only if
the output FIFO has room for it and for the vector still in stage W. Otherwise
it holds the sweep (`stall`) until the AER output has drained an entry. The
input thread is never waited for, because it is emptied only by the controller
itself, and waiting for it could deadlock. If it overflows, the vector is
dropped and a sticky flag is set, which can be read over SPI. The paper states
that a FIFO of N/P entries suffices. The stall and the overflow flag are this
design's way of keeping that promise safe when the output side is slow or a
cascade of recurrent spikes is long.

## 2. Neuron state and the LIF lane

Each neuron has 7 bytes of state. Each bank of the neuron memory is split into
7 sub-banks, one per byte. Each sub-bank is P bytes wide and N/2P entries
deep, so the write enable of each byte of each lane is separate.

| byte | field                  | written during operation                      |
|------|------------------------|-----------------------------------------------|
| 0    | membrane potential     | yes                                           |
| 1    | leak                   | no, configuration only                        |
| 2    | firing threshold       | no, configuration only                        |
| 3    | SDSP membrane threshold| no, configuration only                        |
| 4    | calcium                | only while learning is enabled                |
| 5    | calcium thresholds th2 (bits 7:4) and th1 (bits 3:0) | no, configuration only |
| 6    | calcium threshold th3 (bits 3:0) | no, configuration only              |

Write gating follows this table. The leak, threshold and calcium-threshold
bytes are written only by the SPI port. The calcium byte is not written at all
while learning is off. With learning off, the core's reads also leave the four
sub-banks of bytes 3–6 disabled, because the lanes do not use them in that
mode. Each sub-bank has its own read enable for this.

The LIF lane (`lif_neuron`) is combinational. Its rules are:

- **Synaptic operation.** `v ← clamp(v + w, 0, 255)`, where `w` is the signed
  4-bit weight (−8…+7). If `v ≥ threshold`, the neuron spikes, `v ← 0`, and,
  with learning on, calcium increments (saturating at 15).
- **Time reference (leak).** `v ← max(v − leak, 0)`. With learning on, calcium
  decrements (not below 0).
- A lane outside the slot's mask keeps its state and does not spike.

## 3. Synapses and SDSP learning

The synapse memory holds N² 4-bit weights in two banks of 4P-bit words. One
word is the P weights from one pre-synaptic neuron to one group. Its address is
`pre·(N/2P) + g/2` in bank `g mod 2`. At N = 256 and P = 32 that is
2 × 1,024 words × 128 bits = 256 Kbit.

Each interleave bank is a column of standard-cell banks of S bits. Each of
these banks is a full word (4P bits) wide and S/4P words deep, so the whole
array has 4N²/S of them.

- On an access, a decoder enables only the bank that holds the word. The
  others stay idle.
- On a read, the bank's number is registered and drives the read-out
  multiplexer in the next cycle.

Small banks mean cheaper decoding inside each bank but a wider multiplexer
outside. The parameter S lets that trade-off be explored. The default
S = 2N² gives one bank per column.

The SDSP lane (`sdsp_synapse`) updates a weight that took part in a
synaptic operation, if learning is enabled. It uses the post-synaptic neuron's
state **before** this operation's update:

- potentiate (+1, stopping at +7) if `v ≥ mem_th` and `th1 ≤ Ca < th3`;
- depress (−1, stopping at −8) if `v < mem_th` and `th1 ≤ Ca < th2`;
- otherwise leave it unchanged.

With learning off, the synapse word is read but never written back.

## 4. The multi-threaded scheduler

`spike_scheduler` is one thread. It is instantiated twice with the same code:

- the **input thread** is paced by the controller and turns spikes back into
  neuron events;
- the **output thread** is paced by the AER output port.

A thread has three parts:

- a FIFO of N/P entries of `{offset, spike vector}`, which takes every
  non-empty vector;
- a decoder that picks the lowest-numbered spike of the head entry not yet sent;
- a status register of P bits that remembers which spikes of the head entry
  have been sent.

Its FSM has four states:

1. **IDLE:** the FIFO is empty.
2. **SEND_SPIKE:** it presents `offset + index` with `out_valid` and waits for
   the consumer's `send_next`.
3. **UPDATE_STATUS:** it marks the spike as sent. If every spike of the entry
   is now marked, it goes to POP.
4. **POP:** it drops the entry and clears the status. It returns to SEND_SPIKE,
   or to IDLE if the FIFO is empty.

A thread sends at most one spike every two cycles. Both threads push in the
same cycle that the neuron core produces a vector, so internal and outgoing
traffic never wait for each other.

## 5. Events and the controller

The controller is an FSM with IDLE, RUN (one slot per cycle) and CFG_RD (waits
one cycle for a memory read over SPI). In IDLE it serves, in priority order:

1. a pending SPI access,
2. a spike from the input thread (a neuron event for that neuron),
3. an event from the AER input.

An AER input address is `{type[1:0], pre[log2 N−1:0], post[log2 N−1:0]}`, 18
bits at N = 256.

| type | event            | what the core does                                                   |
|------|------------------|----------------------------------------------------------------------|
| 0    | neuron event     | a sweep over all groups adding row `pre` to every neuron             |
| 1    | synapse event    | one slot for the group of `post`, with only the lane of `post` enabled |
| 2    | time reference   | a sweep over all groups applying the leak (and calcium decay)        |
| 3    | —                | ignored                                                              |

Spikes produced by any of these events go to both threads. The output port
sends the neuron number (8 bits at N = 256).

## 6. Off-chip ports

**AER.** Both directions use a four-phase handshake, and each incoming control
signal passes through a two-flop synchroniser.

- On the input side, the address must be stable while REQ is high. ACK is
  raised when the controller takes the event and dropped after REQ falls.
- On the output side, REQ rises with a new address. It falls after ACK is seen.
  The next REQ waits until ACK has fallen.

**SPI.** The port uses mode 0, MSB first, and has no chip select. SCK and MOSI
are sampled with the system clock, so each SCK phase must last at least three
clock cycles. Frames are 32 bits: `{we, target[1:0], addr[20:0], data[7:0]}`.

| target | addr                            | data                                             |
|--------|---------------------------------|--------------------------------------------------|
| 0      | register number                 | reg 0 bit 0: learning enable; reg 1 (read): {output-FIFO overflow, input-FIFO overflow} |
| 1      | `{neuron, byte[2:0]}`           | one state byte                                   |
| 2      | `{pre, post[log2 N−1:1]}`       | two weights: even `post` in bits 3:0, odd in 7:4 |

- A write frame takes effect after its 32nd bit.
- A read frame is recognised after its 24th bit. The selected byte comes out on
  MISO during bits 25 to 32, so the eight data bits the master sends are ignored.
- A read needs the core to be idle briefly. If the controller is busy, the
  answer can take a few cycles longer, so the master should leave a few extra
  system-clock cycles after the 24th SCK edge.
- SPI accesses are served between events and never interrupt a sweep.

## 7. Parameters and sizes

| parameter | default | meaning                                               |
|-----------|---------|-------------------------------------------------------|
| N         | 256     | neurons; a power of two                               |
| P         | 32      | parallel lanes; a power of two, P ≥ 4 and N ≥ 2P      |
| S         | 2N² = 131,072 | bits per synapse SCM bank; 4P times a power of two, at most 2N² |

The schedulers' FIFO depth is N/P.

At the defaults the memories hold:

- neuron state: 2 banks × 7 sub-banks × 4 entries × 32 bytes = 1,792 bytes;
- synapses: 262,144 bits.

All memories are flip-flop arrays (`scm_bank`), modelling standard-cell
memories. Synthesis infers them as memory cells.

Measured with back-to-back neuron events at N = 256:

| P   | cycles per neuron event | SOPs per cycle |
|-----|-------------------------|----------------|
| 8   | 33                      | 7.8            |
| 16  | 17                      | 15.1           |
| 32  | 9                       | 28.4           |
| 64  | 5                       | 51.2           |
| 128 | 4                       | 64             |

At P = N/2 the output FIFO has only two entries. While an earlier event's
spikes are still leaving, the room check (pending entry, vector in flight,
new vector) holds every sweep for one cycle, so P = 128 takes 4 cycles per
event rather than N/P + 1 = 3.

For comparison, the published throughput of 7.84 GSOP/s at 400 MHz works out
to 19.6 SOPs per cycle. That is about 13 cycles per 256-SOP event, or 70 % of
the 9-cycle peak here. How the published figure was measured is not
stated. Here the events were already queued inside the core. Events that
arrive one by one over the AER handshake are spaced further apart.

## 8. Where this design departs from the source description or fills gaps

These follow the published description:

- the all-to-all N-neuron network with 7-byte neuron state and 4-bit SDSP
  synapses, from the ODIN baseline;
- two banks per memory, with seven byte sub-banks in the neuron memory;
- P parallel lanes and the 9-cycle neuron event;
- two identical scheduler threads with FIFO, decoder, status register and the
  four-state FSM, with a FIFO depth of N/P;
- AER input and output, and SPI access to all memories;
- write gating of the read-only and calcium bytes, and read gating of the
  learning bytes while learning is off.

These are this design's own choices, because the description is silent on
them:

- reset, which is active-low and asynchronous;
- the event-type encoding and the AER address layout;
- the SPI frame format and the register map;
- the controller's priorities;
- the stall on the output FIFO and the drop-with-flag on the input FIFO;
- the decode order, lowest neuron first;
- the handshake details;
- the weight arithmetic, with a signed 4-bit weight and a potential saturated
  to 0…255.

Not built or different:

- **Memory figures.** The stated synapse-memory size (64 KB) is twice what
  65,536 4-bit synapses need. The stated neuron-memory size (4 KB) is more than
  7 bytes × 256. The RTL stores exactly what the organisation requires.
- **AER input placement.** The AER input is described as part of the
  controller. Here it is its own module, placed next to the controller.
- **SRAM synapse memory.** The SRAM version of the synapse memory was
  explored as an alternative and not chosen. It would be built from 32-bit
  macros, several per row. It is not built here. The bank size finally chosen
  is not stated, so S defaults to the simplest case.
- **Physical implementation.** Clock-gating cells, input gating, the SRAM
  alternative that was explored, pads and layout have no RTL here. In this
  design, gating shows up only as memory enables.
- **Neuron models.** Only the LIF model is present, with no Izhikevich neurons
  (the description removes them as well).

## 9. Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and a watchdog ends it if it
hangs. To run any of them with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/thor_pkg.sv tb/tb_thor_top.sv --top-module tb_thor_top -Mdir obj -o sim
obj/sim
```

| testbench            | what it checks |
|----------------------|----------------|
| `tb_scm_bank`, `tb_neuron_memory`, `tb_synapse_memory` | random reads and writes with byte enables against a model. The synapse memory is also tested built from 256-bit banks. |
| `tb_lif_neuron`, `tb_sdsp_synapse` | random states against the update rules above |
| `tb_spike_fifo`, `tb_spike_scheduler` | random push/pop and spike traffic. Every spike comes out once, in order, and overflow is flagged. |
| `tb_aer_input`, `tb_aer_output`, `tb_spi_slave` | handshake rules with random delays, and frame decoding |
| `tb_neuron_core`, `tb_synapse_core` | pipelined sweeps against a model, including bank alternation and sweep length |
| `tb_controller` | priorities, sweep issue, stall and register access |
| `tb_thor_top` | the whole core at N = 64, P = 8, with 1,024-bit synapse banks (about 15 s) |
| `tb_thor_full` | the same test at the default N = 256, P = 32 (about 40 s) |
| `tb_thor_throughput` | back-to-back neuron events at N = 256 for P = 8 … 128. It checks the event spacing, the spikes and the stalls, and prints the cycles per event (about 45 s). |

The two end-to-end testbenches drive the core only through its pins (SPI and
AER) and run in three phases:

- **Configuration.** Random thresholds, leaks, potentials and weights are
  loaded over SPI.
- **Random traffic, learning off, then on.** Random neuron, synapse and time
  reference events are sent over AER. A reference model computes every update,
  every cascade of recurrent spikes and every weight change. At the end, every
  neuron's potential and calcium and every touched synapse row are read back
  over SPI and compared, and the AER output stream is compared with the
  model's.
- **Overload.** A slow AER receiver and a strongly recurrent setup force
  output stalls and an input-FIFO overflow. The overflow is then read back from
  the status register.

They count how often each mechanism occurred:

- neuron, synapse and leak events;
- recurrent spikes;
- weight changes;
- SPI reads;
- stall cycles;
- timed sweeps;
- reads with the learning sub-banks gated (the testbench also checks that none
  of them touched those sub-banks).

A mechanism that never occurred counts as a failure. Each block was also
checked against a deliberately broken copy (for example a threshold compare
changed from `≥` to `>`, a bank select forced to 0, or a scheduler address bit
inverted), and its testbench reported failures for every one of them.
